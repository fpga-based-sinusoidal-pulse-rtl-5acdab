// mode_ctrl: adaptive power controller (source selection).
//
// Chooses the operating mode from the logical source status and drives the
// source switches of the power stage:
//
//   PV/Bat  Grid  DG   mode         load fed by   battery      (paper row)
//     1      1    0    CHARGE       grid          charging        yes
//     0      1    1    CHARGE       grid          charging        yes
//     1      0    0    INVERT       battery       discharging     yes
//     0      0    1    DG           generator     charging        yes
//     1      1    1    CHARGE       grid          charging        assumed
//     0      1    0    CHARGE       grid          charging        assumed
//     1      0    1    INVERT       battery       discharging     assumed
//     0      0    0    OFF          nothing       idle            assumed
//
// The four marked rows are the paper's source/load table; the other four
// follow its preferences (grid first, generator only as a last resort).
// "PV/Bat" is pv_ok | bat_ok: the paper treats PV and battery as one source.
// Charging (chg_en) is enabled in CHARGE and DG mode until the battery
// reaches the 13.4 V cut-off (status.bat_full).
//
// Outputs: grid_sw closes the grid switch (S2), dg_sw the generator switch
// (S3), inv_en lets the inverter switch, chg_en runs the bi-directional
// converter as a charger. Timing: registered, one clock after the status.
// Reset (synchronous, active low) opens everything (MODE_OFF).
module mode_ctrl (
  input  logic                   clk,
  input  logic                   rst_n,
  input  spwm_pkg::src_status_t  status,
  output spwm_pkg::mode_t        mode,
  output logic                   grid_sw,
  output logic                   dg_sw,
  output logic                   inv_en,
  output logic                   chg_en
);
  import spwm_pkg::*;

  logic  pvb;
  mode_t mode_next;

  assign pvb = status.pv_ok | status.bat_ok;

  always_comb begin
    if (status.grid_ok)     mode_next = MODE_CHARGE;
    else if (pvb)           mode_next = MODE_INVERT;
    else if (status.dg_ok)  mode_next = MODE_DG;
    else                    mode_next = MODE_OFF;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mode    <= MODE_OFF;
      grid_sw <= 1'b0;
      dg_sw   <= 1'b0;
      inv_en  <= 1'b0;
      chg_en  <= 1'b0;
    end else begin
      mode    <= mode_next;
      grid_sw <= (mode_next == MODE_CHARGE);
      dg_sw   <= (mode_next == MODE_DG);
      inv_en  <= (mode_next == MODE_INVERT);
      chg_en  <= (mode_next == MODE_CHARGE || mode_next == MODE_DG) && !status.bat_full;
    end
  end

  // Grid and generator are never connected together.
  a_one_ac_source: assert property (@(posedge clk) disable iff (!rst_n) !(grid_sw && dg_sw));

endmodule
