// mode_ctrl_tb: walks every combination of the five status bits and checks
// mode and switch outputs one clock later against the source table:
// grid present -> CHARGE (grid switch); else PV or battery -> INVERT
// (inverter on); else generator -> DG (generator switch); else OFF.
// Charging is enabled in CHARGE and DG mode unless the battery is full.
// The four rows printed in the paper are also checked by name.
module mode_ctrl_tb;
  import spwm_pkg::*;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #10 clk = ~clk;

  int checks = 0, failures = 0;
  src_status_t st;
  mode_t mode;
  logic grid_sw, dg_sw, inv_en, chg_en;

  mode_ctrl dut (.clk, .rst_n, .status(st), .mode, .grid_sw, .dg_sw, .inv_en, .chg_en);

  task automatic apply(input logic pv, bat, full, grid, dg);
    mode_t em;
    st <= '{pv_ok: pv, bat_ok: bat, bat_full: full, grid_ok: grid, dg_ok: dg};
    @(posedge clk); #1;
    if (grid)            em = MODE_CHARGE;
    else if (pv || bat)  em = MODE_INVERT;
    else if (dg)         em = MODE_DG;
    else                 em = MODE_OFF;
    checks++;
    if (mode != em || grid_sw != (em == MODE_CHARGE) || dg_sw != (em == MODE_DG) ||
        inv_en != (em == MODE_INVERT) ||
        chg_en != ((em == MODE_CHARGE || em == MODE_DG) && !full)) begin
      failures++;
      $display("FAIL: pv=%0b bat=%0b full=%0b grid=%0b dg=%0b -> mode=%0d g=%0b d=%0b i=%0b c=%0b",
               pv, bat, full, grid, dg, mode, grid_sw, dg_sw, inv_en, chg_en);
    end
  endtask

  // Paper rows: (PV/Bat, Grid, DG) -> battery status, load source.
  task automatic paper_row(input logic pvb, grid, dg, input bit charging, input mode_t load_src);
    apply(pvb, pvb, 1'b0, grid, dg);
    checks++;
    if (chg_en != charging || inv_en == charging || mode != load_src) begin
      failures++;
      $display("FAIL: paper row %0b%0b%0b", pvb, grid, dg);
    end
  endtask

  initial begin
    st = '0;
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (mode != MODE_OFF || grid_sw || dg_sw || inv_en || chg_en) begin
      failures++; $display("FAIL: reset outputs");
    end
    rst_n <= 1'b1;
    for (int v = 0; v < 32; v++) apply(v[4], v[3], v[2], v[1], v[0]);
    paper_row(1, 1, 0, 1'b1, MODE_CHARGE);   // charging, load on grid
    paper_row(0, 1, 1, 1'b1, MODE_CHARGE);   // charging, load on grid
    paper_row(1, 0, 0, 1'b0, MODE_INVERT);   // discharging, load on battery
    paper_row(0, 0, 1, 1'b1, MODE_DG);       // charging, load on generator
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
