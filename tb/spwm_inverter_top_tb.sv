// spwm_inverter_top_tb: end-to-end test of the inverter controller at a
// reduced clock (1 MHz, so one 50 Hz half cycle is 1000 ticks of 10 clocks)
// and a 1000-clock load step; N = 3 and K = 1 as in the paper.
//
// The source voltages are moved through a day of events: nothing present,
// grid back (charging), battery reaching its cut-off, grid failure
// (inverting from the battery), battery exhausted with the generator
// running, everything lost. Meanwhile the available power is moved so the
// load matrix switches loads on and off, and a PV model feeds the tracker.
// Checked independently of the RTL:
//   - mode, switches and charge enable against the source table;
//   - while inverting: per half cycle N pulses on exactly one gate (T1 in
//     the positive half, T2 in the negative), total pulse time equal to the
//     sum of the pulse widths from the pulse formula, half cycle length;
//   - no gate pulses outside INVERT mode, never both gates on;
//   - loads switched in priority order.
// Every mechanism (each mode, charge cut-off, T1 and T2 pulses, polarity
// changes, load switched on, load switched off, tracker reversal) is
// counted and a mechanism that never happened counts as a failure.
module spwm_inverter_top_tb;
  import spwm_pkg::*;
  localparam int CLK_HZ = 1_000_000;
  localparam int DIV    = 10;
  localparam int N      = 3;
  localparam int HALF   = CLK_HZ / (DIV * 2 * 50);   // 1000 ticks
  localparam int LSTEP  = 1000;
  localparam int NL     = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #10 clk = ~clk;

  int checks = 0, failures = 0;

  logic [15:0] v_pv, v_bat, i_pv, p_avail;
  logic [11:0] v_grid, v_dg;
  logic pv_sample;
  logic [15:0] load_pw [NL];
  logic [1:0]  load_prio [NL];
  logic mss, pcs, gate_t1, gate_t2, zero_cross, grid_sw, dg_sw, chg_en;
  logic [2:0] pwm_state;
  logic signed [1:0] out_level;
  mode_t mode;
  src_status_t status;
  logic [NL-1:0] load_on;
  logic [1:0] loads_on_count;
  logic [15:0] pv_v_ref;

  spwm_inverter_top #(.CLK_HZ(CLK_HZ), .TICK_DIV(DIV), .F_OUT_HZ(50), .N_PULSES(N),
                      .K_PERMIL(1000), .NUM_LOADS(NL), .LOAD_STEP_CYCLES(LSTEP)) dut (
    .clk, .rst_n, .v_pv_mv(v_pv), .v_bat_mv(v_bat), .v_grid_dv(v_grid), .v_dg_dv(v_dg),
    .i_pv_ma(i_pv), .pv_sample, .p_avail_w(p_avail), .load_pw, .load_prio,
    .mss, .pcs, .pwm_state, .gate_t1, .gate_t2, .out_level, .zero_cross,
    .mode, .status, .grid_sw, .dg_sw, .chg_en, .load_on, .loads_on_count, .pv_v_ref);

  // ---- expected pulse time per half cycle, from the pulse formula --------
  function automatic int edge_of(int i, bit fall);
    real c, hw;
    c  = (real'(i) - 0.5) * 180.0 / real'(N);
    hw = 90.0 / real'(N) * $sin((2.0 * real'(i) - 1.0) * 3.14159265358979 / (2.0 * real'(N)));
    return int'($floor((fall ? c + hw : c - hw) / 180.0 * real'(HALF) + 0.5));
  endfunction
  int exp_on_clocks;
  initial begin
    exp_on_clocks = 0;
    for (int i = 1; i <= N; i++) exp_on_clocks += (edge_of(i, 1) - edge_of(i, 0)) * DIV;
  end

  // ---- mechanism counters -------------------------------------------------
  int n_mode [4];
  int n_cutoff = 0, n_t1 = 0, n_t2 = 0, n_pol = 0, n_lon = 0, n_loff = 0, n_rev = 0;
  int n_halves_checked = 0;

  // ---- gate monitor: per half cycle in INVERT mode -------------------------
  logic t1_d, t2_d, pcs_d, dir_d, chg_d;
  mode_t mode_d;
  logic [NL-1:0] load_d;
  int t1_rises, t2_rises, t1_high, t2_high, half_len;
  bit half_clean;   // whole half cycle spent in INVERT mode
  always @(posedge clk) begin
    if (!rst_n) begin
      t1_d <= 0; t2_d <= 0; pcs_d <= pcs; mode_d <= MODE_OFF; chg_d <= 0; load_d <= '0; dir_d <= 1'b1;
      t1_rises = 0; t2_rises = 0; t1_high = 0; t2_high = 0; half_len = 0; half_clean = 0;
    end else begin
      t1_d <= gate_t1; t2_d <= gate_t2; pcs_d <= pcs; mode_d <= mode; load_d <= load_on;
      chg_d <= chg_en;
      if (mode == MODE_CHARGE && mode_d == MODE_CHARGE && chg_d && !chg_en) n_cutoff++;
      dir_d <= dut.u_mppt.dir_up;
      if (gate_t1 && !t1_d) begin t1_rises++; n_t1++; end
      if (gate_t2 && !t2_d) begin t2_rises++; n_t2++; end
      t1_high += gate_t1; t2_high += gate_t2;
      half_len++;
      if (mode != MODE_INVERT) half_clean = 0;
      checks++;
      if (gate_t1 && gate_t2) begin failures++; $display("FAIL: both gates on"); end
      if (mode != mode_d) n_mode[mode]++;
      if ((load_on & ~load_d) != '0) n_lon++;
      if ((load_d & ~load_on) != '0) n_loff++;
      if (dir_d != dut.u_mppt.dir_up) n_rev++;
      if (pcs != pcs_d) n_pol++;
    end
  end

  // Evaluate each half cycle as seen at the gates (one clock behind pcs).
  logic pcs_dd;
  always @(posedge clk) pcs_dd <= pcs_d;
  always @(posedge clk) if (rst_n && pcs_d != pcs_dd) begin
    // the half cycle that just ended had polarity pcs_dd
    if (half_clean) begin
      n_halves_checked++;
      checks += 3;
      if (half_len != HALF * DIV) begin
        failures++; $display("FAIL: half cycle of %0d clocks", half_len);
      end
      if (pcs_dd) begin
        if (t1_rises != N || t2_rises != 0 || t1_high != exp_on_clocks) begin
          failures++;
          $display("FAIL: positive half: T1 %0d pulses %0d clocks, T2 %0d pulses", t1_rises, t1_high, t2_rises);
        end
      end else begin
        if (t2_rises != N || t1_rises != 0 || t2_high != exp_on_clocks) begin
          failures++;
          $display("FAIL: negative half: T2 %0d pulses %0d clocks, T1 %0d pulses", t2_rises, t2_high, t1_rises);
        end
      end
    end
    t1_rises = 0; t2_rises = 0; t1_high = 0; t2_high = 0; half_len = 0;
    half_clean = (mode == MODE_INVERT);
  end

  // No gate activity outside INVERT mode (two clocks of pipeline slack).
  logic [1:0] inv_hist;
  always @(posedge clk) inv_hist <= {inv_hist[0], mode == MODE_INVERT};
  always @(negedge clk) if (rst_n && mode != MODE_INVERT && inv_hist == 2'b00) begin
    checks++;
    if (gate_t1 || gate_t2) begin failures++; $display("FAIL: gate driven in mode %0d", mode); end
  end

  // ---- PV model for the tracker ------------------------------------------
  // In daylight (v_pv_force < 0) the panel sits at the tracker's reference
  // voltage and a new sample comes every 50 clocks; at night the PV voltage
  // is forced and no samples are taken.
  int smp = 0;
  always @(posedge clk) begin
    int p;
    smp++;
    pv_sample <= (smp % 50 == 0) && (v_pv_force < 0);
    p = 60_000 - ((int'(pv_v_ref) - 16_800) * (int'(pv_v_ref) - 16_800)) / 200;
    if (p < 0) p = 0;
    v_pv <= (v_pv_force >= 0) ? 16'(v_pv_force) : pv_v_ref;
    i_pv <= 16'((p * 1000) / int'(pv_v_ref));
  end
  int v_pv_force = -1;

  // ---- helpers -------------------------------------------------------------
  task automatic sources(input int pv, bat, grid, dg);
    v_pv_force = pv; v_bat <= 16'(bat); v_grid <= 12'(grid); v_dg <= 12'(dg);
  endtask

  task automatic expect_mode(input mode_t m, input bit chg, input string what);
    repeat (4) @(posedge clk);
    #1;
    checks++;
    if (mode != m || grid_sw != (m == MODE_CHARGE) || dg_sw != (m == MODE_DG) || chg_en != chg) begin
      failures++;
      $display("FAIL %s: mode=%0d grid_sw=%0b dg_sw=%0b chg_en=%0b", what, mode, grid_sw, dg_sw, chg_en);
    end
  endtask

  task automatic wait_halves(input int h);
    repeat (h * HALF * DIV) @(posedge clk);
  endtask

  initial begin
    load_pw[0] = 100; load_pw[1] = 18; load_pw[2] = 186;   // TV, CFL, pump
    load_prio[0] = 2'd1; load_prio[1] = 2'd0; load_prio[2] = 2'd2;
    p_avail = 0; v_bat = 0; v_grid = 0; v_dg = 0;
    foreach (n_mode[m]) n_mode[m] = 0;
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;

    // 1. night, grid off, battery flat, generator stopped: nothing runs
    sources(0, 9_800, 0, 0);
    p_avail <= 400;
    expect_mode(MODE_OFF, 0, "no source");
    wait_halves(2);
    checks++; if (load_on != '0) begin failures++; $display("FAIL: loads on with no source"); end

    // 2. grid returns: charge from grid, loads on the grid
    sources(0, 11_500, 2_200, 0);
    expect_mode(MODE_CHARGE, 1, "grid charging");
    wait_halves(2);
    checks++; if (load_on != 3'b111) begin failures++; $display("FAIL: loads not all on (%b)", load_on); end

    // 3. battery reaches the 13.4 V cut-off while PV is up (PV tracked)
    sources(-1, 13_450, 2_200, 0);
    expect_mode(MODE_CHARGE, 0, "charge cut-off");

    // 4. grid fails: inverting from the battery for three cycles
    sources(-1, 12_600, 1_500, 0);
    expect_mode(MODE_INVERT, 0, "inverting");
    p_avail <= 130;   // pump must go
    wait_halves(6);
    checks++; if (load_on != 3'b011) begin failures++; $display("FAIL: load shedding (%b)", load_on); end
    checks++;
    if (int'(pv_v_ref) < 16_500 || int'(pv_v_ref) > 17_100) begin
      failures++; $display("FAIL: tracker at %0d mV, maximum at 16800 mV", pv_v_ref);
    end

    // 5. battery exhausted, PV gone, generator started
    sources(0, 9_900, 1_500, 2_250);
    p_avail <= 500;
    expect_mode(MODE_DG, 1, "generator");
    wait_halves(2);

    // 6. all sources lost: loads shed one by one
    sources(0, 9_900, 0, 0);
    expect_mode(MODE_OFF, 0, "all lost");
    wait_halves(2);
    checks++; if (load_on != '0) begin failures++; $display("FAIL: loads not shed"); end

    // mechanism report
    $display("modes entered: off=%0d charge=%0d invert=%0d dg=%0d", n_mode[0], n_mode[1], n_mode[2], n_mode[3]);
    $display("charge cut-off=%0d T1 pulses=%0d T2 pulses=%0d polarity changes=%0d",
             n_cutoff, n_t1, n_t2, n_pol);
    $display("half cycles checked=%0d loads on=%0d loads off=%0d tracker reversals=%0d",
             n_halves_checked, n_lon, n_loff, n_rev);
    checks += 9;
    if (n_mode[0] == 0 || n_mode[1] == 0 || n_mode[2] == 0 || n_mode[3] == 0) begin failures++; $display("FAIL: a mode never entered"); end
    if (n_cutoff == 0) failures++;
    if (n_t1 == 0) failures++;
    if (n_t2 == 0) failures++;
    if (n_pol == 0) failures++;
    if (n_halves_checked < 4) begin failures++; $display("FAIL: too few inverting half cycles checked"); end
    if (n_lon == 0) failures++;
    if (n_loff == 0) failures++;
    if (n_rev == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
