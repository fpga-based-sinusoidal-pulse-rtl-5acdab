// spwm_inverter_top_full_tb: the controller at its default parameters
// (50 MHz clock, 5 MHz tick, 50 Hz, N = 3, K = 1, three loads, 1 s load
// step). The grid is up first: the controller charges and the load matrix
// brings the CFL and then the TV on at 1 s steps (120 W available; the
// 186 W pump does not fit). Then the grid fails and the controller inverts
// from the battery for two full output cycles (40 ms). Each inverting half
// cycle must last 500 000 clocks (10 ms) and carry three pulses on one gate
// only, with pulse lengths 83 330, 166 660 and 83 330 clocks (1.667 ms,
// 3.333 ms, 1.667 ms), which are the paper's N = 3 pulse widths; each
// notch between them must be 41 670 clocks (0.833 ms).
module spwm_inverter_top_full_tb;
  import spwm_pkg::*;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #10 clk = ~clk;   // 50 MHz

  int checks = 0, failures = 0;

  logic [15:0] v_pv, v_bat, i_pv, p_avail;
  logic [11:0] v_grid, v_dg;
  logic pv_sample;
  logic [15:0] load_pw [3];
  logic [1:0]  load_prio [3];
  logic mss, pcs, gate_t1, gate_t2, zero_cross, grid_sw, dg_sw, chg_en;
  logic [2:0] pwm_state;
  logic signed [1:0] out_level;
  mode_t mode;
  src_status_t status;
  logic [2:0] load_on;
  logic [1:0] loads_on_count;
  logic [15:0] pv_v_ref;

  spwm_inverter_top dut (
    .clk, .rst_n, .v_pv_mv(v_pv), .v_bat_mv(v_bat), .v_grid_dv(v_grid), .v_dg_dv(v_dg),
    .i_pv_ma(i_pv), .pv_sample, .p_avail_w(p_avail), .load_pw, .load_prio,
    .mss, .pcs, .pwm_state, .gate_t1, .gate_t2, .out_level, .zero_cross,
    .mode, .status, .grid_sw, .dg_sw, .chg_en, .load_on, .loads_on_count, .pv_v_ref);

  // Runs of the output level while inverting: notch, pulse, notch, ...
  int unsigned exp_pulse [3] = '{83_330, 166_660, 83_330};
  localparam int unsigned NOTCH = 41_670;
  localparam int unsigned HALF_CLK = 500_000;

  int run, k, half_clk, halves, pulses;
  logic signed [1:0] lvl_d;
  logic pcs_d;
  bit armed;
  always @(posedge clk) begin
    if (!rst_n || mode != MODE_INVERT) begin
      armed = 0; run = 0; k = 0; half_clk = 0; lvl_d <= 0; pcs_d <= pcs;
    end else begin
      lvl_d <= out_level;
      pcs_d <= pcs;
      // start counting at the first gate-side zero crossing after inverting begins
      if (!armed) begin
        if (pcs != pcs_d) begin armed = 1; run = 0; k = 0; half_clk = 0; end
      end else begin
        run++; half_clk++;
        if (out_level != lvl_d) begin
          checks++;
          // a run of length `run` just ended (k even: notch, odd: pulse)
          if (k % 2 == 1) begin
            pulses++;
            if (run != exp_pulse[k/2] + 0 || lvl_d != (pcs_d ? 2'sd1 : -2'sd1)) begin
              failures++;
              $display("FAIL: pulse %0d lasted %0d clocks at level %0d", k/2, run, lvl_d);
            end
          end else if (run != NOTCH && k != 0) begin
            failures++;
            $display("FAIL: notch %0d lasted %0d clocks", k/2, run);
          end
          run = 0; k++;
        end
        if (pcs != pcs_d) begin
          halves++;
          checks += 2;
          if (half_clk != HALF_CLK) begin failures++; $display("FAIL: half cycle %0d clocks", half_clk); end
          if (k != 6) begin failures++; $display("FAIL: %0d level changes in a half cycle", k); end
          run = 0; k = 0; half_clk = 0;
        end
      end
    end
  end

  initial begin
    load_pw[0] = 100; load_pw[1] = 18; load_pw[2] = 186;
    load_prio[0] = 2'd1; load_prio[1] = 2'd0; load_prio[2] = 2'd2;
    v_pv = 0; v_bat = 12_000; v_grid = 2_200; v_dg = 0; i_pv = 0; pv_sample = 0;
    p_avail = 120;
    halves = 0; pulses = 0;
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (10) @(posedge clk);
    #1;
    checks++;
    if (mode != MODE_CHARGE || !grid_sw || !chg_en) begin failures++; $display("FAIL: not charging from grid"); end
    // two load steps at 1 s
    repeat (100_000_000) @(posedge clk);
    #1;
    checks++;
    if (load_on != 3'b011) begin failures++; $display("FAIL: loads %b after two steps", load_on); end
    // grid failure
    v_grid = 1_500;
    repeat (10) @(posedge clk);
    #1;
    checks++;
    if (mode != MODE_INVERT || grid_sw || chg_en) begin failures++; $display("FAIL: not inverting"); end
    repeat (2_600_000) @(posedge clk);
    checks += 2;
    if (halves < 4) begin failures++; $display("FAIL: only %0d inverting half cycles seen", halves); end
    if (pulses < 12) begin failures++; $display("FAIL: only %0d pulses seen", pulses); end
    $display("inverting half cycles checked=%0d pulses checked=%0d", halves, pulses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (110_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
