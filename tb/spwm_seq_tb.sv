// spwm_seq_tb: self-checking test of the sinusoidal-PWM sequencer.
//
// Runs two instances side by side. The first uses every default (50 MHz
// clock, 5 MHz tick, 50 Hz, N = 3, K = 1): its segment lengths must be
// 4167, 8333, 4167, 16666, 4167, 8333, 4167 ticks and each half cycle
// exactly 10 ms (500 000 clocks); this is checked against both the table
// below and the independent formula in spwm_seq_mon. The second uses a
// smaller clock (1 MHz, 1000-tick half cycle), N = 5 and K = 0.8 to cover
// another pulse count and the voltage factor. Ticks come from a counter in
// the testbench, not from tick_div.
module spwm_seq_tb;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #10 clk = ~clk;   // 50 MHz

  int checks = 0, failures = 0;

  // tick every 10 clocks
  int tcnt = 0;
  logic tick;
  always_ff @(posedge clk) tcnt <= (!rst_n || tcnt == 9) ? 0 : tcnt + 1;
  assign tick = (tcnt == 9);

  logic mss_a, pcs_a, hs_a, mss_b, pcs_b, hs_b;
  logic [2:0] seg_a;
  logic [3:0] seg_b;

  spwm_seq dut_a (.clk, .rst_n, .tick, .mss(mss_a), .pcs(pcs_a), .seg(seg_a), .half_start(hs_a));
  spwm_seq #(.CLK_HZ(1_000_000), .TICK_DIV(10), .F_OUT_HZ(50), .N(5), .K_PERMIL(800))
    dut_b (.clk, .rst_n, .tick, .mss(mss_b), .pcs(pcs_b), .seg(seg_b), .half_start(hs_b));

  int ca, fa, cb, fb;
  logic done_a, done_b;
  spwm_seq_mon #(.N(3), .K_PERMIL(1000), .HALF_TICKS(50_000), .DIV(10), .HALVES(4))
    mon_a (.clk, .rst_n, .mss(mss_a), .pcs(pcs_a), .seg(8'(seg_a)), .checks(ca), .failures(fa), .done(done_a));
  spwm_seq_mon #(.N(5), .K_PERMIL(800), .HALF_TICKS(1000), .DIV(10), .HALVES(6))
    mon_b (.clk, .rst_n, .mss(mss_b), .pcs(pcs_b), .seg(8'(seg_b)), .checks(cb), .failures(fb), .done(done_b));

  // Table check for the default (paper) configuration.
  int unsigned paper_len [7] = '{4167, 8333, 4167, 16666, 4167, 8333, 4167};

  // The zero-crossing flag must coincide with polarity changes.
  logic pcs_a_d;
  always_ff @(posedge clk) pcs_a_d <= pcs_a;

  initial begin
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    for (int s = 0; s < 7; s++) begin
      checks++;
      if (mon_a.exp_len[s] != paper_len[s]) begin
        failures++;
        $display("FAIL: formula gives %0d ticks for segment %0d, table %0d", mon_a.exp_len[s], s, paper_len[s]);
      end
    end
    // first clock after reset: positive half cycle, notch, state 0
    @(posedge clk); #1;
    checks++;
    if (!(pcs_a == 1'b1 && mss_a == 1'b0 && seg_a == 0 && hs_a)) begin
      failures++; $display("FAIL: reset state pcs=%0b mss=%0b seg=%0d", pcs_a, mss_a, seg_a);
    end
    wait (done_a && done_b);
    @(posedge clk);
    checks += ca + cb;
    failures += fa + fb;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && pcs_a != pcs_a_d) begin
    checks++;
    if (!hs_a) begin failures++; $display("FAIL: polarity changed without zero crossing flag"); end
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
