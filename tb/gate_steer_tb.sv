// gate_steer_tb: drives every combination of enable, main switching signal
// and polarity, then a random sequence, and checks the registered T1/T2
// drive and output level one clock later against the truth table
// T1 = en&mss&pcs, T2 = en&mss&~pcs, level = +1 / -1 / 0.
module gate_steer_tb;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #10 clk = ~clk;

  int checks = 0, failures = 0;
  logic en, mss, pcs, gp, gn;
  logic signed [1:0] level;

  gate_steer dut (.clk, .rst_n, .en, .mss, .pcs, .gate_pos(gp), .gate_neg(gn), .level);

  task automatic apply(input logic e, m, p);
    logic ep, en_;
    en <= e; mss <= m; pcs <= p;
    @(posedge clk); #1;
    ep  = e && m && p;
    en_ = e && m && !p;
    checks++;
    if (gp !== ep || gn !== en_ || level !== (ep ? 2'sd1 : en_ ? -2'sd1 : 2'sd0)) begin
      failures++;
      $display("FAIL: en=%0b mss=%0b pcs=%0b -> T1=%0b T2=%0b level=%0d", e, m, p, gp, gn, level);
    end
  endtask

  initial begin
    en = 0; mss = 0; pcs = 0;
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (gp || gn) begin failures++; $display("FAIL: drive active in reset"); end
    rst_n <= 1'b1;
    for (int v = 0; v < 8; v++) apply(v[2], v[1], v[0]);
    for (int n = 0; n < 200; n++) apply(1'($urandom), 1'($urandom), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
