// tick_div_tb: checks the timing-tick divider at its default (divide by 10,
// 50 MHz -> 5 MHz) and at divide by 7: ticks exactly every DIV clocks, the
// first one DIV-1 clocks after reset is released, and the square wave high
// for the second half (DIV - DIV/2 clocks) of each period.
module tick_div_tb;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #10 clk = ~clk;

  int checks = 0, failures = 0;
  logic tick_a, wave_a, tick_b, wave_b;

  tick_div            dut_a (.clk, .rst_n, .tick(tick_a), .wave(wave_a));
  tick_div #(.DIV(7)) dut_b (.clk, .rst_n, .tick(tick_b), .wave(wave_b));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int n;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // after the n-th edge with reset released the count is c = n+1:
    // tick when c % DIV == DIV-1, wave when c % DIV >= DIV/2
    for (n = 0; n < 200; n++) begin
      @(posedge clk); #1;
      check(tick_a == (((n+1) % 10) == 9), $sformatf("tick DIV=10 at clock %0d", n));
      check(wave_a == (((n+1) % 10) >= 5), $sformatf("wave DIV=10 at clock %0d", n));
      check(tick_b == (((n+1) % 7) == 6),  $sformatf("tick DIV=7 at clock %0d", n));
      check(wave_b == (((n+1) % 7) >= 3),  $sformatf("wave DIV=7 at clock %0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
