// mppt_tb: closes the loop around the tracker with a simple PV model in the
// testbench: the panel is held at the reference voltage and delivers
// P(V) = Pmax - (V - Vmp)^2 / 200 (mW, V in mV), i.e. current P/V.
// For three insolation cases (Vmp 17.0 V, 16.2 V, 14.5 V) it runs 150
// samples and checks that the reference ends within two steps of Vmp,
// that it never leaves its limits, and that each sample moves it by exactly
// one step (or onto a limit).
module mppt_tb;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #10 clk = ~clk;

  int checks = 0, failures = 0;
  logic sample, dir_up;
  logic [15:0] v_mv, i_ma, v_ref;

  mppt dut (.clk, .rst_n, .sample, .v_mv, .i_ma, .v_ref, .dir_up);

  function automatic int pv_ma(int v, int vmp, int pmax_mw);
    int p;
    p = pmax_mw - ((v - vmp) * (v - vmp)) / 200;
    if (p < 0) p = 0;
    return (p * 1000) / v;
  endfunction

  task automatic track(input int vmp, input int pmax);
    int v_before, diff;
    for (int n = 0; n < 150; n++) begin
      v_mv   <= v_ref;
      i_ma   <= 16'(pv_ma(int'(v_ref), vmp, pmax));
      sample <= 1'b1;
      v_before = int'(v_ref);
      @(posedge clk);
      sample <= 1'b0;
      @(posedge clk); #1;
      diff = int'(v_ref) - v_before;
      checks++;
      if (!((diff == 100 || diff == -100 || v_ref == 16'd12000 || v_ref == 16'd21000)
            && v_ref >= 16'd12000 && v_ref <= 16'd21000)) begin
        failures++; $display("FAIL: step from %0d to %0d", v_before, v_ref);
      end
    end
    checks++;
    if (int'(v_ref) < vmp - 200 || int'(v_ref) > vmp + 200) begin
      failures++; $display("FAIL: Vmp=%0d but reference settled at %0d", vmp, v_ref);
    end else
      $display("Vmp=%0d mV: reference %0d mV", vmp, v_ref);
  endtask

  initial begin
    sample = 0; v_mv = 0; i_ma = 0;
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (v_ref != 16'd15000) begin failures++; $display("FAIL: reset reference %0d", v_ref); end
    rst_n <= 1'b1;
    @(posedge clk);
    track(17_000, 75_000);   // full sun, 75 W panel
    track(16_200, 40_000);
    track(14_500, 15_000);   // low insolation
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
