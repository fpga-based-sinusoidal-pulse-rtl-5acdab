// spwm_sweep_tb: the pulse-count sweep N = 1, 3, 5, 7, 9, 11 at K = 1, and
// N = 11 at K = 0.5, each on its own spwm_seq instance with a 1000-tick
// half cycle (tick on every clock). For every configuration it checks the
// segment lengths and half-cycle length (spwm_seq_mon), and it measures the
// fundamental of the bipolar output (level = mss, signed by pcs) over one
// full cycle with a discrete Fourier sum. Direct modulation makes each
// pulse's area equal to that of the sine over its sector, so the fundamental
// amplitude must be close to K times that of a full sine (within 4 % for
// N >= 3); N = 1 is a square wave with fundamental 4/pi. The total harmonic
// distortion of the unfiltered waveform is printed for each N.
module spwm_sweep_tb;
  localparam int NCFG = 7;
  localparam int HALF = 1000;
  localparam int CFG_N [NCFG] = '{1, 3, 5, 7, 9, 11, 11};
  localparam int CFG_K [NCFG] = '{1000, 1000, 1000, 1000, 1000, 1000, 500};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #10 clk = ~clk;

  int checks = 0, failures = 0;
  int mc [NCFG], mf [NCFG];
  logic [NCFG-1:0] mdone, fdone;
  real fund [NCFG], on_frac [NCFG];

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    logic mss, pcs, hs;
    logic [$clog2(2*CFG_N[g]+2)-1:0] seg;
    spwm_seq #(.CLK_HZ(100_000), .TICK_DIV(1), .F_OUT_HZ(50), .N(CFG_N[g]), .K_PERMIL(CFG_K[g]))
      dut (.clk, .rst_n, .tick(1'b1), .mss, .pcs, .seg, .half_start(hs));
    spwm_seq_mon #(.N(CFG_N[g]), .K_PERMIL(CFG_K[g]), .HALF_TICKS(HALF), .DIV(1), .HALVES(4))
      mon (.clk, .rst_n, .mss, .pcs, .seg(8'(seg)), .checks(mc[g]), .failures(mf[g]), .done(mdone[g]));

    // Fourier sum over the full cycle that starts at the first positive
    // zero crossing after reset (the first cycle is skipped).
    real acc_s, acc_c;
    int  t, nonzero, cycles;
    always @(posedge clk) begin
      if (!rst_n) begin
        acc_s = 0.0; acc_c = 0.0; t = -1; nonzero = 0; cycles = 0; fdone[g] <= 1'b0;
      end else if (!fdone[g]) begin
        if (hs && pcs && t != -1) begin
          cycles++;
          if (cycles == 2) begin
            fund[g]    = 2.0 * $sqrt(acc_s*acc_s + acc_c*acc_c) / real'(2*HALF);
            on_frac[g] = real'(nonzero) / real'(2*HALF);
            fdone[g] <= 1'b1;
          end
          acc_s = 0.0; acc_c = 0.0; nonzero = 0; t = 0;
        end else if (hs && pcs) t = 0;
        if (t >= 0) begin
          real lv, ph;
          lv = mss ? (pcs ? 1.0 : -1.0) : 0.0;
          ph = 2.0 * 3.14159265358979 * (real'(t) + 0.5) / real'(2*HALF);
          acc_s += lv * $sin(ph);
          acc_c += lv * $cos(ph);
          nonzero += mss;
          t++;
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    wait (&mdone && &fdone);
    @(posedge clk);
    for (int g = 0; g < NCFG; g++) begin
      real want, thd;
      checks += mc[g];
      failures += mf[g];
      want = (CFG_N[g] == 1) ? 4.0 / 3.14159265358979 : real'(CFG_K[g]) / 1000.0;
      thd = $sqrt(on_frac[g] - fund[g]*fund[g]/2.0) / (fund[g] / $sqrt(2.0));
      $display("N=%0d K=%0.2f: fundamental %0.4f (expected about %0.4f), unfiltered THD %0.1f %%",
               CFG_N[g], real'(CFG_K[g]) / 1000.0, fund[g], want, 100.0 * thd);
      checks++;
      if (fund[g] < want * 0.96 || fund[g] > want * 1.04) begin
        failures++; $display("FAIL: fundamental out of range for N=%0d", CFG_N[g]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
