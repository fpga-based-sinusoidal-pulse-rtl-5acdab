// spwm_seq_mon: checker for one spwm_seq instance (testbench helper).
//
// Works out the expected notch/pulse lengths of a half cycle on its own:
// pulse i (1..N) spans (90/N)*(2i-1) -/+ (90/N)*K*sin((2i-1)*90/N degrees)
// degrees, scaled to HALF_TICKS ticks and rounded. Then, from the first
// polarity change on, it measures every run of the main switching signal
// in clocks (a run ends where mss or pcs changes) and compares it with
// expected length * DIV, checks the state number reported during the run,
// and checks that each half cycle lasts HALF_TICKS * DIV clocks. Segments
// of zero length (N = 1 at K = 1 has no notches) are skipped. It counts
// HALVES half cycles and then raises `done`.
module spwm_seq_mon #(
  parameter int unsigned N          = 3,
  parameter int unsigned K_PERMIL   = 1000,
  parameter int unsigned HALF_TICKS = 50_000,
  parameter int unsigned DIV        = 10,
  parameter int unsigned HALVES     = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       mss,
  input  logic       pcs,
  input  logic [7:0] seg,
  output int         checks,
  output int         failures,
  output logic       done
);
  int unsigned exp_len [2*N+1];
  int unsigned expected_total;
  int unsigned first_nz, last_nz;   // first and last segment of non-zero length

  initial begin
    real a_r, a_f, step_deg;
    int unsigned prev;
    step_deg = 90.0 / real'(N);
    prev = 0;
    expected_total = 0;
    for (int i = 1; i <= N; i++) begin
      a_r = step_deg * real'(2*i-1)
            - step_deg * (real'(K_PERMIL)/1000.0) * $sin(real'(2*i-1) * step_deg * 3.14159265358979 / 180.0);
      a_f = 2.0 * step_deg * real'(2*i-1) - a_r;
      exp_len[2*i-2] = int'($floor(a_r / 180.0 * real'(HALF_TICKS) + 0.5)) - prev;
      exp_len[2*i-1] = int'($floor(a_f / 180.0 * real'(HALF_TICKS) + 0.5))
                       - int'($floor(a_r / 180.0 * real'(HALF_TICKS) + 0.5));
      prev = int'($floor(a_f / 180.0 * real'(HALF_TICKS) + 0.5));
    end
    exp_len[2*N] = HALF_TICKS - prev;
    first_nz = 0;
    while (exp_len[first_nz] == 0) first_nz++;
    last_nz = 2*N;
    while (exp_len[last_nz] == 0) last_nz--;
  end

  // next segment after k that has a non-zero length
  function automatic int unsigned next_nz(int unsigned k);
    int unsigned j;
    j = k + 1;
    while (j < 2*N && exp_len[j] == 0) j++;
    return j;
  endfunction

  logic started, prev_mss, prev_pcs;
  int unsigned run, k, halves, half_clocks;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      started <= 1'b0; prev_mss <= 1'b0; prev_pcs <= pcs;
      run <= 0; k <= 0; halves <= 0; half_clocks <= 0;
      checks <= 0; failures <= 0; done <= 1'b0;
    end else begin
      prev_mss <= mss;
      prev_pcs <= pcs;
      if (!started) begin
        if (pcs != prev_pcs) begin
          started <= 1'b1; run <= 1; k <= first_nz; half_clocks <= 1;
        end
      end else if (!done) begin
        if (mss != prev_mss || pcs != prev_pcs) begin
          // run k just ended
          checks <= checks + 1;
          if (run != exp_len[k] * DIV) begin
            failures <= failures + 1;
            $display("FAIL N=%0d K=%0d: segment %0d lasted %0d clocks, expected %0d",
                     N, K_PERMIL, k, run, exp_len[k] * DIV);
          end
          run <= 1;
          if (pcs != prev_pcs) begin
            checks <= checks + 2;
            if (k != last_nz || half_clocks != HALF_TICKS * DIV) begin
              failures <= failures + 1;
              $display("FAIL N=%0d: half cycle ended after segment %0d, %0d clocks", N, k, half_clocks);
            end
            k <= first_nz;
            half_clocks <= 1;
            halves <= halves + 1;
            if (halves + 1 == HALVES) done <= 1'b1;
          end else begin
            k <= next_nz(k);
            half_clocks <= half_clocks + 1;
          end
        end else begin
          run <= run + 1;
          half_clocks <= half_clocks + 1;
        end
        // state number and switching signal agree with the segment
        if (!(mss != prev_mss || pcs != prev_pcs) && run == 2) begin
          checks <= checks + 1;
          if (seg != 8'(k) || mss != k[0]) begin
            failures <= failures + 1;
            $display("FAIL N=%0d: in segment %0d state=%0d mss=%0b", N, k, seg, mss);
          end
        end
      end
    end
  end
endmodule
