// mppt: solar power regulator (maximum power point tracking).
//
// Holds the PV operating voltage reference v_ref (mV) and moves it towards
// the maximum power point of the PV curve by perturb and observe: at every
// new measurement (sample high) it forms the PV power v_mv * i_ma and
// compares it with the power of the previous measurement. If the power fell,
// the direction of perturbation is reversed; v_ref then moves one V_STEP_MV
// in the current direction. At the V_MIN_MV / V_MAX_MV limits the reference
// is clamped and the direction turned round. Near the maximum the reference
// ends up stepping back and forth around it.
// The paper only states that the regulator keeps the PV voltage at the
// maximum power point for insolation from 200 to 1000 W/m2; the algorithm,
// step size, limits and units are this design's choices.
//
// Timing: v_ref is registered and changes one clock after each sample; the
// power converter that follows it and the PV sensing are outside this block.
// Reset (synchronous, active low) loads V_INIT_MV, direction up, and forgets
// the previous power.
module mppt #(
  parameter int unsigned V_INIT_MV = 15_000,  // start reference, mV
  parameter int unsigned V_MIN_MV  = 12_000,  // lowest reference (PV "available" level)
  parameter int unsigned V_MAX_MV  = 21_000,  // highest reference, mV
  parameter int unsigned V_STEP_MV = 100      // perturbation step, mV
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sample,   // a new measurement is valid
  input  logic [15:0] v_mv,     // PV voltage, mV
  input  logic [15:0] i_ma,     // PV current, mA
  output logic [15:0] v_ref,    // PV voltage reference, mV
  output logic        dir_up    // current perturbation direction
);

  logic [31:0] p_now, p_prev;
  logic        have_prev;
  logic        dir_next;
  logic [16:0] v_up;
  logic [15:0] v_dn;

  assign p_now    = 32'(v_mv) * 32'(i_ma);
  assign dir_next = (have_prev && p_now < p_prev) ? ~dir_up : dir_up;
  assign v_up     = 17'(v_ref) + 17'(V_STEP_MV);
  assign v_dn     = v_ref - 16'(V_STEP_MV);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v_ref     <= 16'(V_INIT_MV);
      dir_up    <= 1'b1;
      p_prev    <= '0;
      have_prev <= 1'b0;
    end else if (sample) begin
      p_prev    <= p_now;
      have_prev <= 1'b1;
      if (dir_next) begin
        if (v_up >= 17'(V_MAX_MV)) begin
          v_ref  <= 16'(V_MAX_MV);
          dir_up <= 1'b0;
        end else begin
          v_ref  <= v_up[15:0];
          dir_up <= 1'b1;
        end
      end else begin
        if (v_ref <= 16'(V_MIN_MV + V_STEP_MV)) begin
          v_ref  <= 16'(V_MIN_MV);
          dir_up <= 1'b1;
        end else begin
          v_ref  <= v_dn;
          dir_up <= 1'b0;
        end
      end
    end
  end

  a_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                               v_ref >= 16'(V_MIN_MV) && v_ref <= 16'(V_MAX_MV));

endmodule
