// load_matrix_ctrl: priority load sequencer ("load matrix").
//
// Matches the connected load to the power the sources can deliver. The user
// ranks the loads: prio[r] is the index of the load with rank r (rank 0 is
// the most important). Loads are always on as a prefix of that ranking: the
// first n_on ranks are switched on, the rest off. Once per step (every
// STEP_CYCLES clocks) the controller makes at most one change:
//   - if the loads that are on draw more than p_avail, the lowest-ranked one
//     that is on is switched off;
//   - otherwise, if the next-ranked load still fits (sum + its power <=
//     p_avail), it is switched on.
// So loads come on one by one from high to low priority until the summed
// power reaches the available power, and go off in the reverse order when
// the available power drops, as the paper describes. The paper gives this
// behaviour but not its mechanism; the prefix counter, the one-change-per-
// step rule and the step period are this design's choices.
//
// Interface: load_pw[j] is the power of load j and p_avail the available
// power, both in watts; load_on[j] drives the contactor of load j.
// Timing: load_on is registered and changes at most once per step. Reset
// (synchronous, active low) switches every load off and restarts the step
// timer. The sum uses the load powers of the current clock, so a change of
// a load's rating takes effect at the next step.
module load_matrix_ctrl #(
  parameter int unsigned NUM_LOADS   = 3,           // loads in the matrix (paper: TV, CFL, pump)
  parameter int unsigned PWR_W       = 16,          // width of power values, W
  parameter int unsigned STEP_CYCLES = 50_000_000,  // clocks per step (1 s at 50 MHz)
  localparam int unsigned IW = (NUM_LOADS > 1) ? $clog2(NUM_LOADS) : 1,
  localparam int unsigned NW = $clog2(NUM_LOADS + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [PWR_W-1:0]     p_avail,
  input  logic [PWR_W-1:0]     load_pw [NUM_LOADS],
  input  logic [IW-1:0]        prio    [NUM_LOADS],
  output logic [NUM_LOADS-1:0] load_on,
  output logic [NW-1:0]        n_on,
  output logic                 step,      // high in the clock a step is taken
  output logic                 sw_on,     // a load is switched on this step
  output logic                 sw_off     // a load is switched off this step
);

  localparam int unsigned CW  = (STEP_CYCLES > 1) ? $clog2(STEP_CYCLES) : 1;
  localparam int unsigned SUMW = PWR_W + NW;

  logic [CW-1:0]   step_cnt;
  logic [SUMW-1:0] sum_on;
  logic [SUMW-1:0] next_pw;

  always_ff @(posedge clk) begin
    if (!rst_n)                              step_cnt <= '0;
    else if (step_cnt == CW'(STEP_CYCLES-1)) step_cnt <= '0;
    else                                     step_cnt <= step_cnt + 1'b1;
  end
  assign step = (step_cnt == CW'(STEP_CYCLES-1));

  // Power drawn by the ranks that are on, and power of the next rank.
  always_comb begin
    sum_on  = '0;
    next_pw = '0;
    for (int r = 0; r < NUM_LOADS; r++) begin
      if (NW'(r) < n_on)  sum_on  = sum_on + SUMW'(load_pw[prio[r]]);
      if (NW'(r) == n_on) next_pw = SUMW'(load_pw[prio[r]]);
    end
  end

  assign sw_off = step && (n_on != '0) && (sum_on > SUMW'(p_avail));
  assign sw_on  = step && !sw_off && (n_on != NW'(NUM_LOADS))
                  && (sum_on + next_pw <= SUMW'(p_avail));

  always_ff @(posedge clk) begin
    if (!rst_n)       n_on <= '0;
    else if (sw_off)  n_on <= n_on - 1'b1;
    else if (sw_on)   n_on <= n_on + 1'b1;
  end

  // Contactor outputs: load prio[r] is on when its rank is below n_on.
  always_comb begin
    load_on = '0;
    for (int r = 0; r < NUM_LOADS; r++)
      if (NW'(r) < n_on) load_on[prio[r]] = 1'b1;
  end

  a_one_change: assert property (@(posedge clk) disable iff (!rst_n) !(sw_on && sw_off));
  a_bounded:    assert property (@(posedge clk) disable iff (!rst_n) n_on <= NW'(NUM_LOADS));

endmodule
