// spwm_seq: direct sinusoidal-PWM sequencer.
//
// Produces the two control signals of the centre-tap inverter:
//   mss - main switching signal: N pulses per half cycle whose widths follow
//         a sine (K*(180/N)*sin((2i-1)*pi/2N) degrees), the same pattern in
//         both half cycles;
//   pcs - polarity control signal: high during the positive half cycle, low
//         during the negative one, so it is a square wave at the output
//         frequency.
// The paper generates these with a state machine that walks through 2N+1
// states per half cycle, notch, pulse, notch, ..., notch, each held for a
// pre-computed number of timing ticks (7 states for N = 3). This module keeps
// the same state sequence: `seg` is that state (0 .. 2N; even = notch with
// mss low, odd = pulse with mss high). Instead of storing per-state lengths
// it holds the tick position `t` inside the half cycle and the index `p` of
// the current pulse, and compares `t` with the rising and falling edge ticks
// of pulse p. The edge ticks are constants computed at elaboration from N,
// K and the half-cycle length (spwm_pkg::edge_tick), so a zero-width pulse
// (small K) simply never raises mss.
//
// Half cycle length: HALF_TICKS = CLK_HZ / (TICK_DIV * 2 * F_OUT_HZ); with
// the paper's 50 MHz clock, 5 MHz tick and 50 Hz output this is 50 000 ticks
// = 10 ms, and the default (N = 3, K = 1) segment lengths are
// 4167, 8333, 4167, 16666, 4167, 8333, 4167 ticks (0.833, 1.667, 0.833,
// 3.333, 0.833, 1.667, 0.833 ms). The paper's listing uses 16667 and 8334
// for two of them, which adds 2 ticks per half cycle, and derives the
// polarity signal from a separate free-running 10 ms counter; here pcs
// toggles exactly at the end of each half cycle so the two never drift.
//
// Interface: `tick` is the clock enable from tick_div. `half_start` is high
// for the clock in which a new half cycle begins (t = 0), i.e. at each zero
// crossing. Outputs are registered; reset (synchronous, active low) starts a
// positive half cycle at t = 0 with mss low.
module spwm_seq #(
  parameter int unsigned CLK_HZ   = 50_000_000, // board clock (paper: 50 MHz)
  parameter int unsigned TICK_DIV = 10,         // clocks per tick (paper: 10)
  parameter int unsigned F_OUT_HZ = 50,         // output frequency (paper: 50 Hz)
  parameter int unsigned N        = 3,          // pulses per half cycle (paper: 3)
  parameter int unsigned K_PERMIL = 1000        // voltage factor K in 1/1000 (paper: K = 1)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         tick,
  output logic                         mss,
  output logic                         pcs,
  output logic [$clog2(2*N+2)-1:0]     seg,
  output logic                         half_start
);

  localparam int unsigned HALF_TICKS = CLK_HZ / (TICK_DIV * 2 * F_OUT_HZ);
  localparam int unsigned TW = $clog2(HALF_TICKS + 1);
  localparam int unsigned PW = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned SW = $clog2(2*N+2);

  // Edge tick constants of every pulse.
  logic [TW-1:0] rise_t [N];
  logic [TW-1:0] fall_t [N];
  for (genvar i = 0; i < N; i++) begin : g_edges
    assign rise_t[i] = TW'(spwm_pkg::edge_tick(N, K_PERMIL, HALF_TICKS, i, 1'b0));
    assign fall_t[i] = TW'(spwm_pkg::edge_tick(N, K_PERMIL, HALF_TICKS, i, 1'b1));
  end

  logic [TW-1:0] t, t_next;
  logic [PW-1:0] p, p_next;
  logic          wrap;

  always_comb begin
    wrap   = (t == TW'(HALF_TICKS - 1));
    t_next = wrap ? '0 : t + 1'b1;
    p_next = p;
    if (wrap)
      p_next = '0;
    else if (p != PW'(N - 1) && t_next >= fall_t[p])
      p_next = p + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      t   <= '0;
      p   <= '0;
      pcs <= 1'b1;
    end else if (tick) begin
      t <= t_next;
      p <= p_next;
      if (wrap) pcs <= ~pcs;
    end
  end

  // State number and switching signal follow from (p, t).
  logic after_rise, after_fall;
  assign after_rise = (t >= rise_t[p]);
  assign after_fall = (t >= fall_t[p]);
  assign seg        = SW'(2 * p) + SW'(after_rise) + SW'(after_fall);
  assign mss        = after_rise && !after_fall;
  assign half_start = (t == '0);

  // The pulse index can only leave a pulse after its falling edge.
  a_p_order: assert property (@(posedge clk) disable iff (!rst_n)
                              (tick && p_next != p && !wrap) |-> (t_next >= fall_t[p]));

endmodule
