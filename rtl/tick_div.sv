// tick_div: timing-tick generator for the PWM sequencer.
//
// Counts board clocks and raises `tick` for one clock in every DIV clocks;
// `wave` is the matching square wave (low for the first DIV/2 clocks of each
// period, high for the rest), so `tick` marks its rising edge. With the
// paper's 50 MHz board clock and DIV = 10 this is the 5 MHz timing wave whose
// rising edges clock the pulse state machine (one tick = 200 ns). The paper
// toggles that wave every 5 clocks and clocks the state machine from it; here
// the state machine stays on the board clock and uses `tick` as a clock
// enable, which gives the same timing in a single clock domain.
//
// Timing: the first tick comes DIV clocks after reset is released, then one
// every DIV clocks. Reset is synchronous and active low.
module tick_div #(
  parameter int unsigned DIV = 10   // clocks per tick (paper: 10)
) (
  input  logic clk,
  input  logic rst_n,
  output logic tick,   // one-clock pulse every DIV clocks
  output logic wave    // square wave with period DIV clocks
);

  localparam int unsigned CW = (DIV > 1) ? $clog2(DIV) : 1;

  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n)                      cnt <= '0;
    else if (cnt == CW'(DIV - 1))    cnt <= '0;
    else                             cnt <= cnt + 1'b1;
  end

  assign tick = (cnt == CW'(DIV - 1));
  assign wave = (cnt >= CW'(DIV / 2));

endmodule
