// gate_steer: base-drive steering for the centre-tap inverter.
//
// The centre-tap stage has a positive switch group (T1, output +Vdc) and a
// negative group (T2, output -Vdc); with both open the output is 0. The
// main switching signal (mss) carries the PWM pulses and the polarity
// control signal (pcs) says which half cycle is running, so
//   gate_pos = en & mss &  pcs      (T1 group)
//   gate_neg = en & mss & ~pcs      (T2 group)
// which yields the positive pulse train in the first half cycle and the
// negative one in the second. `level` reports the resulting output state
// (+1, 0, -1) as a two's-complement number. The AND combination and the
// enable input are this design's reading of the paper, which shows the
// pulse, polarity and output waveforms but not the combining logic.
//
// Timing: outputs are registered, one clock after the inputs. Reset
// (synchronous, active low) opens both groups.
module gate_steer (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,        // inverter running
  input  logic              mss,       // main switching signal
  input  logic              pcs,       // polarity: 1 = positive half cycle
  output logic              gate_pos,  // base drive of T1 group
  output logic              gate_neg,  // base drive of T2 group
  output logic signed [1:0] level      // output state: +1, 0 or -1
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      gate_pos <= 1'b0;
      gate_neg <= 1'b0;
    end else begin
      gate_pos <= en & mss &  pcs;
      gate_neg <= en & mss & ~pcs;
    end
  end

  assign level = gate_pos ? 2'sd1 : (gate_neg ? -2'sd1 : 2'sd0);

  // The two groups must never conduct together (that would short the
  // battery through the transformer's centre tap).
  a_no_shoot_through: assert property (@(posedge clk) disable iff (!rst_n)
                                       !(gate_pos && gate_neg));

endmodule
