// manchester_enc: Manchester pre-encoder for a CDCM-N-1 transmitter.
//
// A toggle flip-flop, advanced once per carrier period (f0_tick), is XORed
// with the user bit. The user bit is held for two carrier periods, so the
// link carries D in the first period of the pair and not-D in the second:
// the stream is DC-balanced after every pair and the user rate is F0/2.
// This is the circuit of the CDCM-8-1 Manchester transmitter of the CDCM
// proposal; the toggle starts at 0 after reset (so D comes first), which is
// this design's choice.
//
// Timing: d_o is combinational from d_i and the toggle; phase_o is 0 during
// the first period of a pair. The toggle changes on the cycle after f0_tick,
// i.e. the word loaded at f0_tick uses the old phase.
module manchester_enc (
  input  logic clk,
  input  logic rst,
  input  logic f0_tick,  // one UI-long pulse per carrier period (word load)
  input  logic d_i,
  output logic d_o,
  output logic phase_o
);
  logic t_q;

  always_ff @(posedge clk) begin
    if (rst)          t_q <= 1'b0;
    else if (f0_tick) t_q <= ~t_q;
  end

  assign d_o     = d_i ^ t_q;
  assign phase_o = t_q;
endmodule
