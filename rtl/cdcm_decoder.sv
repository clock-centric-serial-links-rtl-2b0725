// cdcm_decoder: combinational decoder of one received CDCM word.
//
// A legal word is '0', '1', then a single run of ones and zeros: it equals
// the mask with bits 1..c set, c being its number of ones (1 <= c <= N-1).
// Anything else raises code_err_o (lost alignment, bit errors). For the
// duty-cycle codes (N-1 and N-1.5) the bit is 1 when c > N/2 and 0 below;
// c = N/2 with N even is a 50 % word, reported on idle_o (the N-1.5 idle
// symbol, or an N-1 transmitter at depth 0). For the unary code the value is
// c-1. The CDCM proposal only states that codes other than N-1 need extra
// decoding logic; this count-and-compare decoder is this design's own.
module cdcm_decoder
  import cdcm_pkg::*;
#(
  parameter int unsigned N  = 20,
  parameter int unsigned QW = q_bits(N)
) (
  input  logic [N-1:0]  word_i,
  input  logic          unary,
  output logic          code_err_o,
  output logic          idle_o,
  output logic          bit_o,
  output logic [QW-1:0] value_o
);
  int unsigned c;
  logic [N-1:0] mask;

  always_comb begin
    c = 0;
    for (int i = 0; i < N; i++) c += int'(word_i[i]);
    for (int i = 0; i < N; i++) mask[i] = (i >= 1) && (i <= int'(c));
    code_err_o = (word_i != mask) || (c == 0) || (c == N)
                 || (unary && (c - 1) > ((2 ** QW) - 1));
    idle_o     = !unary && (N % 2 == 0) && (c == N / 2);
    bit_o      = (c > N / 2);
    value_o    = (c >= 1) ? QW'(c - 1) : '0;
  end
endmodule
