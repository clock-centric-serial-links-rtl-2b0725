// cdcm_unary_encoder: combinational CDCM-N-Q word encoder, maximal payload.
//
// The payload of P = N-2 bits holds the value v as v ones followed by zeros
// (unary code), so a period carries Q = floor(log2(N-1)) user bits and
// still has a single falling edge. For N = 5 (CDCM-5-2, the most efficient
// code, 40 %) the payload table is 00 -> 000, 01 -> 100, 10 -> 110,
// 11 -> 111, first printed bit sent first, as in the CDCM proposal.
// Word: bit 0 = '0', bit 1 = '1', bits 2..v+1 = '1', rest '0'.
module cdcm_unary_encoder
  import cdcm_pkg::*;
#(
  parameter int unsigned N  = 5,
  parameter int unsigned QW = q_bits(N)
) (
  input  logic [QW-1:0] v_i,
  output logic [N-1:0]  word_o
);
  always_comb begin
    for (int i = 0; i < N; i++) word_o[i] = (i >= 1) && (i <= int'(v_i) + 1);
  end

  initial assert (N >= 3 && (2 ** QW) - 1 <= N - 2) else $error("value range exceeds payload");
endmodule
