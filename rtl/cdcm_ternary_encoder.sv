// cdcm_ternary_encoder: combinational CDCM-N-1.5 word encoder (N even).
//
// Carries one ternary symbol per carrier period: "no data", 0 or 1. Idle
// words have N/2 ones (header '1' included) and are a pure 50 % clock; a 0
// shortens the high time by one UI and a 1 lengthens it by one UI. For
// N = 4 this is the payload table na -> 10, 0 -> 00, 1 -> 11, and for
// N = 20 the table na -> 1^9 0^9, 0 -> 1^8 0^10, 1 -> 1^10 0^8 of the CDCM
// proposal; one formula covers both. Bit 0 is serialised first.
module cdcm_ternary_encoder
  import cdcm_pkg::*;
#(
  parameter int unsigned N = 20
) (
  input  logic         valid_i,  // 0: idle symbol
  input  logic         d_i,
  output logic [N-1:0] word_o
);
  int unsigned ones;

  always_comb begin
    ones = ternary_ones(N, valid_i, d_i);
    for (int i = 0; i < N; i++) word_o[i] = (i >= 1) && (i <= int'(ones));
  end

  initial assert (N >= 4 && N % 2 == 0) else $error("CDCM-N-1.5 needs an even N >= 4");
endmodule
