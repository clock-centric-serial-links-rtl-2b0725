// cdcm_n1_encoder: combinational CDCM-N-1 word encoder.
//
// Builds one N-bit word per carrier period: bit 0 = '0', then a run of ones
// starting at bit 1, then zeros. The rising edge between bit 0 and bit 1 is
// the carried clock edge and never moves; the length of the run of ones
// carries the data bit. At depth 1 the counts are those of Table I of the
// CDCM proposal (N odd: (N-1)/2 or (N+1)/2 ones; N even: N/2-1 or N/2+1),
// giving a duty cycle of 50 % -/+ 1/2N (odd) or 1/N (even). Larger depths
// move the falling edge one more UI per step, as the test transmitter's
// 0..+/-45 % settings do for N = 20 (5 % per UI); depth 0 with N even
// gives a plain 50 % clock. Bit 0 is serialised first.
module cdcm_n1_encoder
  import cdcm_pkg::*;
#(
  parameter int unsigned N  = 20,
  parameter int unsigned DW = $clog2(N)
) (
  input  logic          d_i,
  input  logic [DW-1:0] depth,
  output logic [N-1:0]  word_o
);
  int unsigned ones;

  always_comb begin
    ones = n1_ones(N, d_i, int'(depth));
    for (int i = 0; i < N; i++) word_o[i] = (i >= 1) && (i <= int'(ones));
  end

  initial assert (N >= 3) else $error("CDCM-N-1 needs N >= 3");
endmodule
