// cdcm_sipo: serial-in parallel-out converter of a CDCM receiver.
//
// Shifts the serial stream in one UI per cycle and, on the last UI of each
// word (word_end, from the clock recovery), presents the N bits of that
// word on word_o with bit 0 the first received, together with a one-cycle
// word_valid_o. The word boundary comes from the recovered carrier, not from
// the data, so no word alignment search is needed. Latency: word_o is valid
// the cycle after the last UI of the word was on ser_i.
module cdcm_sipo #(
  parameter int unsigned N = 20
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         ser_i,
  input  logic         word_end,
  output logic [N-1:0] word_o,
  output logic         word_valid_o
);
  logic [N-1:0] sr;
  logic [N-1:0] nxt;

  assign nxt = {ser_i, sr[N-1:1]};

  always_ff @(posedge clk) begin
    if (rst) begin
      sr           <= '0;
      word_o       <= '0;
      word_valid_o <= 1'b0;
    end else begin
      sr           <= nxt;
      word_valid_o <= word_end;
      if (word_end) word_o <= nxt;
    end
  end
endmodule
