// manchester_dec: Manchester decoder for the receiver side.
//
// Received bits arrive in pairs (D, not-D). The decoder groups them two by
// two and outputs the first bit of each pair, at half the input rate. A pair
// with equal halves is a violation (viol_o); after SLIP_CNT violating pairs
// in a row the pair boundary is moved by one bit. The CDCM proposal only
// describes the Manchester transmitter; this decoder is this design's own.
// Timing: valid_o/d_o/viol_o are registered, one cycle after the second bit
// of a pair.
module manchester_dec #(
  parameter int unsigned SLIP_CNT = 2
) (
  input  logic clk,
  input  logic rst,
  input  logic valid_i,
  input  logic d_i,
  output logic valid_o,
  output logic d_o,
  output logic viol_o
);
  localparam int unsigned VW = $clog2(SLIP_CNT + 1);
  logic          half, first;
  logic [VW-1:0] vcnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      half    <= 1'b0;
      first   <= 1'b0;
      vcnt    <= '0;
      valid_o <= 1'b0;
      d_o     <= 1'b0;
      viol_o  <= 1'b0;
    end else begin
      valid_o <= 1'b0;
      viol_o  <= 1'b0;
      if (valid_i) begin
        if (!half) begin
          first <= d_i;
          half  <= 1'b1;
        end else if (first == d_i) begin
          viol_o <= 1'b1;
          if (vcnt == VW'(SLIP_CNT - 1)) begin
            vcnt  <= '0;
            first <= d_i;        // slip: this bit opens the next pair
          end else begin
            vcnt <= vcnt + 1'b1;
            half <= 1'b0;
          end
        end else begin
          vcnt    <= '0;
          half    <= 1'b0;
          valid_o <= 1'b1;
          d_o     <= first;
        end
      end
    end
  end
endmodule
