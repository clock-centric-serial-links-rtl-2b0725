// cdcm_piso: N-bit parallel-in serial-out converter of a CDCM transmitter.
//
// Runs on the serial (UI) clock, N*F0. A free-running UI counter raises
// load_o for one cycle every N cycles; that pulse is the carrier-rate
// (F0) enable of the whole transmitter and the word on word_i is taken in
// that cycle. The word leaves on ser_o bit 0 first, starting the cycle after
// the load, through a single output register, so the stream is continuous:
// bit 0 of the next word follows bit N-1 of the previous one directly.
// This stands for the FPGA GTP/OSERDES serialiser of the CDCM proposal.
module cdcm_piso #(
  parameter int unsigned N = 20
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [N-1:0] word_i,
  output logic         load_o,
  output logic         ser_o
);
  localparam int unsigned CW = $clog2(N);
  logic [CW-1:0] cnt;
  logic [N-1:0]  sr;

  assign load_o = (cnt == '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt   <= '0;
      sr    <= '0;
      ser_o <= 1'b0;
    end else begin
      cnt <= (cnt == CW'(N - 1)) ? '0 : cnt + 1'b1;
      if (load_o) begin
        ser_o <= word_i[0];
        sr    <= word_i >> 1;
      end else begin
        ser_o <= sr[0];
        sr    <= sr >> 1;
      end
    end
  end
endmodule
