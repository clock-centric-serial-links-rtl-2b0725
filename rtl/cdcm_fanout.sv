// cdcm_fanout: CDCM fanout / repeater node with K slave outputs.
//
// A CDCM fanout needs no SerDes: the carried clock is recovered from the
// master-port stream (cdcm_clock_recovery, standing for the zero-delay
// jitter-cleaning PLL and its feedback buffer) and a layer of D flip-flops,
// one per slave output, copies the input stream on a clock derived from it.
// The frequency of that flip-flop clock selects the function:
//  * extract = 0, repeater: flip-flops clocked at N*F0, half a UI after the
//    data edges; every UI is re-timed and the slave ports carry a copy of
//    the CDCM stream. Modelled as one UI-clock register (latency 1 UI).
//  * extract = 1, data extractor: flip-flops clocked at F0 on the falling
//    edge of the recovered clock (mid-period, UI 1 + N/2); each slave port
//    carries the user bit stream of a CDCM-N-1 link, one bit per period,
//    with no carrier left in it (latency 1 UI after the capture UI).
// The structure follows the CDCM fanout of the proposal; the optional FPGA
// that could alter the data per port is not built.
module cdcm_fanout #(
  parameter int unsigned N      = 20,
  parameter int unsigned K      = 2,
  parameter int unsigned PREDIV = 4
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         cdcm_i,
  input  logic         extract,
  output logic [K-1:0] out_o,
  output logic         locked_o,
  output logic         clk_rep_o
);
  localparam int unsigned DW = $clog2(N);
  logic cap;

  cdcm_clock_recovery #(.N(N), .PREDIV(PREDIV)) u_cr (
    .clk(clk), .rst(rst), .cdcm_i(cdcm_i), .cap_ui(DW'(1 + N / 2)),
    .locked_o(locked_o), .ph_o(), .clk_rep_o(clk_rep_o),
    .word_end_o(), .cap_o(cap)
  );

  for (genvar k = 0; k < K; k++) begin : g_ff
    always_ff @(posedge clk) begin
      if (rst)                 out_o[k] <= 1'b0;
      else if (!extract || cap) out_o[k] <= cdcm_i;
    end
  end
endmodule
