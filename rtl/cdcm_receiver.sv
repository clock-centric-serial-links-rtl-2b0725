// cdcm_receiver: CDCM link receiver.
//
// The carried clock is recovered first (cdcm_clock_recovery, the PLL
// stand-in) directly from the incoming stream; everything else is clocked
// by it. Two data paths follow:
//  * capture flip-flop: samples the stream once per period at UI cap_ui
//    (1 + N/2 = 180 deg after the rising edge is the theoretical optimum),
//    which is all a CDCM-N-1 link needs. The captured bits feed an optional
//    Manchester decoder and a PRBS15 checker with error counter, as in the
//    CDCM test receiver.
//  * SIPO + decoder: the whole N-UI word is collected and decoded, which the
//    N-1.5 and unary codes need (more than one UI carries data).
// All data outputs are gated by lock. Timing: bit_o is valid (bit_valid_o)
// the cycle after the capture UI; sym outputs the cycle after the last UI of
// the word. The arrangement follows the CDCM receiver structure (PLL,
// multiplied capture clock, SIPO); the UI-clock modelling is this design's.
module cdcm_receiver
  import cdcm_pkg::*;
#(
  parameter int unsigned N      = 20,
  parameter int unsigned PREDIV = 4,
  parameter int unsigned DW     = $clog2(N),
  parameter int unsigned QW     = q_bits(N)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          cdcm_i,
  input  logic [DW-1:0] cap_ui,
  input  logic          unary,
  input  logic          manchester_en,
  input  logic          chk_start,
  output logic          locked_o,
  output logic          clk_rep_o,
  output logic          bit_valid_o,
  output logic          bit_o,
  output logic          sym_valid_o,
  output logic          code_err_o,
  output logic          idle_o,
  output logic          sym_bit_o,
  output logic [QW-1:0] value_o,
  output logic          synced_o,
  output logic [47:0]   err_cnt_o,
  output logic [47:0]   bit_cnt_o
);
  logic          cap, word_end;
  logic [N-1:0]  word;
  logic          word_valid;
  logic          md_valid, md_d;
  logic          chk_valid, chk_d;

  cdcm_clock_recovery #(.N(N), .PREDIV(PREDIV)) u_cr (
    .clk(clk), .rst(rst), .cdcm_i(cdcm_i), .cap_ui(cap_ui),
    .locked_o(locked_o), .ph_o(), .clk_rep_o(clk_rep_o),
    .word_end_o(word_end), .cap_o(cap)
  );

  // Capture flip-flop (clocked at the capture phase of the carried clock).
  always_ff @(posedge clk) begin
    if (rst) begin
      bit_valid_o <= 1'b0;
      bit_o       <= 1'b0;
    end else begin
      bit_valid_o <= cap && locked_o;
      if (cap) bit_o <= cdcm_i;
    end
  end

  manchester_dec u_mdec (
    .clk(clk), .rst(rst || !manchester_en), .valid_i(bit_valid_o), .d_i(bit_o),
    .valid_o(md_valid), .d_o(md_d), .viol_o()
  );

  assign chk_valid = manchester_en ? md_valid : bit_valid_o;
  assign chk_d     = manchester_en ? md_d     : bit_o;

  prbs15_checker u_chk (
    .clk(clk), .rst(rst), .start(chk_start || !locked_o),
    .valid_i(chk_valid), .d_i(chk_d),
    .synced_o(synced_o), .err_cnt_o(err_cnt_o), .bit_cnt_o(bit_cnt_o)
  );

  cdcm_sipo #(.N(N)) u_sipo (
    .clk(clk), .rst(rst), .ser_i(cdcm_i), .word_end(word_end),
    .word_o(word), .word_valid_o(word_valid)
  );

  cdcm_decoder #(.N(N), .QW(QW)) u_dec (
    .word_i(word), .unary(unary), .code_err_o(code_err_o), .idle_o(idle_o),
    .bit_o(sym_bit_o), .value_o(value_o)
  );

  assign sym_valid_o = word_valid && locked_o;
endmodule
