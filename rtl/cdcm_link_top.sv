// cdcm_link_top: end-to-end CDCM link, transmitter -> fanout -> receiver.
//
// The test transmitter emits a CDCM stream (default CDCM-20-1 carrying
// PRBS15). A fanout node recovers the carried clock from it and either
// repeats the stream to its K slave ports or extracts the user bits. The
// receiver sits on slave port 0, recovers the clock again, captures the
// data and checks the PRBS15; the other slave ports are outputs. Everything
// runs from clk at the serial rate N*F0 (one cycle = one UI); the carrier
// F0 exists as the recovered-clock outputs and strobes. Fibre, optical
// modules and clock buffers are plain wires here. Configuration inputs are
// quasi-static. With the fanout in extractor mode slave ports carry plain
// data, so the receiver does not lock; that mode is observed on slave_o.
module cdcm_link_top
  import cdcm_pkg::*;
#(
  parameter int unsigned N      = 20,
  parameter int unsigned K      = 2,
  parameter int unsigned PREDIV = 4,
  parameter int unsigned DW     = $clog2(N),
  parameter int unsigned QW     = q_bits(N)
) (
  input  logic          clk,
  input  logic          rst,
  // transmitter
  input  code_e         code,
  input  pattern_e      pattern,
  input  logic          manchester_en,
  input  logic [DW-1:0] depth,
  input  logic          user_valid,
  input  logic [QW-1:0] user_data,
  output logic          tx_f0_tick,
  output logic          tx_sent_valid,
  output logic [QW-1:0] tx_sent_data,
  output logic          tx_serial,
  // fanout
  input  logic          fanout_extract,
  output logic [K-1:0]  slave_o,
  output logic          fanout_locked,
  output logic          fanout_clk_rep,
  // receiver on slave port 0
  input  logic [DW-1:0] rx_cap_ui,
  input  logic          rx_chk_start,
  output logic          rx_locked,
  output logic          rx_clk_rep,
  output logic          rx_bit_valid,
  output logic          rx_bit,
  output logic          rx_sym_valid,
  output logic          rx_code_err,
  output logic          rx_idle,
  output logic          rx_sym_bit,
  output logic [QW-1:0] rx_value,
  output logic          rx_synced,
  output logic [47:0]   rx_err_cnt,
  output logic [47:0]   rx_bit_cnt
);
  cdcm_transmitter #(.N(N), .DW(DW), .QW(QW)) u_tx (
    .clk(clk), .rst(rst), .code(code), .pattern(pattern),
    .manchester_en(manchester_en), .depth(depth),
    .user_valid(user_valid), .user_data(user_data),
    .f0_tick(tx_f0_tick), .sent_valid(tx_sent_valid), .sent_data(tx_sent_data),
    .ser_o(tx_serial)
  );

  cdcm_fanout #(.N(N), .K(K), .PREDIV(PREDIV)) u_fan (
    .clk(clk), .rst(rst), .cdcm_i(tx_serial), .extract(fanout_extract),
    .out_o(slave_o), .locked_o(fanout_locked), .clk_rep_o(fanout_clk_rep)
  );

  cdcm_receiver #(.N(N), .PREDIV(PREDIV), .DW(DW), .QW(QW)) u_rx (
    .clk(clk), .rst(rst), .cdcm_i(slave_o[0]), .cap_ui(rx_cap_ui),
    .unary(code == CODE_UNARY), .manchester_en(manchester_en && code != CODE_UNARY),
    .chk_start(rx_chk_start),
    .locked_o(rx_locked), .clk_rep_o(rx_clk_rep),
    .bit_valid_o(rx_bit_valid), .bit_o(rx_bit),
    .sym_valid_o(rx_sym_valid), .code_err_o(rx_code_err), .idle_o(rx_idle),
    .sym_bit_o(rx_sym_bit), .value_o(rx_value),
    .synced_o(rx_synced), .err_cnt_o(rx_err_cnt), .bit_cnt_o(rx_bit_cnt)
  );
endmodule
