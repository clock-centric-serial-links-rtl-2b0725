// cdcm_transmitter: CDCM test transmitter.
//
// The three stages of a CDCM transmitter, on one clock at the UI rate:
//  1. data source and pre-encoding: constant 0 or 1, alternating bits,
//     PRBS15, idle, or the user_data input; for the one-bit codes the bit
//     may be Manchester pre-encoded (each bit sent as D then not-D over two
//     periods, user rate F0/2);
//  2. a combinational encoder that builds the N-bit word of one carrier
//     period for the selected code: CDCM-N-1 with a modulation depth
//     (depth 1 = Table I, N = 20: 5 % per step up to +/-45 %), CDCM-N-1.5
//     (idle / 0 / 1) or the unary CDCM-N-Q (Q = floor(log2(N-1)) bits);
//  3. the PISO, which shifts the word out bit 0 first and produces the
//     carrier-rate enable f0_tick.
// sent_valid/sent_data report, in the f0_tick cycle, the user bit (before
// Manchester) or value put in the word being loaded; with Manchester on,
// only the first period of each pair reports it. Idle with the N-1 code is a
// 50 % clock for even N. The word of a given f0_tick appears on ser_o from
// the next cycle on. Pattern set and Manchester option follow the proposal's
// test transmitter; selecting the code at run time is this design's own.
module cdcm_transmitter
  import cdcm_pkg::*;
#(
  parameter int unsigned N  = 20,
  parameter int unsigned DW = $clog2(N),
  parameter int unsigned QW = q_bits(N)
) (
  input  logic          clk,
  input  logic          rst,
  input  code_e         code,
  input  pattern_e      pattern,
  input  logic          manchester_en,
  input  logic [DW-1:0] depth,
  input  logic          user_valid,
  input  logic [QW-1:0] user_data,
  output logic          f0_tick,
  output logic          sent_valid,
  output logic [QW-1:0] sent_data,
  output logic          ser_o
);
  logic          man_phase, man_d;
  logic          prbs_bit, prbs_en;
  logic [14:0]   prbs_state;
  logic          alt_q;
  logic          src_bit, src_valid, advance, one_bit_code;
  logic [QW-1:0] src_value;
  logic [N-1:0]  w_n1, w_ter, w_un, word;
  logic [DW-1:0] n1_depth;

  assign one_bit_code = (code != CODE_UNARY);
  // A new source bit is taken every period, or every second period (on the
  // second half of a pair) with Manchester pre-encoding.
  assign advance = f0_tick && (!(manchester_en && one_bit_code) || man_phase);

  prbs15_gen u_prbs (
    .clk(clk), .rst(rst), .en(prbs_en), .load(1'b0), .load_val('0),
    .bit_o(prbs_bit), .state_o(prbs_state)
  );
  assign prbs_en = advance && (pattern == PAT_PRBS);

  always_ff @(posedge clk) begin
    if (rst)                               alt_q <= 1'b0;
    else if (advance && pattern == PAT_ALT) alt_q <= ~alt_q;
  end

  always_comb begin
    src_valid = 1'b1;
    src_bit   = 1'b0;
    src_value = '0;
    unique case (pattern)
      PAT_ZERO: begin src_bit = 1'b0;        src_value = '0; end
      PAT_ONE:  begin src_bit = 1'b1;        src_value = '1; end
      PAT_ALT:  begin src_bit = alt_q;       src_value = {QW{alt_q}}; end
      PAT_PRBS: begin src_bit = prbs_bit;    src_value = prbs_state[QW-1:0]; end
      PAT_IDLE: begin src_valid = 1'b0; end
      PAT_USER: begin src_valid = user_valid; src_bit = user_data[0]; src_value = user_data; end
      default:  begin src_valid = 1'b0; end
    endcase
  end

  manchester_enc u_man (
    .clk(clk), .rst(rst), .f0_tick(f0_tick && manchester_en && one_bit_code),
    .d_i(src_bit), .d_o(man_d), .phase_o(man_phase)
  );

  assign n1_depth = src_valid ? depth : '0;

  cdcm_n1_encoder #(.N(N), .DW(DW)) u_n1 (
    .d_i(manchester_en ? man_d : src_bit), .depth(n1_depth), .word_o(w_n1)
  );
  // The N-1.5 code exists for even N only; otherwise it falls back to N-1.
  if (N % 2 == 0 && N >= 4) begin : g_ter
    cdcm_ternary_encoder #(.N(N)) u_ter (
      .valid_i(src_valid), .d_i(manchester_en ? man_d : src_bit), .word_o(w_ter)
    );
  end else begin : g_no_ter
    assign w_ter = w_n1;
  end
  cdcm_unary_encoder #(.N(N), .QW(QW)) u_un (
    .v_i(src_valid ? src_value : '0), .word_o(w_un)
  );

  always_comb begin
    unique case (code)
      CODE_N1:      word = w_n1;
      CODE_TERNARY: word = w_ter;
      CODE_UNARY:   word = w_un;
      default:      word = w_n1;
    endcase
  end

  cdcm_piso #(.N(N)) u_piso (
    .clk(clk), .rst(rst), .word_i(word), .load_o(f0_tick), .ser_o(ser_o)
  );

  assign sent_valid = f0_tick && src_valid
                      && !(manchester_en && one_bit_code && man_phase);
  assign sent_data  = one_bit_code ? QW'(src_bit) : src_value;
endmodule
