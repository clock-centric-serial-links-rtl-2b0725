// prbs15_checker: PRBS15 bit error counter with a synchronising controller.
//
// The received bit stream is compared with a local PRBS15 generator and
// every mismatch increments err_cnt_o, as in the CDCM test receiver. The
// controller is a small state machine:
//   LOAD   - shift 15 received bits into a register, then load it into the
//            local generator, which then predicts the next received bit;
//   VERIFY - compare VERIFY bits; any mismatch goes back to LOAD;
//   RUN    - compare and count errors (bit_cnt_o counts compared bits);
//            RESYNC_ERR mismatches in a row go back to LOAD.
// start clears the counters and restarts from LOAD. The states, thresholds
// and counter widths are this design's choices (48 bits hold more than the
// 3.6e12 bits of an 8-hour run at 125 Mbps); the proposal only says that
// a state machine synchronises the local generator during initialisation.
// Timing: one bit per valid_i; counters update the cycle after.
module prbs15_checker #(
  parameter int unsigned CNT_W      = 48,
  parameter int unsigned VERIFY     = 32,
  parameter int unsigned RESYNC_ERR = 8
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             start,
  input  logic             valid_i,
  input  logic             d_i,
  output logic             synced_o,
  output logic [CNT_W-1:0] err_cnt_o,
  output logic [CNT_W-1:0] bit_cnt_o
);
  typedef enum logic [1:0] {S_LOAD, S_VERIFY, S_RUN} state_e;
  state_e state;

  localparam int unsigned KW = $clog2(VERIFY + 16);
  logic [14:0]   sr;
  logic [KW-1:0] k;
  logic [KW-1:0] burst;
  logic          gen_bit, gen_en, gen_load, miss;

  prbs15_gen u_gen (
    .clk(clk), .rst(rst), .en(gen_en), .load(gen_load),
    .load_val({sr[13:0], d_i}), .bit_o(gen_bit), .state_o()
  );

  assign miss     = (gen_bit != d_i);
  assign gen_load = valid_i && (state == S_LOAD) && (k == KW'(14));
  assign gen_en   = valid_i && (state != S_LOAD);
  assign synced_o = (state == S_RUN);

  always_ff @(posedge clk) begin
    if (rst || start) begin
      state     <= S_LOAD;
      sr        <= '0;
      k         <= '0;
      burst     <= '0;
      err_cnt_o <= '0;
      bit_cnt_o <= '0;
    end else if (valid_i) begin
      sr <= {sr[13:0], d_i};
      unique case (state)
        S_LOAD: begin
          if (k == KW'(14)) begin
            state <= S_VERIFY;
            k     <= '0;
          end else begin
            k <= k + 1'b1;
          end
        end
        S_VERIFY: begin
          if (miss) begin
            state <= S_LOAD;
            k     <= '0;
          end else if (k == KW'(VERIFY - 1)) begin
            state <= S_RUN;
            burst <= '0;
          end else begin
            k <= k + 1'b1;
          end
        end
        S_RUN: begin
          bit_cnt_o <= bit_cnt_o + 1'b1;
          if (miss) begin
            err_cnt_o <= err_cnt_o + 1'b1;
            if (burst == KW'(RESYNC_ERR - 1)) begin
              state <= S_LOAD;
              k     <= '0;
            end else begin
              burst <= burst + 1'b1;
            end
          end else begin
            burst <= '0;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end
endmodule
