// cdcm_clock_recovery: behavioural model of the receiving PLL, at UI
// resolution.
//
// In a CDCM link the carried clock is recovered by an ordinary PLL locking
// on the unmodulated rising edge, with an input pre-divider so the phase
// detector never sees the modulated falling edge; a multiplied copy at N*F0
// clocks the data capture. This module is not a PLL: the design runs from a
// single clock at the UI rate and this model keeps only the PLL's
// observable function at that resolution. A phase counter ph (0..N-1, the
// UI index within the word, 0 = header '0') runs freely. Every PREDIV-th
// 0->1 edge of cdcm_i is compared with the counter: the edge must fall on
// ph = 1. A compared edge off that phase re-aligns the counter at once and
// drops lock; LOCK_CNT compared edges in a row on phase raise locked_o;
// 2*PREDIV periods without any edge drop lock. Falling edges are ignored.
// Jitter filtering and loop dynamics are not modelled. The lock rule is this
// design's own; the edge choice and PREDIV = 4 follow the CDCM proposal.
//
// Outputs are aligned with the UI present on cdcm_i in the same cycle:
// ph_o is its index, word_end_o marks index N-1, clk_rep_o is the
// reproduced 50 % clock (high from index 1 for N/2 UIs, the 0 deg output)
// and cap_o marks index cap_ui, the data capture phase (1 + N/2 is 180 deg
// after the rising edge, the theoretical optimum).
module cdcm_clock_recovery #(
  parameter int unsigned N        = 20,
  parameter int unsigned PREDIV   = 4,
  parameter int unsigned LOCK_CNT = 4,
  parameter int unsigned DW       = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          cdcm_i,
  input  logic [DW-1:0] cap_ui,
  output logic          locked_o,
  output logic [DW-1:0] ph_o,
  output logic          clk_rep_o,
  output logic          word_end_o,
  output logic          cap_o
);
  localparam int unsigned PW = (PREDIV > 1) ? $clog2(PREDIV) : 1;
  localparam int unsigned LW = $clog2(LOCK_CNT + 1);
  localparam int unsigned QUIET = 2 * PREDIV * N;
  localparam int unsigned TW = $clog2(QUIET + 1);

  logic [DW-1:0] ph;
  logic          prev;
  logic [PW-1:0] div_cnt;
  logic [LW-1:0] good;
  logic [TW-1:0] quiet;
  logic          edge_s, compare;

  assign edge_s  = cdcm_i & ~prev;
  assign compare = edge_s && (div_cnt == '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      ph       <= '0;
      prev     <= 1'b1;
      div_cnt  <= '0;
      good     <= '0;
      quiet    <= '0;
      locked_o <= 1'b0;
    end else begin
      prev <= cdcm_i;
      ph   <= (ph == DW'(N - 1)) ? '0 : ph + 1'b1;
      if (edge_s) begin
        div_cnt <= (div_cnt == PW'(PREDIV - 1)) ? '0 : div_cnt + 1'b1;
        quiet   <= '0;
      end else if (quiet != TW'(QUIET)) begin
        quiet <= quiet + 1'b1;
      end
      if (compare) begin
        if (ph != DW'(1)) begin
          ph       <= DW'(2 % N);   // this UI becomes index 1
          good     <= '0;
          locked_o <= 1'b0;
        end else if (good != LW'(LOCK_CNT)) begin
          good <= good + 1'b1;
          if (good == LW'(LOCK_CNT - 1)) locked_o <= 1'b1;
        end
      end
      if (!edge_s && quiet == TW'(QUIET - 1)) begin
        good     <= '0;
        locked_o <= 1'b0;
      end
    end
  end

  assign ph_o       = ph;
  assign word_end_o = (ph == DW'(N - 1));
  assign clk_rep_o  = (ph >= DW'(1)) && (ph <= DW'(N / 2));
  assign cap_o      = (ph == cap_ui);

  initial assert (N >= 3 && PREDIV >= 1 && LOCK_CNT >= 1) else $error("bad parameters");
  a_ph_range: assert property (@(posedge clk) disable iff (rst) ph < DW'(N));
endmodule
