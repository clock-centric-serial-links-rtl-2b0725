// tb_cdcm_topologies: the two fanout topologies of the CDCM demonstrator,
// driven by the test transmitter (PRBS15, +/-10 % on CDCM-20-1):
//   chain - transmitter -> three repeaters -> end-leaf receiver (4 hops),
//           also repeated with a CDCM-3-1 stream (N = 3);
//   tree  - transmitter -> trunk repeater -> two branch repeaters -> one
//           receiver leaf on each branch.
// Checks: every node locks; leaves check PRBS15 error-free; each repeater
// adds exactly one UI (latency to the captured bit = 13 UI + one per hop);
// the two tree leaves recover clocks with zero relative skew, cycle by cycle.
module tb_cdcm_topologies;
  import cdcm_pkg::*;
  logic clk = 0, rst = 1;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- CDCM-20-1 source
  logic tick20, ser20;
  cdcm_transmitter #(.N(20)) u_tx20 (.clk, .rst, .code(CODE_N1), .pattern(PAT_PRBS),
    .manchester_en(1'b0), .depth(5'd2), .user_valid(1'b0), .user_data('0),
    .f0_tick(tick20), .sent_valid(), .sent_data(), .ser_o(ser20));

  // chain: three repeaters, then the end leaf
  logic [2:0] c_lock;
  logic [1:0] c_out [3];
  logic c_in [4];
  assign c_in[0] = ser20;
  for (genvar h = 0; h < 3; h++) begin : g_chain
    cdcm_fanout #(.N(20)) u_rep (.clk, .rst, .cdcm_i(c_in[h]), .extract(1'b0),
      .out_o(c_out[h]), .locked_o(c_lock[h]), .clk_rep_o());
    assign c_in[h + 1] = c_out[h][0];
  end
  logic cl_lock, cl_bv, cl_sync, cl_clk;
  logic [47:0] cl_err, cl_bits;
  cdcm_receiver #(.N(20)) u_chain_leaf (.clk, .rst, .cdcm_i(c_in[3]), .cap_ui(5'd11), .unary(1'b0),
    .manchester_en(1'b0), .chk_start(1'b0), .locked_o(cl_lock), .clk_rep_o(cl_clk),
    .bit_valid_o(cl_bv), .bit_o(), .sym_valid_o(), .code_err_o(), .idle_o(), .sym_bit_o(),
    .value_o(), .synced_o(cl_sync), .err_cnt_o(cl_err), .bit_cnt_o(cl_bits));

  // tree: trunk -> two branches -> two leaves
  logic [1:0] t_trunk, t_b0, t_b1;
  logic [2:0] t_lock;
  cdcm_fanout #(.N(20)) u_trunk (.clk, .rst, .cdcm_i(ser20), .extract(1'b0), .out_o(t_trunk),
    .locked_o(t_lock[0]), .clk_rep_o());
  cdcm_fanout #(.N(20)) u_br0 (.clk, .rst, .cdcm_i(t_trunk[0]), .extract(1'b0), .out_o(t_b0),
    .locked_o(t_lock[1]), .clk_rep_o());
  cdcm_fanout #(.N(20)) u_br1 (.clk, .rst, .cdcm_i(t_trunk[1]), .extract(1'b0), .out_o(t_b1),
    .locked_o(t_lock[2]), .clk_rep_o());
  logic l0_lock, l1_lock, l0_sync, l1_sync, l0_clk, l1_clk;
  logic [47:0] l0_err, l1_err, l0_bits, l1_bits;
  cdcm_receiver #(.N(20)) u_leaf0 (.clk, .rst, .cdcm_i(t_b0[0]), .cap_ui(5'd11), .unary(1'b0),
    .manchester_en(1'b0), .chk_start(1'b0), .locked_o(l0_lock), .clk_rep_o(l0_clk),
    .bit_valid_o(), .bit_o(), .sym_valid_o(), .code_err_o(), .idle_o(), .sym_bit_o(),
    .value_o(), .synced_o(l0_sync), .err_cnt_o(l0_err), .bit_cnt_o(l0_bits));
  cdcm_receiver #(.N(20)) u_leaf1 (.clk, .rst, .cdcm_i(t_b1[0]), .cap_ui(5'd11), .unary(1'b0),
    .manchester_en(1'b0), .chk_start(1'b0), .locked_o(l1_lock), .clk_rep_o(l1_clk),
    .bit_valid_o(), .bit_o(), .sym_valid_o(), .code_err_o(), .idle_o(), .sym_bit_o(),
    .value_o(), .synced_o(l1_sync), .err_cnt_o(l1_err), .bit_cnt_o(l1_bits));

  // ---------------- CDCM-3-1 chain (four hops, then a receiver)
  logic ser3;
  cdcm_transmitter #(.N(3)) u_tx3 (.clk, .rst, .code(CODE_N1), .pattern(PAT_PRBS),
    .manchester_en(1'b0), .depth(2'd1), .user_valid(1'b0), .user_data('0),
    .f0_tick(), .sent_valid(), .sent_data(), .ser_o(ser3));
  logic s3 [5];
  logic [1:0] s3_out [4];
  logic [3:0] s3_lock;
  assign s3[0] = ser3;
  for (genvar h = 0; h < 4; h++) begin : g_chain3
    cdcm_fanout #(.N(3)) u_rep3 (.clk, .rst, .cdcm_i(s3[h]), .extract(1'b0),
      .out_o(s3_out[h]), .locked_o(s3_lock[h]), .clk_rep_o());
    assign s3[h + 1] = s3_out[h][0];
  end
  logic r3_lock, r3_sync;
  logic [47:0] r3_err, r3_bits;
  cdcm_receiver #(.N(3)) u_rx3 (.clk, .rst, .cdcm_i(s3[4]), .cap_ui(2'd2), .unary(1'b0),
    .manchester_en(1'b0), .chk_start(1'b0), .locked_o(r3_lock), .clk_rep_o(),
    .bit_valid_o(), .bit_o(), .sym_valid_o(), .code_err_o(), .idle_o(), .sym_bit_o(),
    .value_o(), .synced_o(r3_sync), .err_cnt_o(r3_err), .bit_cnt_o(r3_bits));

  // latency of the chain leaf: last transmitter tick to captured bit
  int cyc = 0, last_tick = 0, lat = -1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (tick20) last_tick <= cyc;
    if (cl_bv) lat <= cyc - last_tick;
  end
  int skew_bad = 0, skew_n = 0;
  always @(posedge clk) if (l0_lock && l1_lock) begin
    skew_n++;
    if (l0_clk != l1_clk) skew_bad++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (20 * 400) @(negedge clk);
    check(&c_lock && cl_lock && cl_sync, "chain: all hops locked, leaf synced");
    check(&t_lock && l0_lock && l1_lock && l0_sync && l1_sync, "tree: all nodes locked, leaves synced");
    check(&s3_lock && r3_lock && r3_sync, "CDCM-3-1 chain locked and synced");
    repeat (20 * 20000) @(negedge clk);
    check(cl_err == 0 && cl_bits > 19000, $sformatf("chain leaf: %0d errors in %0d bits", cl_err, cl_bits));
    check(l0_err == 0 && l1_err == 0 && l0_bits > 19000 && l1_bits > 19000, "tree leaves error-free");
    check(r3_err == 0 && r3_bits > 100000, $sformatf("CDCM-3-1 chain: %0d errors in %0d bits", r3_err, r3_bits));
    // 1 (serialiser) + 3 repeaters + 11 (capture UI) + 1 (capture flip-flop)
    check(lat == 16, $sformatf("chain latency %0d UI, expected 16", lat));
    check(skew_n > 100000 && skew_bad == 0, $sformatf("tree leaves: %0d of %0d cycles skewed", skew_bad, skew_n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
