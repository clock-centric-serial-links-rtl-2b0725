// tb_cdcm_receiver: a CDCM-20 stream built by the testbench (PRBS15 bits
// from the reference recurrence, Table I word shapes) must be locked onto,
// captured and checked error-free at every depth; flipped bits must be
// counted one for one; a capture phase of 135 deg (UI 8) must fail at small
// depth; Manchester pairs, ternary idle words and unary values must be
// decoded.
module tb_cdcm_receiver;
  localparam int N = 20;
  logic clk = 0, rst = 1, cdcm = 0, unary = 0, man = 0, chk_start = 0;
  logic [4:0] cap_ui = 5'd11;
  logic locked, clk_rep, bv, b, symv, cerr, idle, sbit, synced;
  logic [3:0] value;
  logic [47:0] errs, bits;
  int checks = 0, failures = 0;

  cdcm_receiver #(.N(N)) dut (.clk, .rst, .cdcm_i(cdcm), .cap_ui, .unary, .manchester_en(man),
    .chk_start, .locked_o(locked), .clk_rep_o(clk_rep), .bit_valid_o(bv), .bit_o(b),
    .sym_valid_o(symv), .code_err_o(cerr), .idle_o(idle), .sym_bit_o(sbit), .value_o(value),
    .synced_o(synced), .err_cnt_o(errs), .bit_cnt_o(bits));
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  bit s[$];
  function automatic bit prbs_next();
    bit x;
    if (s.size() < 15) x = 1'b1; else x = s[s.size() - 14] ^ s[s.size() - 15];
    s.push_back(x);
    if (s.size() > 40) void'(s.pop_front());
    return x;
  endfunction

  // send one word with the given number of ones (header '1' included)
  task automatic send_word(int ones);
    for (int i = 0; i < N; i++) begin
      cdcm = (i >= 1) && (i <= ones);
      @(negedge clk);
    end
  endtask

  int sym_q[$];   // expected per decoded word: -1 idle, else bit/value
  int nsym = 0, nsym_bad = 0;
  bit track_sym = 0;
  always @(posedge clk) begin
    #1;
    if (symv && track_sym && sym_q.size() > 0) begin
      int e;
      e = sym_q.pop_front();
      nsym++;
      if (unary) begin if (cerr || int'(value) != e) begin nsym_bad++; if (nsym_bad < 4) $display("unary e %0d got %0d cerr %b word %b", e, value, cerr, dut.word); end end
      else if (e < 0) begin if (!idle || cerr) nsym_bad++; end
      else if (cerr || idle || int'(sbit) != e) nsym_bad++;
    end
  end

  initial begin
    int t;
    repeat (3) @(negedge clk);
    rst = 0;
    // ---- CDCM-20-1 PRBS at depth 1, acquisition
    t = 0;
    while (!(locked && synced) && t < 200) begin send_word(prbs_next() ? 11 : 9); t++; end
    check(locked && synced, $sformatf("lock and PRBS sync after %0d periods", t));
    // ---- every depth, no errors
    for (int dp = 1; dp <= 9; dp++) repeat (300) send_word(prbs_next() ? 10 + dp : 10 - dp);
    check(errs == 0 && bits > 2500, $sformatf("clean at all depths: errs %0d bits %0d", errs, bits));
    // ---- injected errors: the word carries the complement of the PRBS bit
    for (int e = 0; e < 6; e++) begin
      send_word(prbs_next() ? 9 : 11);
      repeat (40) send_word(prbs_next() ? 11 : 9);
    end
    check(errs == 6, $sformatf("six injected errors counted: %0d", errs));
    // ---- capture phase 135 deg (UI 8) instead of 180 deg: misses the data
    cap_ui = 5'd8;
    repeat (200) send_word(prbs_next() ? 11 : 9);
    check(errs > 6 || !synced, "wrong capture phase detected");
    cap_ui = 5'd11;
    fork begin chk_start = 1; @(negedge clk); chk_start = 0; end join_none
    t = 0;
    while (!synced && t < 400) begin send_word(prbs_next() ? 11 : 9); t++; end
    repeat (200) send_word(prbs_next() ? 11 : 9);
    check(synced && errs == 0, "clean again at 180 deg");
    // ---- Manchester pairs
    man = 1;
    fork begin chk_start = 1; @(negedge clk); chk_start = 0; end join_none
    for (int i = 0; i < 600; i++) begin
      bit x;
      x = prbs_next();
      send_word(x ? 11 : 9); send_word(x ? 9 : 11);
    end
    check(synced && errs == 0 && bits > 400, $sformatf("Manchester: errs %0d bits %0d", errs, bits));
    man = 0;
    // ---- ternary words through the SIPO/decoder path
    track_sym = 1;
    for (int i = 0; i < 200; i++) begin
      int k;
      k = $urandom_range(0, 2);
      sym_q.push_back(k == 2 ? -1 : k);
      send_word(k == 2 ? 10 : (k != 0 ? 11 : 9));
    end
    sym_q.push_back(-1); send_word(10);
    check(nsym >= 200 && nsym_bad == 0, $sformatf("ternary: %0d words %0d bad", nsym, nsym_bad));
    // ---- unary 4-bit values
    unary = 1; nsym = 0;
    for (int i = 0; i < 200; i++) begin
      int v;
      v = $urandom_range(0, 15);
      sym_q.push_back(v);
      send_word(v + 1);
    end
    sym_q.push_back(0); send_word(1);
    check(nsym >= 200 && nsym_bad == 0, $sformatf("unary: %0d words %0d bad", nsym, nsym_bad));
    check(locked, "lock kept through all codes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
