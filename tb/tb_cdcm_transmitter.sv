// tb_cdcm_transmitter: rebuilds each N-UI word from the serial output and
// checks it against the reported user data for every code and pattern:
// CDCM-20-1 at all depths with PRBS15 (checked against the PRBS15
// recurrence), alternating and constant patterns, Manchester pairs at half
// rate, CDCM-20-1.5 idle and data words, and unary 4-bit values.
module tb_cdcm_transmitter;
  import cdcm_pkg::*;
  localparam int N = 20;
  logic clk = 0, rst = 1;
  code_e code = CODE_N1;
  pattern_e pattern = PAT_PRBS;
  logic man = 0, uv = 0;
  logic [4:0] depth = 1;
  logic [3:0] ud = 0, sdata;
  logic tick, sv, ser;
  int checks = 0, failures = 0;

  cdcm_transmitter #(.N(N)) dut (.clk, .rst, .code, .pattern, .manchester_en(man), .depth,
    .user_valid(uv), .user_data(ud), .f0_tick(tick), .sent_valid(sv), .sent_data(sdata), .ser_o(ser));
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // capture: tick cycle info, then the N serial bits that follow
  int nwords = 0;
  int ones_q[$];
  bit  hdr_q[$];
  bit  v_q[$];
  int  d_q[$];
  logic [N-1:0] cur;
  int pos = -1;
  logic pend_v; int pend_d;
  always @(posedge clk) if (!rst) begin
    if (pos >= 0) begin
      cur[pos] = ser;
      pos++;
      if (pos == N) begin
        ones_q.push_back($countones(cur));
        hdr_q.push_back(cur[0] == 0 && cur[1] == 1);
        v_q.push_back(pend_v); d_q.push_back(pend_d);
        pos = -1;
      end
    end
    if (tick) begin
      // the word taken now starts on ser after this edge
      pend_v = sv; pend_d = int'(sdata);
      pos = 0;
    end
  end

  task automatic collect(int n);
    ones_q.delete(); hdr_q.delete(); v_q.delete(); d_q.delete();
    repeat (n * N + 2) @(negedge clk);
  endtask

  initial begin
    bit prbs[$];
    repeat (3) @(negedge clk);
    rst = 0;
    // --- CDCM-20-1, PRBS15, all depths
    for (int dp = 0; dp <= 9; dp++) begin
      depth = 5'(dp);
      collect(60);
      for (int i = 1; i < ones_q.size(); i++) begin
        check(hdr_q[i], "header");
        check(v_q[i], "valid every period");
        check(ones_q[i] == (d_q[i] != 0 ? 10 + dp : 10 - dp), $sformatf("depth %0d ones %0d d %0d", dp, ones_q[i], d_q[i]));
        prbs.push_back(d_q[i][0]);
      end
    end
    // sent PRBS bits (contiguous within each collect) follow s[n]=s[n-14]^s[n-15]
    begin
      automatic int ok = 0;
      for (int i = 15; i < 50; i++) if (prbs[i] == (prbs[i - 14] ^ prbs[i - 15])) ok++;
      check(ok == 35, "PRBS15 recurrence");
    end
    // --- alternating pattern
    pattern = PAT_ALT; depth = 2;
    collect(20);
    for (int i = 2; i < ones_q.size(); i++) check(d_q[i] != d_q[i - 1], "alternating");
    // --- constant 1
    pattern = PAT_ONE; collect(10);
    for (int i = 1; i < ones_q.size(); i++) check(ones_q[i] == 12, "constant one: 60 % duty");
    // --- Manchester: D then ~D, one user bit per two periods
    pattern = PAT_PRBS; man = 1; depth = 1;
    collect(80);
    begin
      automatic int nvalid = 0, npairs = 0;
      for (int i = 0; i < ones_q.size(); i++) if (v_q[i]) nvalid++;
      for (int i = 1; i + 1 < ones_q.size(); i++) if (v_q[i]) begin
        npairs++;
        check(ones_q[i] == (d_q[i] != 0 ? 11 : 9) && ones_q[i + 1] == (d_q[i] != 0 ? 9 : 11), "Manchester pair");
        check(!v_q[i + 1], "second half carries no new bit");
      end
      check(nvalid >= 39 && nvalid <= 41, $sformatf("half rate: %0d bits in 80 periods", nvalid));
    end
    man = 0;
    // --- CDCM-20-1.5: idle and data
    code = CODE_TERNARY; pattern = PAT_IDLE;
    collect(10);
    for (int i = 1; i < ones_q.size(); i++) check(ones_q[i] == 10 && !v_q[i], "ternary idle is 50 %");
    pattern = PAT_USER;
    for (int i = 0; i < 40; i++) begin
      uv = 1'($urandom); ud = 4'($urandom);
      @(negedge clk iff tick);
      check(sv == uv && (!uv || sdata[0] == ud[0]), "ternary report");
    end
    collect(30);
    for (int i = 1; i < ones_q.size(); i++)
      check(ones_q[i] == (!v_q[i] ? 10 : (d_q[i][0] ? 11 : 9)), "ternary word");
    // --- unary CDCM-20-Q, 4 bits per period
    code = CODE_UNARY; uv = 1;
    fork
      begin repeat (40 * N) begin @(negedge clk); ud = 4'($urandom); end end
      collect(40);
    join
    for (int i = 1; i < ones_q.size(); i++) check(hdr_q[i] && ones_q[i] == d_q[i] + 1, "unary word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
