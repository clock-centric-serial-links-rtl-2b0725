// tb_cdcm_link_top: end-to-end run of the CDCM link at its default size
// (CDCM-20-1, one fanout with two slave ports, pre-divider 4).
// It makes each mechanism of the link happen and counts it:
//   lock       - fanout and receiver recover the carried clock after reset
//   relock     - ten resets; the transmitter-to-receiver latency must be the
//                same after each (14 UI: PISO register, fanout flip-flop,
//                capture at UI 11, capture flip-flop)
//   depth      - PRBS15 error-free at every modulation depth 1..9 (+/-5 %
//                to +/-45 %)
//   fixed      - depth 0: a plain 50 % clock, seen as idle words
//   phase      - capture at 135 deg (UI 8) instead of 180 deg gives errors
//   manchester - Manchester pre-encoding, PRBS15 checked after decoding
//   ternary    - CDCM-20-1.5 idle and data symbols decoded
//   unary      - CDCM-20-Q 4-bit values decoded
//   extract    - fanout as data extractor: slave ports carry the user bits
//   repeat     - fanout as repeater: slave port 1 is the stream, 1 UI later
module tb_cdcm_link_top;
  import cdcm_pkg::*;
  logic clk = 0, rst = 1;
  code_e code = CODE_N1;
  pattern_e pattern = PAT_PRBS;
  logic man = 0, uv = 0, extract = 0, chk_start = 0;
  logic [4:0] depth = 5'd1, cap_ui = 5'd11;
  logic [3:0] ud = '0;
  logic tick, sv, ser, f_locked, f_clk, r_locked, r_clk, bv, b, symv, cerr, idle, sbit, synced;
  logic [3:0] sdata, value;
  logic [1:0] slave;
  logic [47:0] errs, bits;
  int checks = 0, failures = 0;

  cdcm_link_top dut (
    .clk, .rst, .code, .pattern, .manchester_en(man), .depth, .user_valid(uv), .user_data(ud),
    .tx_f0_tick(tick), .tx_sent_valid(sv), .tx_sent_data(sdata), .tx_serial(ser),
    .fanout_extract(extract), .slave_o(slave), .fanout_locked(f_locked), .fanout_clk_rep(f_clk),
    .rx_cap_ui(cap_ui), .rx_chk_start(chk_start), .rx_locked(r_locked), .rx_clk_rep(r_clk),
    .rx_bit_valid(bv), .rx_bit(b), .rx_sym_valid(symv), .rx_code_err(cerr), .rx_idle(idle),
    .rx_sym_bit(sbit), .rx_value(value), .rx_synced(synced), .rx_err_cnt(errs), .rx_bit_cnt(bits));
  always #5 clk = ~clk;

  typedef enum int {M_LOCK, M_RELOCK, M_DEPTH, M_FIXED, M_PHASE, M_MANCH, M_TERN, M_UNARY,
                    M_EXTRACT, M_REPEAT, M_NUM} mech_e;
  int mech [M_NUM];
  string mname [M_NUM] = '{"lock", "relock", "depth", "fixed", "phase", "manchester",
                           "ternary", "unary", "extract", "repeat"};

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  task automatic finish();
    for (int m = 0; m < M_NUM; m++) begin
      $display("mechanism %-10s happened %0d times", mname[m], mech[m]);
      check(mech[m] > 0, {"mechanism never happened: ", mname[m]});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    #400000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cycle counter, last transmitter tick, sent values by tick cycle
  int cyc = 0, last_tick = -1;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (tick) last_tick <= cyc;

  task automatic periods(int n);
    repeat (n) @(negedge clk iff tick);
  endtask

  task automatic restart_check();
    fork begin chk_start = 1; @(negedge clk); chk_start = 0; end join_none
  endtask

  task automatic wait_sync(int max_periods, string what);
    int t = 0;
    while (!(r_locked && synced) && t < max_periods) begin periods(1); t++; end
    check(r_locked && synced, what);
  endtask

  // latency from the word load to the captured bit
  int lat_seen = -1;
  always @(posedge clk) if (bv && !rst) lat_seen <= cyc - last_tick;

  // Drives 300 periods of random user symbols and checks each decoded word
  // against the symbol loaded 22 cycles (1 + 20 + 1 UI) earlier.
  task automatic decode_run(bit is_unary);
    int exp_at[int];
    int bad = 0, n = 0;
    bit done = 0;
    fork
      begin
        for (int i = 0; i < 300; i++) begin
          @(negedge clk iff tick);
          uv = is_unary ? 1'b1 : 1'($urandom); ud = 4'($urandom);
          exp_at[cyc + 22] = is_unary ? int'(ud) : (uv ? int'(ud[0]) : -1);
        end
        periods(2);
        done = 1;
      end
      begin
        while (!done) begin
          @(posedge clk); #1;
          if (symv && exp_at.exists(cyc)) begin
            int e;
            e = exp_at[cyc];
            n++;
            if (is_unary) begin if (cerr || int'(value) != e) bad++; end
            else if (cerr || (e < 0 ? !idle : (idle || int'(sbit) != e))) bad++;
          end
        end
      end
    join
    check(n == 300 && bad == 0, $sformatf("%s: %0d bad of %0d", is_unary ? "unary" : "ternary", bad, n));
    if (n == 300 && bad == 0) mech[is_unary ? M_UNARY : M_TERN]++;
  endtask

  initial begin
    int lat0;
    repeat (3) @(negedge clk);
    // ---------------- lock and ten resets with constant latency
    lat0 = -1;
    for (int r = 0; r < 10; r++) begin
      rst = 1; repeat (2 + r) @(negedge clk); rst = 0;
      wait_sync(300, "lock + PRBS sync after reset");
      if (f_locked && r_locked) begin
        if (r == 0) mech[M_LOCK]++; else mech[M_RELOCK]++;
      end
      periods(20);
      if (lat0 < 0) lat0 = lat_seen;
      check(lat_seen == lat0 && lat_seen == 14, $sformatf("latency %0d after reset %0d", lat_seen, r));
    end
    // ---------------- every modulation depth, PRBS15 error-free
    for (int dp = 1; dp <= 9; dp++) begin
      logic [47:0] b0, e0;
      depth = 5'(dp);
      periods(3);
      b0 = bits; e0 = errs;
      periods(2000);
      check(errs == e0 && bits - b0 > 1990, $sformatf("depth %0d: %0d errors in %0d bits", dp, errs - e0, bits - b0));
      if (errs == e0) mech[M_DEPTH]++;
    end
    check(synced, "still synced");
    // ---------------- fixed 50 % clock (depth 0): idle words, clock kept
    depth = 0;
    periods(3);
    begin
      automatic int nidle = 0;
      for (int i = 0; i < 50; i++) begin @(posedge clk iff symv); #1; if (idle && !cerr) nidle++; end
      check(nidle == 50 && r_locked, "depth 0 is a 50 % clock");
      if (nidle == 50) mech[M_FIXED]++;
    end
    // ---------------- capture phase 135 deg: misses the data at +/-5 %
    depth = 1; cap_ui = 5'd8;
    restart_check();
    periods(600);
    check(!synced || errs > 0, "135 deg capture must fail at +/-5 %");
    if (!synced || errs > 0) mech[M_PHASE]++;
    cap_ui = 5'd11;
    restart_check();
    periods(2);
    wait_sync(400, "resync at 180 deg");
    // ---------------- Manchester
    man = 1;
    restart_check();
    periods(2);
    wait_sync(400, "Manchester sync");
    begin
      logic [47:0] b0;
      b0 = bits;
      periods(2000);
      check(errs == 0 && bits - b0 > 990, $sformatf("Manchester: %0d errs, %0d bits", errs, bits - b0));
      if (errs == 0 && bits - b0 > 990) mech[M_MANCH]++;
    end
    man = 0;
    // ---------------- ternary (CDCM-20-1.5) with user data and idles
    code = CODE_TERNARY; pattern = PAT_USER;
    decode_run(1'b0);
    // ---------------- unary (CDCM-20-Q, 4 bits per period)
    code = CODE_UNARY;
    decode_run(1'b1);
    // ---------------- fanout as repeater: slave port 1 = stream one UI later
    code = CODE_N1; pattern = PAT_PRBS; depth = 2;
    begin
      automatic int bad = 0;
      logic p;
      periods(2);
      for (int i = 0; i < 2000; i++) begin
        @(negedge clk); p = ser;
        @(negedge clk); if (slave[1] != p) bad++;
      end
      check(bad == 0, $sformatf("repeater: %0d mismatches", bad));
      if (bad == 0) mech[M_REPEAT]++;
    end
    // ---------------- fanout as data extractor
    extract = 1;
    periods(3);
    begin
      automatic int bad = 0;
      for (int i = 0; i < 500; i++) begin
        logic sent;
        @(negedge clk iff tick);
        sent = sdata[0];
        repeat (15) @(negedge clk);   // captured at UI 11 of the word (cycle 12)
        if (slave != {2{sent}}) bad++;
      end
      check(bad == 0, $sformatf("extractor: %0d mismatches", bad));
      if (bad == 0) mech[M_EXTRACT]++;
    end
    finish();
  end
endmodule
