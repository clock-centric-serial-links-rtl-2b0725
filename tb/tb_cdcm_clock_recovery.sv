// tb_cdcm_clock_recovery: the recovered phase must follow the unmodulated
// rising edge of a CDCM-20-1 stream with random modulation, lock within the
// bound set by the pre-divider, re-align after a phase jump, ignore the
// moving falling edge and drop lock when the stream stops.
module tb_cdcm_clock_recovery;
  localparam int N = 20, PREDIV = 4, LOCK_CNT = 4;
  localparam int LOCK_BOUND = (2 + PREDIV + LOCK_CNT * PREDIV) * N;
  logic clk = 0, rst = 1, cdcm = 0;
  logic locked, clk_rep, word_end, cap;
  logic [4:0] ph, cap_ui = 5'd11;
  int checks = 0, failures = 0;
  int idx = 0, ones = 10, cyc = 0, lock_at = -1, relocks = 0, drops = 0;
  bit  run = 0, silent = 0, jumping = 0;

  cdcm_clock_recovery #(.N(N), .PREDIV(PREDIV), .LOCK_CNT(LOCK_CNT)) dut (
    .clk, .rst, .cdcm_i(cdcm), .cap_ui, .locked_o(locked), .ph_o(ph),
    .clk_rep_o(clk_rep), .word_end_o(word_end), .cap_o(cap));
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s (cyc %0d idx %0d ph %0d)", what, cyc, idx, ph); end
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // stream source: UI index idx of the current bit; new random depth per word
  always @(negedge clk) if (run) begin
    idx = (idx + 1) % N;
    if (idx == 0) ones = 1 + $urandom_range(0, N - 2);
    cdcm = silent ? 1'b0 : ((idx >= 1) && (idx <= ones));
    cyc++;
  end

  // while locked, the model's outputs must match the stream position
  always @(posedge clk) if (run && locked && !silent && !jumping) begin
    check(ph == 5'(idx), "phase");
    check(word_end == (idx == N - 1), "word_end");
    check(cap == (idx == int'(cap_ui)), "capture strobe");
    check(clk_rep == (idx >= 1 && idx <= N / 2), "reproduced clock");
  end

  initial begin
    int t0;
    idx = 7;  // start mid-word: arbitrary phase
    repeat (3) @(negedge clk);
    rst = 0; run = 1;
    t0 = cyc;
    while (!locked && cyc - t0 < 10 * LOCK_BOUND) @(negedge clk);
    check(locked && cyc - t0 <= LOCK_BOUND, $sformatf("first lock in %0d cycles", cyc - t0));
    repeat (200 * N) @(negedge clk);
    check(locked, "stays locked under random modulation");
    // phase jump of 7 UI
    for (int j = 0; j < 3; j++) begin
      idx = (idx + 7) % N;
      jumping = 1;  // the jump is seen at the next compared edge only
      t0 = cyc;
      while (locked && cyc - t0 < 2 * PREDIV * N) @(negedge clk);
      if (!locked) drops++;
      jumping = 0;
      check(!locked, "lock dropped after phase jump");
      t0 = cyc;
      while (!locked && cyc - t0 < 10 * LOCK_BOUND) @(negedge clk);
      if (locked) relocks++;
      check(locked && cyc - t0 <= LOCK_BOUND, $sformatf("relock in %0d cycles", cyc - t0));
      repeat (50 * N) @(negedge clk);
    end
    // stream stops
    silent = 1;
    t0 = cyc;
    while (locked && cyc - t0 < 4 * PREDIV * N) @(negedge clk);
    check(!locked && cyc - t0 <= 2 * PREDIV * N + N, "lock lost without edges");
    check(relocks == 3 && drops == 3, "re-lock count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
