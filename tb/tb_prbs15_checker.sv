// tb_prbs15_checker: a PRBS15 stream from a reference recurrence must be
// acquired, compared without error, single injected errors counted one by
// one, an error burst must force re-synchronisation, and start must clear.
module tb_prbs15_checker;
  logic clk = 0, rst = 1, start = 0, vi = 0, di = 0, synced;
  logic [47:0] errs, bits;
  int checks = 0, failures = 0;
  bit s[$];
  int n = 0;
  prbs15_checker dut (.clk, .rst, .start, .valid_i(vi), .d_i(di), .synced_o(synced),
                      .err_cnt_o(errs), .bit_cnt_o(bits));
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic bit next_bit();
    bit b;
    if (s.size() < 15) b = 1'($urandom);
    else b = s[s.size() - 14] ^ s[s.size() - 15];
    s.push_back(b);
    if (s.size() > 40) void'(s.pop_front());
    return b;
  endfunction

  task automatic send(bit flip);
    vi = 1; di = next_bit() ^ flip; n++;
    @(negedge clk);
    vi = 0; repeat (2) @(negedge clk);
  endtask

  initial begin
    int t;
    repeat (3) @(negedge clk);
    rst = 0;
    t = 0;
    while (!synced && t < 200) begin send(0); t++; end
    check(synced && t == 15 + 32, $sformatf("acquired after %0d bits", t));
    repeat (2000) send(0);
    check(errs == 0 && bits == 2000, $sformatf("clean run errs %0d bits %0d", errs, bits));
    for (int e = 0; e < 5; e++) begin send(1); repeat (50) send(0); end
    check(errs == 5, $sformatf("five single errors counted: %0d", errs));
    check(synced, "single errors keep sync");
    repeat (8) send(1);
    check(!synced, "burst forces resync");
    t = 0;
    while (!synced && t < 200) begin send(0); t++; end
    check(synced, "re-acquired");
    check(errs == 13, $sformatf("burst counted: %0d", errs));
    start = 1; @(negedge clk); start = 0;
    check(errs == 0 && bits == 0 && !synced, "start clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
