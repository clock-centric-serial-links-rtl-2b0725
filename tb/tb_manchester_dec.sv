// tb_manchester_dec: a Manchester bit stream entered one bit off its pair
// boundary must be re-aligned and then decoded exactly.
module tb_manchester_dec;
  logic clk = 0, rst = 1, vi = 0, di = 0, vo, dout, viol;
  int checks = 0, failures = 0, nviol = 0;
  bit sent[$];
  manchester_dec dut (.clk, .rst, .valid_i(vi), .d_i(di), .valid_o(vo), .d_o(dout), .viol_o(viol));
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  bit aligned = 0;
  int got = 0;
  always @(posedge clk) begin
    #1;
    if (viol) nviol++;
    if (vo) begin
      if (aligned) begin
        check(sent.size() > 0 && dout == sent[0], "decoded bit");
        void'(sent.pop_front());
        got++;
      end
    end
  end

  task automatic send(bit b);
    vi = 1; di = b; @(negedge clk);
    vi = 0; di = 0; @(negedge clk); // one idle cycle between bits
  endtask

  initial begin
    bit b;
    repeat (3) @(negedge clk);
    rst = 0;
    send(1'b1);   // stray half-pair: decoder starts misaligned
    for (int i = 0; i < 20; i++) begin b = 1'($urandom); send(b); send(~b); end
    check(nviol >= 1, "misalignment seen as violations");
    aligned = 1; nviol = 0;
    for (int i = 0; i < 300; i++) begin
      b = 1'($urandom); sent.push_back(b); send(b); send(~b);
    end
    repeat (4) @(negedge clk);
    check(got == 300 && sent.size() == 0, "all bits decoded");
    check(nviol == 0, "no violations once aligned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
