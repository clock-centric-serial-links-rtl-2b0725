// tb_cdcm_sipo: random words sent bit 0 first must come back whole, one
// cycle after their last UI.
module tb_cdcm_sipo;
  localparam int N = 20;
  logic clk = 0, rst = 1, ser = 0, word_end = 0, wv;
  logic [N-1:0] word, tx;
  logic [N-1:0] q[$];
  int checks = 0, failures = 0;
  cdcm_sipo #(.N(N)) dut (.clk, .rst, .ser_i(ser), .word_end, .word_o(word), .word_valid_o(wv));
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    #1;
    if (!rst && wv) begin
      check(q.size() > 0 && word == q[0], "word");
      void'(q.pop_front());
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int w = 0; w < 300; w++) begin
      tx = N'({$urandom, $urandom});
      for (int i = 0; i < N; i++) begin
        ser = tx[i]; word_end = (i == N - 1);
        if (i == N - 1) q.push_back(tx);
        @(negedge clk);
        check(wv == (i == N - 1), "valid timing");
      end
    end
    word_end = 0;
    repeat (3) @(negedge clk);
    check(q.size() == 0, "all words seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
