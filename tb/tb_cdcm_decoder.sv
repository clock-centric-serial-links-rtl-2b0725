// tb_cdcm_decoder: every legal CDCM-20 word (1..19 ones) decodes to the bit,
// idle flag or unary value of its one count; corrupted words are flagged.
module tb_cdcm_decoder;
  localparam int N = 20;
  logic [N-1:0] w;
  logic unary, err, idle, b;
  logic [3:0] v;
  int checks = 0, failures = 0;
  cdcm_decoder #(.N(N)) dut (.word_i(w), .unary, .code_err_o(err), .idle_o(idle), .bit_o(b), .value_o(v));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    for (int c = 1; c < N; c++) begin
      w = '0;
      for (int i = 1; i <= c; i++) w[i] = 1'b1;
      unary = 0; #1;
      check(!err, $sformatf("legal %0d", c));
      check(idle == (c == 10), $sformatf("idle %0d", c));
      if (c != 10) check(b == (c > 10), $sformatf("bit %0d", c));
      unary = 1; #1;
      check(err == (c - 1 > 15), $sformatf("unary range %0d", c));
      if (c <= 16) check(v == 4'(c - 1), $sformatf("value %0d", c));
      check(!idle, "no idle in unary");
      // flip one random bit and compare with a reference legality rule:
      // '0', '1', then no 0->1 step anywhere after bit 1
      for (int r = 0; r < 4; r++) begin
        int k;
        bit legal;
        k = $urandom_range(0, N - 1);
        w[k] = ~w[k];
        legal = (w[0] == 0) && (w[1] == 1);
        for (int i = 2; i < N; i++) if (w[i] && !w[i - 1]) legal = 0;
        unary = 0; #1;
        check(err == !legal, $sformatf("flip %0d of %0d", k, c));
        w[k] = ~w[k];
      end
    end
    // explicit illegal words
    unary = 0;
    w = 20'b0; #1; check(err, "all zero");
    w = '1; #1; check(err, "all one");
    w = 20'b11; #1; check(err, "header 1 first");
    w = 20'b1010; #1; check(err, "two runs");
    w = 20'b00000000001111111100; #1; check(err, "missing header 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
