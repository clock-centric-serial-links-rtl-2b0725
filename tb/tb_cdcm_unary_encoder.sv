// tb_cdcm_unary_encoder: CDCM-5-2 words against the table 00 -> 000,
// 01 -> 100, 10 -> 110, 11 -> 111 (first printed bit sent first), and the
// unary rule for N = 20 (4 bits per period).
module tb_cdcm_unary_encoder;
  int checks = 0, failures = 0;
  logic [1:0] v5;
  logic [3:0] v20;
  logic [4:0] w5;
  logic [19:0] w20;
  cdcm_unary_encoder #(.N(5))  u5  (.v_i(v5),  .word_o(w5));
  cdcm_unary_encoder #(.N(20)) u20 (.v_i(v20), .word_o(w20));
  string tab [4] = '{"000", "100", "110", "111"};

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int i = 0; i < 4; i++) begin
      logic [4:0] e;
      e = 5'b00010;
      for (int j = 0; j < 3; j++) e[2 + j] = (tab[i][j] == "1");
      v5 = 2'(i); #1;
      check(w5 == e, $sformatf("5-2 value %0d: %b", i, w5));
    end
    for (int i = 0; i < 16; i++) begin
      v20 = 4'(i); #1;
      check($countones(w20) == i + 1 && w20[0] == 0 && w20[1] == 1, $sformatf("20 value %0d", i));
      check(w20 == 20'((1 << (i + 2)) - 2), "20 unary shape");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
