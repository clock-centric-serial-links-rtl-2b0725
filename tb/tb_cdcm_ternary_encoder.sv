// tb_cdcm_ternary_encoder: CDCM-20-1.5 and CDCM-4-1.5 words against the
// payload tables (na / 0 / 1) of the CDCM proposal; bit 0 sent first.
module tb_cdcm_ternary_encoder;
  int checks = 0, failures = 0;
  logic v, d;
  logic [19:0] w20;
  logic [3:0]  w4;
  cdcm_ternary_encoder #(.N(20)) u20 (.valid_i(v), .d_i(d), .word_o(w20));
  cdcm_ternary_encoder #(.N(4))  u4  (.valid_i(v), .d_i(d), .word_o(w4));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // header "01" then payload as a string, first character sent first
  function automatic logic [19:0] w(string payload);
    logic [19:0] r = '0;
    r[1] = 1'b1;
    for (int i = 0; i < payload.len(); i++) r[2 + i] = (payload[i] == "1");
    return r;
  endfunction

  initial begin
    v = 0; d = 0; #1;
    check(w20 == w("111111111000000000"), "20 na = 1^9 0^9");
    check(w4  == w("10")[3:0], "4 na = 10");
    v = 0; d = 1; #1;
    check(w20 == w("111111111000000000"), "20 na ignores d");
    v = 1; d = 0; #1;
    check(w20 == w("111111110000000000"), "20 zero = 1^8 0^10");
    check(w4  == w("00")[3:0], "4 zero = 00");
    v = 1; d = 1; #1;
    check(w20 == w("111111111100000000"), "20 one = 1^10 0^8");
    check(w4  == w("11")[3:0], "4 one = 11");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
