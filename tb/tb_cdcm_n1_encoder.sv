// tb_cdcm_n1_encoder: CDCM-N-1 words for N = 3, 5, 8, 16, 20 against the
// Table I one counts at depth 1, the 5 %-per-step depth settings of N = 20
// (0 .. +/-45 %), the CDCM-3-1 words 010 / 011 and the header rule.
module tb_cdcm_n1_encoder;
  int checks = 0, failures = 0;
  logic d;
  logic [4:0] depth;
  logic [2:0]  w3;
  logic [4:0]  w5;
  logic [7:0]  w8;
  logic [15:0] w16;
  logic [19:0] w20;

  cdcm_n1_encoder #(.N(3),  .DW(5)) u3  (.d_i(d), .depth(depth), .word_o(w3));
  cdcm_n1_encoder #(.N(5),  .DW(5)) u5  (.d_i(d), .depth(depth), .word_o(w5));
  cdcm_n1_encoder #(.N(8),  .DW(5)) u8  (.d_i(d), .depth(depth), .word_o(w8));
  cdcm_n1_encoder #(.N(16), .DW(5)) u16 (.d_i(d), .depth(depth), .word_o(w16));
  cdcm_n1_encoder #(.N(20))         u20 (.d_i(d), .depth(depth), .word_o(w20));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // expected word from a one count: '0' then 'ones' ones then zeros
  function automatic logic [19:0] mk(int n, int ones);
    logic [19:0] w = '0;
    for (int i = 1; i <= ones; i++) w[i] = 1'b1;
    return w;
  endfunction

  // Table I, depth 1: odd N=2k+1: 0 -> 1^(k-1)0^k, 1 -> 1^k 0^(k-1) payload;
  // even N=2k: 0 -> 1^(k-2)0^k, 1 -> 1^k 0^(k-2); plus the header '1'.
  function automatic int table1(int n, bit b);
    int k;
    if (n % 2 != 0) begin k = (n - 1) / 2; return 1 + (b ? k : k - 1); end
    k = n / 2; return 1 + (b ? k : k - 2);
  endfunction

  initial begin
    depth = 1;
    for (int b = 0; b < 2; b++) begin
      d = 1'(b); #1;
      check(w3  == mk(3,  table1(3, 1'(b))) [2:0],  $sformatf("N3 d%0d %b", b, w3));
      check(w5  == mk(5,  table1(5, 1'(b))) [4:0],  $sformatf("N5 d%0d %b", b, w5));
      check(w8  == mk(8,  table1(8, 1'(b))) [7:0],  $sformatf("N8 d%0d %b", b, w8));
      check(w16 == mk(16, table1(16, 1'(b))) [15:0], $sformatf("N16 d%0d", b));
      check(w20 == mk(20, table1(20, 1'(b))),        $sformatf("N20 d%0d", b));
    end
    // CDCM-3-1 words of the introductory example (IN0 first): 0,1,D
    d = 0; #1; check(w3 == 3'b010, "3-1 zero");
    d = 1; #1; check(w3 == 3'b110, "3-1 one");
    // CDCM-8-1: 3 or 5 ones of 8
    d = 0; #1; check($countones(w8) == 3, "8-1 zero");
    d = 1; #1; check($countones(w8) == 5, "8-1 one");
    // N = 20: duty = 50 % +/- 5 % * depth, 10 settings from 0 to 45 %
    for (int dp = 0; dp <= 9; dp++) begin
      depth = 5'(dp);
      d = 0; #1; check($countones(w20) * 5 == 50 - 5 * dp, $sformatf("20 d0 depth %0d", dp));
      check(w20[0] == 0 && w20[1] == 1, "header");
      d = 1; #1; check($countones(w20) * 5 == 50 + 5 * dp, $sformatf("20 d1 depth %0d", dp));
      check(w20 == mk(20, 10 + dp), "shape");
    end
    // depth above the maximum saturates at +/-45 %
    depth = 15; d = 1; #1; check($countones(w20) == 19, "saturate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
