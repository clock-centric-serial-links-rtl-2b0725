// tb_cdcm_fanout: in repeater mode both slave ports must carry the master
// stream re-timed by exactly one UI; in extractor mode they must carry the
// CDCM-20-1 user bits, one per period, updated at mid-period (UI 11).
module tb_cdcm_fanout;
  localparam int N = 20, K = 2;
  logic clk = 0, rst = 1, cdcm = 0, extract = 0, locked, clk_rep;
  logic [K-1:0] out;
  int checks = 0, failures = 0;
  cdcm_fanout #(.N(N), .K(K)) dut (.clk, .rst, .cdcm_i(cdcm), .extract, .out_o(out),
    .locked_o(locked), .clk_rep_o(clk_rep));
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic prev_in = 0;
  bit   cur_bit = 0, last_bit = 0;
  int   ui = 0;
  int   nrep = 0, next = 0, wcur = 0;
  always @(posedge clk) begin
    #1;
    if (!rst && locked) begin
      if (!extract) begin
        check(out == {K{cdcm}}, "repeater copy, 1 UI");
        nrep++;
      end else if (wcur > 300) begin
        // value in the flip-flops: bit of this period once past UI 11
        check(out == {K{(ui >= 11) ? cur_bit : last_bit}}, $sformatf("extractor ui %0d", ui));
        next++;
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int w = 0; w < 600; w++) begin
      if (w == 300) extract = 1;
      wcur = w;
      last_bit = cur_bit;
      cur_bit = 1'($urandom);
      for (int i = 0; i < N; i++) begin
        int ones;
        ones = cur_bit ? 12 : 8;   // +/-10 % modulation
        prev_in = cdcm;
        cdcm = (i >= 1) && (i <= ones);
        ui = i;
        @(negedge clk);
      end
    end
    check(nrep > 5000 && next > 5000, $sformatf("both modes exercised: %0d %0d", nrep, next));
    check(locked, "locked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
