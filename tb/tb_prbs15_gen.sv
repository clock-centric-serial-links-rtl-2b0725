// tb_prbs15_gen: checks the PRBS15 generator against a reference sequence
// built from the recurrence s[n] = s[n-14] ^ s[n-15], its period of 32767
// bits, hold when disabled, and loading.
module tb_prbs15_gen;
  logic clk = 0, rst = 1, en = 0, load = 0;
  logic [14:0] load_val = '0, state;
  logic bit_o;
  int checks = 0, failures = 0;
  bit seq[$];

  prbs15_gen dut (.clk, .rst, .en, .load, .load_val, .bit_o, .state_o(state));
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // reference: 15 seed bits (all ones), then the recurrence
    for (int i = 0; i < 15; i++) seq.push_back(1'b1);
    for (int n = 15; n < 15 + 32767 + 20; n++) seq.push_back(seq[n - 14] ^ seq[n - 15]);
    @(posedge clk); @(posedge clk); rst <= 0;
    @(posedge clk);
    check(state == 15'h7FFF, "seed after reset");
    en <= 1;
    for (int n = 15; n < 15 + 32767; n++) begin
      @(negedge clk);
      check(bit_o == seq[n], $sformatf("bit %0d", n));
      if (n > 15 && n < 15 + 32766) check(state != 15'h7FFF || n == 15, "no early repeat");
    end
    @(negedge clk);
    check(state == 15'h7FFF, "period 32767");
    en <= 0;
    @(negedge clk); @(negedge clk);
    check(state == 15'h7FFF, "hold while disabled");
    load_val <= 15'h1234; load <= 1;
    @(negedge clk); load <= 0;
    check(state == 15'h1234, "load");
    check(bit_o == (1'b0 ^ 1'b0), "feedback of loaded state"); // bits 14,13 of 0x1234 are 0,0
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
