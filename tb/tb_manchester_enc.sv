// tb_manchester_enc: user bits held two periods must come out as D, ~D.
module tb_manchester_enc;
  localparam int N = 5;
  logic clk = 0, rst = 1, f0_tick = 0, d_i = 0, d_o, phase_o;
  int checks = 0, failures = 0;
  manchester_enc dut (.clk, .rst, .f0_tick, .d_i, .d_o, .phase_o);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bit d;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int p = 0; p < 100; p++) begin
      d = 1'($urandom);
      for (int h = 0; h < 2; h++) begin
        // one carrier period of N UIs; the word is taken at the tick
        d_i = d; f0_tick = 1;
        #1; check(d_o == (h != 0 ? ~d : d), $sformatf("pair %0d half %0d", p, h));
        check(phase_o == 1'(h), "phase");
        @(negedge clk); f0_tick = 0;
        repeat (N - 1) @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
