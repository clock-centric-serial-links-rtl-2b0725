// tb_cdcm_piso: random words must leave bit 0 first, back to back, with one
// load every N = 20 cycles.
module tb_cdcm_piso;
  localparam int N = 20;
  logic clk = 0, rst = 1, load, ser;
  logic [N-1:0] word;
  int checks = 0, failures = 0;
  logic [N-1:0] q[$];
  cdcm_piso #(.N(N)) dut (.clk, .rst, .word_i(word), .load_o(load), .ser_o(ser));
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int last_load, cyc, bitpos;
    logic [N-1:0] cur;
    word = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    last_load = -1; cyc = 0; bitpos = -1;
    for (int c = 0; c < 200 * N; c++) begin
      // drive a new random word every cycle; only the one at load counts
      word = N'({$urandom, $urandom});
      #1;
      if (load) begin
        if (last_load >= 0) check(cyc - last_load == N, "load period");
        last_load = cyc;
        q.push_back(word);
      end
      @(negedge clk);
      cyc++;
      if (q.size() > 0 || bitpos > 0) begin
        if (bitpos < 0 || bitpos == N) begin cur = q.pop_front(); bitpos = 0; end
        check(ser == cur[bitpos], $sformatf("bit %0d cyc %0d ser %b cur %b", bitpos, cyc, ser, cur));
        bitpos++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
