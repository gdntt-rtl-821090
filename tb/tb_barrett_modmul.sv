// tb_barrett_modmul -- checks a*b mod q of the Barrett multiplier for random
// and extreme operands, and that done comes exactly in the 16th cycle
// counted from the start cycle (start in cycle 0, done in cycle 15).
module tb_barrett_modmul;
  localparam longint QM = 12289;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic [13:0] a = '0, b = '0, result;

  barrett_modmul dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input longint x, input longint y);
    int cyc;
    longint exp;
    exp = (x * y) % QM;
    @(negedge clk);
    a = 14'(x); b = 14'(y); start = 1'b1;
    cyc = 0;
    #1;
    while (!done) begin
      @(negedge clk);
      start = 1'b0;
      a = 14'($urandom); b = 14'($urandom);   // operands must have been captured
      cyc++;
      #1;
    end
    checks++;
    if (cyc != 15) begin
      failures++;
      $display("FAIL latency: done in cycle %0d after start, expected 15", cyc);
    end
    checks++;
    if (longint'(result) != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %0d*%0d: got %0d expected %0d", x, y, result, exp);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    one(0, 0); one(QM - 1, QM - 1); one(1, QM - 1); one(QM - 1, 1); one(QM - 1, 2);
    for (int i = 0; i < 1500; i++)
      one(longint'($urandom_range(0, int'(QM) - 1)), longint'($urandom_range(0, int'(QM) - 1)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
