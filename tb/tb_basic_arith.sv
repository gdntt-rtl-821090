// tb_basic_arith -- drives the bit-serial adder with the bit-line values a
// row would sense (A AND B, NOR(A, B)) for random 14-bit words, LSB first,
// and checks every sum bit and the final carry against A+B (carry-in 0) and
// A + ~B + 1 (carry-in 1), computed directly.
module tb_basic_arith;
  logic clk = 1'b0;
  logic and_ab = 1'b0, nor_ab = 1'b1, latch_en = 1'b0, cin_init = 1'b0, init_val = 1'b0;
  logic sum, cout;

  basic_arith dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 600; it++) begin
      logic [13:0] x, y, yy;
      logic [14:0] exp;
      bit sub;
      x   = 14'($urandom);
      y   = 14'($urandom);
      sub = it[0];
      yy  = sub ? ~y : y;
      exp = {1'b0, x} + {1'b0, yy} + 15'(sub);
      for (int k = 0; k < 14; k++) begin
        @(negedge clk);
        and_ab   = x[k] & yy[k];
        nor_ab   = ~(x[k] | yy[k]);
        latch_en = 1'b1;
        cin_init = (k == 0);
        init_val = sub;
        #1;
        checks++;
        if (sum !== exp[k]) begin
          failures++;
          if (failures < 20) $display("FAIL bit %0d of %0h %s %0h", k, x, sub ? "-" : "+", y);
        end
        if (k == 13) begin
          checks++;
          if (cout !== exp[14]) begin
            failures++;
            if (failures < 20) $display("FAIL carry of %0h %s %0h", x, sub ? "-" : "+", y);
          end
        end
      end
      @(negedge clk);
      latch_en = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
