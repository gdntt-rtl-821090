// tb_exchange_network -- for every span of a 32-unit network and random sent
// bits, checks that unit i receives the bit of unit i XOR span.
module tb_exchange_network;
  localparam int N = 32;

  logic [4:0]   span_log;
  logic [N-1:0] xout, xin;

  exchange_network #(.N(N)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 50; it++)
      for (int s = 0; s < $clog2(N); s++) begin
        span_log = 5'(s);
        xout = N'($urandom);
        #1;
        for (int i = 0; i < N; i++) begin
          checks++;
          if (xin[i] !== xout[i ^ (1 << s)]) begin
            failures++;
            if (failures < 20) $display("FAIL span %0d unit %0d", 1 << s, i);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
