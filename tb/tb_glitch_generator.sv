// tb_glitch_generator -- clock period 20 time units, pulse width 2. Checks
// that in every clock period the five pulses appear once each, in the order
// precharge, cwl, sae, latch_en, wen, each T_PULSE wide, never two at once,
// and all within the period.
module tb_glitch_generator;
  localparam int T = 2, PERIOD = 20;

  logic clk = 1'b0;
  logic precharge, cwl, sae, latch_en, wen;

  glitch_generator #(.T_PULSE(T)) dut (.*);

  always #(PERIOD / 2) clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    @(posedge clk);
    for (int cyc = 0; cyc < 50; cyc++) begin
      logic [4:0] v;
      // sample in the middle of each pulse slot
      for (int slot = 0; slot < PERIOD / T; slot++) begin
        #(T / 2);
        v = {precharge, cwl, sae, latch_en, wen};
        if (slot < 5) chk(v == (5'b10000 >> slot), $sformatf("pulse slot %0d value %b", slot, v));
        else          chk(v == 5'b0, "all pulses low after the sequence");
        #(T - T / 2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
