// tb_top_controller -- N = 8. Records the sequence of (phase, length, span,
// inverse) the controller broadcasts for NTT, INTT and point-wise commands
// and compares it with the schedule written out here: per stage
// S1_RD 14, S1_WR 14, S2_RD 14, S2_MUL 16, S2_WR 14, S3_INV_RD 14,
// S3_INV_WR 14, S3_ADD 14, S3_FIX 17, S3_WR 14 (2L, 2L+16, 4L+17); spans
// 4,2,1 forward and 1,2,4 inverse; INTT ends with SC_RD 14, SC_MUL 16,
// SC_WR 14; point-wise is PW_RD 14, PW_MUL 16, PW_WR 14. Also checks busy,
// the single done pulse, and that a start while busy is ignored.
module tb_top_controller;
  import gdntt_pkg::*;
  localparam int N = 8;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  op_t op = OP_NONE;
  ctrl_t ctrl;

  top_controller #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  typedef struct { phase_t ph; int len; int span; bit inv; } seg_t;
  seg_t got [$], exp [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic add_stage(input int span, input bit inv);
    exp.push_back('{PH_S1_RD, 14, span, inv});
    exp.push_back('{PH_S1_WR, 14, span, inv});
    exp.push_back('{PH_S2_RD, 14, span, inv});
    exp.push_back('{PH_S2_MUL, 16, span, inv});
    exp.push_back('{PH_S2_WR, 14, span, inv});
    exp.push_back('{PH_S3_INV_RD, 14, span, inv});
    exp.push_back('{PH_S3_INV_WR, 14, span, inv});
    exp.push_back('{PH_S3_ADD, 14, span, inv});
    exp.push_back('{PH_S3_FIX, 17, span, inv});
    exp.push_back('{PH_S3_WR, 14, span, inv});
  endtask

  task automatic run(input op_t o);
    int dones;
    got.delete();
    @(negedge clk);
    op = o; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    dones = 0;
    while (busy) begin
      if (got.size() == 0 || got[$].ph != ctrl.phase) begin
        checks++;
        if (ctrl.cnt != 0) begin failures++; $display("FAIL phase %s entered at count %0d", ctrl.phase.name(), ctrl.cnt); end
        got.push_back('{ctrl.phase, 1, int'(ctrl.span_log), ctrl.inverse});
      end else got[$].len++;
      if (got.size() == 3 && got[$].len == 2) start = 1'b1;   // must be ignored
      @(negedge clk);
      start = 1'b0;
      if (done) dones++;
    end
    repeat (3) begin @(negedge clk); if (done) dones++; end
    checks++;
    if (dones != 1) begin failures++; $display("FAIL %0d done pulses", dones); end
    checks++;
    if (got.size() != exp.size()) begin
      failures++;
      $display("FAIL %s: %0d phases, expected %0d", o.name(), got.size(), exp.size());
    end
    for (int i = 0; i < got.size() && i < exp.size(); i++) begin
      checks++;
      if (got[i] != exp[i]) begin
        failures++;
        if (failures < 20)
          $display("FAIL %s segment %0d: %s len %0d span %0d inv %0d, expected %s len %0d span %0d inv %0d",
                   o.name(), i, got[i].ph.name(), got[i].len, got[i].span, got[i].inv,
                   exp[i].ph.name(), exp[i].len, exp[i].span, exp[i].inv);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    exp.delete();
    add_stage(2, 0); add_stage(1, 0); add_stage(0, 0);
    run(OP_NTT);
    exp.delete();
    add_stage(0, 1); add_stage(1, 1); add_stage(2, 1);
    exp.push_back('{PH_SC_RD, 14, 2, 1});
    exp.push_back('{PH_SC_MUL, 16, 2, 1});
    exp.push_back('{PH_SC_WR, 14, 2, 1});
    run(OP_INTT);
    exp.delete();
    exp.push_back('{PH_PW_RD, 14, 2, 0});
    exp.push_back('{PH_PW_MUL, 16, 2, 0});
    exp.push_back('{PH_PW_WR, 14, 2, 0});
    run(OP_PWM);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
