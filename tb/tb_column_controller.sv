// tb_column_controller -- for every phase and bit index checks the column
// word lines: read of bit k of A (and bit k of B in the add phase), WEN1
// column k of A and WEN2 column 14+k of B in the exchange phases.
module tb_column_controller;
  import gdntt_pkg::*;

  ctrl_t ctrl;
  logic [27:0] cwl_rd, cwl_w1, cwl_w2;

  column_controller dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [27:0] got, input logic [27:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s in %s bit %0d: got %h expected %h", what, ctrl.phase.name(), ctrl.cnt, got, exp);
    end
  endtask

  initial begin
    for (int p = int'(PH_IDLE); p <= int'(PH_PW_WR); p++)
      for (int k = 0; k < 14; k++) begin
        logic [27:0] a, b, er, e1, e2;
        ctrl = '{phase: phase_t'(p), cnt: 5'(k), span_log: 5'($urandom_range(0, 9)), inverse: 1'b0};
        a = 28'(1) << k;
        b = 28'(1) << (14 + k);
        er = '0; e1 = '0; e2 = '0;
        case (phase_t'(p))
          PH_S1_RD, PH_S2_RD, PH_S3_INV_RD, PH_SC_RD, PH_PW_RD: er = a;
          PH_S3_ADD:                                            er = a | b;
          PH_S1_WR, PH_S2_WR:                                   begin e1 = a; e2 = b; end
          PH_S3_INV_WR, PH_S3_WR, PH_SC_WR, PH_PW_WR:           e1 = a;
          default: ;
        endcase
        #1;
        chk(cwl_rd, er, "cwl_rd");
        chk(cwl_w1, e1, "cwl_w1");
        chk(cwl_w2, e2, "cwl_w2");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
