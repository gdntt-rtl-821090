// tb_row_controller -- for every phase and every span of a 16-row array,
// checks RWL, HWL, WEN1, WEN2 and the lower-row flag against the row table
// of the butterfly schedule, and checks I/O row selection.
module tb_row_controller;
  import gdntt_pkg::*;
  localparam int N = 16;

  ctrl_t ctrl;
  logic host_en;
  logic [3:0] host_row;
  logic [N-1:0] rwl, hwl, wen1, wen2, lower;

  row_controller #(.N(N)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [N-1:0] got, input logic [N-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s in %s: got %h expected %h", what, ctrl.phase.name(), got, exp);
    end
  endtask

  initial begin
    for (int s = 0; s < 4; s++) begin
      logic [N-1:0] lo, up;
      lo = '0;
      // row i is the second operand when it is the larger index of its pair
      for (int i = 0; i < N; i++) lo[i] = (i % (2 << s)) >= (1 << s);
      up = ~lo;
      for (int p = int'(PH_IDLE); p <= int'(PH_PW_WR); p++) begin
        logic [N-1:0] erd, ew1, ew2;
        ctrl = '{phase: phase_t'(p), cnt: 5'($urandom_range(0, 13)), span_log: 5'(s), inverse: 1'($urandom)};
        host_en = 1'b0; host_row = '0;
        erd = '0; ew1 = '0; ew2 = '0;
        case (phase_t'(p))
          PH_S1_RD:                     erd = up;
          PH_S1_WR:                     begin ew1 = up; ew2 = lo; end
          PH_S2_RD, PH_S3_INV_RD:       erd = lo;
          PH_S2_WR:                     begin ew1 = lo; ew2 = up; end
          PH_S3_INV_WR:                 ew1 = lo;
          PH_S3_ADD, PH_SC_RD, PH_PW_RD: erd = '1;
          PH_S3_WR, PH_SC_WR, PH_PW_WR: ew1 = '1;
          default: ;
        endcase
        #1;
        chk(lower, lo, "lower");
        chk(rwl, erd | ew1 | ew2, "rwl");
        chk(hwl, '0, "hwl");
        chk(wen1, ew1, "wen1");
        chk(wen2, ew2, "wen2");
      end
    end
    ctrl = '{phase: PH_IDLE, cnt: '0, span_log: '0, inverse: 1'b0};
    for (int r = 0; r < N; r++) begin
      host_en = 1'b1; host_row = 4'(r);
      #1;
      chk(hwl, N'(1) << r, "host hwl");
      chk(rwl, N'(1) << r, "host rwl");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
