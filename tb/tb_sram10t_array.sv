// tb_sram10t_array -- random test of the 10T SRAM array model against a
// shadow copy kept in the testbench (N = 8 rows, 28 columns).
//
// Each cycle does one of: I/O write through the column mux, I/O read, CBL
// read of one column on random rows (expects bit / complement), CBL read of
// a column of A and the same bit of B together (expects AND / NOR), or a
// CBL write with random WEN1 and WEN2 rows on two columns. CBL reads must
// clear the cells read; unselected rows must see both lines precharged high.
module tb_sram10t_array;
  localparam int N = 8, C = 28;

  logic clk = 1'b0;
  logic [N-1:0] rwl, hwl, wen1, wen2, wdata, cbl, cblb;
  logic [C-1:0] cwl_rd, cwl_w1, cwl_w2;
  logic [4:0]   vbl_col;
  logic         vbl_we, vbl_wdata, vbl_rdata;

  sram10t_array #(.N(N), .COLS(C)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [C-1:0] model [N];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle();
    rwl = '0; hwl = '0; wen1 = '0; wen2 = '0; wdata = '0;
    cwl_rd = '0; cwl_w1 = '0; cwl_w2 = '0; vbl_col = '0; vbl_we = 1'b0; vbl_wdata = 1'b0;
  endtask

  task automatic chk(input bit got, input bit exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0b expected %0b", what, got, exp);
    end
  endtask

  initial begin
    idle();
    // fill every cell through the I/O path
    for (int r = 0; r < N; r++)
      for (int c = 0; c < C; c++) begin
        @(negedge clk);
        idle(); rwl[r] = 1'b1; hwl[r] = 1'b1; vbl_col = 5'(c); vbl_we = 1'b1;
        vbl_wdata = 1'($urandom_range(0, 1)); model[r][c] = vbl_wdata;
      end
    for (int it = 0; it < 2000; it++) begin
      int kind, c, c2;
      @(negedge clk);
      idle();
      kind = $urandom_range(0, 4);
      c    = $urandom_range(0, 13);
      case (kind)
        0: begin // I/O write
          int r = $urandom_range(0, N - 1);
          c2 = $urandom_range(0, C - 1);
          rwl[r] = 1'b1; hwl[r] = 1'b1; vbl_col = 5'(c2); vbl_we = 1'b1;
          vbl_wdata = 1'($urandom_range(0, 1));
          model[r][c2] = vbl_wdata;
        end
        1: begin // I/O read (non-destructive)
          int r = $urandom_range(0, N - 1);
          c2 = $urandom_range(0, C - 1);
          rwl[r] = 1'b1; hwl[r] = 1'b1; vbl_col = 5'(c2);
          #1 chk(vbl_rdata, model[r][c2], "VBL read");
        end
        2, 3: begin // CBL read, one column (2) or A and B together (3)
          rwl = N'($urandom);
          cwl_rd[c] = 1'b1;
          if (kind == 3) cwl_rd[c + 14] = 1'b1;
          #1;
          for (int r = 0; r < N; r++) begin
            if (!rwl[r]) begin
              chk(cbl[r], 1'b1, "precharged CBL"); chk(cblb[r], 1'b1, "precharged CBLB");
            end else if (kind == 2) begin
              chk(cbl[r], model[r][c], "CBL bit"); chk(cblb[r], ~model[r][c], "CBLB bit");
            end else begin
              chk(cbl[r], model[r][c] & model[r][c + 14], "CBL AND");
              chk(cblb[r], ~(model[r][c] | model[r][c + 14]), "CBLB NOR");
            end
          end
          for (int r = 0; r < N; r++)
            if (rwl[r]) begin
              model[r][c] = 1'b0;
              if (kind == 3) model[r][c + 14] = 1'b0;
            end
        end
        4: begin // CBL write with WEN1 on column c, WEN2 on column c+14
          wen1 = N'($urandom); wen2 = N'($urandom) & ~wen1; wdata = N'($urandom);
          rwl = wen1 | wen2;
          cwl_w1[c] = 1'b1; cwl_w2[c + 14] = 1'b1;
          for (int r = 0; r < N; r++) begin
            if (wen1[r]) model[r][c] = wdata[r];
            if (wen2[r]) model[r][c + 14] = wdata[r];
          end
        end
        default: ;
      endcase
    end
    // final full comparison through the I/O path
    for (int r = 0; r < N; r++)
      for (int cc = 0; cc < C; cc++) begin
        @(negedge clk);
        idle(); rwl[r] = 1'b1; hwl[r] = 1'b1; vbl_col = 5'(cc);
        #1 chk(vbl_rdata, model[r][cc], "final contents");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
