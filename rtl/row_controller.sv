// row_controller -- word-line drivers of one array: RWL, HWL and the two
// per-row write enables WEN1/WEN2.
//
// In a butterfly stage of span h, row i is paired with row i XOR h; the row
// with bit log2(h) clear holds the first operand ("upper"), the other the
// second operand ("lower"), which is multiplied by the twiddle factor. The
// controller turns the phase broadcast by the top level controller into row
// masks, following the three-stage data mapping of the design:
//
//   phase          rows reading (CBL)   WEN1 (column of A)   WEN2 (column of B)
//   S1_RD          upper                -                    -
//   S1_WR          -                    upper (rewrite)      lower (partner word)
//   S2_RD          lower                -                    -
//   S2_WR          -                    lower (product)      upper (partner product)
//   S3_INV_RD      lower                -                    -
//   S3_INV_WR      -                    lower (inverted)     -
//   S3_ADD         all                  -                    -
//   S3_WR, SC_WR, PW_WR   -             all                  -
//   SC_RD, PW_RD   all                  -                    -
//
// RWL is raised on every row that reads or writes through CBL. For I/O
// (host_en) the addressed row gets RWL and HWL, connecting it to the VBL
// lines; I/O is meant for idle periods. Purely combinational.
//
// The row masks follow the data flow of the published design; the XOR
// pairing rule and the exact phase table are this implementation's choices.
module row_controller
  import gdntt_pkg::*;
#(
  parameter int N = 1024
) (
  input  ctrl_t                  ctrl,
  input  logic                   host_en,
  input  logic [$clog2(N)-1:0]   host_row,
  output logic [N-1:0]           rwl,
  output logic [N-1:0]           hwl,
  output logic [N-1:0]           wen1,
  output logic [N-1:0]           wen2,
  output logic [N-1:0]           lower
);

  logic [N-1:0] upper, all_rows, rd;

  always_comb begin
    for (int i = 0; i < N; i++) lower[i] = ((i >> ctrl.span_log) & 1) != 0;
    upper    = ~lower;
    all_rows = '1;
    rd   = '0;
    wen1 = '0;
    wen2 = '0;
    unique case (ctrl.phase)
      PH_S1_RD:                     rd = upper;
      PH_S1_WR:                     begin wen1 = upper; wen2 = lower; end
      PH_S2_RD, PH_S3_INV_RD:       rd = lower;
      PH_S2_WR:                     begin wen1 = lower; wen2 = upper; end
      PH_S3_INV_WR:                 wen1 = lower;
      PH_S3_ADD, PH_SC_RD, PH_PW_RD: rd = all_rows;
      PH_S3_WR, PH_SC_WR, PH_PW_WR: wen1 = all_rows;
      default: ;
    endcase
    hwl = '0;
    if (host_en) hwl[host_row] = 1'b1;
    rwl = rd | wen1 | wen2 | hwl;
  end

endmodule
