// column_controller -- column word-line (CWL) drivers of one array.
//
// Words are processed bit-serially, least significant bit first, one bit per
// clock: in every bit-serial phase the phase counter ctrl.cnt is the bit
// index k. Bit k of the sub-array A word sits in column k, bit k of the
// sub-array B word in column L+k.
//
//   cwl_rd : column(s) connected to CBL for a read. Column k, except in the
//            stage-3 add phase where columns k and L+k are raised together so
//            that each row's CBL pair carries A_k AND B_k and NOR(A_k, B_k).
//   cwl_w1 : column written by rows with WEN1 (always column k of A).
//   cwl_w2 : column written by rows with WEN2 (always column L+k of B).
//
// Outside bit-serial phases all lines stay low. Purely combinational.
// The bit order and column assignment are choices of this implementation.
module column_controller
  import gdntt_pkg::*;
#(
  parameter int L = gdntt_pkg::WORD_W
) (
  input  ctrl_t            ctrl,
  output logic [2*L-1:0]   cwl_rd,
  output logic [2*L-1:0]   cwl_w1,
  output logic [2*L-1:0]   cwl_w2
);

  logic [2*L-1:0] col_a, col_b;

  always_comb begin
    col_a = '0;
    col_b = '0;
    if (int'(ctrl.cnt) < L) begin
      col_a[ctrl.cnt]     = 1'b1;
      col_b[L + int'(ctrl.cnt)] = 1'b1;
    end
    cwl_rd = '0;
    cwl_w1 = '0;
    cwl_w2 = '0;
    unique case (ctrl.phase)
      PH_S1_RD, PH_S2_RD, PH_S3_INV_RD, PH_SC_RD, PH_PW_RD: cwl_rd = col_a;
      PH_S3_ADD:                                            cwl_rd = col_a | col_b;
      PH_S1_WR, PH_S2_WR:                       begin cwl_w1 = col_a; cwl_w2 = col_b; end
      PH_S3_INV_WR, PH_S3_WR, PH_SC_WR, PH_PW_WR:           cwl_w1 = col_a;
      default: ;
    endcase
  end

endmodule
