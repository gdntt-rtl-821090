// near_mem_unit -- the near-memory computing unit attached to one SRAM row.
//
// The unit keeps the row's current word in the shift register x_q. Bits
// arrive from the row's sense amplifiers least significant bit first and
// are shifted in at the top, so after L read cycles x_q holds the word.
// During write phases x_q rotates right by one bit per cycle and x_q[0] is
// both the bit offered to the butterfly partner (xch_out) and, when the row
// writes its own word, the bit driven on the row's write driver.
//
// What the unit does in each phase of the top level controller (rows are
// "upper" or "lower" in the butterfly of the current stage, see
// row_controller):
//   S1_RD / S2_RD / S3_INV_RD / SC_RD / PW_RD  shift the sensed bit into x_q
//            (only the rows that read); in PW_RD the bit sensed in the same
//            row of the other array is shifted into y_q as well.
//   S1_WR    upper: write own bit back to A; lower: write the partner's bit to B.
//   S2_MUL / SC_MUL / PW_MUL  Barrett multiplication x_q * (twiddle, n^-1
//            or y_q); x_q is loaded with the product when the multiplier
//            reports done (the MUX2 choice: adder or multiplier result).
//   S2_WR    lower: write own product back to A; upper: write partner's to B.
//   S3_INV_WR  lower rows write their word back inverted.
//   S3_ADD   all rows: the sensed A-AND-B / NOR(A,B) pair of bit k goes
//            through basic_arith; carry-in of bit 0 is 0 on upper rows (A+B)
//            and 1 on lower rows (B + not A + 1 = B - A). Sum bits are shifted
//            into x_q, the final carry kept in c_q.
//   S3_FIX   17 cycles of modular correction of s = {c_q, x_q}:
//            cycle 0 copies s to f_q; cycles 1..L+1 add the constant K bit
//            serially through the same adder (f_q rotates, sum bits go to
//            t_q); cycle L+2 selects. Upper rows: K = 2^(L+1) - q and the
//            corrected value t is taken if the addition carried (s >= q).
//            Lower rows: K = q and t is taken if c_q = 0 (B < A, negative).
//   S3_WR / SC_WR / PW_WR  write own bit to A.
//
// Interface: sensed bits cbl/cblb (combinational from the array), partner
// bit xch_in, other-array bit cross_in, twiddle tw; the write bit wdata is
// combinational from the registers. Phase timing: see top_controller.
//
// The phase sequence, the operand roles, the inversion-then-add subtraction
// and the 16- and 17-cycle budgets follow the published design. The
// register organisation and the correction method are this implementation's.
module near_mem_unit
  import gdntt_pkg::*;
#(
  parameter int L = gdntt_pkg::WORD_W,
  parameter int Q = gdntt_pkg::Q_MOD
) (
  input  logic         clk,
  input  logic         rst_n,
  input  ctrl_t        ctrl,
  input  logic         lower,
  input  logic         cbl,
  input  logic         cblb,
  input  logic         xch_in,
  output logic         xch_out,
  input  logic         cross_in,
  input  logic [L-1:0] tw,
  output logic         wdata
);

  localparam int         K_ADD_I = (1 << (L + 1)) - Q;
  localparam logic [L:0] K_ADD = (L+1)'(K_ADD_I);      // 2^(L+1) - q
  localparam logic [L:0] K_SUB = (L+1)'(Q);

  logic [L-1:0] x_q, y_q;
  logic [L:0]   f_q, t_q;
  logic         c_q, tc_q;

  // ---- adder operands --------------------------------------------------
  logic       fix_add;   // correction add cycles
  logic       k_bit;
  logic       a_in, b_in;
  logic       and_ab, nor_ab, sum, cout;
  logic [L:0] k_val;

  assign fix_add = ctrl.phase == PH_S3_FIX && ctrl.cnt >= 1 && int'(ctrl.cnt) <= L + 1;
  assign k_val   = lower ? K_SUB : K_ADD;
  assign k_bit   = (ctrl.cnt >= 1 && int'(ctrl.cnt) <= L + 1) ? k_val[$clog2(L+1)'(ctrl.cnt - 1'b1)] : 1'b0;
  assign a_in    = f_q[0];
  assign b_in    = k_bit;
  assign and_ab  = fix_add ? (a_in & b_in)    : cbl;
  assign nor_ab  = fix_add ? ~(a_in | b_in)   : cblb;

  basic_arith u_arith (
    .clk      (clk),
    .and_ab   (and_ab),
    .nor_ab   (nor_ab),
    .latch_en (ctrl.phase == PH_S3_ADD || fix_add),
    .cin_init ((ctrl.phase == PH_S3_ADD && ctrl.cnt == '0) || (fix_add && ctrl.cnt == CNT_W'(1))),
    .init_val (ctrl.phase == PH_S3_ADD ? lower : 1'b0),
    .sum      (sum),
    .cout     (cout)
  );

  // ---- modular multiplier ---------------------------------------------
  logic         mm_start, mm_busy, mm_done;
  logic [L-1:0] mm_b, mm_res;
  logic         mul_phase;

  assign mul_phase = ctrl.phase == PH_S2_MUL || ctrl.phase == PH_SC_MUL || ctrl.phase == PH_PW_MUL;
  assign mm_start  = mul_phase && ctrl.cnt == '0 && (ctrl.phase != PH_S2_MUL || lower);
  assign mm_b      = ctrl.phase == PH_PW_MUL ? y_q : tw;

  barrett_modmul #(.L(L), .Q(Q)) u_mm (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (mm_start),
    .a      (x_q),
    .b      (mm_b),
    .busy   (mm_busy),
    .done   (mm_done),
    .result (mm_res)
  );

  // ---- word registers ---------------------------------------------------
  logic reading;
  always_comb begin
    unique case (ctrl.phase)
      PH_S1_RD:                      reading = ~lower;
      PH_S2_RD, PH_S3_INV_RD:        reading = lower;
      PH_SC_RD, PH_PW_RD:            reading = 1'b1;
      default:                       reading = 1'b0;
    endcase
  end

  logic writing;
  assign writing = ctrl.phase inside {PH_S1_WR, PH_S2_WR, PH_S3_INV_WR, PH_S3_WR, PH_SC_WR, PH_PW_WR};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q  <= '0;
      y_q  <= '0;
      f_q  <= '0;
      t_q  <= '0;
      c_q  <= 1'b0;
      tc_q <= 1'b0;
    end else begin
      if (reading) x_q <= {cbl, x_q[L-1:1]};
      if (ctrl.phase == PH_PW_RD) y_q <= {cross_in, y_q[L-1:1]};
      if (writing) x_q <= {x_q[0], x_q[L-1:1]};
      if (mul_phase && mm_done) x_q <= mm_res;              // MUX2: multiplier result
      if (ctrl.phase == PH_S3_ADD) begin
        x_q <= {sum, x_q[L-1:1]};                           // MUX2: adder result
        if (int'(ctrl.cnt) == L - 1) c_q <= cout;
      end
      if (ctrl.phase == PH_S3_FIX) begin
        if (ctrl.cnt == '0) f_q <= {c_q, x_q};
        if (fix_add) begin
          f_q <= {f_q[0], f_q[L:1]};
          t_q <= {sum, t_q[L:1]};
          if (int'(ctrl.cnt) == L + 1) tc_q <= cout;
        end
        if (int'(ctrl.cnt) == L + 2) begin
          if (lower) x_q <= f_q[L] ? f_q[L-1:0] : t_q[L-1:0];
          else       x_q <= tc_q   ? t_q[L-1:0] : f_q[L-1:0];
        end
      end
    end
  end

  // ---- write data and exchange ------------------------------------------
  assign xch_out = x_q[0];
  always_comb begin
    unique case (ctrl.phase)
      PH_S1_WR:     wdata = lower ? xch_in : x_q[0];
      PH_S2_WR:     wdata = lower ? x_q[0] : xch_in;
      PH_S3_INV_WR: wdata = ~x_q[0];
      default:      wdata = x_q[0];
    endcase
  end

endmodule
