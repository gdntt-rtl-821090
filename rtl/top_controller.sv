// top_controller -- top level controller: sequences the butterfly schedule
// and broadcasts it to both cores.
//
// One radix-2 stage of an N-point transform is three steps (all rows of a
// core work in parallel, bit-serially):
//   Stage 1, 2L cycles      S1_RD, S1_WR            move the first operands
//                                                   next to the second ones
//   Stage 2, 2L+16 cycles   S2_RD, S2_MUL, S2_WR    multiply the second
//                                                   operands by the twiddle
//                                                   and move the products back
//   Stage 3, 4L+17 cycles   S3_INV_RD, S3_INV_WR,   invert the subtrahends,
//                           S3_ADD, S3_FIX, S3_WR   add, correct mod q, store
// i.e. 8L+33 = 145 cycles per stage for L = 14.
//
// op = OP_NTT : log2(N) stages with spans N/2, N/4, ..., 1 (natural-order
//               input, bit-reversed output).
// op = OP_INTT: log2(N) stages with spans 1, 2, ..., N/2 and inverse
//               factors (bit-reversed input, natural output), then a scaling
//               pass SC_RD, SC_MUL, SC_WR (L+16+L cycles) by N^-1.
// op = OP_PWM : one pass PW_RD, PW_MUL, PW_WR (L+16+L cycles): each core
//               multiplies its words by the other core's words, row by row.
//
// Interface: start (one cycle, accepted when idle) with op; busy while
// running; done pulses for one cycle in the cycle after the last phase. The
// control word ctrl is registered.
//
// The per-stage phases and their lengths (2L, 2L+16, 4L+17) are the
// published schedule; the split of stage 3, the INTT scaling pass, the
// point-wise pass and the command interface are this implementation's.
module top_controller
  import gdntt_pkg::*;
#(
  parameter int N = 1024
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  op_t   op,
  output ctrl_t ctrl,
  output logic  busy,
  output logic  done
);

  localparam int LOGN = $clog2(N);

  op_t        op_q;
  logic [4:0] stage_q;

  function automatic phase_t next_phase(phase_t p, op_t o, logic last_stage);
    case (p)
      PH_S1_RD:     return PH_S1_WR;
      PH_S1_WR:     return PH_S2_RD;
      PH_S2_RD:     return PH_S2_MUL;
      PH_S2_MUL:    return PH_S2_WR;
      PH_S2_WR:     return PH_S3_INV_RD;
      PH_S3_INV_RD: return PH_S3_INV_WR;
      PH_S3_INV_WR: return PH_S3_ADD;
      PH_S3_ADD:    return PH_S3_FIX;
      PH_S3_FIX:    return PH_S3_WR;
      PH_S3_WR:     return !last_stage ? PH_S1_RD : (o == OP_INTT ? PH_SC_RD : PH_IDLE);
      PH_SC_RD:     return PH_SC_MUL;
      PH_SC_MUL:    return PH_SC_WR;
      PH_PW_RD:     return PH_PW_MUL;
      PH_PW_MUL:    return PH_PW_WR;
      default:      return PH_IDLE;
    endcase
  endfunction

  function automatic logic [4:0] span_of(op_t o, logic [4:0] s);
    return (o == OP_INTT) ? s : 5'(LOGN - 1) - s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl    <= '{phase: PH_IDLE, cnt: '0, span_log: '0, inverse: 1'b0};
      op_q    <= OP_NONE;
      stage_q <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (ctrl.phase == PH_IDLE) begin
        if (start && op != OP_NONE) begin
          op_q          <= op;
          stage_q       <= '0;
          ctrl.cnt      <= '0;
          ctrl.inverse  <= (op == OP_INTT);
          ctrl.span_log <= span_of(op, 5'd0);
          ctrl.phase    <= (op == OP_PWM) ? PH_PW_RD : PH_S1_RD;
        end
      end else if (int'(ctrl.cnt) == phase_len(ctrl.phase) - 1) begin
        phase_t nxt;
        logic   last_stage;
        last_stage = int'(stage_q) == LOGN - 1;
        nxt        = next_phase(ctrl.phase, op_q, last_stage);
        ctrl.cnt   <= '0;
        ctrl.phase <= nxt;
        if (ctrl.phase == PH_S3_WR && !last_stage) begin
          stage_q       <= stage_q + 1'b1;
          ctrl.span_log <= span_of(op_q, stage_q + 1'b1);
        end
        if (nxt == PH_IDLE) done <= 1'b1;
      end else begin
        ctrl.cnt <= ctrl.cnt + 1'b1;
      end
    end
  end

  assign busy = ctrl.phase != PH_IDLE;

  // The broadcast bit counter must stay inside the current phase.
  a_cnt_in_phase: assert property (@(posedge clk) disable iff (!rst_n)
    int'(ctrl.cnt) < phase_len(ctrl.phase));

endmodule
