// barrett_modmul -- modular multiplier of one near-memory unit, a*b mod q in
// 16 clock cycles using Barrett reduction.
//
// Cycle 0 (start high): operands are captured and the first shift-and-add
//   step is done with the multiplier's most significant bit.
// Cycles 1..L-1: one shift-and-add step per cycle, p = 2p + (b_bit ? a : 0),
//   so after L steps p = a*b (< 2^(2L)).
// Cycle L: Barrett estimate t = floor(p * MU / 2^(2L)), MU = floor(2^(2L)/q),
//   and r = p - t*q, which lies in [0, 3q).
// Cycle L+1 (the 16th for L = 14): done is high and result = r reduced by at
//   most two subtractions of q, combinationally; the caller captures it at
//   the end of this cycle.
//
// Interface: start is a one-cycle pulse; a and b must be below q; busy is
// high from the cycle after start until done. The total of 16 cycles and the
// use of Barrett reduction follow the published design; the split of the
// cycles and the constants are this implementation's choices.
module barrett_modmul
  import gdntt_pkg::*;
#(
  parameter int L = gdntt_pkg::WORD_W,
  parameter int Q = gdntt_pkg::Q_MOD
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [L-1:0] a,
  input  logic [L-1:0] b,
  output logic         busy,
  output logic         done,
  output logic [L-1:0] result
);

  localparam longint unsigned MU = (64'd1 << (2 * L)) / 64'(Q);
  localparam int CW = $clog2(L + 2);

  logic [L-1:0]   a_q, b_q;
  logic [2*L-1:0] p_q;
  logic [L+2:0]   r_q;       // < 3q
  logic [CW-1:0]  step;

  logic [4*L+1:0] pm;        // p * MU
  logic [2*L+1:0] t, tq;
  assign pm = {2'b0, p_q} * (4*L+2)'(MU);
  assign t  = (2*L+2)'(pm >> (2 * L));       // floor(p*MU / 2^(2L))
  assign tq = t * (2*L+2)'(Q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      step <= '0;
      a_q  <= '0;
      b_q  <= '0;
      p_q  <= '0;
      r_q  <= '0;
    end else if (start) begin
      busy <= 1'b1;
      step <= CW'(1);
      a_q  <= a;
      b_q  <= b << 1;
      p_q  <= b[L-1] ? (2*L)'(a) : '0;
    end else if (busy) begin
      step <= step + 1'b1;
      if (int'(step) < L) begin
        p_q <= (p_q << 1) + (b_q[L-1] ? (2*L)'(a_q) : '0);
        b_q <= b_q << 1;
      end else if (int'(step) == L) begin
        r_q <= (L+3)'({2'b0, p_q} - tq);
      end else begin
        busy <= 1'b0;
      end
    end
  end

  assign done = busy && int'(step) == L + 1;

  always_comb begin
    logic [L+2:0] r;
    r = r_q;
    if (r >= (L+3)'(Q)) r = r - (L+3)'(Q);
    if (r >= (L+3)'(Q)) r = r - (L+3)'(Q);
    result = r[L-1:0];
  end

endmodule
