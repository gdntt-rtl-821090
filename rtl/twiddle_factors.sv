// twiddle_factors -- twiddle factor memory of one core.
//
// Holds the table TW[e] = w^e mod q for e = 0..N-1, where w = GEN^((q-1)/N)
// is a primitive N-th root of unity. The table is computed at elaboration
// time from the package's powmod function, so no data file is needed.
//
// Every cycle it presents to each row i the factor that row needs in the
// current stage (only the "lower" rows of a butterfly use it):
//   forward stage, span h : rows of block j = i / (2h) use w^brv(j), where
//                           brv reverses log2(N)-1 bits (Cooley-Tukey with
//                           natural-order input, bit-reversed output);
//   inverse stage, span h : row with k = i mod h uses w^-(k * N/(2h))
//                           (decimation in time, bit-reversed input,
//                           natural-order output);
//   INTT scaling phase    : every row gets N^-1 mod q.
// Purely combinational; N read ports, one per row.
//
// The use of bit-reversed forward factors follows the published algorithm;
// modulus, root, inverse-factor indexing and the scaling factor are this
// implementation's choices.
module twiddle_factors
  import gdntt_pkg::*;
#(
  parameter int N   = 1024,
  parameter int L   = gdntt_pkg::WORD_W,
  parameter int Q   = gdntt_pkg::Q_MOD,
  parameter int GEN = gdntt_pkg::Q_GEN
) (
  input  ctrl_t        ctrl,
  output logic [L-1:0] tw [N]
);

  localparam int LOGN = $clog2(N);
  localparam longint unsigned W    = powmod(64'(GEN), (64'(Q) - 64'd1) / 64'(N), 64'(Q));
  localparam logic [L-1:0]    NINV = L'(powmod(64'(N), 64'(Q - 2), 64'(Q)));

  logic [L-1:0] table_q [N];
  for (genvar e = 0; e < N; e++) begin : g_tab
    localparam logic [L-1:0] V = L'(powmod(W, 64'(e), 64'(Q)));
    assign table_q[e] = V;
  end

  function automatic logic [LOGN-1:0] brv_m1(logic [LOGN-1:0] j);
    // reverse the low LOGN-1 bits
    logic [LOGN-1:0] r = '0;
    for (int b = 0; b < LOGN - 1; b++) r[LOGN-2-b] = j[b];
    return r;
  endfunction

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic [LOGN-1:0] idx;
      logic [LOGN-1:0] j, k;
      logic [LOGN:0]   e;
      e = '0;
      j = LOGN'(i >> (ctrl.span_log + 1));
      k = LOGN'(i & ((1 << ctrl.span_log) - 1));
      if (!ctrl.inverse) begin
        idx = brv_m1(j);
      end else begin
        e   = (LOGN+1)'(k) << (LOGN - 1 - int'(ctrl.span_log));
        idx = LOGN'((LOGN+1)'(N) - e);          // mod N by truncation
      end
      if (ctrl.phase inside {PH_SC_RD, PH_SC_MUL, PH_SC_WR}) tw[i] = NINV;
      else                                             tw[i] = table_q[idx];
    end
  end

endmodule
