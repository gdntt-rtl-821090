// ntt_core -- one half of the accelerator: an N x 28 10T SRAM array with its
// row and column controllers, one near-memory unit per row, the data
// exchange channels between those units and the twiddle factor memory.
//
// Each row r holds coefficient r of the polynomial in sub-array A (columns
// 0..13); sub-array B (columns 14..27) is scratch space for the butterfly
// partner's operand. All rows work at once, one bit per clock, following the
// phase broadcast in ctrl (see top_controller): rows read through their CBL
// pair into their unit, units swap words over the exchange channels, and
// write back through the same CBL pair.
//
// cross_in / sensed form the data link between the two cores: sensed[i] is
// the bit sensed on row i's CBL this cycle, delivered to the other core's
// unit i for the point-wise product.
//
// I/O: host_en selects row host_row for a VBL access; host_col picks one of
// the 28 columns; host_we writes host_wdata at the clock edge, host_rdata is
// the selected bit (combinational). Use I/O only while the controller is
// idle. A coefficient is written by 14 single-bit accesses to columns 0..13.
module ntt_core
  import gdntt_pkg::*;
#(
  parameter int N = 1024,
  parameter int L = gdntt_pkg::WORD_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  ctrl_t                 ctrl,
  input  logic [N-1:0]          cross_in,
  output logic [N-1:0]          sensed,
  input  logic                  host_en,
  input  logic [$clog2(N)-1:0]  host_row,
  input  logic [4:0]            host_col,
  input  logic                  host_we,
  input  logic                  host_wdata,
  output logic                  host_rdata
);

  logic [N-1:0]   rwl, hwl, wen1, wen2, lower, wdata, cbl, cblb, xout, xin;
  logic [2*L-1:0] cwl_rd, cwl_w1, cwl_w2;
  logic [L-1:0]   tw [N];

  row_controller #(.N(N)) u_row (
    .ctrl     (ctrl),
    .host_en  (host_en),
    .host_row (host_row),
    .rwl      (rwl),
    .hwl      (hwl),
    .wen1     (wen1),
    .wen2     (wen2),
    .lower    (lower)
  );

  column_controller #(.L(L)) u_col (
    .ctrl   (ctrl),
    .cwl_rd (cwl_rd),
    .cwl_w1 (cwl_w1),
    .cwl_w2 (cwl_w2)
  );

  sram10t_array #(.N(N), .COLS(2 * L)) u_array (
    .clk       (clk),
    .rwl       (rwl),
    .hwl       (hwl),
    .cwl_rd    (cwl_rd),
    .cwl_w1    (cwl_w1),
    .cwl_w2    (cwl_w2),
    .wen1      (wen1),
    .wen2      (wen2),
    .wdata     (wdata),
    .cbl       (cbl),
    .cblb      (cblb),
    .vbl_col   (host_col),
    .vbl_we    (host_we),
    .vbl_wdata (host_wdata),
    .vbl_rdata (host_rdata)
  );

  twiddle_factors #(.N(N), .L(L)) u_tw (
    .ctrl (ctrl),
    .tw   (tw)
  );

  exchange_network #(.N(N)) u_xch (
    .span_log (ctrl.span_log),
    .xout     (xout),
    .xin      (xin)
  );

  for (genvar i = 0; i < N; i++) begin : g_nmu
    near_mem_unit #(.L(L)) u_nmu (
      .clk      (clk),
      .rst_n    (rst_n),
      .ctrl     (ctrl),
      .lower    (lower[i]),
      .cbl      (cbl[i]),
      .cblb     (cblb[i]),
      .xch_in   (xin[i]),
      .xch_out  (xout[i]),
      .cross_in (cross_in[i]),
      .tw       (tw[i]),
      .wdata    (wdata[i])
    );
  end

  assign sensed = cbl;

endmodule
