// gdntt_top -- glitch-driven near-memory NTT accelerator.
//
// Two identical cores (ntt_core), each an N x 28 10T SRAM array with
// near-memory logic on every row, run in lockstep under one top level
// controller. Each core holds one polynomial of N 14-bit coefficients mod q,
// one coefficient per row, and transforms it in place: a forward NTT leaves
// the spectrum in bit-reversed row order, an INTT takes bit-reversed input
// and returns natural order scaled by N^-1. The point-wise operation
// multiplies, in both cores, row i of one array by row i of the other, over
// the data link between the two cores' near-memory logic. NTT on both,
// point-wise product, INTT thus gives the cyclic product a*b mod (x^N - 1).
//
// Latency (L = 14): 145 cycles per radix-2 stage, so an N = 1024 NTT takes
// 1450 cycles from start to done, an INTT 1450 + 44, a point-wise product 44.
//
// Interface:
//   start/op  command (op_t), accepted while idle; busy, done (1-cycle pulse)
//   phase     current phase of the controller, for observation
//   host_*    bit-wide I/O through the 28:1 column mux of the selected array
//             (host_core), row host_row, column host_col (0..13 = coefficient
//             bits, LSB in column 0); host_rdata is combinational; use while idle
//   glitch    the five pulses of the glitch generator model, for observation
//             only ({precharge, cwl, sae, latch_en, wen})
//
// The block structure (controller, glitch generator, two arrays with row and
// column controllers, near-memory logic, twiddle factors, the link between
// the halves) is the published architecture; the I/O port and the command
// interface are this implementation's.
module gdntt_top
  import gdntt_pkg::*;
#(
  parameter int N = 1024
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  op_t                   op,
  output logic                  busy,
  output logic                  done,
  output phase_t                phase,
  input  logic                  host_en,
  input  logic                  host_core,
  input  logic [$clog2(N)-1:0]  host_row,
  input  logic [4:0]            host_col,
  input  logic                  host_we,
  input  logic                  host_wdata,
  output logic                  host_rdata,
  output logic [4:0]            glitch
);

  ctrl_t        ctrl;
  logic [N-1:0] sensed0, sensed1;
  logic         rdata0, rdata1;

  top_controller #(.N(N)) u_ctrl (
    .clk   (clk),
    .rst_n (rst_n),
    .start (start),
    .op    (op),
    .ctrl  (ctrl),
    .busy  (busy),
    .done  (done)
  );

  glitch_generator u_glitch (
    .clk       (clk),
    .precharge (glitch[4]),
    .cwl       (glitch[3]),
    .sae       (glitch[2]),
    .latch_en  (glitch[1]),
    .wen       (glitch[0])
  );

  ntt_core #(.N(N)) u_core0 (
    .clk        (clk),
    .rst_n      (rst_n),
    .ctrl       (ctrl),
    .cross_in   (sensed1),
    .sensed     (sensed0),
    .host_en    (host_en && !host_core),
    .host_row   (host_row),
    .host_col   (host_col),
    .host_we    (host_we),
    .host_wdata (host_wdata),
    .host_rdata (rdata0)
  );

  ntt_core #(.N(N)) u_core1 (
    .clk        (clk),
    .rst_n      (rst_n),
    .ctrl       (ctrl),
    .cross_in   (sensed0),
    .sensed     (sensed1),
    .host_en    (host_en && host_core),
    .host_row   (host_row),
    .host_col   (host_col),
    .host_we    (host_we),
    .host_wdata (host_wdata),
    .host_rdata (rdata1)
  );

  assign host_rdata = host_core ? rdata1 : rdata0;
  assign phase      = ctrl.phase;

endmodule
