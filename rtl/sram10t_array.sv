// sram10t_array -- logical model of one N x 28 array of 10T SRAM cells.
//
// Each row holds two 14-bit words: sub-array A in columns 0..13 and
// sub-array B in columns 14..27. A 10T cell connects to one of two bit-line
// pairs. With RWL high and HWL low, the cells whose column word line (CWL) is
// raised connect to their row's CBL/CBLB pair, which leads to that row's
// near-memory unit: this is the bit-serial, all-rows-in-parallel path. With
// RWL and HWL both high the cells of the row connect to the vertical VBL/VBLB
// pairs, one per column, which reach the I/O through a 28:1 column mux.
//
// CBL path (near-memory):
//   * read: cbl[i] is the AND of the row's cells whose CWL is raised in
//     cwl_rd, cblb[i] the NOR of them. With one column raised this is the bit
//     and its complement; with the same bit of A and of B raised together the
//     row's unit receives A AND B and NOR(A,B), the two inputs of its adder.
//     Reading is destructive: cells read via CBL are left at 0 after the
//     clock edge, so the controller must write back whatever it still needs.
//   * write: a row with wen1 writes wdata[i] into the column raised in
//     cwl_w1, a row with wen2 into the column raised in cwl_w2. The two
//     enables stand for the two write pulses (WEN1, WEN2) of one cycle, which
//     lets one set of rows rewrite A while another writes B.
// VBL path (I/O): vbl_col selects the column; the row is the one with RWL and
// HWL high. vbl_rdata is combinational, vbl_we writes at the clock edge;
// this path does not disturb the cell.
//
// Timing: reads are combinational, writes and the destructive clear happen at
// the rising edge, writes winning over the clear. In silicon the glitch
// generator sequences precharge, CWL, sense, latch and write inside one
// clock period; here that whole sequence is one edge.
//
// From the published design: array size, column split, the three word lines
// and two bit-line pairs per cell, sense/latch of CBL and CBLB, destructive
// read, the 28:1 column mux. Own choices: value left by a destructive read
// (0), bit-level I/O port, two write enables per cycle.
module sram10t_array #(
  parameter int N    = 1024,
  parameter int COLS = gdntt_pkg::ARRAY_COLS
) (
  input  logic                       clk,
  input  logic [N-1:0]               rwl,
  input  logic [N-1:0]               hwl,
  input  logic [COLS-1:0]            cwl_rd,
  input  logic [COLS-1:0]            cwl_w1,
  input  logic [COLS-1:0]            cwl_w2,
  input  logic [N-1:0]               wen1,
  input  logic [N-1:0]               wen2,
  input  logic [N-1:0]               wdata,
  output logic [N-1:0]               cbl,
  output logic [N-1:0]               cblb,
  input  logic [$clog2(COLS)-1:0]    vbl_col,
  input  logic                       vbl_we,
  input  logic                       vbl_wdata,
  output logic                       vbl_rdata
);

  logic [COLS-1:0] mem [N];

  // CBL access of row i is enabled by RWL high, HWL low.
  logic [N-1:0] cbl_row;
  assign cbl_row = rwl & ~hwl;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      if (cbl_row[i] && cwl_rd != '0) begin
        cbl[i]  = &(mem[i] | ~cwl_rd);
        cblb[i] = &(~mem[i] | ~cwl_rd);
      end else begin
        // nothing connected: both lines stay precharged
        cbl[i]  = 1'b1;
        cblb[i] = 1'b1;
      end
    end
  end

  // 28:1 column mux on the VBL lines of the row selected by RWL & HWL.
  always_comb begin
    vbl_rdata = 1'b0;
    for (int i = 0; i < N; i++)
      if (rwl[i] && hwl[i] && int'(vbl_col) < COLS) vbl_rdata = vbl_rdata | mem[i][vbl_col];
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      logic [COLS-1:0] nxt;
      nxt = mem[i];
      if (cbl_row[i]) nxt = nxt & ~cwl_rd;   // destructive read
      if (cbl_row[i] && wen1[i]) nxt = (nxt & ~cwl_w1) | (wdata[i] ? cwl_w1 : '0);
      if (cbl_row[i] && wen2[i]) nxt = (nxt & ~cwl_w2) | (wdata[i] ? cwl_w2 : '0);
      if (rwl[i] && hwl[i] && vbl_we && int'(vbl_col) < COLS) nxt[vbl_col] = vbl_wdata;
      mem[i] <= nxt;
    end
  end

endmodule
