// tb_near_mem_unit -- drives one near-memory unit through every phase as the
// controller and its SRAM row would, with random words, and checks the bits
// it sends to the write driver and to its partner:
//   stage 1: upper unit writes back its own word and offers it to the
//            partner; lower unit writes what the partner sends;
//   stage 2: lower unit writes x*w mod q; upper unit writes the partner's bits;
//   stage 3: upper unit writes (A+B) mod q; lower unit writes its word back
//            inverted, then (B-A) mod q after the add and correction;
//   point-wise: x*y mod q with y arriving from the other array;
//   scaling: x*f mod q.
module tb_near_mem_unit;
  import gdntt_pkg::*;
  localparam longint QM = 12289;

  logic clk = 1'b0, rst_n = 1'b0;
  ctrl_t ctrl = '{phase: PH_IDLE, cnt: '0, span_log: '0, inverse: 1'b0};
  logic lower = 1'b0, cbl = 1'b1, cblb = 1'b1, xch_in = 1'b0, cross_in = 1'b0;
  logic xch_out, wdata;
  logic [13:0] tw = '0;

  near_mem_unit dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  string scen;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd(input phase_t ph, input logic [13:0] x, input logic [13:0] y);
    for (int k = 0; k < 14; k++) begin
      @(negedge clk);
      ctrl.phase = ph; ctrl.cnt = 5'(k);
      cbl = x[k]; cblb = ~x[k]; cross_in = y[k];
    end
  endtask

  task automatic add(input logic [13:0] a, input logic [13:0] b);
    for (int k = 0; k < 14; k++) begin
      @(negedge clk);
      ctrl.phase = PH_S3_ADD; ctrl.cnt = 5'(k);
      cbl = a[k] & b[k]; cblb = ~(a[k] | b[k]);
    end
  endtask

  task automatic idle_phase(input phase_t ph, input int len);
    for (int k = 0; k < len; k++) begin
      @(negedge clk);
      ctrl.phase = ph; ctrl.cnt = 5'(k);
      cbl = 1'b1; cblb = 1'b1;
    end
  endtask

  task automatic wr(input phase_t ph, input logic [13:0] exp, input logic [13:0] xin,
                    input bit chk_out);
    logic [13:0] got, gotx;
    for (int k = 0; k < 14; k++) begin
      @(negedge clk);
      ctrl.phase = ph; ctrl.cnt = 5'(k);
      cbl = 1'b1; cblb = 1'b1; xch_in = xin[k];
      #1 got[k] = wdata; gotx[k] = xch_out;
    end
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: wrote %0d expected %0d", scen, got, exp);
    end
    if (chk_out) begin
      checks++;
      if (gotx !== exp) begin
        failures++;
        if (failures < 20) $display("FAIL %s: offered %0d to partner, expected %0d", scen, gotx, exp);
      end
    end
  endtask

  function automatic logic [13:0] rnd();
    return 14'($urandom_range(0, int'(QM) - 1));
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 150; it++) begin
      logic [13:0] x, y, t, a, b;
      x = rnd(); y = rnd(); t = rnd(); a = rnd(); b = rnd();
      if (it == 0) begin a = 14'(QM - 1); b = 14'(QM - 1); end
      if (it == 1) begin a = 0; b = 14'(QM - 1); end

      scen = "stage 1 upper"; lower = 1'b0;
      rd(PH_S1_RD, x, '0); wr(PH_S1_WR, x, y, 1'b1);
      scen = "stage 1 lower"; lower = 1'b1;
      wr(PH_S1_WR, y, y, 1'b0);

      scen = "stage 2 lower"; lower = 1'b1; tw = t;
      rd(PH_S2_RD, x, '0); idle_phase(PH_S2_MUL, 16);
      wr(PH_S2_WR, 14'((longint'(x) * longint'(t)) % QM), y, 1'b1);
      scen = "stage 2 upper"; lower = 1'b0;
      wr(PH_S2_WR, y, y, 1'b0);

      scen = "stage 3 upper (A+B)"; lower = 1'b0;
      add(a, b); idle_phase(PH_S3_FIX, 17);
      wr(PH_S3_WR, 14'((longint'(a) + longint'(b)) % QM), '0, 1'b0);

      scen = "stage 3 lower invert"; lower = 1'b1;
      rd(PH_S3_INV_RD, a, '0); wr(PH_S3_INV_WR, ~a, '0, 1'b0);
      scen = "stage 3 lower (B-A)";
      add(~a, b); idle_phase(PH_S3_FIX, 17);
      wr(PH_S3_WR, 14'((longint'(b) - longint'(a) + QM) % QM), '0, 1'b0);

      scen = "point-wise"; lower = 1'($urandom);
      rd(PH_PW_RD, x, y); idle_phase(PH_PW_MUL, 16);
      wr(PH_PW_WR, 14'((longint'(x) * longint'(y)) % QM), '0, 1'b0);

      scen = "scaling"; tw = t;
      rd(PH_SC_RD, x, '0); idle_phase(PH_SC_MUL, 16);
      wr(PH_SC_WR, 14'((longint'(x) * longint'(t)) % QM), '0, 1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
