// tb_ntt_core -- one core with N = 8 rows, driven by a control sequence the
// testbench generates itself (phase order and lengths of the schedule).
// Loads a random polynomial through the I/O port, runs a forward NTT and
// compares with a direct evaluation (bit-reversed rows), runs a point-wise
// product with random words streamed in on cross_in, then an INTT, and
// compares with a direct inverse transform of the product spectrum.
module tb_ntt_core;
  import gdntt_pkg::*;
  localparam int N = 8, LOGN = 3, LW = 14;
  localparam longint QM = 12289;

  logic clk = 1'b0, rst_n = 1'b0;
  ctrl_t ctrl = '{phase: PH_IDLE, cnt: '0, span_log: '0, inverse: 1'b0};
  logic [N-1:0] cross_in = '0, sensed;
  logic host_en = 1'b0, host_we = 1'b0, host_wdata = 1'b0, host_rdata;
  logic [2:0] host_row = '0;
  logic [4:0] host_col = '0;

  ntt_core #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint a [N], fa [N], bv [N], prod [N], back [N], wpow [N];
  logic [13:0] bw [N];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint mpow(longint x, longint e);
    longint r = 1;
    x = x % QM;
    while (e > 0) begin
      if (e % 2 == 1) r = (r * x) % QM;
      x = (x * x) % QM;
      e = e / 2;
    end
    return r;
  endfunction

  function automatic int brv(int x);
    int r = 0;
    for (int k = 0; k < LOGN; k++) if (((x >> k) & 1) != 0) r |= 1 << (LOGN - 1 - k);
    return r;
  endfunction

  task automatic phase(input phase_t ph, input int len, input int span, input bit inv);
    for (int k = 0; k < len; k++) begin
      @(negedge clk);
      ctrl = '{phase: ph, cnt: 5'(k), span_log: 5'(span), inverse: inv};
      if (ph == PH_PW_RD) for (int i = 0; i < N; i++) cross_in[i] = bw[i][k];
    end
    @(negedge clk);
    ctrl.phase = PH_IDLE;
    ctrl.cnt = '0;
  endtask

  task automatic stage(input int span, input bit inv);
    phase(PH_S1_RD, LW, span, inv);     phase(PH_S1_WR, LW, span, inv);
    phase(PH_S2_RD, LW, span, inv);     phase(PH_S2_MUL, 16, span, inv);
    phase(PH_S2_WR, LW, span, inv);
    phase(PH_S3_INV_RD, LW, span, inv); phase(PH_S3_INV_WR, LW, span, inv);
    phase(PH_S3_ADD, LW, span, inv);    phase(PH_S3_FIX, 17, span, inv);
    phase(PH_S3_WR, LW, span, inv);
  endtask

  task automatic host_write(input int row, input longint val);
    for (int k = 0; k < LW; k++) begin
      @(negedge clk);
      host_en = 1'b1; host_row = 3'(row); host_col = 5'(k); host_we = 1'b1; host_wdata = val[k];
    end
    @(negedge clk);
    host_en = 1'b0; host_we = 1'b0;
  endtask

  task automatic host_read(input int row, output longint val);
    val = 0;
    for (int k = 0; k < LW; k++) begin
      @(negedge clk);
      host_en = 1'b1; host_row = 3'(row); host_col = 5'(k); host_we = 1'b0;
      #1 val[k] = host_rdata;
    end
    @(negedge clk);
    host_en = 1'b0;
  endtask

  task automatic chk(input string what, input int row, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s row %0d: got %0d expected %0d", what, row, got, exp);
    end
  endtask

  initial begin
    longint w, winv, ninv, rd;
    w = mpow(11, (QM - 1) / N);
    winv = mpow(w, QM - 2);
    ninv = mpow(N, QM - 2);
    for (int e = 0; e < N; e++) wpow[e] = mpow(w, e);
    for (int i = 0; i < N; i++) begin
      a[i]  = longint'($urandom_range(0, int'(QM) - 1));
      bv[i] = longint'($urandom_range(0, int'(QM) - 1));
      bw[i] = 14'(bv[i]);
    end
    for (int i = 0; i < N; i++) begin
      fa[i] = 0;
      for (int j = 0; j < N; j++) fa[i] = (fa[i] + a[j] * wpow[(i * j) % N]) % QM;
    end
    // row p holds fa[brv(p)] after the NTT and prod[p] after the product;
    // spectrum index brv(p) of the product is prod[p]
    for (int p = 0; p < N; p++) prod[p] = (fa[brv(p)] * bv[p]) % QM;
    for (int i = 0; i < N; i++) begin
      back[i] = 0;
      for (int p = 0; p < N; p++)
        back[i] = (back[i] + prod[p] * mpow(winv, (i * brv(p)) % N)) % QM;
      back[i] = (back[i] * ninv) % QM;
    end

    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N; i++) host_write(i, a[i]);

    for (int s = 0; s < LOGN; s++) stage(LOGN - 1 - s, 1'b0);
    for (int p = 0; p < N; p++) begin host_read(p, rd); chk("NTT", p, rd, fa[brv(p)]); end

    phase(PH_PW_RD, LW, 0, 1'b0); phase(PH_PW_MUL, 16, 0, 1'b0); phase(PH_PW_WR, LW, 0, 1'b0);
    for (int p = 0; p < N; p++) begin host_read(p, rd); chk("point-wise", p, rd, prod[p]); end

    for (int s = 0; s < LOGN; s++) stage(s, 1'b1);
    phase(PH_SC_RD, LW, 0, 1'b1); phase(PH_SC_MUL, 16, 0, 1'b1); phase(PH_SC_WR, LW, 0, 1'b1);
    for (int i = 0; i < N; i++) begin host_read(i, rd); chk("INTT", i, rd, back[i]); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
