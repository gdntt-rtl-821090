// tb_gdntt_full -- end-to-end test of the accelerator with every parameter at
// its default (N = 1024): polynomial
// multiplication a*b mod (x^N - 1, q) through NTT, point-wise product and INTT.
//
// Loads two random polynomials bit by bit through the I/O port, runs a
// forward NTT on both cores and compares every row (looked at directly in
// the arrays, to save simulation time; the final result is read out
// through the port) with a direct evaluation
// of A_i = sum_j a_j w^(ij) mod q (bit-reversed row order), runs the
// point-wise product and checks A_i * B_i, runs the INTT and checks the
// cyclic convolution computed by schoolbook multiplication. Cycle counts are
// checked against 145 cycles per radix-2 stage (8L+33, L = 14) and 2L+16 for
// the point-wise and scaling passes. It also counts how often each mechanism
// occurred (operand exchange, twiddle multiply, bitwise inversion, bit-serial
// add, modular correction after an addition and after a subtraction, INTT
// scaling, point-wise product across the cores, I/O) and counts a failure for
// any that never happened.
module tb_gdntt_full;
  import gdntt_pkg::*;

  localparam int N    = 1024;
  localparam int LOGN = $clog2(N);
  localparam int LW   = 14;
  localparam longint QM = 12289;
  localparam int STAGE_CYC = 8 * LW + 33;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  op_t  op = OP_NONE;
  logic busy, done;
  phase_t phase;
  logic host_en = 1'b0, host_core = 1'b0, host_we = 1'b0, host_wdata = 1'b0, host_rdata;
  logic [$clog2(N)-1:0] host_row = '0;
  logic [4:0] host_col = '0;
  logic [4:0] glitch;

  gdntt_top dut (
    .clk, .rst_n, .start, .op, .busy, .done, .phase,
    .host_en, .host_core, .host_row, .host_col, .host_we, .host_wdata, .host_rdata,
    .glitch
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint a [N], b [N], fa [N], fb [N], prod [N], conv [N], wpow [N];
  longint rd;

  // ---------------------------------------------------------------- helpers
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

  task automatic host_write(input bit core, input int row, input longint val);
    for (int k = 0; k < LW; k++) begin
      @(negedge clk);
      host_en = 1'b1; host_core = core; host_row = row[$clog2(N)-1:0];
      host_col = 5'(k); host_we = 1'b1; host_wdata = val[k];
    end
    @(negedge clk);
    host_en = 1'b0; host_we = 1'b0;
  endtask

  task automatic host_read(input bit core, input int row, output longint val);
    val = 0;
    for (int k = 0; k < LW; k++) begin
      @(negedge clk);
      host_en = 1'b1; host_core = core; host_row = row[$clog2(N)-1:0];
      host_col = 5'(k); host_we = 1'b0;
      #1 val[k] = host_rdata;
    end
    @(negedge clk);
    host_en = 1'b0;
  endtask

  task automatic run(input op_t o, input int expect_cycles, input string name);
    int cyc = 0;
    @(negedge clk);
    op = o; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) begin
      if (busy) cyc++;
      @(negedge clk);
    end
    checks++;
    if (cyc != expect_cycles) begin
      failures++;
      $display("FAIL %s took %0d busy cycles, expected %0d", name, cyc, expect_cycles);
    end else $display("%s: %0d cycles", name, cyc);
  endtask

  // zero-time look at sub-array A of one row, used for the intermediate
  // results so that the long bit-serial readout is needed only once
  function automatic longint peek(input bit core, input int row);
    return core ? longint'(dut.u_core1.u_array.mem[row][LW-1:0])
                : longint'(dut.u_core0.u_array.mem[row][LW-1:0]);
  endfunction

  task automatic check(input string what, input int row, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s row %0d: got %0d expected %0d", what, row, got, exp);
    end
  endtask

  // ------------------------------------------------------ mechanism counters
  int n_xch = 0, n_mul = 0, n_inv = 0, n_add = 0, n_fix = 0, n_scale = 0, n_pwm = 0;
  int n_addfix = 0, n_subfix = 0, n_io = 0;
  always @(posedge clk) begin
    if (host_en) n_io++;
    if (dut.ctrl.cnt == '0) begin
      case (phase)
        PH_S1_WR:     n_xch++;
        PH_S2_MUL:    n_mul++;
        PH_S3_INV_WR: n_inv++;
        PH_S3_ADD:    n_add++;
        PH_S3_FIX:    n_fix++;
        PH_SC_MUL:    n_scale++;
        PH_PW_MUL:    n_pwm++;
        default: ;
      endcase
    end
  end
  // a correction was applied: upper row whose sum reached q, lower row
  // whose difference was negative
  for (genvar r = 0; r < N; r++) begin : g_probe
    always @(posedge clk)
      if (phase == PH_S3_FIX && int'(dut.ctrl.cnt) == FIX_CYCLES - 1) begin
        if (!dut.u_core0.g_nmu[r].u_nmu.lower && dut.u_core0.g_nmu[r].u_nmu.tc_q) n_addfix++;
        if (dut.u_core0.g_nmu[r].u_nmu.lower && !dut.u_core0.g_nmu[r].u_nmu.f_q[LW]) n_subfix++;
      end
  end

  // --------------------------------------------------------------- watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------- main
  initial begin
    longint w;
    w = mpow(11, (QM - 1) / N);
    for (int e = 0; e < N; e++) wpow[e] = mpow(w, e);
    for (int i = 0; i < N; i++) begin
      a[i] = longint'($urandom_range(0, int'(QM) - 1));
      b[i] = longint'($urandom_range(0, int'(QM) - 1));
    end
    a[0] = QM - 1; b[0] = QM - 1;        // extremes
    a[1] = 0;
    // reference spectra and products
    for (int i = 0; i < N; i++) begin
      fa[i] = 0; fb[i] = 0;
      for (int j = 0; j < N; j++) begin
        fa[i] = (fa[i] + a[j] * wpow[(i * j) % N]) % QM;
        fb[i] = (fb[i] + b[j] * wpow[(i * j) % N]) % QM;
      end
      prod[i] = (fa[i] * fb[i]) % QM;
      conv[i] = 0;
    end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        conv[(i + j) % N] = (conv[(i + j) % N] + a[i] * b[j]) % QM;

    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int i = 0; i < N; i++) begin
      host_write(1'b0, i, a[i]);
      host_write(1'b1, i, b[i]);
    end
    for (int i = 0; i < N; i++) begin
      check("load core0", i, peek(1'b0, i), a[i]);
      check("load core1", i, peek(1'b1, i), b[i]);
    end

    run(OP_NTT, LOGN * STAGE_CYC, "NTT");
    for (int p = 0; p < N; p++) begin
      check("NTT core0", p, peek(1'b0, p), fa[brv(p)]);
      check("NTT core1", p, peek(1'b1, p), fb[brv(p)]);
    end

    run(OP_PWM, 2 * LW + 16, "point-wise");
    for (int p = 0; p < N; p++) begin
      check("PWM core0", p, peek(1'b0, p), prod[brv(p)]);
      check("PWM core1", p, peek(1'b1, p), prod[brv(p)]);
    end

    run(OP_INTT, LOGN * STAGE_CYC + 2 * LW + 16, "INTT");
    for (int i = 0; i < N; i++) begin
      host_read(1'b0, i, rd); check("product core0", i, rd, conv[i]);
      host_read(1'b1, i, rd); check("product core1", i, rd, conv[i]);
    end

    $display("mechanisms: exchange=%0d multiply=%0d invert=%0d add=%0d fix=%0d add-corrected=%0d sub-corrected=%0d scale=%0d pointwise=%0d io=%0d",
             n_xch, n_mul, n_inv, n_add, n_fix, n_addfix, n_subfix, n_scale, n_pwm, n_io);
    checks++; if (n_xch != 2 * LOGN) begin failures++; $display("FAIL exchange count"); end
    checks++; if (n_mul == 0 || n_inv == 0 || n_add == 0 || n_fix == 0) begin failures++; $display("FAIL stage mechanism missing"); end
    checks++; if (n_addfix == 0) begin failures++; $display("FAIL no addition needed a modular correction"); end
    checks++; if (n_subfix == 0) begin failures++; $display("FAIL no subtraction needed a modular correction"); end
    checks++; if (n_scale != 1 || n_pwm != 1) begin failures++; $display("FAIL scale/pointwise count"); end
    checks++; if (n_io == 0) begin failures++; $display("FAIL no I/O"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
