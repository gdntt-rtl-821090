// tb_twiddle_factors -- N = 32. For every forward and inverse stage checks
// the factor offered to each lower row: forward, block j of m = N/(2h) blocks
// gets w^(brv_log2(m)(j) * N/(2m)); inverse, position k inside its group gets
// the modular inverse of w^(k*N/(2h)). In the scaling phase every row must
// get a value f with f*N = 1 mod q. Also checks that w has order N.
module tb_twiddle_factors;
  import gdntt_pkg::*;
  localparam int N = 32, LOGN = 5;
  localparam longint QM = 12289;

  ctrl_t ctrl;
  logic [13:0] tw [N];

  twiddle_factors #(.N(N)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #1000000;
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

  function automatic int brvn(int x, int bits);
    int r = 0;
    for (int k = 0; k < bits; k++) if (((x >> k) & 1) != 0) r |= 1 << (bits - 1 - k);
    return r;
  endfunction

  task automatic chk(input longint got, input longint exp, input string what, input int row);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s row %0d: got %0d expected %0d", what, row, got, exp);
    end
  endtask

  initial begin
    longint w;
    w = mpow(11, (QM - 1) / N);
    chk(mpow(w, N), 1, "w^N", 0);
    chk(mpow(w, N / 2), QM - 1, "w^(N/2)", 0);
    for (int s = 0; s < LOGN; s++) begin
      int h, m;
      h = 1 << s;
      m = N / (2 * h);
      // forward
      ctrl = '{phase: PH_S2_MUL, cnt: '0, span_log: 5'(s), inverse: 1'b0};
      #1;
      for (int i = 0; i < N; i++)
        if ((i % (2 * h)) >= h)
          chk(longint'(tw[i]), mpow(w, brvn(i / (2 * h), $clog2(m)) * (N / (2 * m))), "forward", i);
      // inverse
      ctrl.inverse = 1'b1;
      #1;
      for (int i = 0; i < N; i++)
        if ((i % (2 * h)) >= h)
          chk(longint'(tw[i]), mpow(mpow(w, (i % h) * (N / (2 * h))), QM - 2), "inverse", i);
    end
    ctrl = '{phase: PH_SC_MUL, cnt: '0, span_log: '0, inverse: 1'b1};
    #1;
    for (int i = 0; i < N; i++) chk((longint'(tw[i]) * N) % QM, 1, "n^-1", i);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
