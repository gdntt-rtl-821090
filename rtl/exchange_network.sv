// exchange_network -- data exchange channels between the near-memory units
// of one core.
//
// In a butterfly stage of span h the two operands of a butterfly sit in rows
// i and i XOR h. During the exchange write phases each unit sends one bit per
// cycle (xout) and receives, one bit per cycle, the bit sent by its partner
// (xin[i] = xout[i XOR h]); the receiving row writes it into its own
// sub-array B. span_log selects h = 2^span_log, so the channel of every unit
// is a log2(N)-input multiplexer. Purely combinational.
//
// That units exchange operands over dedicated channels is the published
// design; the XOR-partner topology reaching any span in one hop is this
// implementation's choice.
module exchange_network #(
  parameter int N = 1024
) (
  input  logic [4:0]   span_log,
  input  logic [N-1:0] xout,
  output logic [N-1:0] xin
);

  localparam int LOGN = $clog2(N);

  always_comb begin
    for (int i = 0; i < N; i++) begin
      xin[i] = 1'b0;
      for (int s = 0; s < LOGN; s++)
        if (int'(span_log) == s) xin[i] = xout[i ^ (1 << s)];
    end
  end

endmodule
