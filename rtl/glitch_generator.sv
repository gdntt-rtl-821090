// glitch_generator -- behavioural model (not synthesizable) of the glitch
// generator, an analog pulse circuit built from a delay chain.
//
// Once per period of the main clock it produces a series of narrow pulses
// that step the array and the near-memory units through one bit operation:
// precharge (in-memory), cwl (in-memory), sae (near-memory sense-amplifier
// enable), latch_en (near-memory latch enable) and wen (near/in-memory write
// pulse). This model emits them one after another, in that order, starting at
// each rising clock edge, each T_PULSE time units wide with no gap. The five
// pulses must fit in one clock period: 5*T_PULSE below the period.
//
// The pulse names and their order are those of the published waveform; the
// widths and exact positions are this model's assumptions. The synchronous
// RTL of the accelerator folds the whole pulse sequence of a cycle into one
// clock edge, so these outputs are for observation only.
module glitch_generator #(
  parameter int T_PULSE = 1       // pulse width in simulation time units
) (
  input  logic clk,
  output logic precharge,
  output logic cwl,
  output logic sae,
  output logic latch_en,
  output logic wen
);

  initial begin
    precharge = 1'b0;
    cwl       = 1'b0;
    sae       = 1'b0;
    latch_en  = 1'b0;
    wen       = 1'b0;
    forever begin
      @(posedge clk);
    precharge = 1'b1;
    #(T_PULSE) precharge = 1'b0;
    cwl = 1'b1;
    #(T_PULSE) cwl = 1'b0;
    sae = 1'b1;
    #(T_PULSE) sae = 1'b0;
    latch_en = 1'b1;
    #(T_PULSE) latch_en = 1'b0;
    wen = 1'b1;
    #(T_PULSE) wen = 1'b0;
    end
  end

endmodule
