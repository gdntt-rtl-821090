// gdntt_pkg -- types, constants and constant functions shared by the
// near-memory NTT accelerator.
//
// Word width (14 bits) and the number of SRAM columns (28 = two 14-bit
// sub-arrays per row) are the published figures of the design. The prime
// modulus, its primitive root and the Barrett constant are choices of this
// implementation: q = 12289 is a 14-bit prime with q-1 = 3*2^12, so cyclic
// transforms of any power-of-two length up to 4096 exist.
//
// The control word ctrl_t is what the top level controller broadcasts to both
// cores every cycle: which phase of the butterfly schedule is running, the
// counter inside that phase (the bit index for bit-serial phases), the span of
// the butterflies of the current stage, and whether the stage is an inverse one.
package gdntt_pkg;

  localparam int WORD_W    = 14;          // data word width
  localparam int ARRAY_COLS = 2 * WORD_W;       // sub-array A (0..L-1) + sub-array B (L..2L-1)
  localparam int Q_MOD     = 12289;       // modulus
  localparam int Q_GEN     = 11;          // primitive root of Q_MOD
  localparam int MM_CYCLES  = 16;         // Barrett modular multiplication latency
  localparam int FIX_CYCLES = 17;         // final modular correction of stage 3
  localparam int CNT_W     = 5;           // wide enough for L, 16 and 17

  typedef enum logic [4:0] {
    PH_IDLE,
    PH_S1_RD,      // stage 1: upper rows read sub-array A into their units
    PH_S1_WR,      // stage 1: upper rows rewrite A, lower rows store partner word in B
    PH_S2_RD,      // stage 2: lower rows read A
    PH_S2_MUL,     // stage 2: lower units multiply by the twiddle factor
    PH_S2_WR,      // stage 2: lower rows rewrite A, upper rows store partner product in B
    PH_S3_INV_RD,  // stage 3: lower rows read the word to be subtracted
    PH_S3_INV_WR,  // stage 3: lower rows write it back inverted
    PH_S3_ADD,     // stage 3: all rows read A and B together and add bit-serially
    PH_S3_FIX,     // stage 3: final modular correction
    PH_S3_WR,      // stage 3: all rows write the result into A
    PH_SC_RD,      // INTT scaling by n^-1: read
    PH_SC_MUL,     //                        multiply
    PH_SC_WR,      //                        write
    PH_PW_RD,      // point-wise product: both arrays read, words swapped between cores
    PH_PW_MUL,     //                     multiply
    PH_PW_WR       //                     write
  } phase_t;

  typedef enum logic [1:0] {
    OP_NONE = 2'd0,
    OP_NTT  = 2'd1,
    OP_INTT = 2'd2,
    OP_PWM  = 2'd3
  } op_t;

  typedef struct packed {
    phase_t             phase;
    logic [CNT_W-1:0]   cnt;       // cycle inside the phase (bit index when bit-serial)
    logic [4:0]         span_log;  // log2 of the butterfly span of the stage
    logic               inverse;   // stage belongs to an INTT
  } ctrl_t;

  // Number of cycles of each phase.
  function automatic int phase_len(phase_t p);
    case (p)
      PH_S2_MUL, PH_SC_MUL, PH_PW_MUL: return MM_CYCLES;
      PH_S3_FIX:                       return FIX_CYCLES;
      PH_IDLE:                         return 1;
      default:                         return WORD_W;
    endcase
  endfunction

  // a^e mod m, for elaboration-time tables.
  function automatic longint unsigned powmod(longint unsigned a, longint unsigned e,
                                             longint unsigned m);
    longint unsigned r = 1;
    longint unsigned b = a % m;
    while (e != 0) begin
      if (e[0]) r = (r * b) % m;
      b = (b * b) % m;
      e = e >> 1;
    end
    return r;
  endfunction

endpackage
