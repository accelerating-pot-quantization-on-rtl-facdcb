// pot_pkg: types and constants shared by the shift-based PoT accelerator.
//
// Weights are 4-bit power-of-two (PoT) codes in sign-magnitude form: bit 3 is
// the sign, bits 2:0 hold shift terms rather than PoT values. Activations are
// 8-bit two's-complement integers. A shift-PE turns one (activation, weight)
// pair into a shifted activation plus the weight's sign; the MAC unit applies
// the sign when it adds the term into a 32-bit accumulator.
//
// Three weight formats are defined (see the shift-PE modules for the decode):
//   PE_QKERAS  {s, e[2:0]}       w = (-1)^s * 2^e,               e = 0..7
//   PE_MSQ     {s, a[1:0], b}    w = (-1)^s * (T1(a) + T2(b)),   T1 in {0,2^-1,2^-2,2^-3}, T2 in {0,2^-1}
//   PE_APOT    {s, a[1:0], b}    w = (-1)^s * (T1(a) + T2(b)),   T1 in {0,2^-1,2^-2,2^-4}, T2 in {0,2^-3}
// The two-term formats produce fixed-point terms with MSQ_FRAC / APOT_FRAC
// fraction bits so that no activation bit is lost by right shifts.
//
// The host command format of the accelerator's input stream is also defined
// here; it is this design's own choice.
package pot_pkg;

  localparam int unsigned ACT_W     = 8;   // activation width
  localparam int unsigned WCODE_W   = 4;   // packed weight code width
  localparam int unsigned TERM_W    = 16;  // shift-PE output term width
  localparam int unsigned ACC_W     = 32;  // accumulator width
  localparam int unsigned MSQ_FRAC  = 3;   // smallest MSQ term is 2^-3
  localparam int unsigned APOT_FRAC = 4;   // smallest APoT term is 2^-4
  localparam int unsigned STREAM_W  = 32;  // host stream word width

  typedef logic signed [ACT_W-1:0]   act_t;
  typedef logic        [WCODE_W-1:0] wcode_t;
  typedef logic signed [TERM_W-1:0]  term_t;
  typedef logic signed [ACC_W-1:0]   acc_t;

  // Which shift-PE a GEMM unit is built from.
  typedef enum logic [1:0] {
    PE_QKERAS = 2'd0,
    PE_MSQ    = 2'd1,
    PE_APOT   = 2'd2
  } pe_kind_e;

  // Pipeline latency of each shift-PE, in cycles (HLS results of the PoT study).
  function automatic int unsigned pe_latency(pe_kind_e k);
    case (k)
      PE_MSQ:  return 2;
      PE_APOT: return 3;
      default: return 1;
    endcase
  endfunction

  // Host command header, the first word of every command on the input stream.
  //   [31:28] opcode   [27] accumulate (COMPUTE only)   [15:0] steps K
  typedef enum logic [3:0] {
    OP_NOP      = 4'h0,
    OP_LOAD_WGT = 4'h1,   // followed by K * N_GEMM packed weight words
    OP_LOAD_INP = 4'h2,   // followed by K * (COLS/4) packed activation words
    OP_COMPUTE  = 4'h3    // no payload; answered by N_GEMM*ROWS*COLS result words
  } opcode_e;

  typedef struct packed {
    opcode_e     op;
    logic        accumulate;
    logic [10:0] reserved;
    logic [15:0] steps;
  } cmd_hdr_t;

endpackage
