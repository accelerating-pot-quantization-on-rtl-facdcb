// shift_pe_apot: shift-PE for 4-bit two-term PoT weights (APoT format).
//
// A weight code {s, a[1:0], b} stands for (-1)^s * (T1 + T2) with
//   T1 = 0 when a = 0, else 2^-m(a), m = 1, 2, 4 for a = 1, 2, 3
//   T2 = 0 when b = 0, else 2^-3
// The shift 4 of T1 does not fit the 2-bit field, so an extra multiplexer maps
// code 3 to shift 4 before the shifter; otherwise the PE matches the MSQ one:
// two shifters, two zero-skip multiplexers and one adder, with the sign left to
// the accumulator's sign-correcting multiplexer. This structure is the paper's.
//
// Fractions are kept exact by scaling the activation by 2^FRAC (FRAC = 4, the
// smallest term being 2^-4): out_term = act * (T1 + T2) * 2^FRAC. That scaling
// is this design's choice.
//
// Timing: three cycles, as the paper's APoT PE. Stage 1 registers the remapped
// shift amount, stage 2 the two masked terms, stage 3 their sum. in_first
// travels with the data. Reset (synchronous, active low) clears valid flags.
module shift_pe_apot
  import pot_pkg::*;
#(
  parameter int unsigned FRAC = APOT_FRAC
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  logic   in_first,
  input  act_t   act,
  input  wcode_t wcode,
  output logic   out_valid,
  output logic   out_first,
  output logic   out_neg,
  output term_t  out_term
);

  // stage 1: shift-term remap (code 3 -> shift 4)
  logic [2:0] sh1;
  logic [2:0] sh1_q;
  logic       z1_q, z2_q, neg1_q, neg2_q, v1_q, v2_q, f1_q, f2_q;
  act_t       act_q;
  // stage 2: shifted, zero-masked terms
  term_t      scaled, sh1_t, sh2_t, t1, t2, t1_q, t2_q;

  always_comb sh1 = (wcode[2:1] == 2'd3) ? 3'd4 : {1'b0, wcode[2:1]};

  always_comb begin
    scaled = term_t'(act_q) <<< FRAC;
    sh1_t  = scaled >>> sh1_q;   // first-term shifter
    sh2_t  = scaled >>> 3;       // second-term shifter
    t1 = z1_q ? term_t'(0) : sh1_t;
    t2 = z2_q ? term_t'(0) : sh2_t;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1_q      <= 1'b0;
      v2_q      <= 1'b0;
      out_valid <= 1'b0;
      f1_q      <= 1'b0;
      f2_q      <= 1'b0;
      out_first <= 1'b0;
    end else begin
      v1_q      <= in_valid;
      v2_q      <= v1_q;
      out_valid <= v2_q;
      f1_q      <= in_first;
      f2_q      <= f1_q;
      out_first <= f2_q;
    end
    sh1_q    <= sh1;
    z1_q     <= (wcode[2:1] == 2'd0);
    z2_q     <= ~wcode[0];
    act_q    <= act;
    neg1_q   <= wcode[3];
    t1_q     <= t1;
    t2_q     <= t2;
    neg2_q   <= neg1_q;
    out_term <= t1_q + t2_q;
    out_neg  <= neg2_q;
  end

endmodule
