// shift_pe_msq: shift-PE for 4-bit two-term PoT weights (MSQ format).
//
// A weight code {s, a[1:0], b} stands for (-1)^s * (T1 + T2) with
//   T1 = 0 when a = 0, else 2^-a     (0, 1/2, 1/4, 1/8)
//   T2 = 0 when b = 0, else 2^-1     (0, 1/2)
// Each term has its own shifter and, because zero cannot be written as a shift,
// its own zero-skip multiplexer; one adder joins the two terms. As in the paper
// the sign is left to the accumulator's sign-correcting multiplexer.
//
// Fractions are kept exact: the activation is first scaled by 2^FRAC (FRAC = 3,
// the smallest term being 2^-3), then shifted right by the shift term, so
// out_term = act * (T1 + T2) * 2^FRAC. The fixed-point scaling is this design's
// choice; the paper does not say how fractional products are kept.
//
// Timing: two cycles, as the paper's MSQ PE. Stage 1 registers the two shifted
// and zero-masked terms, stage 2 registers their sum. in_first travels with the
// data. Reset (synchronous, active low) clears the valid flags only.
module shift_pe_msq
  import pot_pkg::*;
#(
  parameter int unsigned FRAC = MSQ_FRAC
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

  term_t scaled, sh1, sh2, t1, t2;
  term_t t1_q, t2_q;
  logic  v_q, f_q, neg_q;

  always_comb begin
    scaled = term_t'(act) <<< FRAC;
    // the two shifters: first term by a, second term by 1
    sh1 = scaled >>> wcode[2:1];
    sh2 = scaled >>> 1;
    // zero-skip multiplexers
    t1 = (wcode[2:1] == 2'd0) ? term_t'(0) : sh1;
    t2 = (wcode[0] == 1'b0)   ? term_t'(0) : sh2;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v_q       <= 1'b0;
      f_q       <= 1'b0;
      out_valid <= 1'b0;
      out_first <= 1'b0;
    end else begin
      v_q       <= in_valid;
      f_q       <= in_first;
      out_valid <= v_q;
      out_first <= f_q;
    end
    t1_q     <= t1;
    t2_q     <= t2;
    neg_q    <= wcode[3];
    out_term <= t1_q + t2_q;
    out_neg  <= neg_q;
  end

endmodule
