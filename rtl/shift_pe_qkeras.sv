// shift_pe_qkeras: shift-PE for 4-bit single-term PoT weights (QKeras format).
//
// A weight code {s, e[2:0]} stands for (-1)^s * 2^e with e = 0..7. The format
// has no zero level, so the PE is just one 3-bit barrel shifter: the term is
// the sign-extended activation shifted left by e. The sign is not applied here;
// it leaves on out_neg and the accumulator's sign-correcting multiplexer adds or
// subtracts the term. That split, the absent zero case and the one-cycle latency
// follow the paper's QKeras shift-PE; the output register is this design's
// choice of where the one cycle is spent.
//
// Interface: operands on in_valid; one cycle later out_valid with out_term =
// act * 2^e (range -16384..16256) and out_neg = s. in_first is a tag that
// travels alongside (the GEMM unit uses it to restart an accumulation).
// Reset is synchronous and active low and clears only the valid flag.
module shift_pe_qkeras
  import pot_pkg::*;
(
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

  term_t shifted;

  // 3-bit shifter on the sign-extended activation.
  always_comb shifted = term_t'(act) <<< wcode[2:0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_first <= in_first;
    end
    out_neg  <= wcode[3];
    out_term <= shifted;
  end

endmodule
