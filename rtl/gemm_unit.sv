// gemm_unit: 64 shift-PE MAC units computing one output tile in parallel.
//
// The unit holds a ROWS x COLS grid of MAC units (8 x 8 = 64 by default, the
// paper's MAC count per GEMM unit). Every cycle with in_valid it takes one
// reduction step k: ROWS weight codes (one per output row, e.g. one per filter)
// and COLS activations (one per output column, e.g. one per output pixel).
// MAC (r,c) feeds weight r and activation c through its shift-PE and adds the
// sign-corrected term into its 32-bit accumulator, so after K steps
//   acc[r][c] = sum_k act[k][c] * w[k][r]   (scaled by 2^FRAC for MSQ/APoT).
// All 64 PEs work in parallel, one step per cycle, as in the paper's 64-PE
// matrix-multiplication accelerator. The outer-product (output-stationary)
// arrangement of the 64 MACs into an 8 x 8 grid is this design's choice.
//
// PE_KIND picks the shift-PE: QKeras (the accelerator's PE), MSQ or APoT.
// The sign-correcting multiplexer of the paper sits in front of the adder.
//
// Timing: a step entering at cycle t reaches the accumulators at the end of
// cycle t + LAT, LAT being the PE latency (1, 2 or 3). in_first marks the
// first step of a sum: that step overwrites the accumulator instead of adding
// to it, so back-to-back sums need no clearing cycle. busy is high while any
// step is still in flight; acc is stable once busy is low. Synchronous
// active-low reset clears accumulators and the pipeline's valid flags.
module gemm_unit
  import pot_pkg::*;
#(
  parameter int unsigned ROWS    = 8,
  parameter int unsigned COLS    = 8,
  parameter pe_kind_e    PE_KIND = PE_QKERAS
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  logic   in_first,
  input  wcode_t wcodes [ROWS],
  input  act_t   acts   [COLS],
  output logic   busy,
  output acc_t   acc    [ROWS][COLS]
);

  localparam int unsigned LAT = pe_latency(PE_KIND);

  logic [LAT-1:0] inflight;

  always_ff @(posedge clk) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= LAT'({inflight, in_valid});
  end

  always_comb busy = in_valid | (|inflight);

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      logic  pv, pf, pn;
      term_t pt;

      if (PE_KIND == PE_MSQ) begin : g_pe
        shift_pe_msq u_pe (
          .clk, .rst_n, .in_valid, .in_first, .act(acts[c]), .wcode(wcodes[r]),
          .out_valid(pv), .out_first(pf), .out_neg(pn), .out_term(pt));
      end else if (PE_KIND == PE_APOT) begin : g_pe
        shift_pe_apot u_pe (
          .clk, .rst_n, .in_valid, .in_first, .act(acts[c]), .wcode(wcodes[r]),
          .out_valid(pv), .out_first(pf), .out_neg(pn), .out_term(pt));
      end else begin : g_pe
        shift_pe_qkeras u_pe (
          .clk, .rst_n, .in_valid, .in_first, .act(acts[c]), .wcode(wcodes[r]),
          .out_valid(pv), .out_first(pf), .out_neg(pn), .out_term(pt));
      end

      // accumulator with the sign-correcting multiplexer
      acc_t addend, base;
      always_comb begin
        addend = pn ? -acc_t'(pt) : acc_t'(pt);
        base   = pf ? '0 : acc[r][c];
      end

      always_ff @(posedge clk) begin
        if (!rst_n)  acc[r][c] <= '0;
        else if (pv) acc[r][c] <= base + addend;
      end
    end
  end

endmodule
