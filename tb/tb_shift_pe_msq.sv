// tb_shift_pe_msq: self-checking test of the MSQ shift-PE (levels in units of 2^-3: T1 = 0, 1/2, 1/4, 1/8; T2 = 0, 1/2).
//
// Drives every weight code against random and corner activations, with gaps
// in the valid stream, and checks that exactly 2 cycles later the PE offers
// act * (T1 + T2) in fixed point with the weight's sign flag and the tag. The
// expected values come from a table of the quantization levels and an integer
// multiply, independent of the PE's shifters.
module tb_shift_pe_msq;
  import pot_pkg::*;

  localparam int LAT = 2;
  localparam int T1 [4] = '{0, 4, 2, 1};
  localparam int T2 = 4;

  logic   clk = 0, rst_n = 0;
  logic   in_valid = 0, in_first = 0;
  act_t   act = '0;
  wcode_t wcode = '0;
  logic   out_valid, out_first, out_neg;
  term_t  out_term;
  int     checks = 0, failures = 0;

  shift_pe_msq dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected outputs, index 0 = due this cycle
  logic exp_v [LAT] = '{default: 0};
  logic exp_f [LAT] = '{default: 0};
  logic exp_n [LAT] = '{default: 0};
  int   exp_t [LAT] = '{default: 0};

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (out_valid !== exp_v[0]) begin
      failures++;
      $display("valid mismatch: got %0b want %0b", out_valid, exp_v[0]);
    end else if (exp_v[0] && (int'(out_term) != exp_t[0] || out_neg != exp_n[0] || out_first != exp_f[0])) begin
      failures++;
      $display("term mismatch: got %0d neg %0b, want %0d neg %0b", out_term, out_neg, exp_t[0], exp_n[0]);
    end
    for (int i = 0; i < LAT-1; i++) begin
      exp_v[i] = exp_v[i+1]; exp_f[i] = exp_f[i+1]; exp_n[i] = exp_n[i+1]; exp_t[i] = exp_t[i+1];
    end
    exp_v[LAT-1] = in_valid;
    exp_f[LAT-1] = in_first;
    exp_n[LAT-1] = wcode[3];
    exp_t[LAT-1] = int'(act) * (T1[wcode[2:1]] + (wcode[0] ? T2 : 0));
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 2000; n++) begin
      in_valid <= ($urandom_range(0, 3) != 0);
      in_first <= 1'($urandom_range(0, 1));
      wcode    <= wcode_t'(n % 16);
      case (n % 5)
        0: act <= act_t'(-128);
        1: act <= act_t'(127);
        default: act <= act_t'($urandom);
      endcase
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (LAT + 2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
