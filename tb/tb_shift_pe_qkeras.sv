// tb_shift_pe_qkeras: self-checking test of the QKeras shift-PE.
//
// Sweeps every weight code (both signs, shifts 0..7) against random and corner
// activations, one operand pair per cycle, and checks that exactly one cycle
// later the PE offers act * 2^e with the right sign flag and tag. The expected
// value is computed by integer multiplication, not by shifting.
module tb_shift_pe_qkeras;
  import pot_pkg::*;

  logic   clk = 0, rst_n = 0;
  logic   in_valid = 0, in_first = 0;
  act_t   act = '0;
  wcode_t wcode = '0;
  logic   out_valid, out_first, out_neg;
  term_t  out_term;
  int     checks = 0, failures = 0;

  shift_pe_qkeras dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected value of the previous cycle's operands
  logic exp_v = 0, exp_f = 0, exp_n = 0;
  int   exp_t = 0;

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (out_valid !== exp_v) begin
      failures++;
      $display("valid mismatch: got %0b want %0b", out_valid, exp_v);
    end else if (exp_v && (int'(out_term) != exp_t || out_neg != exp_n || out_first != exp_f)) begin
      failures++;
      $display("term mismatch: got %0d neg %0b, want %0d neg %0b", out_term, out_neg, exp_t, exp_n);
    end
    exp_v = in_valid;
    exp_f = in_first;
    exp_n = wcode[3];
    exp_t = int'(act) * (1 << int'(wcode[2:0]));
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
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
