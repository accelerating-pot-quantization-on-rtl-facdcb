// tb_gemm_unit: self-checking test of the 64-MAC GEMM unit with each shift-PE.
//
// Three units are built side by side, one per PE kind (QKeras, MSQ, APoT), and
// fed the same random stream of reduction steps: 8 weight codes and 8 int8
// activations per step, with idle cycles in between. Each test computes several
// sums back to back (in_first restarts a sum with no gap), and after each sum
// all 64 accumulators of every unit are compared with a reference computed
// from the quantization-level tables by integer multiply-add. The test also
// checks that busy drops exactly LAT cycles after the last step (LAT = 1, 2, 3)
// and that an idle input leaves the accumulators unchanged.
module tb_gemm_unit;
  timeunit 1ns; timeprecision 1ps;
  import pot_pkg::*;

  localparam int ROWS = 8, COLS = 8, NK = 3;
  localparam int T1_MSQ [4]  = '{0, 4, 2, 1};   // units of 2^-3
  localparam int T1_APOT [4] = '{0, 8, 4, 1};   // units of 2^-4

  logic   clk = 0, rst_n = 0;
  logic   in_valid = 0, in_first = 0;
  wcode_t wcodes [ROWS];
  act_t   acts   [COLS];
  logic   busy   [NK];
  acc_t   acc    [NK][ROWS][COLS];
  int     checks = 0, failures = 0;

  gemm_unit #(.PE_KIND(PE_QKERAS)) u_q (.clk, .rst_n, .in_valid, .in_first, .wcodes, .acts, .busy(busy[0]), .acc(acc[0]));
  gemm_unit #(.PE_KIND(PE_MSQ))    u_m (.clk, .rst_n, .in_valid, .in_first, .wcodes, .acts, .busy(busy[1]), .acc(acc[1]));
  gemm_unit #(.PE_KIND(PE_APOT))   u_a (.clk, .rst_n, .in_valid, .in_first, .wcodes, .acts, .busy(busy[2]), .acc(acc[2]));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int level(int kind, wcode_t w);
    int mag;
    case (kind)
      0: mag = 1 << int'(w[2:0]);
      1: mag = T1_MSQ[w[2:1]] + (w[0] ? 4 : 0);
      default: mag = T1_APOT[w[2:1]] + (w[0] ? 2 : 0);
    endcase
    return w[3] ? -mag : mag;
  endfunction

  longint ref_acc [NK][ROWS][COLS];

  task automatic check_all(string what);
    for (int n = 0; n < NK; n++)
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          checks++;
          if (longint'(acc[n][r][c]) != ref_acc[n][r][c]) begin
            failures++;
            if (failures < 10) $display("%s: unit %0d acc[%0d][%0d] = %0d, want %0d",
                                        what, n, r, c, acc[n][r][c], ref_acc[n][r][c]);
          end
        end
  endtask

  // one sum of K steps; the first step restarts the accumulators
  task automatic run_sum(int K, bit gaps);
    wcode_t w_n [ROWS];
    act_t   a_n [COLS];
    for (int k = 0; k < K; k++) begin
      if (gaps && $urandom_range(0, 3) == 0) begin
        in_valid <= 0;
        @(posedge clk);
      end
      for (int r = 0; r < ROWS; r++) w_n[r] = wcode_t'($urandom);
      for (int c = 0; c < COLS; c++) a_n[c] = act_t'($urandom);
      if (k % 7 == 3) a_n[0] = act_t'(-128);
      for (int n = 0; n < NK; n++)
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++)
            ref_acc[n][r][c] = (k == 0 ? 0 : ref_acc[n][r][c]) + longint'(int'(a_n[c]) * level(n, w_n[r]));
      for (int r = 0; r < ROWS; r++) wcodes[r] <= w_n[r];
      for (int c = 0; c < COLS; c++) acts[c] <= a_n[c];
      in_valid <= 1;
      in_first <= (k == 0);
      @(posedge clk);
    end
    in_valid <= 0;
    in_first <= 0;
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++) wcodes[r] = '0;
    for (int c = 0; c < COLS; c++) acts[c] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < 6; t++) begin
      int K;
      K = (t == 0) ? 1 : $urandom_range(2, 300);
      run_sum(K, t % 2 == 1);
      // busy must stay high for LAT cycles after the last step, then drop
      for (int d = 1; d <= 4; d++) begin
        #1;
        for (int n = 0; n < NK; n++) begin
          checks++;
          if (busy[n] != (d <= n + 1)) begin
            failures++;
            $display("sum %0d unit %0d: busy=%0b %0d cycles after last step", t, n, busy[n], d);
          end
        end
        @(posedge clk);
      end
      check_all("after sum");
      // idle cycles must not disturb the result
      repeat (5) @(posedge clk);
      check_all("after idle");
    end
    // back-to-back: start a new sum the cycle after the previous one ends
    run_sum(40, 0);
    run_sum(25, 0);
    repeat (5) @(posedge clk);
    check_all("back to back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
