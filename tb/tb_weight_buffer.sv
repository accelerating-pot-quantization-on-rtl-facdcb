// tb_weight_buffer: self-checking test of the packed 4-bit weight buffer.
//
// Writes random 32-bit words to random addresses (including the first and last
// entry), keeping a reference copy, then reads them back in random order,
// some reads overlapping writes, and checks that each of the eight unpacked
// 4-bit codes appears the cycle after the read, in its lane (code r from bits
// 4r+3:4r). A held read (rd_en low) must keep the previous codes.
module tb_weight_buffer;
  import pot_pkg::*;
  timeunit 1ns; timeprecision 1ps;

  localparam int DEPTH = 8192, ROWS = 8, AW = 13;

  logic          clk = 0;
  logic          wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [31:0]   wr_word = '0;
  wcode_t        wcodes [ROWS];
  int            checks = 0, failures = 0;

  weight_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] model [int];
  logic [31:0] expect_word;

  task automatic check_codes(logic [31:0] w, string what);
    for (int r = 0; r < ROWS; r++) begin
      checks++;
      if (wcodes[r] != w[4*r +: 4]) begin
        failures++;
        if (failures < 10) $display("%s: code %0d = %h, want %h", what, r, wcodes[r], w[4*r +: 4]);
      end
    end
  endtask

  initial begin
    int addrs [$];
    @(posedge clk);
    // fill
    for (int n = 0; n < 600; n++) begin
      int a;
      a = (n == 0) ? 0 : (n == 1) ? DEPTH - 1 : $urandom_range(0, DEPTH - 1);
      wr_en   <= 1;
      wr_addr <= AW'(a);
      wr_word <= $urandom;
      @(posedge clk);
      model[a] = wr_word;
      if (!(a inside {addrs})) addrs.push_back(a);
    end
    wr_en <= 0;
    // read back
    foreach (addrs[i]) begin
      rd_en   <= 1;
      rd_addr <= AW'(addrs[i]);
      @(posedge clk);
      rd_en <= 0;
      #1 check_codes(model[addrs[i]], "read");
      // held output while idle
      @(posedge clk);
      #1 check_codes(model[addrs[i]], "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
