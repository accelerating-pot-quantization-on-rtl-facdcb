// tb_input_buffer: self-checking test of the activation buffer.
//
// Streams random 32-bit words into consecutive word addresses, as the host
// does for a LOAD_INP command, then reads entries back and checks that entry e
// returns the eight activations of words 2e and 2e+1, byte j of word 2e+s
// being column 4s+j, one cycle after the read. Writing a single word to one
// half of an entry must leave the other half alone.
module tb_input_buffer;
  import pot_pkg::*;
  timeunit 1ns; timeprecision 1ps;

  localparam int DEPTH = 8192, COLS = 8, AW = 13;

  logic          clk = 0;
  logic          wr_en = 0, rd_en = 0;
  logic [AW:0]   wr_addr = '0;
  logic [AW-1:0] rd_addr = '0;
  logic [31:0]   wr_word = '0;
  act_t          acts [COLS];
  int            checks = 0, failures = 0;

  input_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] words [int];

  task automatic read_check(int e);
    rd_en   <= 1;
    rd_addr <= AW'(e);
    @(posedge clk);
    rd_en <= 0;
    #1;
    for (int c = 0; c < COLS; c++) begin
      logic [31:0] w;
      w = words[2*e + c/4];
      checks++;
      if (acts[c] != act_t'(w[8*(c%4) +: 8])) begin
        failures++;
        if (failures < 10) $display("entry %0d col %0d = %0d, want %0d", e, c, acts[c], act_t'(w[8*(c%4) +: 8]));
      end
    end
  endtask

  initial begin
    @(posedge clk);
    // a run of 300 entries from address 0, plus the last entry
    for (int a = 0; a < 600; a++) begin
      wr_en <= 1; wr_addr <= (AW+1)'(a); wr_word <= $urandom;
      @(posedge clk);
      words[a] = wr_word;
    end
    for (int a = 2*DEPTH-2; a < 2*DEPTH; a++) begin
      wr_en <= 1; wr_addr <= (AW+1)'(a); wr_word <= $urandom;
      @(posedge clk);
      words[a] = wr_word;
    end
    wr_en <= 0;
    for (int e = 0; e < 300; e++) read_check(e);
    read_check(DEPTH - 1);
    // overwrite the upper half of entry 5 only
    wr_en <= 1; wr_addr <= 11; wr_word <= 32'h80_7f_01_ff;
    @(posedge clk);
    words[11] = 32'h80_7f_01_ff;
    wr_en <= 0;
    read_check(5);
    read_check(6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
