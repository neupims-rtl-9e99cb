// tb_dram_cell_array: self-checking test of the bank cell array.
//
// Writes every column of every row with $urandom data, one column per clock,
// then reads all rows back through both full-row ports at once, port A and
// port B on different rows in the same cycle, and compares them with a model
// row array kept in the testbench. Finally overwrites single columns and
// checks that only the written column changes. ROWS is cut to 16.
`timescale 1ns/1ps
module tb_dram_cell_array;
  import neupims_pkg::*;
  localparam int unsigned R = 16;
  localparam int unsigned RAW = $clog2(R);

  logic clk = 0;
  always #1 clk = ~clk;

  logic [RAW-1:0] a_row, b_row, w_row;
  logic [ROW_BITS-1:0] a_data, b_data;
  logic w_en;
  logic [4:0] w_col;
  logic [COL_BITS-1:0] w_data;

  dram_cell_array #(.ROWS(R)) dut (.*);

  int checks = 0, failures = 0;
  logic [ROW_BITS-1:0] model [R];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic logic [COL_BITS-1:0] rnd_col();
    logic [COL_BITS-1:0] v;
    for (int i = 0; i < COL_BITS / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic wr(input int r, input int c);
    @(negedge clk);
    w_en = 1; w_row = RAW'(r); w_col = 5'(c); w_data = rnd_col();
    model[r][c*COL_BITS +: COL_BITS] = w_data;
    @(negedge clk);
    w_en = 0;
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_en = 0; w_row = '0; w_col = '0; w_data = '0; a_row = '0; b_row = '0;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < NUM_COLS; c++) wr(r, c);
    for (int r = 0; r < R; r++) begin
      a_row = RAW'(r); b_row = RAW'(R - 1 - r);
      #0.1;
      check(a_data == model[r], $sformatf("port A row %0d", r));
      check(b_data == model[R-1-r], $sformatf("port B row %0d", R - 1 - r));
    end
    for (int n = 0; n < 40; n++) begin
      int r = $urandom % R, c = $urandom % NUM_COLS;
      wr(r, c);
      a_row = RAW'(r); b_row = RAW'((r + 1) % R);
      #0.1;
      check(a_data == model[r], "row after a single-column write");
      check(b_data == model[(r + 1) % R], "neighbouring row unchanged");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
