// tb_pim_bank: self-checking test of one dual-row-buffer bank.
//
// Fills two rows through the MEM path, then keeps one of them open in the
// PIM row buffer while reading and writing the other through the MEM row
// buffer, every cycle in parallel with dot-products. Expected dot-product
// sums and read data come from a row model kept in the testbench. Also checks
// that Result clears on res_clear and that opening the same row in both
// buffers raises err. ROWS is cut to 16 to keep the array small.
`timescale 1ns/1ps
module tb_pim_bank;
  import neupims_pkg::*;
  localparam int unsigned R = 16;
  localparam int unsigned RAW = $clog2(R);

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic mem_act, mem_pre, mem_rd, mem_wr, pim_act, pim_pre, pim_dot, res_clear, ref_cmd;
  logic [RAW-1:0] mem_row, pim_row;
  logic [4:0] mem_col, pim_col;
  logic [COL_BITS-1:0] mem_wdata, mem_rdata, gvec_col;
  logic mem_rvalid, mem_open, pim_open, err;
  logic [RAW-1:0] mem_open_row, pim_open_row;
  logic [ACC_W-1:0] result;
  logic [ROW_BITS-1:0] gw_data;

  pim_bank #(.ROWS(R)) dut (.*);

  int checks = 0, failures = 0;
  logic [ROW_BITS-1:0] model [R];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic idle();
    {mem_act, mem_pre, mem_rd, mem_wr, pim_act, pim_pre, pim_dot, res_clear, ref_cmd} = '0;
  endtask

  function automatic logic signed [ACC_W-1:0] ref_dot(input logic [COL_BITS-1:0] a, input logic [COL_BITS-1:0] b);
    logic signed [ACC_W-1:0] s = 0;
    for (int i = 0; i < COL_ELEMS; i++)
      s += ACC_W'($signed(a[i*ELEM_W +: ELEM_W]) * $signed(b[i*ELEM_W +: ELEM_W]));
    return s;
  endfunction

  function automatic logic [COL_BITS-1:0] rnd_col();
    logic [COL_BITS-1:0] v;
    for (int i = 0; i < COL_BITS / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [ACC_W-1:0] acc;
    logic [COL_BITS-1:0] g [NUM_COLS];
    idle();
    mem_row = '0; pim_row = '0; mem_col = '0; pim_col = '0; mem_wdata = '0; gvec_col = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!mem_open && !pim_open && result == 0 && !err, "reset state");

    // fill rows 3 and 5 through the MEM buffer
    foreach (model[r]) model[r] = '0;
    for (int r = 3; r <= 5; r += 2) begin
      mem_act = 1; mem_row = RAW'(r); @(negedge clk); idle();
      check(mem_open && mem_open_row == RAW'(r), "MEM row opens");
      for (int c = 0; c < NUM_COLS; c++) begin
        mem_wr = 1; mem_col = 5'(c); mem_wdata = rnd_col();
        model[r][c*COL_BITS +: COL_BITS] = mem_wdata;
        @(negedge clk); idle();
      end
      mem_pre = 1; @(negedge clk); idle();
      check(!mem_open, "MEM row closes");
    end

    // PIM buffer on row 3, MEM buffer on row 5, both open together
    pim_act = 1; pim_row = 3; mem_act = 1; mem_row = 5;
    @(negedge clk); idle();
    check(pim_open && mem_open && pim_open_row == 3 && mem_open_row == 5, "dual rows open");
    check(!err, "distinct rows are legal");
    check(gw_data == model[3], "gw_data shows the PIM-addressed row");

    acc = 0;
    for (int c = 0; c < NUM_COLS; c++) begin
      g[c] = rnd_col();
      pim_dot = 1; pim_col = 5'(c); gvec_col = g[c];
      mem_rd = 1; mem_col = 5'((c * 7) % NUM_COLS);
      acc += ref_dot(model[3][c*COL_BITS +: COL_BITS], g[c]);
      @(negedge clk); idle();
      check(mem_rvalid && mem_rdata == model[5][((c*7)%NUM_COLS)*COL_BITS +: COL_BITS],
            $sformatf("MEM read during dot-product col %0d", c));
      check($signed(result) == acc, $sformatf("running dot-product after col %0d", c));
    end

    // a MEM write to row 5 while the PIM row keeps computing
    mem_wr = 1; mem_col = 2; mem_wdata = rnd_col(); model[5][2*COL_BITS +: COL_BITS] = mem_wdata;
    pim_dot = 1; pim_col = 0; gvec_col = g[0];
    acc += ref_dot(model[3][0 +: COL_BITS], g[0]);
    @(negedge clk); idle();
    mem_rd = 1; mem_col = 2; @(negedge clk); idle();
    check(mem_rdata == model[5][2*COL_BITS +: COL_BITS], "write-then-read on MEM row");
    check($signed(result) == acc, "dot-product alongside a MEM write");

    // read-and-clear: a dot in the clear cycle starts a new sum
    res_clear = 1; pim_dot = 1; pim_col = 1; gvec_col = g[1];
    @(negedge clk); idle();
    check($signed(result) == ref_dot(model[3][COL_BITS +: COL_BITS], g[1]), "clear with dot starts a new sum");
    res_clear = 1; @(negedge clk); idle();
    check(result == 0, "clear zeroes Result");

    // write lands in the array: reopen row 5 in PIM after closing both
    pim_pre = 1; mem_pre = 1; @(negedge clk); idle();
    check(!pim_open && !mem_open && !err, "both buffers closed");
    ref_cmd = 1; @(negedge clk); idle();
    check(!err, "refresh with all rows closed is legal");
    pim_act = 1; pim_row = 5; @(negedge clk); idle();
    check(gw_data == model[5], "array holds the written row");
    pim_dot = 1; pim_col = 2; gvec_col = g[2]; @(negedge clk); idle();
    check($signed(result) == ref_dot(model[5][2*COL_BITS +: COL_BITS], g[2]), "dot on written data");

    // rule: the PIM row may not be opened in the MEM buffer
    mem_act = 1; mem_row = 5; @(negedge clk); idle();
    check(err, "same row in both buffers flags err");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
