// tb_pim_channel: self-checking test of one PIM channel driven directly on
// its C/A bus.
//
// Writes a matrix row into every bank and a vector row into bank 0 with
// ACT/WR/PRE, copies the vector into the global buffer with PIM_GWRITE,
// opens the matrix row in all PIM row buffers with one PIM_ACT per bank
// group, and runs one PIM_GEMV over all 32 columns. While the GEMV runs the
// testbench reads another row of bank 1 through the MEM path. It checks
// every bank's result against a dot-product computed here, and that the
// results arrive exactly k*T_CCD_L cycles after the PIM_GEMV. Then it runs
// the baseline PIM_DOTPRODUCT / PIM_RDRESULT pair on four columns, and
// checks that err flags a PIM command sent while the GEMV is busy.
`timescale 1ns/1ps
module tb_pim_channel;
  import neupims_pkg::*;
  localparam int unsigned R  = 16;
  localparam int unsigned NB = NUM_BANKS;
  localparam int unsigned NG = NB / BANKS_PER_BG;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  ca_t ca;
  logic [COL_BITS-1:0] wdata, rdata;
  logic rvalid, pim_rvalid, gemv_busy, err;
  logic [NB-1:0][ACC_W-1:0] pim_result;
  logic [NB-1:0] bank_pim_open, bank_mem_open;

  pim_channel #(.ROWS(R)) dut (.*);

  int checks = 0, failures = 0;
  logic [ROW_BITS-1:0] mat [NB];
  logic [ROW_BITS-1:0] vec, other;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input ca_cmd_e cmd, input int bank = 0, input int row = 0,
                      input int col = 0, input int k = 0, input logic [COL_BITS-1:0] d = '0);
    ca = '0; ca.cmd = cmd; ca.bank = BANK_AW'(bank); ca.row = ROW_AW'(row);
    ca.col = COL_AW'(col); ca.k = K_W'(k); wdata = d;
    @(negedge clk);
    ca = '0; ca.cmd = CMD_NOP;
  endtask

  function automatic logic [ROW_BITS-1:0] rnd_row();
    logic [ROW_BITS-1:0] v;
    for (int i = 0; i < ROW_BITS / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic logic signed [ACC_W-1:0] ref_dot(input logic [ROW_BITS-1:0] a,
      input logic [ROW_BITS-1:0] b, input int c0, input int n);
    logic signed [ACC_W-1:0] s = 0;
    for (int i = c0 * COL_ELEMS; i < (c0 + n) * COL_ELEMS; i++)
      s += ACC_W'($signed(a[i*ELEM_W +: ELEM_W]) * $signed(b[i*ELEM_W +: ELEM_W]));
    return s;
  endfunction

  task automatic write_row(input int bank, input int row, input logic [ROW_BITS-1:0] data);
    send(CMD_ACT, bank, row);
    for (int c = 0; c < NUM_COLS; c++) send(CMD_WR, bank, row, c, 0, data[c*COL_BITS +: COL_BITS]);
    send(CMD_PRE, bank);
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, lat, rd_seen;
    ca = '0; ca.cmd = CMD_NOP; wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    for (int b = 0; b < NB; b++) begin
      mat[b] = rnd_row();
      write_row(b, 2, mat[b]);
    end
    vec = rnd_row();
    write_row(0, 7, vec);
    other = rnd_row();
    write_row(1, 9, other);

    send(CMD_PIM_GWRITE, 0, 7);
    for (int g = 0; g < NG; g++) send(CMD_PIM_ACT, g, 2);
    check(bank_pim_open == '1, "PIM rows open in all banks");

    // MEM row of bank 1 opened while the PIM rows are open
    send(CMD_ACT, 1, 9);
    check(bank_mem_open[1] && bank_pim_open[1], "bank 1 holds two rows");

    // one PIM_GEMV, then MEM reads on the free C/A slots
    ca = '0; ca.cmd = CMD_PIM_GEMV; ca.col = 0; ca.k = K_W'(NUM_COLS);
    t0 = 0; lat = -1; rd_seen = 0;
    @(negedge clk);
    for (int t = 1; t <= NUM_COLS * T_CCD_L + 4; t++) begin
      ca = '0; ca.cmd = CMD_NOP;
      if (t < NUM_COLS) begin ca.cmd = CMD_RD; ca.bank = 1; ca.col = COL_AW'(t); end
      if (rvalid) begin
        rd_seen++;
        check(rdata == other[(t-1)*COL_BITS +: COL_BITS], $sformatf("MEM read of col %0d during GEMV", t - 1));
      end
      if (pim_rvalid && lat < 0) begin
        lat = t;
        for (int b = 0; b < NB; b++)
          check($signed(pim_result[b]) == ref_dot(mat[b], vec, 0, NUM_COLS),
                $sformatf("GEMV result of bank %0d", b));
      end
      @(negedge clk);
    end
    check(lat == NUM_COLS * T_CCD_L, $sformatf("GEMV latency %0d, expected %0d", lat, NUM_COLS * T_CCD_L));
    check(rd_seen == NUM_COLS - 1, "MEM reads served during GEMV");
    check(!gemv_busy, "sequencer idle after GEMV");

    // baseline fine-grained control: 4 x PIM_DOTPRODUCT, then PIM_RDRESULT
    for (int c = 4; c < 8; c++) begin send(CMD_PIM_DOT, 0, 0, c); @(negedge clk); end
    ca = '0; ca.cmd = CMD_PIM_RDRES;
    #0.1;
    check(pim_rvalid, "RDRESULT returns results");
    for (int b = 0; b < NB; b += 5)
      check($signed(pim_result[b]) == ref_dot(mat[b], vec, 4, 4), $sformatf("DOT x4 result of bank %0d", b));
    @(negedge clk); ca = '0; ca.cmd = CMD_NOP;

    send(CMD_PIM_PRE);
    send(CMD_PRE, 1);
    check(bank_pim_open == '0 && bank_mem_open == '0, "all rows closed");
    check(!err, "no rule broken so far");

    // a PIM command while the GEMV sequencer runs is an error
    for (int g = 0; g < NG; g++) send(CMD_PIM_ACT, g, 2);
    send(CMD_PIM_GEMV, 0, 0, 0, 8);
    send(CMD_PIM_DOT, 0, 0, 3);
    check(err, "PIM command during GEMV flags err");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
