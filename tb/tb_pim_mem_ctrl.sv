// tb_pim_mem_ctrl: the memory controller driving a real PIM channel.
//
// The testbench feeds the controller's two queues at once: NPU memory
// requests (writes of a matrix row into every bank and a vector row, then
// reads) and PIM instructions (PIM_HEADER, GWRITE, grouped activation,
// PIM_GEMV, PIM_PRECHARGE). A monitor watches every command on the C/A bus
// and checks, independently of the controller, tRCD, tRAS, tRP, tWR, tRRD_L,
// tFAW (a PIM_ACT counts four activations), that no row is open in both
// buffers of a bank, that no REF is issued while a GEMV runs or a row is
// open, and that refreshes come at least every tREFI plus the time to drain.
// Read data and GEMV results are compared with values computed here. tREFI is
// cut to 700 cycles so several refreshes, and a refresh pulled in by a
// PIM_HEADER, happen in a short run. ROWS is cut to 16.
`timescale 1ns/1ps
module tb_pim_mem_ctrl;
  import neupims_pkg::*;
  localparam int unsigned R     = 16;
  localparam int unsigned NB    = NUM_BANKS;
  localparam int unsigned NG    = NB / BANKS_PER_BG;
  localparam int unsigned REFI  = 700;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic pim_valid, pim_ready, mem_valid, mem_ready, pim_idle;
  pim_instr_t pim_instr;
  mem_req_t mem_req;
  ca_t ca;
  logic [COL_BITS-1:0] wdata, rdata;
  logic [31:0] est_latency;
  ctrl_stats_t stats;
  logic rvalid, pim_rvalid, gemv_busy, err;
  logic [NB-1:0][ACC_W-1:0] pim_result;
  logic [NB-1:0] bank_pim_open, bank_mem_open;

  pim_mem_ctrl #(.T_REFI(REFI)) u_ctrl (.*);
  pim_channel  #(.ROWS(R)) u_chan (.clk, .rst_n, .ca, .wdata, .rdata, .rvalid, .pim_result,
                                   .pim_rvalid, .gemv_busy, .bank_pim_open, .bank_mem_open, .err);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, what); end
  endtask

  // ---- data model ---------------------------------------------------------------
  logic [ROW_BITS-1:0] mat [NB];
  logic [ROW_BITS-1:0] vec, side;
  logic [COL_BITS-1:0] exp_rd [$];
  int unsigned results_seen = 0;
  logic signed [ACC_W-1:0] exp_res [NB];
  bit res_expected = 0;

  function automatic logic [ROW_BITS-1:0] rnd_row();
    logic [ROW_BITS-1:0] v;
    for (int i = 0; i < ROW_BITS / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic logic signed [ACC_W-1:0] ref_dot(input logic [ROW_BITS-1:0] a,
      input logic [ROW_BITS-1:0] b, input int n);
    logic signed [ACC_W-1:0] s = 0;
    for (int i = 0; i < n * COL_ELEMS; i++)
      s += ACC_W'($signed(a[i*ELEM_W +: ELEM_W]) * $signed(b[i*ELEM_W +: ELEM_W]));
    return s;
  endfunction

  // ---- drivers ------------------------------------------------------------------------
  task automatic mem(input bit we, input int bank, input int row, input int col,
                     input logic [COL_BITS-1:0] d = '0);
    @(negedge clk);
    mem_req = '{we: we, bank: BANK_AW'(bank), row: ROW_AW'(row), col: COL_AW'(col), wdata: d};
    mem_valid = 1;
    while (!mem_ready) @(negedge clk);
    @(posedge clk);
    #0.1 mem_valid = 0;
  endtask

  task automatic pim(input pim_op_e op, input int bank = 0, input int row = 0,
                     input int col = 0, input int k = 0, input int n = 0);
    @(negedge clk);
    pim_instr = '{op: op, bank: BANK_AW'(bank), row: ROW_AW'(row), col: COL_AW'(col),
                  k: K_W'(k), n_tiles: 16'(n)};
    pim_valid = 1;
    while (!pim_ready) @(negedge clk);
    @(posedge clk);
    #0.1 pim_valid = 0;
  endtask

  task automatic gemv_tile(input int row, input int k);
    pim(PI_ACT, 0, row);
    pim(PI_GEMV, 0, 0, 0, k);
    pim(PI_PRE);
  endtask

  // ---- C/A monitor -------------------------------------------------------------------
  longint cyc = 0;
  longint last_act [NB], last_pre [NB], last_wr [NB];
  longint act_times [$];
  longint last_any_act = -1000, last_pim_act = -1000, gemv_end = -1, last_ref = 0;
  bit     mopen [NB];
  int     mrow [NB];
  bit     popen [NG];
  int     prow;
  int     n_ref = 0, n_gemv = 0, max_ref_gap = 0;

  function automatic int acts_in_window();
    int n = 0;
    foreach (act_times[i]) if (cyc - act_times[i] < T_FAW) n++;
    return n;
  endfunction

  always @(posedge clk) if (rst_n) begin
    cyc++;
    unique case (ca.cmd)
      CMD_ACT: begin
        check(!mopen[ca.bank], "ACT to an open bank");
        check(cyc - last_pre[ca.bank] >= T_RP, "tRP before ACT");
        check(cyc - last_any_act >= T_RRD_L, "tRRD before ACT");
        check(acts_in_window() + 1 <= 4, "tFAW at ACT");
        check(!(popen[ca.bank / BANKS_PER_BG] && prow == int'(ca.row)), "ACT of a row open for PIM");
        mopen[ca.bank] = 1; mrow[ca.bank] = ca.row; last_act[ca.bank] = cyc;
        last_any_act = cyc; act_times.push_back(cyc);
      end
      CMD_RD, CMD_WR: begin
        check(mopen[ca.bank] && cyc - last_act[ca.bank] >= T_RCD, "tRCD before column command");
        if (ca.cmd == CMD_WR) last_wr[ca.bank] = cyc;
      end
      CMD_PRE: begin
        check(cyc - last_act[ca.bank] >= T_RAS, "tRAS before PRE");
        check(cyc - last_wr[ca.bank] >= T_WR, "tWR before PRE");
        mopen[ca.bank] = 0; last_pre[ca.bank] = cyc;
      end
      CMD_PIM_ACT: begin
        check(!popen[ca.bank], "PIM_ACT to an open group");
        check(cyc - last_any_act >= T_RRD_L, "tRRD before PIM_ACT");
        check(acts_in_window() + BANKS_PER_BG <= 4, "tFAW at PIM_ACT");
        for (int j = 0; j < BANKS_PER_BG; j++)
          check(!(mopen[ca.bank*BANKS_PER_BG+j] && mrow[ca.bank*BANKS_PER_BG+j] == int'(ca.row)),
                "PIM_ACT of a row open for MEM");
        popen[ca.bank] = 1; prow = ca.row; last_pim_act = cyc; last_any_act = cyc;
        repeat (BANKS_PER_BG) act_times.push_back(cyc);
      end
      CMD_PIM_GWRITE: begin
        last_any_act = cyc; act_times.push_back(cyc);
      end
      CMD_PIM_GEMV: begin
        check(cyc - last_pim_act >= T_RCD, "tRCD before PIM_GEMV");
        foreach (popen[g]) check(popen[g], "PIM_GEMV with all groups open");
        gemv_end = cyc + ca.k * T_CCD_L; n_gemv++;
      end
      CMD_PIM_PRE: begin
        check(cyc - last_pim_act >= T_RAS, "tRAS before PIM_PRE");
        check(cyc > gemv_end, "PIM_PRE after GEMV end");
        foreach (popen[g]) popen[g] = 0;
      end
      CMD_REF: begin
        check(cyc > gemv_end, "no REF inside a GEMV");
        foreach (mopen[b]) check(!mopen[b], "REF with a MEM row open");
        foreach (popen[g]) check(!popen[g], "REF with a PIM row open");
        if (int'(cyc - last_ref) > max_ref_gap) max_ref_gap = int'(cyc - last_ref);
        last_ref = cyc; n_ref++;
      end
      default: ;
    endcase
    while (act_times.size() > 0 && cyc - act_times[0] >= T_FAW) void'(act_times.pop_front());
    if (rvalid) begin
      check(exp_rd.size() > 0 && rdata == exp_rd[0], "read data");
      if (exp_rd.size() > 0) void'(exp_rd.pop_front());
    end
    if (pim_rvalid) begin
      check(res_expected, "GEMV result expected");
      for (int b = 0; b < NB; b++)
        check($signed(pim_result[b]) == exp_res[b], $sformatf("GEMV result bank %0d", b));
      results_seen++;
    end
    check(!err, "channel rules kept");
  end

  initial begin
    #4000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (last_act[b]) begin last_act[b] = -1000; last_pre[b] = -1000; last_wr[b] = -1000; end
    pim_valid = 0; mem_valid = 0; pim_instr = '0; mem_req = '0;
    repeat (3) @(posedge clk);
    #0.1 rst_n = 1;

    // phase 1: the NPU writes the operands through the MEM path
    for (int b = 0; b < NB; b++) begin
      mat[b] = rnd_row();
      for (int c = 0; c < NUM_COLS; c++) mem(1, b, 2, c, mat[b][c*COL_BITS +: COL_BITS]);
    end
    vec = rnd_row();
    for (int c = 0; c < NUM_COLS; c++) mem(1, 0, 7, c, vec[c*COL_BITS +: COL_BITS]);
    side = rnd_row();
    for (int c = 0; c < NUM_COLS; c++) mem(1, 3, 9, c, side[c*COL_BITS +: COL_BITS]);
    for (int b = 0; b < NB; b++) exp_res[b] = ref_dot(mat[b], vec, NUM_COLS);
    res_expected = 1;

    // phase 2: a GEMV tile in parallel with MEM reads, one of them to the PIM row
    fork
      begin
        pim(PI_HEADER, 0, 0, 0, NUM_COLS, 1);
        pim(PI_GWRITE, 0, 7);
        gemv_tile(2, NUM_COLS);
      end
      begin
        wait (n_gemv == 1);                   // reads while the GEMV runs
        for (int c = 0; c < NUM_COLS; c++) begin
          exp_rd.push_back(side[c*COL_BITS +: COL_BITS]);
          mem(0, 3, 9, c);
        end
        exp_rd.push_back(mat[5][0 +: COL_BITS]);
        mem(0, 5, 2, 0);                      // row 2 is open for PIM in bank 5
      end
    join
    wait (results_seen == 1);

    // phase 3: a long GEMV announced by PIM_HEADER, then more tiles
    for (int b = 0; b < NB; b++) exp_res[b] = ref_dot(mat[b], vec, NUM_COLS);
    pim(PI_HEADER, 0, 0, 0, NUM_COLS, 2);
    gemv_tile(2, NUM_COLS);
    gemv_tile(2, NUM_COLS);
    wait (results_seen == 3);

    // phase 4: the NPU holds row 2 of bank 6 open; PIM_ACT must close it first
    exp_rd.push_back(mat[6][COL_BITS +: COL_BITS]);
    mem(0, 6, 2, 1);
    repeat (30) @(posedge clk);
    for (int b = 0; b < NB; b++) exp_res[b] = ref_dot(mat[b], vec, 4);
    pim(PI_HEADER, 0, 0, 0, 4, 1);
    gemv_tile(2, 4);
    wait (results_seen == 4);

    // keep running long enough for a refresh with nothing queued
    repeat (2 * REFI) @(posedge clk);

    check(exp_rd.size() == 0, "all reads returned");
    check(n_gemv == 4, "four GEMVs issued");
    check(n_ref >= 3, $sformatf("refreshes issued (%0d)", n_ref));
    check(max_ref_gap <= REFI + 400, $sformatf("refresh gap %0d", max_ref_gap));
    check(stats.ref_pull_ins >= 1, "PIM_HEADER pulled a refresh in");
    check(stats.row_conflicts >= 1, "MEM ACT waited for the PIM row");
    check(stats.overlap >= 1, "MEM commands issued during a GEMV");
    check(stats.mem_yield >= 1, "MEM yielded the C/A bus to PIM");
    check(est_latency == (NG - 1) * T_FAW + T_RAS + T_RP, "PIM_HEADER estimate of a k=4 tile");
    $display("stats: pim=%0d mem=%0d ref=%0d pullin=%0d conflict=%0d yield=%0d overlap=%0d maxgap=%0d",
             stats.pim_cmds, stats.mem_cmds, stats.refreshes, stats.ref_pull_ins,
             stats.row_conflicts, stats.mem_yield, stats.overlap, max_ref_gap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
