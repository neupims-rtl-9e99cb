// tb_neupims_device: end-to-end test of the PIM memory system.
//
// Runs the top with two channels (ROWS cut to 16, tREFI cut to 700 cycles)
// and drives both channels at the same time, each from its own NPU-side
// process. Per channel: the NPU writes a weight-like matrix row into every
// bank and a query-like vector row through the MEM path; the PIM queue gets
// PIM_HEADER, PIM_GWRITE, a grouped PIM_ACT, one PIM_GEMV over the whole
// row and PIM_PRECHARGE, while the NPU reads half of another row of the
// same channel and then one row that is open for PIM. A second, short tile follows
// after the NPU has left a MEM row open on the PIM row. GEMV results and read
// data are compared with values computed here.
//
// Mechanisms counted, each of which must happen at least once:
//   gemv      - a GEMV result returned and correct
//   overlap   - MEM commands issued while a GEMV runs (dual row buffers)
//   conflict  - a MEM ACT held back because its row is open for PIM
//   yield     - a MEM command held back because a PIM command took the bus
//   refresh   - an all-bank refresh
//   pullin    - a refresh pulled in by a PIM_HEADER latency estimate
//   mem_read  - NPU read data returned and correct
// The check fails on any channel error flag.
`timescale 1ns/1ps
module tb_neupims_device;
  import neupims_pkg::*;
  localparam int unsigned NC   = 2;
  localparam int unsigned R    = 16;
  localparam int unsigned NB   = NUM_BANKS;
  localparam int unsigned REFI = 700;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic [NC-1:0] pim_valid, pim_ready, mem_valid, mem_ready, rvalid, pim_rvalid, pim_idle, err;
  pim_instr_t pim_instr [NC];
  mem_req_t   mem_req   [NC];
  logic [COL_BITS-1:0] rdata [NC];
  logic [NB-1:0][ACC_W-1:0] pim_result [NC];
  logic [31:0] est_latency [NC];
  ctrl_stats_t stats [NC];

  neupims_device #(.NUM_CHANNELS(NC), .ROWS(R), .T_REFI(REFI)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, what); end
  endtask

  logic [ROW_BITS-1:0] mat [NC][NB];
  logic [ROW_BITS-1:0] vec [NC], side [NC];
  logic [COL_BITS-1:0] exp_rd [NC][$];
  logic signed [ACC_W-1:0] exp_res [NC][NB];
  int n_res [NC], n_rd [NC];

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

  task automatic mem(input int ch, input bit we, input int bank, input int row, input int col,
                     input logic [COL_BITS-1:0] d = '0);
    @(negedge clk);
    mem_req[ch] = '{we: we, bank: BANK_AW'(bank), row: ROW_AW'(row), col: COL_AW'(col), wdata: d};
    mem_valid[ch] = 1;
    while (!mem_ready[ch]) @(negedge clk);
    @(posedge clk);
    #0.1 mem_valid[ch] = 0;
  endtask

  task automatic pim(input int ch, input pim_op_e op, input int bank = 0, input int row = 0,
                     input int col = 0, input int k = 0, input int n = 0);
    @(negedge clk);
    pim_instr[ch] = '{op: op, bank: BANK_AW'(bank), row: ROW_AW'(row), col: COL_AW'(col),
                      k: K_W'(k), n_tiles: 16'(n)};
    pim_valid[ch] = 1;
    while (!pim_ready[ch]) @(negedge clk);
    @(posedge clk);
    #0.1 pim_valid[ch] = 0;
  endtask

  task automatic gemv_tile(input int ch, input int row, input int k);
    pim(ch, PI_ACT, 0, row);
    pim(ch, PI_GEMV, 0, 0, 0, k);
    pim(ch, PI_PRE);
  endtask

  // GEMV sequencer state of each channel, to time the NPU reads into the GEMV
  logic [NC-1:0] gbusy;
  assign gbusy[0] = dut.g_ch[0].gemv_busy;
  assign gbusy[1] = dut.g_ch[1].gemv_busy;

  // result and read-data monitor
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      if (rvalid[c]) begin
        check(exp_rd[c].size() > 0 && rdata[c] == exp_rd[c][0], $sformatf("ch%0d read data", c));
        if (exp_rd[c].size() > 0) void'(exp_rd[c].pop_front());
        n_rd[c]++;
      end
      if (pim_rvalid[c]) begin
        for (int b = 0; b < NB; b++)
          check($signed(pim_result[c][b]) == exp_res[c][b], $sformatf("ch%0d GEMV bank %0d", c, b));
        n_res[c]++;
      end
      check(!err[c], $sformatf("ch%0d rules kept", c));
    end
  end

  task automatic run_channel(input int ch);
    for (int b = 0; b < NB; b++) begin
      mat[ch][b] = rnd_row();
      for (int c = 0; c < NUM_COLS; c++) mem(ch, 1, b, 2, c, mat[ch][b][c*COL_BITS +: COL_BITS]);
    end
    vec[ch] = rnd_row();
    side[ch] = rnd_row();
    for (int c = 0; c < NUM_COLS; c++) mem(ch, 1, 0, 7, c, vec[ch][c*COL_BITS +: COL_BITS]);
    for (int c = 0; c < NUM_COLS; c++) mem(ch, 1, 3, 9, c, side[ch][c*COL_BITS +: COL_BITS]);
    for (int b = 0; b < NB; b++) exp_res[ch][b] = ref_dot(mat[ch][b], vec[ch], NUM_COLS);
    fork
      begin
        pim(ch, PI_HEADER, 0, 0, 0, NUM_COLS, 2);
        pim(ch, PI_GWRITE, 0, 7);
        gemv_tile(ch, 2, NUM_COLS);
      end
      begin
        wait (gbusy[ch]);
        for (int c = 0; c < NUM_COLS / 2; c++) begin
          exp_rd[ch].push_back(side[ch][c*COL_BITS +: COL_BITS]);
          mem(ch, 0, 3, 9, c);
        end
        exp_rd[ch].push_back(mat[ch][5][0 +: COL_BITS]);
        mem(ch, 0, 5, 2, 0);
      end
    join
    wait (n_res[ch] == 1);
    // the NPU leaves row 2 of bank 6 open; the next PIM_ACT must close it
    exp_rd[ch].push_back(mat[ch][6][COL_BITS +: COL_BITS]);
    mem(ch, 0, 6, 2, 1);
    repeat (30) @(posedge clk);
    for (int b = 0; b < NB; b++) exp_res[ch][b] = ref_dot(mat[ch][b], vec[ch], 4);
    pim(ch, PI_HEADER, 0, 0, 0, 4, 1);
    gemv_tile(ch, 2, 4);
    wait (n_res[ch] == 2);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m_gemv = 0, m_overlap = 0, m_conflict = 0, m_yield = 0, m_ref = 0, m_pull = 0, m_rd = 0;
    pim_valid = '0; mem_valid = '0;
    foreach (pim_instr[c]) begin pim_instr[c] = '0; mem_req[c] = '0; n_res[c] = 0; n_rd[c] = 0; end
    repeat (3) @(posedge clk);
    #0.1 rst_n = 1;
    fork
      run_channel(0);
      run_channel(1);
    join
    repeat (2 * REFI) @(posedge clk);
    for (int c = 0; c < NC; c++) begin
      check(exp_rd[c].size() == 0, $sformatf("ch%0d all reads returned", c));
      check(pim_idle[c], $sformatf("ch%0d PIM side idle at the end", c));
      m_gemv     += n_res[c];
      m_rd       += n_rd[c];
      m_overlap  += int'(stats[c].overlap);
      m_conflict += int'(stats[c].row_conflicts);
      m_yield    += int'(stats[c].mem_yield);
      m_ref      += int'(stats[c].refreshes);
      m_pull     += int'(stats[c].ref_pull_ins);
    end
    $display("mechanisms: gemv=%0d mem_read=%0d overlap=%0d conflict=%0d yield=%0d refresh=%0d pullin=%0d",
             m_gemv, m_rd, m_overlap, m_conflict, m_yield, m_ref, m_pull);
    check(m_gemv == 2 * NC, "gemv happened");
    check(m_rd > 0, "mem_read happened");
    check(m_overlap > 0, "overlap happened");
    check(m_conflict > 0, "conflict happened");
    check(m_yield > 0, "yield happened");
    check(m_ref > 0, "refresh happened");
    check(m_pull > 0, "pullin happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
