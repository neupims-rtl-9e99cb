// pim_mem_ctrl: per-channel memory controller of a NeuPIMs device.
//
// The controller owns one channel's command/address (C/A) bus and drives at
// most one command per cycle. It takes work from two queues: the PIM command
// queue (PIM instructions of the GEMVs for attention) and the NPU memory
// request queue (column reads and writes of the GEMM side). Because every
// bank has separate MEM and PIM row buffers, both kinds of work proceed at
// once; the controller's job is to interleave them on the single C/A bus
// without breaking the HBM timing and without ever opening the same row of
// a bank in both buffers.
//
// Each cycle one command is chosen, in this priority order:
//   1. refresh: once tREFI has passed (or a PIM_HEADER pulled the refresh in)
//      no new rows are opened, open MEM rows are precharged, the PIM side is
//      allowed to finish up to its PIM_PRECHARGE, then REF is issued and
//      nothing is activated for tRFC.
//   2. PIM: the head of the PIM queue. PI_HEADER carries the tile count and k
//      of the next GEMV; from them the controller estimates its latency and,
//      if it would not end before the refresh is due, refreshes first, so a
//      refresh never falls inside the GEMV. PI_ACT opens one row in the PIM
//      buffers of each bank group in turn (four banks per PIM_ACT command);
//      PI_GEMV issues one PIM_GEMV and then leaves the bus to MEM traffic for
//      the k*tCCD_L cycles the device needs; PI_PRE closes the PIM rows.
//      The baseline PI_DOT / PI_RDRES pair is also accepted.
//   3. MEM: the head of the memory queue, served in order with an open-page
//      policy (RD/WR on a row hit, PRE on a row miss, ACT on a closed bank).
// A MEM ACT to the row open in the PIM buffers waits (counted as a row
// conflict); a PIM_ACT that would hit a row open in a MEM buffer first
// precharges that bank.
//
// Timing enforced: tRCD (ACT to column command and PIM_ACT to PIM_GEMV),
// tRAS, tRP, tWR, tRRD_L between any two activations, tFAW over a sliding
// window with a PIM_ACT counted as four activations, tCCD_L/tCCD_S between
// column commands to the same/different bank group, tREFI and tRFC.
//
// Interface: valid/ready queues in; ca/wdata out, registered (a command is
// seen by the channel one cycle after it is chosen). stats counts events;
// est_latency holds the last PIM_HEADER estimate.
//
// From the source: separate PIM command queue, PIM over MEM priority, the
// PIM_HEADER use, grouped activation under tFAW, the timing values. Own
// choices: the estimate formula, pulling the refresh in, in-order open-page
// MEM service, GWRITE occupying the PIM side for tRAS+tRP cycles.
module pim_mem_ctrl
  import neupims_pkg::*;
#(
  parameter int unsigned NUM_BANKS    = neupims_pkg::NUM_BANKS,
  parameter int unsigned BANKS_PER_BG = neupims_pkg::BANKS_PER_BG,
  parameter int unsigned QDEPTH       = 8,
  parameter int unsigned T_RP    = neupims_pkg::T_RP,
  parameter int unsigned T_RCD   = neupims_pkg::T_RCD,
  parameter int unsigned T_RAS   = neupims_pkg::T_RAS,
  parameter int unsigned T_RRD_L = neupims_pkg::T_RRD_L,
  parameter int unsigned T_WR    = neupims_pkg::T_WR,
  parameter int unsigned T_CCD_S = neupims_pkg::T_CCD_S,
  parameter int unsigned T_CCD_L = neupims_pkg::T_CCD_L,
  parameter int unsigned T_REFI  = neupims_pkg::T_REFI,
  parameter int unsigned T_RFC   = neupims_pkg::T_RFC,
  parameter int unsigned T_FAW   = neupims_pkg::T_FAW,
  localparam int unsigned NUM_BG = NUM_BANKS / BANKS_PER_BG,
  localparam int unsigned BW     = $clog2(NUM_BANKS)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                pim_valid,
  output logic                pim_ready,
  input  pim_instr_t          pim_instr,
  input  logic                mem_valid,
  output logic                mem_ready,
  input  mem_req_t            mem_req,
  output ca_t                 ca,
  output logic [COL_BITS-1:0] wdata,
  output logic                pim_idle,
  output logic [31:0]         est_latency,
  output ctrl_stats_t         stats
);
  typedef logic [15:0] cnt_t;

  // ---- queues ----------------------------------------------------------------
  logic       pq_valid, pq_pop, mq_valid, mq_pop;
  pim_instr_t pq;
  mem_req_t   mq;

  sync_fifo #(.T(pim_instr_t), .DEPTH(QDEPTH)) u_pim_q (
    .clk, .rst_n, .in_valid(pim_valid), .in_ready(pim_ready), .in_data(pim_instr),
    .out_valid(pq_valid), .out_ready(pq_pop), .out_data(pq));
  sync_fifo #(.T(mem_req_t), .DEPTH(QDEPTH)) u_mem_q (
    .clk, .rst_n, .in_valid(mem_valid), .in_ready(mem_ready), .in_data(mem_req),
    .out_valid(mq_valid), .out_ready(mq_pop), .out_data(mq));

  // ---- controller's view of the channel ----------------------------------------
  logic [NUM_BANKS-1:0]             mem_open;
  logic [NUM_BANKS-1:0][ROW_AW-1:0] mem_row;
  cnt_t [NUM_BANKS-1:0]             t_rcd, t_ras, t_rp, t_wr;
  logic [NUM_BG-1:0]                pim_open;
  logic [ROW_AW-1:0]                pim_row;
  cnt_t                             p_rcd, p_ras, p_rp, p_busy;
  logic [$clog2(NUM_BG+1)-1:0]      act_grp;
  cnt_t                             rrd, ccd_l, ccd_s;
  logic [BW-1:0]                    last_col_bank;
  cnt_t [3:0]                       faw;
  logic [31:0]                      ref_timer;
  cnt_t                             ref_busy;
  logic                             ref_force;

  // ---- helpers -------------------------------------------------------------------
  function automatic int unsigned bg_of(input int unsigned b);
    return b / BANKS_PER_BG;
  endfunction

  logic [2:0] faw_free;
  always_comb begin
    faw_free = '0;
    for (int i = 0; i < 4; i++) if (faw[i] == '0) faw_free++;
  end

  logic ref_pending, acts_blocked, all_closed;
  assign ref_pending  = (ref_timer >= T_REFI) || ref_force;
  assign acts_blocked = ref_pending || (ref_busy != '0);
  always_comb begin
    all_closed = (mem_open == '0) && (pim_open == '0) && (p_busy == '0) && (p_rp == '0);
    for (int b = 0; b < NUM_BANKS; b++) if (t_rp[b] != '0) all_closed = 1'b0;
  end

  // Latency of one tile of a GEMV: the last group activation, tRCD, k
  // dot-products, result return, precharge (not before tRAS) and tRP.
  function automatic logic [31:0] tile_latency(input logic [K_W-1:0] k);
    logic [31:0] run;
    run = T_RCD + 32'(k) * T_CCD_L + 1;
    if (run < T_RAS) run = T_RAS;
    return (NUM_BG - 1) * T_FAW + run + T_RP;
  endfunction
  logic [31:0] hdr_est;
  assign hdr_est = 32'(pq.n_tiles) * tile_latency(pq.k);

  // ---- command choice ----------------------------------------------------------------
  ca_t                 ca_n;
  logic [COL_BITS-1:0] wdata_n;
  logic                hdr_take, pim_issue, mem_issue, mem_want, row_conflict;
  logic                clash;
  logic [BW-1:0]       mb;
  ca_t                 m;
  int unsigned         gb;

  always_comb begin
    ca_n      = '0;
    ca_n.cmd  = CMD_NOP;
    wdata_n   = '0;
    pq_pop    = 1'b0;
    mq_pop    = 1'b0;
    hdr_take  = 1'b0;
    pim_issue = 1'b0;
    mem_issue = 1'b0;
    mem_want  = 1'b0;
    row_conflict = 1'b0;
    clash     = 1'b0;
    mb        = '0;
    m         = '0;
    gb        = 0;

    // 1. refresh
    if (ref_pending) begin
      for (int b = NUM_BANKS - 1; b >= 0; b--) begin
        if (mem_open[b] && t_ras[b] == '0 && t_wr[b] == '0) begin
          ca_n.cmd  = CMD_PRE;
          ca_n.bank = BANK_AW'(b);
        end
      end
      if (ca_n.cmd == CMD_NOP && all_closed) ca_n.cmd = CMD_REF;
    end

    // 2. PIM
    if (ca_n.cmd == CMD_NOP && pq_valid) begin
      unique case (pq.op)
        PI_HEADER: begin
          hdr_take = 1'b1;
          pq_pop   = 1'b1;
        end
        PI_GWRITE: begin
          if (!acts_blocked && p_busy == '0 && p_rp == '0 && pim_open == '0 &&
              rrd == '0 && faw_free >= 1 &&
              !(mem_open[pq.bank[BW-1:0]] && mem_row[pq.bank[BW-1:0]] == pq.row)) begin
            ca_n.cmd  = CMD_PIM_GWRITE;
            ca_n.bank = pq.bank;
            ca_n.row  = pq.row;
            pq_pop    = 1'b1;
          end
        end
        PI_ACT: begin
          // a tile whose first group is open finishes opening; refresh waits for its PIM_PRE
          if (ref_busy == '0 && !(ref_pending && act_grp == '0) && p_busy == '0 && p_rp == '0) begin
            // a bank of this group holding the row in its MEM buffer is closed first
            for (int j = BANKS_PER_BG - 1; j >= 0; j--) begin
              gb = 32'(act_grp) * BANKS_PER_BG + 32'(j);
              if (mem_open[gb] && mem_row[gb] == pq.row && t_ras[gb] == '0 && t_wr[gb] == '0) begin
                ca_n.cmd  = CMD_PRE;
                ca_n.bank = BANK_AW'(gb);
              end
              if (mem_open[gb] && mem_row[gb] == pq.row) clash = 1'b1;
            end
            if (ca_n.cmd == CMD_NOP) begin
              if (!clash && rrd == '0 && faw_free >= 3'(BANKS_PER_BG)) begin
                ca_n.cmd  = CMD_PIM_ACT;
                ca_n.bank = BANK_AW'(act_grp);
                ca_n.row  = pq.row;
                pq_pop    = (32'(act_grp) == NUM_BG - 1);
              end
            end
          end
        end
        PI_GEMV, PI_DOT: begin
          if (pim_open == '1 && p_rcd == '0 && p_busy == '0) begin
            ca_n.cmd = (pq.op == PI_GEMV) ? CMD_PIM_GEMV : CMD_PIM_DOT;
            ca_n.col = pq.col;
            ca_n.k   = pq.k;
            pq_pop   = 1'b1;
          end
        end
        PI_RDRES: begin
          if (p_busy == '0) begin
            ca_n.cmd = CMD_PIM_RDRES;
            pq_pop   = 1'b1;
          end
        end
        PI_PRE: begin
          if (p_busy == '0 && p_ras == '0) begin
            ca_n.cmd = CMD_PIM_PRE;
            pq_pop   = 1'b1;
          end
        end
        default: pq_pop = 1'b1;
      endcase
      pim_issue = (ca_n.cmd != CMD_NOP);
    end

    // 3. MEM
    if (mq_valid && !ref_pending) begin
      mb = mq.bank[BW-1:0];
      m.cmd  = CMD_NOP;
      m.bank = mq.bank;
      m.row  = mq.row;
      m.col  = mq.col;
      if (mem_open[mb] && mem_row[mb] == mq.row) begin
        if (t_rcd[mb] == '0 && ccd_s == '0 &&
            !(bg_of(32'(mb)) == bg_of(32'(last_col_bank)) && ccd_l != '0))
          m.cmd = mq.we ? CMD_WR : CMD_RD;
      end else if (mem_open[mb]) begin
        if (t_ras[mb] == '0 && t_wr[mb] == '0) m.cmd = CMD_PRE;
      end else if (ref_busy == '0 && t_rp[mb] == '0 && rrd == '0 && faw_free >= 1) begin
        if ((pim_open != '0 || (pq_valid && pq.op == PI_ACT)) &&
            (pim_open != '0 ? pim_row : pq.row) == mq.row)
          row_conflict = 1'b1;
        else
          m.cmd = CMD_ACT;
      end
      mem_want = (m.cmd != CMD_NOP);
      if (mem_want && ca_n.cmd == CMD_NOP) begin
        ca_n      = m;
        wdata_n   = mq.wdata;
        mem_issue = 1'b1;
        mq_pop    = (m.cmd == CMD_RD || m.cmd == CMD_WR);
      end
    end
  end

  // ---- state update from the chosen command ---------------------------------------------
  function automatic cnt_t dec(input cnt_t v);
    return (v == '0) ? '0 : v - 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ca            <= '0;
      wdata         <= '0;
      mem_open      <= '0;
      mem_row       <= '0;
      t_rcd         <= '0;
      t_ras         <= '0;
      t_rp          <= '0;
      t_wr          <= '0;
      pim_open      <= '0;
      pim_row       <= '0;
      p_rcd         <= '0;
      p_ras         <= '0;
      p_rp          <= '0;
      p_busy        <= '0;
      act_grp       <= '0;
      rrd           <= '0;
      ccd_l         <= '0;
      ccd_s         <= '0;
      last_col_bank <= '0;
      faw           <= '0;
      ref_timer     <= '0;
      ref_busy      <= '0;
      ref_force     <= 1'b0;
      est_latency   <= '0;
      stats         <= '0;
    end else begin
      ca    <= ca_n;
      wdata <= wdata_n;

      // countdowns
      for (int b = 0; b < NUM_BANKS; b++) begin
        t_rcd[b] <= dec(t_rcd[b]);
        t_ras[b] <= dec(t_ras[b]);
        t_rp[b]  <= dec(t_rp[b]);
        t_wr[b]  <= dec(t_wr[b]);
      end
      p_rcd    <= dec(p_rcd);
      p_ras    <= dec(p_ras);
      p_rp     <= dec(p_rp);
      p_busy   <= dec(p_busy);
      rrd      <= dec(rrd);
      ccd_l    <= dec(ccd_l);
      ccd_s    <= dec(ccd_s);
      ref_busy <= dec(ref_busy);
      ref_timer <= ref_timer + 1;

      // tFAW window: claim one slot per activated bank
      begin
        int unsigned need, got;
        need = (ca_n.cmd == CMD_ACT || ca_n.cmd == CMD_PIM_GWRITE) ? 1 :
               (ca_n.cmd == CMD_PIM_ACT) ? BANKS_PER_BG : 0;
        got = 0;
        for (int i = 0; i < 4; i++) begin
          if (faw[i] == '0) begin
            if (got < need) begin
              faw[i] <= cnt_t'(T_FAW - 1);
              got++;
            end
          end else begin
            faw[i] <= faw[i] - 1'b1;
          end
        end
      end

      unique case (ca_n.cmd)
        CMD_ACT: begin
          mem_open[ca_n.bank[BW-1:0]] <= 1'b1;
          mem_row[ca_n.bank[BW-1:0]]  <= ca_n.row;
          t_rcd[ca_n.bank[BW-1:0]]    <= cnt_t'(T_RCD - 1);
          t_ras[ca_n.bank[BW-1:0]]    <= cnt_t'(T_RAS - 1);
          rrd                         <= cnt_t'(T_RRD_L - 1);
        end
        CMD_PRE: begin
          mem_open[ca_n.bank[BW-1:0]] <= 1'b0;
          t_rp[ca_n.bank[BW-1:0]]     <= cnt_t'(T_RP - 1);
        end
        CMD_RD, CMD_WR: begin
          ccd_l         <= cnt_t'(T_CCD_L - 1);
          ccd_s         <= cnt_t'(T_CCD_S - 1);
          last_col_bank <= ca_n.bank[BW-1:0];
          if (ca_n.cmd == CMD_WR) t_wr[ca_n.bank[BW-1:0]] <= cnt_t'(T_WR - 1);
        end
        CMD_REF: begin
          ref_timer <= '0;
          ref_busy  <= cnt_t'(T_RFC - 1);
          ref_force <= 1'b0;
        end
        CMD_PIM_GWRITE: begin
          p_busy <= cnt_t'(T_RAS + T_RP - 1);
          rrd    <= cnt_t'(T_RRD_L - 1);
        end
        CMD_PIM_ACT: begin
          pim_open[ca_n.bank[$clog2(NUM_BG)-1:0]] <= 1'b1;
          pim_row <= ca_n.row;
          p_rcd   <= cnt_t'(T_RCD - 1);
          p_ras   <= cnt_t'(T_RAS - 1);
          rrd     <= cnt_t'(T_RRD_L - 1);
          act_grp <= (32'(act_grp) == NUM_BG - 1) ? '0 : act_grp + 1'b1;
        end
        CMD_PIM_GEMV: p_busy <= cnt_t'(32'(ca_n.k) * T_CCD_L);
        CMD_PIM_DOT:  p_busy <= cnt_t'(T_CCD_L - 1);
        CMD_PIM_PRE: begin
          pim_open <= '0;
          p_rp     <= cnt_t'(T_RP - 1);
        end
        default: ;
      endcase

      if (hdr_take) begin
        est_latency <= hdr_est;
        if (!ref_pending && hdr_est > T_REFI - ref_timer) begin
          ref_force           <= 1'b1;
          stats.ref_pull_ins  <= stats.ref_pull_ins + 1;
        end
      end

      if (pim_issue)                   stats.pim_cmds      <= stats.pim_cmds + 1;
      if (mem_issue)                   stats.mem_cmds      <= stats.mem_cmds + 1;
      if (ca_n.cmd == CMD_REF)         stats.refreshes     <= stats.refreshes + 1;
      if (row_conflict)                stats.row_conflicts <= stats.row_conflicts + 1;
      if (mem_want && !mem_issue)      stats.mem_yield     <= stats.mem_yield + 1;
      if (mem_issue && p_busy != '0 && pim_open != '0)
                                       stats.overlap       <= stats.overlap + 1;
    end
  end

  assign pim_idle = !pq_valid && (p_busy == '0);

  // a row is never open in the MEM and PIM buffers of one bank at once
  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_chk
    a_rows_distinct: assert property (@(posedge clk) disable iff (!rst_n)
      !(mem_open[b] && pim_open[b / BANKS_PER_BG] && mem_row[b] == pim_row));
  end
  a_one_refresh_ready: assert property (@(posedge clk) disable iff (!rst_n)
      (ca_n.cmd == CMD_REF) |-> all_closed);
endmodule
