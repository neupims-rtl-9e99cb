// pim_channel: one NeuPIMs PIM channel (the device side of the C/A bus).
//
// Holds NUM_BANKS dual-row-buffer banks (pim_bank), the global vector buffer
// that all banks share, the command decoder and the PIM_GEMV sequencer.
// Regular commands (ACT, RD, WR, PRE) go to the one addressed bank and use
// its MEM row buffer. PIM commands are broadcast: PIM_ACT opens a row in the
// PIM row buffers of the four banks of one bank group, PIM_DOT makes every
// bank multiply one column of its PIM row with the same column of the global
// buffer and add the sum into its Result register, PIM_RDRESULT returns all
// Results and clears them, PIM_PRE closes every PIM row buffer, and
// PIM_GWRITE copies one row of one bank into the global buffer. REF is an
// all-bank refresh and needs every buffer closed.
//
// PIM_GEMV(col, k) is the composite command: from the single C/A slot it
// takes, the sequencer performs k dot-products on columns col..col+k-1, one
// every T_CCD_L cycles (the first in the cycle of the command), and
// T_CCD_L cycles after the last one returns the Results (pim_rvalid) and
// clears them. So the results of a GEMV issued in cycle c are valid in cycle
// c + k*T_CCD_L, and the C/A bus stays free for MEM commands meanwhile.
//
// Timing: a command acts on the clock edge at which ca is presented. Read
// data (rdata/rvalid) follow RD by one cycle. pim_result is valid in the
// cycle pim_rvalid is high. err is sticky: any bank rule broken, or a PIM
// column command while the GEMV sequencer is busy.
//
// From the source: the dual row buffers, the shared global buffer, grouped
// activation of 4 banks, broadcast of PIM commands, PIM_GEMV and
// PIM_PRECHARGE. Own choices: one dot-product per T_CCD_L, GWRITE as a
// one-command whole-row copy, all Results returned in one wide beat.
module pim_channel
  import neupims_pkg::*;
#(
  parameter int unsigned NUM_BANKS    = neupims_pkg::NUM_BANKS,
  parameter int unsigned BANKS_PER_BG = neupims_pkg::BANKS_PER_BG,
  parameter int unsigned ROWS         = neupims_pkg::ROWS,
  parameter int unsigned DOT_GAP      = neupims_pkg::T_CCD_L,
  localparam int unsigned RAW = $clog2(ROWS),
  localparam int unsigned CAW = $clog2(NUM_COLS),
  localparam int unsigned BW  = $clog2(NUM_BANKS)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  ca_t                                 ca,
  input  logic [COL_BITS-1:0]                 wdata,
  output logic [COL_BITS-1:0]                 rdata,
  output logic                                rvalid,
  output logic [NUM_BANKS-1:0][ACC_W-1:0]     pim_result,
  output logic                                pim_rvalid,
  output logic                                gemv_busy,
  output logic [NUM_BANKS-1:0]                bank_pim_open,
  output logic [NUM_BANKS-1:0]                bank_mem_open,
  output logic                                err
);
  logic [ROW_BITS-1:0] gbuf;                         // global vector buffer
  logic [NUM_BANKS-1:0][ROW_BITS-1:0] gw_data;
  logic [NUM_BANKS-1:0][COL_BITS-1:0] b_rdata;
  logic [NUM_BANKS-1:0] b_rvalid, b_err;
  logic [NUM_BANKS-1:0][RAW-1:0] b_mem_row, b_pim_row;

  // ---- GEMV sequencer --------------------------------------------------------
  logic           seq_busy;
  logic [K_W-1:0] seq_left;
  logic [CAW-1:0] seq_col;
  logic [$clog2(DOT_GAP+1)-1:0] seq_gap;
  logic           seq_dot, seq_done, gemv_start, dot_now, rd_pulse, ch_bad;
  logic [CAW-1:0] dot_col;

  assign gemv_start = (ca.cmd == CMD_PIM_GEMV) && !seq_busy && (ca.k != '0);
  assign seq_dot    = seq_busy && (seq_left != '0) && (seq_gap == '0);
  assign seq_done   = seq_busy && (seq_left == '0) && (seq_gap == '0);
  assign dot_now    = seq_dot || gemv_start || ((ca.cmd == CMD_PIM_DOT) && !seq_busy);
  assign dot_col    = seq_busy ? seq_col : ca.col[CAW-1:0];
  assign rd_pulse   = seq_done || ((ca.cmd == CMD_PIM_RDRES) && !seq_busy);
  assign ch_bad     = seq_busy && (ca.cmd inside {CMD_PIM_DOT, CMD_PIM_GEMV, CMD_PIM_RDRES,
                                                   CMD_PIM_PRE, CMD_PIM_ACT, CMD_PIM_GWRITE});
  assign gemv_busy  = seq_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seq_busy <= 1'b0;
      seq_left <= '0;
      seq_col  <= '0;
      seq_gap  <= '0;
    end else if (gemv_start) begin
      seq_busy <= 1'b1;
      seq_left <= ca.k - 1'b1;
      seq_col  <= ca.col[CAW-1:0] + 1'b1;
      seq_gap  <= ($clog2(DOT_GAP+1))'(DOT_GAP - 1);
    end else if (seq_busy) begin
      if (seq_gap != '0) begin
        seq_gap <= seq_gap - 1'b1;
      end else if (seq_dot) begin
        seq_left <= seq_left - 1'b1;
        seq_col  <= seq_col + 1'b1;
        seq_gap  <= ($clog2(DOT_GAP+1))'(DOT_GAP - 1);
      end else begin
        seq_busy <= 1'b0;                       // seq_done: results returned
      end
    end
  end

  // ---- banks ----------------------------------------------------------------
  for (genvar i = 0; i < NUM_BANKS; i++) begin : g_bank
    logic sel;
    assign sel = (ca.bank[BW-1:0] == BW'(i));
    pim_bank #(.ROWS(ROWS)) u_bank (
      .clk          (clk),
      .rst_n        (rst_n),
      .mem_act      (sel && ca.cmd == CMD_ACT),
      .mem_pre      (sel && ca.cmd == CMD_PRE),
      .mem_rd       (sel && ca.cmd == CMD_RD),
      .mem_wr       (sel && ca.cmd == CMD_WR),
      .mem_row      (ca.row[RAW-1:0]),
      .mem_col      (ca.col[CAW-1:0]),
      .mem_wdata    (wdata),
      .mem_rdata    (b_rdata[i]),
      .mem_rvalid   (b_rvalid[i]),
      .pim_act      (ca.cmd == CMD_PIM_ACT && !seq_busy && (32'(ca.bank) == i / BANKS_PER_BG)),
      .pim_pre      (ca.cmd == CMD_PIM_PRE && !seq_busy),
      .pim_dot      (dot_now),
      .pim_row      (ca.row[RAW-1:0]),
      .pim_col      (dot_col),
      .gvec_col     (gbuf[dot_col*COL_BITS +: COL_BITS]),
      .res_clear    (rd_pulse),
      .result       (pim_result[i]),
      .gw_data      (gw_data[i]),
      .ref_cmd      (ca.cmd == CMD_REF),
      .mem_open     (bank_mem_open[i]),
      .mem_open_row (b_mem_row[i]),
      .pim_open     (bank_pim_open[i]),
      .pim_open_row (b_pim_row[i]),
      .err          (b_err[i])
    );
  end

  // ---- global buffer, read data, status ---------------------------------------
  logic ch_err;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gbuf   <= '0;
      ch_err <= 1'b0;
    end else begin
      if (ca.cmd == CMD_PIM_GWRITE && !seq_busy) gbuf <= gw_data[ca.bank[BW-1:0]];
      if (ch_bad) ch_err <= 1'b1;
    end
  end

  always_comb begin
    rdata = '0;
    for (int i = 0; i < NUM_BANKS; i++)
      if (b_rvalid[i]) rdata = b_rdata[i];
  end
  assign rvalid     = |b_rvalid;
  assign pim_rvalid = rd_pulse;
  assign err        = ch_err || (|b_err);
endmodule
