// pim_bank: one NeuPIMs DRAM bank with dual row buffers.
//
// A regular PIM bank has one row buffer shared by normal reads/writes and by
// the in-bank GEMV unit, so the host must stop using the bank while it
// computes. This bank has two: the MEM row buffer serves ACT/RD/WR/PRE from
// the NPU and the PIM row buffer feeds the GEMV datapath, and the two may hold
// different rows of the same cell array at the same time.
//
// Datapath (as drawn for the NeuPIMs bank): PIM row buffer -> column MUX
// (selects one COL_BITS column) -> COL_ELEMS multipliers, each multiplying a
// row element by the matching element of the global vector buffer column ->
// adder tree -> adder into the Result register. The MEM side is a column
// decoder onto the data bus. Every command acts on the rising clock edge at
// which it is asserted; read data and its valid appear one cycle later.
//
// Interface: one-cycle command strobes for each buffer (act/pre/rd/wr for
// MEM, act/pre/dot for PIM), res_clear to zero Result (read and clear happen
// in the same cycle, a dot-product in that cycle starts the new sum), and
// ref_cmd for refresh. gw_data is the row addressed by pim_row, used by the
// channel for PIM_GWRITE. err goes high and stays high if the controller
// breaks a rule: activating an open buffer, opening in one buffer the row
// already open in the other, or accessing/refreshing in the wrong state; an
// assertion also reports it as a warning, so a test can go on and check err.
//
// Own choices: 16 multipliers (a 256-bit column), 16-bit signed elements, a
// 48-bit accumulator, write-through writes, reset closes both buffers.
module pim_bank
  import neupims_pkg::*;
#(
  parameter int unsigned ROWS = neupims_pkg::ROWS,
  localparam int unsigned RAW = $clog2(ROWS),
  localparam int unsigned CAW = $clog2(NUM_COLS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // MEM side
  input  logic                 mem_act,
  input  logic                 mem_pre,
  input  logic                 mem_rd,
  input  logic                 mem_wr,
  input  logic [RAW-1:0]       mem_row,
  input  logic [CAW-1:0]       mem_col,
  input  logic [COL_BITS-1:0]  mem_wdata,
  output logic [COL_BITS-1:0]  mem_rdata,
  output logic                 mem_rvalid,
  // PIM side
  input  logic                 pim_act,
  input  logic                 pim_pre,
  input  logic                 pim_dot,
  input  logic [RAW-1:0]       pim_row,
  input  logic [CAW-1:0]       pim_col,
  input  logic [COL_BITS-1:0]  gvec_col,
  input  logic                 res_clear,
  output logic [ACC_W-1:0]     result,
  output logic [ROW_BITS-1:0]  gw_data,
  // refresh and status
  input  logic                 ref_cmd,
  output logic                 mem_open,
  output logic [RAW-1:0]       mem_open_row,
  output logic                 pim_open,
  output logic [RAW-1:0]       pim_open_row,
  output logic                 err
);
  logic [ROW_BITS-1:0] mem_rb, pim_rb;      // the dual row buffers
  logic [ROW_BITS-1:0] a_data, b_data;

  dram_cell_array #(.ROWS(ROWS), .ROW_BITS(ROW_BITS), .COL_BITS(COL_BITS)) u_cells (
    .clk    (clk),
    .a_row  (mem_row),
    .a_data (a_data),
    .b_row  (pim_row),
    .b_data (b_data),
    .w_en   (mem_wr && mem_open),
    .w_row  (mem_open_row),
    .w_col  (mem_col),
    .w_data (mem_wdata)
  );
  assign gw_data = b_data;

  // ---- column MUX, multipliers, adder tree --------------------------------
  logic [COL_BITS-1:0] pim_column;
  logic signed [ACC_W-1:0] dot_sum;
  assign pim_column = pim_rb[pim_col*COL_BITS +: COL_BITS];

  always_comb begin
    dot_sum = '0;
    for (int i = 0; i < COL_ELEMS; i++) begin
      dot_sum += ACC_W'($signed(pim_column[i*ELEM_W +: ELEM_W]) *
                        $signed(gvec_col[i*ELEM_W +: ELEM_W]));
    end
  end

  // ---- rule checks ---------------------------------------------------------
  logic bad;
  always_comb begin
    bad = 1'b0;
    if (mem_act && (mem_open || (pim_open && pim_open_row == mem_row))) bad = 1'b1;
    if (pim_act && (pim_open || (mem_open && mem_open_row == pim_row))) bad = 1'b1;
    if (mem_act && pim_act && mem_row == pim_row)                       bad = 1'b1;
    if ((mem_rd || mem_wr) && !mem_open)                                bad = 1'b1;
    if (pim_dot && !pim_open)                                           bad = 1'b1;
    if (ref_cmd && (mem_open || pim_open))                              bad = 1'b1;
  end

  // ---- state ---------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_open     <= 1'b0;
      pim_open     <= 1'b0;
      mem_open_row <= '0;
      pim_open_row <= '0;
      mem_rvalid   <= 1'b0;
      mem_rdata    <= '0;
      result       <= '0;
      err          <= 1'b0;
    end else begin
      mem_rvalid <= mem_rd && mem_open;
      if (bad) err <= 1'b1;
      // MEM row buffer
      if (mem_act) begin
        mem_open     <= 1'b1;
        mem_open_row <= mem_row;
      end else if (mem_pre) begin
        mem_open <= 1'b0;
      end
      if (mem_rd) mem_rdata <= mem_rb[mem_col*COL_BITS +: COL_BITS];
      // PIM row buffer
      if (pim_act) begin
        pim_open     <= 1'b1;
        pim_open_row <= pim_row;
      end else if (pim_pre) begin
        pim_open <= 1'b0;
      end
      // Result accumulator
      if (res_clear)    result <= pim_dot ? dot_sum : '0;
      else if (pim_dot) result <= result + dot_sum;
    end
  end

  // Row buffer contents carry no reset.
  always_ff @(posedge clk) begin
    if (mem_act)                    mem_rb <= a_data;
    else if (mem_wr && mem_open)    mem_rb[mem_col*COL_BITS +: COL_BITS] <= mem_wdata;
    if (pim_act)                    pim_rb <= b_data;
  end

  a_no_rule_break: assert property (@(posedge clk) disable iff (!rst_n) !bad)
    else $warning("pim_bank: command breaks the dual row buffer rules");
endmodule
