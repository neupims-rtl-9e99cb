// neupims_pkg: types and constants shared by the NeuPIMs memory side.
//
// Holds the HBM organisation (32 channels, 32 banks per channel in bank
// groups of 4, 1KB pages) and the HBM timing parameters in cycles of the
// 1GHz memory clock, all as given for the prototype device. It also defines
// the command set driven on each channel's command/address (C/A) bus:
// regular DRAM commands, the four baseline PIM commands (GWRITE, grouped
// ACTIVATION, DOTPRODUCT, RDRESULT) and the NeuPIMs additions PIM_GEMV and
// PIM_PRECHARGE. PIM_HEADER never reaches the device: it is an instruction
// for the memory controller, so it appears only in the instruction type.
//
// Own choices (the source is silent on them): 16-bit signed elements, a
// 256-bit column (16 elements, 32 columns per page), a 48-bit result
// accumulator, the bit encoding of every command, and 4096 rows per bank
// rather than the 32768 that 1GB per channel implies (see README).
package neupims_pkg;

  // ---- HBM organisation -------------------------------------------------
  localparam int unsigned NUM_CHANNELS = 32;
  localparam int unsigned NUM_BANKS    = 32;   // banks per channel
  localparam int unsigned BANKS_PER_BG = 4;
  localparam int unsigned PAGE_BYTES   = 1024;
  localparam int unsigned ROW_BITS     = PAGE_BYTES * 8;
  localparam int unsigned ROWS         = 4096; // per bank, scaled from 32768

  // ---- datapath (own choices) ------------------------------------------
  localparam int unsigned ELEM_W    = 16;
  localparam int unsigned COL_ELEMS = 16;
  localparam int unsigned COL_BITS  = ELEM_W * COL_ELEMS;   // 256
  localparam int unsigned NUM_COLS  = ROW_BITS / COL_BITS;  // 32
  localparam int unsigned ACC_W     = 48;

  // ---- field widths of the command structs -------------------------------
  localparam int unsigned BANK_AW = 5;    // up to 32 banks
  localparam int unsigned ROW_AW  = 15;   // up to 32768 rows
  localparam int unsigned COL_AW  = 5;    // 32 columns
  localparam int unsigned K_W     = 6;    // k of PIM_GEMV, 1..32

  // ---- HBM timing, memory clock cycles ----------------------------------
  localparam int unsigned T_RP    = 14;
  localparam int unsigned T_RCD   = 14;
  localparam int unsigned T_RAS   = 34;
  localparam int unsigned T_RRD_L = 6;
  localparam int unsigned T_WR    = 16;
  localparam int unsigned T_CCD_S = 1;
  localparam int unsigned T_CCD_L = 2;
  localparam int unsigned T_REFI  = 3900;
  localparam int unsigned T_RFC   = 260;
  localparam int unsigned T_FAW   = 30;

  // ---- commands on the C/A bus -------------------------------------------
  typedef enum logic [3:0] {
    CMD_NOP        = 4'd0,
    CMD_ACT        = 4'd1,   // open a row in the MEM row buffer of one bank
    CMD_RD         = 4'd2,
    CMD_WR         = 4'd3,
    CMD_PRE        = 4'd4,   // close the MEM row buffer of one bank
    CMD_REF        = 4'd5,   // all-bank refresh
    CMD_PIM_GWRITE = 4'd6,   // copy one row of one bank to the global buffer
    CMD_PIM_ACT    = 4'd7,   // open a row in the PIM row buffers of one bank group
    CMD_PIM_DOT    = 4'd8,   // one column dot-product in every bank
    CMD_PIM_RDRES  = 4'd9,   // return and clear every bank's result
    CMD_PIM_GEMV   = 4'd10,  // k dot-products, then return the results
    CMD_PIM_PRE    = 4'd11   // close the PIM row buffers of all banks
  } ca_cmd_e;

  typedef struct packed {
    ca_cmd_e             cmd;
    logic [BANK_AW-1:0]  bank;   // bank for ACT/RD/WR/PRE/GWRITE, bank group for PIM_ACT
    logic [ROW_AW-1:0]   row;
    logic [COL_AW-1:0]   col;    // column, or first column of PIM_DOT / PIM_GEMV
    logic [K_W-1:0]      k;      // number of dot-products of PIM_GEMV
  } ca_t;

  // ---- PIM instructions queued at the memory controller -------------------
  typedef enum logic [2:0] {
    PI_HEADER = 3'd0,  // n_tiles and k of the coming GEMV
    PI_GWRITE = 3'd1,  // bank, row
    PI_ACT    = 3'd2,  // row: opened in the PIM buffers of every bank group in turn
    PI_GEMV   = 3'd3,  // col, k
    PI_PRE    = 3'd4,
    PI_DOT    = 3'd5,  // col (baseline fine-grained control)
    PI_RDRES  = 3'd6
  } pim_op_e;

  typedef struct packed {
    pim_op_e             op;
    logic [BANK_AW-1:0]  bank;
    logic [ROW_AW-1:0]   row;
    logic [COL_AW-1:0]   col;
    logic [K_W-1:0]      k;
    logic [15:0]         n_tiles;
  } pim_instr_t;

  // ---- NPU memory requests ------------------------------------------------
  typedef struct packed {
    logic                we;
    logic [BANK_AW-1:0]  bank;
    logic [ROW_AW-1:0]   row;
    logic [COL_AW-1:0]   col;
    logic [COL_BITS-1:0] wdata;
  } mem_req_t;

  // ---- controller event counters ------------------------------------------
  typedef struct packed {
    logic [31:0] pim_cmds;        // PIM commands issued on the C/A bus
    logic [31:0] mem_cmds;        // ACT/RD/WR/PRE issued for NPU requests
    logic [31:0] refreshes;       // REF issued
    logic [31:0] ref_pull_ins;    // refreshes moved ahead of a GEMV by a PIM_HEADER
    logic [31:0] row_conflicts;   // cycles a MEM ACT waited for the same row in the PIM buffer
    logic [31:0] mem_yield;       // cycles a ready MEM command yielded the bus to PIM
    logic [31:0] overlap;         // cycles a MEM command issued while a GEMV ran
  } ctrl_stats_t;

endpackage
