// dram_cell_array: the memory cell array of one DRAM bank.
//
// Stores ROWS rows of ROW_BITS bits. Activating a row reads the whole row
// at once into a row buffer, so both read ports are a full row wide and
// combinational: the row buffer registers outside capture them on the
// activating clock edge. Port A feeds the MEM row buffer, port B the PIM row
// buffer and the global-buffer copy (PIM_GWRITE). The two ports read
// different rows in the same cycle, which is what lets a bank keep two rows
// open. Writes arrive one column (COL_BITS) at a time and land in the array
// on the clock edge (write-through; the restore-on-precharge of a real DRAM
// and its sense amplifiers are not modelled).
//
// The array itself follows the bank drawing (a cell array behind a row
// decoder); the two-port, write-through form is this design's choice.
module dram_cell_array #(
  parameter int unsigned ROWS     = neupims_pkg::ROWS,
  parameter int unsigned ROW_BITS = neupims_pkg::ROW_BITS,
  parameter int unsigned COL_BITS = neupims_pkg::COL_BITS,
  localparam int unsigned RAW = $clog2(ROWS),
  localparam int unsigned CAW = $clog2(ROW_BITS / COL_BITS)
) (
  input  logic                clk,
  // port A: MEM row read
  input  logic [RAW-1:0]      a_row,
  output logic [ROW_BITS-1:0] a_data,
  // port B: PIM row read
  input  logic [RAW-1:0]      b_row,
  output logic [ROW_BITS-1:0] b_data,
  // column write
  input  logic                w_en,
  input  logic [RAW-1:0]      w_row,
  input  logic [CAW-1:0]      w_col,
  input  logic [COL_BITS-1:0] w_data
);
  logic [ROW_BITS-1:0] cells [ROWS];

  assign a_data = cells[a_row];
  assign b_data = cells[b_row];

  always_ff @(posedge clk) begin
    if (w_en) cells[w_row][w_col*COL_BITS +: COL_BITS] <= w_data;
  end
endmodule
