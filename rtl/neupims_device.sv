// neupims_device: the PIM memory system of one NeuPIMs accelerator.
//
// NUM_CHANNELS independent HBM-PIM channels, each with its own memory
// controller (pim_mem_ctrl) driving its own C/A bus into a channel of
// dual-row-buffer banks (pim_channel). Per channel, the NPU side hands in
// two streams: PIM instructions for the attention GEMVs and memory requests
// for everything else (weights and activations of the GEMMs). Because a bank
// can hold a MEM row and a PIM row at the same time, the two streams run
// concurrently; the controller interleaves them on the C/A bus, with PIM
// first.
//
// The NPU (systolic arrays, vector units, scratchpad) is not part of this
// RTL: its connections are the ports below, one set per channel. Read data
// comes back on rdata/rvalid one cycle after the channel sees RD, i.e. two
// cycles after the controller chooses it; GEMV results of all banks of a
// channel arrive together on pim_result with pim_rvalid. err reports a
// broken row-buffer or command rule in a channel; stats holds the event
// counters of each controller.
//
// From the source: 32 channels, each with its own controller and PIM
// command queue, and the channel/bank organisation. The port grouping is
// this design's own.
module neupims_device
  import neupims_pkg::*;
#(
  parameter int unsigned NUM_CHANNELS = neupims_pkg::NUM_CHANNELS,
  parameter int unsigned NUM_BANKS    = neupims_pkg::NUM_BANKS,
  parameter int unsigned ROWS         = neupims_pkg::ROWS,
  parameter int unsigned T_REFI       = neupims_pkg::T_REFI
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // PIM command queues
  input  logic        [NUM_CHANNELS-1:0]       pim_valid,
  output logic        [NUM_CHANNELS-1:0]       pim_ready,
  input  pim_instr_t                           pim_instr  [NUM_CHANNELS],
  // NPU memory requests and read data
  input  logic        [NUM_CHANNELS-1:0]       mem_valid,
  output logic        [NUM_CHANNELS-1:0]       mem_ready,
  input  mem_req_t                             mem_req    [NUM_CHANNELS],
  output logic        [COL_BITS-1:0]           rdata      [NUM_CHANNELS],
  output logic        [NUM_CHANNELS-1:0]       rvalid,
  // GEMV results
  output logic [NUM_BANKS-1:0][ACC_W-1:0]      pim_result [NUM_CHANNELS],
  output logic        [NUM_CHANNELS-1:0]       pim_rvalid,
  // status
  output logic        [NUM_CHANNELS-1:0]       pim_idle,
  output logic        [NUM_CHANNELS-1:0]       err,
  output logic [31:0]                          est_latency [NUM_CHANNELS],
  output ctrl_stats_t                          stats      [NUM_CHANNELS]
);
  for (genvar c = 0; c < NUM_CHANNELS; c++) begin : g_ch
    ca_t                 ca;
    logic [COL_BITS-1:0] wdata;
    logic                gemv_busy;
    logic [NUM_BANKS-1:0] pim_open, mem_open;

    pim_mem_ctrl #(.NUM_BANKS(NUM_BANKS), .T_REFI(T_REFI)) u_ctrl (
      .clk         (clk),
      .rst_n       (rst_n),
      .pim_valid   (pim_valid[c]),
      .pim_ready   (pim_ready[c]),
      .pim_instr   (pim_instr[c]),
      .mem_valid   (mem_valid[c]),
      .mem_ready   (mem_ready[c]),
      .mem_req     (mem_req[c]),
      .ca          (ca),
      .wdata       (wdata),
      .pim_idle    (pim_idle[c]),
      .est_latency (est_latency[c]),
      .stats       (stats[c])
    );

    pim_channel #(.NUM_BANKS(NUM_BANKS), .ROWS(ROWS)) u_chan (
      .clk           (clk),
      .rst_n         (rst_n),
      .ca            (ca),
      .wdata         (wdata),
      .rdata         (rdata[c]),
      .rvalid        (rvalid[c]),
      .pim_result    (pim_result[c]),
      .pim_rvalid    (pim_rvalid[c]),
      .gemv_busy     (gemv_busy),
      .bank_pim_open (pim_open),
      .bank_mem_open (mem_open),
      .err           (err[c])
    );
  end
endmodule
