// weight_buffer: active weights and bit mask of one filter.
//
// Dropped weights are never loaded: the host writes the active weights of the filter
// packed in order of position (address 0 holds the first active weight), and one
// WIN-bit mask per look-ahead window (bit i of window b covers input position
// b*WIN + i; 1 = active). The accelerator reads the packed weights through a pointer
// that advances by one per consumed weight, and the mask of any window by index.
//
// Interface and timing: one write port per array (w_we/w_addr/w_data and
// m_we/m_addr/m_data, written on the clock edge); reads are asynchronous, so rd_w and
// rd_mask follow their addresses in the same cycle. Capacity is the dense worst case,
// MAX_BLOCKS*WIN weights, so any sparsification rate fits. Storing only active
// weights follows the description; the packed layout, the mask store beside it and
// asynchronous reads are this design's choices.
module weight_buffer #(
  parameter int unsigned DATA_W     = dyscnn_pkg::DATA_W,
  parameter int unsigned WIN        = dyscnn_pkg::WIN,
  parameter int unsigned MAX_BLOCKS = dyscnn_pkg::MAX_BLOCKS,
  localparam int unsigned DEPTH     = MAX_BLOCKS * WIN,
  localparam int unsigned WA_W      = $clog2(DEPTH),
  localparam int unsigned MA_W      = $clog2(MAX_BLOCKS)
) (
  input  logic              clk,
  // active-weight store
  input  logic              w_we,
  input  logic [WA_W-1:0]   w_addr,
  input  logic [DATA_W-1:0] w_data,
  input  logic [WA_W-1:0]   rd_ptr,
  output logic [DATA_W-1:0] rd_w,
  // bit-mask store
  input  logic              m_we,
  input  logic [MA_W-1:0]   m_addr,
  input  logic [WIN-1:0]    m_data,
  input  logic [MA_W-1:0]   rd_blk,
  output logic [WIN-1:0]    rd_mask
);

  logic [DATA_W-1:0] wmem [DEPTH];
  logic [WIN-1:0]    mmem [MAX_BLOCKS];

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_addr] <= w_data;
    if (m_we) mmem[m_addr] <= m_data;
  end

  assign rd_w    = wmem[rd_ptr];
  assign rd_mask = mmem[rd_blk];

endmodule
