// input_buffer: dense input vector of one PE row, read one look-ahead window at a time.
//
// Inputs are not sparsified, so the vector is stored whole. The host writes one value
// per cycle at its position (position p lands in window p / WIN, slot p % WIN); the
// accelerator reads all WIN values of a window at once, which the PE input
// multiplexers then choose from.
//
// Interface and timing: write on the clock edge (we/addr/data); the window read is
// asynchronous (rd_win follows rd_blk in the same cycle). The description only names
// the inputs ("In"); the storage layout is this design's choice. WIN must be a power
// of two.
module input_buffer #(
  parameter int unsigned DATA_W     = dyscnn_pkg::DATA_W,
  parameter int unsigned WIN        = dyscnn_pkg::WIN,
  parameter int unsigned MAX_BLOCKS = dyscnn_pkg::MAX_BLOCKS,
  localparam int unsigned A_W       = $clog2(MAX_BLOCKS * WIN),
  localparam int unsigned S_W       = $clog2(WIN),
  localparam int unsigned B_W       = $clog2(MAX_BLOCKS)
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [A_W-1:0]             addr,
  input  logic [DATA_W-1:0]          data,
  input  logic [B_W-1:0]             rd_blk,
  output logic [WIN-1:0][DATA_W-1:0] rd_win
);

  logic [WIN-1:0][DATA_W-1:0] mem [MAX_BLOCKS];

  always_ff @(posedge clk) begin
    if (we) mem[addr[A_W-1:S_W]][addr[S_W-1:0]] <= data;
  end

  assign rd_win = mem[rd_blk];

  initial assert (WIN >= 2 && (WIN & (WIN - 1)) == 0) else $error("WIN must be a power of two");

endmodule
