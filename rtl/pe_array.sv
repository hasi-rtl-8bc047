// pe_array: ROWS x COLS grid of PEs.
//
// Each column works on one filter of a schedule group, each row on one input vector
// (for a convolution: one output pixel). All PEs of a column therefore share the
// column's mux select, active weight and valid; all PEs of a row share the row's input
// window. PE (r, c) accumulates the dot product of input vector r with filter c.
// The grid is drawn in the description without its sizes; this broadcast arrangement
// is this design's choice. Timing is that of the PE: one MAC per cycle, results one
// cycle after the inputs.
module pe_array #(
  parameter int unsigned ROWS   = dyscnn_pkg::ROWS,
  parameter int unsigned COLS   = dyscnn_pkg::COLS,
  parameter int unsigned WIN    = dyscnn_pkg::WIN,
  parameter int unsigned DATA_W = dyscnn_pkg::DATA_W,
  parameter int unsigned ACC_W  = dyscnn_pkg::ACC_W
) (
  input  logic                                         clk,
  input  logic                                         rst_n,
  input  logic                                         clear,
  input  logic [ROWS-1:0][WIN-1:0][DATA_W-1:0]         in_win,
  input  logic [COLS-1:0][$clog2(WIN)-1:0]             sel,
  input  logic [COLS-1:0][DATA_W-1:0]                  w,
  input  logic [COLS-1:0]                              valid,
  output logic [ROWS-1:0][COLS-1:0][ACC_W-1:0]         acc_o
);

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      pe #(.WIN(WIN), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
        .clk    (clk),
        .rst_n  (rst_n),
        .clear  (clear),
        .in_win (in_win[r]),
        .sel    (sel[c]),
        .w      (w[c]),
        .valid  (valid[c]),
        .acc_o  (acc_o[r][c])
      );
    end
  end

endmodule
