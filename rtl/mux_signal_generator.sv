// mux_signal_generator: turns the bit mask of one filter into the select signal of
// the PE input multiplexers.
//
// Only the active weights of a filter are stored, packed one after another, so a PE
// must be told which input each of them belongs to. This block holds the bit mask of
// the current look-ahead window (WIN positions of the input vector; 1 = active
// weight, 0 = dropped weight) and each cycle points at the lowest position that still
// has an unconsumed active weight. That position is the select of the input mux
// ("look-ahead": the PE skips over dropped positions within the window instead of
// spending a cycle on each). When the consumer takes the weight (advance), the bit is
// cleared and the next active position is offered in the following cycle.
//
// Interface and timing:
//   load    : the register takes mask_i (a new window); has priority over advance.
//   advance : the current active weight is consumed this cycle (needs valid_o).
//   valid_o : an active weight is pending in this window.
//   sel_o   : its position within the window (combinational from the register).
//   last_o  : at most one active weight is left, so the window is finished after
//             this cycle's advance (also high for an empty window).
// The mask-to-select function follows the description; the priority-encoder form
// (lowest position first, one weight per cycle) is this design's choice.
module mux_signal_generator #(
  parameter int unsigned WIN = dyscnn_pkg::WIN
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   load,
  input  logic [WIN-1:0]         mask_i,
  input  logic                   advance,
  output logic                   valid_o,
  output logic [$clog2(WIN)-1:0] sel_o,
  output logic                   last_o
);

  logic [WIN-1:0] rem_q;  // active weights of the window not yet consumed

  // Lowest set bit of the remaining mask.
  always_comb begin
    sel_o = '0;
    for (int i = WIN - 1; i >= 0; i--) begin
      if (rem_q[i]) sel_o = i[$clog2(WIN)-1:0];
    end
  end

  assign valid_o = |rem_q;
  assign last_o  = (rem_q & (rem_q - 1'b1)) == '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem_q <= '0;
    end else if (load) begin
      rem_q <= mask_i;
    end else if (advance) begin
      rem_q <= rem_q & (rem_q - 1'b1);  // clear the lowest set bit
    end
  end

  // A weight can only be consumed when one is pending.
  a_advance_valid : assert property (@(posedge clk) disable iff (!rst_n)
                                     (advance && !load) |-> valid_o);

endmodule
