// pe: one processing element of the DySCNN array.
//
// Datapath as drawn for the accelerator: the input window ("In") enters a
// multiplexer that picks the input matching the current active weight, a multiplier
// forms input x weight ("MUL", weight "w"), and an accumulator with a feedback path
// ("Acc") sums the products into the output ("O").
//
// Interface and timing: in_win holds the WIN inputs of the current look-ahead window,
// sel picks one of them, w is the active weight and valid says that this pair is
// real work. On a clock edge with valid high, acc_o grows by in_win[sel] * w (signed,
// sign-extended to ACC_W, wrapping on overflow). clear zeroes the accumulator and
// wins over valid. One multiply-accumulate per cycle, result visible one cycle later.
// Widths, the clear input and wrap-around on overflow are this design's choices.
module pe #(
  parameter int unsigned WIN    = dyscnn_pkg::WIN,
  parameter int unsigned DATA_W = dyscnn_pkg::DATA_W,
  parameter int unsigned ACC_W  = dyscnn_pkg::ACC_W
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            clear,
  input  logic signed [WIN-1:0][DATA_W-1:0] in_win,
  input  logic [$clog2(WIN)-1:0]          sel,
  input  logic signed [DATA_W-1:0]        w,
  input  logic                            valid,
  output logic signed [ACC_W-1:0]         acc_o
);

  logic signed [DATA_W-1:0]   in_sel;
  logic signed [2*DATA_W-1:0] prod;

  assign in_sel = in_win[sel];        // input multiplexer
  assign prod   = in_sel * w;         // MUL

  always_ff @(posedge clk or negedge rst_n) begin   // Acc
    if (!rst_n) begin
      acc_o <= '0;
    end else if (clear) begin
      acc_o <= '0;
    end else if (valid) begin
      acc_o <= acc_o + ACC_W'(prod);
    end
  end

endmodule
