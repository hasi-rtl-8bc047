// dyscnn_accel: DySCNN, the dynamically sparsified CNN accelerator of the HASI defense.
//
// HASI detects adversarial inputs by running a network a second time with noise
// injected into the model and measuring how much the output moves. The noise is made
// by randomly dropping weights (noisy sparsification); this accelerator turns the
// dropped weights into saved cycles. A host-side scheduler picks a random
// sparsification rate per filter, turns it into a bit mask (1 = active weight), groups
// filters with similar active-weight counts, and loads only the active weights plus
// the masks. The accelerator then runs COLS filters (one schedule group) against ROWS
// input vectors at once.
//
// How it works: the input vector is walked in look-ahead windows of WIN positions.
// In each window every column's MUX signal generator offers its next active weight
// position; the column's packed weight is read at its pointer, every PE of the column
// multiplies it with the input at that position in its row's window and accumulates.
// A window is finished when every column has consumed all of its active weights there,
// so a window costs max(1, largest active count among the columns) cycles; columns
// that run out early idle. Well-balanced schedule groups therefore waste few cycles,
// and a fully dense mask (the noise-free reference pass) costs one cycle per position.
//
// Interface:
//   host writes, only while idle: wb_* one packed weight of column wb_col,
//     mb_* the WIN-bit mask of one window of column mb_col, ib_* one input value of
//     row ib_row.
//   start (while idle) with num_blocks windows (1..MAX_BLOCKS); clear_acc at start
//     zeroes the accumulators, otherwise results add to the previous ones (for dot
//     products longer than one buffer load).
//   done pulses for one cycle after the last MAC; acc_o then holds the dot products,
//     acc_o[r][c] = input row r . filter c. busy is high from start to done.
//   cycle_cnt_o / idle_cnt_o: cycles of the last run and column-cycles spent idle.
// Timing: start -> one mask-fetch cycle -> sum over windows of max(1, max active)
// compute cycles -> done on the cycle after the last compute cycle.
//
// Follows the description: active-only weight buffers, bit masks turned into input
// mux selects, look-ahead matching of inputs to weights, a PE grid of mux, multiplier
// and accumulator, balance left to the software scheduler (no hardware load
// balancing). This design's own choices: the window-synchronous stepping, the
// broadcast grid arrangement, all sizes, the host write ports and the counters.
// rst_n is both the asynchronous reset of the flops and the disable condition of the
// assertions, which is why a lint tool may report it as used both ways.
module dyscnn_accel
  import dyscnn_pkg::state_e, dyscnn_pkg::ST_IDLE, dyscnn_pkg::ST_LOAD, dyscnn_pkg::ST_RUN;
#(
  parameter int unsigned ROWS       = dyscnn_pkg::ROWS,
  parameter int unsigned COLS       = dyscnn_pkg::COLS,
  parameter int unsigned WIN        = dyscnn_pkg::WIN,
  parameter int unsigned DATA_W     = dyscnn_pkg::DATA_W,
  parameter int unsigned ACC_W      = dyscnn_pkg::ACC_W,
  parameter int unsigned MAX_BLOCKS = dyscnn_pkg::MAX_BLOCKS,
  localparam int unsigned POS_W     = $clog2(MAX_BLOCKS * WIN),
  localparam int unsigned BLK_W     = $clog2(MAX_BLOCKS),
  localparam int unsigned NB_W      = $clog2(MAX_BLOCKS + 1),
  localparam int unsigned ROW_W     = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned COL_W     = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // host load ports
  input  logic                                 wb_we,
  input  logic [COL_W-1:0]                     wb_col,
  input  logic [POS_W-1:0]                     wb_addr,
  input  logic [DATA_W-1:0]                    wb_data,
  input  logic                                 mb_we,
  input  logic [COL_W-1:0]                     mb_col,
  input  logic [BLK_W-1:0]                     mb_blk,
  input  logic [WIN-1:0]                       mb_mask,
  input  logic                                 ib_we,
  input  logic [ROW_W-1:0]                     ib_row,
  input  logic [POS_W-1:0]                     ib_addr,
  input  logic [DATA_W-1:0]                    ib_data,
  // control
  input  logic                                 start,
  input  logic                                 clear_acc,
  input  logic [NB_W-1:0]                      num_blocks,
  output logic                                 busy,
  output logic                                 done,
  // results
  output logic [ROWS-1:0][COLS-1:0][ACC_W-1:0] acc_o,
  output logic [31:0]                          cycle_cnt_o,
  output logic [31:0]                          idle_cnt_o
);

  localparam int unsigned SEL_W = $clog2(WIN);

  state_e                         st_q;
  logic [BLK_W-1:0]               blk_q;       // current window
  logic [BLK_W-1:0]               last_blk_q;  // last window of this run
  logic [COLS-1:0][POS_W-1:0]     ptr_q;       // packed-weight pointer per column

  logic                           is_last;
  logic                           win_end;
  logic                           msg_load;
  logic [BLK_W-1:0]               mask_blk;
  logic [COLS-1:0][WIN-1:0]       col_mask;
  logic [COLS-1:0]                col_valid, col_last, pe_valid;
  logic [COLS-1:0][SEL_W-1:0]     col_sel;
  logic [COLS-1:0][DATA_W-1:0]    col_w;
  logic [ROWS-1:0][WIN-1:0][DATA_W-1:0] row_win;

  assign is_last  = (blk_q == last_blk_q);
  assign win_end  = &col_last;
  assign msg_load = (st_q == ST_LOAD) || (st_q == ST_RUN && win_end && !is_last);
  assign mask_blk = (st_q == ST_RUN && !is_last) ? blk_q + 1'b1 : blk_q;
  assign pe_valid = (st_q == ST_RUN) ? col_valid : '0;

  // ---------------------------------------------------------------- per filter column
  for (genvar c = 0; c < COLS; c++) begin : g_col
    weight_buffer #(.DATA_W(DATA_W), .WIN(WIN), .MAX_BLOCKS(MAX_BLOCKS)) u_wbuf (
      .clk     (clk),
      .w_we    (wb_we && wb_col == COL_W'(c)),
      .w_addr  (wb_addr),
      .w_data  (wb_data),
      .rd_ptr  (ptr_q[c]),
      .rd_w    (col_w[c]),
      .m_we    (mb_we && mb_col == COL_W'(c)),
      .m_addr  (mb_blk),
      .m_data  (mb_mask),
      .rd_blk  (mask_blk),
      .rd_mask (col_mask[c])
    );

    mux_signal_generator #(.WIN(WIN)) u_msg (
      .clk     (clk),
      .rst_n   (rst_n),
      .load    (msg_load),
      .mask_i  (col_mask[c]),
      .advance (pe_valid[c]),
      .valid_o (col_valid[c]),
      .sel_o   (col_sel[c]),
      .last_o  (col_last[c])
    );
  end

  // ---------------------------------------------------------------- per input row
  for (genvar r = 0; r < ROWS; r++) begin : g_row
    input_buffer #(.DATA_W(DATA_W), .WIN(WIN), .MAX_BLOCKS(MAX_BLOCKS)) u_ibuf (
      .clk    (clk),
      .we     (ib_we && ib_row == ROW_W'(r)),
      .addr   (ib_addr),
      .data   (ib_data),
      .rd_blk (blk_q),
      .rd_win (row_win[r])
    );
  end

  pe_array #(.ROWS(ROWS), .COLS(COLS), .WIN(WIN), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_pes (
    .clk    (clk),
    .rst_n  (rst_n),
    .clear  (st_q == ST_IDLE && start && clear_acc),
    .in_win (row_win),
    .sel    (col_sel),
    .w      (col_w),
    .valid  (pe_valid),
    .acc_o  (acc_o)
  );

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q        <= ST_IDLE;
      blk_q       <= '0;
      last_blk_q  <= '0;
      ptr_q       <= '0;
      done        <= 1'b0;
      cycle_cnt_o <= '0;
      idle_cnt_o  <= '0;
    end else begin
      done <= 1'b0;
      unique case (st_q)
        ST_IDLE: if (start) begin
          st_q        <= ST_LOAD;
          blk_q       <= '0;
          last_blk_q  <= BLK_W'(num_blocks - 1'b1);
          ptr_q       <= '0;
          cycle_cnt_o <= '0;
          idle_cnt_o  <= '0;
        end
        ST_LOAD: st_q <= ST_RUN;
        ST_RUN: begin
          cycle_cnt_o <= cycle_cnt_o + 1;
          idle_cnt_o  <= idle_cnt_o + 32'($countones(~col_valid));
          for (int c = 0; c < COLS; c++) begin
            if (col_valid[c]) ptr_q[c] <= ptr_q[c] + 1'b1;
          end
          if (win_end) begin
            if (is_last) begin
              st_q <= ST_IDLE;
              done <= 1'b1;
            end else begin
              blk_q <= blk_q + 1'b1;
            end
          end
        end
        default: st_q <= ST_IDLE;
      endcase
    end
  end

  assign busy = (st_q != ST_IDLE);

  // ---------------------------------------------------------------- rules of use
  a_start_idle : assert property (@(posedge clk) disable iff (!rst_n)
                                  start |-> st_q == ST_IDLE);
  a_nb_range   : assert property (@(posedge clk) disable iff (!rst_n)
                                  start |-> (num_blocks >= 1 && 32'(num_blocks) <= MAX_BLOCKS));
  a_no_load_busy : assert property (@(posedge clk) disable iff (!rst_n)
                                    (wb_we || mb_we || ib_we) |-> st_q == ST_IDLE);

endmodule
