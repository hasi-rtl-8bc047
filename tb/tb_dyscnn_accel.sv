// tb_dyscnn_accel: end-to-end test of the DySCNN accelerator at its default size.
//
// The testbench plays the host-side scheduler. For every filter it draws a random
// sparsification threshold, builds the bit mask with the rule "keep weight w if
// |w| > threshold", loads only the kept weights (packed) and the masks, loads random
// input rows, starts the accelerator and compares every accumulator with a dot
// product it computes itself over the kept weights. It also predicts the run time,
// sum over windows of max(1, largest active count in the window), and the idle
// column-cycles, and checks both counters and the start-to-done latency.
//
// Scenarios: the noise-free reference pass (all weights kept, one cycle per
// position), noisy passes with random rates, a schedule group sorted by active count
// against an unsorted one, an all-dropped window, continued accumulation without
// clearing, and one pass over the longest vector the default buffers hold (576
// windows = 4608 positions). Each mechanism is counted and must occur at least once.
module tb_dyscnn_accel;
  localparam int unsigned ROWS = dyscnn_pkg::ROWS;
  localparam int unsigned COLS = dyscnn_pkg::COLS;
  localparam int unsigned WIN = dyscnn_pkg::WIN;
  localparam int unsigned DATA_W = dyscnn_pkg::DATA_W;
  localparam int unsigned MAX_BLOCKS = dyscnn_pkg::MAX_BLOCKS;
  localparam int unsigned N = MAX_BLOCKS * WIN;
  localparam int unsigned POS_W = $clog2(N);
  localparam int unsigned BLK_W = $clog2(MAX_BLOCKS);
  localparam int unsigned NB_W = $clog2(MAX_BLOCKS + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  logic wb_we = 1'b0, mb_we = 1'b0, ib_we = 1'b0;
  logic [$clog2(COLS)-1:0] wb_col = '0, mb_col = '0;
  logic [$clog2(ROWS)-1:0] ib_row = '0;
  logic [POS_W-1:0] wb_addr = '0, ib_addr = '0;
  logic [DATA_W-1:0] wb_data = '0, ib_data = '0;
  logic [BLK_W-1:0] mb_blk = '0;
  logic [WIN-1:0] mb_mask = '0;
  logic start = 1'b0, clear_acc = 1'b0;
  logic [NB_W-1:0] num_blocks = '0;
  logic busy, done;
  logic [ROWS-1:0][COLS-1:0][31:0] acc_o;
  logic [31:0] cycle_cnt_o, idle_cnt_o;

  dyscnn_accel dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // host-side copies
  int  x    [ROWS][N];      // inputs
  int  wt   [COLS][N];      // dense weights
  bit  keep [COLS][N];      // bit masks
  longint ref_acc [ROWS][COLS];
  // mechanism counters
  int n_dense = 0, n_sparse = 0, n_idle = 0, n_skip = 0, n_empty = 0, n_accum = 0,
      n_full = 0, n_sorted_win = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic load_inputs(input int nb);
    for (int r = 0; r < ROWS; r++)
      for (int p = 0; p < nb * WIN; p++) begin
        x[r][p] = int'($signed(DATA_W'($urandom)));
        @(negedge clk);
        ib_we = 1'b1; ib_row = $clog2(ROWS)'(r); ib_addr = POS_W'(p); ib_data = DATA_W'(x[r][p]);
      end
    @(negedge clk); ib_we = 1'b0;
  endtask

  // Random dense weights for filter c.
  task automatic make_weights(input int c, input int nb);
    for (int p = 0; p < nb * WIN; p++) wt[c][p] = int'($signed(DATA_W'($urandom)));
  endtask

  // Bit-mask rule: keep if |w| > th (th < 0 keeps everything).
  task automatic make_mask(input int c, input int nb, input int th);
    for (int p = 0; p < nb * WIN; p++) keep[c][p] = (wt[c][p] < 0 ? -wt[c][p] : wt[c][p]) > th;
  endtask

  // Load the packed kept weights and the masks of filter c into column c.
  task automatic load_filter(input int c, input int nb);
    int k = 0;
    for (int p = 0; p < nb * WIN; p++)
      if (keep[c][p]) begin
        @(negedge clk);
        wb_we = 1'b1; wb_col = $clog2(COLS)'(c); wb_addr = POS_W'(k); wb_data = DATA_W'(wt[c][p]);
        k++;
      end
    @(negedge clk); wb_we = 1'b0;
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      mb_we = 1'b1; mb_col = $clog2(COLS)'(c); mb_blk = BLK_W'(b);
      for (int i = 0; i < WIN; i++) mb_mask[i] = keep[c][b * WIN + i];
    end
    @(negedge clk); mb_we = 1'b0;
  endtask

  // Run nb windows and check results, cycle count, idle count and latency.
  task automatic run(input int nb, input bit clr, input string tag);
    int exp_cyc = 0, exp_idle = 0, lat = 0;
    int any_skip = 0;
    for (int b = 0; b < nb; b++) begin
      int mx = 0, cnt[COLS];
      for (int c = 0; c < COLS; c++) begin
        cnt[c] = 0;
        for (int i = 0; i < WIN; i++) cnt[c] += keep[c][b * WIN + i];
        if (cnt[c] > mx) mx = cnt[c];
        if (cnt[c] > 0 && cnt[c] < WIN) any_skip++;
      end
      if (mx == 0) begin n_empty++; mx = 1; end
      exp_cyc += mx;
      for (int c = 0; c < COLS; c++) exp_idle += mx - cnt[c];
    end
    if (any_skip > 0) n_skip++;
    if (exp_idle > 0) n_idle++;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        if (clr) ref_acc[r][c] = 0;
        for (int p = 0; p < nb * WIN; p++)
          if (keep[c][p]) ref_acc[r][c] += longint'(x[r][p]) * longint'(wt[c][p]);
      end
    @(negedge clk);
    start = 1'b1; clear_acc = clr; num_blocks = NB_W'(nb);
    @(negedge clk);
    start = 1'b0;
    lat = 0;  // clock edges after the one that took start
    while (!done) begin
      @(negedge clk);
      lat++;
    end
    check(cycle_cnt_o == exp_cyc, $sformatf("%s: %0d cycles, exp %0d", tag, cycle_cnt_o, exp_cyc));
    check(idle_cnt_o == exp_idle, $sformatf("%s: %0d idle, exp %0d", tag, idle_cnt_o, exp_idle));
    check(lat == exp_cyc + 1, $sformatf("%s: latency %0d, exp %0d", tag, lat, exp_cyc + 1));
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        check($signed(acc_o[r][c]) == 32'(ref_acc[r][c]),
              $sformatf("%s: acc[%0d][%0d]=%0d exp %0d", tag, r, c, $signed(acc_o[r][c]),
                        32'(ref_acc[r][c])));
    @(negedge clk);
    check(!busy, $sformatf("%s: busy after done", tag));
    $display("%s: %0d windows, %0d cycles (dense %0d), %0d idle column-cycles",
             tag, nb, exp_cyc, nb * WIN, exp_idle);
  endtask

  initial begin
    int nb, th[8], cnt[8], order[8], cyc_sorted, cyc_unsorted;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1. noise-free reference pass: every weight kept
    nb = 24;
    load_inputs(nb);
    for (int c = 0; c < COLS; c++) begin make_weights(c, nb); make_mask(c, nb, -1); load_filter(c, nb); end
    run(nb, 1'b1, "dense reference pass");
    check(cycle_cnt_o == nb * WIN, "dense pass must take one cycle per position");
    n_dense++;

    // 2. noisy passes: random threshold per filter
    for (int t = 0; t < 4; t++) begin
      for (int c = 0; c < COLS; c++) begin
        make_mask(c, nb, int'($urandom % 128));
        load_filter(c, nb);
      end
      run(nb, 1'b1, $sformatf("noisy pass %0d", t));
      check(cycle_cnt_o <= nb * WIN, "sparse pass may not be slower than dense");
      n_sparse++;
    end

    // 3. continued accumulation and an all-dropped window
    for (int c = 0; c < COLS; c++) begin
      make_mask(c, nb, 40);
      for (int i = 0; i < WIN; i++) keep[c][3 * WIN + i] = 1'b0;
      load_filter(c, nb);
    end
    run(nb, 1'b0, "accumulate without clear");
    n_accum++;

    // 4. schedule groups: 8 filters, thresholds spread, grouped sorted vs interleaved
    nb = 32;
    load_inputs(nb);
    cyc_sorted = 0; cyc_unsorted = 0;
    for (int g = 0; g < 2; g++) begin : grouping
      // filter f of the 8 gets threshold 16*f; sorted grouping = {0..3},{4..7},
      // interleaved = {0,2,4,6},{1,3,5,7}
      for (int s = 0; s < 2; s++) begin
        for (int c = 0; c < COLS; c++) begin
          int f;
          f = (g == 0) ? s * COLS + c : 2 * c + s;
          make_weights(c, nb);
          make_mask(c, nb, 16 * f);
          load_filter(c, nb);
        end
        run(nb, 1'b1, $sformatf("%s group %0d", g == 0 ? "sorted" : "interleaved", s));
        if (g == 0) cyc_sorted += cycle_cnt_o; else cyc_unsorted += cycle_cnt_o;
      end
    end
    $display("schedule groups: sorted %0d cycles, interleaved %0d cycles", cyc_sorted, cyc_unsorted);
    if (cyc_sorted < cyc_unsorted) n_sorted_win++;

    // 5. the longest vector the buffers hold
    nb = MAX_BLOCKS;
    load_inputs(nb);
    for (int c = 0; c < COLS; c++) begin
      make_weights(c, nb);
      make_mask(c, nb, 20 + 20 * c);
      load_filter(c, nb);
    end
    run(nb, 1'b1, "full-length noisy pass");
    n_full++;

    $display("mechanisms: dense=%0d sparse=%0d idle=%0d lookahead_skip=%0d empty_window=%0d accumulate=%0d full_length=%0d sorted_faster=%0d",
             n_dense, n_sparse, n_idle, n_skip, n_empty, n_accum, n_full, n_sorted_win);
    check(n_dense > 0, "no dense pass");
    check(n_sparse > 0, "no sparse pass");
    check(n_idle > 0, "no idle column-cycles");
    check(n_skip > 0, "no look-ahead skip over dropped weights");
    check(n_empty > 0, "no all-dropped window");
    check(n_accum > 0, "no continued accumulation");
    check(n_full > 0, "no full-length pass");
    check(n_sorted_win > 0, "sorted grouping not faster");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
