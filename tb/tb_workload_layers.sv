// tb_workload_layers: layer slices of VGG16 and ResNet50 run through the accelerator,
// with the host-side flow modelled in the testbench.
//
// For each layer shape the testbench builds a random input tile and eight random
// filters and then acts as the host software:
//   profiler        : per filter, a table of 9 magnitude thresholds, entry s being the
//                     magnitude below which s*10 % of the filter's weights lie;
//   rate generator  : a random sparsification rate (table entry) per filter;
//   bit masks       : weight kept if its magnitude exceeds the filter's threshold;
//   scheduler       : filters sorted by kept-weight count, cut into groups of COLS.
// It runs the noise-free pass (all weights kept) and one noisy pass, four output
// pixels at a time, splitting dot products longer than the buffers into several loads
// chained with clear_acc = 0. Every result is compared with a convolution computed
// directly from the input tile and the dense weights (dropped weights skipped), and
// the cycle counter with the window formula. The noisy-to-dense cycle ratio of each
// layer is printed.
//
// Layer shapes (kernel x kernel x input channels): VGG16 conv1_2 3x3x64 and conv5_3
// 3x3x512, ResNet50 conv2 3x3x64 and res5 1x1x2048, VGG16 fc6 7x7x512 = 25088 treated
// as a 1x1 layer over four images.
module tb_workload_layers;
  localparam int unsigned ROWS = dyscnn_pkg::ROWS;
  localparam int unsigned COLS = dyscnn_pkg::COLS;
  localparam int unsigned WIN = dyscnn_pkg::WIN;
  localparam int unsigned DATA_W = dyscnn_pkg::DATA_W;
  localparam int unsigned MAX_BLOCKS = dyscnn_pkg::MAX_BLOCKS;
  localparam int unsigned CHUNK = MAX_BLOCKS * WIN;
  localparam int unsigned POS_W = $clog2(CHUNK);
  localparam int unsigned BLK_W = $clog2(MAX_BLOCKS);
  localparam int unsigned NB_W = $clog2(MAX_BLOCKS + 1);
  localparam int unsigned NF = 8;     // filters per layer slice

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
  int n_chained = 0, n_groups = 0, n_layers = 0;

  // layer slice data
  int K, C, L, TW;          // kernel, channels, patch length, tile width
  int fmap[];               // input tile [K][TW][C], flattened
  int wt[NF][];             // dense filters [K][K][C], flattened in im2col order
  bit keep[NF][];           // bit masks
  int th_tab[NF][9];        // profiler output
  int order[NF];            // schedule order

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic int mag(input int v);
    return v < 0 ? -v : v;
  endfunction

  // im2col: position q of output pixel px -> input value
  function automatic int patch(input int px, input int q);
    int ky, kx, ci;
    ci = q % C;
    kx = (q / C) % K;
    ky = q / (C * K);
    return fmap[(ky * TW + px + kx) * C + ci];
  endfunction

  // direct convolution at output pixel px, filter f, over kept weights
  function automatic longint conv_ref(input int px, input int f);
    longint s = 0;
    for (int ky = 0; ky < K; ky++)
      for (int kx = 0; kx < K; kx++)
        for (int ci = 0; ci < C; ci++) begin
          int q = (ky * K + kx) * C + ci;
          if (keep[f][q]) s += longint'(fmap[(ky * TW + px + kx) * C + ci]) * longint'(wt[f][q]);
        end
    return s;
  endfunction

  // offline profiler: thresholds for rates 10 % .. 90 %
  task automatic profile(input int f);
    int hist[129];
    foreach (hist[i]) hist[i] = 0;
    for (int q = 0; q < L; q++) hist[mag(wt[f][q])]++;
    for (int s = 1; s <= 9; s++) begin
      int acc = 0, t = 0;
      while (t < 128 && acc + hist[t] < (L * s) / 10) begin acc += hist[t]; t++; end
      th_tab[f][s - 1] = t;   // dropping |w| <= t drops about s*10 %
    end
  endtask

  // Run one schedule group (filters order[g*COLS +: COLS]) over one row of pixels,
  // all chunks; returns compute cycles.
  task automatic run_group(input int g, input int px0, output int cyc);
    int nch = (L + CHUNK - 1) / CHUNK;
    cyc = 0;
    for (int ch = 0; ch < nch; ch++) begin
      int base = ch * CHUNK;
      int len = (L - base < CHUNK) ? L - base : CHUNK;
      int nb = (len + WIN - 1) / WIN;
      int exp_cyc = 0;
      // inputs
      for (int r = 0; r < ROWS; r++)
        for (int q = 0; q < nb * WIN; q++) begin
          @(negedge clk);
          ib_we = 1'b1; ib_row = $clog2(ROWS)'(r); ib_addr = POS_W'(q);
          ib_data = (q < len) ? DATA_W'(patch(px0 + r, base + q)) : '0;
        end
      @(negedge clk); ib_we = 1'b0;
      // packed weights and masks
      for (int c = 0; c < COLS; c++) begin
        int f = order[g * COLS + c];
        int k = 0;
        for (int q = 0; q < len; q++)
          if (keep[f][base + q]) begin
            @(negedge clk);
            wb_we = 1'b1; wb_col = $clog2(COLS)'(c); wb_addr = POS_W'(k); wb_data = DATA_W'(wt[f][base + q]);
            k++;
          end
        @(negedge clk); wb_we = 1'b0;
        for (int b = 0; b < nb; b++) begin
          @(negedge clk);
          mb_we = 1'b1; mb_col = $clog2(COLS)'(c); mb_blk = BLK_W'(b);
          for (int i = 0; i < WIN; i++) mb_mask[i] = (b * WIN + i < len) ? keep[f][base + b * WIN + i] : 1'b0;
        end
        @(negedge clk); mb_we = 1'b0;
      end
      for (int b = 0; b < nb; b++) begin
        int mx = 1;
        for (int c = 0; c < COLS; c++) begin
          int f = order[g * COLS + c], n = 0;
          for (int i = 0; i < WIN; i++)
            if (b * WIN + i < len) n += keep[f][base + b * WIN + i];
          if (n > mx) mx = n;
        end
        exp_cyc += mx;
      end
      @(negedge clk);
      start = 1'b1; clear_acc = (ch == 0); num_blocks = NB_W'(nb);
      if (ch > 0) n_chained++;
      @(negedge clk); start = 1'b0;
      while (!done) @(negedge clk);
      check(cycle_cnt_o == exp_cyc, $sformatf("group %0d chunk %0d: %0d cycles, exp %0d", g, ch, cycle_cnt_o, exp_cyc));
      cyc += cycle_cnt_o;
    end
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        longint e = conv_ref(px0 + r, order[g * COLS + c]);
        check($signed(acc_o[r][c]) == 32'(e),
              $sformatf("pixel %0d filter %0d: %0d exp %0d", px0 + r, order[g * COLS + c], $signed(acc_o[r][c]), 32'(e)));
      end
    n_groups++;
  endtask

  task automatic layer(input string name, input int k, input int c);
    int dense_cyc = 0, noisy_cyc = 0, cyc, cnt[NF];
    K = k; C = c; L = K * K * C; TW = ROWS + K - 1;
    fmap = new[K * TW * C];
    foreach (fmap[i]) fmap[i] = int'($signed(DATA_W'($urandom)));
    for (int f = 0; f < NF; f++) begin
      wt[f] = new[L];
      keep[f] = new[L];
      foreach (wt[f][q]) wt[f][q] = int'($signed(DATA_W'($urandom))) / (1 + int'($urandom % 3));
      profile(f);
      order[f] = f;
    end
    // noise-free reference pass
    for (int f = 0; f < NF; f++) foreach (keep[f][q]) keep[f][q] = 1'b1;
    for (int g = 0; g < NF / COLS; g++) begin run_group(g, 0, cyc); dense_cyc += cyc; end
    // dense: one cycle per position (all patch lengths here are multiples of WIN)
    check(dense_cyc == (NF / COLS) * L, $sformatf("%s dense cycles %0d, exp %0d", name, dense_cyc, (NF / COLS) * L));
    // noisy pass: random rate per filter, threshold from the table, masks, sort
    for (int f = 0; f < NF; f++) begin
      int th = th_tab[f][$urandom % 9];
      cnt[f] = 0;
      foreach (keep[f][q]) begin keep[f][q] = mag(wt[f][q]) > th; cnt[f] += keep[f][q]; end
    end
    for (int i = 0; i < NF; i++)
      for (int j = i + 1; j < NF; j++)
        if (cnt[order[j]] > cnt[order[i]]) begin int t = order[i]; order[i] = order[j]; order[j] = t; end
    for (int g = 0; g < NF / COLS; g++) begin run_group(g, 0, cyc); noisy_cyc += cyc; end
    check(noisy_cyc <= dense_cyc, $sformatf("%s noisy slower than dense", name));
    $display("%s: patch %0d, dense %0d cycles, noisy %0d cycles; reference + one noisy pass = %0d.%02d x reference",
             name, L, dense_cyc, noisy_cyc, (dense_cyc + noisy_cyc) / dense_cyc,
             (100 * (dense_cyc + noisy_cyc) / dense_cyc) % 100);
    n_layers++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    layer("VGG16 conv1_2 3x3x64", 3, 64);
    layer("VGG16 conv5_3 3x3x512", 3, 512);
    layer("ResNet50 conv2 3x3x64", 3, 64);
    layer("ResNet50 res5 1x1x2048", 1, 2048);
    layer("VGG16 fc6 25088", 1, 25088);
    check(n_layers == 5, "not all layers ran");
    check(n_chained > 0, "no chained accumulation over buffer loads");
    $display("layers=%0d groups=%0d chained_loads=%0d", n_layers, n_groups, n_chained);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
