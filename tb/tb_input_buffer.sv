// tb_input_buffer: self-checking test of the dense input store.
//
// Writes one random value per position, one per cycle, at a reduced size, then reads
// every window and checks that slot i of window b holds position b*WIN + i.
module tb_input_buffer;
  localparam int unsigned DATA_W = 8, WIN = 8, MAX_BLOCKS = 12;
  localparam int unsigned N = MAX_BLOCKS * WIN;

  logic clk = 1'b0, we = 1'b0;
  logic [$clog2(N)-1:0] addr = '0;
  logic [DATA_W-1:0] data = '0;
  logic [$clog2(MAX_BLOCKS)-1:0] rd_blk = '0;
  logic [WIN-1:0][DATA_W-1:0] rd_win;

  int checks = 0, failures = 0;
  logic [DATA_W-1:0] vref [N];

  input_buffer #(.DATA_W(DATA_W), .WIN(WIN), .MAX_BLOCKS(MAX_BLOCKS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    for (int pass = 0; pass < 2; pass++) begin
      for (int p = 0; p < N; p++) begin
        @(negedge clk);
        we = 1'b1; addr = $clog2(N)'(p); data = DATA_W'($urandom); vref[p] = data;
      end
      @(negedge clk); we = 1'b0;
      for (int b = 0; b < MAX_BLOCKS; b++) begin
        rd_blk = $clog2(MAX_BLOCKS)'(b);
        #1;
        for (int i = 0; i < WIN; i++) begin
          checks++;
          if (rd_win[i] !== vref[b * WIN + i]) begin
            failures++;
            $display("FAIL window %0d slot %0d = %h exp %h", b, i, rd_win[i], vref[b * WIN + i]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
