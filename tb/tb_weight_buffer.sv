// tb_weight_buffer: self-checking test of the packed-weight and bit-mask store.
//
// Fills both arrays with random contents at a reduced size, then reads every packed
// weight by pointer and every window mask by index and compares them with the
// values written. A second pass overwrites a random subset and checks again.
module tb_weight_buffer;
  localparam int unsigned DATA_W = 8, WIN = 8, MAX_BLOCKS = 16;
  localparam int unsigned DEPTH = MAX_BLOCKS * WIN;

  logic clk = 1'b0;
  logic w_we = 1'b0, m_we = 1'b0;
  logic [$clog2(DEPTH)-1:0] w_addr = '0, rd_ptr = '0;
  logic [DATA_W-1:0] w_data = '0, rd_w;
  logic [$clog2(MAX_BLOCKS)-1:0] m_addr = '0, rd_blk = '0;
  logic [WIN-1:0] m_data = '0, rd_mask;

  int checks = 0, failures = 0;
  logic [DATA_W-1:0] wref [DEPTH];
  logic [WIN-1:0]    mref [MAX_BLOCKS];

  weight_buffer #(.DATA_W(DATA_W), .WIN(WIN), .MAX_BLOCKS(MAX_BLOCKS)) dut (.*);

  always #5 clk = ~clk;

  task automatic write_all(input bit subset);
    for (int a = 0; a < DEPTH; a++) begin
      if (subset && $urandom % 2 == 0) continue;
      @(negedge clk);
      w_we = 1'b1; w_addr = $clog2(DEPTH)'(a); w_data = DATA_W'($urandom); wref[a] = w_data;
      m_we = a < MAX_BLOCKS; m_addr = $clog2(MAX_BLOCKS)'(a); m_data = WIN'($urandom);
      if (a < MAX_BLOCKS) mref[a] = m_data;
    end
    @(negedge clk); w_we = 1'b0; m_we = 1'b0;
  endtask

  task automatic read_all();
    for (int a = 0; a < DEPTH; a++) begin
      rd_ptr = $clog2(DEPTH)'(a); rd_blk = $clog2(MAX_BLOCKS)'(a % MAX_BLOCKS);
      #1;
      checks += 2;
      if (rd_w !== wref[a]) begin failures++; $display("FAIL w[%0d]=%h exp %h", a, rd_w, wref[a]); end
      if (rd_mask !== mref[a % MAX_BLOCKS]) begin
        failures++; $display("FAIL mask[%0d]=%b exp %b", a % MAX_BLOCKS, rd_mask, mref[a % MAX_BLOCKS]);
      end
    end
  endtask

  initial begin
    write_all(0);
    read_all();
    write_all(1);
    read_all();
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
