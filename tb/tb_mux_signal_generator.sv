// tb_mux_signal_generator: self-checking test of the bit-mask to mux-select unit.
//
// Loads random WIN-bit window masks (plus the all-zero and all-one corner cases) and
// walks them one consumed weight per cycle, checking against a reference that lists
// the set bit positions in ascending order: valid must be high exactly while
// positions remain, sel must name the next one, last must rise on the final one, and
// a window must take exactly popcount(mask) cycles. Also checks that a load in the
// same cycle as an advance replaces the remaining mask.
module tb_mux_signal_generator;
  localparam int unsigned WIN = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic load = 1'b0, advance = 1'b0;
  logic [WIN-1:0] mask_i = '0;
  logic valid_o, last_o;
  logic [$clog2(WIN)-1:0] sel_o;

  int checks = 0, failures = 0;

  mux_signal_generator #(.WIN(WIN)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // Walk one window: load m, then consume every active weight.
  task automatic walk(input logic [WIN-1:0] m);
    int pos[$];
    int cyc;
    for (int i = 0; i < WIN; i++) if (m[i]) pos.push_back(i);
    @(negedge clk); load = 1'b1; mask_i = m; advance = 1'b0;
    @(negedge clk); load = 1'b0;
    cyc = 0;
    if (pos.size() == 0) begin
      check(!valid_o && last_o, $sformatf("empty mask %b: valid=%0b last=%0b", m, valid_o, last_o));
    end
    foreach (pos[k]) begin
      check(valid_o, $sformatf("mask %b step %0d: valid low", m, k));
      check(int'(sel_o) == pos[k], $sformatf("mask %b step %0d: sel %0d exp %0d", m, k, sel_o, pos[k]));
      check(last_o == (k == pos.size() - 1), $sformatf("mask %b step %0d: last %0b", m, k, last_o));
      advance = 1'b1;
      @(negedge clk);
      advance = 1'b0;
      cyc++;
    end
    check(!valid_o, $sformatf("mask %b: valid still high after all weights", m));
    check(cyc == $countones(m), $sformatf("mask %b: %0d cycles, exp %0d", m, cyc, $countones(m)));
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    walk('0);
    walk('1);
    walk(8'b1000_0000);
    walk(8'b0000_0001);
    walk(8'b1010_0110);
    for (int t = 0; t < 300; t++) walk(WIN'($urandom));
    // load has priority over advance
    @(negedge clk); load = 1'b1; mask_i = 8'b0000_0111;
    @(negedge clk); load = 1'b1; advance = 1'b1; mask_i = 8'b1100_0000;
    @(negedge clk); load = 1'b0; advance = 1'b0;
    check(sel_o == 6 && valid_o && !last_o, $sformatf("load over advance: sel %0d", sel_o));
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
