// tb_pe: self-checking test of one processing element.
//
// Drives random input windows, selects, weights, valid and clear, and keeps its own
// running sum of in_win[sel] * w (signed, 32-bit wrap) to compare with the
// accumulator after every cycle. Extreme values (-128 * -128) are included.
module tb_pe;
  localparam int unsigned WIN = 8, DATA_W = 8, ACC_W = 32;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, valid = 1'b0;
  logic signed [WIN-1:0][DATA_W-1:0] in_win = '0;
  logic [$clog2(WIN)-1:0] sel = '0;
  logic signed [DATA_W-1:0] w = '0;
  logic signed [ACC_W-1:0] acc_o;

  int checks = 0, failures = 0;
  int ref_acc = 0;

  pe #(.WIN(WIN), .DATA_W(DATA_W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < WIN; i++) in_win[i] = DATA_W'($urandom);
      sel   = $clog2(WIN)'($urandom);
      w     = DATA_W'($urandom);
      if (t % 97 == 5) begin in_win[sel] = -128; w = -128; end
      valid = ($urandom % 4) != 0;
      clear = ($urandom % 50) == 0;
      if (clear) ref_acc = 0;
      else if (valid) ref_acc += int'($signed(in_win[sel])) * int'(w);
      @(negedge clk);
      checks++;
      if (acc_o !== ref_acc) begin
        failures++;
        $display("FAIL t=%0d acc %0d exp %0d", t, acc_o, ref_acc);
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
