// tb_pe_array: self-checking test of the PE grid.
//
// Uses a 3 x 2 grid to show that the row inputs and column selects/weights reach the
// right PEs: each cycle random windows per row and random select, weight and valid
// per column are applied, and a reference sum per (row, column) is compared with
// every accumulator.
module tb_pe_array;
  localparam int unsigned ROWS = 3, COLS = 2, WIN = 8, DATA_W = 8, ACC_W = 32;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0;
  logic [ROWS-1:0][WIN-1:0][DATA_W-1:0] in_win = '0;
  logic [COLS-1:0][$clog2(WIN)-1:0] sel = '0;
  logic [COLS-1:0][DATA_W-1:0] w = '0;
  logic [COLS-1:0] valid = '0;
  logic [ROWS-1:0][COLS-1:0][ACC_W-1:0] acc_o;

  int checks = 0, failures = 0;
  int ref_acc [ROWS][COLS];

  pe_array #(.ROWS(ROWS), .COLS(COLS), .WIN(WIN), .DATA_W(DATA_W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    foreach (ref_acc[r, c]) ref_acc[r][c] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < 1000; t++) begin
      for (int r = 0; r < ROWS; r++)
        for (int i = 0; i < WIN; i++) in_win[r][i] = DATA_W'($urandom);
      for (int c = 0; c < COLS; c++) begin
        sel[c]   = $clog2(WIN)'($urandom);
        w[c]     = DATA_W'($urandom);
        valid[c] = $urandom % 3 != 0;
      end
      clear = ($urandom % 100) == 0;
      foreach (ref_acc[r, c]) begin
        if (clear) ref_acc[r][c] = 0;
        else if (valid[c])
          ref_acc[r][c] += int'($signed(in_win[r][sel[c]])) * int'($signed(w[c]));
      end
      @(negedge clk);
      foreach (ref_acc[r, c]) begin
        checks++;
        if ($signed(acc_o[r][c]) != ref_acc[r][c]) begin
          failures++;
          $display("FAIL t=%0d pe(%0d,%0d) acc %0d exp %0d", t, r, c,
                   $signed(acc_o[r][c]), ref_acc[r][c]);
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
