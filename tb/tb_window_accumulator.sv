// tb_window_accumulator: self-checking test of the 3x3 neighbourhood sum.
// Feeds many random nine-pixel windows (including all-255 for the widest
// sum), starting each with clr, and compares the sum with a sum computed in
// the testbench; also checks gaps in en, clr alone and reset.
module tb_window_accumulator;
  logic clk = 1'b0, rst_n = 1'b0;
  logic clr, en;
  logic [7:0] pix;
  logic [11:0] sum;
  int checks = 0, failures = 0;

  window_accumulator #(.PIX_W(8), .TAPS(9)) dut (.clk, .rst_n, .clr, .en, .pix, .sum);

  always #5 clk = ~clk;

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp;
    clr = 0; en = 0; pix = 0;
    repeat (2) @(negedge clk);
    check(int'(sum), 0, "reset");
    rst_n = 1;
    for (int w = 0; w < 300; w++) begin
      exp = 0;
      for (int t = 0; t < 9; t++) begin
        clr = (t == 0);
        en  = 1'b1;
        pix = (w == 0) ? 8'd255 : 8'($urandom);
        exp += int'(pix);
        @(negedge clk);
        // random idle cycle inside the window
        if (($urandom % 4) == 0) begin
          clr = 0; en = 0; pix = 8'($urandom);
          @(negedge clk);
        end
      end
      clr = 0; en = 0;
      check(int'(sum), exp, $sformatf("window %0d", w));
    end
    // clr alone clears
    clr = 1; en = 0;
    @(negedge clk);
    clr = 0;
    check(int'(sum), 0, "clear only");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
