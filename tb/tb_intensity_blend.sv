// tb_intensity_blend: self-checking test of the intensity-adjustment unit.
// For random and corner operands it compares the result with
//   floor((I3*CI + 2*FI*I2) / (CI + 2*FI))
// computed in the testbench, cross-checks that value against the real-valued
// form (I3 + 2*IF*I2)/(1 + 2*IF) with IF = FI/CI, and checks that done comes
// exactly 9 cycles after start and that start is ignored while busy.
module tb_intensity_blend;
  localparam int LATENCY = 9;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done;
  logic [11:0] fi, ci;
  logic [7:0] face_pix, comp_pix, result;
  int checks = 0, failures = 0;

  intensity_blend #(.PIX_W(8), .SUM_W(12)) dut (
    .clk, .rst_n, .start, .fi, .ci, .face_pix, .comp_pix, .busy, .done, .result);

  always #5 clk = ~clk;

  task automatic check(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one(int f, int c, int a, int b);
    longint num, den, exp;
    real ifac, r;
    int cycles;
    num = longint'(a) * c + 2 * longint'(f) * b;
    den = longint'(c) + 2 * f;
    exp = num / den;
    ifac = real'(f) / real'(c);
    r = (real'(a) + 2.0 * ifac * real'(b)) / (1.0 + 2.0 * ifac);
    // the exact integer form agrees with the paper's real-valued form
    checks++;
    if (!(r >= real'(exp) - 1e-6 && r < real'(exp) + 1.0 + 1e-6)) begin
      failures++;
      $display("FAIL reference mismatch f=%0d c=%0d a=%0d b=%0d", f, c, a, b);
    end
    fi = 12'(f); ci = 12'(c); face_pix = 8'(a); comp_pix = 8'(b);
    start = 1'b1;
    @(negedge clk);
    start = 1'b1;            // held high: must be ignored while busy
    fi = 12'($urandom); ci = 12'($urandom);
    face_pix = 8'($urandom); comp_pix = 8'($urandom);
    cycles = 1;
    while (!done && cycles < 40) begin
      @(negedge clk);
      cycles++;
    end
    start = 1'b0;
    check(longint'(cycles), longint'(LATENCY), "latency");
    check(longint'(result), exp, $sformatf("result f=%0d c=%0d a=%0d b=%0d", f, c, a, b));
    @(negedge clk);
    check(longint'(result), exp, "result held after done");
    check(longint'(busy), 0, "idle after done");
  endtask

  initial begin
    start = 0; fi = 0; ci = 1; face_pix = 0; comp_pix = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_one(2295, 2295, 255, 255);
    run_one(2295, 1, 0, 255);
    run_one(0, 2295, 255, 0);
    run_one(2295, 2295, 0, 255);
    run_one(1, 2295, 255, 1);
    run_one(900, 300, 100, 200);
    for (int k = 0; k < 400; k++)
      run_one($urandom % 2296, 1 + $urandom % 2295, $urandom % 256, $urandom % 256);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
