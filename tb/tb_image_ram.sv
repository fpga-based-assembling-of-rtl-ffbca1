// tb_image_ram: self-checking test of the image frame memory.
// Fills every word with a pseudo-random pattern, reads all of it back in a
// different order and checks the one-cycle read latency, read-before-write
// on a simultaneous access, and that an address past the image neither
// writes nor reads stored data.
module tb_image_ram;
  localparam int unsigned DEPTH  = 23 * 28;
  localparam int unsigned ADDR_W = $clog2(DEPTH);

  logic clk = 1'b0;
  logic we;
  logic [ADDR_W-1:0] addr;
  logic [7:0] wdata, rdata;
  logic [7:0] model [DEPTH];
  int checks = 0, failures = 0;

  image_ram #(.DATA_W(8), .DEPTH(DEPTH)) dut (.clk, .we, .addr, .wdata, .rdata);

  always #5 clk = ~clk;

  function automatic logic [7:0] pattern(int unsigned a, int unsigned k);
    return 8'((a * 37 + k * 11 + (a >> 3)) ^ 8'h5a);
  endfunction

  task automatic check(logic [7:0] got, logic [7:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 1'b0; addr = '0; wdata = '0;
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      we = 1'b1; addr = ADDR_W'(a); wdata = pattern(a, 1); model[a] = wdata;
      @(negedge clk);
    end
    we = 1'b0;
    // read back, descending, one cycle latency
    for (int a = DEPTH - 1; a >= 0; a--) begin
      addr = ADDR_W'(a);
      @(negedge clk);
      check(rdata, model[a], $sformatf("read addr %0d", a));
    end
    // simultaneous write and read of one word returns the old word
    addr = ADDR_W'(100); we = 1'b1; wdata = 8'hc3;
    @(negedge clk);
    check(rdata, model[100], "read-before-write");
    we = 1'b0; model[100] = 8'hc3;
    @(negedge clk);
    check(rdata, 8'hc3, "write then read");
    // out-of-range address: write ignored, read gives 0
    addr = ADDR_W'(DEPTH + 3); we = 1'b1; wdata = 8'h77;
    @(negedge clk);
    we = 1'b0;
    @(negedge clk);
    check(rdata, 8'h00, "out-of-range read");
    for (int a = 0; a < DEPTH; a += 61) begin
      addr = ADDR_W'(a);
      @(negedge clk);
      check(rdata, model[a], $sformatf("after out-of-range write, addr %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
