// tb_tuning_controller: self-checking test of the tuning sequencer.
// The controller is connected to the real neighbourhood accumulators and
// blend unit, while I1, I2 and I3 are plain testbench arrays with a
// one-cycle read, so every address it issues is used exactly as a memory
// would.  A 9 x 7 image is tuned twice (threshold 20, then 255 which rejects
// every pixel); I3 is compared with the reference model, and the run length
// with NPIX + 3 per rejected pixel + 23 per blended pixel + 1.
module tb_tuning_controller;
  import tune_ref_pkg::*;
  localparam int W = 9, H = 7, N = W * H, AW = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done;
  logic [7:0] threshold;
  logic [AW-1:0] src_addr, out_addr;
  logic [7:0] face_rdata, comp_rdata, center_face, center_comp, blend_result, out_wdata;
  logic acc_clr, acc_en, blend_start, blend_done, blend_busy, out_we;
  logic [11:0] fi, ci;
  logic [7:0] mem_face [N], mem_comp [N], mem_res [N];
  int face[], comp[], res[];
  int checks = 0, failures = 0;

  tuning_controller #(.WIDTH(W), .HEIGHT(H)) dut (
    .clk, .rst_n, .start, .threshold, .busy, .done,
    .src_addr, .face_rdata, .comp_rdata, .acc_clr, .acc_en,
    .blend_start, .center_face, .center_comp, .blend_done, .blend_result,
    .out_we, .out_addr, .out_wdata);
  window_accumulator u_fi (.clk, .rst_n, .clr(acc_clr), .en(acc_en), .pix(face_rdata), .sum(fi));
  window_accumulator u_ci (.clk, .rst_n, .clr(acc_clr), .en(acc_en), .pix(comp_rdata), .sum(ci));
  intensity_blend u_blend (.clk, .rst_n, .start(blend_start), .fi, .ci,
    .face_pix(center_face), .comp_pix(center_comp),
    .busy(blend_busy), .done(blend_done), .result(blend_result));

  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    face_rdata <= mem_face[src_addr];
    comp_rdata <= mem_comp[src_addr];
    if (out_we) mem_res[out_addr] <= out_wdata;
  end

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int t);
    int nblend, nskip, cycles, starts;
    tune_ref(W, H, t, face, comp, res, nblend, nskip);
    for (int a = 0; a < N; a++) mem_res[a] = 8'hee;
    threshold = 8'(t);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cycles = 0;
    starts = 0;
    while (!done && cycles < 50000) begin
      if (blend_start) starts++;
      @(negedge clk);
      cycles++;
    end
    check(int'(busy), 0, "idle with done");
    check(starts, nblend, $sformatf("blends at T=%0d", t));
    check(cycles, N + 3 * nskip + 23 * nblend + 1, $sformatf("run cycles at T=%0d", t));
    for (int a = 0; a < N; a++)
      check(int'(mem_res[a]), res[a], $sformatf("T=%0d pixel %0d", t, a));
    $display("T=%0d: %0d blended, %0d rejected, %0d cycles", t, nblend, nskip, cycles);
  endtask

  initial begin
    start = 0; threshold = 0;
    make_images(W, H, face, comp);
    for (int a = 0; a < N; a++) begin
      mem_face[a] = 8'(face[a]);
      mem_comp[a] = 8'(comp[a]);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(20);
    run(255);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
