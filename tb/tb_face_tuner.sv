// tb_face_tuner: end-to-end test of the tuning engine at its default size
// (23 x 28 pixels, no parameter overrides).
// The host side loads a generated blank face and component image through
// the load port, starts a run with T = 20, waits for done and reads the
// whole tuned image back; the result is compared pixel by pixel with the
// reference model, and the run length with the cycle formula.  A second run
// with T = 255 must leave the face unchanged.  During the first run the
// testbench also tries to overwrite the face memory, which must be ignored.
// It counts how often each mechanism happened (copy, threshold rejection,
// blend, border pixel above T kept, host write ignored while busy) and
// fails any that never happened.
module tb_face_tuner;
  import tune_ref_pkg::*;
  import tuner_pkg::*;
  localparam int W = IMG_WIDTH, H = IMG_HEIGHT, N = W * H, AW = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0] threshold, load_data, rd_data;
  logic load_we, load_sel, start, busy, done;
  logic [AW-1:0] load_addr, rd_addr;
  int face[], comp[], res[];
  int checks = 0, failures = 0;
  int n_copy = 0, n_reject = 0, n_blend = 0, n_border_kept = 0, n_ignored = 0;

  face_tuner dut (
    .clk, .rst_n, .threshold, .load_we, .load_sel, .load_addr, .load_data,
    .start, .busy, .done, .rd_addr, .rd_data);

  always #5 clk = ~clk;

  // mechanism counters, observed inside the engine
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.copy_vld) n_copy++;
    if (dut.blend_start) n_blend++;
    if (dut.u_ctrl.state == ST_TEST && !(dut.comp_rdata > threshold)) n_reject++;
    if (busy && load_we) n_ignored++;
  end

  task automatic check(int got, int exp, string what);
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

  task automatic load(int sel, ref int img[]);
    for (int a = 0; a < N; a++) begin
      load_we = 1'b1; load_sel = sel[0]; load_addr = AW'(a); load_data = 8'(img[a]);
      @(negedge clk);
    end
    load_we = 1'b0;
  endtask

  task automatic run(int t, bit disturb);
    int nblend, nskip, cycles, blends0, rejects0;
    tune_ref(W, H, t, face, comp, res, nblend, nskip);
    blends0 = n_blend;
    rejects0 = n_reject;
    threshold = 8'(t);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cycles = 0;
    while (!done && cycles < 100000) begin
      // host write while busy: must not reach the face memory
      load_we = disturb && (cycles % 50 == 7);
      load_sel = 1'b0; load_addr = AW'(cycles % N); load_data = 8'hff;
      @(negedge clk);
      cycles++;
    end
    load_we = 1'b0;
    check(n_blend - blends0, nblend, $sformatf("blends at T=%0d", t));
    check(n_reject - rejects0, nskip, $sformatf("rejections at T=%0d", t));
    check(cycles, N + 3 * nskip + 23 * nblend + 1, $sformatf("run cycles at T=%0d", t));
    for (int a = 0; a < N; a++) begin
      rd_addr = AW'(a);
      @(negedge clk);
      check(int'(rd_data), res[a], $sformatf("T=%0d pixel (%0d,%0d)", t, a / W, a % W));
      if (t == 20 && comp[a] > t && (a / W == 0 || a / W == H - 1 || a % W == 0 || a % W == W - 1)
          && rd_data == 8'(face[a]))
        n_border_kept++;
    end
    $display("T=%0d: %0d blended, %0d rejected, %0d cycles", t, nblend, nskip, cycles);
  endtask

  initial begin
    start = 0; threshold = 0; load_we = 0; load_sel = 0; load_addr = '0;
    load_data = '0; rd_addr = '0;
    make_images(W, H, face, comp);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    load(0, face);
    load(1, comp);
    run(20, 1'b1);
    run(255, 1'b0);
    check(n_copy, 2 * N, "pixels copied");
    if (n_copy == 0 || n_reject == 0 || n_blend == 0 || n_border_kept == 0 || n_ignored == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    checks++;
    $display("mechanisms: copy=%0d reject=%0d blend=%0d border_kept=%0d host_write_ignored=%0d",
             n_copy, n_reject, n_blend, n_border_kept, n_ignored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
