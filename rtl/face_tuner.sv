// face_tuner: tuning-phase engine for face construction from components.
//
// A new face is built by placing separately stored facial components (eyes,
// eyebrows, nose, lips) onto a blank face.  Pasted as they are, their
// background intensity does not match the face and stitching lines show.
// This engine removes them: for every pixel covered by a component it
// replaces the face intensity with a weighted mean of face and component
// intensity, the weight following the ratio of the 3x3 neighbourhood sums of
// face and component around that pixel.
//
// Structure: three image_ram frames (I1 blank face, I2 placed components on
// a black background, I3 result), a tuning_controller that sequences the
// algorithm, two window_accumulators (FI over I1, CI over I2) and one
// intensity_blend.  I1 and I2 share one read address.
//
// Host interface (this design's own; the source moves images through files):
//   load_we/load_sel/load_addr/load_data  write a pixel of I1 (sel=0) or I2
//                                         (sel=1), row-major address.
//   threshold                             T; component pixels are those of
//                                         I2 above T.  Hold stable while busy.
//   start -> busy ... done                one tuning run.
//   rd_addr -> rd_data                    read I3, one cycle latency.
// Host writes and reads are ignored while busy.  Image size WIDTH x HEIGHT,
// 23 x 28 by default, the reduced size used for the hardware.
module face_tuner
  import tuner_pkg::*;
#(
  parameter int unsigned WIDTH  = tuner_pkg::IMG_WIDTH,
  parameter int unsigned HEIGHT = tuner_pkg::IMG_HEIGHT,
  parameter int unsigned NPIX   = WIDTH * HEIGHT,
  parameter int unsigned ADDR_W = $clog2(NPIX)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  pixel_t            threshold,
  input  logic              load_we,
  input  logic              load_sel,
  input  logic [ADDR_W-1:0] load_addr,
  input  pixel_t            load_data,
  input  logic              start,
  output logic              busy,
  output logic              done,
  input  logic [ADDR_W-1:0] rd_addr,
  output pixel_t            rd_data
);

  logic [ADDR_W-1:0] src_addr, out_addr, face_addr, comp_addr, res_addr;
  pixel_t            face_rdata, comp_rdata, out_wdata, blend_result;
  pixel_t            center_face, center_comp;
  logic              out_we, face_we, comp_we, res_we;
  logic              acc_clr, acc_en, blend_start, blend_done, blend_busy;
  nsum_t             fi, ci;

  // Memory ports: host while idle, engine while busy.
  assign face_we   = !busy && load_we && !load_sel;
  assign comp_we   = !busy && load_we &&  load_sel;
  assign face_addr = busy ? src_addr : load_addr;
  assign comp_addr = busy ? src_addr : load_addr;
  assign res_we    = busy && out_we;
  assign res_addr  = busy ? out_addr : rd_addr;

  image_ram #(.DATA_W(PIX_W), .DEPTH(NPIX), .ADDR_W(ADDR_W)) u_face (
    .clk, .we(face_we), .addr(face_addr), .wdata(load_data), .rdata(face_rdata));

  image_ram #(.DATA_W(PIX_W), .DEPTH(NPIX), .ADDR_W(ADDR_W)) u_comp (
    .clk, .we(comp_we), .addr(comp_addr), .wdata(load_data), .rdata(comp_rdata));

  image_ram #(.DATA_W(PIX_W), .DEPTH(NPIX), .ADDR_W(ADDR_W)) u_result (
    .clk, .we(res_we), .addr(res_addr), .wdata(out_wdata), .rdata(rd_data));

  tuning_controller #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .NPIX(NPIX), .ADDR_W(ADDR_W)) u_ctrl (
    .clk, .rst_n, .start, .threshold, .busy, .done,
    .src_addr, .face_rdata, .comp_rdata,
    .acc_clr, .acc_en,
    .blend_start, .center_face, .center_comp, .blend_done, .blend_result,
    .out_we, .out_addr, .out_wdata);

  window_accumulator #(.PIX_W(PIX_W), .TAPS(TAPS), .SUM_W(SUM_W)) u_fi (
    .clk, .rst_n, .clr(acc_clr), .en(acc_en), .pix(face_rdata), .sum(fi));

  window_accumulator #(.PIX_W(PIX_W), .TAPS(TAPS), .SUM_W(SUM_W)) u_ci (
    .clk, .rst_n, .clr(acc_clr), .en(acc_en), .pix(comp_rdata), .sum(ci));

  intensity_blend #(.PIX_W(PIX_W), .SUM_W(SUM_W)) u_blend (
    .clk, .rst_n, .start(blend_start), .fi, .ci,
    .face_pix(center_face), .comp_pix(center_comp),
    .busy(blend_busy), .done(blend_done), .result(blend_result));

  // A blend is only requested when the divider is free.
  a_blend_free: assert property (@(posedge clk) disable iff (!rst_n)
    blend_start |-> !blend_busy);

endmodule
