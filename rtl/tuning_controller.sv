// tuning_controller: sequencer of the tuning phase (stitching-line cover-up).
//
// It runs the hardware tuning algorithm over two row-major images of HEIGHT
// rows by WIDTH columns: the blank face I1 and the image I2 in which the
// selected components already sit at their places on a black background.
//   1. COPY: I3 <= I1, one pixel per cycle (read I1, write I3 a cycle later).
//   2. For every interior pixel (x,y), row by row:
//      CENTER/TEST: read I1(x,y) and I2(x,y); if I2(x,y) > T the pixel
//        belongs to a component, otherwise I3(x,y) keeps the face value.
//      WINDOW: read the nine pixels of the 3x3 window of I1 and of I2, one
//        address per cycle, into two window_accumulators (FI and CI).
//      BLEND: start intensity_blend with FI, CI, I1(x,y) and I2(x,y) and
//        write its result to I3(x,y).
//   3. DONE: pulse done for one cycle and return to IDLE.
// FI is taken over the original face I1, as the algorithm states, so the
// result does not depend on the scan order.  The threshold test, the copy
// and the blend equation are the source's; border handling is this design's:
// the first and last rows and columns are left at the face value, because
// their 3x3 window would leave the image.
//
// Interface: I1 and I2 share one read address (src_addr) and return data one
// cycle later; I3 has its own write port.  start is taken in IDLE only;
// busy is high from the cycle after start until done.  A run takes
// WIDTH*HEIGHT + 1 copy cycles, 3 cycles per interior pixel at or below T
// and 14 + blend latency (23 in all) cycles per interior pixel above T.
// WIDTH and HEIGHT must be at least 3.
module tuning_controller
  import tuner_pkg::*;
#(
  parameter int unsigned WIDTH  = tuner_pkg::IMG_WIDTH,
  parameter int unsigned HEIGHT = tuner_pkg::IMG_HEIGHT,
  parameter int unsigned NPIX   = WIDTH * HEIGHT,
  parameter int unsigned ADDR_W = $clog2(NPIX)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  pixel_t            threshold,
  output logic              busy,
  output logic              done,
  // shared read port of I1 (face) and I2 (components)
  output logic [ADDR_W-1:0] src_addr,
  input  pixel_t            face_rdata,
  input  pixel_t            comp_rdata,
  // neighbourhood accumulators (data comes straight from the memories)
  output logic              acc_clr,
  output logic              acc_en,
  // intensity blend
  output logic              blend_start,
  output pixel_t            center_face,
  output pixel_t            center_comp,
  input  logic              blend_done,
  input  pixel_t            blend_result,
  // write port of I3
  output logic              out_we,
  output logic [ADDR_W-1:0] out_addr,
  output pixel_t            out_wdata
);

  localparam int unsigned COL_W = $clog2(WIDTH);
  localparam int unsigned ROW_W = $clog2(HEIGHT);

  tune_state_t       state;
  logic [ADDR_W-1:0] copy_cnt;      // copy read address
  logic              copy_vld;      // a copy read is returning this cycle
  logic [ADDR_W-1:0] copy_waddr;    // its address
  logic [COL_W-1:0]  col;           // interior pixel being tuned
  logic [ROW_W-1:0]  row;
  logic [ADDR_W-1:0] ctr_addr;      // row*WIDTH + col
  logic [ADDR_W-1:0] win_addr;      // window read address
  logic [3:0]        tap;           // window read index 0..8
  logic [1:0]        win_col;       // column within the window 0..2
  logic              win_vld;       // a window read is returning this cycle
  logic              win_first;     // ... and it is the first of nine
  logic              blend_issued;

  assign busy = (state != ST_IDLE);

  // read address
  always_comb begin
    unique case (state)
      ST_COPY:   src_addr = copy_cnt;
      ST_WINDOW: src_addr = win_addr;
      default:   src_addr = ctr_addr;
    endcase
  end

  assign acc_en      = win_vld;
  assign acc_clr     = win_first;
  assign blend_start = (state == ST_BLEND) && !blend_issued && !win_vld;

  // I3 write: copy pipeline or blend result
  always_comb begin
    out_we    = 1'b0;
    out_addr  = ctr_addr;
    out_wdata = blend_result;
    if (copy_vld) begin
      out_we    = 1'b1;
      out_addr  = copy_waddr;
      out_wdata = face_rdata;
    end else if (state == ST_BLEND && blend_done) begin
      out_we    = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= ST_IDLE;
      done         <= 1'b0;
      copy_cnt     <= '0;
      copy_vld     <= 1'b0;
      copy_waddr   <= '0;
      col          <= '0;
      row          <= '0;
      ctr_addr     <= '0;
      win_addr     <= '0;
      tap          <= '0;
      win_col      <= '0;
      win_vld      <= 1'b0;
      win_first    <= 1'b0;
      blend_issued <= 1'b0;
      center_face  <= '0;
      center_comp  <= '0;
    end else begin
      done       <= 1'b0;
      copy_vld   <= (state == ST_COPY);
      copy_waddr <= copy_cnt;
      win_vld    <= (state == ST_WINDOW);
      win_first  <= (state == ST_WINDOW) && (tap == '0);

      unique case (state)
        ST_IDLE: begin
          if (start) begin
            copy_cnt <= '0;
            state    <= ST_COPY;
          end
        end

        ST_COPY: begin
          copy_cnt <= copy_cnt + 1'b1;
          if (copy_cnt == ADDR_W'(NPIX - 1)) begin
            row      <= ROW_W'(1);
            col      <= COL_W'(1);
            ctr_addr <= ADDR_W'(WIDTH + 1);
            state    <= ST_CENTER;
          end
        end

        ST_CENTER: state <= ST_TEST;

        ST_TEST: begin
          center_face <= face_rdata;
          center_comp <= comp_rdata;
          if (comp_rdata > threshold) begin
            win_addr <= ctr_addr - ADDR_W'(WIDTH + 1);
            tap      <= '0;
            win_col  <= '0;
            state    <= ST_WINDOW;
          end else begin
            state    <= ST_NEXT;
          end
        end

        ST_WINDOW: begin
          tap <= tap + 1'b1;
          if (win_col == 2'd2) begin
            win_col  <= '0;
            win_addr <= win_addr + ADDR_W'(WIDTH - 2);
          end else begin
            win_col  <= win_col + 1'b1;
            win_addr <= win_addr + 1'b1;
          end
          if (tap == 4'd8) begin
            blend_issued <= 1'b0;
            state        <= ST_BLEND;
          end
        end

        ST_BLEND: begin
          if (blend_start) blend_issued <= 1'b1;
          if (blend_done)  state        <= ST_NEXT;
        end

        ST_NEXT: begin
          if (col == COL_W'(WIDTH - 2)) begin
            if (row == ROW_W'(HEIGHT - 2)) begin
              state <= ST_DONE;
            end else begin
              col      <= COL_W'(1);
              row      <= row + 1'b1;
              ctr_addr <= ctr_addr + ADDR_W'(3);
              state    <= ST_CENTER;
            end
          end else begin
            col      <= col + 1'b1;
            ctr_addr <= ctr_addr + 1'b1;
            state    <= ST_CENTER;
          end
        end

        ST_DONE: begin
          done  <= 1'b1;
          state <= ST_IDLE;
        end

        default: state <= ST_IDLE;
      endcase
    end
  end

  // The blend unit answers only the request this controller made.
  a_done_in_blend: assert property (@(posedge clk) disable iff (!rst_n)
    blend_done |-> (state == ST_BLEND && blend_issued));
  // The copy pipeline and a blend result never compete for the I3 port.
  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n)
    !(copy_vld && state == ST_BLEND && blend_done));

endmodule
