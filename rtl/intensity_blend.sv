// intensity_blend: the intensity-adjustment equation of the tuning phase.
//
// With FI the 3x3 sum of the blank face around (x,y), CI the 3x3 sum of the
// component image, IF = FI/CI, the new face intensity is
//     I3(x,y) = (I3(x,y) + 2*IF*I2(x,y)) / (1 + 2*IF).
// Multiplying numerator and denominator by CI removes the fractional IF:
//     result = (I3*CI + 2*FI*I2) / (CI + 2*FI)
// which is evaluated exactly and truncated once.  Because the result is a
// weighted mean of two PIX_W-bit values it is below 2^PIX_W, so a restoring
// divider needs only PIX_W steps.
//
// Timing: start latches the operands (one cycle to form numerator and
// denominator), then one quotient bit is produced per cycle, MSB first.
// done pulses for one cycle, PIX_W+1 cycles after start, with result valid
// from then until the next start.  start is ignored while busy.  CI must be
// non-zero (the controller only blends component pixels above the threshold,
// so CI >= 1).  The equation is the source's; the single-division form,
// truncation and the serial divider are this design's choices.
module intensity_blend #(
  parameter int unsigned PIX_W = 8,
  parameter int unsigned SUM_W = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [SUM_W-1:0] fi,
  input  logic [SUM_W-1:0] ci,
  input  logic [PIX_W-1:0] face_pix,
  input  logic [PIX_W-1:0] comp_pix,
  output logic             busy,
  output logic             done,
  output logic [PIX_W-1:0] result
);

  localparam int unsigned DEN_W = SUM_W + 2;            // CI + 2*FI
  localparam int unsigned NUM_W = SUM_W + PIX_W + 2;    // I3*CI + 2*FI*I2
  localparam int unsigned CNT_W = $clog2(PIX_W + 1);

  logic [NUM_W-1:0] num, rem;
  logic [DEN_W-1:0] den, den_q;
  logic [CNT_W-1:0] step;                 // quotient bit being decided
  logic [NUM_W+PIX_W-1:0] trial;          // den_q << step

  assign num = NUM_W'(face_pix) * NUM_W'(ci) + ((NUM_W'(fi) * NUM_W'(comp_pix)) << 1);
  assign den = DEN_W'(ci) + (DEN_W'(fi) << 1);

  assign trial = (NUM_W+PIX_W)'(den_q) << step;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      rem    <= '0;
      den_q  <= '0;
      step   <= '0;
      result <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          rem    <= num;
          den_q  <= den;
          step   <= CNT_W'(PIX_W - 1);
          result <= '0;
        end
      end else begin
        // quotient bits enter from the right, MSB first
        if ((NUM_W+PIX_W)'(rem) >= trial) begin
          rem    <= rem - NUM_W'(trial);
          result <= {result[PIX_W-2:0], 1'b1};
        end else begin
          result <= {result[PIX_W-2:0], 1'b0};
        end
        if (step == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          step <= step - 1'b1;
        end
      end
    end
  end

endmodule
