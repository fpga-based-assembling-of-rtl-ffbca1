// window_accumulator: sum of a 3x3 neighbourhood of intensities.
//
// The tuning algorithm needs FI, the sum of the nine blank-face intensities
// around (x,y), and CI, the same sum over the component image.  The pixels
// arrive one per cycle from a single-port image memory, so the sum is built
// serially: clr starts a new sum (sum becomes 0, or pix when en is also
// high), en adds pix.  After the ninth enabled cycle sum holds the full
// neighbourhood sum, visible on the following cycle.  The result width
// PIX_W + clog2(TAPS) holds TAPS * (2^PIX_W - 1) without overflow.  The
// serial form is this design's choice; the source gives only the sum.
module window_accumulator #(
  parameter int unsigned PIX_W = 8,
  parameter int unsigned TAPS  = 9,
  parameter int unsigned SUM_W = PIX_W + $clog2(TAPS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             en,
  input  logic [PIX_W-1:0] pix,
  output logic [SUM_W-1:0] sum
);

  logic [SUM_W-1:0] base;

  assign base = clr ? '0 : sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         sum <= '0;
    else if (en)        sum <= base + SUM_W'(pix);
    else if (clr)       sum <= '0;
  end

endmodule
