// image_ram: one grayscale image frame (blank face I1, placed components I2
// or tuned result I3).
//
// A single-port synchronous RAM of DEPTH words: a write happens on the clock
// edge when we is high; rdata shows the word at addr one cycle after addr is
// presented (read-before-write when both target the same word).  The default
// depth is one 23 x 28 image, stored row-major.  The memory is not reset: it
// is loaded by the host before use, like any block RAM.  The single port and
// one-cycle read latency are this design's choice; the source only says that
// the images are held and processed on the FPGA.
module image_ram #(
  parameter int unsigned DATA_W = 8,
  parameter int unsigned DEPTH  = 23 * 28,
  parameter int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] addr,
  input  logic [DATA_W-1:0] wdata,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && addr < ADDR_W'(DEPTH)) mem[addr] <= wdata;
    rdata <= (addr < ADDR_W'(DEPTH)) ? mem[addr] : '0;
  end

endmodule
