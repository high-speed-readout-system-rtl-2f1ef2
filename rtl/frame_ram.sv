// frame_ram -- one-frame pixel memory (FPGA internal block RAM).
//
// A single-port RAM of DEPTH words of WIDTH bits with READ-FIRST behaviour:
// in a clock with en high, rdata takes the word stored at addr before the
// write of the same clock (if we is high) replaces it. This lets the frame
// subtractor read the previous frame's value of a pixel and overwrite it with
// the current value in one access. Read latency is one clock; rdata holds its
// value while en is low. The contents are not reset.
//
// The paper keeps one frame buffer in internal block RAM; the read-first port
// is this design's way of doing the read-then-update it describes.
module frame_ram #(
  parameter int unsigned DEPTH = 2048*2048,
  parameter int unsigned WIDTH = 12,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      rdata <= mem[addr];
      if (we) mem[addr] <= wdata;
    end
  end

endmodule
