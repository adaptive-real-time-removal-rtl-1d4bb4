// frame_ram: on-chip image memory, one synchronous read port and one write port.
//
// Holds one gray-scale image, pixel (row, column) at address row*width+column.
// The de-noiser reads the noisy image from it and writes the de-noised pixels
// back into the same memory. Written as an array so that an FPGA flow maps it
// to block RAM. Reads are registered: rdata is valid the cycle after re. A read
// and a write to the same address in one cycle return the old contents.
// Keeping the image on chip and writing the result back into the same memory
// follows the published design; the port structure is this design's choice.
module frame_ram #(
  parameter int unsigned DATA_W = 8,
  parameter int unsigned DEPTH  = 65536,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic [DATA_W-1:0] rdata,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] wdata
);

  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end

endmodule
