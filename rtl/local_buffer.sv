// local_buffer: the rendering engine's local buffer (paper: 256 KB). The
// engine writes the density and colour predicted for each point here and,
// when the point pipeline of a stage has finished for the patch, reads them
// back in order to composite pixels (paper, rendering workflow). One write
// port and one read port, 128-bit words (16384 words = 256 KB), read data
// one cycle after the address. Word width and port count are this design's
// choice; the paper gives only the size.
module local_buffer #(
  parameter int unsigned BYTES = 256*1024,
  parameter int unsigned WIDTH = 128
) (
  input  logic                                clk,
  input  logic                                we,
  input  logic [$clog2(BYTES*8/WIDTH)-1:0]    waddr,
  input  logic [WIDTH-1:0]                    wdata,
  input  logic                                re,
  input  logic [$clog2(BYTES*8/WIDTH)-1:0]    raddr,
  output logic [WIDTH-1:0]                    rdata
);
  localparam int unsigned DEPTH = BYTES*8/WIDTH;
  logic [WIDTH-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
