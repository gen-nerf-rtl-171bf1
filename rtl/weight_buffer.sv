// weight_buffer: the rendering engine's weight buffer (paper: 8 KB). It is
// filled from DRAM by the memory controller and read one row of a weight
// matrix per cycle to feed the top edge of a systolic array: a word holds
// N = 16 INT8 weights (128 bits), so 8 KB is 512 rows. Read data appears one
// cycle after the address. Organisation is this design's choice.
module weight_buffer #(
  parameter int unsigned BYTES = 8*1024,
  parameter int unsigned N     = 16
) (
  input  logic                                 clk,
  input  logic                                 we,
  input  logic [$clog2(BYTES/N)-1:0]           waddr,
  input  logic [N*8-1:0]                       wdata,
  input  logic                                 re,
  input  logic [$clog2(BYTES/N)-1:0]           raddr,
  output logic signed [7:0]                    rrow [N]
);
  localparam int unsigned DEPTH = BYTES/N;
  logic [N*8-1:0] mem [DEPTH];
  logic [N*8-1:0] q;
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) q <= mem[raddr];
  end
  always_comb for (int i = 0; i < N; i++) rrow[i] = q[i*8 +: 8];
endmodule
