// pe_pool: the PE pool of the rendering engine, NA systolic arrays of
// N x N INT8 PEs (paper: 40 arrays of 16x16). The MLP and Ray-Mixer layers
// are matrix products that the rendering engine hands to the pool one batch
// per array; how batches are distributed is not given in the paper. Here the
// caller selects the array it streams operands into (`sel`) and the array it
// reads results from (`rd_sel`); arrays not selected hold their state, so
// several batches can be in flight in different arrays. done[i] pulses when
// array i has finished its batch (see systolic_array for the timing).
module pe_pool #(
  parameter int unsigned NA = 40,
  parameter int unsigned N  = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [$clog2(NA)-1:0]  sel,
  input  logic                   clear,
  input  logic                   in_valid,
  input  logic                   in_last,
  input  logic signed [7:0]      a_col [N],
  input  logic signed [7:0]      b_row [N],
  input  logic [$clog2(NA)-1:0]  rd_sel,
  output logic signed [31:0]     acc [N][N],
  output logic [NA-1:0]          done
);
  logic signed [31:0] acc_all [NA][N][N];

  for (genvar g = 0; g < NA; g++) begin : g_arr
    logic hit;
    assign hit = (sel == g);
    systolic_array #(.N(N)) u_sa (
      .clk, .rst_n,
      .clear    (clear && hit),
      .in_valid (in_valid && hit),
      .in_last  (in_last),
      .a_col, .b_row,
      .acc      (acc_all[g]),
      .done     (done[g])
    );
  end

  always_comb begin
    acc = acc_all[0];
    for (int g = 1; g < NA; g++)
      if (int'(rd_sel) == g) acc = acc_all[g];
  end
endmodule
