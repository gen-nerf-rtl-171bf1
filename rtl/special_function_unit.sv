// special_function_unit: evaluates one term of the volume-rendering sum
//   alpha_k = 1 - exp(-sigma_k * delta_k),  w_k = T_k * alpha_k,
//   T_{k+1} = T_k * exp(-sigma_k * delta_k), C += w_k * c_k
// per cycle (paper: a PE line that computes the exponential and accumulates
// the colours of the points along a ray). The coarse stage uses w_k (the
// hitting probability) to build the sampling PDF, the focused stage the
// accumulated colour.
//
// exp(-x) is computed as 2^-(x*log2 e): the integer part is a right shift,
// the fractional part a 17-entry table of 2^(-i/16) with linear
// interpolation between entries (error below 0.1 %). The table and number
// formats are this design's choice.
// Formats: sigma unsigned Q8.8, delta signed Q16.16 (negative taken as 0),
// T and w unsigned Q0.16 (65536 = 1.0), colour accumulators unsigned Q16.8 (pixel = acc >> 8).
// The pipeline has one register stage: outputs follow inputs by one cycle.
module special_function_unit (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [15:0] sigma,
  input  logic signed [31:0] delta,
  input  logic [7:0]  rgb   [3],
  input  logic [16:0] t_in,
  input  logic [23:0] c_in  [3],
  output logic        out_valid,
  output logic [16:0] w,
  output logic [16:0] t_out,
  output logic [23:0] c_out [3]
);
  localparam logic [16:0] EXP2_LUT [17] = '{
    17'd65536, 17'd62757, 17'd60097, 17'd57549, 17'd55109, 17'd52773,
    17'd50535, 17'd48393, 17'd46341, 17'd44376, 17'd42495, 17'd40693,
    17'd38968, 17'd37316, 17'd35734, 17'd34219, 17'd32768};
  localparam logic [16:0] LOG2E_Q16 = 17'd94548;

  logic [47:0] x_full;
  logic [31:0] x;           // sigma*delta, Q16.16
  logic [49:0] y_full;
  logic [33:0] y;           // x*log2e, Q18.16
  logic [16:0] e, w_c, t_c;
  logic [23:0] c_c [3];

  always_comb begin
    logic [31:0] dpos;
    logic [3:0]  seg;
    logic [11:0] fr;
    logic [16:0] lo, hi;
    logic [29:0] interp;
    dpos   = delta[31] ? 32'd0 : 32'(delta);
    x_full = 48'(sigma) * 48'(dpos);          // Q24.24
    x      = (x_full[47:40] != 0) ? 32'hFFFF_FFFF : x_full[39:8];
    y_full = 50'(x) * 50'(LOG2E_Q16);
    y      = y_full[49:16];
    seg    = y[15:12];
    fr     = y[11:0];
    lo     = EXP2_LUT[5'(seg)];
    hi     = EXP2_LUT[5'(seg) + 5'd1];
    interp = 30'(lo) * 30'd4096 - 30'(lo - hi) * 30'(fr);
    if (y[33:16] >= 18'd17) e = '0;
    else                    e = 17'(interp[28:12] >> y[20:16]);
    w_c = 17'((34'(t_in) * 34'(17'd65536 - e)) >> 16);
    t_c = 17'((34'(t_in) * 34'(e)) >> 16);
    for (int i = 0; i < 3; i++) c_c[i] = c_in[i] + 24'((25'(w_c) * 25'(rgb[i])) >> 8);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; w <= '0; t_out <= '0;
      for (int i = 0; i < 3; i++) c_out[i] <= '0;
    end else begin
      out_valid <= in_valid;
      w         <= w_c;
      t_out     <= t_c;
      c_out     <= c_c;
    end
  end
endmodule
