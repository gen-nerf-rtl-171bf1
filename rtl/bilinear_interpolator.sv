// bilinear_interpolator: the interpolator of the preprocessing unit. It
// blends the four feature vectors around a projected point (paper: "bilinearly
// interpolating the exact scene features among those of the closest four
// elements"), one MAC with an adder tree per channel:
//   f = (1-fx)(1-fy) f00 + fx(1-fy) f01 + (1-fx)fy f10 + fx fy f11
// fx, fy are unsigned Q0.8 fractions; nb_ok[i] = 0 makes neighbour i count
// as zero (outside the feature map). Neighbour order: 0 = (y,x), 1 = (y,x+1),
// 2 = (y+1,x), 3 = (y+1,x+1). The result is rounded and saturated to INT8.
// One register stage.
module bilinear_interpolator
  import gen_nerf_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic [7:0] fx,
  input  logic [7:0] fy,
  input  fvec_t      nb    [4],
  input  logic [3:0] nb_ok,
  output logic       out_valid,
  output fvec_t      f
);
  logic [16:0] wt [4];
  fvec_t f_c;

  always_comb begin
    wt[0] = (17'd256 - 17'(fx)) * (17'd256 - 17'(fy));
    wt[1] = 17'(fx) * (17'd256 - 17'(fy));
    wt[2] = (17'd256 - 17'(fx)) * 17'(fy);
    wt[3] = 17'(fx) * 17'(fy);
    for (int c = 0; c < C_FEAT; c++) begin
      logic signed [27:0] s;
      logic signed [27:0] r;
      s = '0;
      for (int i = 0; i < 4; i++)
        if (nb_ok[i]) s += 28'(signed'({1'b0, wt[i]})) * 28'(nb[i][c]);
      r = (s + 28'sd32768) >>> 16;
      if (r > 127)       f_c[c] = 8'sd127;
      else if (r < -128) f_c[c] = -8'sd128;
      else               f_c[c] = feat_t'(r);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; f <= '0;
    end else begin
      out_valid <= in_valid;
      f         <= f_c;
    end
  end
endmodule
