// inverse_sampler: the Monte-Carlo simulator of the preprocessing unit with
// its random number generator, comparator array and MAC array. It draws the
// patch's focused samples by inverse transform sampling of the piecewise
// constant PDF built by pdf_cdf_unit (paper: focused sampling "using inverse
// transform sampling in Monte-Carlo methods").
//
// For sample i = 0 .. ns-1 (stratified: one uniform draw per stratum)
//   u      = (i + r_i) / ns * total            r_i from a 16-bit LFSR
//   b      = #{bins with cdf[b] <= u}           (comparator array)
//   frac   = (u - cdf[b-1]) / q[b]
//   ray    = b / ncb, k = b % ncb
//   t      = t0 + (k + frac) * dc               (dc: coarse bin depth)
// Because u grows with i, samples leave grouped by ray and in increasing
// depth within a ray, which the compositing needs. If total = 0 (no critical
// point in the patch) the bins are taken as equally likely. Output is a
// valid/ready stream, one sample per cycle; `last` marks sample ns-1.
// Stratification and the LFSR polynomial (x^16+x^14+x^13+x^11+1) are this
// design's choices.
module inverse_sampler
  import gen_nerf_pkg::*;
#(
  parameter int unsigned NB = MAX_BINS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [10:0]          ns,
  input  logic [5:0]           ncb,
  input  logic [$clog2(NB):0]  n_bins,
  input  logic [31:0]          cdf [NB],
  input  logic [31:0]          q   [NB],
  input  logic [31:0]          total,
  input  fix_t                 t0,
  input  fix_t                 dc,
  output logic                 busy,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [6:0]           out_ray,
  output fix_t                 out_t,
  output logic                 out_last
);
  logic [15:0] lfsr;
  logic [10:0] i;

  logic [63:0] u;
  logic [$clog2(NB):0] b;
  logic [31:0] prev, qb;
  logic [15:0] frac;
  logic [6:0]  ray_c;
  logic [5:0]  k_c;
  fix_t        t_c;
  always_comb begin
    logic [63:0] num;
    num = 64'({i, lfsr});
    b   = '0;
    if (total == 0) begin
      u    = (num * 64'(n_bins) << 16) / (64'(ns) << 16);
      b    = ($bits(b))'(u >> 16);
      frac = u[15:0];
      prev = '0; qb = '0;
    end else begin
      u = (num * 64'(total)) / (64'(ns) << 16);
      for (int k = 0; k < NB; k++)
        if (k < int'(n_bins) && 64'(cdf[k]) <= u) b = b + 1'b1;
      prev = (b == 0) ? 32'd0 : cdf[b - 1'b1];
      qb   = q[b[$clog2(NB)-1:0]];
      frac = (qb == 0) ? 16'd0 : 16'(((u - 64'(prev)) << 16) / 64'(qb));
    end
    ray_c = 7'(32'(b) / 32'(ncb));
    k_c   = 6'(32'(b) % 32'(ncb));
    t_c   = t0 + fmul(fix_t'({10'd0, k_c, frac}), dc);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr <= 16'hACE1; i <= '0; busy <= 1'b0;
      out_valid <= 1'b0; out_ray <= '0; out_t <= '0; out_last <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; i <= '0;
      end else if (busy && (!out_valid || out_ready)) begin
        out_valid <= 1'b1;
        out_ray   <= ray_c;
        out_t     <= t_c;
        out_last  <= (i + 1'b1 == ns);
        lfsr      <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
        i         <= i + 1'b1;
        if (i + 1'b1 == ns) busy <= 1'b0;
      end
    end
  end
endmodule
