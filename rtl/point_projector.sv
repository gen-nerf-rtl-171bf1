// point_projector: projects a point sampled on a novel-view ray onto the
// image plane of one source view. The paper has two such units, the vertex
// projector of the workload scheduler (frustum corners) and the projector of
// the preprocessing unit (sampled points), both drawn as an FSM driving a
// "MAC array with adder tree"; this module is that MAC datapath and both
// places instantiate it.
//
//   d = d0 + w*dw + h*dh          (ray direction through image point (h,w))
//   X = o + t*d                   (3-D point at depth parameter t)
//   [a b c]^T = P * [X 1]^T       (P: 3x4 source projection, feature-map units)
//   u = a/c, v = b/c
// All values are Q16.16. ok = 0 when the point lies behind the source camera
// (c <= 0). One register stage: outputs appear the cycle after the inputs.
// Full-rate (one point per cycle) combinational dividers are this design's
// choice; the paper does not say how the divisions are done.
module point_projector
  import gen_nerf_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  cam_t   cam,
  input  mat34_t P,
  input  fix_t   h,
  input  fix_t   w,
  input  fix_t   t,
  output logic   out_valid,
  output logic   ok,
  output fix_t   u,
  output fix_t   v
);
  vec3_t d, X;
  fix_t  a, b, c;
  fix_t  u_c, v_c;
  logic  ok_c;

  always_comb begin
    for (int i = 0; i < 3; i++) begin
      d[i] = cam.d0[i] + fmul(w, cam.dw[i]) + fmul(h, cam.dh[i]);
      X[i] = cam.o[i] + fmul(t, d[i]);
    end
    a = fmul(P[0][0], X[0]) + fmul(P[0][1], X[1]) + fmul(P[0][2], X[2]) + P[0][3];
    b = fmul(P[1][0], X[0]) + fmul(P[1][1], X[1]) + fmul(P[1][2], X[2]) + P[1][3];
    c = fmul(P[2][0], X[0]) + fmul(P[2][1], X[1]) + fmul(P[2][2], X[2]) + P[2][3];
    ok_c = (c > 0);
    if (ok_c) begin
      u_c = fix_t'((64'(a) <<< 16) / 64'(c));
      v_c = fix_t'((64'(b) <<< 16) / 64'(c));
    end else begin
      u_c = '0;
      v_c = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; ok <= 1'b0; u <= '0; v <= '0;
    end else begin
      out_valid <= in_valid;
      ok        <= ok_c;
      u         <= u_c;
      v         <= v_c;
    end
  end
endmodule
