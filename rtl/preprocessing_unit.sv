// preprocessing_unit (PPU): steps 1-2 of the rendering pipeline for one
// point patch: it samples 3-D points along the patch's rays and gathers
// their source-view features from the prefetch buffer.
//
// Stage "coarse" (start_coarse): the uniform sampler emits ncb = NC_SEG*dd
// points per ray at bin centres t = t0 + (k + 1/2) * dc, where
// t0 = t_near + d0 * seg_len is the patch's near depth and dc = seg_len /
// NC_SEG. Only the first S_COARSE source views are used (the paper conditions
// the coarse pass on 4 views closest to the novel view; the host is assumed
// to order the views by closeness).
// Stage "focus" (start_focus): pdf_cdf_unit turns the coarse hitting
// probabilities (written by the engine through w_we/w_idx/w_data) into a CDF,
// then inverse_sampler draws ns = NF_SEG * dd * R points for the R rays of
// the patch, all source views are used.
//
// For each point, each view s is pushed through projector -> bank address
// generation -> prefetch-buffer read (the four banks return the 2x2
// neighbourhood in one cycle) -> bilinear interpolator -> accumulator, one
// view per cycle; the result is the mean over the views (IBRNet aggregates
// views with learned pooling; a mean is this design's simplification).
// A point takes num_views + 4 cycles. Output: a valid/ready stream of
// (ray index in patch, depth t, feature vector), `out_last` on the last
// point of the stage; stage_done pulses when it has been accepted.
module preprocessing_unit
  import gen_nerf_pkg::*;
#(
  parameter int unsigned PF_WORDS = BANK_WORDS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cam_t          cam,
  input  mat34_t        P [S_MAX],
  input  logic [3:0]    num_views,
  input  patch_t        patch,
  input  logic [15:0]   tau,
  input  logic          start_coarse,
  input  logic          start_focus,
  output logic          stage_done,
  // coarse hitting probabilities from the engine
  input  logic          w_we,
  input  logic [$clog2(MAX_BINS)-1:0] w_idx,
  input  logic [15:0]   w_data,
  // prefetch buffer read port
  output logic          pf_rd_en,
  output logic [$clog2(PF_WORDS)-1:0] pf_rd_addr [NBANK],
  input  fvec_t         pf_rd_data [NBANK],
  // point stream
  output logic          out_valid,
  input  logic          out_ready,
  output logic [6:0]    out_ray,
  output fix_t          out_t,
  output logic          out_last,
  output fvec_t         out_feat,
  output logic [31:0]   n_critical
);
  typedef enum logic [2:0] {P_IDLE, P_PDF, P_NEXT, P_ISSUE, P_WAIT, P_OUT} pstate_t;
  pstate_t st;
  logic focus;

  // patch geometry
  logic [6:0]  n_rays;
  logic [5:0]  ncb;
  fix_t        t0, dc;
  logic [3:0]  nv;
  assign n_rays = 7'(patch.dh * patch.dw);
  assign ncb    = 6'(NC_SEG * patch.dd);
  assign t0     = cam.t_near + fix_t'(32'(patch.d0)) * cam.seg_len;
  assign dc     = cam.seg_len >>> $clog2(NC_SEG);
  assign nv     = (!focus && num_views > 4'(S_COARSE)) ? 4'(S_COARSE) : num_views;

  // ---------------- PDF / CDF and Monte-Carlo sampler ----------------
  logic [31:0] cdf [MAX_BINS];
  logic [31:0] qv  [MAX_BINS];
  logic [31:0] total;
  logic [$clog2(MAX_BINS):0] n_bins;
  logic pdf_start, pdf_busy, pdf_done;
  pdf_cdf_unit u_pdf (
    .clk, .rst_n, .w_we, .w_idx, .w_data, .start(pdf_start), .n_rays, .ncb, .tau,
    .busy(pdf_busy), .done(pdf_done), .cdf, .q(qv), .total, .n_bins, .n_critical
  );
  logic smp_start, smp_busy, smp_valid, smp_ready, smp_last;
  logic [6:0] smp_ray;
  fix_t smp_t;
  inverse_sampler u_smp (
    .clk, .rst_n, .start(smp_start), .ns(11'(32'(NF_SEG) * 32'(patch.dd) * 32'(n_rays))),
    .ncb, .n_bins, .cdf, .q(qv), .total, .t0, .dc,
    .busy(smp_busy), .out_valid(smp_valid), .out_ready(smp_ready), .out_ray(smp_ray),
    .out_t(smp_t), .out_last(smp_last)
  );
  assign pdf_start = start_focus && st == P_IDLE;
  assign smp_start = pdf_done;
  assign smp_ready = focus && st == P_NEXT;

  // ---------------- point registers ----------------
  logic [6:0]  pr;         // ray
  fix_t        pt;         // depth
  logic        plast;
  logic [5:0]  ck;         // coarse bin
  logic [3:0]  vs;         // view being issued
  logic [3:0]  nacc;       // views accumulated
  logic signed [15:0] sum [C_FEAT];

  // pixel of the current ray
  fix_t ph, pw;
  always_comb begin
    logic [9:0] hh, ww;
    hh = patch.h0 + 10'(pr / 7'(patch.dw));
    ww = patch.w0 + 10'(pr % 7'(patch.dw));
    ph = fix_t'({hh, 16'h8000});
    pw = fix_t'({ww, 16'h8000});
  end

  // stage A: projector
  logic pj_valid, pj_ok;
  fix_t pj_u, pj_v;
  logic [3:0] vs_a;
  point_projector u_proj (
    .clk, .rst_n, .in_valid(st == P_ISSUE), .cam, .P(P[vs]), .h(ph), .w(pw), .t(pt),
    .out_valid(pj_valid), .ok(pj_ok), .u(pj_u), .v(pj_v)
  );
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vs_a <= '0; else vs_a <= vs;

  // stage B: neighbourhood, bank addresses, buffer read
  win_t cw;
  assign cw = patch.win[vs_a];
  logic [3:0] ok_bank;
  always_comb begin
    logic signed [16:0] x, y, xx, yy;
    x = 17'(signed'(pj_u[31:16]));
    y = 17'(signed'(pj_v[31:16]));
    for (int bk = 0; bk < NBANK; bk++) begin
      // neighbour held by bank bk: dy = bk[1]^y[0], dx = bk[0]^x[0]
      yy = y + 17'(bk[1] ^ y[0]);
      xx = x + 17'(bk[0] ^ x[0]);
      ok_bank[bk] = pj_ok && cw.valid &&
                    xx >= 17'(cw.x_lo) && xx <= 17'(cw.x_hi) &&
                    yy >= 17'(cw.y_lo) && yy <= 17'(cw.y_hi);
      pf_rd_addr[bk] = ($bits(pf_rd_addr[bk]))'(32'(cw.base) +
                       32'(((yy >>> 1) - 17'(cw.y_lo >> 1))) * 32'(cw.wb) +
                       32'(((xx >>> 1) - 17'(cw.x_lo >> 1))));
      if (!ok_bank[bk]) pf_rd_addr[bk] = '0;
    end
  end
  assign pf_rd_en = pj_valid;

  logic       b_valid;
  logic [7:0] b_fx, b_fy;
  logic [3:0] b_ok;
  logic       b_y0, b_x0;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_valid <= 1'b0; b_fx <= '0; b_fy <= '0; b_ok <= '0; b_y0 <= 1'b0; b_x0 <= 1'b0;
    end else begin
      b_valid <= pj_valid;
      b_fx <= pj_u[15:8];
      b_fy <= pj_v[15:8];
      b_y0 <= pj_v[16];
      b_x0 <= pj_u[16];
      b_ok <= ok_bank;
    end
  end

  // stage C: interpolation (neighbour n is in bank {n[1]^y0, n[0]^x0})
  fvec_t nb [4];
  logic [3:0] nb_ok;
  always_comb
    for (int n = 0; n < 4; n++) begin
      logic [1:0] bk;
      bk = 2'(n) ^ {b_y0, b_x0};
      nb[n]    = pf_rd_data[bk];
      nb_ok[n] = b_ok[bk];
    end
  logic  ip_valid;
  fvec_t ip_f;
  bilinear_interpolator u_interp (
    .clk, .rst_n, .in_valid(b_valid), .fx(b_fx), .fy(b_fy), .nb, .nb_ok,
    .out_valid(ip_valid), .f(ip_f)
  );

  // mean over views
  logic [16:0] recip;
  assign recip = (nv == 0) ? 17'd0 : 17'(17'd65536 / 17'(nv));
  always_comb
    for (int c = 0; c < C_FEAT; c++) begin
      logic signed [33:0] m;
      m = (34'(sum[c]) * 34'(signed'({1'b0, recip}))) >>> 16;
      out_feat[c] = (m > 127) ? 8'sd127 : (m < -128) ? -8'sd128 : feat_t'(m);
    end
  assign out_valid = (st == P_OUT);
  assign out_ray   = pr;
  assign out_t     = pt;
  assign out_last  = plast;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_IDLE; focus <= 1'b0; pr <= '0; pt <= '0; plast <= 1'b0; ck <= '0;
      vs <= '0; nacc <= '0; stage_done <= 1'b0;
      for (int c = 0; c < C_FEAT; c++) sum[c] <= '0;
    end else begin
      stage_done <= 1'b0;
      if (ip_valid) begin
        for (int c = 0; c < C_FEAT; c++) sum[c] <= sum[c] + 16'(ip_f[c]);
        nacc <= nacc + 1'b1;
      end
      case (st)
        P_IDLE: begin
          if (start_coarse) begin
            focus <= 1'b0; pr <= '0; ck <= '0; st <= P_NEXT;
          end else if (start_focus) begin
            focus <= 1'b1; st <= P_PDF;
          end
        end
        P_PDF: if (pdf_done) st <= P_NEXT;
        P_NEXT: begin
          for (int c = 0; c < C_FEAT; c++) sum[c] <= '0;
          nacc <= '0; vs <= '0;
          if (!focus) begin
            pt    <= t0 + fmul(fix_t'({10'd0, ck, 16'h8000}), dc);
            plast <= (pr + 1'b1 == n_rays) && (ck + 1'b1 == ncb);
            st    <= (nv == 0) ? P_OUT : P_ISSUE;
          end else if (smp_valid) begin
            pr <= smp_ray; pt <= smp_t; plast <= smp_last;
            st <= (nv == 0) ? P_OUT : P_ISSUE;
          end
        end
        P_ISSUE: begin
          if (vs + 1'b1 == nv) st <= P_WAIT;
          vs <= vs + 1'b1;
        end
        P_WAIT: if (nacc == nv) st <= P_OUT;
        P_OUT: if (out_ready) begin
          if (plast) begin
            st <= P_IDLE; stage_done <= 1'b1;
          end else begin
            st <= P_NEXT;
            if (!focus) begin
              if (ck + 1'b1 == ncb) begin ck <= '0; pr <= pr + 1'b1; end
              else ck <= ck + 1'b1;
            end
          end
        end
        default: st <= P_IDLE;
      endcase
    end
  end
endmodule
