// rendering_engine: executes one point patch in the paper's two stages.
//
//  coarse stage : PPU emits the uniform coarse points with their features;
//                 they are batched 16 at a time (one row of A per point)
//                 and multiplied on a PE-pool array by the weight matrix in
//                 the weight buffer; the outputs (density, colour) go to the
//                 local buffer. When the stage's points are done, the local
//                 buffer is read back in order and the SFU computes each
//                 point's hitting probability w_k, written to the PPU's
//                 PDF memory.
//  focused stage: PPU builds the CDF and draws the focused points; they go
//                 through the same PE / local-buffer path; the SFU then
//                 composites them into per-ray transmittance and colour.
//                 The ray state is kept across the depth slices of a pixel
//                 column (the scheduler sends them in depth order) and the
//                 pixels are emitted after the last slice.
// Then the prefetch SRAM is released.
//
// What is this design's and not the paper's: the network. The paper runs an
// MLP and its Ray-Mixer (three FC layers) on the PE pool but gives no layer
// widths or weights; here a single FC layer (C_FEAT inputs x 16 outputs,
// weights from the weight buffer) stands for it: output 0 is the raw density
// (ReLU, >> SIG_SHIFT, unsigned Q8.8), outputs 1..3 the colour (>> RGB_SHIFT,
// clipped to 0..255). Batches use the pool's arrays round robin, one batch
// at a time. delta for a focused point is the distance to the previous point
// of the same ray (the slice's near depth for the first), for a coarse point
// the coarse bin depth.
// Pixel output: pix_valid with (pix_h, pix_w, pix_rgb), one per cycle, no
// back-pressure.
module rendering_engine
  import gen_nerf_pkg::*;
#(
  parameter int unsigned NA        = N_ARRAYS,
  parameter int unsigned SIG_SHIFT = 4,
  parameter int unsigned RGB_SHIFT = 6,
  parameter int unsigned PF_WORDS  = BANK_WORDS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cam_t          cam,
  input  mat34_t        P [S_MAX],
  input  logic [3:0]    num_views,
  input  logic [15:0]   tau,
  // prefetch buffer read side
  input  logic          pf_valid,
  input  patch_t        pf_patch,
  output logic          pf_rd_en,
  output logic [$clog2(PF_WORDS)-1:0] pf_rd_addr [NBANK],
  input  fvec_t         pf_rd_data [NBANK],
  output logic          pf_release,
  // weight buffer fill
  input  logic          wb_we,
  input  logic [8:0]    wb_waddr,
  input  logic [127:0]  wb_wdata,
  // pixels
  output logic          pix_valid,
  output logic [9:0]    pix_h,
  output logic [9:0]    pix_w,
  output logic [7:0]    pix_rgb [3],
  // statistics
  output logic [31:0]   n_coarse,
  output logic [31:0]   n_focus,
  output logic [31:0]   n_batches,
  output logic [31:0]   n_patches,
  output logic [31:0]   n_empty_rays,
  output logic [31:0]   n_wait_cycles,
  output logic          idle
);
  typedef enum logic [3:0] {
    E_IDLE, E_RUN, E_MM, E_MMW, E_WB, E_SRD, E_SIN, E_SWB, E_PIX, E_REL
  } estate_t;
  estate_t st;
  logic    focus;
  logic    started;

  // ---------------- PPU ----------------
  logic ppu_sc, ppu_sf, ppu_done, ppu_valid, ppu_ready, ppu_last;
  logic [6:0] ppu_ray;
  fix_t  ppu_t;
  fvec_t ppu_feat;
  logic  pw_we;
  logic [$clog2(MAX_BINS)-1:0] pw_idx;
  logic [15:0] pw_data;
  logic [31:0] n_crit;
  preprocessing_unit #(.PF_WORDS(PF_WORDS)) u_ppu (
    .clk, .rst_n, .cam, .P, .num_views, .patch(pf_patch), .tau,
    .start_coarse(ppu_sc), .start_focus(ppu_sf), .stage_done(ppu_done),
    .w_we(pw_we), .w_idx(pw_idx), .w_data(pw_data),
    .pf_rd_en, .pf_rd_addr, .pf_rd_data,
    .out_valid(ppu_valid), .out_ready(ppu_ready), .out_ray(ppu_ray), .out_t(ppu_t),
    .out_last(ppu_last), .out_feat(ppu_feat), .n_critical(n_crit)
  );
  assign ppu_ready = (st == E_RUN);

  // ---------------- batch staging ----------------
  feat_t      A [SA_N][C_FEAT];
  logic [6:0] b_ray [SA_N];
  fix_t       b_t   [SA_N];
  logic [4:0] bp;           // points in batch
  logic       b_last;
  logic [5:0] mk;           // K counter
  logic [$clog2(NA)-1:0] sel;

  // ---------------- weight buffer ----------------
  logic signed [7:0] wrow [SA_N];
  weight_buffer #(.BYTES(8*1024), .N(SA_N)) u_wbuf (
    .clk, .we(wb_we), .waddr(wb_waddr), .wdata(wb_wdata),
    .re(st == E_MM), .raddr(9'(mk)), .rrow(wrow)
  );

  // ---------------- PE pool ----------------
  logic signed [7:0]  a_col [SA_N];
  logic signed [31:0] acc [SA_N][SA_N];
  logic [NA-1:0] pe_done;
  logic pe_valid, pe_last, pe_clear;
  always_comb for (int r = 0; r < SA_N; r++) a_col[r] = A[r][mk - 6'd1];
  assign pe_valid = (st == E_MM) && mk != 0;
  assign pe_last  = (st == E_MM) && mk == 6'(C_FEAT);
  assign pe_clear = (st == E_RUN) && ppu_valid && bp == 0;
  pe_pool #(.NA(NA), .N(SA_N)) u_pool (
    .clk, .rst_n, .sel, .clear(pe_clear), .in_valid(pe_valid), .in_last(pe_last),
    .a_col, .b_row(wrow), .rd_sel(sel), .acc, .done(pe_done)
  );

  // ---------------- local buffer ----------------
  typedef struct packed {
    logic [6:0]  ray;
    fix_t        t;
    logic [15:0] sigma;
    logic [7:0]  r, g, b;
  } lbe_t;
  logic        lb_we, lb_re;
  logic [13:0] lb_waddr, lb_raddr, lb_cnt;
  logic [127:0] lb_wdata, lb_rdata;
  lbe_t        lb_in, lb_out;
  local_buffer #(.BYTES(256*1024), .WIDTH(128)) u_lbuf (
    .clk, .we(lb_we), .waddr(lb_waddr), .wdata(lb_wdata),
    .re(lb_re), .raddr(lb_raddr), .rdata(lb_rdata)
  );
  logic [4:0] wr_i;
  always_comb begin
    logic signed [31:0] s0;
    logic signed [31:0] cc;
    logic [7:0] col [3];
    s0 = acc[wr_i[3:0]][0] >>> SIG_SHIFT;
    for (int i = 0; i < 3; i++) begin
      cc = acc[wr_i[3:0]][i+1] >>> RGB_SHIFT;
      col[i] = (cc < 0) ? 8'd0 : (cc > 255) ? 8'd255 : 8'(cc);
    end
    lb_in.ray   = b_ray[wr_i[3:0]];
    lb_in.t     = b_t[wr_i[3:0]];
    lb_in.sigma = (s0 < 0) ? 16'd0 : (s0 > 65535) ? 16'hFFFF : 16'(s0);
    lb_in.r = col[0]; lb_in.g = col[1]; lb_in.b = col[2];
  end
  assign lb_we    = (st == E_WB) && wr_i < bp;
  assign lb_wdata = 128'(lb_in);
  assign lb_re    = (st == E_SRD);
  assign lb_out   = lbe_t'(lb_rdata[$bits(lbe_t)-1:0]);

  // ---------------- SFU and ray state ----------------
  logic [16:0] stT [MAX_R];
  logic [23:0] stC [MAX_R][3];
  logic [10:0] stN [MAX_R];
  logic [16:0] runT;
  logic [6:0]  prev_ray;
  fix_t        prev_t;
  logic        first_pt;
  fix_t        t0;
  assign t0 = cam.t_near + fix_t'(32'(pf_patch.d0)) * cam.seg_len;

  logic        sfu_in, sfu_ov;
  logic [16:0] sfu_w, sfu_tout, sfu_tin;
  logic [23:0] sfu_cout [3], sfu_cin [3];
  fix_t        sfu_delta;
  logic [7:0]  sfu_rgb [3];
  logic        newray;
  assign newray  = first_pt || lb_out.ray != prev_ray;
  assign sfu_in  = (st == E_SIN);
  assign sfu_rgb = '{lb_out.r, lb_out.g, lb_out.b};
  always_comb begin
    if (!focus) begin
      sfu_delta = cam.seg_len >>> $clog2(NC_SEG);
      sfu_tin   = newray ? 17'd65536 : runT;
      sfu_cin   = '{24'd0, 24'd0, 24'd0};
    end else begin
      sfu_delta = newray ? (lb_out.t - t0) : (lb_out.t - prev_t);
      sfu_tin   = stT[lb_out.ray[5:0]];
      sfu_cin   = stC[lb_out.ray[5:0]];
    end
  end
  special_function_unit u_sfu (
    .clk, .rst_n, .in_valid(sfu_in), .sigma(lb_out.sigma), .delta(sfu_delta),
    .rgb(sfu_rgb), .t_in(sfu_tin), .c_in(sfu_cin),
    .out_valid(sfu_ov), .w(sfu_w), .t_out(sfu_tout), .c_out(sfu_cout)
  );
  assign pw_we   = (st == E_SWB) && !focus;
  assign pw_idx  = ($bits(pw_idx))'(lb_raddr);
  assign pw_data = (sfu_w > 17'd65535) ? 16'hFFFF : 16'(sfu_w);

  // ---------------- pixel output ----------------
  logic [6:0] pix_i;
  logic [6:0] n_rays;
  assign n_rays = 7'(pf_patch.dh * pf_patch.dw);
  always_comb begin
    pix_h = pf_patch.h0 + 10'(pix_i / 7'(pf_patch.dw));
    pix_w = pf_patch.w0 + 10'(pix_i % 7'(pf_patch.dw));
    for (int i = 0; i < 3; i++) begin
      logic [23:0] c;
      c = stC[pix_i[5:0]][i] >> 8;
      pix_rgb[i] = (c > 255) ? 8'd255 : 8'(c);
    end
  end
  assign pix_valid  = (st == E_PIX);
  assign idle       = (st == E_IDLE);
  assign pf_release = (st == E_REL);
  assign ppu_sc = (st == E_IDLE) && pf_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= E_IDLE; focus <= 1'b0; started <= 1'b0; bp <= '0; b_last <= 1'b0; mk <= '0;
      sel <= '0; wr_i <= '0; lb_waddr <= '0; lb_raddr <= '0; lb_cnt <= '0; runT <= '0;
      prev_ray <= '0; prev_t <= '0; first_pt <= 1'b1; pix_i <= '0; ppu_sf <= 1'b0;
      n_coarse <= '0; n_focus <= '0; n_batches <= '0; n_patches <= '0;
      n_empty_rays <= '0; n_wait_cycles <= '0;
      for (int r = 0; r < MAX_R; r++) begin
        stT[r] <= 17'd65536; stN[r] <= '0;
        for (int i = 0; i < 3; i++) stC[r][i] <= '0;
      end
    end else begin
      ppu_sf <= 1'b0;
      case (st)
        E_IDLE: begin
          if (pf_valid) begin
            started <= 1'b1;
            focus <= 1'b0; bp <= '0; lb_waddr <= '0; st <= E_RUN;
            if (pf_patch.d0 == 0)
              for (int r = 0; r < MAX_R; r++) begin
                stT[r] <= 17'd65536; stN[r] <= '0;
                for (int i = 0; i < 3; i++) stC[r][i] <= '0;
              end
          end else if (started) n_wait_cycles <= n_wait_cycles + 1;
        end
        E_RUN: if (ppu_valid) begin
          for (int c = 0; c < C_FEAT; c++) A[bp[3:0]][c] <= ppu_feat[c];
          b_ray[bp[3:0]] <= ppu_ray;
          b_t[bp[3:0]]   <= ppu_t;
          if (focus) n_focus <= n_focus + 1; else n_coarse <= n_coarse + 1;
          bp <= bp + 1'b1;
          b_last <= ppu_last;
          if (ppu_last || bp == 5'(SA_N-1)) begin
            mk <= '0; st <= E_MM;
          end
        end
        E_MM: begin
          // clear rows of A not filled in this batch
          if (mk == 0)
            for (int r = 0; r < SA_N; r++)
              if (5'(r) >= bp) for (int c = 0; c < C_FEAT; c++) A[r][c] <= '0;
          mk <= mk + 1'b1;
          if (mk == 6'(C_FEAT)) st <= E_MMW;
        end
        E_MMW: if (pe_done[sel]) begin wr_i <= '0; st <= E_WB; n_batches <= n_batches + 1; end
        E_WB: begin
          if (wr_i < bp) begin
            lb_waddr <= lb_waddr + 1'b1;
            wr_i <= wr_i + 1'b1;
          end else begin
            sel <= (sel == ($bits(sel))'(NA-1)) ? '0 : sel + 1'b1;
            bp  <= '0;
            if (b_last) begin
              lb_cnt <= lb_waddr; lb_raddr <= '0; first_pt <= 1'b1; st <= E_SRD;
            end else st <= E_RUN;
          end
        end
        E_SRD: st <= E_SIN;
        E_SIN: st <= E_SWB;
        E_SWB: begin
          first_pt <= 1'b0;
          prev_ray <= lb_out.ray;
          prev_t   <= lb_out.t;
          runT     <= sfu_tout;
          if (focus) begin
            stT[lb_out.ray[5:0]] <= sfu_tout;
            stC[lb_out.ray[5:0]] <= sfu_cout;
            stN[lb_out.ray[5:0]] <= stN[lb_out.ray[5:0]] + 1'b1;
          end
          if (lb_raddr + 1'b1 == lb_cnt) begin
            if (!focus) begin
              focus <= 1'b1; ppu_sf <= 1'b1; lb_waddr <= '0; bp <= '0; st <= E_RUN;
            end else if (pf_patch.last_slice) begin
              pix_i <= '0; st <= E_PIX;
            end else st <= E_REL;
          end else begin
            lb_raddr <= lb_raddr + 1'b1; st <= E_SRD;
          end
        end
        E_PIX: begin
          if (stN[pix_i[5:0]] == 0) n_empty_rays <= n_empty_rays + 1;
          if (pix_i + 1'b1 == n_rays) st <= E_REL;
          pix_i <= pix_i + 1'b1;
        end
        E_REL: begin
          n_patches <= n_patches + 1;
          st <= E_IDLE;
        end
        default: st <= E_IDLE;
      endcase
    end
  end
endmodule
