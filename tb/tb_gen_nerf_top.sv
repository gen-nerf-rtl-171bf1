// tb_gen_nerf_top: end-to-end test of the accelerator on a small frame.
//
// Scene: the novel camera sits at the origin looking down +z; all source
// views share one projection u = 100 X/Z + 100 + 50/Z, v = 100 Y/Z + 100,
// so every 3-D point lands on the 200x200 feature maps. The DRAM model
// stores features FVAL on feature columns x < 108 and 0 elsewhere, and one
// FC weight row (4, 2, 4, 8). Depth range 4..12 in 8 segments.
// Pixel columns whose rays project only onto the textured part must come out
// as the opaque colour computed below from the same fixed-point rules;
// columns that project only onto the empty part must be black (and their
// rays must receive no focused samples). Every pixel must appear once.
// The expected colour is an upper bound: focused samples only cover the
// critical depth range, so a few percent of transmittance may remain; the
// check accepts 90..100 % of it.
//
// The top gets a candidate table with two full-depth and two 2-segment
// shapes. Three frames on a small prefetch SRAM: 6 views (only the
// 2-segment shape fits, so patches are split in depth), 2 views (a
// full-depth shape fits), 10 views (nothing fits: fallback shape with some
// views dropped, so only coverage and black columns are checked).
// Mechanisms counted, each must occur: fallback patch, regular patch,
// multi-slice patch,
// prefetch overlapping rendering, engine waiting for data, DRAM
// back-pressure, rays left without focused samples, coarse and focused points.
module tb_gen_nerf_top;
  import gen_nerf_pkg::*;
  localparam int H = 8, W = 8;
  localparam int XT = 108, FVAL = 64;
  localparam int PFW = 1024;

  logic clk = 0, rst_n = 0, start = 0;
  cam_t cam;
  mat34_t P [S_MAX];
  logic [3:0] num_views;
  logic [15:0] tau = 16'd655;
  logic [9:0] wload_rows = 10'(C_FEAT);
  logic dram_req_valid, dram_req_ready, dram_rsp_valid;
  logic [31:0] dram_req_addr;
  fvec_t dram_rsp_data;
  logic pix_valid, frame_done;
  logic [9:0] pix_h, pix_w;
  logic [7:0] pix_rgb [3];
  logic [31:0] st_patches_sched, st_fallback, st_patches_done, st_dram_reads, st_coarse_pts,
               st_focus_pts, st_batches, st_empty_rays, st_engine_wait;
  int n_stalls;
  int checks = 0, failures = 0;
  longint cyc = 0;

  // candidates: two full-depth shapes, two 2-segment shapes, fallback
  localparam shape_t CAND [N_CAND] = '{
    '{dh: 5'd2, dw: 5'd8, dd: 4'd8}, '{dh: 5'd4, dw: 5'd4, dd: 4'd8},
    '{dh: 5'd2, dw: 5'd4, dd: 4'd2}, '{dh: 5'd4, dw: 5'd4, dd: 4'd2},
    '{dh: 5'd2, dw: 5'd4, dd: 4'd8}};
  gen_nerf_top #(.H(H), .W(W), .PF_WORDS(PFW), .CAND(CAND)) u_top (.*);
  dram_model #(.LAT(20), .STALL_PCT(10), .XT(XT), .FVAL(FVAL)) u_dram (
    .clk, .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req_addr(dram_req_addr),
    .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data), .n_stalls
  );
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fix_t fx(real r); return fix_t'($rtoi(r * 65536.0)); endfunction

  // mechanism counters
  int m_overlap = 0, m_multislice = 0, m_fallback = 0, m_regular = 0, m_wait = 0,
      m_stall = 0, m_empty = 0, m_coarse = 0, m_focus = 0;
  always @(posedge clk) begin
    if (u_top.fill_we && u_top.pf_valid) m_overlap++;
    if (u_top.q_pop && u_top.q_data.d0 != 0) m_multislice++;
  end

  int seen [H][W];
  logic [7:0] got [H][W][3];
  always @(posedge clk) if (pix_valid) begin
    seen[pix_h][pix_w]++;
    got[pix_h][pix_w] = pix_rgb;
  end

  task automatic run_frame(int nv, bit check_colour);
    real s, umin, umax, xw;
    int fm, ex [3], wts [4];
    for (int i = 0; i < H; i++) for (int j = 0; j < W; j++) seen[i][j] = 0;
    num_views = 4'(nv);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!frame_done) @(negedge clk);
    repeat (5) @(negedge clk);
    // expected colour of an opaque textured pixel
    wts = '{4, 2, 4, 8};
    fm = (FVAL * nv * (65536 / nv)) >> 16;
    for (int i = 0; i < 3; i++) begin
      ex[i] = (C_FEAT * fm * wts[i+1]) >> 6;
      if (ex[i] > 255) ex[i] = 255;
    end
    s = 0.5 / W;
    for (int i = 0; i < H; i++) for (int j = 0; j < W; j++) begin
      checks++;
      if (seen[i][j] != 1) begin
        failures++; $display("pixel %0d,%0d seen %0d times", i, j, seen[i][j]);
      end
      xw = (j + 0.5) * s - 0.25;
      umin = 100.0 * xw + 100.0 + 50.0 / 12.0;
      umax = 100.0 * xw + 100.0 + 50.0 / 4.0;
      if ($floor(umax) + 1 < XT && check_colour) begin
        for (int c = 0; c < 3; c++) begin
          checks++;
          if (int'(got[i][j][c]) > ex[c] || int'(got[i][j][c]) < (ex[c] * 9) / 10) begin
            failures++;
            $display("pixel %0d,%0d ch %0d = %0d, expected %0d", i, j, c, got[i][j][c], ex[c]);
          end
        end
      end else if ($floor(umin) >= XT) begin
        for (int c = 0; c < 3; c++) begin
          checks++;
          if (got[i][j][c] != 0) begin
            failures++; $display("pixel %0d,%0d ch %0d = %0d, expected 0", i, j, c, got[i][j][c]);
          end
        end
      end
    end
    $display("frame nv=%0d: %0d patches, %0d fallback, %0d dram reads, %0d coarse, %0d focus, %0d empty rays, cycle %0d",
             nv, st_patches_sched, st_fallback, st_dram_reads, st_coarse_pts, st_focus_pts,
             st_empty_rays, cyc);
    m_fallback += st_fallback;
    m_regular  += st_patches_sched - st_fallback;
  endtask

  initial begin
    real s;
    s = 0.5 / W;
    cam.o  = '{default: '0};
    cam.d0[0] = fx(-0.25); cam.d0[1] = fx(-0.25); cam.d0[2] = fx(1.0);
    cam.dw[0] = fx(s);     cam.dw[1] = '0;        cam.dw[2] = '0;
    cam.dh[0] = '0;        cam.dh[1] = fx(s);     cam.dh[2] = '0;
    cam.t_near  = fx(4.0);
    cam.seg_len = fx(1.0);
    for (int v = 0; v < S_MAX; v++) begin
      P[v] = '0;
      P[v][0][0] = fx(100.0); P[v][0][2] = fx(100.0); P[v][0][3] = fx(50.0);
      P[v][1][1] = fx(100.0); P[v][1][2] = fx(100.0);
      P[v][2][2] = fx(1.0);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_frame(6, 1);
    run_frame(2, 1);
    run_frame(10, 0);
    m_wait  = st_engine_wait;
    m_stall = n_stalls;
    m_empty = st_empty_rays;
    m_coarse = st_coarse_pts;
    m_focus  = st_focus_pts;
    $display("mechanisms: fallback=%0d regular=%0d multislice=%0d overlap=%0d wait=%0d stall=%0d empty_rays=%0d coarse=%0d focus=%0d",
             m_fallback, m_regular, m_multislice, m_overlap, m_wait, m_stall, m_empty, m_coarse, m_focus);
    checks++; if (m_fallback == 0) begin failures++; $display("no fallback patch"); end
    checks++; if (m_regular == 0)  begin failures++; $display("no regular patch"); end
    checks++; if (m_overlap == 0)  begin failures++; $display("no prefetch overlap"); end
    checks++; if (m_wait == 0)     begin failures++; $display("engine never waited"); end
    checks++; if (m_stall == 0)    begin failures++; $display("no DRAM back-pressure"); end
    checks++; if (m_empty == 0)    begin failures++; $display("no ray without focused samples"); end
    checks++; if (m_coarse == 0 || m_focus == 0) begin failures++; $display("no points"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
