// tb_workload_scheduler: 16x16 image, camera and source views as in the
// system test. Three runs: large prefetch SRAM (a regular shape fits),
// small SRAM with 10 views (nothing fits: fallback shape, views dropped)
// and a candidate table of 2-segment shapes (patches split in depth).
// For every patch popped from the queue it checks: every (pixel, depth
// segment) is covered exactly once over the frame; slices of one pixel
// block arrive in depth order with last_slice on the final one; the valid
// windows of the patch fit the bank (base + rows*wb <= WORDS, bases in
// order without overlap); and each valid window contains the projection of
// every pixel of the patch at the near and far depth of the slice (a ray
// segment projects to a line segment, so its ends bound it).
module tb_workload_scheduler;
  import gen_nerf_pkg::*;
  localparam int H = 16, W = 16;
  localparam shape_t CAND_A [N_CAND] = '{
    '{dh: 5'd2, dw: 5'd8, dd: 4'd8}, '{dh: 5'd4, dw: 5'd4, dd: 4'd8},
    '{dh: 5'd8, dw: 5'd4, dd: 4'd4}, '{dh: 5'd8, dw: 5'd8, dd: 4'd2},
    '{dh: 5'd2, dw: 5'd4, dd: 4'd8}};
  localparam shape_t CAND_B [N_CAND] = '{
    '{dh: 5'd4, dw: 5'd4, dd: 4'd2}, '{dh: 5'd2, dw: 5'd8, dd: 4'd2},
    '{dh: 5'd2, dw: 5'd4, dd: 4'd2}, '{dh: 5'd4, dw: 5'd8, dd: 4'd1},
    '{dh: 5'd2, dw: 5'd4, dd: 4'd8}};
  logic clk = 0, rst_n = 0;
  logic start [3];
  cam_t cam;
  mat34_t P [S_MAX];
  logic [3:0] num_views;
  logic done [3], q_empty [3], q_pop [3];
  patch_t q_data [3];
  logic [31:0] n_patches [3], n_fallback [3];
  int checks = 0, failures = 0;
  int words_of [3];

  workload_scheduler #(.H(H), .W(W), .WORDS(2048), .CAND(CAND_A)) u0 (.clk, .rst_n, .start(start[0]), .cam, .P,
    .num_views, .done(done[0]), .q_empty(q_empty[0]), .q_data(q_data[0]), .q_pop(q_pop[0]),
    .n_patches(n_patches[0]), .n_fallback(n_fallback[0]));
  workload_scheduler #(.H(H), .W(W), .WORDS(512), .CAND(CAND_A)) u1 (.clk, .rst_n, .start(start[1]), .cam, .P,
    .num_views, .done(done[1]), .q_empty(q_empty[1]), .q_data(q_data[1]), .q_pop(q_pop[1]),
    .n_patches(n_patches[1]), .n_fallback(n_fallback[1]));
  workload_scheduler #(.H(H), .W(W), .WORDS(2048), .CAND(CAND_B)) u2 (.clk, .rst_n, .start(start[2]), .cam, .P,
    .num_views, .done(done[2]), .q_empty(q_empty[2]), .q_data(q_data[2]), .q_pop(q_pop[2]),
    .n_patches(n_patches[2]), .n_fallback(n_fallback[2]));
  assign words_of = '{2048, 512, 2048};

  always #5 clk = ~clk;
  initial begin #20000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic real fr(fix_t x); return real'(x) / 65536.0; endfunction

  task automatic proj(int s, real h, real w, real t, output real u, output real v);
    real d [3], X [3], a, b, c;
    for (int k = 0; k < 3; k++) begin
      d[k] = fr(cam.d0[k]) + w * fr(cam.dw[k]) + h * fr(cam.dh[k]);
      X[k] = fr(cam.o[k]) + t * d[k];
    end
    a = fr(P[s][0][0]) * X[0] + fr(P[s][0][1]) * X[1] + fr(P[s][0][2]) * X[2] + fr(P[s][0][3]);
    b = fr(P[s][1][0]) * X[0] + fr(P[s][1][1]) * X[1] + fr(P[s][1][2]) * X[2] + fr(P[s][1][3]);
    c = fr(P[s][2][0]) * X[0] + fr(P[s][2][1]) * X[1] + fr(P[s][2][2]) * X[2] + fr(P[s][2][3]);
    u = a / c; v = b / c;
  endtask

  task automatic run(int i, int nv, output int n_multi, output int n_drop);
    int cov [H][W][DSEG]; int next_d [H][W]; patch_t p; int np;
    n_multi = 0; n_drop = 0; np = 0;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      next_d[y][x] = 0; for (int d = 0; d < DSEG; d++) cov[y][x][d] = 0;
    end
    num_views = 4'(nv);
    @(negedge clk); start[i] = 1; @(negedge clk); start[i] = 0;
    while (!(done[i] && q_empty[i])) begin
      @(negedge clk);
      if (!q_empty[i] && ($urandom % 2 == 0)) begin
        int used;
        p = q_data[i]; q_pop[i] = 1; @(negedge clk); q_pop[i] = 0;
        np++;
        if (p.dd < DSEG) n_multi++;
        checks++;
        if (p.last_slice != (int'(p.d0) + int'(p.dd) == DSEG)) begin failures++; $display("last_slice wrong"); end
        for (int y = p.h0; y < p.h0 + p.dh && y < H; y++)
          for (int x = p.w0; x < p.w0 + p.dw && x < W; x++) begin
            checks++;
            if (next_d[y][x] != p.d0) begin failures++; if (failures < 6) $display("depth order (%0d,%0d)", y, x); end
            next_d[y][x] = p.d0 + p.dd;
            for (int d = p.d0; d < p.d0 + p.dd; d++) cov[y][x][d]++;
          end
        used = 0;
        for (int s = 0; s < nv; s++) begin
          win_t wv; wv = p.win[s];
          if (!wv.valid) begin n_drop++; continue; end
          checks++;
          if (int'(wv.base) < used ||
              int'(wv.base) + ((int'(wv.y_hi) >> 1) - (int'(wv.y_lo) >> 1) + 1) * int'(wv.wb) > words_of[i]) begin
            failures++; $display("window %0d does not fit: base %0d", s, wv.base);
          end
          used = int'(wv.base) + ((int'(wv.y_hi) >> 1) - (int'(wv.y_lo) >> 1) + 1) * int'(wv.wb);
          for (int y = p.h0; y < p.h0 + p.dh && y < H; y++)
            for (int x = p.w0; x < p.w0 + p.dw && x < W; x++)
              for (int e = 0; e < 2; e++) begin
                real t, u, v;
                t = fr(cam.t_near) + fr(cam.seg_len) * ((e == 0) ? p.d0 : p.d0 + p.dd);
                proj(s, y, x, t, u, v);
                if (u < 0 || v < 0 || u > FEAT_W - 2 || v > FEAT_H - 2) continue;
                checks++;
                if (u < real'(wv.x_lo) - 0.01 || u > real'(wv.x_hi) + 0.01 ||
                    v < real'(wv.y_lo) - 0.01 || v > real'(wv.y_hi) + 0.01) begin
                  failures++;
                  if (failures < 6) $display("view %0d point (%f,%f) outside [%0d..%0d]x[%0d..%0d]",
                                             s, u, v, wv.x_lo, wv.x_hi, wv.y_lo, wv.y_hi);
                end
              end
        end
      end
    end
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int d = 0; d < DSEG; d++) begin
      checks++;
      if (cov[y][x][d] != 1) begin failures++; if (failures < 6) $display("coverage (%0d,%0d,%0d)=%0d", y, x, d, cov[y][x][d]); end
    end
    checks++;
    if (int'(n_patches[i]) != np) begin failures++; $display("n_patches %0d vs %0d", n_patches[i], np); end
    $display("run %0d: %0d patches, %0d fallback, %0d multi-slice, %0d dropped views",
             i, np, n_fallback[i], n_multi, n_drop);
  endtask

  initial begin
    int m, dr;
    fix_t s;
    start = '{0, 0, 0}; q_pop = '{0, 0, 0};
    s = fix_t'(65536 / (2 * W));
    cam = '0;
    cam.d0[0] = -32'sd16384; cam.d0[1] = -32'sd16384; cam.d0[2] = 32'sd65536;
    cam.dw[0] = s; cam.dh[1] = s;
    cam.t_near = 32'sd4 <<< 16; cam.seg_len = 32'sd65536;
    for (int v = 0; v < S_MAX; v++) begin
      P[v] = '0;
      P[v][0][0] = 100 <<< 16; P[v][0][2] = 100 <<< 16; P[v][0][3] = (50 + 10 * v) <<< 16;
      P[v][1][1] = 100 <<< 16; P[v][1][2] = 100 <<< 16;
      P[v][2][2] = 1 <<< 16;
    end
    repeat (3) @(posedge clk); rst_n = 1;
    run(0, 6, m, dr);
    checks += 2;
    if (n_fallback[0] != 0) begin failures++; $display("unexpected fallback"); end
    if (dr != 0) begin failures++; $display("unexpected dropped view"); end
    run(1, 10, m, dr);
    checks += 2;
    if (n_fallback[1] == 0) begin failures++; $display("fallback never used"); end
    if (dr == 0) begin failures++; $display("no view dropped on a full SRAM"); end
    run(2, 4, m, dr);
    checks++;
    if (m == 0) begin failures++; $display("no multi-slice patch"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
