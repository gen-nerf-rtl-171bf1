// tb_point_projector: random cameras and projection matrices (pinhole with
// focal length, principal point and a translation). For random pixels and
// depths the projected (u,v) is compared with a real-valued model within
// 0.05 feature pixels; points behind a source camera (c <= 0) must report
// ok = 0.
module tb_point_projector;
  import gen_nerf_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, ok;
  cam_t cam;
  mat34_t P;
  fix_t h, w, t, u, v;
  int checks = 0, failures = 0, n_behind = 0;

  point_projector dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic real fr(fix_t x); return real'(x) / 65536.0; endfunction
  function automatic fix_t tf(real x); return fix_t'($rtoi(x * 65536.0)); endfunction
  function automatic real rnd(real lo, real hi); return lo + (hi - lo) * real'($urandom % 10000) / 10000.0; endfunction

  initial begin
    real d [3], X [3], a, b, c;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      for (int k = 0; k < 3; k++) begin
        cam.o[k] = tf(rnd(-0.5, 0.5)); cam.dw[k] = '0; cam.dh[k] = '0;
      end
      cam.d0 = '{tf(1.0), tf(rnd(-0.3, 0.3)), tf(rnd(-0.3, 0.3))};  // index 0 = x
      cam.dw[0] = tf(rnd(0.0, 0.002)); cam.dh[1] = tf(rnd(0.0, 0.002));
      cam.t_near = tf(2.0); cam.seg_len = tf(1.0);
      P = '0;
      P[0][0] = tf(rnd(80, 120)); P[0][2] = tf(100.0); P[0][3] = tf(rnd(-50, 50));
      P[1][1] = tf(rnd(80, 120)); P[1][2] = tf(100.0); P[1][3] = tf(rnd(-50, 50));
      P[2][2] = tf(1.0);          P[2][3] = tf((i % 10 == 0) ? -20.0 : rnd(-0.5, 0.5));
      h = tf(real'($urandom % 800)); w = tf(real'($urandom % 800));
      t = tf(rnd(2.0, 12.0));
      in_valid = 1;
      for (int k = 0; k < 3; k++) begin
        d[k] = fr(cam.d0[k]) + fr(w) * fr(cam.dw[k]) + fr(h) * fr(cam.dh[k]);
        X[k] = fr(cam.o[k]) + fr(t) * d[k];
      end
      a = fr(P[0][0]) * X[0] + fr(P[0][1]) * X[1] + fr(P[0][2]) * X[2] + fr(P[0][3]);
      b = fr(P[1][0]) * X[0] + fr(P[1][1]) * X[1] + fr(P[1][2]) * X[2] + fr(P[1][3]);
      c = fr(P[2][0]) * X[0] + fr(P[2][1]) * X[1] + fr(P[2][2]) * X[2] + fr(P[2][3]);
      @(posedge clk); #1;
      checks += 2;
      if (!out_valid) begin failures++; $display("out_valid low"); end
      if (ok !== (c > 0.001)) begin
        if (c > 0.001 || c < -0.001) begin failures++; $display("ok %b c %f", ok, c); end
      end
      if (!ok) n_behind++;
      if (ok && c > 0.5) begin
        checks += 2;
        if ((fr(u) - a / c) > 0.05 || (a / c - fr(u)) > 0.05) begin failures++; $display("u %f exp %f", fr(u), a / c); end
        if ((fr(v) - b / c) > 0.05 || (b / c - fr(v)) > 0.05) begin failures++; $display("v %f exp %f", fr(v), b / c); end
      end
    end
    checks++;
    if (n_behind == 0) begin failures++; $display("no point behind a camera was produced"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
