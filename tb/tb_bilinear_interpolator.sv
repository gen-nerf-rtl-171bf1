// tb_bilinear_interpolator: random fractional positions, random INT8
// neighbour vectors and random validity masks (invalid neighbours count as
// zero). Compares every channel with an integer reference model:
// round(sum(weight*value) / 65536), saturated to INT8. Also checks the
// corner cases fx = fy = 0 (returns the top-left value exactly) and all
// neighbours at +127 / -128.
module tb_bilinear_interpolator;
  import gen_nerf_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [7:0] fx, fy;
  fvec_t nb [4];
  logic [3:0] nb_ok;
  fvec_t f;
  int checks = 0, failures = 0;

  bilinear_interpolator dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      int wt [4];
      @(negedge clk);
      in_valid = 1;
      fx = 8'($urandom); fy = 8'($urandom);
      nb_ok = (i % 3 == 0) ? 4'($urandom) : 4'hF;
      for (int k = 0; k < 4; k++) for (int c = 0; c < C_FEAT; c++) nb[k][c] = 8'($urandom);
      if (i == 0) begin fx = 0; fy = 0; end
      if (i == 1) for (int k = 0; k < 4; k++) nb[k] = {C_FEAT{8'sd127}};
      if (i == 2) for (int k = 0; k < 4; k++) nb[k] = {C_FEAT{-8'sd128}};
      wt[0] = (256 - fx) * (256 - fy); wt[1] = fx * (256 - fy);
      wt[2] = (256 - fx) * fy;         wt[3] = fx * fy;
      @(posedge clk); #1;
      checks++;
      if (!out_valid) begin failures++; $display("out_valid low"); end
      for (int c = 0; c < C_FEAT; c++) begin
        int s, r;
        s = 0;
        for (int k = 0; k < 4; k++) if (nb_ok[k]) s += wt[k] * int'(nb[k][c]);
        r = (s + 32768) >>> 16;
        if (r > 127) r = 127;
        if (r < -128) r = -128;
        checks++;
        if (int'(f[c]) != r) begin
          failures++; if (failures < 10) $display("ch %0d got %0d exp %0d", c, f[c], r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
