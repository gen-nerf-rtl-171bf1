// tb_inverse_sampler: reduced size (128 bins). The testbench builds a
// piecewise-constant distribution over rays x coarse bins (random bin
// masses, some rays and bins empty), runs the sampler with random
// back-pressure and checks: exactly ns samples with `last` on the final
// one; every sample falls inside a bin of non-zero mass and at a depth
// inside that bin; samples come grouped by ray with non-decreasing depth;
// the number of samples per ray matches its share of the mass within the
// stratification error (2 samples). With total = 0 every bin must be
// sampled equally (uniform fallback).
module tb_inverse_sampler;
  import gen_nerf_pkg::*;
  localparam int NB = 128;
  logic clk = 0, rst_n = 0, start = 0, busy, out_valid, out_ready, out_last;
  logic [10:0] ns;
  logic [5:0] ncb;
  logic [$clog2(NB):0] n_bins;
  logic [31:0] cdf [NB], q [NB], total;
  fix_t t0, dc, out_t;
  logic [6:0] out_ray;
  int checks = 0, failures = 0;

  inverse_sampler #(.NB(NB)) dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run(int nr, int nc, int nsamp, bit uniform);
    int got [64]; int prev_ray; longint prev_t, mass [64], tot; int cnt; bit seen_last;
    tot = 0;
    for (int j = 0; j < 64; j++) begin got[j] = 0; mass[j] = 0; end
    for (int b = 0; b < NB; b++) begin q[b] = 0; cdf[b] = 0; end
    for (int b = 0; b < nr * nc; b++) begin
      q[b] = uniform ? 0 : (((b / nc) % 4 == 2 || $urandom % 5 == 0) ? 0 : 1 + $urandom % 5000);
      tot += q[b]; cdf[b] = 32'(tot); mass[b / nc] += q[b];
    end
    total = uniform ? 0 : 32'(tot);
    ns = 11'(nsamp); ncb = 6'(nc); n_bins = ($bits(n_bins))'(nr * nc);
    t0 = 32'h0004_0000; dc = 32'h0000_4000;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cnt = 0; prev_ray = -1; prev_t = 0; seen_last = 0;
    while (!seen_last) begin
      out_ready = ($urandom % 4 != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        int b, k; longint tl;
        cnt++;
        seen_last = out_last;
        checks++;
        if (out_last != (cnt == nsamp)) begin failures++; $display("last at %0d", cnt); end
        k = int'((longint'(out_t) - longint'(t0)) / longint'(dc));
        b = int'(out_ray) * nc + k;
        checks += 2;
        if (out_t < t0 || k >= nc || (!uniform && q[b] == 0)) begin
          failures++; if (failures < 6) $display("sample in empty/outside bin ray %0d t %h", out_ray, out_t);
        end
        if (int'(out_ray) < prev_ray || (int'(out_ray) == prev_ray && longint'(out_t) < prev_t)) begin
          failures++; $display("order broken");
        end
        prev_ray = out_ray; prev_t = out_t;
        if (out_ray < 64) got[out_ray]++;
      end
      @(negedge clk);
      if (cnt > nsamp + 5) break;
    end
    out_ready = 0;
    checks++;
    if (cnt != nsamp) begin failures++; $display("count %0d exp %0d", cnt, nsamp); end
    for (int j = 0; j < nr; j++) begin
      real e;
      e = uniform ? real'(nsamp) / nr : real'(nsamp) * real'(mass[j]) / real'(tot);
      checks++;
      if (real'(got[j]) > e + 2.0 || real'(got[j]) < e - 2.0) begin
        failures++; $display("ray %0d got %0d exp %f", j, got[j], e);
      end
    end
  endtask

  initial begin
    out_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(16, 8, 256, 0);
    run(4, 32, 100, 0);
    run(32, 4, 512, 0);
    run(16, 8, 128, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
