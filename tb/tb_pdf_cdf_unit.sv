// tb_pdf_cdf_unit: reduced size (128 bins, up to 32 bins per ray). Writes
// random coarse hitting probabilities (some rays all below the threshold,
// some bins exactly at it), starts the conversion and compares q, the CDF,
// the total, the bin count and the number of critical points with an
// integer model of q = (w * ((N_cr << 20) / W)) >> 8. While a second
// conversion runs, the previous result must stay readable (ping-pong); a
// patch with no critical point must report total = 0.
module tb_pdf_cdf_unit;
  localparam int NB = 128, NRB = 32;
  logic clk = 0, rst_n = 0, w_we = 0, start = 0, busy, done;
  logic [$clog2(NB)-1:0] w_idx;
  logic [15:0] w_data, tau;
  logic [6:0] n_rays;
  logic [5:0] ncb;
  logic [31:0] cdf [NB], q [NB], total, n_critical;
  logic [$clog2(NB):0] n_bins;
  int checks = 0, failures = 0;
  int W [NB];
  longint eq [NB], ecdf [NB];
  longint etot; int encr;

  pdf_cdf_unit #(.NB(NB), .NRB(NRB)) dut (.*);
  always #5 clk = ~clk;
  initial begin #500000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic load(int nr, int nc, bit none_critical);
    for (int b = 0; b < nr * nc; b++) begin
      W[b] = $urandom % 30000;
      if ((b / nc) % 3 == 1 || none_critical) W[b] = $urandom % int'(tau);
      if (b % 7 == 3 && !none_critical) W[b] = tau;
      @(negedge clk); w_we = 1; w_idx = b[$clog2(NB)-1:0]; w_data = 16'(W[b]);
    end
    @(negedge clk); w_we = 0;
    // model
    etot = 0; encr = 0;
    for (int j = 0; j < nr; j++) begin
      int cnt; longint ws, sj;
      cnt = 0; ws = 0;
      for (int k = 0; k < nc; k++) begin
        if (W[j*nc+k] >= tau && W[j*nc+k] != 0) cnt++;
        ws += W[j*nc+k];
      end
      encr += cnt;
      sj = (ws == 0) ? 0 : ((longint'(cnt) << 20) / ws);
      for (int k = 0; k < nc; k++) begin
        eq[j*nc+k] = (longint'(W[j*nc+k]) * sj) >> 8;
        etot += eq[j*nc+k];
        ecdf[j*nc+k] = etot;
      end
    end
    if (encr == 0) etot = 0;
  endtask

  task automatic compare(int nr, int nc);
    checks += 3;
    if (int'(n_bins) != nr * nc) begin failures++; $display("n_bins %0d", n_bins); end
    if (longint'(total) != etot) begin failures++; $display("total %0d exp %0d", total, etot); end
    if (int'(n_critical) != encr) begin failures++; $display("ncr %0d exp %0d", n_critical, encr); end
    for (int b = 0; b < nr * nc; b++) begin
      checks += 2;
      if (longint'(q[b]) != eq[b]) begin failures++; if (failures < 6) $display("q[%0d] %0d exp %0d", b, q[b], eq[b]); end
      if (longint'(cdf[b]) != ecdf[b]) begin failures++; if (failures < 6) $display("cdf[%0d] %0d exp %0d", b, cdf[b], ecdf[b]); end
    end
  endtask

  initial begin
    int nr, nc;
    logic [31:0] keep_tot, keep_c5;
    tau = 16'd655;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 6; rep++) begin
      nc = (rep % 2) ? 32 : 4 + ($urandom % 12);
      nr = NB / nc;
      if (nr > 64) nr = 64;
      load(nr, nc, rep == 4);
      keep_tot = total; keep_c5 = cdf[5];
      @(negedge clk); n_rays = 7'(nr); ncb = 6'(nc); start = 1; @(negedge clk); start = 0;
      while (!done) begin
        @(negedge clk);
        if (busy) begin
          checks++;
          if (total !== keep_tot || cdf[5] !== keep_c5) begin failures++; $display("read half changed while building"); end
        end
      end
      @(negedge clk);
      compare(nr, nc);
      if (rep == 4) begin checks++; if (total != 0) begin failures++; $display("expected total 0"); end end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
