// tb_prefetch_double_buffer: a writer fills patches (every word of every
// bank gets a value derived from patch number, bank and address) while a
// reader concurrently renders the previous patch: it waits for rd_valid,
// checks the descriptor order, reads random addresses of all four banks,
// checks the data (one-cycle latency) and releases the SRAM. Both sides
// stall randomly. Counted and required: a fill happening while the other
// SRAM is being read (ping-pong overlap), and the writer waiting on
// fill_ready because both SRAMs are full.
module tb_prefetch_double_buffer;
  import gen_nerf_pkg::*;
  localparam int WORDS = 64, NP = 12;
  localparam int AW = $clog2(WORDS);
  logic clk = 0, rst_n = 0;
  logic fill_ready, fill_we = 0, fill_done = 0, rd_valid, rd_en = 0, rd_release = 0;
  logic [1:0] fill_bank;
  logic [AW-1:0] fill_addr;
  fvec_t fill_data;
  patch_t fill_patch, rd_patch;
  logic [AW-1:0] rd_addr [NBANK];
  fvec_t rd_data [NBANK];
  int checks = 0, failures = 0, n_overlap = 0, n_full_wait = 0;

  prefetch_double_buffer #(.WORDS(WORDS)) dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic fvec_t pat(int p, int bk, int a);
    fvec_t f;
    for (int c = 0; c < C_FEAT; c++) f[c] = 8'(p * 37 + bk * 11 + a * 3 + c);
    return f;
  endfunction

  always_ff @(posedge clk) if (rst_n) begin
    if (fill_we && rd_valid) n_overlap++;
  end

  initial begin : writer
    fill_bank = 0; fill_addr = 0; fill_data = '0; fill_patch = '0;
    wait (rst_n);
    for (int p = 0; p < NP; p++) begin
      @(negedge clk);
      if (!fill_ready) n_full_wait++;
      while (!fill_ready) @(negedge clk);
      for (int a = 0; a < WORDS; a++)
        for (int bk = 0; bk < NBANK; bk++) begin
          while ($urandom % 4 == 0) begin fill_we = 0; @(negedge clk); end
          fill_we = 1; fill_bank = bk[1:0]; fill_addr = a[AW-1:0]; fill_data = pat(p, bk, a);
          @(negedge clk);
        end
      fill_we = 0;
      fill_patch = '0; fill_patch.h0 = 10'(p); fill_done = 1;
      @(negedge clk); fill_done = 0;
    end
  end

  initial begin : reader
    int ra [NBANK];
    repeat (3) @(posedge clk); rst_n = 1;
    for (int p = 0; p < NP; p++) begin
      @(negedge clk);
      while (!rd_valid) @(negedge clk);
      checks++;
      if (int'(rd_patch.h0) != p) begin failures++; $display("patch order %0d vs %0d", rd_patch.h0, p); end
      // slow reader on early patches so both SRAMs fill up, fast later
      for (int i = 0; i < ((p < 4) ? 8 * WORDS : WORDS / 2); i++) begin
        rd_en = 1;
        for (int bk = 0; bk < NBANK; bk++) begin ra[bk] = $urandom % WORDS; rd_addr[bk] = ra[bk][AW-1:0]; end
        @(negedge clk); rd_en = 0;
        for (int bk = 0; bk < NBANK; bk++) begin
          checks++;
          if (rd_data[bk] !== pat(p, bk, ra[bk])) begin
            failures++; if (failures < 5) $display("patch %0d bank %0d addr %0d bad", p, bk, ra[bk]);
          end
        end
        if ($urandom % 3 == 0) @(negedge clk);
      end
      rd_release = 1; @(negedge clk); rd_release = 0;
    end
    checks += 2;
    if (n_overlap == 0) begin failures++; $display("fill never overlapped a read"); end
    if (n_full_wait == 0) begin failures++; $display("writer never waited on a full buffer"); end
    $display("overlap=%0d full_wait=%0d", n_overlap, n_full_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
