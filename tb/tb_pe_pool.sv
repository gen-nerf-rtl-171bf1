// tb_pe_pool: uses a reduced pool of 5 arrays. Loads different random INT8
// matrix pairs into three arrays in an interleaved order through `sel`,
// then reads each one back through `rd_sel` and compares every accumulator
// with a reference product; arrays that were not selected must hold zero
// after their clear and must never raise `done`.
module tb_pe_pool;
  localparam int NA = 5, N = 16, K = 12;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, in_last = 0;
  logic [$clog2(NA)-1:0] sel = 0, rd_sel = 0;
  logic signed [7:0] a_col [N], b_row [N];
  logic signed [31:0] acc [N][N];
  logic [NA-1:0] done, done_seen;
  int checks = 0, failures = 0;
  logic signed [7:0] A [NA][N][K], B [NA][K][N];

  pe_pool #(.NA(NA), .N(N)) dut (.*);
  always #5 clk = ~clk;
  initial begin #400000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always_ff @(posedge clk) if (rst_n) done_seen <= done_seen | done;

  initial begin
    int order [3];
    order = '{3, 0, 4};
    done_seen = '0;
    for (int i = 0; i < N; i++) begin a_col[i] = 0; b_row[i] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int g = 0; g < NA; g++) begin
      for (int r = 0; r < N; r++) for (int k = 0; k < K; k++) A[g][r][k] = 8'($urandom);
      for (int k = 0; k < K; k++) for (int c = 0; c < N; c++) B[g][k][c] = 8'($urandom);
      @(negedge clk); sel = g[$clog2(NA)-1:0]; clear = 1; @(negedge clk); clear = 0;
    end
    // interleave the beats of the three arrays
    for (int k = 0; k < K; k++)
      foreach (order[j]) begin
        sel = order[j][$clog2(NA)-1:0]; in_valid = 1; in_last = (k == K-1);
        for (int i = 0; i < N; i++) begin a_col[i] = A[order[j]][i][k]; b_row[i] = B[order[j]][k][i]; end
        @(negedge clk);
      end
    in_valid = 0; in_last = 0;
    repeat (3*N) @(negedge clk);
    for (int g = 0; g < NA; g++) begin
      bit used; used = (g == 0 || g == 3 || g == 4);
      rd_sel = g[$clog2(NA)-1:0]; #1;
      checks++;
      if (done_seen[g] !== used) begin failures++; $display("array %0d done_seen %b", g, done_seen[g]); end
      for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
        int e; e = 0;
        if (used) for (int k = 0; k < K; k++) e += A[g][r][k] * B[g][k][c];
        checks++;
        if (acc[r][c] !== e) begin
          failures++; if (failures < 5) $display("array %0d [%0d][%0d] %0d vs %0d", g, r, c, acc[r][c], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
