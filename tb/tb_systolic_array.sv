// tb_systolic_array: multiplies random INT8 matrices A (N x K) and B (K x N)
// on one systolic array and compares every accumulator with a reference
// product computed in the testbench; checks the done latency (2N-1 cycles
// after the last operand beat) and that `clear` restarts accumulation.
module tb_systolic_array;
  localparam int N = 16;
  localparam int K = 20;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, in_last = 0, done;
  logic signed [7:0] a_col [N], b_row [N];
  logic signed [31:0] acc [N][N];
  int checks = 0, failures = 0;
  logic signed [7:0] A [N][K], B [K][N];
  int ref_c [N][N];

  systolic_array #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_batch();
    int t_last, t_done;
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
      ref_c[r][c] = 0;
      for (int k = 0; k < K; k++) ref_c[r][c] += A[r][k] * B[k][c];
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int k = 0; k < K; k++) begin
      in_valid = 1; in_last = (k == K-1);
      for (int i = 0; i < N; i++) begin a_col[i] = A[i][k]; b_row[i] = B[k][i]; end
      @(negedge clk);
    end
    in_valid = 0; in_last = 0;
    t_last = 0;
    while (!done) begin @(negedge clk); t_last++; end
    // done is seen at the negedge of the cycle it is high: 2N-1 cycles after last beat
    checks++;
    if (t_last != 2*N-1) begin
      failures++; $display("latency %0d", t_last);
    end
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
      checks++;
      if (acc[r][c] !== ref_c[r][c]) begin
        failures++;
        if (failures < 5) $display("mismatch %0d %0d: %0d vs %0d", r, c, acc[r][c], ref_c[r][c]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin a_col[i] = 0; b_row[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      for (int r = 0; r < N; r++) for (int k = 0; k < K; k++) A[r][k] = 8'($urandom);
      for (int k = 0; k < K; k++) for (int c = 0; c < N; c++) B[k][c] = 8'($urandom);
      if (rep == 2) for (int k = 0; k < K; k++) begin A[0][k] = -128; B[k][0] = -128; end
      run_batch();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
