// systolic_array: one N x N INT8 output-stationary systolic array of the PE
// pool (the paper's PE is "a systolic array" of 16x16 INT8 MACs; the
// dataflow inside is not given, output-stationary is this design's choice).
//
// It computes ACC = A * B for A (N x K) and B (K x N), K free. Each cycle
// with in_valid the caller presents column k of A (a_col[r] = A[r][k]) and
// row k of B (b_row[c] = B[k][c]); in_last marks k = K-1. Inputs are skewed
// inside (row r delayed r cycles, column c delayed c cycles), operands move
// right (A) and down (B) one PE per cycle, and PE(r,c) accumulates into a
// 32-bit register. `clear` zeroes all accumulators. `done` is high for one
// cycle, 2N-1 cycles after the in_last beat, when acc holds the result.
module systolic_array #(
  parameter int unsigned N = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      in_valid,
  input  logic                      in_last,
  input  logic signed [7:0]         a_col [N],
  input  logic signed [7:0]         b_row [N],
  output logic signed [31:0]        acc   [N][N],
  output logic                      done
);
  // skew lines
  logic signed [7:0] a_sk [N][N];   // a_sk[r][i]: delay i
  logic signed [7:0] b_sk [N][N];
  logic              v_sk [N][N];
  logic signed [7:0] a_reg [N][N];
  logic signed [7:0] b_reg [N][N];
  logic              v_reg [N][N];
  logic [$clog2(2*N+1)-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N; r++)
        for (int i = 1; i < N; i++) begin
          a_sk[r][i] <= '0; b_sk[r][i] <= '0; v_sk[r][i] <= 1'b0;
        end
    end else begin
      for (int r = 0; r < N; r++)
        for (int i = 1; i < N; i++) begin
          a_sk[r][i] <= a_sk[r][i-1];
          b_sk[r][i] <= b_sk[r][i-1];
          v_sk[r][i] <= v_sk[r][i-1];
        end
    end
  end
  always_comb begin
    for (int r = 0; r < N; r++) begin
      a_sk[r][0] = in_valid ? a_col[r] : '0;
      b_sk[r][0] = in_valid ? b_row[r] : '0;
      v_sk[r][0] = in_valid;
    end
  end

  // PE grid
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          a_reg[r][c] <= '0; b_reg[r][c] <= '0; v_reg[r][c] <= 1'b0; acc[r][c] <= '0;
        end
    end else begin
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          logic signed [7:0] ai, bi;
          logic vi;
          ai = (c == 0) ? a_sk[r][r] : a_reg[r][c-1];
          vi = (c == 0) ? v_sk[r][r] : v_reg[r][c-1];
          bi = (r == 0) ? b_sk[c][c] : b_reg[r-1][c];
          a_reg[r][c] <= ai;
          b_reg[r][c] <= bi;
          v_reg[r][c] <= vi;
          if (clear)   acc[r][c] <= '0;
          else if (vi) acc[r][c] <= acc[r][c] + 32'(ai * bi);
        end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      done <= 1'b0;
    end else begin
      done <= (cnt == 1);
      if (in_valid && in_last) cnt <= ($bits(cnt))'(2*N-1);
      else if (cnt != 0)       cnt <= cnt - 1'b1;
    end
  end
endmodule
