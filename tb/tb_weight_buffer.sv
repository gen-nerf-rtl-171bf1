// tb_weight_buffer: fills all 512 rows of the 8 KB weight buffer with
// random bytes, reads them back in random order and checks every signed
// byte of the row (one-cycle read latency).
module tb_weight_buffer;
  localparam int N = 16, ROWS = 8*1024/N;
  logic clk = 0, we, re;
  logic [$clog2(ROWS)-1:0] waddr, raddr;
  logic [N*8-1:0] wdata;
  logic signed [7:0] rrow [N];
  int checks = 0, failures = 0;
  logic [N*8-1:0] model [ROWS];

  weight_buffer dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      we = 1; waddr = r[$clog2(ROWS)-1:0];
      wdata = {$urandom, $urandom, $urandom, $urandom};
      if (r == 7) wdata = {N{8'h80}};   // all -128
      model[r] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 2000; i++) begin
      int r; r = $urandom % ROWS;
      @(negedge clk); re = 1; raddr = r[$clog2(ROWS)-1:0];
      @(negedge clk); re = 0;
      for (int k = 0; k < N; k++) begin
        checks++;
        if (rrow[k] !== $signed(model[r][k*8 +: 8])) begin
          failures++; $display("row %0d byte %0d got %0d", r, k, rrow[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
