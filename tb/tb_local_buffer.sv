// tb_local_buffer: random writes and reads of the 256 KB local buffer
// (128-bit words) against an associative-array model; read data appears
// one cycle after the read request.
module tb_local_buffer;
  localparam int WORDS = 256*1024*8/128;
  localparam int AW = $clog2(WORDS);
  logic clk = 0, we, re;
  logic [AW-1:0] waddr, raddr;
  logic [127:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [127:0] model [int];

  local_buffer dut (.*);
  always #5 clk = ~clk;
  initial begin #1000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    logic [AW-1:0] ra; logic do_rd;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    // write a random set, including both ends of the address range
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      we = 1; waddr = (i == 0) ? '0 : (i == 1) ? AW'(WORDS-1) : AW'($urandom % 256);
      wdata = {$urandom, $urandom, $urandom, $urandom};
      model[int'(waddr)] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      do_rd = 1; ra = (i == 0) ? '0 : (i == 1) ? AW'(WORDS-1) : AW'($urandom % 256);
      while (!model.exists(int'(ra))) ra = AW'($urandom % 256);
      re = 1; raddr = ra;
      // concurrent write to a different address must not disturb the read
      we = 1; waddr = AW'(256 + ($urandom % 256)); wdata = {$urandom, $urandom, $urandom, $urandom};
      model[int'(waddr)] = wdata;
      @(negedge clk); re = 0; we = 0;
      checks++;
      if (rdata !== model[int'(ra)]) begin failures++; $display("addr %0d got %h", ra, rdata); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
