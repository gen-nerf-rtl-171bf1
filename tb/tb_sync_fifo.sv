// tb_sync_fifo: random push/pop traffic against a queue model.
// Checks first-word fall-through data, full/empty flags and the count
// every cycle; pushes when full and pops when empty are not issued.
module tb_sync_fifo;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0, push, pop, full, empty;
  logic [15:0] wr_data, rd_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [15:0] model [$];

  sync_fifo #(.T(logic [15:0]), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    push = 0; pop = 0; wr_data = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      checks++;
      if (empty !== (model.size() == 0) || full !== (model.size() == DEPTH) ||
          int'(count) != model.size()) begin
        failures++; $display("flag mismatch size=%0d count=%0d", model.size(), count);
      end
      if (model.size() > 0) begin
        checks++;
        if (rd_data !== model[0]) begin failures++; $display("data %h exp %h", rd_data, model[0]); end
      end
      // bias the traffic so both the full and the empty state are reached
      push    = !full  && (($urandom % 100) < ((cyc / 500) % 2 ? 70 : 30));
      pop     = !empty && (($urandom % 100) < ((cyc / 500) % 2 ? 30 : 70));
      wr_data = 16'($urandom);
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(wr_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
