// tb_special_function_unit: random densities, step lengths, colours and
// incoming transmittance. The weight w = T(1-e^-sd) and the remaining
// transmittance T e^-sd are compared with a real-valued model (tolerance
// 0.2 % of full scale plus rounding); the colour update must equal
// c_in + (w*rgb)>>8 for the w actually produced. Includes sigma = 0
// (nothing absorbed), very large sigma*delta (fully opaque) and negative
// delta (treated as zero).
module tb_special_function_unit;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [15:0] sigma;
  logic signed [31:0] delta;
  logic [7:0] rgb [3];
  logic [16:0] t_in, w, t_out;
  logic [23:0] c_in [3], c_out [3];
  int checks = 0, failures = 0;

  special_function_unit dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    real x, e, we, te;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid = 1;
      sigma = 16'($urandom % 65536);
      delta = 32'($urandom % 65536);            // up to 1.0
      if (i % 7 == 0) delta = 32'($urandom % 2048);
      if (i == 1) sigma = 0;
      if (i == 2) begin sigma = 16'hFFFF; delta = 32'h0004_0000; end
      if (i == 3) delta = -32'sd5000;
      t_in = (i % 5 == 0) ? 17'd65536 : 17'($urandom % 65537);
      for (int c = 0; c < 3; c++) begin rgb[c] = 8'($urandom); c_in[c] = 24'($urandom % 4000000); end
      @(posedge clk); #1;
      x  = (real'(sigma) / 256.0) * ((delta < 0) ? 0.0 : real'(delta) / 65536.0);
      e  = $exp(-x);
      we = real'(t_in) * (1.0 - e);
      te = real'(t_in) * e;
      checks += 3;
      if (!out_valid) begin failures++; $display("out_valid low"); end
      if ((real'(w) - we) > 140.0 || (we - real'(w)) > 140.0) begin
        failures++; if (failures < 10) $display("w %0d exp %f (s=%0d d=%0d T=%0d)", w, we, sigma, delta, t_in);
      end
      if ((real'(t_out) - te) > 140.0 || (te - real'(t_out)) > 140.0) begin
        failures++; if (failures < 10) $display("T %0d exp %f", t_out, te);
      end
      for (int c = 0; c < 3; c++) begin
        checks++;
        if (c_out[c] !== c_in[c] + 24'((32'(w) * 32'(rgb[c])) >> 8)) begin
          failures++; $display("colour %0d", c);
        end
      end
      if (i == 1 || i == 3) begin checks++; if (w != 0 || t_out != t_in) begin failures++; $display("no absorption expected"); end end
      if (i == 2) begin checks++; if (t_out != 0) begin failures++; $display("opaque expected"); end end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
