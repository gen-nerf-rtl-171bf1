// dram_model: behavioural stand-in for the off-chip DRAM, for testbenches
// only. It serves the accelerator's request/response port: a request is
// accepted when req_valid && req_ready (req_ready drops pseudo-randomly in
// STALL_PCT percent of cycles), and its data returns LAT cycles later, in
// order. Contents are computed from the address instead of stored:
//  * feature words (addr < WEIGHT_BASE) decode the spatially interleaved
//    address back to (s, y, x); every channel holds FVAL where x < XT and 0
//    elsewhere (a textured left part and an empty right part of the scene);
//  * weight rows (addr >= WEIGHT_BASE) hold W0..W3 in bytes 0..3, 0 elsewhere.
module dram_model
  import gen_nerf_pkg::*;
#(
  parameter int LAT       = 20,
  parameter int STALL_PCT = 10,
  parameter int XT        = 108,
  parameter int FVAL      = 64,
  parameter int W0 = 4, parameter int W1 = 2, parameter int W2 = 4, parameter int W3 = 8
) (
  input  logic        clk,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic [31:0] req_addr,
  output logic        rsp_valid,
  output fvec_t       rsp_data,
  output int          n_stalls
);
  typedef struct { logic [31:0] addr; longint due; } req_t;
  req_t   pend [$];
  longint cyc = 0;
  initial begin req_ready = 1'b1; rsp_valid = 1'b0; rsp_data = '0; n_stalls = 0; end

  function automatic fvec_t contents(logic [31:0] a);
    fvec_t f;
    f = '0;
    if (a >= WEIGHT_BASE) begin
      f[0] = 8'(W0); f[1] = 8'(W1); f[2] = 8'(W2); f[3] = 8'(W3);
    end else begin
      int q, x;
      q = int'(a >> 2);
      x = (q % (FEAT_W/2)) * 2 + int'(a[0]);
      for (int c = 0; c < C_FEAT; c++) f[c] = (x < XT) ? 8'(FVAL) : 8'd0;
    end
    return f;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (req_valid && req_ready) pend.push_back('{req_addr, cyc + LAT});
    rsp_valid <= 1'b0;
    if (pend.size() > 0 && pend[0].due <= cyc) begin
      rsp_valid <= 1'b1;
      rsp_data  <= contents(pend[0].addr);
      void'(pend.pop_front());
    end
    req_ready <= ($urandom_range(99) >= STALL_PCT);
    if (req_valid && !req_ready) n_stalls <= n_stalls + 1;
  end
endmodule
