// prefetch_double_buffer: the two prefetch SRAMs (paper: 256 KB each) used
// as a ping-pong pair: while the rendering engine reads the scene features
// of the current point patch from one SRAM, the memory controller fills the
// other with the next patch, hiding the DRAM latency.
//
// Each SRAM has NBANK = 4 banks and stores features with the paper's
// spatial interleaving: feature (y,x) of a source view lives in bank
// {y[0],x[0]}, so the four features around any point (a 2x2 neighbourhood)
// sit in four different banks and are read in one cycle without conflict.
// A bank word is one feature vector (C_FEAT INT8 = 256 bits); the memory
// controller and the preprocessing unit compute the word address within a
// bank from the patch's window description (see gen_nerf_pkg::win_t).
//
// Handshake (this design's choice): fill_ready = the fill-side SRAM is free.
// The writer writes words, then pulses fill_done with the patch descriptor;
// the SRAM becomes full and the fill side moves to the other SRAM.
// rd_valid = the read-side SRAM is full; rd_patch is its descriptor; reads
// return rd_data one cycle after rd_addr; rd_release frees the SRAM and the
// read side moves to the other one.
module prefetch_double_buffer
  import gen_nerf_pkg::*;
#(
  parameter int unsigned WORDS = BANK_WORDS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // fill side (memory controller)
  output logic                      fill_ready,
  input  logic                      fill_we,
  input  logic [1:0]                fill_bank,
  input  logic [$clog2(WORDS)-1:0]  fill_addr,
  input  fvec_t                     fill_data,
  input  logic                      fill_done,
  input  patch_t                    fill_patch,
  // read side (preprocessing unit)
  output logic                      rd_valid,
  output patch_t                    rd_patch,
  input  logic                      rd_en,
  input  logic [$clog2(WORDS)-1:0]  rd_addr [NBANK],
  output fvec_t                     rd_data [NBANK],
  input  logic                      rd_release
);
  logic   full [2];
  patch_t desc [2];
  logic   wsel, rsel;

  for (genvar hb = 0; hb < 2; hb++) begin : g_sram
    for (genvar bk = 0; bk < NBANK; bk++) begin : g_bank
      fvec_t mem [WORDS];
      fvec_t q;
      always_ff @(posedge clk) begin
        if (fill_we && wsel == hb && fill_bank == bk && !full[hb]) mem[fill_addr] <= fill_data;
        if (rd_en && rsel == hb) q <= mem[rd_addr[bk]];
      end
    end
  end

  // read mux: data comes from the SRAM that was selected when the read was issued
  logic rsel_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rsel_q <= 1'b0;
    else if (rd_en) rsel_q <= rsel;
  end
  assign rd_data[0] = rsel_q ? g_sram[1].g_bank[0].q : g_sram[0].g_bank[0].q;
  assign rd_data[1] = rsel_q ? g_sram[1].g_bank[1].q : g_sram[0].g_bank[1].q;
  assign rd_data[2] = rsel_q ? g_sram[1].g_bank[2].q : g_sram[0].g_bank[2].q;
  assign rd_data[3] = rsel_q ? g_sram[1].g_bank[3].q : g_sram[0].g_bank[3].q;

  assign fill_ready = !full[wsel];
  assign rd_valid   = full[rsel];
  assign rd_patch   = desc[rsel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full[0] <= 1'b0; full[1] <= 1'b0;
      desc[0] <= '0;   desc[1] <= '0;
      wsel <= 1'b0; rsel <= 1'b0;
    end else begin
      if (fill_done && !full[wsel]) begin
        full[wsel] <= 1'b1;
        desc[wsel] <= fill_patch;
        wsel       <= ~wsel;
      end
      if (rd_release && full[rsel]) begin
        full[rsel] <= 1'b0;
        rsel       <= ~rsel;
      end
    end
  end

  // a released SRAM must have been full; the writer only finishes a free one
  assert property (@(posedge clk) disable iff (!rst_n) rd_release |-> full[rsel]);
  assert property (@(posedge clk) disable iff (!rst_n) fill_done |-> !full[wsel]);
endmodule
