// memory_controller: moves data from the off-chip DRAM into the chip.
//
// Two jobs (the paper names the block and says it handles the DRAM traffic;
// how it does so is this design's):
//  * weight load (pulse wload_start): reads wload_rows DRAM words from
//    WEIGHT_BASE on and writes the low 128 bits of each into consecutive
//    rows of the weight buffer.
//  * patch prefetch: whenever the patch queue is not empty and the fill side
//    of the prefetch double buffer is free, it pops a patch and reads, for
//    every valid source-view window, every feature vector (s,y,x) of the
//    window. Feature (y,x) goes to bank {y[0],x[0]} at word
//      base + ((y>>1) - (y_lo>>1)) * wb + ((x>>1) - (x_lo>>1))
//    (spatial interleaving). When all responses are in, fill_done hands the
//    SRAM and the patch descriptor to the read side.
// DRAM side: a request is taken when dram_req_valid && dram_req_ready;
// responses return in request order on dram_rsp_valid, with any latency.
// The destination of each outstanding request waits in a tag FIFO of
// OUTSTANDING entries, which bounds the requests in flight.
// DRAM addresses are in feature-vector words, spatially interleaved
// (gen_nerf_pkg::feat_addr).
module memory_controller
  import gen_nerf_pkg::*;
#(
  parameter int unsigned WORDS       = BANK_WORDS,
  parameter int unsigned WB_ROWS     = 512,
  parameter int unsigned OUTSTANDING = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [3:0]    num_views,
  // weight load
  input  logic          wload_start,
  input  logic [9:0]    wload_rows,
  output logic          wload_done,
  output logic          wb_we,
  output logic [$clog2(WB_ROWS)-1:0] wb_addr,
  output logic [127:0]  wb_data,
  // patch queue
  input  logic          q_empty,
  input  patch_t        q_data,
  output logic          q_pop,
  // prefetch buffer fill side
  input  logic          fill_ready,
  output logic          fill_we,
  output logic [1:0]    fill_bank,
  output logic [$clog2(WORDS)-1:0] fill_addr,
  output fvec_t         fill_data,
  output logic          fill_done,
  output patch_t        fill_patch,
  // DRAM
  output logic          dram_req_valid,
  input  logic          dram_req_ready,
  output logic [31:0]   dram_req_addr,
  input  logic          dram_rsp_valid,
  input  fvec_t         dram_rsp_data,
  // statistics
  output logic [31:0]   n_reads,
  output logic          idle
);
  typedef struct packed {
    logic        is_w;
    logic [1:0]  bank;
    logic [11:0] addr;
  } tag_t;

  typedef enum logic [2:0] {M_IDLE, M_WL, M_PF, M_DRAIN, M_DONE} mstate_t;
  mstate_t st;

  patch_t      pt;
  logic [3:0]  s;
  logic [15:0] x, y;
  logic [9:0]  wrow;
  logic        wl_pending;
  logic        wl_mode;

  tag_t tag_in, tag_out;
  logic tag_push, tag_pop, tag_full, tag_empty;
  logic [$clog2(OUTSTANDING+1)-1:0] tag_cnt;
  sync_fifo #(.T(tag_t), .DEPTH(OUTSTANDING)) u_tags (
    .clk, .rst_n, .push(tag_push), .wr_data(tag_in), .pop(tag_pop), .rd_data(tag_out),
    .full(tag_full), .empty(tag_empty), .count(tag_cnt)
  );

  // current request
  win_t cw;
  logic issuing;
  assign cw = pt.win[s];
  always_comb begin
    tag_in = '0;
    dram_req_addr = '0;
    issuing = 1'b0;
    if (st == M_WL) begin
      issuing = 1'b1;
      dram_req_addr = WEIGHT_BASE + 32'(wrow);
      tag_in.is_w = 1'b1;
      tag_in.addr = 12'(wrow);
    end else if (st == M_PF) begin
      issuing = 1'b1;
      dram_req_addr = feat_addr(int'(s), y, x);
      tag_in.bank = {y[0], x[0]};
      tag_in.addr = 12'(cw.base + 12'(32'(((y >> 1) - (cw.y_lo >> 1))) * 32'(cw.wb))
                    + 12'((x >> 1) - (cw.x_lo >> 1)));
    end
  end
  assign dram_req_valid = issuing && !tag_full;
  assign tag_push       = dram_req_valid && dram_req_ready;

  // responses
  assign tag_pop   = dram_rsp_valid;
  assign fill_we   = dram_rsp_valid && !tag_out.is_w;
  assign fill_bank = tag_out.bank;
  assign fill_addr = ($bits(fill_addr))'(tag_out.addr);
  assign fill_data = dram_rsp_data;
  assign wb_we     = dram_rsp_valid && tag_out.is_w;
  assign wb_addr   = ($bits(wb_addr))'(tag_out.addr);
  assign wb_data   = dram_rsp_data[15:0];

  assign q_pop      = (st == M_IDLE) && !wl_pending && !q_empty && fill_ready;
  assign fill_done  = (st == M_DONE);
  assign idle       = (st == M_IDLE) && !wl_pending;
  assign fill_patch = pt;

  // next valid view at or after v
  function automatic logic [3:0] next_view(patch_t p, logic [3:0] v, logic [3:0] nv);
    logic [3:0] r;
    r = 4'd15;
    for (int i = S_MAX-1; i >= 0; i--)
      if (i >= int'(v) && i < int'(nv) && p.win[i].valid) r = 4'(i);
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; pt <= '0; s <= '0; x <= '0; y <= '0; wrow <= '0;
      wl_pending <= 1'b0; wload_done <= 1'b0; n_reads <= '0; wl_mode <= 1'b0;
    end else begin
      if (wload_start) begin wl_pending <= 1'b1; wload_done <= 1'b0; end
      if (tag_push) n_reads <= n_reads + 1;
      case (st)
        M_IDLE: begin
          if (wl_pending) begin
            wl_pending <= 1'b0; wrow <= '0; wl_mode <= 1'b1; st <= M_WL;
          end else if (q_pop) begin
            logic [3:0] v;
            pt <= q_data;
            v = next_view(q_data, 4'd0, num_views);
            if (v == 4'd15) st <= M_DRAIN;
            else begin
              s <= v; x <= q_data.win[v].x_lo; y <= q_data.win[v].y_lo; st <= M_PF;
            end
          end
        end
        M_WL: if (tag_push) begin
          if (wrow + 1'b1 == wload_rows) st <= M_DRAIN;
          wrow <= wrow + 1'b1;
        end
        M_PF: if (tag_push) begin
          if (x != cw.x_hi) x <= x + 1'b1;
          else if (y != cw.y_hi) begin x <= cw.x_lo; y <= y + 1'b1; end
          else begin
            logic [3:0] v;
            v = next_view(pt, s + 1'b1, num_views);
            if (v == 4'd15 || s == 4'(S_MAX-1)) st <= M_DRAIN;
            else begin s <= v; x <= pt.win[v].x_lo; y <= pt.win[v].y_lo; end
          end
        end
        M_DRAIN: if (tag_empty) begin
          if (wl_mode) begin
            wload_done <= 1'b1; wl_mode <= 1'b0; st <= M_IDLE;
          end else st <= M_DONE;
        end
        M_DONE: begin
          // fill_done is high in this state; the buffer takes it at once
          st <= M_IDLE;
        end
        default: st <= M_IDLE;
      endcase
    end
  end
endmodule
