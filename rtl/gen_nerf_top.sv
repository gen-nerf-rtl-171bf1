// gen_nerf_top: the Gen-NeRF accelerator. A frame is rendered as follows:
// the workload scheduler cuts the frame's H x W x D workload cube into point
// patches and queues them; the memory controller loads the network weights
// once, then, for each queued patch, prefetches the source-view features
// its frustum can touch into the free half of the prefetch double buffer;
// the rendering engine takes the full half, runs the coarse stage, builds
// the sampling PDF, runs the focused stage and composites pixels, then
// frees the half. Scheduling, prefetching and rendering overlap.
//
// The paper's on-chip memory and control buses are replaced by the
// point-to-point connections below. The DRAM is off chip: its port is a
// plain request/response interface (see memory_controller).
//
// Use: hold cam, P, num_views, tau and wload_rows stable, pulse start.
// Pixels come out on pix_*; frame_done rises when every patch has been
// rendered.
module gen_nerf_top
  import gen_nerf_pkg::*;
#(
  parameter int unsigned H        = IMG_H,       // rendered image height
  parameter int unsigned W        = IMG_W,       // rendered image width
  parameter int unsigned PF_WORDS = BANK_WORDS,  // words per prefetch bank
  parameter shape_t      CAND [N_CAND] = '{      // patch shape candidates, last = fallback
    '{dh: 5'd2, dw: 5'd8, dd: 4'd8},
    '{dh: 5'd4, dw: 5'd4, dd: 4'd8},
    '{dh: 5'd8, dw: 5'd4, dd: 4'd4},
    '{dh: 5'd8, dw: 5'd8, dd: 4'd2},
    '{dh: 5'd2, dw: 5'd4, dd: 4'd8}}
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  cam_t          cam,
  input  mat34_t        P [S_MAX],
  input  logic [3:0]    num_views,
  input  logic [15:0]   tau,
  input  logic [9:0]    wload_rows,
  // DRAM
  output logic          dram_req_valid,
  input  logic          dram_req_ready,
  output logic [31:0]   dram_req_addr,
  input  logic          dram_rsp_valid,
  input  fvec_t         dram_rsp_data,
  // pixels
  output logic          pix_valid,
  output logic [9:0]    pix_h,
  output logic [9:0]    pix_w,
  output logic [7:0]    pix_rgb [3],
  output logic          frame_done,
  // statistics
  output logic [31:0]   st_patches_sched,
  output logic [31:0]   st_fallback,
  output logic [31:0]   st_patches_done,
  output logic [31:0]   st_dram_reads,
  output logic [31:0]   st_coarse_pts,
  output logic [31:0]   st_focus_pts,
  output logic [31:0]   st_batches,
  output logic [31:0]   st_empty_rays,
  output logic [31:0]   st_engine_wait
);
  // scheduler -> queue -> memory controller
  logic   sch_done, q_empty, q_pop, mc_idle, eng_idle;
  patch_t q_data;
  workload_scheduler #(.H(H), .W(W), .WORDS(PF_WORDS), .CAND(CAND)) u_sched (
    .clk, .rst_n, .start, .cam, .P, .num_views, .done(sch_done),
    .q_empty, .q_data, .q_pop, .n_patches(st_patches_sched), .n_fallback(st_fallback)
  );

  // memory controller
  logic         fill_ready, fill_we, fill_done;
  logic [1:0]   fill_bank;
  logic [$clog2(PF_WORDS)-1:0] fill_addr;
  fvec_t        fill_data;
  patch_t       fill_patch;
  logic         wb_we, wload_done;
  logic [8:0]   wb_addr;
  logic [127:0] wb_data;
  memory_controller #(.WORDS(PF_WORDS)) u_mc (
    .clk, .rst_n, .num_views,
    .wload_start(start), .wload_rows, .wload_done,
    .wb_we, .wb_addr, .wb_data,
    .q_empty, .q_data, .q_pop,
    .fill_ready, .fill_we, .fill_bank, .fill_addr, .fill_data, .fill_done, .fill_patch,
    .dram_req_valid, .dram_req_ready, .dram_req_addr, .dram_rsp_valid, .dram_rsp_data,
    .n_reads(st_dram_reads), .idle(mc_idle)
  );

  // prefetch double buffer
  logic   pf_valid, pf_rd_en, pf_release;
  patch_t pf_patch;
  logic [$clog2(PF_WORDS)-1:0] pf_rd_addr [NBANK];
  fvec_t  pf_rd_data [NBANK];
  prefetch_double_buffer #(.WORDS(PF_WORDS)) u_pdb (
    .clk, .rst_n,
    .fill_ready, .fill_we, .fill_bank, .fill_addr, .fill_data, .fill_done, .fill_patch,
    .rd_valid(pf_valid), .rd_patch(pf_patch), .rd_en(pf_rd_en), .rd_addr(pf_rd_addr),
    .rd_data(pf_rd_data), .rd_release(pf_release)
  );

  // rendering engine
  rendering_engine #(.PF_WORDS(PF_WORDS)) u_eng (
    .clk, .rst_n, .cam, .P, .num_views, .tau,
    .pf_valid, .pf_patch, .pf_rd_en, .pf_rd_addr, .pf_rd_data, .pf_release,
    .wb_we, .wb_waddr(wb_addr), .wb_wdata(wb_data),
    .pix_valid, .pix_h, .pix_w, .pix_rgb,
    .n_coarse(st_coarse_pts), .n_focus(st_focus_pts), .n_batches(st_batches),
    .n_patches(st_patches_done), .n_empty_rays(st_empty_rays), .n_wait_cycles(st_engine_wait),
    .idle(eng_idle)
  );

    // the frame is done when everything is scheduled, nothing is queued,
  // being fetched or held in the prefetch buffer, and the engine is idle
  assign frame_done = sch_done && wload_done && q_empty && mc_idle && !pf_valid && eng_idle;
endmodule
