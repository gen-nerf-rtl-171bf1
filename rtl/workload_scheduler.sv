// workload_scheduler: run-time greedy 3D-point-patch partition.
//
// The workload of one frame is a cube of H x W pixels times D depth
// segments. The scheduler cuts it into point patches, each of which the
// memory controller prefetches and the rendering engine processes as a unit,
// choosing patch shapes so that the source-view features a patch needs
// (the area its frustum projects to on the source images) stay small.
//
// Parts, as in the paper's scheduler diagram:
//  * mask bitmap memory: one bit per pixel column, set when the column has
//    been assigned to a patch. The paper's constraint (1) (patches at the
//    same (h,w) and different d share one partition) makes a bit per pixel
//    sufficient: a chosen (dh,dw,dd) shape is applied to the whole depth
//    range, giving D/dd patches that are pushed one after the other.
//  * top-left sequencer: finds the first unassigned pixel in raster order.
//  * vertex projector (point_projector): projects the 8 corners of each
//    candidate frustum slice onto every source view.
//  * area calculator: the bounding box of the projected corners, widened by
//    one feature for bilinear interpolation and clipped to the feature map,
//    gives the prefetch window and its area per view.
//  * area comparator: keeps the candidate with the smallest total area per
//    pixel; candidates that leave the image, overlap assigned pixels or whose
//    window of any slice does not fit the prefetch SRAM (constraint (2)) are
//    rejected.
//  * patch queue (sync_fifo): the chosen patches with their windows.
//
// Choices of this design, not the paper's: the candidate table (default
// four shapes of 128 pixel-segments plus a 2x4x8 fallback that always fits,
// because every shape is made of aligned 2x4 pixel blocks), the bounding box
// in place of the exact projected tetragon, one vertex projected per cycle,
// and a view whose slice has a corner behind the source camera being
// dropped from that patch (its features read as zero).
//
// Interface: pulse `start` with the camera, the source projections and the
// number of views held stable; patches appear on the queue read port
// (q_empty / q_data / q_pop); `done` rises when every pixel is assigned.
module workload_scheduler
  import gen_nerf_pkg::*;
#(
  parameter int unsigned H       = IMG_H,
  parameter int unsigned W       = IMG_W,
  parameter int unsigned D       = DSEG,
  parameter int unsigned WORDS   = BANK_WORDS,
  parameter int unsigned QDEPTH  = 8,
  parameter shape_t      CAND [N_CAND] = '{
    '{dh: 5'd2, dw: 5'd8, dd: 4'd8},
    '{dh: 5'd4, dw: 5'd4, dd: 4'd8},
    '{dh: 5'd8, dw: 5'd4, dd: 4'd4},
    '{dh: 5'd8, dw: 5'd8, dd: 4'd2},
    '{dh: 5'd2, dw: 5'd4, dd: 4'd8}}   // fallback, always accepted
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  cam_t          cam,
  input  mat34_t        P [S_MAX],
  input  logic [3:0]    num_views,
  output logic          done,
  // patch queue read side
  output logic          q_empty,
  output patch_t        q_data,
  input  logic          q_pop,
  // statistics
  output logic [31:0]   n_patches,
  output logic [31:0]   n_fallback
);
  typedef enum logic [3:0] {
    S_IDLE, S_CLEAR, S_SEQ, S_CHECK, S_PROJ, S_FIN, S_NEXTC, S_MARK, S_PUSH, S_DONE
  } state_t;
  state_t st;

  // ---------------- mask bitmap memory ----------------
  logic [W-1:0] bm [H];
  logic [$clog2(H)-1:0] row;        // sequencer / check / mark row pointer
  logic [W-1:0] bm_row;
  assign bm_row = bm[row];

  // ---------------- anchor and candidate ----------------
  logic [9:0]  h0, w0;
  logic [$clog2(N_CAND)-1:0] ci;          // candidate being evaluated
  logic [$clog2(N_CAND)-1:0] best;
  logic        best_ok;
  logic [31:0] best_cost, cost;
  logic        cand_ok;
  logic        commit;                    // 0: evaluating, 1: pushing patches
  shape_t      shp;
  logic [4:0]  ck;                        // rows checked
  logic [3:0]  sl;                        // slice (in units of dd)
  logic [3:0]  vs;                        // view
  logic [2:0]  vx;                        // vertex
  logic [12:0] slice_words;
  logic        push_wait;

  assign shp = commit ? CAND[best] : CAND[ci];

  // ---------------- vertex projector ----------------
  fix_t  ph, pw, pt, pu, pv;
  logic  pvld, pok, pin;
  fix_t  t_a, t_b;
  always_comb begin
    t_a = cam.t_near + fix_t'(32'(sl) * 32'(shp.dd)) * cam.seg_len;
    t_b = t_a + fix_t'(32'(shp.dd)) * cam.seg_len;
    ph  = fix_t'({h0 + (vx[0] ? 10'(shp.dh) : 10'd0), 16'd0});
    pw  = fix_t'({w0 + (vx[1] ? 10'(shp.dw) : 10'd0), 16'd0});
    pt  = vx[2] ? t_b : t_a;
  end
  assign pin = (st == S_PROJ);
  point_projector u_vproj (
    .clk, .rst_n, .in_valid(pin), .cam, .P(P[vs]), .h(ph), .w(pw), .t(pt),
    .out_valid(pvld), .ok(pok), .u(pu), .v(pv)
  );

  // bounding box of the current view (including the projector output)
  fix_t umin, umax, vmin, vmax, umin_n, umax_n, vmin_n, vmax_n;
  logic bad, bad_n;
  always_comb begin
    umin_n = umin; umax_n = umax; vmin_n = vmin; vmax_n = vmax; bad_n = bad;
    if (pvld) begin
      if (!pok) bad_n = 1'b1;
      if (pu < umin_n) umin_n = pu;
      if (pu > umax_n) umax_n = pu;
      if (pv < vmin_n) vmin_n = pv;
      if (pv > vmax_n) vmax_n = pv;
    end
  end

  // ---------------- area calculator ----------------
  win_t        win_c;
  logic [31:0] area_c;
  logic [12:0] words_c;
  always_comb begin
    logic signed [31:0] xl, xh, yl, yh;
    logic [15:0] hb;
    xl = 32'(signed'(umin_n[31:16]));
    xh = 32'(signed'(umax_n[31:16])) + 1;
    yl = 32'(signed'(vmin_n[31:16]));
    yh = 32'(signed'(vmax_n[31:16])) + 1;
    win_c = '0;
    hb = '0;
    area_c = '0;
    words_c = '0;
    if (!bad_n && xh >= 0 && yh >= 0 && xl <= FEAT_W-1 && yl <= FEAT_H-1) begin
      if (xl < 0) xl = 0;
      if (yl < 0) yl = 0;
      if (xh > FEAT_W-1) xh = FEAT_W-1;
      if (yh > FEAT_H-1) yh = FEAT_H-1;
      win_c.valid = 1'b1;
      win_c.x_lo = 16'(xl); win_c.x_hi = 16'(xh);
      win_c.y_lo = 16'(yl); win_c.y_hi = 16'(yh);
      win_c.wb   = 12'((xh >>> 1) - (xl >>> 1) + 1);
      hb         = 16'((yh >>> 1) - (yl >>> 1) + 1);
      win_c.base = 12'(slice_words);
      words_c    = 13'(32'(win_c.wb) * 32'(hb));
      area_c     = 32'((xh - xl + 1) * (yh - yl + 1));
    end
  end

  // ---------------- patch queue ----------------
  patch_t pq_in;
  logic   pq_push, pq_full;
  logic [$clog2(QDEPTH+1)-1:0] pq_cnt;
  sync_fifo #(.T(patch_t), .DEPTH(QDEPTH)) u_queue (
    .clk, .rst_n, .push(pq_push), .wr_data(pq_in), .pop(q_pop), .rd_data(q_data),
    .full(pq_full), .empty(q_empty), .count(pq_cnt)
  );
  assign pq_push = (st == S_PUSH) && push_wait && !pq_full;

  // first zero of the current bitmap row (top-left sequencer)
  logic [9:0] first_free;
  logic       row_full;
  always_comb begin
    first_free = '0;
    row_full   = 1'b1;
    for (int i = W-1; i >= 0; i--)
      if (!bm_row[i]) begin first_free = 10'(i); row_full = 1'b0; end
  end

  logic [W-1:0] span_mask;
  always_comb span_mask = ((W)'(1) << shp.dw) - 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; row <= '0; h0 <= '0; w0 <= '0; ci <= '0; best <= '0;
      best_ok <= 1'b0; best_cost <= '0; cost <= '0; cand_ok <= 1'b0; commit <= 1'b0;
      ck <= '0; sl <= '0; vs <= '0; vx <= '0; slice_words <= '0; push_wait <= 1'b0;
      umin <= '0; umax <= '0; vmin <= '0; vmax <= '0; bad <= 1'b0;
      pq_in <= '0; done <= 1'b0; n_patches <= '0; n_fallback <= '0;
    end else begin
      case (st)
        S_IDLE: if (start) begin
          st <= S_CLEAR; row <= '0; done <= 1'b0; n_patches <= '0; n_fallback <= '0;
        end
        S_CLEAR: begin
          bm[row] <= '0;
          if (row == ($bits(row))'(H-1)) begin row <= '0; st <= S_SEQ; end
          else row <= row + 1'b1;
        end
        S_SEQ: begin
          if (row_full) begin
            if (row == ($bits(row))'(H-1)) st <= S_DONE;
            else row <= row + 1'b1;
          end else begin
            h0 <= 10'(row); w0 <= first_free;
            ci <= '0; best_ok <= 1'b0; commit <= 1'b0;
            ck <= '0; cand_ok <= 1'b1; st <= S_CHECK;
          end
        end
        S_CHECK: begin
          // bounds, then one bitmap row per cycle
          if (32'(h0) + 32'(shp.dh) > H || 32'(w0) + 32'(shp.dw) > W) begin
            cand_ok <= 1'b0; st <= S_NEXTC;
          end else if (ck == shp.dh) begin
            sl <= '0; vs <= '0; vx <= '0; cost <= '0; slice_words <= '0;
            umin <= 32'sh7fffffff; umax <= 32'sh80000000;
            vmin <= 32'sh7fffffff; vmax <= 32'sh80000000; bad <= 1'b0;
            row <= ($bits(row))'(h0);
            st <= S_PROJ;
          end else begin
            if (((bm[($bits(row))'(h0 + 10'(ck))] >> w0) & span_mask) != '0) begin
              cand_ok <= 1'b0; st <= S_NEXTC;
            end
            ck <= ck + 1'b1;
          end
        end
        S_PROJ: begin
          umin <= umin_n; umax <= umax_n; vmin <= vmin_n; vmax <= vmax_n; bad <= bad_n;
          vx <= vx + 1'b1;
          if (vx == 3'd7) st <= S_FIN;
        end
        S_FIN: begin
          // last corner arrives now: window of view vs for slice sl
          umin <= 32'sh7fffffff; umax <= 32'sh80000000;
          vmin <= 32'sh7fffffff; vmax <= 32'sh80000000; bad <= 1'b0;
          if (commit) pq_in.win[vs] <= win_c;
          if (!commit) cost <= cost + area_c;
          if (commit && 32'(slice_words) + 32'(words_c) > WORDS) pq_in.win[vs].valid <= 1'b0;
          slice_words <= slice_words + words_c;
          if (vs + 1'b1 < num_views) begin
            vs <= vs + 1'b1; st <= S_PROJ;
          end else begin
            // end of a slice
            vs <= '0;
            if (!commit) begin
              if (32'(slice_words) + 32'(words_c) > WORDS) cand_ok <= 1'b0;
              slice_words <= '0;
              if (32'(sl + 1'b1) * 32'(shp.dd) >= D) st <= S_NEXTC;
              else begin sl <= sl + 1'b1; st <= S_PROJ; end
            end else begin
              pq_in.h0 <= h0; pq_in.w0 <= w0; pq_in.dh <= shp.dh; pq_in.dw <= shp.dw;
              pq_in.d0 <= 4'(sl * shp.dd); pq_in.dd <= shp.dd;
              pq_in.last_slice <= (32'(sl + 1'b1) * 32'(shp.dd) >= D);
              for (int s = 0; s < S_MAX; s++)
                if (s >= int'(num_views)) pq_in.win[s] <= '0;
              push_wait <= 1'b1;
              st <= S_PUSH;
            end
          end
        end
        S_NEXTC: begin
          // area comparator: smaller area per pixel wins
          if (cand_ok && (!best_ok ||
              64'(cost) * 64'(CAND[best].dh * CAND[best].dw) <
              64'(best_cost) * 64'(shp.dh * shp.dw))) begin
            best <= ci; best_cost <= cost; best_ok <= 1'b1;
          end
          if (ci == ($bits(ci))'(N_CAND-2) && (best_ok || cand_ok)) begin
            row <= ($bits(row))'(h0); ck <= '0; commit <= 1'b1; st <= S_MARK;
          end else if (ci == ($bits(ci))'(N_CAND-2)) begin
            // nothing fits: fallback shape
            best <= ($bits(best))'(N_CAND-1); best_ok <= 1'b1;
            n_fallback <= n_fallback + 1;
            row <= ($bits(row))'(h0); ck <= '0; commit <= 1'b1; st <= S_MARK;
          end else begin
            ci <= ci + 1'b1; ck <= '0; cand_ok <= 1'b1; st <= S_CHECK;
          end
        end
        S_MARK: begin
          bm[row] <= bm[row] | (span_mask << w0);
          if (ck + 1'b1 == shp.dh) begin
            sl <= '0; vs <= '0; vx <= '0; slice_words <= '0;
            umin <= 32'sh7fffffff; umax <= 32'sh80000000;
            vmin <= 32'sh7fffffff; vmax <= 32'sh80000000; bad <= 1'b0;
            st <= S_PROJ;
          end else begin
            row <= row + 1'b1; ck <= ck + 1'b1;
          end
        end
        S_PUSH: begin
          if (!pq_full) begin
            push_wait <= 1'b0;
            n_patches <= n_patches + 1;
            slice_words <= '0;
            if (pq_in.last_slice) begin
              row <= ($bits(row))'(h0); st <= S_SEQ;
            end else begin
              sl <= sl + 1'b1; st <= S_PROJ;
            end
          end
        end
        S_DONE: done <= 1'b1;
        default: st <= S_IDLE;
      endcase
      if (start && st == S_DONE) begin
        st <= S_CLEAR; row <= '0; done <= 1'b0; n_patches <= '0; n_fallback <= '0;
      end
    end
  end
endmodule
