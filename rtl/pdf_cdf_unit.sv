// pdf_cdf_unit: the "PDF to CDF convertor" of the preprocessing unit, with
// its accumulator array and ping-pong buffer.
//
// After the coarse stage the rendering engine writes the hitting
// probability w_k^j of every coarse bin k of every ray j of the patch
// (w_we/w_idx/w_data, index j*ncb + k). On `start` the unit builds the
// sampling distribution of the paper's focused sampling,
//   P(k,j) = P(j) * P(k|j),  P(j) ~ N_j^cr (points with w >= tau on ray j),
//   P(k|j) = w_k^j / sum_k w_k^j,
// in unnormalised form q_{j,k} = N_j^cr * w_k^j / W_j (W_j = sum_k w_k^j),
// and its running sum (the CDF) over all bins of all rays in ray order:
//   cdf[b] = q[0] + ... + q[b].
// Per ray it takes two cycles: one for the critical-point count, the weight
// sum and one division s_j = (N_j^cr << 20) / W_j, one for the multiply
// q = (w * s_j) >> 8 (Q.12) and the prefix sums of the ray's bins in the
// accumulator array. Results go to one half of the ping-pong buffer; at the
// end (done pulse) the halves swap, so the sampler reads a finished CDF
// while the next one is built. Outputs cdf/q/total/n_bins are the read half.
// total = 0 means no ray had a critical point (the sampler then samples
// uniformly). The unnormalised form, division once per ray and the number
// formats are this design's choices.
module pdf_cdf_unit
  import gen_nerf_pkg::*;
#(
  parameter int unsigned NB  = MAX_BINS,
  parameter int unsigned NRB = MAX_RAY_BINS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    w_we,
  input  logic [$clog2(NB)-1:0]   w_idx,
  input  logic [15:0]             w_data,
  input  logic                    start,
  input  logic [6:0]              n_rays,
  input  logic [5:0]              ncb,
  input  logic [15:0]             tau,
  output logic                    busy,
  output logic                    done,
  output logic [31:0]             cdf [NB],
  output logic [31:0]             q   [NB],
  output logic [31:0]             total,
  output logic [$clog2(NB):0]     n_bins,
  output logic [31:0]             n_critical
);
  logic [15:0] wm [NB];
  logic [31:0] cdf_m [2][NB];
  logic [31:0] q_m   [2][NB];
  logic [31:0] tot_m [2];
  logic [$clog2(NB):0] nb_m [2];
  logic        wsel;
  logic        phase;
  logic [6:0]  j;
  logic [31:0] run;
  logic [25:0] sj;
  logic [31:0] ncr_acc;

  // row of ray j
  logic [15:0] wr [NRB];
  logic [5:0]  cnt;
  logic [21:0] wsum;
  always_comb begin
    cnt  = '0;
    wsum = '0;
    for (int k = 0; k < NRB; k++) begin
      logic [$clog2(NB)+1:0] idx;
      idx   = ($bits(idx))'(32'(j) * 32'(ncb) + 32'(k));
      wr[k] = (k < int'(ncb) && idx < ($bits(idx))'(NB)) ? wm[idx[$clog2(NB)-1:0]] : 16'd0;
      if (k < int'(ncb) && wr[k] >= tau && wr[k] != 0) cnt = cnt + 1'b1;
      wsum = wsum + 22'(wr[k]);
    end
  end

  always_ff @(posedge clk) if (w_we) wm[w_idx] <= w_data;

  assign cdf    = cdf_m[~wsel];
  assign q      = q_m[~wsel];
  assign total  = tot_m[~wsel];
  assign n_bins = nb_m[~wsel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; wsel <= 1'b0; phase <= 1'b0; j <= '0; run <= '0;
      sj <= '0; ncr_acc <= '0; n_critical <= '0;
      tot_m[0] <= '0; tot_m[1] <= '0; nb_m[0] <= '0; nb_m[1] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; phase <= 1'b0; j <= '0; run <= '0; ncr_acc <= '0;
      end else if (busy) begin
        if (!phase) begin
          sj      <= (wsum == 0) ? 26'd0 : 26'((32'(cnt) << 20) / 32'(wsum));
          ncr_acc <= ncr_acc + 32'(cnt);
          phase   <= 1'b1;
        end else begin
          logic [31:0] acc;
          acc = run;
          for (int k = 0; k < NRB; k++) begin
            logic [$clog2(NB)+1:0] idx;
            logic [31:0] qk;
            idx = ($bits(idx))'(32'(j) * 32'(ncb) + 32'(k));
            qk  = 32'((42'(wr[k]) * 42'(sj)) >> 8);
            acc = acc + qk;
            if (k < int'(ncb) && idx < ($bits(idx))'(NB)) begin
              cdf_m[wsel][idx[$clog2(NB)-1:0]] <= acc;
              q_m[wsel][idx[$clog2(NB)-1:0]]   <= qk;
            end
          end
          run   <= acc;
          phase <= 1'b0;
          if (j + 1'b1 == n_rays) begin
            tot_m[wsel] <= (ncr_acc == 0) ? 32'd0 : acc;
            nb_m[wsel]  <= ($bits(n_bins))'(32'(n_rays) * 32'(ncb));
            n_critical  <= ncr_acc;
            wsel <= ~wsel;
            busy <= 1'b0;
            done <= 1'b1;
          end
          j <= j + 1'b1;
        end
      end
    end
  end
endmodule
