// kmeans_reduce: the Reducer core (Kmeans_Reduce) of the Map-Reduce k-means
// accelerator.
//
// One run, started by a pulse on ap_start, does the Reduce phase of one
// iteration:
//   1. ACC   - takes M blocks of intermediate results from the stream, each
//              K*(D+1)+1 words laid out as the mappers write them (per cluster a
//              32-bit count then D fp32 sums, last the fp32 distortion), and adds
//              counts, sums and distortions across the M mappers. One word per
//              cycle.
//   2. DIV   - one cluster per cycle, divides its D sums by its count with D fp32
//              dividers working in parallel, giving the new centroid.
//   3. WRITE - writes the new centroids over the old ones, word k*D+d from
//              centroid_addr, through the memory master port. A cluster that
//              received no sample is not written, so it keeps its old centroid.
//   4. Compares the total distortion with the one kept from the previous
//              iteration; iteration_done is set when |change| <= threshold. It
//              is valid from the ap_done pulse until the next ap_start.
// Following the paper: the stream input, memory-mapped centroid output,
// accumulation then pipelined division, the distortion comparison against a
// user threshold and the one-bit iteration_done. This design's own choices:
// the layout of the intermediate results, the absolute (not relative) change
// test, skipping empty clusters, and first_iter, which marks the first
// iteration of a run so that no stale distortion is compared against.
module kmeans_reduce
  import kmeans_pkg::*;
#(
  parameter int unsigned M = 12,  // mappers
  parameter int unsigned K = 4,   // clusters
  parameter int unsigned D = 4    // dimensions per sample
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ap_start,
  output logic        ap_done,
  output logic        busy,
  input  logic        first_iter,
  input  fp32_t       threshold,
  input  logic [31:0] centroid_addr,
  // intermediate results stream
  input  logic [31:0] s_med_tdata,
  input  logic        s_med_tvalid,
  output logic        s_med_tready,
  // memory-mapped master, write only (new centroids)
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output logic [31:0] mem_req_addr,
  output logic [31:0] mem_req_wdata,
  // results
  output logic        iteration_done,
  output fp32_t       distortion
);

  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1;
  localparam int unsigned DW = (D > 1) ? $clog2(D) : 1;
  localparam int unsigned MED_WORDS = K * (D + 1) + 1;
  localparam int unsigned TOTAL_WORDS = M * MED_WORDS;
  localparam int unsigned TW = $clog2(TOTAL_WORDS + 1);

  typedef enum logic [2:0] {S_IDLE, S_ACC, S_DIV, S_WRITE, S_CMP, S_DONE} state_t;
  state_t state;

  logic [31:0] cnt_acc [K];
  fp32_t       sum_acc [K][D];
  fp32_t       newc    [K][D];
  fp32_t       dist_acc;
  fp32_t       prev_dist;
  logic        prev_valid;

  logic [TW-1:0] in_cnt;      // words taken so far
  logic [KW-1:0] in_k;
  logic [DW:0]   in_p;        // 0: count, 1..D: sums, within a cluster
  logic          in_dist;     // next word is the distortion
  logic [KW-1:0] div_k;
  logic [KW-1:0] wr_k;
  logic [DW-1:0] wr_d;

  logic m_fire;
  assign s_med_tready = (state == S_ACC);
  assign m_fire       = s_med_tvalid && s_med_tready;
  assign busy         = (state != S_IDLE);
  assign distortion   = dist_acc;

  // D dividers for the cluster selected by div_k.
  fp32_t quot [D];
  fp32_t cnt_fp;
  always_comb begin
    cnt_fp = u32_to_fp(cnt_acc[div_k]);
    for (int d = 0; d < D; d++) quot[d] = fp_div(sum_acc[div_k][d], cnt_fp);
  end

  assign mem_req_valid = (state == S_WRITE) && (cnt_acc[wr_k] != 32'd0);
  assign mem_req_addr  = centroid_addr + 32'(WORD_BYTES) * (32'(wr_k) * 32'(D) + 32'(wr_d));
  assign mem_req_wdata = newc[wr_k][wr_d];

  fp32_t change;
  assign change = fp_abs(fp_sub(dist_acc, prev_dist));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      ap_done        <= 1'b0;
      iteration_done <= 1'b0;
      prev_valid     <= 1'b0;
      prev_dist      <= FP_ZERO;
      dist_acc       <= FP_ZERO;
      in_cnt         <= '0;
      in_k           <= '0;
      in_p           <= '0;
      in_dist        <= 1'b0;
      div_k          <= '0;
      wr_k           <= '0;
      wr_d           <= '0;
      for (int k = 0; k < K; k++) begin
        cnt_acc[k] <= '0;
        for (int d = 0; d < D; d++) begin
          sum_acc[k][d] <= FP_ZERO;
          newc[k][d]    <= FP_ZERO;
        end
      end
    end else begin
      ap_done <= 1'b0;
      unique case (state)
        S_IDLE: if (ap_start) begin
          state          <= S_ACC;
          iteration_done <= 1'b0;
          if (first_iter) prev_valid <= 1'b0;
          dist_acc <= FP_ZERO;
          in_cnt   <= '0;
          in_k     <= '0;
          in_p     <= '0;
          in_dist  <= 1'b0;
          for (int k = 0; k < K; k++) begin
            cnt_acc[k] <= '0;
            for (int d = 0; d < D; d++) sum_acc[k][d] <= FP_ZERO;
          end
        end

        S_ACC: if (m_fire) begin
          in_cnt <= in_cnt + 1'b1;
          if (in_dist) begin
            dist_acc <= fp_add(dist_acc, s_med_tdata);
            in_dist  <= 1'b0;
            in_k     <= '0;
            in_p     <= '0;
          end else begin
            if (in_p == '0) cnt_acc[in_k] <= cnt_acc[in_k] + s_med_tdata;
            else sum_acc[in_k][DW'(in_p - 1'b1)] <= fp_add(sum_acc[in_k][DW'(in_p - 1'b1)], s_med_tdata);
            if (in_p == (DW + 1)'(D)) begin
              in_p <= '0;
              if (in_k == KW'(K - 1)) in_dist <= 1'b1;
              else                    in_k    <= in_k + 1'b1;
            end else begin
              in_p <= in_p + 1'b1;
            end
          end
          if (in_cnt == TW'(TOTAL_WORDS - 1)) begin
            state <= S_DIV;
            div_k <= '0;
          end
        end

        S_DIV: begin
          for (int d = 0; d < D; d++) newc[div_k][d] <= quot[d];
          if (div_k == KW'(K - 1)) begin
            state <= S_WRITE;
            wr_k  <= '0;
            wr_d  <= '0;
          end else begin
            div_k <= div_k + 1'b1;
          end
        end

        S_WRITE: begin
          // An empty cluster is skipped whole; a full one advances per accepted write.
          if (cnt_acc[wr_k] == 32'd0 || (mem_req_ready && wr_d == DW'(D - 1))) begin
            wr_d <= '0;
            if (wr_k == KW'(K - 1)) state <= S_CMP;
            else                    wr_k  <= wr_k + 1'b1;
          end else if (mem_req_ready) begin
            wr_d <= wr_d + 1'b1;
          end
        end

        S_CMP: begin
          iteration_done <= prev_valid && !fp_lt(threshold, change);
          prev_dist      <= dist_acc;
          prev_valid     <= 1'b1;
          state          <= S_DONE;
        end

        S_DONE: begin
          ap_done <= 1'b1;
          state   <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
