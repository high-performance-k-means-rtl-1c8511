// kmeans_map: the Mapper core (Kmeans_Map) of the Map-Reduce k-means
// accelerator.
//
// One run, started by a pulse on ap_start, does the work of one Map phase for
// one part of the sample set:
//   1. LOAD  - reads the K x D centroids (fp32, centroid k dimension d at word
//              k*D+d from centroid_addr) over the memory master port and caches
//              them in registers.
//   2. RUN   - takes n_samples samples from the sample stream, one dimension per
//              beat. While the dimensions arrive, the squared Euclidean distance
//              to all K centroids is accumulated in parallel (one fp subtract,
//              multiply and add per centroid per beat). With the last dimension
//              the nearest centroid is picked (lowest index on a tie) and the
//              sample moves to a second stage, which emits its label on the label
//              stream and, in the same cycle, adds the sample to that cluster's
//              sums, increments its count and adds the distance to the
//              distortion. The first stage meanwhile takes the next sample, so a
//              new sample is accepted every D cycles (initiation interval D) as
//              long as both streams keep up.
//   3. WRITE - writes the intermediate results, K*(D+1)+1 words from
//              mediate_addr: for each cluster k its count (unsigned integer)
//              then its D partial sums (fp32), and last the distortion (fp32).
//   4. ap_done pulses for one cycle.
// Following the paper: centroids and intermediate results share one
// memory-mapped master, samples and labels are streams, distance is Euclidean
// and all arithmetic is single-precision float, one label per sample.
// This design's own choices: the memory port is a simple valid/ready request
// with an in-order read response instead of full AXI4 bursts; squared distance
// is used (no square root, which leaves the nearest centroid unchanged) and the
// distortion is the sum of squared distances; a label is one 32-bit word;
// the label stream's tlast marks the last label of the run.
// Reset note: rst_n is an asynchronous reset; it is also sampled by the
// concurrent assertions (disable iff) in this module or below it, which lint
// reports as a net used both ways. The assertions are checks only.
module kmeans_map
  import kmeans_pkg::*;
#(
  parameter int unsigned K = 4,   // clusters
  parameter int unsigned D = 4    // dimensions per sample
) (
  input  logic        clk,
  input  logic        rst_n,
  // control (HLS block-level style)
  input  logic        ap_start,
  output logic        ap_done,
  output logic        busy,
  input  logic [31:0] n_samples,
  input  logic [31:0] centroid_addr,
  input  logic [31:0] mediate_addr,
  // sample stream, one fp32 dimension per beat
  input  fp32_t       s_sample_tdata,
  input  logic        s_sample_tvalid,
  output logic        s_sample_tready,
  // label stream
  output logic [31:0] m_label_tdata,
  output logic        m_label_tvalid,
  input  logic        m_label_tready,
  output logic        m_label_tlast,
  // memory-mapped master for centroids (read) and intermediate results (write)
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output logic        mem_req_we,
  output logic [31:0] mem_req_addr,
  output logic [31:0] mem_req_wdata,
  input  logic        mem_rsp_valid,
  input  logic [31:0] mem_rsp_rdata
);

  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1;
  localparam int unsigned DW = (D > 1) ? $clog2(D) : 1;
  localparam int unsigned MED_WORDS = K * (D + 1) + 1;
  localparam int unsigned MW = $clog2(MED_WORDS + 1);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_RUN, S_WRITE, S_DONE} state_t;
  state_t state;

  fp32_t       cent [K][D];
  fp32_t       sums [K][D];
  logic [31:0] cnt  [K];
  fp32_t       distortion;

  // ---------------- LOAD ----------------
  logic [KW-1:0] ld_k;
  logic [DW-1:0] ld_d;
  logic          ld_wait;     // read issued, waiting for its response

  // ---------------- RUN, stage 1 ----------------
  logic [DW-1:0] dim;
  fp32_t         dacc [K];
  fp32_t         sbuf [D];
  logic [31:0]   n_in;        // samples fully accepted

  // ---------------- RUN, stage 2 ----------------
  logic          s2_valid;
  logic [KW-1:0] s2_label;
  fp32_t         s2_dist;
  fp32_t         s2_samp [D];
  logic [31:0]   n_out;       // labels emitted

  // ---------------- WRITE ----------------
  logic [MW-1:0] wr_idx;
  logic [KW-1:0] wr_k;
  logic [DW:0]   wr_p;        // 0: count, 1..D: sums

  logic s_fire, l_fire, s2_free;
  assign l_fire  = m_label_tvalid && m_label_tready;
  assign s2_free = !s2_valid || m_label_tready;
  assign s_sample_tready = (state == S_RUN) && (n_in < n_samples) &&
                           (dim != DW'(D - 1) || s2_free);
  assign s_fire = s_sample_tvalid && s_sample_tready;

  assign m_label_tvalid = s2_valid;
  assign m_label_tdata  = 32'(s2_label);
  assign m_label_tlast  = s2_valid && (n_out == n_samples - 32'd1);
  assign busy           = (state != S_IDLE);

  // Distances including the beat being accepted, and the nearest centroid.
  fp32_t         dnew [K];
  logic [KW-1:0] best_k;
  fp32_t         best_d;
  always_comb begin
    for (int k = 0; k < K; k++) begin
      fp32_t diff, sq;
      diff = fp_sub(s_sample_tdata, cent[k][dim]);
      sq   = fp_mul(diff, diff);
      dnew[k] = (dim == '0) ? sq : fp_add(dacc[k], sq);
    end
    best_k = '0;
    best_d = dnew[0];
    for (int k = 1; k < K; k++) begin
      if (fp_lt(dnew[k], best_d)) begin
        best_k = KW'(k);
        best_d = dnew[k];
      end
    end
  end

  // Memory master requests.
  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = '0;
    mem_req_wdata = '0;
    if (state == S_LOAD && !ld_wait) begin
      mem_req_valid = 1'b1;
      mem_req_addr  = centroid_addr + 32'(WORD_BYTES) * (32'(ld_k) * 32'(D) + 32'(ld_d));
    end else if (state == S_WRITE) begin
      mem_req_valid = 1'b1;
      mem_req_we    = 1'b1;
      mem_req_addr  = mediate_addr + 32'(WORD_BYTES) * 32'(wr_idx);
      if (wr_idx == MW'(MED_WORDS - 1)) mem_req_wdata = distortion;
      else if (wr_p == '0)              mem_req_wdata = cnt[wr_k];
      else                              mem_req_wdata = sums[wr_k][DW'(wr_p - 1'b1)];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      ap_done    <= 1'b0;
      ld_k       <= '0;
      ld_d       <= '0;
      ld_wait    <= 1'b0;
      dim        <= '0;
      n_in       <= '0;
      n_out      <= '0;
      s2_valid   <= 1'b0;
      s2_label   <= '0;
      s2_dist    <= FP_ZERO;
      wr_idx     <= '0;
      wr_k       <= '0;
      wr_p       <= '0;
      distortion <= FP_ZERO;
      for (int k = 0; k < K; k++) begin
        cnt[k]  <= '0;
        dacc[k] <= FP_ZERO;
        for (int d = 0; d < D; d++) begin
          cent[k][d] <= FP_ZERO;
          sums[k][d] <= FP_ZERO;
        end
      end
      for (int d = 0; d < D; d++) begin
        sbuf[d]    <= FP_ZERO;
        s2_samp[d] <= FP_ZERO;
      end
    end else begin
      ap_done <= 1'b0;
      unique case (state)
        S_IDLE: if (ap_start) begin
          state      <= S_LOAD;
          ld_k       <= '0;
          ld_d       <= '0;
          ld_wait    <= 1'b0;
          dim        <= '0;
          n_in       <= '0;
          n_out      <= '0;
          distortion <= FP_ZERO;
          for (int k = 0; k < K; k++) begin
            cnt[k] <= '0;
            for (int d = 0; d < D; d++) sums[k][d] <= FP_ZERO;
          end
        end

        S_LOAD: begin
          if (mem_req_valid && mem_req_ready) ld_wait <= 1'b1;
          if (mem_rsp_valid && ld_wait) begin
            ld_wait          <= 1'b0;
            cent[ld_k][ld_d] <= mem_rsp_rdata;
            if (ld_d == DW'(D - 1)) begin
              ld_d <= '0;
              if (ld_k == KW'(K - 1)) state <= S_RUN;
              else                    ld_k  <= ld_k + 1'b1;
            end else begin
              ld_d <= ld_d + 1'b1;
            end
          end
        end

        S_RUN: begin
          // stage 2: emit the label and accumulate
          if (l_fire) begin
            s2_valid   <= 1'b0;
            n_out      <= n_out + 32'd1;
            cnt[s2_label] <= cnt[s2_label] + 32'd1;
            for (int d = 0; d < D; d++)
              sums[s2_label][d] <= fp_add(sums[s2_label][d], s2_samp[d]);
            distortion <= fp_add(distortion, s2_dist);
          end
          // stage 1: distance accumulation
          if (s_fire) begin
            sbuf[dim] <= s_sample_tdata;
            for (int k = 0; k < K; k++) dacc[k] <= dnew[k];
            if (dim == DW'(D - 1)) begin
              dim      <= '0;
              n_in     <= n_in + 32'd1;
              s2_valid <= 1'b1;
              s2_label <= best_k;
              s2_dist  <= best_d;
              for (int d = 0; d < D - 1; d++) s2_samp[d] <= sbuf[d];
              s2_samp[D-1] <= s_sample_tdata;
            end else begin
              dim <= dim + 1'b1;
            end
          end
          if (n_out == n_samples && !s2_valid) begin
            state  <= S_WRITE;
            wr_idx <= '0;
            wr_k   <= '0;
            wr_p   <= '0;
          end
        end

        S_WRITE: if (mem_req_ready) begin
          if (wr_idx == MW'(MED_WORDS - 1)) begin
            state <= S_DONE;
          end else begin
            wr_idx <= wr_idx + 1'b1;
            if (wr_p == (DW + 1)'(D)) begin
              wr_p <= '0;
              wr_k <= wr_k + 1'b1;
            end else begin
              wr_p <= wr_p + 1'b1;
            end
          end
        end

        S_DONE: begin
          ap_done <= 1'b1;
          state   <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // A read response only comes for an issued read.
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> (state == S_LOAD && ld_wait));

endmodule
