// tb_kmeans_top_full: one complete k-means run of the accelerator with every
// parameter at its default (12 mappers, 4 clusters, 4-dimensional fp32
// samples, 8 MB simple-mode DMA limit).
//
// The same behavioural DMA engines, memory and double-precision reference
// model as in tb_kmeans_top are used, with 100 samples per mapper (1200 in
// all) drawn around four cluster centres. The run must converge after the
// same number of iterations as the reference, with the same labels, centroids
// and distortion. The cycle count of the whole run is reported: with streams that
// stall 20% of the time a mapper needs somewhat more than D cycles per sample.
module tb_kmeans_top_full;
  import tb_fp_pkg::*;

  localparam int unsigned M = 12;
  localparam int unsigned K = 4;
  localparam int unsigned D = 4;
  localparam int unsigned NPM = 100;                // samples per mapper
  localparam int unsigned N = M * NPM;
  localparam int unsigned MEMW = 16384;
  localparam logic [31:0] SAMPLE_BASE   = 32'h0000_1000;
  localparam logic [31:0] LABEL_BASE    = 32'h0000_8000;
  localparam logic [31:0] MEDIATE_BASE  = 32'h0000_C000;
  localparam logic [31:0] CENTROID_BASE = 32'h0000_F000;
  localparam int unsigned WATCHDOG = 2000000;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  // Reset is asserted before the first clock edge, so no output of the
  // design under test is seen before it has been reset.
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [31:0] mem [MEMW];

  // DUT signals
  logic        start;
  logic [31:0] max_iter;
  logic        busy, done, converged;
  logic [31:0] iterations, distortion;
  logic [31:0] map_sample_tdata [M];
  logic        map_sample_tvalid [M], map_sample_tready [M];
  logic [31:0] map_label_tdata [M];
  logic        map_label_tvalid [M], map_label_tready [M], map_label_tlast [M];
  logic        map_mm2s_cmd_valid [M], map_mm2s_cmd_ready [M], map_mm2s_done [M];
  logic [31:0] map_mm2s_cmd_addr [M], map_mm2s_cmd_len [M];
  logic        map_s2mm_cmd_valid [M], map_s2mm_cmd_ready [M], map_s2mm_done [M];
  logic [31:0] map_s2mm_cmd_addr [M], map_s2mm_cmd_len [M];
  logic        map_mem_req_valid [M], map_mem_req_ready [M], map_mem_req_we [M];
  logic [31:0] map_mem_req_addr [M], map_mem_req_wdata [M];
  logic        map_mem_rsp_valid [M];
  logic [31:0] map_mem_rsp_rdata [M];
  logic [31:0] red_med_tdata;
  logic        red_med_tvalid, red_med_tready;
  logic        red_mm2s_cmd_valid, red_mm2s_cmd_ready, red_mm2s_done;
  logic [31:0] red_mm2s_cmd_addr, red_mm2s_cmd_len;
  logic        red_mem_req_valid, red_mem_req_ready;
  logic [31:0] red_mem_req_addr, red_mem_req_wdata;

  kmeans_top dut (
    .clk, .rst_n, .start, .n_per_map(32'(NPM)),
    .sample_base(SAMPLE_BASE), .label_base(LABEL_BASE),
    .mediate_base(MEDIATE_BASE), .centroid_base(CENTROID_BASE),
    .threshold(32'h0000_0000), .max_iter,
    .busy, .done, .converged, .iterations, .distortion,
    .map_sample_tdata, .map_sample_tvalid, .map_sample_tready,
    .map_label_tdata, .map_label_tvalid, .map_label_tready, .map_label_tlast,
    .map_mm2s_cmd_valid, .map_mm2s_cmd_ready, .map_mm2s_cmd_addr, .map_mm2s_cmd_len,
    .map_mm2s_done,
    .map_s2mm_cmd_valid, .map_s2mm_cmd_ready, .map_s2mm_cmd_addr, .map_s2mm_cmd_len,
    .map_s2mm_done,
    .map_mem_req_valid, .map_mem_req_ready, .map_mem_req_we, .map_mem_req_addr,
    .map_mem_req_wdata, .map_mem_rsp_valid, .map_mem_rsp_rdata,
    .red_med_tdata, .red_med_tvalid, .red_med_tready,
    .red_mm2s_cmd_valid, .red_mm2s_cmd_ready, .red_mm2s_cmd_addr, .red_mm2s_cmd_len,
    .red_mm2s_done,
    .red_mem_req_valid, .red_mem_req_ready, .red_mem_req_addr, .red_mem_req_wdata);

  // ---------------- behavioural DMA engines and memory ----------------
  // channel 0..M-1: mapper mm2s, M..2M-1: mapper s2mm, 2M: reducer mm2s
  localparam int unsigned NCH = 2 * M + 1;
  bit          ch_active [NCH];
  int unsigned ch_ptr [NCH], ch_rem [NCH], ch_cmds [NCH], ch_xfers [NCH];
  int unsigned n_chunked = 0, n_sample_stall = 0, n_label_stall = 0, n_mem_stall = 0;
  int unsigned n_cmds_in_xfer [NCH];

  assign red_mm2s_cmd_ready = !ch_active[2*M];
  for (genvar i = 0; i < M; i++) begin : g_rdy
    assign map_mm2s_cmd_ready[i] = !ch_active[i];
    assign map_s2mm_cmd_ready[i] = !ch_active[M+i];
  end

  function automatic bit coin(int pct);
    return ($urandom_range(0, 99) < pct);
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < NCH; c++) begin
        ch_active[c] = 1'b0;
        n_cmds_in_xfer[c] = 0;
      end
      for (int i = 0; i < M; i++) begin
        map_sample_tvalid[i] <= 1'b0;
        map_label_tready[i]  <= 1'b0;
        map_mm2s_done[i]     <= 1'b0;
        map_s2mm_done[i]     <= 1'b0;
        map_mem_req_ready[i] <= 1'b0;
        map_mem_rsp_valid[i] <= 1'b0;
        map_sample_tdata[i]  <= '0;
        map_mem_rsp_rdata[i] <= '0;
      end
      red_med_tvalid    <= 1'b0;
      red_med_tdata     <= '0;
      red_mm2s_done     <= 1'b0;
      red_mem_req_ready <= 1'b0;
    end else begin
      // mapper channels
      for (int i = 0; i < M; i++) begin
        // samples, memory to stream
        map_mm2s_done[i] <= 1'b0;
        if (map_mm2s_cmd_valid[i] && map_mm2s_cmd_ready[i]) begin
          ch_active[i] = 1'b1;
          ch_ptr[i] = map_mm2s_cmd_addr[i] / 4;
          ch_rem[i] = map_mm2s_cmd_len[i] / 4;
          ch_cmds[i]++;
        end
        if (map_sample_tvalid[i] && map_sample_tready[i]) begin
          ch_ptr[i]++;
          ch_rem[i]--;
          if (ch_rem[i] == 0) begin
            ch_active[i] = 1'b0;
            map_mm2s_done[i] <= 1'b1;
          end
        end
        if (map_sample_tvalid[i] && !map_sample_tready[i]) begin
          // hold
        end else if (ch_active[i] && ch_rem[i] != 0 && coin(80)) begin
          map_sample_tvalid[i] <= 1'b1;
          map_sample_tdata[i]  <= mem[ch_ptr[i]];
        end else begin
          if (ch_active[i]) n_sample_stall++;
          map_sample_tvalid[i] <= 1'b0;
        end
        // labels, stream to memory
        map_s2mm_done[i] <= 1'b0;
        if (map_s2mm_cmd_valid[i] && map_s2mm_cmd_ready[i]) begin
          ch_active[M+i] = 1'b1;
          ch_ptr[M+i] = map_s2mm_cmd_addr[i] / 4;
          ch_rem[M+i] = map_s2mm_cmd_len[i] / 4;
          ch_cmds[M+i]++;
        end
        if (map_label_tvalid[i] && map_label_tready[i]) begin
          mem[ch_ptr[M+i]] = map_label_tdata[i];
          ch_ptr[M+i]++;
          ch_rem[M+i]--;
          if (ch_rem[M+i] == 0) begin
            ch_active[M+i] = 1'b0;
            map_s2mm_done[i] <= 1'b1;
          end
        end
        if (map_label_tvalid[i] && !map_label_tready[i]) n_label_stall++;
        map_label_tready[i] <= ch_active[M+i] && coin(75);
        // memory-mapped port
        map_mem_rsp_valid[i] <= 1'b0;
        if (map_mem_req_valid[i] && map_mem_req_ready[i]) begin
          if (map_mem_req_we[i]) begin
            mem[map_mem_req_addr[i] / 4] = map_mem_req_wdata[i];
          end else begin
            map_mem_rsp_valid[i] <= 1'b1;
            map_mem_rsp_rdata[i] <= mem[map_mem_req_addr[i] / 4];
          end
        end
        if (map_mem_req_valid[i] && !map_mem_req_ready[i]) n_mem_stall++;
        map_mem_req_ready[i] <= coin(70);
      end
      // reducer channel
      red_mm2s_done <= 1'b0;
      if (red_mm2s_cmd_valid && red_mm2s_cmd_ready) begin
        ch_active[2*M] = 1'b1;
        ch_ptr[2*M] = red_mm2s_cmd_addr / 4;
        ch_rem[2*M] = red_mm2s_cmd_len / 4;
        ch_cmds[2*M]++;
      end
      if (red_med_tvalid && red_med_tready) begin
        ch_ptr[2*M]++;
        ch_rem[2*M]--;
        if (ch_rem[2*M] == 0) begin
          ch_active[2*M] = 1'b0;
          red_mm2s_done <= 1'b1;
        end
      end
      if (red_med_tvalid && !red_med_tready) begin
        // hold
      end else if (ch_active[2*M] && ch_rem[2*M] != 0 && coin(85)) begin
        red_med_tvalid <= 1'b1;
        red_med_tdata  <= mem[ch_ptr[2*M]];
      end else begin
        red_med_tvalid <= 1'b0;
      end
      if (red_mem_req_valid && red_mem_req_ready)
        mem[red_mem_req_addr / 4] = red_mem_req_wdata;
      if (red_mem_req_valid && !red_mem_req_ready) n_mem_stall++;
      red_mem_req_ready <= coin(70);
    end
  end

  // ---------------- reference model ----------------
  real xs [N][D];
  real c0 [K][D];
  real rc [K][D];
  int  rlab [N];
  int  r_iters;
  real r_dist;
  int  r_empty;     // iterations in which some cluster got no sample

  task automatic ref_kmeans(input int limit);
    real e, prev_e, best, dd, s [K][D];
    int  cnt [K], bk, it;
    bit  conv;
    rc = c0;
    prev_e = 0.0;
    conv = 0;
    it = 0;
    r_empty = 0;
    while (!conv) begin
      it++;
      e = 0.0;
      for (int k = 0; k < K; k++) begin
        cnt[k] = 0;
        for (int d = 0; d < D; d++) s[k][d] = 0.0;
      end
      for (int n = 0; n < N; n++) begin
        bk = 0;
        best = 0.0;
        for (int k = 0; k < K; k++) begin
          dd = 0.0;
          for (int d = 0; d < D; d++) dd += (xs[n][d] - rc[k][d]) * (xs[n][d] - rc[k][d]);
          if (k == 0 || dd < best) begin
            best = dd;
            bk = k;
          end
        end
        rlab[n] = bk;
        cnt[bk]++;
        for (int d = 0; d < D; d++) s[bk][d] += xs[n][d];
        e += best;
      end
      for (int k = 0; k < K; k++) begin
        if (cnt[k] == 0) r_empty++;
        else for (int d = 0; d < D; d++) rc[k][d] = s[k][d] / cnt[k];
      end
      if (it > 1 && e == prev_e) conv = 1;
      prev_e = e;
      if (limit != 0 && it >= limit) break;
    end
    r_iters = it;
    r_dist = e;
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- stimulus ----------------
  int unsigned n_runs_conv = 0, n_runs_limit = 0, n_empty = 0, n_multi_iter = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc++;

  task automatic load_data(input bit far_centroid);
    real ctr [4][4];
    ctr[0] = '{2.0, 2.0, 0.0, 1.0};
    ctr[1] = '{-3.0, 5.0, 4.0, -2.0};
    ctr[2] = '{6.0, -4.0, 1.0, 3.0};
    ctr[3] = '{0.0, -6.0, -5.0, -1.0};
    for (int n = 0; n < N; n++) begin
      int c;
      c = n % K;
      for (int d = 0; d < D; d++) begin
        xs[n][d] = ctr[c][d] + (real'($urandom_range(0, 512)) - 256.0) / 256.0;
        mem[SAMPLE_BASE / 4 + n * D + d] = to_fp32(xs[n][d]);
      end
    end
    // initial centroids: first samples of the set, or one far away
    for (int k = 0; k < K; k++)
      for (int d = 0; d < D; d++) begin
        c0[k][d] = xs[k * 3 + 1][d];
        if (far_centroid && k == K - 1) c0[k][d] = 100.0 + d;
        mem[CENTROID_BASE / 4 + k * D + d] = to_fp32(c0[k][d]);
      end
  endtask

  task automatic run_and_check(input int limit, input string name);
    int t0, lab_ok;
    max_iter = 32'(limit);
    ref_kmeans(limit);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = cyc;
    while (!done) @(negedge clk);
    $display("%s: %0d iterations (reference %0d), %0d cycles, converged=%0d",
             name, iterations, r_iters, cyc - t0, converged);
    check(iterations == 32'(r_iters), {name, ": iteration count"});
    check(converged == (limit == 0), {name, ": converged flag"});
    if (iterations > 1) n_multi_iter++;
    if (converged) n_runs_conv++; else n_runs_limit++;
    if (r_empty != 0) n_empty++;
    lab_ok = 1;
    for (int n = 0; n < N; n++)
      if (mem[LABEL_BASE / 4 + n] != 32'(rlab[n])) lab_ok = 0;
    check(lab_ok == 1, {name, ": labels"});
    for (int k = 0; k < K; k++)
      for (int d = 0; d < D; d++)
        check(close(from_fp32(mem[CENTROID_BASE / 4 + k * D + d]), rc[k][d], 1e-5, 1e-6),
              $sformatf("%s: centroid %0d.%0d = %f, expected %f", name, k, d,
                        from_fp32(mem[CENTROID_BASE / 4 + k * D + d]), rc[k][d]));
    check(close(from_fp32(distortion), r_dist, 1e-4, 1e-6),
          $sformatf("%s: distortion %f, expected %f", name, from_fp32(distortion), r_dist));
  endtask

  initial begin
    start = 1'b0;
    max_iter = '0;
    for (int w = 0; w < MEMW; w++) mem[w] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    load_data(1'b0);
    run_and_check(0, "full-size run");
    check(n_multi_iter > 0, "more than one iteration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
