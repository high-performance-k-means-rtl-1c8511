// tb_kmeans_workload_sweep: one k-means iteration of the default-size
// accelerator (12 mappers, 4 clusters, 4-dimensional fp32 samples) on sample
// sets of growing size, N = 12, 120, 1200, 12000, 48000, 120000, 480000 and
// 2,075,256, drawn around four cluster centres. 480000 is close to the top of
// the range the original design was swept over; 2,075,256 = 12 * 172,938 is
// the largest multiple of 12 in the 2,075,259-sample household power data set
// the original was benchmarked with (the data itself is replaced by synthetic
// samples here).
//
// It measures how the throughput of one iteration, N*D*32 bits over the
// iteration's cycles, and the Map phase's share of those cycles grow with N.
// The DMA engines and memory are behavioural and never stall, so the mappers
// run at their full rate. Checked for every size: the labels (exactly) and the
// new centroids and distortion (within a small relative tolerance) against a
// double-precision reference; the Map phase taking at most n_per_map*D cycles
// plus a fixed overhead (one sample every D cycles per mapper). Checked across
// sizes: the throughput and the Map share rise with N; the Map share exceeds
// 85% once N is above 10,000; at the largest N the throughput is within 10%
// of the 12*32 bits per cycle that twelve mappers can take in (3.84e10 bit/s,
// 38.4 Gbit/s, at 100 MHz).
// The throughput and Map-share curves this reproduces are the original
// design's measurements; the clock rate used to convert cycles to Gbit/s
// (100 MHz) is the original's, the cycle counts are this design's own.
module tb_kmeans_workload_sweep;
  import tb_fp_pkg::*;

  localparam int unsigned M = 12;
  localparam int unsigned K = 4;
  localparam int unsigned D = 4;
  localparam int unsigned NSIZES = 8;
  localparam int unsigned NPM_LIST [NSIZES] = '{1, 10, 100, 1000, 4000, 10000, 40000, 172938};
  localparam int unsigned NMAX = M * 172938;
  localparam int unsigned MEMW = 32'h0290_0000 / 4;
  localparam logic [31:0] SAMPLE_BASE   = 32'h0000_1000;
  localparam logic [31:0] LABEL_BASE    = 32'h0200_0000;
  localparam logic [31:0] MEDIATE_BASE  = 32'h0280_0000;
  localparam logic [31:0] CENTROID_BASE = 32'h0280_8000;
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
  logic [31:0] npm;
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
    .clk, .rst_n, .start, .n_per_map(npm),
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
        end else if (ch_active[i] && ch_rem[i] != 0 && 1'b1) begin
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
        map_label_tready[i] <= ch_active[M+i] && 1'b1;
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
        map_mem_req_ready[i] <= 1'b1;
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
      end else if (ch_active[2*M] && ch_rem[2*M] != 0 && 1'b1) begin
        red_med_tvalid <= 1'b1;
        red_med_tdata  <= mem[ch_ptr[2*M]];
      end else begin
        red_med_tvalid <= 1'b0;
      end
      if (red_mem_req_valid && red_mem_req_ready)
        mem[red_mem_req_addr / 4] = red_mem_req_wdata;
      if (red_mem_req_valid && !red_mem_req_ready) n_mem_stall++;
      red_mem_req_ready <= 1'b1;
    end
  end

  // ---------------- reference model: one iteration ----------------
  real xs [NMAX][D];
  real c0 [K][D];
  real rc [K][D];
  int  rlab [NMAX];
  real r_dist;

  task automatic ref_iteration(input int n_total);
    real best, dd, s [K][D];
    int  cnt [K], bk;
    r_dist = 0.0;
    for (int k = 0; k < K; k++) begin
      cnt[k] = 0;
      for (int d = 0; d < D; d++) s[k][d] = 0.0;
    end
    for (int n = 0; n < n_total; n++) begin
      bk = 0;
      best = 0.0;
      for (int k = 0; k < K; k++) begin
        dd = 0.0;
        for (int d = 0; d < D; d++) dd += (xs[n][d] - c0[k][d]) * (xs[n][d] - c0[k][d]);
        if (k == 0 || dd < best) begin
          best = dd;
          bk = k;
        end
      end
      rlab[n] = bk;
      cnt[bk]++;
      for (int d = 0; d < D; d++) s[bk][d] += xs[n][d];
      r_dist += best;
    end
    for (int k = 0; k < K; k++)
      for (int d = 0; d < D; d++) rc[k][d] = (cnt[k] == 0) ? c0[k][d] : s[k][d] / cnt[k];
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- phase timing ----------------
  int unsigned cyc = 0, t_map_start = 0, t_reduce_start = 0;
  always @(posedge clk) begin
    cyc++;
    if (dut.map_start)    t_map_start    = cyc;
    if (dut.reduce_start) t_reduce_start = cyc;
  end

  task automatic load_data(input int n_total);
    real ctr [4][4];
    ctr[0] = '{2.0, 2.0, 0.0, 1.0};
    ctr[1] = '{-3.0, 5.0, 4.0, -2.0};
    ctr[2] = '{6.0, -4.0, 1.0, 3.0};
    ctr[3] = '{0.0, -6.0, -5.0, -1.0};
    for (int n = 0; n < n_total; n++)
      for (int d = 0; d < D; d++) begin
        xs[n][d] = ctr[$urandom_range(0, 3)][d] + (real'($urandom_range(0, 512)) - 256.0) / 256.0;
        mem[SAMPLE_BASE / 4 + n * D + d] = to_fp32(xs[n][d]);
      end
    // initial centroids: the four cluster centres, moved off by a fixed offset
    for (int k = 0; k < K; k++)
      for (int d = 0; d < D; d++) begin
        c0[k][d] = ctr[k][d] + 0.75;
        mem[CENTROID_BASE / 4 + k * D + d] = to_fp32(c0[k][d]);
      end
  endtask

  real tput [NSIZES];
  real ratio [NSIZES];

  initial begin
    int t0, t_total, t_map, lab_ok, n_total;
    start = 1'b0;
    max_iter = 32'd1;
    npm = '0;
    for (int w = 0; w < MEMW; w++) mem[w] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    for (int s = 0; s < NSIZES; s++) begin
      npm = 32'(NPM_LIST[s]);
      n_total = M * NPM_LIST[s];
      load_data(n_total);
      ref_iteration(n_total);
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      t0 = cyc;
      while (!done) @(negedge clk);
      t_total = cyc - t0;
      t_map   = t_reduce_start - t_map_start;
      tput[s]  = real'(n_total * D * 32) / real'(t_total);
      ratio[s] = real'(t_map) / real'(t_total);
      $display("N=%0d: %0d cycles (Map %0d), %0.1f bit/cycle = %0.2f Gbit/s at 100 MHz, Map share %0.1f%%",
               n_total, t_total, t_map, tput[s], tput[s] * 0.1, ratio[s] * 100.0);
      check(iterations == 32'd1, $sformatf("N=%0d: one iteration", n_total));
      lab_ok = 1;
      for (int n = 0; n < n_total; n++)
        if (mem[LABEL_BASE / 4 + n] != 32'(rlab[n])) lab_ok = 0;
      check(lab_ok == 1, $sformatf("N=%0d: labels", n_total));
      for (int k = 0; k < K; k++)
        for (int d = 0; d < D; d++)
          check(close(from_fp32(mem[CENTROID_BASE / 4 + k * D + d]), rc[k][d], 1e-4, 1e-6),
                $sformatf("N=%0d: centroid %0d.%0d = %f, expected %f", n_total, k, d,
                          from_fp32(mem[CENTROID_BASE / 4 + k * D + d]), rc[k][d]));
      check(close(from_fp32(distortion), r_dist, 1e-3, 1e-6),
            $sformatf("N=%0d: distortion %f, expected %f", n_total, from_fp32(distortion), r_dist));
      check(t_map <= int'(NPM_LIST[s] * D) + 80,
            $sformatf("N=%0d: Map phase %0d cycles, at most %0d expected", n_total, t_map,
                      NPM_LIST[s] * D + 80));
      if (s > 0) begin
        check(tput[s] > tput[s-1], $sformatf("N=%0d: throughput rises with N", n_total));
        check(ratio[s] > ratio[s-1], $sformatf("N=%0d: Map share rises with N", n_total));
      end
      if (n_total > 10000)
        check(ratio[s] > 0.85, $sformatf("N=%0d: Map share above 85%%", n_total));
    end
    check(tput[NSIZES-1] > 0.9 * real'(M * 32),
          $sformatf("throughput %0.1f bit/cycle within 10%% of %0d", tput[NSIZES-1], M * 32));
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
