// tb_mapper_block: checks the mapper block (M = 2, K = 2, D = 3) with
// behavioural simple-mode DMA engines and a memory model. After map_start each
// unit must read its own part of the sample set, write its labels to its own
// part of the label space and its intermediate results to its own block, and
// pulse map_done once, not before its label transfer has completed. Results
// are compared with a double-precision reference. MAX_BYTES is small so that
// transfers are split into several commands.
module tb_mapper_block;
  import tb_fp_pkg::*;
  localparam int unsigned M = 2, K = 2, D = 3, NPM = 15, N = M * NPM;
  localparam int unsigned MAXB = 40;
  localparam int unsigned MED = K * (D + 1) + 1;
  localparam logic [31:0] SB = 32'h1000, LB = 32'h2000, MB = 32'h3000, CB = 32'h3800;
  logic clk = 1'b0, rst_n = 1'b1;
  // Reset is asserted before the first clock edge, so no output of the
  // design under test is seen before it has been reset.
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic         map_start;
  logic [M-1:0] map_done;
  logic [31:0]  s_tdata [M], l_tdata [M], rca [M], rcl [M], wca [M], wcl [M];
  logic         s_tvalid [M], s_tready [M], l_tvalid [M], l_tready [M], l_tlast [M];
  logic         rcv [M], rcr [M], rdn [M], wcv [M], wcr [M], wdn [M];
  logic         qv [M], qr [M], qwe [M], pv [M];
  logic [31:0]  qa [M], qd [M], pd [M];

  mapper_block #(.M(M), .K(K), .D(D), .MAX_BYTES(MAXB)) dut (
    .clk, .rst_n, .map_start, .map_done, .n_per_map(32'(NPM)),
    .sample_base(SB), .label_base(LB), .mediate_base(MB), .centroid_base(CB),
    .s_sample_tdata(s_tdata), .s_sample_tvalid(s_tvalid), .s_sample_tready(s_tready),
    .m_label_tdata(l_tdata), .m_label_tvalid(l_tvalid), .m_label_tready(l_tready),
    .m_label_tlast(l_tlast),
    .mm2s_cmd_valid(rcv), .mm2s_cmd_ready(rcr), .mm2s_cmd_addr(rca), .mm2s_cmd_len(rcl),
    .mm2s_done(rdn),
    .s2mm_cmd_valid(wcv), .s2mm_cmd_ready(wcr), .s2mm_cmd_addr(wca), .s2mm_cmd_len(wcl),
    .s2mm_done(wdn),
    .mem_req_valid(qv), .mem_req_ready(qr), .mem_req_we(qwe), .mem_req_addr(qa),
    .mem_req_wdata(qd), .mem_rsp_valid(pv), .mem_rsp_rdata(pd));

  logic [31:0] mem [4096];
  bit          ra [M], wa [M];
  int unsigned rp [M], rr [M], wp [M], wr [M], n_rcmd [M], n_wcmd [M], n_mdone [M];
  int unsigned done_early;
  for (genvar i = 0; i < M; i++) begin : g_rdy
    assign rcr[i] = !ra[i];
    assign wcr[i] = !wa[i];
  end

  always @(posedge clk) begin
    for (int i = 0; i < M; i++) begin
      rdn[i] <= 1'b0;
      wdn[i] <= 1'b0;
      pv[i]  <= 1'b0;
      if (rcv[i] && rcr[i]) begin
        ra[i] = 1; rp[i] = rca[i] / 4; rr[i] = rcl[i] / 4; n_rcmd[i]++;
      end
      if (s_tvalid[i] && s_tready[i]) begin
        rp[i]++; rr[i]--;
        if (rr[i] == 0) begin
          ra[i] = 0;
          rdn[i] <= 1'b1;
        end
      end
      if (!(s_tvalid[i] && !s_tready[i])) begin
        if (ra[i] && rr[i] != 0 && $urandom_range(0, 3) != 0) begin
          s_tvalid[i] <= 1'b1;
          s_tdata[i]  <= mem[rp[i]];
        end else s_tvalid[i] <= 1'b0;
      end
      if (wcv[i] && wcr[i]) begin
        wa[i] = 1; wp[i] = wca[i] / 4; wr[i] = wcl[i] / 4; n_wcmd[i]++;
      end
      if (l_tvalid[i] && l_tready[i]) begin
        mem[wp[i]] = l_tdata[i];
        wp[i]++; wr[i]--;
        if (wr[i] == 0) begin
          wa[i] = 0;
          wdn[i] <= 1'b1;
        end
      end
      l_tready[i] <= wa[i] && ($urandom_range(0, 3) != 0);
      if (qv[i] && qr[i]) begin
        if (qwe[i]) mem[qa[i] / 4] = qd[i];
        else begin
          pv[i] <= 1'b1;
          pd[i] <= mem[qa[i] / 4];
        end
      end
      qr[i] <= ($urandom_range(0, 2) != 0);
      if (map_done[i]) begin
        n_mdone[i]++;
        if (wa[i] || ra[i]) done_early++;
      end
    end
  end

  real xs [N][D], cs [K][D];

  initial begin
    int  bk, cnt [M][K];
    real best, dd, s [M][K][D], e [M];
    int  lab [N];
    map_start = 0; done_early = 0;
    for (int i = 0; i < M; i++) begin
      ra[i] = 0; wa[i] = 0; n_rcmd[i] = 0; n_wcmd[i] = 0; n_mdone[i] = 0;
      s_tvalid[i] = 0; s_tdata[i] = 0; l_tready[i] = 0; qr[i] = 0; pv[i] = 0; pd[i] = 0;
      rdn[i] = 0; wdn[i] = 0;
    end
    for (int w = 0; w < 4096; w++) mem[w] = '0;
    for (int k = 0; k < K; k++)
      for (int d = 0; d < D; d++) begin
        cs[k][d] = (real'($urandom_range(0, 2048)) - 1024.0) / 128.0;
        mem[CB / 4 + k * D + d] = to_fp32(cs[k][d]);
      end
    for (int n = 0; n < N; n++)
      for (int d = 0; d < D; d++) begin
        xs[n][d] = (real'($urandom_range(0, 2048)) - 1024.0) / 128.0;
        mem[SB / 4 + n * D + d] = to_fp32(xs[n][d]);
      end
    for (int i = 0; i < M; i++) begin
      e[i] = 0.0;
      for (int k = 0; k < K; k++) begin
        cnt[i][k] = 0;
        for (int d = 0; d < D; d++) s[i][k][d] = 0.0;
      end
    end
    for (int n = 0; n < N; n++) begin
      bk = 0; best = 0.0;
      for (int k = 0; k < K; k++) begin
        dd = 0.0;
        for (int d = 0; d < D; d++) dd += (xs[n][d] - cs[k][d]) ** 2;
        if (k == 0 || dd < best) begin
          best = dd; bk = k;
        end
      end
      lab[n] = bk;
      cnt[n / NPM][bk]++;
      for (int d = 0; d < D; d++) s[n / NPM][bk][d] += xs[n][d];
      e[n / NPM] += best;
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    map_start = 1'b1;
    @(negedge clk);
    map_start = 1'b0;
    while (n_mdone[0] == 0 || n_mdone[1] == 0) @(negedge clk);
    repeat (20) @(negedge clk);
    for (int i = 0; i < M; i++) begin
      check(n_mdone[i] == 1, $sformatf("unit %0d: one map_done", i));
      check(n_rcmd[i] == (NPM * D * 4 + MAXB - 1) / MAXB, $sformatf("unit %0d: sample transfer split into %0d commands", i, n_rcmd[i]));
      check(n_wcmd[i] == (NPM * 4 + MAXB - 1) / MAXB, $sformatf("unit %0d: label transfer split into %0d commands", i, n_wcmd[i]));
      for (int k = 0; k < K; k++) begin
        check(mem[MB / 4 + i * MED + k * (D + 1)] == 32'(cnt[i][k]), $sformatf("unit %0d: count %0d", i, k));
        for (int d = 0; d < D; d++)
          check(close(from_fp32(mem[MB / 4 + i * MED + k * (D + 1) + 1 + d]), s[i][k][d], 1e-5, 1e-4),
                $sformatf("unit %0d: sum %0d.%0d", i, k, d));
      end
      check(close(from_fp32(mem[MB / 4 + i * MED + MED - 1]), e[i], 1e-5, 1e-3),
            $sformatf("unit %0d: distortion", i));
    end
    for (int n = 0; n < N; n++)
      check(mem[LB / 4 + n] == 32'(lab[n]), $sformatf("label %0d = %0d, expected %0d", n, mem[LB / 4 + n], lab[n]));
    check(done_early == 0, "map_done only after the DMA transfers completed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
