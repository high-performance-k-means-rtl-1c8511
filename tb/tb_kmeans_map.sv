// tb_kmeans_map: checks the mapper core at its default size (K = 4, D = 4).
// A memory model holds the centroids and receives the intermediate results;
// the testbench streams samples and collects labels. A double-precision
// reference computes each sample's nearest centroid, the per-cluster counts
// and sums and the distortion. Two runs: one with streams that never stall,
// in which the sample input must sustain one sample every D cycles
// (initiation interval D), and one with random stalls on the sample stream,
// the label stream and the memory port.
module tb_kmeans_map;
  import tb_fp_pkg::*;
  localparam int unsigned K = 4;
  localparam int unsigned D = 4;
  localparam int unsigned NS = 200;
  localparam int unsigned MED = K * (D + 1) + 1;
  localparam logic [31:0] CADDR = 32'h100, MADDR = 32'h400;
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

  logic        ap_start, ap_done, busy;
  logic [31:0] s_tdata, l_tdata, mreq_addr, mreq_wdata, mrsp_rdata;
  logic        s_tvalid, s_tready, l_tvalid, l_tready, l_tlast;
  logic        mreq_valid, mreq_ready, mreq_we, mrsp_valid;

  kmeans_map #(.K(K), .D(D)) dut (
    .clk, .rst_n, .ap_start, .ap_done, .busy, .n_samples(32'(NS)),
    .centroid_addr(CADDR), .mediate_addr(MADDR),
    .s_sample_tdata(s_tdata), .s_sample_tvalid(s_tvalid), .s_sample_tready(s_tready),
    .m_label_tdata(l_tdata), .m_label_tvalid(l_tvalid), .m_label_tready(l_tready),
    .m_label_tlast(l_tlast),
    .mem_req_valid(mreq_valid), .mem_req_ready(mreq_ready), .mem_req_we(mreq_we),
    .mem_req_addr(mreq_addr), .mem_req_wdata(mreq_wdata),
    .mem_rsp_valid(mrsp_valid), .mem_rsp_rdata(mrsp_rdata));

  logic [31:0] mem [1024];
  real         xs [NS][D];
  real         cs [K][D];
  int          stall_pct;
  int          cyc = 0;
  int          first_acc, last_acc, n_acc;
  int          labels [$];
  int          tlast_pos;

  // memory model and stream sinks/sources
  int s_ptr;
  always @(posedge clk) begin
    cyc++;
    mrsp_valid <= 1'b0;
    if (mreq_valid && mreq_ready) begin
      if (mreq_we) mem[mreq_addr / 4] = mreq_wdata;
      else begin
        mrsp_valid <= 1'b1;
        mrsp_rdata <= mem[mreq_addr / 4];
      end
    end
    mreq_ready <= ($urandom_range(0, 99) >= stall_pct);
    if (l_tvalid && l_tready) begin
      labels.push_back(int'(l_tdata));
      if (l_tlast) tlast_pos = labels.size();
    end
    l_tready <= ($urandom_range(0, 99) >= stall_pct);
    if (s_tvalid && s_tready) begin
      if (n_acc == 0) first_acc = cyc;
      last_acc = cyc;
      n_acc++;
      s_ptr++;
    end
    if (s_tvalid && !s_tready) begin
      // hold
    end else if (busy && s_ptr < NS * D && $urandom_range(0, 99) >= stall_pct) begin
      s_tvalid <= 1'b1;
      s_tdata  <= to_fp32(xs[s_ptr / D][s_ptr % D]);
    end else begin
      s_tvalid <= 1'b0;
    end
  end

  task automatic one_run(input int pct, input string name);
    int  rl [NS], cnt [K], bk, lab_ok;
    real s [K][D], e, best, dd;
    stall_pct = pct;
    for (int k = 0; k < K; k++)
      for (int d = 0; d < D; d++) begin
        cs[k][d] = (real'($urandom_range(0, 4096)) - 2048.0) / 256.0;
        mem[CADDR / 4 + k * D + d] = to_fp32(cs[k][d]);
      end
    for (int n = 0; n < NS; n++)
      for (int d = 0; d < D; d++) xs[n][d] = (real'($urandom_range(0, 4096)) - 2048.0) / 256.0;
    // reference
    e = 0.0;
    for (int k = 0; k < K; k++) begin
      cnt[k] = 0;
      for (int d = 0; d < D; d++) s[k][d] = 0.0;
    end
    for (int n = 0; n < NS; n++) begin
      bk = 0;
      best = 0.0;
      for (int k = 0; k < K; k++) begin
        dd = 0.0;
        for (int d = 0; d < D; d++) dd += (xs[n][d] - cs[k][d]) ** 2;
        if (k == 0 || dd < best) begin
          best = dd;
          bk = k;
        end
      end
      rl[n] = bk;
      cnt[bk]++;
      for (int d = 0; d < D; d++) s[bk][d] += xs[n][d];
      e += best;
    end
    labels.delete();
    n_acc = 0;
    s_ptr = 0;
    tlast_pos = -1;
    @(negedge clk);
    ap_start = 1'b1;
    @(negedge clk);
    ap_start = 1'b0;
    while (!ap_done) @(negedge clk);
    check(labels.size() == NS, $sformatf("%s: %0d labels", name, labels.size()));
    check(tlast_pos == NS, $sformatf("%s: tlast on the last label", name));
    lab_ok = 1;
    for (int n = 0; n < NS && n < labels.size(); n++) if (labels[n] != rl[n]) lab_ok = 0;
    check(lab_ok == 1, {name, ": labels"});
    for (int k = 0; k < K; k++) begin
      check(mem[MADDR / 4 + k * (D + 1)] == 32'(cnt[k]),
            $sformatf("%s: count %0d = %0d, expected %0d", name, k, mem[MADDR / 4 + k * (D + 1)], cnt[k]));
      for (int d = 0; d < D; d++)
        check(close(from_fp32(mem[MADDR / 4 + k * (D + 1) + 1 + d]), s[k][d], 1e-5, 1e-4),
              $sformatf("%s: sum %0d.%0d = %f, expected %f", name, k, d,
                        from_fp32(mem[MADDR / 4 + k * (D + 1) + 1 + d]), s[k][d]));
    end
    check(close(from_fp32(mem[MADDR / 4 + MED - 1]), e, 1e-5, 1e-3),
          $sformatf("%s: distortion %f, expected %f", name, from_fp32(mem[MADDR / 4 + MED - 1]), e));
    if (pct == 0) begin
      // one sample every D cycles: NS*D beats in NS*D cycles
      check(last_acc - first_acc + 1 == NS * D,
            $sformatf("%s: %0d beats took %0d cycles, expected %0d (II = D)", name, NS * D,
                      last_acc - first_acc + 1, NS * D));
    end
  endtask

  initial begin
    ap_start = 0; s_tvalid = 0; s_tdata = 0; l_tready = 0; mreq_ready = 0;
    mrsp_valid = 0; mrsp_rdata = 0; stall_pct = 0;
    for (int w = 0; w < 1024; w++) mem[w] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    one_run(0, "no stalls");
    one_run(30, "random stalls");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
