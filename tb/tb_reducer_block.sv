// tb_reducer_block: checks the reducer block (M = 3, K = 2, D = 2) with a
// behavioural simple-mode DMA engine and a memory model. The intermediate
// results of three mappers lie back to back in memory; after reduce_start the
// block must read them all through the DMA engine (in several commands, as
// MAX_BYTES is small), write the new centroids over the old ones, and pulse
// reduce_done once. Two calls: the first must leave iteration_done low, the
// second, on the same data, must set it (unchanged distortion).
module tb_reducer_block;
  import tb_fp_pkg::*;
  localparam int unsigned M = 3, K = 2, D = 2;
  localparam int unsigned MAXB = 24;
  localparam int unsigned MED = K * (D + 1) + 1;
  localparam logic [31:0] MB = 32'h400, CB = 32'h800;
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

  logic        reduce_start, reduce_done, first_iter, iteration_done;
  logic [31:0] distortion, s_tdata, ca, cl, qa, qd;
  logic        s_tvalid, s_tready, cv, cr, dn, qv, qr;

  reducer_block #(.M(M), .K(K), .D(D), .MAX_BYTES(MAXB)) dut (
    .clk, .rst_n, .reduce_start, .reduce_done, .first_iter, .threshold(32'd0),
    .mediate_base(MB), .centroid_base(CB), .iteration_done, .distortion,
    .s_med_tdata(s_tdata), .s_med_tvalid(s_tvalid), .s_med_tready(s_tready),
    .mm2s_cmd_valid(cv), .mm2s_cmd_ready(cr), .mm2s_cmd_addr(ca), .mm2s_cmd_len(cl),
    .mm2s_done(dn),
    .mem_req_valid(qv), .mem_req_ready(qr), .mem_req_addr(qa), .mem_req_wdata(qd));

  logic [31:0] mem [1024];
  bit          act;
  int unsigned ptr, rem, n_cmd, n_rdone;
  assign cr = !act;
  always @(posedge clk) begin
    dn <= 1'b0;
    if (cv && cr) begin
      act = 1; ptr = ca / 4; rem = cl / 4; n_cmd++;
    end
    if (s_tvalid && s_tready) begin
      ptr++; rem--;
      if (rem == 0) begin
        act = 0;
        dn <= 1'b1;
      end
    end
    if (!(s_tvalid && !s_tready)) begin
      if (act && rem != 0 && $urandom_range(0, 3) != 0) begin
        s_tvalid <= 1'b1;
        s_tdata  <= mem[ptr];
      end else s_tvalid <= 1'b0;
    end
    if (qv && qr) mem[qa / 4] = qd;
    qr <= ($urandom_range(0, 2) != 0);
    if (reduce_done) n_rdone++;
  end

  task automatic one_call(input bit first, input bit exp_done, input real sums [K][D],
                          input int cnts [K], input real e);
    n_cmd = 0;
    n_rdone = 0;
    @(negedge clk);
    first_iter = first;
    reduce_start = 1'b1;
    @(negedge clk);
    reduce_start = 1'b0;
    while (n_rdone == 0) @(negedge clk);
    repeat (10) @(negedge clk);
    check(n_rdone == 1, "one reduce_done");
    check(n_cmd == (M * MED * 4 + MAXB - 1) / MAXB, $sformatf("%0d DMA commands", n_cmd));
    for (int k = 0; k < K; k++)
      for (int d = 0; d < D; d++)
        check(close(from_fp32(mem[CB / 4 + k * D + d]), sums[k][d] / cnts[k], 1e-6, 1e-6),
              $sformatf("centroid %0d.%0d", k, d));
    check(close(from_fp32(distortion), e, 1e-6, 0.0), "distortion");
    check(iteration_done == exp_done, $sformatf("iteration_done = %0d", iteration_done));
  endtask

  initial begin
    real sums [K][D], e, v;
    int  cnts [K], c;
    reduce_start = 0; first_iter = 0; s_tvalid = 0; s_tdata = 0; qr = 0; dn = 0;
    act = 0; n_cmd = 0; n_rdone = 0;
    for (int w = 0; w < 1024; w++) mem[w] = '0;
    e = 0.0;
    for (int k = 0; k < K; k++) begin
      cnts[k] = 0;
      for (int d = 0; d < D; d++) sums[k][d] = 0.0;
    end
    for (int m = 0; m < M; m++) begin
      for (int k = 0; k < K; k++) begin
        c = $urandom_range(1, 30);
        cnts[k] += c;
        mem[MB / 4 + m * MED + k * (D + 1)] = 32'(c);
        for (int d = 0; d < D; d++) begin
          v = real'(c) * (real'($urandom_range(0, 1024)) - 512.0) / 64.0;
          sums[k][d] += v;
          mem[MB / 4 + m * MED + k * (D + 1) + 1 + d] = to_fp32(v);
        end
      end
      v = real'($urandom_range(0, 1000)) / 2.0;
      e += v;
      mem[MB / 4 + m * MED + MED - 1] = to_fp32(v);
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    one_call(1'b1, 1'b0, sums, cnts, e);
    one_call(1'b0, 1'b1, sums, cnts, e);
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
