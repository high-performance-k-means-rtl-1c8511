// tb_kmeans_reduce: checks the reducer core at its default size (M = 12,
// K = 4, D = 4). The testbench streams M blocks of intermediate results (with
// random gaps) and a memory model takes the centroid writes (with random
// stalls). Cluster 2 receives no sample in any mapper, so its centroid must
// stay untouched; every other centroid must equal the summed partial sums
// divided by the summed counts (double-precision reference). The distortion
// must equal the total, and iteration_done must follow the threshold rule:
// low on a first iteration, high when the change is within the threshold,
// low when it exceeds it.
module tb_kmeans_reduce;
  import tb_fp_pkg::*;
  localparam int unsigned M = 12;
  localparam int unsigned K = 4;
  localparam int unsigned D = 4;
  localparam int unsigned MED = K * (D + 1) + 1;
  localparam logic [31:0] CADDR = 32'h200;
  localparam logic [31:0] SENTINEL = 32'h4242_4242;
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

  logic        ap_start, ap_done, busy, first_iter, iteration_done;
  logic [31:0] threshold, distortion, s_tdata, mreq_addr, mreq_wdata;
  logic        s_tvalid, s_tready, mreq_valid, mreq_ready;

  kmeans_reduce #(.M(M), .K(K), .D(D)) dut (
    .clk, .rst_n, .ap_start, .ap_done, .busy, .first_iter, .threshold,
    .centroid_addr(CADDR), .s_med_tdata(s_tdata), .s_med_tvalid(s_tvalid),
    .s_med_tready(s_tready), .mem_req_valid(mreq_valid), .mem_req_ready(mreq_ready),
    .mem_req_addr(mreq_addr), .mem_req_wdata(mreq_wdata),
    .iteration_done, .distortion);

  logic [31:0] mem [512];
  logic [31:0] words [M * MED];
  int          w_ptr, n_writes;

  always @(posedge clk) begin
    if (mreq_valid && mreq_ready) begin
      mem[mreq_addr / 4] = mreq_wdata;
      n_writes++;
    end
    mreq_ready <= ($urandom_range(0, 2) != 0);
    if (s_tvalid && s_tready) w_ptr++;
    if (s_tvalid && !s_tready) begin
      // hold
    end else if (w_ptr < M * MED && $urandom_range(0, 3) != 0) begin
      s_tvalid <= 1'b1;
      s_tdata  <= words[w_ptr];
    end else begin
      s_tvalid <= 1'b0;
    end
  end

  real tot_s [K][D];
  int  tot_c [K];
  real tot_e;

  // Build the M blocks; extra_e is added to mapper 0's distortion.
  task automatic make_data(input real extra_e);
    int  c;
    real v, e;
    tot_e = 0.0;
    for (int k = 0; k < K; k++) begin
      tot_c[k] = 0;
      for (int d = 0; d < D; d++) tot_s[k][d] = 0.0;
    end
    for (int m = 0; m < M; m++) begin
      for (int k = 0; k < K; k++) begin
        c = (k == 2) ? 0 : $urandom_range(0, 40);
        words[m * MED + k * (D + 1)] = 32'(c);
        tot_c[k] += c;
        for (int d = 0; d < D; d++) begin
          v = (c == 0) ? 0.0 : real'(c) * (real'($urandom_range(0, 2048)) - 1024.0) / 128.0;
          words[m * MED + k * (D + 1) + 1 + d] = to_fp32(v);
          tot_s[k][d] += v;
        end
      end
      e = real'($urandom_range(0, 4000)) / 4.0 + ((m == 0) ? extra_e : 0.0);
      words[m * MED + MED - 1] = to_fp32(e);
      tot_e += e;
    end
  endtask

  task automatic one_call(input bit first, input real thr, input bit exp_done, input string name);
    for (int w = 0; w < 512; w++) mem[w] = SENTINEL;
    w_ptr = 0;
    n_writes = 0;
    @(negedge clk);
    first_iter = first;
    threshold = to_fp32(thr);
    ap_start = 1'b1;
    @(negedge clk);
    ap_start = 1'b0;
    while (!ap_done) @(negedge clk);
    for (int k = 0; k < K; k++)
      for (int d = 0; d < D; d++) begin
        if (tot_c[k] == 0)
          check(mem[CADDR / 4 + k * D + d] == SENTINEL,
                $sformatf("%s: empty cluster %0d not written", name, k));
        else
          check(close(from_fp32(mem[CADDR / 4 + k * D + d]), tot_s[k][d] / tot_c[k], 1e-5, 1e-6),
                $sformatf("%s: centroid %0d.%0d = %f, expected %f", name, k, d,
                          from_fp32(mem[CADDR / 4 + k * D + d]), tot_s[k][d] / tot_c[k]));
      end
    check(n_writes == (K - 1) * D, $sformatf("%s: %0d centroid writes", name, n_writes));
    check(close(from_fp32(distortion), tot_e, 1e-6, 0.0),
          $sformatf("%s: distortion %f, expected %f", name, from_fp32(distortion), tot_e));
    check(iteration_done == exp_done, $sformatf("%s: iteration_done = %0d", name, iteration_done));
    repeat (3) @(negedge clk);
    check(iteration_done == exp_done, $sformatf("%s: iteration_done held", name));
  endtask

  initial begin
    ap_start = 0; first_iter = 0; threshold = 0; s_tvalid = 0; s_tdata = 0;
    mreq_ready = 0; w_ptr = M * MED;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    make_data(0.0);
    one_call(1'b1, 0.0, 1'b0, "first iteration");
    one_call(1'b0, 0.0, 1'b1, "unchanged distortion");
    make_data(0.0);
    words[MED - 1] = to_fp32(from_fp32(words[MED - 1]) + 10.0);
    tot_e += 10.0;
    one_call(1'b0, 0.5, 1'b0, "new data, change above threshold");
    words[MED - 1] = to_fp32(from_fp32(words[MED - 1]) + 0.25);
    tot_e += 0.25;
    one_call(1'b0, 0.5, 1'b1, "change 0.25 within threshold 0.5");
    one_call(1'b1, 0.5, 1'b0, "new run starts without history");
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
