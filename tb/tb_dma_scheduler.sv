// tb_dma_scheduler: checks the DmaScheduler with N = 3 managers. After a
// start every manager must issue its read and write transfer (part i at
// base + i*len), mgr_done[i] must pulse when manager i's engines have
// finished, and done must pulse once, after the last manager. A start while
// busy must be ignored (no extra transfers), and a second start after done
// must run the whole sequence again.
module tb_dma_scheduler;
  localparam int unsigned N = 3;
  localparam int unsigned MAXB = 32;
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

  logic         start, busy, done;
  logic [N-1:0] mgr_done;
  logic         rv [N], rr [N], rdn [N], wv [N], wr [N], wdn [N];
  logic [31:0]  ra [N], rl [N], wa [N], wl [N];
  localparam logic [31:0] RB = 32'h1000, WB = 32'h8000, RL = 32'd80, WL = 32'd40;

  dma_scheduler #(.N(N), .HAS_S2MM(1'b1), .MAX_BYTES(MAXB)) dut (
    .clk, .rst_n, .start, .id_base(16'd0), .rd_base(RB), .rd_len(RL),
    .wr_base(WB), .wr_len(WL), .busy, .done, .mgr_done,
    .mm2s_cmd_valid(rv), .mm2s_cmd_ready(rr), .mm2s_cmd_addr(ra), .mm2s_cmd_len(rl),
    .mm2s_done(rdn),
    .s2mm_cmd_valid(wv), .s2mm_cmd_ready(wr), .s2mm_cmd_addr(wa), .s2mm_cmd_len(wl),
    .s2mm_done(wdn));

  logic [31:0] r_got [N], w_got [N];
  int          r_wait [N], w_wait [N], n_mgr_done [N], n_done, bad;
  int          last_mgr_cycle, done_cycle, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    for (int i = 0; i < N; i++) begin
      rdn[i] <= 1'b0;
      wdn[i] <= 1'b0;
      if (rv[i] && rr[i]) begin
        if (ra[i] != RB + 32'(i) * RL + r_got[i]) bad++;
        r_got[i] += rl[i];
        r_wait[i] = $urandom_range(1, 12);
      end else if (r_wait[i] > 0) begin
        r_wait[i]--;
        if (r_wait[i] == 0) rdn[i] <= 1'b1;
      end
      if (wv[i] && wr[i]) begin
        if (wa[i] != WB + 32'(i) * WL + w_got[i]) bad++;
        w_got[i] += wl[i];
        w_wait[i] = $urandom_range(1, 12);
      end else if (w_wait[i] > 0) begin
        w_wait[i]--;
        if (w_wait[i] == 0) wdn[i] <= 1'b1;
      end
      rr[i] <= ($urandom_range(0, 1) == 1);
      wr[i] <= ($urandom_range(0, 1) == 1);
      if (mgr_done[i]) begin
        n_mgr_done[i]++;
        last_mgr_cycle = cyc;
      end
    end
    if (done) begin
      n_done++;
      done_cycle = cyc;
    end
  end

  task automatic one_job(input int t);
    for (int i = 0; i < N; i++) begin
      r_got[i] = 0; w_got[i] = 0; n_mgr_done[i] = 0;
    end
    n_done = 0;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    check(busy, "busy after start");
    repeat (5) @(negedge clk);
    start = 1'b1;                    // ignored: scheduler is busy
    @(negedge clk);
    start = 1'b0;
    while (busy) @(negedge clk);
    repeat (30) @(negedge clk);
    check(n_done == 1, $sformatf("job %0d: one done pulse", t));
    check(done_cycle > last_mgr_cycle, $sformatf("job %0d: done after the last manager", t));
    for (int i = 0; i < N; i++) begin
      check(n_mgr_done[i] == 1, $sformatf("job %0d: manager %0d done once", t, i));
      check(r_got[i] == RL && w_got[i] == WL, $sformatf("job %0d: manager %0d moved %0d/%0d bytes", t, i, r_got[i], w_got[i]));
    end
  endtask

  initial begin
    start = 0; n_done = 0; bad = 0; last_mgr_cycle = 0; done_cycle = 0;
    for (int i = 0; i < N; i++) begin
      r_wait[i] = 0; w_wait[i] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    one_job(0);
    one_job(1);
    check(bad == 0, "all pieces at the right addresses");
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
