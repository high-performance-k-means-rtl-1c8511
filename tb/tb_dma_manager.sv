// tb_dma_manager: checks one DMA manager with a read and a write channel
// (INDEX 2) and one with a read channel only (INDEX 1). For each start the
// issued ID must be id_base + INDEX, the read pieces must cover
// rd_base + ID*rd_len .. + rd_len and the write pieces wr_base + ID*wr_len ..
// + wr_len in pieces of at most MAXB bytes, and done must pulse once, only
// after both channels have completed. The two engines finish at random,
// unrelated times.
module tb_dma_manager;
  localparam int unsigned MAXB = 64;
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

  logic        start;
  logic [15:0] id_base;
  logic [31:0] rd_base, rd_len, wr_base, wr_len;
  logic        done [2], busy [2];
  logic [15:0] id [2];
  logic        rv [2], rr [2], rdn [2], wv [2], wr [2], wdn [2];
  logic [31:0] ra [2], rl [2], wa [2], wl [2];

  dma_manager #(.INDEX(2), .HAS_S2MM(1'b1), .MAX_BYTES(MAXB)) dut0 (
    .clk, .rst_n, .start, .id_base, .rd_base, .rd_len, .wr_base, .wr_len,
    .done(done[0]), .busy(busy[0]), .id(id[0]),
    .mm2s_cmd_valid(rv[0]), .mm2s_cmd_ready(rr[0]), .mm2s_cmd_addr(ra[0]),
    .mm2s_cmd_len(rl[0]), .mm2s_done(rdn[0]),
    .s2mm_cmd_valid(wv[0]), .s2mm_cmd_ready(wr[0]), .s2mm_cmd_addr(wa[0]),
    .s2mm_cmd_len(wl[0]), .s2mm_done(wdn[0]));
  dma_manager #(.INDEX(1), .HAS_S2MM(1'b0), .MAX_BYTES(MAXB)) dut1 (
    .clk, .rst_n, .start, .id_base, .rd_base, .rd_len, .wr_base, .wr_len,
    .done(done[1]), .busy(busy[1]), .id(id[1]),
    .mm2s_cmd_valid(rv[1]), .mm2s_cmd_ready(rr[1]), .mm2s_cmd_addr(ra[1]),
    .mm2s_cmd_len(rl[1]), .mm2s_done(rdn[1]),
    .s2mm_cmd_valid(wv[1]), .s2mm_cmd_ready(wr[1]), .s2mm_cmd_addr(wa[1]),
    .s2mm_cmd_len(wl[1]), .s2mm_done(wdn[1]));

  // engine models: per channel, next expected address and bytes still to come
  logic [31:0] r_next [2], r_left [2], w_next [2], w_left [2];
  int          r_wait [2], w_wait [2];
  int          n_done [2], bad_piece [2], early_done [2];
  always @(posedge clk) begin
    for (int u = 0; u < 2; u++) begin
      rdn[u] <= 1'b0;
      wdn[u] <= 1'b0;
      if (rv[u] && rr[u]) begin
        if (ra[u] != r_next[u] || rl[u] > MAXB || rl[u] > r_left[u]) bad_piece[u]++;
        r_next[u] += rl[u];
        r_left[u] -= rl[u];
        r_wait[u] = $urandom_range(1, 9);
      end else if (r_wait[u] > 0) begin
        r_wait[u]--;
        if (r_wait[u] == 0) rdn[u] <= 1'b1;
      end
      if (wv[u] && wr[u]) begin
        if (wa[u] != w_next[u] || wl[u] > MAXB || wl[u] > w_left[u]) bad_piece[u]++;
        w_next[u] += wl[u];
        w_left[u] -= wl[u];
        w_wait[u] = $urandom_range(1, 9);
      end else if (w_wait[u] > 0) begin
        w_wait[u]--;
        if (w_wait[u] == 0) wdn[u] <= 1'b1;
      end
      rr[u] <= ($urandom_range(0, 1) == 1);
      wr[u] <= ($urandom_range(0, 1) == 1);
      if (done[u]) begin
        n_done[u]++;
        if (r_left[u] != 0 || r_wait[u] != 0 || (u == 0 && (w_left[u] != 0 || w_wait[u] != 0)))
          early_done[u]++;
      end
    end
  end

  initial begin
    int idx [2];
    idx[0] = 2;
    idx[1] = 1;
    start = 0;
    id_base = 0; rd_base = 0; rd_len = 0; wr_base = 0; wr_len = 0;
    for (int u = 0; u < 2; u++) begin
      r_wait[u] = 0; w_wait[u] = 0; n_done[u] = 0; bad_piece[u] = 0; early_done[u] = 0;
      r_left[u] = 0; w_left[u] = 0; r_next[u] = 0; w_next[u] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 6; t++) begin
      @(negedge clk);
      id_base = 16'($urandom_range(0, 20));
      rd_base = 32'($urandom_range(0, 1000)) * 4;
      wr_base = 32'h10_0000 + 32'($urandom_range(0, 1000)) * 4;
      rd_len  = 32'($urandom_range(1, 100)) * 4;
      wr_len  = 32'($urandom_range(1, 100)) * 4;
      for (int u = 0; u < 2; u++) begin
        n_done[u] = 0;
        r_next[u] = rd_base + (32'(id_base) + 32'(idx[u])) * rd_len;
        r_left[u] = rd_len;
        w_next[u] = wr_base + (32'(id_base) + 32'(idx[u])) * wr_len;
        w_left[u] = (u == 0) ? wr_len : 32'd0;
      end
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      check(id[0] == id_base + 16'd2 && id[1] == id_base + 16'd1, "global IDs");
      while (busy[0] || busy[1]) @(negedge clk);
      repeat (3) @(negedge clk);
      for (int u = 0; u < 2; u++) begin
        check(n_done[u] == 1, $sformatf("trial %0d unit %0d: one done pulse", t, u));
        check(r_left[u] == 0 && w_left[u] == 0, $sformatf("trial %0d unit %0d: all bytes issued", t, u));
      end
    end
    for (int u = 0; u < 2; u++) begin
      check(bad_piece[u] == 0, $sformatf("unit %0d: pieces at the right addresses", u));
      check(early_done[u] == 0, $sformatf("unit %0d: done only after both channels", u));
    end
    check(wv[1] == 1'b0, "no write commands without a write channel");
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
