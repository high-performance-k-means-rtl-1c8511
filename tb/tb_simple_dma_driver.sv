// tb_simple_dma_driver: checks that a transfer is issued as pieces of at most
// MAX_BYTES at consecutive addresses, one at a time (the next only after the
// engine's completion pulse), and that done pulses once, after the last
// piece. The engine answers after a random delay and accepts commands late
// at random. Also checks a zero-length transfer and the default 8 MB limit.
module tb_simple_dma_driver;
  localparam int unsigned MAXB = 100;
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

  // small-limit instance
  logic        start, done, busy, cmd_valid, cmd_ready, dma_done;
  logic [31:0] addr, length, cmd_addr, cmd_len;
  simple_dma_driver #(.MAX_BYTES(MAXB)) dut (
    .clk, .rst_n, .start, .addr, .length, .done, .busy,
    .cmd_valid, .cmd_ready, .cmd_addr, .cmd_len, .dma_done);

  // default-limit instance (8 MB)
  logic        start2, done2, busy2, cmd_valid2, dma_done2;
  logic [31:0] cmd_addr2, cmd_len2;
  simple_dma_driver dut2 (
    .clk, .rst_n, .start(start2), .addr(32'h1000_0000), .length(32'd20_000_000),
    .done(done2), .busy(busy2), .cmd_valid(cmd_valid2), .cmd_ready(1'b1),
    .cmd_addr(cmd_addr2), .cmd_len(cmd_len2), .dma_done(dma_done2));

  // engine model: accepts a command, completes it after a random delay
  bit          eng_busy = 0;
  int          eng_wait = 0;
  logic [31:0] got_addr [$];
  logic [31:0] got_len  [$];
  int          n_done = 0, overlap = 0;
  always @(posedge clk) begin
    dma_done <= 1'b0;
    if (cmd_valid && cmd_ready) begin
      if (eng_busy) overlap++;
      eng_busy = 1;
      eng_wait = $urandom_range(1, 6);
      got_addr.push_back(cmd_addr);
      got_len.push_back(cmd_len);
    end else if (eng_busy) begin
      eng_wait--;
      if (eng_wait == 0) begin
        eng_busy = 0;
        dma_done <= 1'b1;
      end
    end
    cmd_ready <= ($urandom_range(0, 2) != 0);
    if (done) n_done++;
  end

  task automatic xfer(input logic [31:0] a, input logic [31:0] len);
    logic [31:0] exp_a, rem, piece;
    int          cyc;
    got_addr.delete();
    got_len.delete();
    n_done = 0;
    @(negedge clk);
    addr = a; length = len; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 0;
    while (!done && cyc < 10000) begin
      @(negedge clk);
      cyc++;
    end
    @(negedge clk);
    check(n_done == 1, $sformatf("len %0d: one done pulse (%0d)", len, n_done));
    check(!busy, "idle after done");
    exp_a = a;
    rem = len;
    check(got_len.size() == (len + MAXB - 1) / MAXB,
          $sformatf("len %0d: %0d pieces", len, got_len.size()));
    for (int p = 0; p < got_len.size(); p++) begin
      piece = (rem > MAXB) ? MAXB : rem;
      check(got_addr[p] == exp_a && got_len[p] == piece,
            $sformatf("len %0d piece %0d: %h/%0d, expected %h/%0d", len, p,
                      got_addr[p], got_len[p], exp_a, piece));
      exp_a += piece;
      rem -= piece;
    end
  endtask

  initial begin
    start = 0; start2 = 0; addr = 0; length = 0; dma_done2 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    xfer(32'h0000_2000, 32'd0);
    xfer(32'h0000_2000, 32'd52);
    xfer(32'h0000_3000, 32'd100);
    xfer(32'h0001_0000, 32'd1000);
    xfer(32'h0002_0004, 32'd257);
    check(overlap == 0, "never more than one piece outstanding");
    // 20,000,000 bytes with the default limit: 8 MB, 8 MB, remainder
    @(negedge clk);
    start2 = 1'b1;
    @(negedge clk);
    start2 = 1'b0;
    check(cmd_valid2 && cmd_addr2 == 32'h1000_0000 && cmd_len2 == 32'd8388608, "8 MB piece 1");
    @(negedge clk);
    dma_done2 = 1'b1;
    @(negedge clk);
    dma_done2 = 1'b0;
    check(cmd_valid2 && cmd_addr2 == 32'h1080_0000 && cmd_len2 == 32'd8388608, "8 MB piece 2");
    @(negedge clk);
    dma_done2 = 1'b1;
    @(negedge clk);
    dma_done2 = 1'b0;
    check(cmd_valid2 && cmd_addr2 == 32'h1100_0000 && cmd_len2 == 32'd3222784, "remainder piece");
    @(negedge clk);
    dma_done2 = 1'b1;
    @(posedge clk);
    #1 check(done2, "done after remainder");
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
