// tb_iteration_controller: checks the iteration sequence with M = 4 mapper
// units modelled here. Each iteration must start with one map_start pulse;
// reduce_start must come only after all four map_done pulses, which arrive in
// random order and at random times; after reduce_done the controller must
// either stop (iteration_done high: done pulses, converged high) or start the
// next iteration. Runs converge after 3 and 1 iterations; a third run is cut
// by max_iter = 2 with converged low.
module tb_iteration_controller;
  localparam int unsigned M = 4;
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

  logic         start, busy, done, converged, first_iter;
  logic         map_start, reduce_start, reduce_done, iteration_done;
  logic [M-1:0] map_done;
  logic [31:0]  iterations, max_iter;

  iteration_controller #(.M(M)) dut (
    .clk, .rst_n, .start, .max_iter, .busy, .done, .converged, .iterations,
    .first_iter, .map_start, .map_done, .reduce_start, .reduce_done, .iteration_done);

  // Mapper and reducer models.
  int  map_wait [M], red_wait, maps_seen, red_early, n_map_start, n_red_start, n_done;
  int  conv_after, red_count, first_bad;
  bit  mapping;
  always @(posedge clk) begin
    map_done    <= '0;
    reduce_done <= 1'b0;
    if (map_start) begin
      n_map_start++;
      maps_seen = 0;
      mapping = 1;
      if (first_iter != (n_map_start == 1)) first_bad++;
      for (int i = 0; i < M; i++) map_wait[i] = $urandom_range(1, 40);
    end else if (mapping) begin
      for (int i = 0; i < M; i++) if (map_wait[i] > 0) begin
        map_wait[i]--;
        if (map_wait[i] == 0) begin
          map_done[i] <= 1'b1;
          maps_seen++;
        end
      end
    end
    if (reduce_start) begin
      n_red_start++;
      if (maps_seen != M) red_early++;
      mapping = 0;
      red_wait = $urandom_range(1, 20);
    end else if (red_wait > 0) begin
      red_wait--;
      if (red_wait == 0) begin
        red_count++;
        reduce_done    <= 1'b1;
        iteration_done <= (red_count >= conv_after);
      end
    end
    if (done) n_done++;
  end

  task automatic run(input int conv, input int limit, input int exp_iters, input bit exp_conv);
    n_map_start = 0; n_red_start = 0; n_done = 0; red_count = 0; conv_after = conv;
    iteration_done = 1'b0;
    max_iter = 32'(limit);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    repeat (5) @(negedge clk);
    check(iterations == 32'(exp_iters), $sformatf("iterations %0d, expected %0d", iterations, exp_iters));
    check(n_map_start == exp_iters, "one map_start per iteration");
    check(n_red_start == exp_iters, "one reduce_start per iteration");
    check(n_done == 1, "one done pulse");
    check(converged == exp_conv, "converged flag");
    check(!busy, "idle after done");
  endtask

  initial begin
    start = 0; red_wait = 0; red_early = 0; mapping = 0; first_bad = 0;
    iteration_done = 0; max_iter = 0;
    for (int i = 0; i < M; i++) map_wait[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(3, 0, 3, 1'b1);
    run(1, 0, 1, 1'b1);
    run(5, 2, 2, 1'b0);
    check(red_early == 0, "reduce_start only after all map_done");
    check(first_bad == 0, "first_iter only in the first iteration");
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
