// tb_address_calc: checks addr = base + id * length on corner and random
// values, computed here in 64-bit arithmetic and reduced modulo 2^32.
module tb_address_calc;
  logic [31:0] base, length, addr;
  logic [15:0] id;
  int checks = 0, failures = 0;

  address_calc #(.IDW(16)) dut (.base, .id, .length, .addr);

  task automatic try(input logic [31:0] b, input logic [15:0] i, input logic [31:0] l);
    longint unsigned expect_addr;
    base = b; id = i; length = l;
    #1;
    expect_addr = (longint'(b) + longint'(i) * longint'(l)) & 64'hFFFF_FFFF;
    checks++;
    if (addr != expect_addr[31:0]) begin
      failures++;
      $display("FAIL: base=%h id=%0d len=%h addr=%h expected %h", b, i, l, addr, expect_addr[31:0]);
    end
  endtask

  initial begin
    try(32'h1000, 16'd0, 32'd400);
    try(32'h1000, 16'd11, 32'd400);
    try(32'h0, 16'd3, 32'h0080_0000);
    try(32'hFFFF_FFF0, 16'd1, 32'h20);
    for (int n = 0; n < 200; n++) try($urandom, 16'($urandom), $urandom_range(0, 1 << 20));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
