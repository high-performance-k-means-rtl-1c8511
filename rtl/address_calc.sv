// address_calc: the Address Calculator of a DMA manager.
//
// Data blocks of one kind (sample parts, label parts, intermediate-result
// blocks) lie back to back in memory, so the start address of block ID is
//     addr = base + id * length
// which is equation (1) of the design. The unit is combinational: addr
// follows base, id and length in the same cycle. All quantities are byte
// addresses and byte lengths; the sum wraps modulo 2^32 (the design's own
// choice of a 32-bit address space, matching the 32-bit DMA address).
module address_calc #(
  parameter int unsigned IDW = 16  // width of the block ID
) (
  input  logic [31:0]    base,
  input  logic [IDW-1:0] id,
  input  logic [31:0]    length,
  output logic [31:0]    addr
);
  assign addr = base + 32'(id) * length;
endmodule
