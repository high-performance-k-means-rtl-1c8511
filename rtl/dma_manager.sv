// dma_manager: a DMA Manager, which runs one DMA engine for one data block.
//
// It is made of the three parts the design names:
//   * Global-ID Generator - on start, gives the data block handled by this
//     manager its ID, id_base + INDEX, where INDEX is the manager's position in
//     its scheduler. Mapper i thus gets part i of the sample set and of the
//     label space.
//   * Address Calculators - start address = base + ID * length for the read
//     (memory-to-stream) channel and, if HAS_S2MM, the write channel.
//   * Simple-Mode DMA Drivers - one per channel, each cutting its transfer into
//     pieces of at most MAX_BYTES.
// The ID is registered in the cycle of start and both channels are launched
// in the next cycle. done pulses once both channels have completed; busy is
// high from start until then. The ID rule (index plus a runtime base) is this
// design's own reading of "specific IDs assigned to each data block".
// Lint note: built without a write channel (HAS_S2MM = 0), the write-side
// inputs (wr_base, wr_len, s2mm_cmd_ready, s2mm_done) are left unread on
// purpose, so that both variants keep one port list.
// Reset note: rst_n is an asynchronous reset; it is also sampled by the
// concurrent assertions (disable iff) in this module or below it, which lint
// reports as a net used both ways. The assertions are checks only.
module dma_manager #(
  parameter int unsigned INDEX     = 0,
  parameter bit          HAS_S2MM  = 1'b1,
  parameter int unsigned MAX_BYTES = kmeans_pkg::SIMPLE_DMA_MAX_BYTES,
  parameter int unsigned IDW       = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [IDW-1:0] id_base,
  input  logic [31:0]    rd_base,
  input  logic [31:0]    rd_len,
  input  logic [31:0]    wr_base,
  input  logic [31:0]    wr_len,
  output logic           done,
  output logic           busy,
  output logic [IDW-1:0] id,
  // memory-to-stream channel
  output logic           mm2s_cmd_valid,
  input  logic           mm2s_cmd_ready,
  output logic [31:0]    mm2s_cmd_addr,
  output logic [31:0]    mm2s_cmd_len,
  input  logic           mm2s_done,
  // stream-to-memory channel (unused when HAS_S2MM is 0)
  output logic           s2mm_cmd_valid,
  input  logic           s2mm_cmd_ready,
  output logic [31:0]    s2mm_cmd_addr,
  output logic [31:0]    s2mm_cmd_len,
  input  logic           s2mm_done
);
  logic        launch;        // drivers start one cycle after the ID is issued
  logic        rd_done_seen, wr_done_seen;
  logic        rd_done, wr_done, rd_busy, wr_busy;
  logic [31:0] rd_addr, wr_addr;

  // Global-ID Generator
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      id     <= '0;
      launch <= 1'b0;
    end else begin
      launch <= start && !busy;
      if (start && !busy) id <= id_base + IDW'(INDEX);
    end
  end

  address_calc #(.IDW(IDW)) u_rd_addr (.base(rd_base), .id(id), .length(rd_len), .addr(rd_addr));

  simple_dma_driver #(.MAX_BYTES(MAX_BYTES)) u_rd_drv (
    .clk, .rst_n, .start(launch), .addr(rd_addr), .length(rd_len),
    .done(rd_done), .busy(rd_busy),
    .cmd_valid(mm2s_cmd_valid), .cmd_ready(mm2s_cmd_ready),
    .cmd_addr(mm2s_cmd_addr), .cmd_len(mm2s_cmd_len), .dma_done(mm2s_done));

  if (HAS_S2MM) begin : g_s2mm
    address_calc #(.IDW(IDW)) u_wr_addr (.base(wr_base), .id(id), .length(wr_len), .addr(wr_addr));
    simple_dma_driver #(.MAX_BYTES(MAX_BYTES)) u_wr_drv (
      .clk, .rst_n, .start(launch), .addr(wr_addr), .length(wr_len),
      .done(wr_done), .busy(wr_busy),
      .cmd_valid(s2mm_cmd_valid), .cmd_ready(s2mm_cmd_ready),
      .cmd_addr(s2mm_cmd_addr), .cmd_len(s2mm_cmd_len), .dma_done(s2mm_done));
  end else begin : g_no_s2mm
    // Without a write channel its completion counts as immediate. The unused
    // command inputs s2mm_cmd_ready and s2mm_done are left unread on purpose.
    assign wr_addr        = '0;
    assign wr_done        = launch;
    assign wr_busy        = 1'b0;
    assign s2mm_cmd_valid = 1'b0;
    assign s2mm_cmd_addr  = '0;
    assign s2mm_cmd_len   = '0;
  end

  // Completion of both channels, in either order.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_done_seen <= 1'b0;
      wr_done_seen <= 1'b0;
      done         <= 1'b0;
      busy         <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy         <= 1'b1;
        rd_done_seen <= 1'b0;
        wr_done_seen <= 1'b0;
      end else if (busy) begin
        if ((rd_done || rd_done_seen) && (wr_done || wr_done_seen)) begin
          busy         <= 1'b0;
          done         <= 1'b1;
          rd_done_seen <= 1'b0;
          wr_done_seen <= 1'b0;
        end else begin
          if (rd_done) rd_done_seen <= 1'b1;
          if (wr_done) wr_done_seen <= 1'b1;
        end
      end
    end
  end

  a_drivers_idle_at_start: assert property (@(posedge clk) disable iff (!rst_n)
    launch |-> (!rd_busy && !wr_busy));
endmodule
