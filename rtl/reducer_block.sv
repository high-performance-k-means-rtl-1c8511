// reducer_block: the Reducer_Block, the reducer unit and its DmaScheduler.
//
// The reducer unit is the kmeans_reduce core and a DMA engine; the engine is
// external and its command port and the intermediate-results stream are ports
// of this block. On reduce_start the one-manager scheduler has the engine read
// all M intermediate-result blocks, M*(K*(D+1)+1) words stored back to back
// from mediate_base, in one transfer (cut into 8 MB pieces if larger), and the
// core starts at the same time. reduce_done pulses once both the core has
// written the new centroids and the DMA transfer has completed;
// iteration_done and distortion are valid from then until the next
// reduce_start. Block structure follows the paper; the completion rule is this
// design's own.
// Lint note: the one-manager scheduler's per-manager done and its unused
// write-channel command outputs are left unread.
// Reset note: rst_n is an asynchronous reset; it is also sampled by the
// concurrent assertions (disable iff) in this module or below it, which lint
// reports as a net used both ways. The assertions are checks only.
module reducer_block
  import kmeans_pkg::*;
#(
  parameter int unsigned M         = 12,
  parameter int unsigned K         = 4,
  parameter int unsigned D         = 4,
  parameter int unsigned MAX_BYTES = kmeans_pkg::SIMPLE_DMA_MAX_BYTES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reduce_start,
  output logic        reduce_done,
  input  logic        first_iter,
  input  fp32_t       threshold,
  input  logic [31:0] mediate_base,
  input  logic [31:0] centroid_base,
  output logic        iteration_done,
  output fp32_t       distortion,
  // intermediate-results stream from the DMA engine
  input  logic [31:0] s_med_tdata,
  input  logic        s_med_tvalid,
  output logic        s_med_tready,
  // DMA command port (read channel only)
  output logic        mm2s_cmd_valid,
  input  logic        mm2s_cmd_ready,
  output logic [31:0] mm2s_cmd_addr,
  output logic [31:0] mm2s_cmd_len,
  input  logic        mm2s_done,
  // memory-mapped master of the core, write only
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output logic [31:0] mem_req_addr,
  output logic [31:0] mem_req_wdata
);
  localparam int unsigned TOTAL_BYTES = M * (K * (D + 1) + 1) * WORD_BYTES;

  logic        sched_busy, sched_done, core_done, core_busy;
  logic [0:0]  mgr_done;
  logic        core_seen, mgr_seen;
  // one-manager scheduler; its unused write-channel ports tie off here
  logic        v_mm2s_valid [1], v_mm2s_ready [1], v_mm2s_done [1];
  logic [31:0] v_mm2s_addr [1], v_mm2s_len [1];
  logic        v_s2mm_valid [1], v_s2mm_ready [1], v_s2mm_done [1];
  logic [31:0] v_s2mm_addr [1], v_s2mm_len [1];

  assign mm2s_cmd_valid  = v_mm2s_valid[0];
  assign mm2s_cmd_addr   = v_mm2s_addr[0];
  assign mm2s_cmd_len    = v_mm2s_len[0];
  assign v_mm2s_ready[0] = mm2s_cmd_ready;
  assign v_mm2s_done[0]  = mm2s_done;
  assign v_s2mm_ready[0] = 1'b0;
  assign v_s2mm_done[0]  = 1'b0;

  dma_scheduler #(.N(1), .HAS_S2MM(1'b0), .MAX_BYTES(MAX_BYTES)) u_sched (
    .clk, .rst_n, .start(reduce_start), .id_base(16'd0),
    .rd_base(mediate_base), .rd_len(32'(TOTAL_BYTES)),
    .wr_base(32'd0), .wr_len(32'd0),
    .busy(sched_busy), .done(sched_done), .mgr_done,
    .mm2s_cmd_valid(v_mm2s_valid), .mm2s_cmd_ready(v_mm2s_ready),
    .mm2s_cmd_addr(v_mm2s_addr), .mm2s_cmd_len(v_mm2s_len), .mm2s_done(v_mm2s_done),
    .s2mm_cmd_valid(v_s2mm_valid), .s2mm_cmd_ready(v_s2mm_ready),
    .s2mm_cmd_addr(v_s2mm_addr), .s2mm_cmd_len(v_s2mm_len), .s2mm_done(v_s2mm_done));

  kmeans_reduce #(.M(M), .K(K), .D(D)) u_reduce (
    .clk, .rst_n, .ap_start(reduce_start), .ap_done(core_done), .busy(core_busy),
    .first_iter, .threshold, .centroid_addr(centroid_base),
    .s_med_tdata, .s_med_tvalid, .s_med_tready,
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_req_wdata,
    .iteration_done, .distortion);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      core_seen   <= 1'b0;
      mgr_seen    <= 1'b0;
      reduce_done <= 1'b0;
    end else begin
      reduce_done <= 1'b0;
      if (reduce_start) begin
        core_seen <= 1'b0;
        mgr_seen  <= 1'b0;
      end else if ((core_done || core_seen) && (sched_done || mgr_seen)) begin
        reduce_done <= 1'b1;
        core_seen   <= 1'b0;
        mgr_seen    <= 1'b0;
      end else begin
        if (core_done)  core_seen <= 1'b1;
        if (sched_done) mgr_seen  <= 1'b1;
      end
    end
  end

  a_no_restart_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    reduce_start |-> !(sched_busy || core_busy));
endmodule
