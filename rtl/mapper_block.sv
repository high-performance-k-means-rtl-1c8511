// mapper_block: the Mapper_Block, M mapper units and their DmaScheduler.
//
// A mapper unit is a kmeans_map core and its DMA engine. The DMA engines are
// external; their command ports and the sample and label streams are ports of
// this block, one per unit. On map_start the scheduler programs every engine
// (unit i reads part i of the sample set, n_per_map*D words from
// sample_base + i*n_per_map*D*4, and writes its labels, n_per_map words, to
// label_base + i*n_per_map*4) and every core starts at the same time: it loads
// the centroids from centroid_base and will write its intermediate results to
// mediate_base + i*(K*(D+1)+1)*4, the blocks lying back to back so that the
// reducer can read them in one transfer. map_done[i] pulses once both the core
// and its DMA manager have finished, which is when unit i has completed its
// part of the Map phase.
// Block structure and addressing by block ID follow the paper; the port layout
// and the completion rule are this design's own.
// Lint note: the scheduler's overall done and the cores' busy outputs are
// left unread; map_done is formed per unit from the core's and the
// manager's completion instead.
// Reset note: rst_n is an asynchronous reset; it is also sampled by the
// concurrent assertions (disable iff) in this module or below it, which lint
// reports as a net used both ways. The assertions are checks only.
module mapper_block
  import kmeans_pkg::*;
#(
  parameter int unsigned M         = 12,
  parameter int unsigned K         = 4,
  parameter int unsigned D         = 4,
  parameter int unsigned MAX_BYTES = kmeans_pkg::SIMPLE_DMA_MAX_BYTES
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         map_start,
  output logic [M-1:0] map_done,
  input  logic [31:0]  n_per_map,
  input  logic [31:0]  sample_base,
  input  logic [31:0]  label_base,
  input  logic [31:0]  mediate_base,
  input  logic [31:0]  centroid_base,
  // sample streams from the DMA engines
  input  fp32_t        s_sample_tdata  [M],
  input  logic         s_sample_tvalid [M],
  output logic         s_sample_tready [M],
  // label streams to the DMA engines
  output logic [31:0]  m_label_tdata   [M],
  output logic         m_label_tvalid  [M],
  input  logic         m_label_tready  [M],
  output logic         m_label_tlast   [M],
  // DMA command ports
  output logic         mm2s_cmd_valid  [M],
  input  logic         mm2s_cmd_ready  [M],
  output logic [31:0]  mm2s_cmd_addr   [M],
  output logic [31:0]  mm2s_cmd_len    [M],
  input  logic         mm2s_done       [M],
  output logic         s2mm_cmd_valid  [M],
  input  logic         s2mm_cmd_ready  [M],
  output logic [31:0]  s2mm_cmd_addr   [M],
  output logic [31:0]  s2mm_cmd_len    [M],
  input  logic         s2mm_done       [M],
  // memory-mapped masters of the cores
  output logic         mem_req_valid   [M],
  input  logic         mem_req_ready   [M],
  output logic         mem_req_we      [M],
  output logic [31:0]  mem_req_addr    [M],
  output logic [31:0]  mem_req_wdata   [M],
  input  logic         mem_rsp_valid   [M],
  input  logic [31:0]  mem_rsp_rdata   [M]
);
  localparam int unsigned MED_BYTES = (K * (D + 1) + 1) * WORD_BYTES;

  logic [31:0]  sample_bytes, label_bytes;
  logic [M-1:0] mgr_done;
  logic         sched_busy, sched_done;

  assign sample_bytes = n_per_map * 32'(D * WORD_BYTES);
  assign label_bytes  = n_per_map * 32'(WORD_BYTES);

  dma_scheduler #(.N(M), .HAS_S2MM(1'b1), .MAX_BYTES(MAX_BYTES)) u_sched (
    .clk, .rst_n, .start(map_start), .id_base(16'd0),
    .rd_base(sample_base), .rd_len(sample_bytes),
    .wr_base(label_base), .wr_len(label_bytes),
    .busy(sched_busy), .done(sched_done), .mgr_done,
    .mm2s_cmd_valid, .mm2s_cmd_ready, .mm2s_cmd_addr, .mm2s_cmd_len, .mm2s_done,
    .s2mm_cmd_valid, .s2mm_cmd_ready, .s2mm_cmd_addr, .s2mm_cmd_len, .s2mm_done);

  for (genvar i = 0; i < M; i++) begin : g_unit
    logic        core_done, core_busy, core_seen, mgr_seen;
    logic [31:0] med_addr;

    address_calc #(.IDW(16)) u_med_addr (
      .base(mediate_base), .id(16'(i)), .length(32'(MED_BYTES)), .addr(med_addr));

    kmeans_map #(.K(K), .D(D)) u_map (
      .clk, .rst_n, .ap_start(map_start), .ap_done(core_done), .busy(core_busy),
      .n_samples(n_per_map), .centroid_addr(centroid_base), .mediate_addr(med_addr),
      .s_sample_tdata(s_sample_tdata[i]), .s_sample_tvalid(s_sample_tvalid[i]),
      .s_sample_tready(s_sample_tready[i]),
      .m_label_tdata(m_label_tdata[i]), .m_label_tvalid(m_label_tvalid[i]),
      .m_label_tready(m_label_tready[i]), .m_label_tlast(m_label_tlast[i]),
      .mem_req_valid(mem_req_valid[i]), .mem_req_ready(mem_req_ready[i]),
      .mem_req_we(mem_req_we[i]), .mem_req_addr(mem_req_addr[i]),
      .mem_req_wdata(mem_req_wdata[i]),
      .mem_rsp_valid(mem_rsp_valid[i]), .mem_rsp_rdata(mem_rsp_rdata[i]));

    // map_done[i]: both the core and its DMA manager have finished.
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        core_seen   <= 1'b0;
        mgr_seen    <= 1'b0;
        map_done[i] <= 1'b0;
      end else begin
        map_done[i] <= 1'b0;
        if (map_start) begin
          core_seen <= 1'b0;
          mgr_seen  <= 1'b0;
        end else if ((core_done || core_seen) && (mgr_done[i] || mgr_seen)) begin
          map_done[i] <= 1'b1;
          core_seen   <= 1'b0;
          mgr_seen    <= 1'b0;
        end else begin
          if (core_done)   core_seen <= 1'b1;
          if (mgr_done[i]) mgr_seen  <= 1'b1;
        end
      end
    end
  end

  a_no_restart_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    map_start |-> !sched_busy);
endmodule
