// kmeans_top: the k-means accelerator, a simplified Map-Reduce system of M
// mappers and one reducer under hardware control.
//
// Three parts, wired as in the design's system diagram:
//   * mapper_block   - M Kmeans_Map cores and the mapper-side DmaScheduler;
//   * reducer_block  - the Kmeans_Reduce core and the reducer-side DmaScheduler;
//   * iteration_controller - pulses map_start, collects the M map_done
//     pulses, pulses reduce_start, waits for reduce_done and repeats until the
//     reducer reports iteration_done (or max_iter iterations, if non-zero).
// A pulse on start runs k-means to completion; done then pulses and converged,
// iterations and distortion report the outcome. The final centroids are in
// memory at centroid_base (the initial ones are overwritten in place each
// iteration) and the final labels at label_base.
// Memory layout (byte addresses, 32-bit words): the sample set is N = M *
// n_per_map samples of D fp32 words from sample_base, part i for mapper i;
// labels, one word per sample, from label_base; intermediate results,
// M blocks of K*(D+1)+1 words from mediate_base; centroids, K*D fp32 words at
// centroid_base.
// The DMA engines, the AXI interconnect and the memory are not part of this
// RTL: every DMA engine's command port and stream, and every core's
// memory-mapped master port, is a port of this module (arrays indexed by
// mapper). threshold is the fp32 convergence threshold on the change of the
// distortion (sum of squared distances).
// Reset note: rst_n is an asynchronous reset; it is also sampled by the
// concurrent assertions (disable iff) in this module or below it, which lint
// reports as a net used both ways. The assertions are checks only.
module kmeans_top
  import kmeans_pkg::*;
#(
  parameter int unsigned M         = 12,
  parameter int unsigned K         = 4,
  parameter int unsigned D         = 4,
  parameter int unsigned MAX_BYTES = kmeans_pkg::SIMPLE_DMA_MAX_BYTES
) (
  input  logic         clk,
  input  logic         rst_n,
  // run control and configuration
  input  logic         start,
  input  logic [31:0]  n_per_map,
  input  logic [31:0]  sample_base,
  input  logic [31:0]  label_base,
  input  logic [31:0]  mediate_base,
  input  logic [31:0]  centroid_base,
  input  fp32_t        threshold,
  input  logic [31:0]  max_iter,
  output logic         busy,
  output logic         done,
  output logic         converged,
  output logic [31:0]  iterations,
  output fp32_t        distortion,
  // mapper units: DMA streams and commands, memory-mapped masters
  input  fp32_t        map_sample_tdata  [M],
  input  logic         map_sample_tvalid [M],
  output logic         map_sample_tready [M],
  output logic [31:0]  map_label_tdata   [M],
  output logic         map_label_tvalid  [M],
  input  logic         map_label_tready  [M],
  output logic         map_label_tlast   [M],
  output logic         map_mm2s_cmd_valid [M],
  input  logic         map_mm2s_cmd_ready [M],
  output logic [31:0]  map_mm2s_cmd_addr  [M],
  output logic [31:0]  map_mm2s_cmd_len   [M],
  input  logic         map_mm2s_done      [M],
  output logic         map_s2mm_cmd_valid [M],
  input  logic         map_s2mm_cmd_ready [M],
  output logic [31:0]  map_s2mm_cmd_addr  [M],
  output logic [31:0]  map_s2mm_cmd_len   [M],
  input  logic         map_s2mm_done      [M],
  output logic         map_mem_req_valid [M],
  input  logic         map_mem_req_ready [M],
  output logic         map_mem_req_we    [M],
  output logic [31:0]  map_mem_req_addr  [M],
  output logic [31:0]  map_mem_req_wdata [M],
  input  logic         map_mem_rsp_valid [M],
  input  logic [31:0]  map_mem_rsp_rdata [M],
  // reducer unit: DMA stream and command, memory-mapped master (write only)
  input  logic [31:0]  red_med_tdata,
  input  logic         red_med_tvalid,
  output logic         red_med_tready,
  output logic         red_mm2s_cmd_valid,
  input  logic         red_mm2s_cmd_ready,
  output logic [31:0]  red_mm2s_cmd_addr,
  output logic [31:0]  red_mm2s_cmd_len,
  input  logic         red_mm2s_done,
  output logic         red_mem_req_valid,
  input  logic         red_mem_req_ready,
  output logic [31:0]  red_mem_req_addr,
  output logic [31:0]  red_mem_req_wdata
);
  logic         map_start, reduce_start, reduce_done, iteration_done, first_iter;
  logic [M-1:0] map_done;

  iteration_controller #(.M(M)) u_ctrl (
    .clk, .rst_n, .start, .max_iter, .busy, .done, .converged, .iterations,
    .first_iter, .map_start, .map_done, .reduce_start, .reduce_done, .iteration_done);

  mapper_block #(.M(M), .K(K), .D(D), .MAX_BYTES(MAX_BYTES)) u_mappers (
    .clk, .rst_n, .map_start, .map_done, .n_per_map,
    .sample_base, .label_base, .mediate_base, .centroid_base,
    .s_sample_tdata(map_sample_tdata), .s_sample_tvalid(map_sample_tvalid),
    .s_sample_tready(map_sample_tready),
    .m_label_tdata(map_label_tdata), .m_label_tvalid(map_label_tvalid),
    .m_label_tready(map_label_tready), .m_label_tlast(map_label_tlast),
    .mm2s_cmd_valid(map_mm2s_cmd_valid), .mm2s_cmd_ready(map_mm2s_cmd_ready),
    .mm2s_cmd_addr(map_mm2s_cmd_addr), .mm2s_cmd_len(map_mm2s_cmd_len),
    .mm2s_done(map_mm2s_done),
    .s2mm_cmd_valid(map_s2mm_cmd_valid), .s2mm_cmd_ready(map_s2mm_cmd_ready),
    .s2mm_cmd_addr(map_s2mm_cmd_addr), .s2mm_cmd_len(map_s2mm_cmd_len),
    .s2mm_done(map_s2mm_done),
    .mem_req_valid(map_mem_req_valid), .mem_req_ready(map_mem_req_ready),
    .mem_req_we(map_mem_req_we), .mem_req_addr(map_mem_req_addr),
    .mem_req_wdata(map_mem_req_wdata),
    .mem_rsp_valid(map_mem_rsp_valid), .mem_rsp_rdata(map_mem_rsp_rdata));

  reducer_block #(.M(M), .K(K), .D(D), .MAX_BYTES(MAX_BYTES)) u_reducer (
    .clk, .rst_n, .reduce_start, .reduce_done, .first_iter, .threshold,
    .mediate_base, .centroid_base, .iteration_done, .distortion,
    .s_med_tdata(red_med_tdata), .s_med_tvalid(red_med_tvalid),
    .s_med_tready(red_med_tready),
    .mm2s_cmd_valid(red_mm2s_cmd_valid), .mm2s_cmd_ready(red_mm2s_cmd_ready),
    .mm2s_cmd_addr(red_mm2s_cmd_addr), .mm2s_cmd_len(red_mm2s_cmd_len),
    .mm2s_done(red_mm2s_done),
    .mem_req_valid(red_mem_req_valid), .mem_req_ready(red_mem_req_ready),
    .mem_req_addr(red_mem_req_addr), .mem_req_wdata(red_mem_req_wdata));
endmodule
