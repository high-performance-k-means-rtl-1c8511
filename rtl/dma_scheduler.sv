// dma_scheduler: the DmaScheduler, a finite state machine over N DMA managers.
//
// In IDLE it waits for start (map_start or reduce_start). It then starts all
// N managers at once (RUN); each generates its data-block ID, computes its
// start addresses and drives its DMA engine. mgr_done[i] pulses when manager i
// has finished. When all managers have finished, done pulses for one cycle and
// the machine returns to IDLE to wait for the next start; a start while busy
// is ignored. The read channel of manager i transfers rd_len bytes from
// rd_base + (id_base+i)*rd_len, its write channel (if HAS_S2MM) wr_len bytes to
// wr_base + (id_base+i)*wr_len. The states follow the paper's steps (a)-(d);
// the port layout is this design's own.
// Lint note: each manager's busy and ID outputs are not needed by the
// scheduler (it keys on done alone) and are left unread.
// Reset note: rst_n is an asynchronous reset; it is also sampled by the
// concurrent assertions (disable iff) in this module or below it, which lint
// reports as a net used both ways. The assertions are checks only.
module dma_scheduler #(
  parameter int unsigned N         = 12,
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
  output logic           busy,
  output logic           done,
  output logic [N-1:0]   mgr_done,
  // per-manager DMA command ports
  output logic           mm2s_cmd_valid [N],
  input  logic           mm2s_cmd_ready [N],
  output logic [31:0]    mm2s_cmd_addr  [N],
  output logic [31:0]    mm2s_cmd_len   [N],
  input  logic           mm2s_done      [N],
  output logic           s2mm_cmd_valid [N],
  input  logic           s2mm_cmd_ready [N],
  output logic [31:0]    s2mm_cmd_addr  [N],
  output logic [31:0]    s2mm_cmd_len   [N],
  input  logic           s2mm_done      [N]
);
  typedef enum logic {S_IDLE, S_RUN} state_t;
  state_t         state;
  logic           mgr_start;
  logic [N-1:0]   finished;

  assign busy      = (state == S_RUN);
  assign mgr_start = (state == S_IDLE) && start;

  for (genvar i = 0; i < N; i++) begin : g_mgr
    logic           mbusy;
    logic [IDW-1:0] mid;
    dma_manager #(.INDEX(i), .HAS_S2MM(HAS_S2MM), .MAX_BYTES(MAX_BYTES), .IDW(IDW)) u_mgr (
      .clk, .rst_n, .start(mgr_start), .id_base,
      .rd_base, .rd_len, .wr_base, .wr_len,
      .done(mgr_done[i]), .busy(mbusy), .id(mid),
      .mm2s_cmd_valid(mm2s_cmd_valid[i]), .mm2s_cmd_ready(mm2s_cmd_ready[i]),
      .mm2s_cmd_addr(mm2s_cmd_addr[i]), .mm2s_cmd_len(mm2s_cmd_len[i]),
      .mm2s_done(mm2s_done[i]),
      .s2mm_cmd_valid(s2mm_cmd_valid[i]), .s2mm_cmd_ready(s2mm_cmd_ready[i]),
      .s2mm_cmd_addr(s2mm_cmd_addr[i]), .s2mm_cmd_len(s2mm_cmd_len[i]),
      .s2mm_done(s2mm_done[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      finished <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state    <= S_RUN;
          finished <= '0;
        end
        S_RUN: begin
          if ((finished | mgr_done) == {N{1'b1}}) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
          finished <= finished | mgr_done;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
