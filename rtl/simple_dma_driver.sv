// simple_dma_driver: the Simple-Mode DMA Driver of a DMA manager; it runs one
// channel (memory-to-stream or stream-to-memory) of a DMA engine in simple
// mode.
//
// A pulse on start with a byte address and a byte length begins a transfer.
// A simple-mode DMA command carries at most MAX_BYTES (8 MB in the design), so
// a longer transfer is cut into pieces of MAX_BYTES and a remainder, issued
// one after another: each piece is offered on the command port
// (cmd_valid/cmd_ready handshake with address and length) and the driver then
// waits for the engine's completion pulse dma_done before the next. When the
// last piece has completed, done pulses for one cycle. A zero length completes
// at once. busy is high from start to done.
// The 8 MB limit and successive pieces follow the paper; the command handshake
// stands in for the engine's register writes and its completion interrupt,
// which is this design's own simplification.
// Reset note: rst_n is an asynchronous reset; it is also sampled by the
// concurrent assertions (disable iff) in this module or below it, which lint
// reports as a net used both ways. The assertions are checks only.
module simple_dma_driver #(
  parameter int unsigned MAX_BYTES = kmeans_pkg::SIMPLE_DMA_MAX_BYTES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] addr,
  input  logic [31:0] length,
  output logic        done,
  output logic        busy,
  // command port of the DMA channel
  output logic        cmd_valid,
  input  logic        cmd_ready,
  output logic [31:0] cmd_addr,
  output logic [31:0] cmd_len,
  input  logic        dma_done
);
  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT} state_t;
  state_t      state;
  logic [31:0] cur_addr, remaining;

  assign cmd_valid = (state == S_ISSUE);
  assign cmd_addr  = cur_addr;
  assign cmd_len   = (remaining > 32'(MAX_BYTES)) ? 32'(MAX_BYTES) : remaining;
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur_addr  <= '0;
      remaining <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cur_addr  <= addr;
          remaining <= length;
          if (length == 32'd0) done  <= 1'b1;
          else                 state <= S_ISSUE;
        end
        S_ISSUE: if (cmd_ready) begin
          cur_addr  <= cur_addr + cmd_len;
          remaining <= remaining - cmd_len;
          state     <= S_WAIT;
        end
        S_WAIT: if (dma_done) begin
          if (remaining == 32'd0) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            state <= S_ISSUE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_len_ok: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid |-> (cmd_len != 32'd0 && cmd_len <= 32'(MAX_BYTES)));
endmodule
