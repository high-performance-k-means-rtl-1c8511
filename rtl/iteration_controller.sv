// iteration_controller: the Iteration_Controller, which runs the k-means
// iterations without a host in the loop.
//
// A pulse on start begins a k-means run. Each iteration is one Map-Reduce job:
//   MAP     - map_start pulses; the controller collects one map_done pulse from
//             each of the M mapper units (in any order, kept in a sticky mask);
//   REDUCE  - once all M have reported, reduce_start pulses and the controller
//             waits for reduce_done;
//   CHECK   - if the reducer's iteration_done is high the run ends: done pulses
//             and converged stays high; otherwise the next iteration begins.
// Optionally (max_iter != 0) the run also ends after max_iter iterations with
// converged low, a guard of this design's own. first_iter is high during the
// first iteration of a run; iterations counts the iterations begun.
// The sequence of steps (a)-(f) follows the paper.
// Reset note: rst_n is an asynchronous reset; it is also sampled by the
// concurrent assertions (disable iff) in this module or below it, which lint
// reports as a net used both ways. The assertions are checks only.
module iteration_controller #(
  parameter int unsigned M = 12
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [31:0]  max_iter,
  output logic         busy,
  output logic         done,
  output logic         converged,
  output logic [31:0]  iterations,
  output logic         first_iter,
  output logic         map_start,
  input  logic [M-1:0] map_done,
  output logic         reduce_start,
  input  logic         reduce_done,
  input  logic         iteration_done
);
  typedef enum logic [2:0] {S_IDLE, S_MAP_START, S_MAP_WAIT, S_RED_WAIT, S_CHECK} state_t;
  state_t       state;
  logic [M-1:0] seen;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      seen         <= '0;
      done         <= 1'b0;
      converged    <= 1'b0;
      iterations   <= '0;
      first_iter   <= 1'b0;
      map_start    <= 1'b0;
      reduce_start <= 1'b0;
    end else begin
      done         <= 1'b0;
      map_start    <= 1'b0;
      reduce_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state      <= S_MAP_START;
          iterations <= '0;
          converged  <= 1'b0;
          first_iter <= 1'b1;
        end
        S_MAP_START: begin
          map_start  <= 1'b1;
          seen       <= '0;
          iterations <= iterations + 32'd1;
          state      <= S_MAP_WAIT;
        end
        S_MAP_WAIT: begin
          seen <= seen | map_done;
          if ((seen | map_done) == {M{1'b1}}) begin
            reduce_start <= 1'b1;
            state        <= S_RED_WAIT;
          end
        end
        S_RED_WAIT: if (reduce_done) state <= S_CHECK;
        S_CHECK: begin
          first_iter <= 1'b0;
          if (iteration_done) begin
            converged <= 1'b1;
            done      <= 1'b1;
            state     <= S_IDLE;
          end else if (max_iter != 32'd0 && iterations >= max_iter) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            state <= S_MAP_START;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_one_job_at_a_time: assert property (@(posedge clk) disable iff (!rst_n)
    !(map_start && reduce_start));
endmodule
