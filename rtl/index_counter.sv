// index_counter: step sequencer of the serial tuGEMM engine.
//
// The serial engine computes A*B as N outer products ("steps"), step i using
// column i of A and row i of B. This counter holds the step count, which runs
// 0..N-1, advances by one on each step_done, and raises output_ready once it
// reaches N (it stays high until the next start).
//
// `index` drives the vector generators and always names the vectors that the
// column/row counters load in this cycle:
//   - IDLE with `start`: index = 0, init = 1 (output counters take C) and
//     load = 1 (counters take A[:,0], B[0,:]); the engine goes to RUN.
//   - RUN with step_done on step i < N-1: index = i+1 and load = 1, so the
//     next step's vectors are loaded in the last cycle of the current step.
//   - RUN with step_done on step N-1: back to IDLE with output_ready high.
// No cycle is spent between steps, so a GEMM takes exactly the sum of its
// step lengths, counted from the start edge to output_ready. The start/init
// handshake, the look-ahead index and the reset values are this design's
// choices. `start` is ignored while a GEMM is running.
module index_counter #(
  parameter int unsigned N     = tugemm_pkg::DEF_N,
  parameter int unsigned IDX_W = $clog2(N + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             step_done,
  output logic [IDX_W-1:0] index,
  output logic             init,
  output logic             load,
  output logic             run,
  output logic             output_ready
);
  typedef enum logic {IDLE, RUN} state_e;
  state_e           state;
  logic [IDX_W-1:0] count;
  logic             last_step;

  assign last_step = (count == IDX_W'(N - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= IDLE;
      count <= IDX_W'(N);     // nothing computed yet: report ready with Y = 0
    end else begin
      unique case (state)
        IDLE: if (start) begin
          state <= RUN;
          count <= '0;
        end
        RUN: if (step_done) begin
          count <= count + IDX_W'(1);
          if (last_step) state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign run          = (state == RUN);
  assign init         = (state == IDLE) && start;
  assign load         = init || (run && step_done && !last_step);
  assign output_ready = (state == IDLE) && (count == IDX_W'(N));

  always_comb begin
    if (state == IDLE)  index = '0;
    else if (step_done) index = count + IDX_W'(1);
    else                index = count;
  end
endmodule
