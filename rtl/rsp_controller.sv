// rsp_controller: the context sequencer shared by all configuration caches.
//
// A loop-pipelined kernel is stored as straight-line contexts: a prologue
// (contexts 0 .. loop_start-1), a kernel (loop_start .. loop_end) that is
// executed loop_count times, and an epilogue (loop_end+1 .. last). After a
// `start` pulse the controller presents context 0 in the next cycle and then
// steps the pointer once per cycle, jumping back from loop_end to loop_start
// until the kernel has run loop_count times (a count of 0 is taken as 1).
// `run` is high in every cycle a context executes. `clear` is high in the
// cycle `start` is accepted, so the PEs reset their address counters before
// context 0 runs. `done` pulses for one cycle after context `last` has run.
// The source architecture gives only the contexts and their loop-pipelined
// schedule; this sequencer and its program registers are this design's own.
module rsp_controller #(
  parameter int unsigned CTX_DEPTH = 64,
  localparam int unsigned IW = $clog2(CTX_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [IW-1:0] loop_start,
  input  logic [IW-1:0] loop_end,
  input  logic [15:0]   loop_count,
  input  logic [IW-1:0] last,
  output logic [IW-1:0] ptr,
  output logic          run,
  output logic          clear,
  output logic          done
);

  typedef enum logic { S_IDLE, S_RUN } state_e;
  state_e      state;
  logic [15:0] pass;      // kernel passes completed

  assign run   = (state == S_RUN);
  assign clear = start && (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      ptr   <= '0;
      pass  <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            state <= S_RUN;
            ptr   <= '0;
            pass  <= '0;
          end
        end
        S_RUN: begin
          if (ptr == loop_end && (pass + 16'd1) < loop_count) begin
            ptr  <= loop_start;
            pass <= pass + 16'd1;
          end else if (ptr == last) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            ptr <= ptr + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
