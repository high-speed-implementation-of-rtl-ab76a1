// pa_control: top-level sequencer of one privacy-amplification block.
//
// Once the input data buffer is full, the controller walks through the four
// passes of the FFT convolution, issuing one row operation per line of the
// K x K matrix and waiting for each to finish:
//   OP_FWD_ROW  rows 0..K-1     forward row FFTs + twiddles   -> DDR region 0
//   OP_FWD_COL  columns 0..K-1  forward column FFTs            -> DDR region 1
//   OP_MUL_ROW  rows 0..K-1     spectrum product, inverse row
//                               FFTs + conjugate twiddles      -> DDR region 2
//   OP_INV_COL  columns 0..K-1  inverse column FFTs -> post-processing
// It then pulses `block_done`, which also frees the input buffer.
//
// Interface: `op_start` is a one-cycle pulse with `op`/`op_line` valid; the
// next operation is issued the cycle after `op_done`. The paper names this
// module and says it controls the FFT convolution unit; the pass order
// follows its modified 2-D FFT, and the one-line-at-a-time handshake is this
// design's choice.
module pa_control
  import pa_pkg::*;
#(
  parameter int LOG2K = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             buffer_full,
  output logic             op_start,
  output op_e              op,
  output logic [LOG2K-1:0] op_line,
  input  logic             op_done,
  output logic             busy,
  output logic             block_done
);
  typedef enum logic [1:0] {C_IDLE, C_ISSUE, C_WAIT, C_DONE} cstate_e;
  cstate_e state;

  assign op_start = (state == C_ISSUE);
  assign busy     = (state != C_IDLE);
  // one-cycle pulse; the buffer is released on the same edge that returns
  // the controller to idle, so a stale `buffer_full` is never seen
  assign block_done = (state == C_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= C_IDLE;
      op         <= OP_NONE;
      op_line    <= '0;
    end else begin
      unique case (state)
        C_IDLE: if (buffer_full) begin
          op      <= OP_FWD_ROW;
          op_line <= '0;
          state   <= C_ISSUE;
        end
        C_ISSUE: state <= C_WAIT;
        C_WAIT: if (op_done) begin
          op_line <= op_line + 1'b1;
          state   <= C_ISSUE;
          if (&op_line) begin
            unique case (op)
              OP_FWD_ROW: op <= OP_FWD_COL;
              OP_FWD_COL: op <= OP_MUL_ROW;
              OP_MUL_ROW: op <= OP_INV_COL;
              default: begin
                op    <= OP_NONE;
                state <= C_DONE;
              end
            endcase
          end
        end
        C_DONE: state <= C_IDLE;
        default: state <= C_IDLE;
      endcase
    end
  end

  // an operation may only finish while the controller waits for it
  always_ff @(posedge clk) begin
    if (rst_n) assert (!op_done || state == C_WAIT) else $error("unexpected op_done");
  end
endmodule
