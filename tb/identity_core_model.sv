// identity_core_model: a "core" with the FFT core's framing and timing but
// no transform: it collects K samples and, LATENCY cycles after the last,
// returns them unchanged and in order. Lets a testbench follow data through
// the row engine's address patterns exactly. Not synthesisable.
module identity_core_model
  import pa_pkg::*;
#(
  parameter int LOG2K   = 3,
  parameter int LATENCY = 5
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  cplx_t in_data,
  output logic  out_valid,
  output cplx_t out_data
);
  localparam int K = 1 << LOG2K;
  cplx_t buf_q [K];
  int in_cnt, out_cnt, wait_cnt;
  bit emitting;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_cnt <= 0; out_cnt <= 0; wait_cnt <= 0; emitting <= 0;
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        buf_q[in_cnt] <= in_data;
        if (in_cnt == K - 1) begin
          in_cnt <= 0; emitting <= 1; wait_cnt <= LATENCY; out_cnt <= 0;
        end else in_cnt <= in_cnt + 1;
      end
      if (emitting) begin
        if (wait_cnt > 0) wait_cnt <= wait_cnt - 1;
        else begin
          out_valid <= 1'b1;
          out_data  <= buf_q[out_cnt];
          out_cnt   <= out_cnt + 1;
          if (out_cnt == K - 1) emitting <= 0;
        end
      end
    end
  end
endmodule
