// post_processing: turns inverse-FFT outputs into final-key bits.
//
// Each input is one sample of the unscaled inverse transform, i.e. N times
// the cyclic convolution of the seed with the zero-padded key, tagged with
// its sample index L. The unit rounds value/N to the nearest integer, keeps
// its parity (the convolution mod 2, which is the Toeplitz matrix-vector
// product over GF(2)) and XORs it with key bit L, the identity part of the
// modified Toeplitz matrix. Only samples with L < r are output; the others
// are dropped. Key bit L is read from the input data buffer at stream
// position (L mod K)*K + L div K (see input_data_buffer).
//
// Timing: latency 2, one sample per cycle, no back-pressure. Rounding and XOR
// follow the paper's process description; taking rows 0..r-1 of the
// convolution and the index bookkeeping are this design's choices.
module post_processing
  import pa_pkg::*;
#(
  parameter int LOG2K = 10,
  parameter int LOG2N = 2 * LOG2K
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [LOG2N:0]   cfg_r,
  input  logic             in_valid,
  input  cplx_t            in_data,
  input  logic [LOG2N-1:0] in_idx,
  output logic [LOG2N-1:0] key_addr,
  input  logic             key_bit,
  output logic             out_valid,
  output logic             out_bit,
  output logic [LOG2N-1:0] out_idx
);
  logic             s1_valid, s1_par;
  logic [LOG2N-1:0] s1_idx;

  assign key_addr = {in_idx[LOG2K-1:0], in_idx[LOG2N-1:LOG2K]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      s1_par    <= 1'b0;
      s1_idx    <= '0;
      out_valid <= 1'b0;
      out_bit   <= 1'b0;
      out_idx   <= '0;
    end else begin
      s1_valid  <= in_valid;
      s1_par    <= fp_round_parity(in_data.re, LOG2N);
      s1_idx    <= in_idx;
      out_valid <= s1_valid && ({1'b0, s1_idx} < cfg_r);
      out_bit   <= s1_par ^ key_bit;
      out_idx   <= s1_idx;
    end
  end
endmodule
