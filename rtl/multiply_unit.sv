// multiply_unit: real-valued FFT split and point-wise spectrum product.
//
// The key x(n) and the Toeplitz seed v(n) are both real, so the design packs
// them into one complex sequence z(n) = x(n) + i*v(n) and transforms it once.
// Given Z(k) and Z(N-k) this unit recovers the two spectra (paper's split
// equations)
//     Re X(k) = (Re Z(k) + Re Z(N-k)) / 2     Im X(k) = (Im Z(k) - Im Z(N-k)) / 2
//     Re V(k) = (Im Z(k) + Im Z(N-k)) / 2     Im V(k) = (Re Z(N-k) - Re Z(k)) / 2
// and outputs P(k) = X(k) * V(k), the spectrum of the cyclic convolution
// that the inverse FFT turns back into the Toeplitz product.
//
// Timing: two register stages (split, then complex product). `valid` travels
// with the data; there is no back-pressure, as the unit only feeds the
// inverse FFT core, which takes one sample per cycle. The split equations are
// the paper's; the pipeline and the exact halving (exponent decrement) are
// this design's choice.
module multiply_unit
  import pa_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  cplx_t zk,      // Z(k)
  input  cplx_t zm,      // Z(N-k)
  output logic  out_valid,
  output cplx_t p        // X(k) * V(k)
);
  cplx_t x_q, v_q;
  logic  s1_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      out_valid <= 1'b0;
      x_q       <= '0;
      v_q       <= '0;
      p         <= '0;
    end else begin
      s1_valid  <= in_valid;
      out_valid <= s1_valid;
      if (in_valid) begin
        x_q.re <= fp_scale2(fp_add(zk.re, zm.re), -1);
        x_q.im <= fp_scale2(fp_sub(zk.im, zm.im), -1);
        v_q.re <= fp_scale2(fp_add(zk.im, zm.im), -1);
        v_q.im <= fp_scale2(fp_sub(zm.re, zk.re), -1);
      end
      if (s1_valid) p <= c_mul(x_q, v_q);
    end
  end
endmodule
