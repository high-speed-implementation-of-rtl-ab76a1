// fft_core_model: behavioural stand-in for the K-point floating-point FFT
// IP core (forward when INVERSE = 0, unscaled inverse when INVERSE = 1).
//
// It collects K complex samples (one per in_valid, gaps allowed), computes
// their DFT in double precision with an iterative radix-2 FFT, rounds each
// result to the datapath's float format and, LATENCY cycles after the last
// input, returns the K results in natural order, one per cycle. It does not
// accept a new frame until the previous one has been returned, which is all
// the row engine needs. Not synthesisable.
module fft_core_model
  import pa_pkg::*;
#(
  parameter int LOG2K   = 10,
  parameter bit INVERSE = 1'b0,
  parameter int LATENCY = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  cplx_t in_data,
  output logic  out_valid,
  output cplx_t out_data
);
  localparam int K = 1 << LOG2K;
  real re [K];
  real im [K];
  cplx_t res [K];
  int in_cnt, out_cnt, wait_cnt;
  bit  emitting;
  int  frames;

  function automatic int bitrev(int v);
    int r = 0;
    for (int b = 0; b < LOG2K; b++) if (v[b]) r |= 1 << (LOG2K - 1 - b);
    return r;
  endfunction

  task automatic compute();
    real tr, ti, wr, wi, ang, ur, ui, vr, vi;
    int j;
    for (int i = 0; i < K; i++) begin
      j = bitrev(i);
      if (j > i) begin
        tr = re[i]; re[i] = re[j]; re[j] = tr;
        ti = im[i]; im[i] = im[j]; im[j] = ti;
      end
    end
    for (int len = 2; len <= K; len *= 2) begin
      for (int s = 0; s < K; s += len) begin
        for (int m = 0; m < len / 2; m++) begin
          ang = (INVERSE ? 2.0 : -2.0) * 3.14159265358979323846 * real'(m) / real'(len);
          wr = $cos(ang); wi = $sin(ang);
          ur = re[s+m]; ui = im[s+m];
          vr = re[s+m+len/2] * wr - im[s+m+len/2] * wi;
          vi = re[s+m+len/2] * wi + im[s+m+len/2] * wr;
          re[s+m] = ur + vr; im[s+m] = ui + vi;
          re[s+m+len/2] = ur - vr; im[s+m+len/2] = ui - vi;
        end
      end
    end
    for (int i = 0; i < K; i++) begin
      res[i].re = real_to_fp(re[i]);
      res[i].im = real_to_fp(im[i]);
    end
  endtask

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_cnt <= 0; out_cnt <= 0; wait_cnt <= 0; emitting <= 0; frames <= 0;
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (emitting) $error("fft_core_model: input while busy");
        re[in_cnt] = fp_to_real(in_data.re);
        im[in_cnt] = fp_to_real(in_data.im);
        if (in_cnt == K - 1) begin
          compute();
          in_cnt   <= 0;
          emitting <= 1'b1;
          wait_cnt <= LATENCY;
          out_cnt  <= 0;
          frames   <= frames + 1;
        end else begin
          in_cnt <= in_cnt + 1;
        end
      end
      if (emitting) begin
        if (wait_cnt > 0) wait_cnt <= wait_cnt - 1;
        else begin
          out_valid <= 1'b1;
          out_data  <= res[out_cnt];
          out_cnt   <= out_cnt + 1;
          if (out_cnt == K - 1) emitting <= 1'b0;
        end
      end
    end
  end
endmodule
