// tb_fft_conv_unit: runs the complete four-pass schedule (4*K row
// operations, K = 16, N = 256, 4 x 4 tiles) through the FFT convolution unit
// with FFT/IFFT core models and the DDR model, on random small-integer real
// sequences x and v packed as z = x + i*v. Every result sample L must equal
// N times the cyclic convolution sum_b v[(L-b) mod N] * x[b] (real part)
// and 0 (imaginary part) within a small tolerance, where x[L], v[L] are
// taken from stream position (L mod K)*K + L div K, the design's index
// order. This checks the unnatural-order 2-D FFT, the twiddles, the mirror
// pairing of the real-valued FFT split and the product together.
module tb_fft_conv_unit;
  import pa_pkg::*;
  localparam int LOG2K = 4, LOG2T = 2, K = 16, LOG2N = 8, N = 256, ADDR_W = 10;

  logic clk = 0, rst_n = 0, op_start = 0, op_done;
  op_e op = OP_NONE;
  logic [LOG2K-1:0] op_line = '0;
  logic ib_rd_en; logic [LOG2N-1:0] ib_rd_addr; cplx_t ib_rd_data;
  logic fft_in_valid, fft_out_valid, ifft_in_valid, ifft_out_valid;
  cplx_t fft_in_data, fft_out_data, ifft_in_data, ifft_out_data;
  logic mem_cmd_valid, mem_cmd_ready, mem_cmd_we, mem_rd_valid, mem_page_cross;
  logic [ADDR_W-1:0] mem_cmd_addr; cplx_t mem_cmd_wdata, mem_rd_data;
  logic res_valid, busy; cplx_t res_data; logic [LOG2N-1:0] res_idx;
  int checks = 0, failures = 0;
  cplx_t inbuf [N];
  real xs [N], vs [N], got_re [N], got_im [N];
  bit seen [N];

  fft_conv_unit #(.LOG2K(LOG2K), .LOG2T(LOG2T)) dut (.*);
  fft_core_model #(.LOG2K(LOG2K), .INVERSE(1'b0)) u_fft (.clk, .rst_n, .in_valid(fft_in_valid),
    .in_data(fft_in_data), .out_valid(fft_out_valid), .out_data(fft_out_data));
  fft_core_model #(.LOG2K(LOG2K), .INVERSE(1'b1)) u_ifft (.clk, .rst_n, .in_valid(ifft_in_valid),
    .in_data(ifft_in_data), .out_valid(ifft_out_valid), .out_data(ifft_out_data));
  ddr3_model #(.ADDR_W(ADDR_W), .PAGE_W(2 * LOG2T)) u_ddr (
    .clk, .rst_n, .cmd_valid(mem_cmd_valid), .cmd_ready(mem_cmd_ready),
    .cmd_we(mem_cmd_we), .cmd_addr(mem_cmd_addr), .cmd_wdata(mem_cmd_wdata),
    .rd_valid(mem_rd_valid), .rd_data(mem_rd_data));

  always #5 clk = ~clk;
  always @(posedge clk) if (ib_rd_en) ib_rd_data <= inbuf[ib_rd_addr];
  always @(posedge clk) if (res_valid) begin
    got_re[res_idx] <= fp_to_real(res_data.re);
    got_im[res_idx] <= fp_to_real(res_data.im);
    if (seen[res_idx]) failures++;
    seen[res_idx] <= 1;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  op_e ops [4] = '{OP_FWD_ROW, OP_FWD_COL, OP_MUL_ROW, OP_INV_COL};
  real e;
  int t;
  initial begin
    for (int s = 0; s < N; s++) begin
      inbuf[s] = '{re: real_to_fp(real'($urandom_range(0, 3))), im: real_to_fp(real'($urandom_range(0, 3)))};
    end
    for (int L = 0; L < N; L++) begin
      t = (L % K) * K + L / K;
      xs[L] = fp_to_real(inbuf[t].re);
      vs[L] = fp_to_real(inbuf[t].im);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (ops[p])
      for (int l = 0; l < K; l++) begin
        @(negedge clk);
        op = ops[p]; op_line = LOG2K'(l); op_start = 1;
        @(negedge clk);
        op_start = 0;
        while (!op_done) @(negedge clk);
      end
    repeat (3) @(negedge clk);
    for (int L = 0; L < N; L++) begin
      e = 0.0;
      for (int b = 0; b < N; b++) e += vs[(L - b + N) % N] * xs[b];
      e *= N;
      checks++;
      if (!seen[L] || (got_re[L] - e) > 1e-3 * N || (e - got_re[L]) > 1e-3 * N ||
          got_im[L] > 1e-3 * N || -got_im[L] > 1e-3 * N) begin
        failures++;
        if (failures < 10) $display("FAIL: L=%0d got %f %f expected %f", L, got_re[L], got_im[L], e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
