// tb_data_distribute_unit: follows data through the row engine's four
// operations with the FFT and IFFT cores replaced by identity cores, so
// every DDR word can be predicted exactly (K = 8, 2 x 2 tiles). The real
// multiply unit and rotation-factor multiplier are attached.
//   OP_FWD_ROW : region 0, element (i,k) = input(i,k) * W_N^(i*k)
//   OP_FWD_COL : region 1, element (c,i) = region 0 element (i,c) (transpose, bit-exact)
//   OP_MUL_ROW : region 2, element (k1,q) = P(k1,q) * W_N^(-k1*q), with P from the
//                split of region 1 rows k1 and -k1 (double-precision reference)
//   OP_INV_COL : result stream of column q = region 2 column q, index {s,q}, bit-exact
// It also checks that every operation ends with exactly one op_done.
module tb_data_distribute_unit;
  import pa_pkg::*;
  localparam int LOG2K = 3, LOG2T = 1, K = 8, LOG2N = 6, N = 64, ADDR_W = 8;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0, op_start = 0, op_done;
  op_e op = OP_NONE;
  logic [LOG2K-1:0] op_line = '0;
  logic ib_rd_en; logic [LOG2N-1:0] ib_rd_addr; cplx_t ib_rd_data;
  logic fft_in_valid, fft_out_valid, ifft_in_valid, ifft_out_valid;
  cplx_t fft_in_data, fft_out_data, ifft_in_data, ifft_out_data;
  logic mul_in_valid, mul_out_valid; cplx_t mul_zk, mul_zm, mul_p;
  logic rot_en, rot_in_valid, rot_inverse, rot_out_valid;
  cplx_t rot_in_data, rot_out_data;
  logic [LOG2N-1:0] rot_exp; logic [LOG2K-1:0] rot_in_tag, rot_out_tag;
  logic mem_cmd_valid, mem_cmd_ready, mem_cmd_we, mem_rd_valid, mem_page_cross;
  logic [ADDR_W-1:0] mem_cmd_addr; cplx_t mem_cmd_wdata, mem_rd_data;
  logic res_valid, busy; cplx_t res_data; logic [LOG2N-1:0] res_idx;
  int checks = 0, failures = 0;
  cplx_t inbuf [N];

  data_distribute_unit #(.LOG2K(LOG2K), .LOG2T(LOG2T)) dut (.*);
  multiply_unit u_mul (.clk, .rst_n, .in_valid(mul_in_valid), .zk(mul_zk), .zm(mul_zm),
                       .out_valid(mul_out_valid), .p(mul_p));
  rotator_factor_multiply #(.LOG2K(LOG2K), .TAG_W(LOG2K)) u_rot (
    .clk, .rst_n, .en(rot_en), .in_valid(rot_in_valid), .in_data(rot_in_data),
    .in_exp(rot_exp), .in_inverse(rot_inverse), .in_tag(rot_in_tag),
    .out_valid(rot_out_valid), .out_data(rot_out_data), .out_tag(rot_out_tag));
  identity_core_model #(.LOG2K(LOG2K)) u_fft (.clk, .rst_n, .in_valid(fft_in_valid),
    .in_data(fft_in_data), .out_valid(fft_out_valid), .out_data(fft_out_data));
  identity_core_model #(.LOG2K(LOG2K)) u_ifft (.clk, .rst_n, .in_valid(ifft_in_valid),
    .in_data(ifft_in_data), .out_valid(ifft_out_valid), .out_data(ifft_out_data));
  ddr3_model #(.ADDR_W(ADDR_W), .PAGE_W(2 * LOG2T)) u_ddr (
    .clk, .rst_n, .cmd_valid(mem_cmd_valid), .cmd_ready(mem_cmd_ready),
    .cmd_we(mem_cmd_we), .cmd_addr(mem_cmd_addr), .cmd_wdata(mem_cmd_wdata),
    .rd_valid(mem_rd_valid), .rd_data(mem_rd_data));

  always #5 clk = ~clk;
  always @(posedge clk) if (ib_rd_en) ib_rd_data <= inbuf[ib_rd_addr];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int taddr(int reg_, int r, int c);
    return reg_ * N + ((r / 2) * (K / 2) + c / 2) * 4 + (r % 2) * 2 + c % 2;
  endfunction

  function automatic bit near(real a, real b);
    real d = a - b;
    if (d < 0) d = -d;
    return d < 1e-4 * (1.0 + (a < 0 ? -a : a));
  endfunction

  // result stream capture
  cplx_t res_cap [N];
  bit    res_seen [N];
  always @(posedge clk) if (res_valid) begin
    res_cap[res_idx] <= res_data;
    if (res_seen[res_idx]) failures++;
    res_seen[res_idx] <= 1;
  end
  int n_done = 0;
  always @(posedge clk) if (op_done) n_done++;

  task automatic run_op(op_e o, int line);
    @(negedge clk);
    op = o; op_line = LOG2K'(line); op_start = 1;
    @(negedge clk);
    op_start = 0;
    while (!op_done) @(negedge clk);
    @(negedge clk);
  endtask

  real ar, ai, wr, wi, er, ei, xr, xi, vr, vi, pr, pi;
  cplx_t a, b, g;
  int m1, m2;
  initial begin
    for (int t = 0; t < N; t++)
      inbuf[t] = '{re: real_to_fp(real'($urandom_range(0, 1))), im: real_to_fp(real'($urandom_range(0, 1000)) / 7.0)};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < K; i++) run_op(OP_FWD_ROW, i);
    for (int i = 0; i < K; i++)
      for (int k = 0; k < K; k++) begin
        a = inbuf[i * K + k]; g = u_ddr.mem[taddr(0, i, k)];
        ar = fp_to_real(a.re); ai = fp_to_real(a.im);
        wr = $cos(-2.0 * PI * i * k / N); wi = $sin(-2.0 * PI * i * k / N);
        checks++;
        if (!near(fp_to_real(g.re), ar * wr - ai * wi) || !near(fp_to_real(g.im), ar * wi + ai * wr)) begin
          failures++; $display("FAIL: FWD_ROW (%0d,%0d)", i, k);
        end
      end
    for (int c = 0; c < K; c++) run_op(OP_FWD_COL, c);
    for (int c = 0; c < K; c++)
      for (int i = 0; i < K; i++) begin
        checks++;
        if (u_ddr.mem[N + c * K + i] !== u_ddr.mem[taddr(0, i, c)]) begin
          failures++; $display("FAIL: FWD_COL (%0d,%0d)", c, i);
        end
      end
    for (int k1 = 0; k1 < K; k1++) run_op(OP_MUL_ROW, k1);
    for (int k1 = 0; k1 < K; k1++)
      for (int q = 0; q < K; q++) begin
        m1 = (K - k1) % K;
        m2 = (2 * K - q - (k1 != 0)) % K;
        a = u_ddr.mem[N + k1 * K + q];
        b = u_ddr.mem[N + m1 * K + m2];
        xr = 0.5 * (fp_to_real(a.re) + fp_to_real(b.re));
        xi = 0.5 * (fp_to_real(a.im) - fp_to_real(b.im));
        vr = 0.5 * (fp_to_real(a.im) + fp_to_real(b.im));
        vi = 0.5 * (fp_to_real(b.re) - fp_to_real(a.re));
        pr = xr * vr - xi * vi; pi = xr * vi + xi * vr;
        wr = $cos(2.0 * PI * k1 * q / N); wi = $sin(2.0 * PI * k1 * q / N);
        er = pr * wr - pi * wi; ei = pr * wi + pi * wr;
        g = u_ddr.mem[taddr(2, k1, q)];
        checks++;
        if (!near(fp_to_real(g.re), er) || !near(fp_to_real(g.im), ei)) begin
          failures++; $display("FAIL: MUL_ROW (%0d,%0d) got %f %f exp %f %f", k1, q, fp_to_real(g.re), fp_to_real(g.im), er, ei);
        end
      end
    for (int q = 0; q < K; q++) run_op(OP_INV_COL, q);
    for (int q = 0; q < K; q++)
      for (int s = 0; s < K; s++) begin
        checks++;
        if (!res_seen[s * K + q] || res_cap[s * K + q] !== u_ddr.mem[taddr(2, s, q)]) begin
          failures++; $display("FAIL: INV_COL (%0d,%0d)", q, s);
        end
      end
    checks++;
    if (n_done != 4 * K) begin failures++; $display("FAIL: %0d op_done pulses", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
