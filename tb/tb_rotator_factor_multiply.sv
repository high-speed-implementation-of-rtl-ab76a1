// tb_rotator_factor_multiply: at the default size (N = 2^20) it multiplies
// random samples by W_N^(+e) and W_N^(-e) for random exponents (plus
// e = 0, N/4, N/2), with the clock enable toggled at random, and compares
// every output with the product computed in double precision. Also checks
// the tag and the three-stage latency (counted in enabled cycles).
module tb_rotator_factor_multiply;
  import pa_pkg::*;
  localparam int LOG2K = 10, LOG2N = 2 * LOG2K;
  logic clk = 0, rst_n = 0, en = 0, in_valid = 0, in_inverse = 0, out_valid;
  cplx_t in_data, out_data;
  logic [LOG2N-1:0] in_exp;
  logic [LOG2K-1:0] in_tag, out_tag;
  int checks = 0, failures = 0;
  real er [$], ei [$];
  int  tg [$];
  bit  vv [$];

  rotator_factor_multiply #(.LOG2K(LOG2K), .TAG_W(LOG2K)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real a, b, ang, wr, wi, got_r, got_i, sc;
  int  e, n_en = 0, got = 0;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (vv.size() < 400) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      if (en) begin
        in_valid = ($urandom_range(0, 5) != 0);
        e = (vv.size() == 0) ? 0 : (vv.size() == 1) ? (1 << LOG2N) / 4 :
            (vv.size() == 2) ? (1 << LOG2N) / 2 : int'($urandom_range(0, (1 << LOG2N) - 1));
        in_exp = LOG2N'(e);
        in_inverse = $urandom_range(0, 1);
        in_tag = LOG2K'($urandom);
        a = real'($urandom_range(0, 20000)) - 10000.0;
        b = real'($urandom_range(0, 20000)) - 10000.0;
        in_data = '{re: real_to_fp(a), im: real_to_fp(b)};
        ang = (in_inverse ? 2.0 : -2.0) * 3.14159265358979323846 * real'(e) / real'(1 << LOG2N);
        wr = $cos(ang); wi = $sin(ang);
        er.push_back(a * wr - b * wi);
        ei.push_back(a * wi + b * wr);
        tg.push_back(int'(in_tag));
        vv.push_back(in_valid);
      end
    end
    @(negedge clk); en = 1; in_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // each enabled edge shifts the pipeline; the output after the k-th enabled
  // edge belongs to the input taken at enabled edge k-3
  int k_out = 0;
  always @(posedge clk) begin
    if (rst_n && en) begin
      k_out <= k_out + 1;
    end
  end
  always @(negedge clk) begin
    if (rst_n && k_out >= 3 && k_out - 3 < vv.size() && got < k_out - 2) begin
      got = k_out - 2;
      checks++;
      if (out_valid !== vv[k_out-3]) begin
        failures++; $display("FAIL: valid mismatch at %0d", k_out - 3);
      end else if (out_valid) begin
        got_r = fp_to_real(out_data.re); got_i = fp_to_real(out_data.im);
        sc = (er[k_out-3] < 0 ? -er[k_out-3] : er[k_out-3]) + (ei[k_out-3] < 0 ? -ei[k_out-3] : ei[k_out-3]) + 1.0;
        if ((got_r - er[k_out-3]) > 1e-5 * sc || (er[k_out-3] - got_r) > 1e-5 * sc ||
            (got_i - ei[k_out-3]) > 1e-5 * sc || (ei[k_out-3] - got_i) > 1e-5 * sc ||
            int'(out_tag) != tg[k_out-3]) begin
          failures++;
          $display("FAIL: %0d got (%f,%f) tag %0d expected (%f,%f) tag %0d", k_out - 3, got_r, got_i,
                   out_tag, er[k_out-3], ei[k_out-3], tg[k_out-3]);
        end
      end
    end
  end
endmodule
