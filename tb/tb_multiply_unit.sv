// tb_multiply_unit: feeds random pairs Z(k), Z(N-k) and compares the output
// with X(k)*V(k) computed in double precision from the split equations,
// within a relative tolerance; also checks the two-cycle latency and that
// gaps in `in_valid` give gaps in `out_valid`.
module tb_multiply_unit;
  import pa_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  cplx_t zk, zm, p;
  int checks = 0, failures = 0;
  real exp_re [$], exp_im [$];
  bit  sent [$];

  multiply_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rnd();
    return (real'($urandom_range(0, 2000000)) - 1000000.0) / 1000.0;
  endfunction

  function automatic bit close(real a, real b, real scale);
    real d = a - b;
    if (d < 0) d = -d;
    return d <= 1e-5 * scale + 1e-9;
  endfunction

  real a, b, c, d, xr, xi, vr, vi, pr, pi, sc;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      in_valid = (n % 7 != 3);
      a = rnd(); b = rnd(); c = rnd(); d = rnd();
      zk = '{re: real_to_fp(a), im: real_to_fp(b)};
      zm = '{re: real_to_fp(c), im: real_to_fp(d)};
      a = fp_to_real(zk.re); b = fp_to_real(zk.im); c = fp_to_real(zm.re); d = fp_to_real(zm.im);
      xr = 0.5 * (a + c); xi = 0.5 * (b - d);
      vr = 0.5 * (b + d); vi = 0.5 * (c - a);
      exp_re.push_back(xr * vr - xi * vi);
      exp_im.push_back(xr * vi + xi * vr);
      sent.push_back(in_valid);
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output for the input presented two rising edges earlier (inputs are
  // applied at a falling edge, taken at the next rising edge)
  int idx = -3;
  always @(negedge clk) begin
    if (rst_n) begin
      if (idx >= 0 && idx < sent.size()) begin
        checks++;
        if (out_valid !== sent[idx]) begin
          failures++; $display("FAIL: out_valid %0b at %0d", out_valid, idx);
        end else if (out_valid) begin
          sc = (exp_re[idx] < 0 ? -exp_re[idx] : exp_re[idx]) + (exp_im[idx] < 0 ? -exp_im[idx] : exp_im[idx]) + 1.0;
          pr = fp_to_real(p.re); pi = fp_to_real(p.im);
          if (!close(pr, exp_re[idx], sc) || !close(pi, exp_im[idx], sc)) begin
            failures++;
            $display("FAIL: %0d got (%f,%f) expected (%f,%f)", idx, pr, pi, exp_re[idx], exp_im[idx]);
          end
        end
      end
      idx++;
    end
  end
endmodule
