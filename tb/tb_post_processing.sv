// tb_post_processing: drives samples whose value is N times an integer c
// (0 <= c < 2^16, some negative) plus an error of up to +-0.45, and checks
// that each output bit is parity(c) xor key[L], that only indices L < r
// come out, and that the latency is two cycles. The key port is served by a
// one-cycle-latency array, as the input data buffer does.
module tb_post_processing;
  import pa_pkg::*;
  localparam int LOG2K = 10, LOG2N = 20, K = 1 << LOG2K, N = 1 << LOG2N;
  logic clk = 0, rst_n = 0, in_valid = 0, key_bit, out_valid, out_bit;
  logic [LOG2N:0] cfg_r;
  cplx_t in_data;
  logic [LOG2N-1:0] in_idx, key_addr, out_idx;
  int checks = 0, failures = 0;
  bit key [N];
  bit  e_v [$], e_b [$];
  int  e_i [$];

  post_processing dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) key_bit <= key[key_addr];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int c, L, n_in = 0;
  real v;
  initial begin
    for (int i = 0; i < N; i++) key[i] = 1'($urandom);
    cfg_r = 21'(N / 3);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      c = (n < 4) ? n : int'($urandom_range(0, 65535)) - ((n % 11 == 0) ? 70000 : 0);
      v = (real'(c) + (real'($urandom_range(0, 900)) - 450.0) / 1000.0) * real'(N);
      in_data = '{re: real_to_fp(v), im: real_to_fp(-v)};
      L = int'($urandom_range(0, N - 1));
      in_idx = LOG2N'(L);
      e_v.push_back(in_valid && L < N / 3);
      e_b.push_back(c[0] ^ key[(L % K) * K + L / K]);
      e_i.push_back(L);
    end
    @(negedge clk) in_valid = 0;
    repeat (4) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int k = -3;
  always @(negedge clk) begin
    if (rst_n) begin
      if (k >= 0 && k < e_v.size()) begin
        checks++;
        if (out_valid !== e_v[k] || (out_valid && (out_bit !== e_b[k] || int'(out_idx) != e_i[k]))) begin
          failures++;
          if (failures < 10) $display("FAIL: %0d valid %0b/%0b bit %0b/%0b", k, out_valid, e_v[k], out_bit, e_b[k]);
        end
      end
      k++;
    end
  end
endmodule
