// tb_input_data_buffer: loads a random block (K = 8, N = 64) with gaps in
// in_valid, checks in_ready/full, then reads every sample and checks the
// pre-processing (real part = key bit unless sample index L < r, imaginary
// part = seed bit, as exact floats 0.0/1.0) and the key read port. It then
// releases the block and checks that a second block can be loaded.
module tb_input_data_buffer;
  import pa_pkg::*;
  localparam int LOG2K = 3, LOG2N = 6, K = 8, N = 64;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, in_key = 0, in_seed = 0, full;
  logic release_block = 0, rd_en = 0, key_bit;
  logic [LOG2N:0] cfg_r;
  logic [LOG2N-1:0] rd_addr = '0, key_addr = '0;
  cplx_t rd_data;
  int checks = 0, failures = 0;
  bit key [N], seed [N];
  localparam fp_t ONE = '{sign: 1'b0, exp: FP_EW'(FP_BIAS), man: '0};

  input_data_buffer #(.LOG2K(LOG2K)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_block();
    for (int t = 0; t < N; t++) begin
      key[t] = 1'($urandom); seed[t] = 1'($urandom);
    end
    for (int t = 0; t < N; t++) begin
      if (t % 5 == 2) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; in_key = key[t]; in_seed = seed[t];
      checks++;
      if (!in_ready || full) begin failures++; $display("FAIL: not ready at %0d", t); end
      @(negedge clk);
    end
    in_valid = 0;
    checks++;
    if (!full || in_ready) begin failures++; $display("FAIL: full not set"); end
    // a pair offered while full must not be taken
    in_valid = 1; in_key = ~key[0]; in_seed = ~seed[0];
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic check_reads(int r);
    int L;
    fp_t exp_re, exp_im;
    for (int t = 0; t < N; t++) begin
      rd_en = 1; rd_addr = LOG2N'(t); key_addr = LOG2N'(t);
      @(negedge clk);
      rd_en = 0;
      L = (t % K) * K + t / K;
      exp_re = (key[t] && L >= r) ? ONE : FP_ZERO;
      exp_im = seed[t] ? ONE : FP_ZERO;
      checks++;
      if (rd_data.re !== exp_re || rd_data.im !== exp_im || key_bit !== key[t]) begin
        failures++;
        $display("FAIL: t=%0d L=%0d got %h/%h key %0b", t, L, rd_data.re, rd_data.im, key_bit);
      end
    end
  endtask

  initial begin
    cfg_r = 7'd21;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    load_block();
    check_reads(21);
    release_block = 1;
    @(negedge clk);
    release_block = 0;
    checks++;
    if (full || !in_ready) begin failures++; $display("FAIL: release"); end
    cfg_r = 7'd50;
    load_block();
    check_reads(50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
