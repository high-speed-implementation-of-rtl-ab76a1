// pa_tb_env: stimulus, external-IP models and checker for pa_top.
//
// Instantiated next to the device under test by tb_pa_top (reduced size) and
// tb_pa_top_full (default size). It drives NBLOCKS random blocks of key and
// seed bits, each with its own final key length r, connects the FFT/IFFT
// core models and the DDR model, and checks every output key bit (or, when
// CHECK_ALL is 0, NSAMPLE randomly chosen bits plus the index and count of
// all of them) against a direct GF(2) evaluation of the modified Toeplitz
// hash in the design's index order:
//     y[L] = x~[L] xor XOR_{b = r..N-1} ( v~[(L - b) mod N] and x~[b] ),
//     x~[L] = key[(L mod K)*K + L div K], likewise v~ from the seed.
// It also counts how often each mechanism of the design occurred (DDR
// stalls, tiled page changes per pass, input back-pressure, zeroed identity
// samples, dropped convolution samples, self-paired mirror rows) and checks
// the cycle count of a block against bounds derived from the row-operation
// schedule.
module pa_tb_env
  import pa_pkg::*;
#(
  parameter int     LOG2K     = 4,
  parameter int     LOG2T     = 2,
  parameter int     NBLOCKS   = 2,
  parameter bit     CHECK_ALL = 1'b1,
  parameter int     NSAMPLE   = 256,
  parameter int     MAXCYC    = 2_000_000
) (
  output logic                  clk,
  output logic                  rst_n,
  output logic [2*LOG2K:0]      cfg_r,
  output logic                  in_valid,
  input  logic                  in_ready,
  output logic                  in_key,
  output logic                  in_seed,
  input  logic                  key_valid,
  input  logic                  key_bit,
  input  logic [2*LOG2K-1:0]    key_idx,
  input  logic                  busy,
  input  logic                  block_done,
  input  logic                  fft_in_valid,
  input  cplx_t                 fft_in_data,
  output logic                  fft_out_valid,
  output cplx_t                 fft_out_data,
  input  logic                  ifft_in_valid,
  input  cplx_t                 ifft_in_data,
  output logic                  ifft_out_valid,
  output cplx_t                 ifft_out_data,
  input  logic                  mem_cmd_valid,
  output logic                  mem_cmd_ready,
  input  logic                  mem_cmd_we,
  input  logic [2*LOG2K+1:0]    mem_cmd_addr,
  input  cplx_t                 mem_cmd_wdata,
  output logic                  mem_rd_valid,
  output cplx_t                 mem_rd_data,
  input  logic                  mem_page_cross
);
  localparam int K      = 1 << LOG2K;
  localparam int LOG2N  = 2 * LOG2K;
  localparam int N      = 1 << LOG2N;
  localparam int T      = 1 << LOG2T;
  localparam int ADDR_W = LOG2N + 2;

  int checks = 0, failures = 0;
  longint cyc = 0;

  initial clk = 1'b0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  fft_core_model #(.LOG2K(LOG2K), .INVERSE(1'b0)) u_fft (
    .clk, .rst_n, .in_valid(fft_in_valid), .in_data(fft_in_data),
    .out_valid(fft_out_valid), .out_data(fft_out_data));
  fft_core_model #(.LOG2K(LOG2K), .INVERSE(1'b1)) u_ifft (
    .clk, .rst_n, .in_valid(ifft_in_valid), .in_data(ifft_in_data),
    .out_valid(ifft_out_valid), .out_data(ifft_out_data));
  ddr3_model #(.ADDR_W(ADDR_W), .PAGE_W(2 * LOG2T)) u_ddr (
    .clk, .rst_n, .cmd_valid(mem_cmd_valid), .cmd_ready(mem_cmd_ready),
    .cmd_we(mem_cmd_we), .cmd_addr(mem_cmd_addr), .cmd_wdata(mem_cmd_wdata),
    .rd_valid(mem_rd_valid), .rd_data(mem_rd_data));

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (MAXCYC) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish within %0d cycles", MAXCYC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ stimulus
  bit key_s  [NBLOCKS][N];
  bit seed_s [NBLOCKS][N];
  int r_of   [NBLOCKS];
  int cur_block = 0;            // block whose outputs are arriving
  longint n_backpressure = 0, n_zeroed = 0;

  function automatic int stream_of(int L);
    return (L % K) * K + L / K;
  endfunction

  initial begin
    for (int b = 0; b < NBLOCKS; b++) begin
      r_of[b] = (b == 0) ? (N / 2 + int'($urandom_range(0, N / 4))) : int'($urandom_range(1, N / 4));
      for (int t = 0; t < N; t++) begin
        key_s[b][t]  = 1'($urandom);
        seed_s[b][t] = 1'($urandom);
      end
    end
  end

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; in_key = 1'b0; in_seed = 1'b0;
    cfg_r = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    cfg_r = (2*LOG2K+1)'(r_of[0]);
    // inputs change at falling edges; in_ready (a register output) seen at a
    // falling edge is what the next rising edge samples
    @(negedge clk);
    for (int b = 0; b < NBLOCKS; b++) begin
      for (int t = 0; t < N; t++) begin
        if (stream_of(t) < r_of[b] && key_s[b][t]) n_zeroed++;
        if ($urandom_range(0, 7) == 0 && t > 0) begin
          in_valid = 1'b0;
          @(negedge clk);
        end
        in_key = key_s[b][t]; in_seed = seed_s[b][t];
        in_valid = 1'b1;
        while (!in_ready) begin
          n_backpressure++;
          @(negedge clk);
        end
        // the previous block is finished once this block's first pair is
        // taken, so its final key length may change now
        if (t == 0) cfg_r = (2*LOG2K+1)'(r_of[b]);
        @(negedge clk);
      end
    end
    in_valid = 1'b0;
  end

  // ------------------------------------------------------------ reference
  bit xt [N];
  bit vt [N];
  int ones [$];
  bit sampled [N];
  bit seen [N];

  function automatic bit expected_bit(int L, int r);
    bit acc = xt[L];
    foreach (ones[i]) acc ^= vt[(L - ones[i]) & (N - 1)];
    return acc;
  endfunction

  task automatic prepare(int b);
    ones.delete();
    for (int L = 0; L < N; L++) begin
      xt[L] = key_s[b][stream_of(L)];
      vt[L] = seed_s[b][stream_of(L)];
      seen[L] = 0;
      sampled[L] = CHECK_ALL;
    end
    for (int L = r_of[b]; L < N; L++) if (xt[L]) ones.push_back(L);
    if (!CHECK_ALL)
      for (int i = 0; i < NSAMPLE; i++) sampled[$urandom_range(0, r_of[b] - 1)] = 1;
  endtask

  // ------------------------------------------------------------ monitors
  longint n_out = 0, n_dropped = 0, n_selfpair = 0;
  longint pc_r0w = 0, pc_r0r = 0, pc_r2w = 0, pc_r2r = 0;
  longint t_full = 0, n_bad_bits = 0, stall_base = 0;
  int     r1_reads = 0;
  logic [LOG2K-1:0] r1_first_row;
  logic [1:0]       region;
  assign region = mem_cmd_addr[ADDR_W-1 -: 2];

  initial prepare(0);

  always @(posedge clk) begin
    if (rst_n) begin
      if (mem_cmd_valid && mem_cmd_ready) begin
        if (mem_page_cross) begin
          if (region == 2'd0 &&  mem_cmd_we) pc_r0w++;
          if (region == 2'd0 && !mem_cmd_we) pc_r0r++;
          if (region == 2'd2 &&  mem_cmd_we) pc_r2w++;
          if (region == 2'd2 && !mem_cmd_we) pc_r2r++;
        end
        if (region == 2'd1 && !mem_cmd_we) begin
          if (r1_reads % (2 * K) == 0) r1_first_row = mem_cmd_addr[LOG2N-1:LOG2K];
          if (r1_reads % (2 * K) == K && mem_cmd_addr[LOG2N-1:LOG2K] == r1_first_row) n_selfpair++;
          r1_reads++;
        end
      end
      if (busy && t_full == 0) t_full = cyc;
      if (key_valid) begin
        n_out++;
        if (int'(key_idx) >= r_of[cur_block]) begin
          failures++; checks++;
          $display("FAIL: output index %0d not below r=%0d", key_idx, r_of[cur_block]);
        end else begin
          if (seen[key_idx]) begin
            failures++; checks++;
            $display("FAIL: output index %0d repeated", key_idx);
          end
          seen[key_idx] = 1;
          if (sampled[key_idx]) begin
            checks++;
            if (key_bit !== expected_bit(int'(key_idx), r_of[cur_block])) begin
              failures++; n_bad_bits++;
              if (n_bad_bits < 10)
                $display("FAIL: block %0d bit L=%0d got %0b", cur_block, key_idx, key_bit);
            end
          end
        end
      end
      if (block_done) finish_block();
    end
  end

  task automatic finish_block();
    longint cycles, lo, hi;
    int      r = r_of[cur_block];
    cycles = cyc - t_full;
    n_dropped += longint'(N) - n_out;
    $display("block %0d: r=%0d outputs=%0d cycles=%0d stalls=%0d page changes r0w/r0r/r2w/r2r=%0d/%0d/%0d/%0d",
             cur_block, r, n_out, cycles, u_ddr.n_stall_cycles - stall_base, pc_r0w, pc_r0r, pc_r2w, pc_r2r);
    checks++;
    if (n_out != longint'(r)) begin failures++; $display("FAIL: %0d outputs, expected %0d", n_out, r); end
    // tiled layout: every line of K samples crosses K/T pages (paper: 32 x 1024 per pass)
    checks++;
    if (pc_r0w != longint'(K) * K / longint'(T) || pc_r0r != longint'(K) * K / longint'(T) ||
        pc_r2w != longint'(K) * K / longint'(T) || pc_r2r != longint'(K) * K / longint'(T)) begin
      failures++; $display("FAIL: page changes differ from K*K/T = %0d", K * K / T);
    end
    // cycle count: 4*K row operations, each feeding K samples to a core,
    // catching its K outputs and draining K samples, plus a 2*K-word load
    // per multiply row; DDR stalls and a bounded pipeline latency on top
    lo = 4 * longint'(K) * 3 * K + longint'(K) * 2 * K;
    hi = lo + 4 * longint'(K) * 64 + (u_ddr.n_stall_cycles - stall_base);
    checks++;
    if (cycles < lo || cycles > hi) begin
      failures++; $display("FAIL: block took %0d cycles, expected %0d..%0d", cycles, lo, hi);
    end
    stall_base = u_ddr.n_stall_cycles;
    n_out = 0; pc_r0w = 0; pc_r0r = 0; pc_r2w = 0; pc_r2r = 0; t_full = 0;
    cur_block++;
    if (cur_block < NBLOCKS) prepare(cur_block);
    else finish_all();
  endtask

  task automatic finish_all();
    $display("mechanisms: ddr_stall_cycles=%0d input_backpressure=%0d zeroed_identity_samples=%0d dropped_samples=%0d selfpaired_rows=%0d",
             u_ddr.n_stall_cycles, n_backpressure, n_zeroed, n_dropped, n_selfpair);
    checks += 5;
    if (u_ddr.n_stall_cycles == 0) begin failures++; $display("FAIL: no DDR stall happened"); end
    if (NBLOCKS > 1 && n_backpressure == 0) begin failures++; $display("FAIL: no input back-pressure"); end
    if (n_zeroed == 0) begin failures++; $display("FAIL: no identity sample zeroed"); end
    if (n_dropped == 0) begin failures++; $display("FAIL: no convolution sample dropped"); end
    if (n_selfpair != 2 * NBLOCKS) begin failures++; $display("FAIL: %0d self-paired rows, expected %0d", n_selfpair, 2 * NBLOCKS); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
