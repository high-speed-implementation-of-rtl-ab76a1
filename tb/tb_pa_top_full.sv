// tb_pa_top_full: one complete block through pa_top at its default size
// (K = 1024, N = 1,048,576 samples, 32 x 32 tiles), with a random key, a
// random seed and a final key length between N/2 and 3N/4. The count and
// index of every output bit are checked; the value is checked for 2048
// randomly chosen bits against a direct GF(2) evaluation of the Toeplitz
// hash (see pa_tb_env).
module tb_pa_top_full;
  import pa_pkg::*;
  localparam int LOG2K = 10;
  localparam int LOG2T = 5;
  localparam int LOG2N = 2 * LOG2K;

  logic clk, rst_n, in_valid, in_ready, in_key, in_seed;
  logic [LOG2N:0] cfg_r;
  logic key_valid, key_bit, busy, block_done;
  logic [LOG2N-1:0] key_idx;
  logic fft_in_valid, fft_out_valid, ifft_in_valid, ifft_out_valid;
  cplx_t fft_in_data, fft_out_data, ifft_in_data, ifft_out_data;
  logic mem_cmd_valid, mem_cmd_ready, mem_cmd_we, mem_rd_valid, mem_page_cross;
  logic [LOG2N+1:0] mem_cmd_addr;
  cplx_t mem_cmd_wdata, mem_rd_data;

  pa_top dut (.*);
  pa_tb_env #(.LOG2K(LOG2K), .LOG2T(LOG2T), .NBLOCKS(1), .CHECK_ALL(1'b0),
              .NSAMPLE(2048), .MAXCYC(25_000_000)) env (.*);
endmodule
