// tb_pa_top: end-to-end test of pa_top at reduced size (K = 16, N = 256,
// 4 x 4 tiles), two blocks back to back with different final key lengths;
// every output bit is checked. See pa_tb_env for what is checked.
module tb_pa_top;
  import pa_pkg::*;
  localparam int LOG2K = 4;
  localparam int LOG2T = 2;
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

  pa_top #(.LOG2K(LOG2K), .LOG2T(LOG2T)) dut (.*);
  pa_tb_env #(.LOG2K(LOG2K), .LOG2T(LOG2T), .NBLOCKS(2), .CHECK_ALL(1'b1), .MAXCYC(400_000)) env (.*);
endmodule
