// pa_top: FFT-based privacy amplification (PA) engine for quantum key
// distribution.
//
// Function. For a block of N = K*K reconciled key bits x and N random seed
// bits v, and a final key length r (0..N, set per block on `cfg_r`), it
// outputs r bits y = [I_r, T] * x over GF(2), a modified Toeplitz hash: the
// Toeplitz part T*x is computed as a cyclic convolution of v with the key
// (first r samples zeroed) through floating-point FFTs, and the identity
// part is the XOR with the first r key samples. All indices are in the
// "unnatural" order of the modified 2-D FFT: stream position t = i*K + j is
// sample L = i + K*j, and output bit L (0 <= L < r) leaves in the order of
// the last pass (column q = L mod K, then s = L div K).
//
// Structure: input_data_buffer (store + pre-processing), pa_control
// (sequencer), fft_conv_unit (data distribute unit, multiply unit, rotation
// factor multiplier) and post_processing (rounding + final XOR). The FFT
// core, the IFFT core and the DDR3 SDRAM controller are external and are
// reached through the fft_*, ifft_* and mem_* ports.
//
// Interface and timing: load N (key, seed) pairs on in_valid/in_ready, one
// per cycle at most; processing starts on its own when the buffer is full;
// key bits appear on key_valid/key_bit with their sample index key_idx;
// block_done pulses once all r bits are out. A block takes roughly 7*N
// cycles plus DDR page-miss stalls and FFT core latency (4*K row operations).
// The parameters default to the paper's one-million-point configuration
// (K = 1024, 32 x 32 tiles).
module pa_top
  import pa_pkg::*;
#(
  parameter int LOG2K  = 10,
  parameter int LOG2T  = 5,
  parameter int LOG2N  = 2 * LOG2K,
  parameter int ADDR_W = 2 * LOG2K + 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [LOG2N:0]    cfg_r,
  // key / seed input
  input  logic              in_valid,
  output logic              in_ready,
  input  logic              in_key,
  input  logic              in_seed,
  // final key output
  output logic              key_valid,
  output logic              key_bit,
  output logic [LOG2N-1:0]  key_idx,
  output logic              busy,
  output logic              block_done,
  // external FFT core
  output logic              fft_in_valid,
  output cplx_t             fft_in_data,
  input  logic              fft_out_valid,
  input  cplx_t             fft_out_data,
  // external IFFT core
  output logic              ifft_in_valid,
  output cplx_t             ifft_in_data,
  input  logic              ifft_out_valid,
  input  cplx_t             ifft_out_data,
  // external DDR3 controller
  output logic              mem_cmd_valid,
  input  logic              mem_cmd_ready,
  output logic              mem_cmd_we,
  output logic [ADDR_W-1:0] mem_cmd_addr,
  output cplx_t             mem_cmd_wdata,
  input  logic              mem_rd_valid,
  input  cplx_t             mem_rd_data,
  output logic              mem_page_cross
);
  logic             full, op_start, op_done, ctrl_busy, conv_busy;
  op_e              op;
  logic [LOG2K-1:0] op_line;
  logic             ib_rd_en;
  logic [LOG2N-1:0] ib_rd_addr, key_addr;
  cplx_t            ib_rd_data;
  logic             key_from_buf;
  logic             res_valid;
  cplx_t            res_data;
  logic [LOG2N-1:0] res_idx;

  assign busy = ctrl_busy || conv_busy;

  input_data_buffer #(.LOG2K(LOG2K), .LOG2N(LOG2N)) u_buf (
    .clk, .rst_n, .cfg_r, .in_valid, .in_ready, .in_key, .in_seed, .full,
    .release_block(block_done), .rd_en(ib_rd_en), .rd_addr(ib_rd_addr),
    .rd_data(ib_rd_data), .key_addr, .key_bit(key_from_buf));

  pa_control #(.LOG2K(LOG2K)) u_ctrl (
    .clk, .rst_n, .buffer_full(full), .op_start, .op, .op_line, .op_done,
    .busy(ctrl_busy), .block_done);

  fft_conv_unit #(.LOG2K(LOG2K), .LOG2T(LOG2T), .LOG2N(LOG2N), .ADDR_W(ADDR_W)) u_conv (
    .clk, .rst_n, .op_start, .op, .op_line, .op_done,
    .ib_rd_en, .ib_rd_addr, .ib_rd_data,
    .fft_in_valid, .fft_in_data, .fft_out_valid, .fft_out_data,
    .ifft_in_valid, .ifft_in_data, .ifft_out_valid, .ifft_out_data,
    .mem_cmd_valid, .mem_cmd_ready, .mem_cmd_we, .mem_cmd_addr, .mem_cmd_wdata,
    .mem_rd_valid, .mem_rd_data,
    .res_valid, .res_data, .res_idx, .busy(conv_busy), .mem_page_cross);

  post_processing #(.LOG2K(LOG2K), .LOG2N(LOG2N)) u_post (
    .clk, .rst_n, .cfg_r, .in_valid(res_valid), .in_data(res_data), .in_idx(res_idx),
    .key_addr, .key_bit(key_from_buf),
    .out_valid(key_valid), .out_bit(key_bit), .out_idx(key_idx));
endmodule
