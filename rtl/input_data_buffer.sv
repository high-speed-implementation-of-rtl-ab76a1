// input_data_buffer: holds one PA block (the reconciled key and the Toeplitz
// random seed) and feeds it to the FFT datapath as floating-point samples.
//
// Loading: one (key bit, seed bit) pair per accepted cycle on a valid/ready
// port, N = K*K pairs per block. `full` rises when the last pair is stored and
// stays high, with `in_ready` low, until `release_block` (end of the block).
//
// Reading: `rd_en`/`rd_addr` (stream position t, 0..N-1) return one complex
// sample the next cycle, z = x' + i*v with x', v in {0.0, 1.0}. This is the
// pre-processing step: the matrix the datapath works on is filled row by
// row from the stream (t = i*K + j is element (i, j)), and the transform
// treats element (i, j) as sample L = i + K*j. Samples with L < r belong to
// the identity part of the modified Toeplitz matrix [I_r, T]; their key
// bits are zeroed on the way into the FFT and only used later, in the final
// XOR, which reads them back on the second port (`key_addr` -> `key_bit`,
// one cycle later).
//
// The paper states what the buffer stores and that it converts to floating
// point; the port widths, the one-pair-per-cycle load and the index
// convention above are this design's choices.
module input_data_buffer
  import pa_pkg::*;
#(
  parameter int LOG2K = 10,
  parameter int LOG2N = 2 * LOG2K
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [LOG2N:0]   cfg_r,          // final key length r, 0..N
  // load port
  input  logic             in_valid,
  output logic             in_ready,
  input  logic             in_key,
  input  logic             in_seed,
  output logic             full,
  input  logic             release_block,
  // sample read port (latency 1)
  input  logic             rd_en,
  input  logic [LOG2N-1:0] rd_addr,
  output cplx_t            rd_data,
  // key read port for the final XOR (latency 1)
  input  logic [LOG2N-1:0] key_addr,
  output logic             key_bit
);
  localparam int N = 1 << LOG2N;
  localparam fp_t FP_ONE = '{sign: 1'b0, exp: FP_EW'(FP_BIAS), man: '0};

  logic             key_mem  [N];
  logic             seed_mem [N];
  logic [LOG2N-1:0] wr_cnt;
  logic [LOG2N:0]   logical;

  assign in_ready = !full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_cnt <= '0;
      full   <= 1'b0;
    end else if (release_block) begin
      wr_cnt <= '0;
      full   <= 1'b0;
    end else if (in_valid && in_ready) begin
      wr_cnt <= wr_cnt + 1'b1;
      if (wr_cnt == LOG2N'(N - 1)) full <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      key_mem[wr_cnt]  <= in_key;
      seed_mem[wr_cnt] <= in_seed;
    end
  end

  // transform index of stream position rd_addr: L = i + K*j
  assign logical = {1'b0, rd_addr[LOG2K-1:0], rd_addr[LOG2N-1:LOG2K]};

  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_data.re <= (key_mem[rd_addr] && (logical >= cfg_r)) ? FP_ONE : FP_ZERO;
      rd_data.im <= seed_mem[rd_addr] ? FP_ONE : FP_ZERO;
    end
    key_bit <= key_mem[key_addr];
  end
endmodule
