// fft_conv_unit: the FFT convolution unit of the PA module.
//
// It groups the data distribute unit (row engine and DDR traffic), the
// multiply unit (real-valued FFT split and spectrum product) and the
// rotation-factor multiplier. The FFT core, the IFFT core and the DDR3
// controller are external IP and connect through ports: each core takes K
// complex samples of a row (one per `*_in_valid`, gaps allowed) and returns
// its K-point DFT (forward) or unscaled inverse DFT in natural order on
// `*_out_valid`. See data_distribute_unit for the operations and timing.
module fft_conv_unit
  import pa_pkg::*;
#(
  parameter int LOG2K  = 10,
  parameter int LOG2T  = 5,
  parameter int LOG2N  = 2 * LOG2K,
  parameter int ADDR_W = 2 * LOG2K + 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              op_start,
  input  op_e               op,
  input  logic [LOG2K-1:0]  op_line,
  output logic              op_done,
  output logic              ib_rd_en,
  output logic [LOG2N-1:0]  ib_rd_addr,
  input  cplx_t             ib_rd_data,
  output logic              fft_in_valid,
  output cplx_t             fft_in_data,
  input  logic              fft_out_valid,
  input  cplx_t             fft_out_data,
  output logic              ifft_in_valid,
  output cplx_t             ifft_in_data,
  input  logic              ifft_out_valid,
  input  cplx_t             ifft_out_data,
  output logic              mem_cmd_valid,
  input  logic              mem_cmd_ready,
  output logic              mem_cmd_we,
  output logic [ADDR_W-1:0] mem_cmd_addr,
  output cplx_t             mem_cmd_wdata,
  input  logic              mem_rd_valid,
  input  cplx_t             mem_rd_data,
  output logic              res_valid,
  output cplx_t             res_data,
  output logic [LOG2N-1:0]  res_idx,
  output logic              busy,
  output logic              mem_page_cross
);
  logic             mul_in_valid, mul_out_valid;
  cplx_t            mul_zk, mul_zm, mul_p;
  logic             rot_en, rot_in_valid, rot_inverse, rot_out_valid;
  cplx_t            rot_in_data, rot_out_data;
  logic [LOG2N-1:0] rot_exp;
  logic [LOG2K-1:0] rot_in_tag, rot_out_tag;

  data_distribute_unit #(.LOG2K(LOG2K), .LOG2T(LOG2T), .LOG2N(LOG2N), .ADDR_W(ADDR_W)) u_ddu (.*);

  multiply_unit u_mul (
    .clk, .rst_n, .in_valid(mul_in_valid), .zk(mul_zk), .zm(mul_zm),
    .out_valid(mul_out_valid), .p(mul_p));

  rotator_factor_multiply #(.LOG2K(LOG2K), .TAG_W(LOG2K)) u_rot (
    .clk, .rst_n, .en(rot_en), .in_valid(rot_in_valid), .in_data(rot_in_data),
    .in_exp(rot_exp), .in_inverse(rot_inverse), .in_tag(rot_in_tag),
    .out_valid(rot_out_valid), .out_data(rot_out_data), .out_tag(rot_out_tag));
endmodule
