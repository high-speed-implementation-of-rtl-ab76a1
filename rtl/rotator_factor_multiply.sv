// rotator_factor_multiply: twiddle ("rotation factor") multiplication between
// the two 1-D FFT passes of the K x K decomposition of an N = K*K point FFT.
//
// Each sample is multiplied by W_N^(+e) (inverse = 0) or W_N^(-e)
// (inverse = 1), with W_N = exp(-2*pi*i/N) and e the product of the sample's
// row index and its frequency index after the row FFT (the W[i*j] factor of
// the modified 2-D FFT). The design splits the 2*LOG2K-bit exponent into
// e = e_hi*K + e_lo and uses W_N^e = W_K^e_hi * W_N^e_lo, so two K-entry
// ROMs replace one N-entry table; the ROMs are filled at elaboration time from
// cos/sin. This decomposition is this design's own choice; the paper only
// names the unit.
//
// Timing: three register stages (ROM read, factor product, data product).
// `en` is a clock enable for the whole pipeline so that the caller can stall
// it; `tag` is carried alongside the data unchanged. An exponent of 0 gives
// the factor (1, 0) exactly, so the unit also serves as a plain delay.
module rotator_factor_multiply
  import pa_pkg::*;
#(
  parameter int LOG2K = 10,
  parameter int TAG_W = 10
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 in_valid,
  input  cplx_t                in_data,
  input  logic [2*LOG2K-1:0]   in_exp,
  input  logic                 in_inverse,
  input  logic [TAG_W-1:0]     in_tag,
  output logic                 out_valid,
  output cplx_t                out_data,
  output logic [TAG_W-1:0]     out_tag
);
  localparam int K = 1 << LOG2K;

  typedef logic [K-1:0][CPLX_W-1:0] rom_t;

  // W_K^j (coarse) or W_N^j (fine) for j = 0..K-1
  function automatic rom_t make_rom(bit fine);
    rom_t r;
    real  ang;
    for (int j = 0; j < K; j++) begin
      ang = -2.0 * 3.14159265358979323846 * real'(j) / (fine ? real'(K) * real'(K) : real'(K));
      r[j] = {real_to_fp($cos(ang)), real_to_fp($sin(ang))};
    end
    return r;
  endfunction

  localparam rom_t ROM_HI = make_rom(1'b0);
  localparam rom_t ROM_LO = make_rom(1'b1);

  // stage 1: ROM lookups
  cplx_t             w_hi_q, w_lo_q, d1_q;
  logic              v1_q, inv1_q;
  logic [TAG_W-1:0]  t1_q;
  // stage 2: combined factor
  cplx_t             w_q, d2_q;
  logic              v2_q;
  logic [TAG_W-1:0]  t2_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q <= 1'b0; v2_q <= 1'b0; out_valid <= 1'b0;
      w_hi_q <= '0; w_lo_q <= '0; d1_q <= '0; inv1_q <= 1'b0; t1_q <= '0;
      w_q <= '0; d2_q <= '0; t2_q <= '0;
      out_data <= '0; out_tag <= '0;
    end else if (en) begin
      v1_q   <= in_valid;
      w_hi_q <= ROM_HI[in_exp[2*LOG2K-1:LOG2K]];
      w_lo_q <= ROM_LO[in_exp[LOG2K-1:0]];
      d1_q   <= in_data;
      inv1_q <= in_inverse;
      t1_q   <= in_tag;

      v2_q <= v1_q;
      w_q  <= inv1_q ? c_conj(c_mul(w_hi_q, w_lo_q)) : c_mul(w_hi_q, w_lo_q);
      d2_q <= d1_q;
      t2_q <= t1_q;

      out_valid <= v2_q;
      out_data  <= c_mul(d2_q, w_q);
      out_tag   <= t2_q;
    end
  end
endmodule
