// data_distribute_unit: the row engine of the FFT convolution unit.
//
// It executes one row operation at a time (see pa_pkg::op_e): it fetches one
// line of K samples from its source, streams them through the FFT or IFFT
// core, catches the core's K outputs in a row buffer, and drains the row
// buffer through the rotation-factor multiplier to the destination. Sources
// and destinations per operation:
//   OP_FWD_ROW  input buffer row i           -> FFT  -> x W_N^( i*k) -> region 0 row i (tiled)
//   OP_FWD_COL  region 0 column c (tiled)    -> FFT  -> x 1          -> region 1 row c (linear)
//   OP_MUL_ROW  region 1 rows k1 and -k1     -> multiply unit -> IFFT -> x W_N^(-k1*q) -> region 2 row k1 (tiled)
//   OP_INV_COL  region 2 column q (tiled)    -> IFFT -> x 1          -> result stream (sample L = q + K*s)
// Region 0 and region 2 use the tiled layout of transpose_addr_gen, so the
// column reads that stand in for the two matrix transpositions cross only
// K/TILE DDR pages per line. For OP_MUL_ROW the unit first loads row k1 and
// its mirror row (-k1 mod K) into two local buffers and then presents the
// multiply unit with Z(k) and Z(N-k): sample (k1, k2) pairs with
// (-k1, -k2 - [k1 != 0]) mod K, because sample (k1, k2) of the unnatural-
// order spectrum is frequency k1 + K*k2.
//
// Timing and handshakes: DDR commands use valid/ready; read data returns in
// order, one word per `mem_rd_valid`, with no back-pressure. The FFT/IFFT
// cores take a sample whenever `*_in_valid` is high and return K samples in
// natural order on `*_out_valid`, also without back-pressure (gaps allowed).
// The drain pipeline (row-buffer read, 3-stage rotator, write register) is
// stalled as a whole while a DDR write waits for `mem_cmd_ready`. `op_done`
// pulses for one cycle when the last sample of the operation has left.
//
// The paper says only that this unit feeds the calculation units and
// exchanges data with the SDRAM controller; the operation set above is how
// this design maps the paper's modified 2-D FFT and real-valued FFT split
// onto one FFT core, one IFFT core and three DDR regions. One complex sample
// (64 bits) per DDR word is a simplification of this design.
module data_distribute_unit
  import pa_pkg::*;
#(
  parameter int LOG2K  = 10,
  parameter int LOG2T  = 5,
  parameter int LOG2N  = 2 * LOG2K,
  parameter int ADDR_W = 2 * LOG2K + 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // operation handshake
  input  logic              op_start,
  input  op_e               op,
  input  logic [LOG2K-1:0]  op_line,
  output logic              op_done,
  // input data buffer sample port
  output logic              ib_rd_en,
  output logic [LOG2N-1:0]  ib_rd_addr,
  input  cplx_t             ib_rd_data,
  // FFT core
  output logic              fft_in_valid,
  output cplx_t             fft_in_data,
  input  logic              fft_out_valid,
  input  cplx_t             fft_out_data,
  // IFFT core
  output logic              ifft_in_valid,
  output cplx_t             ifft_in_data,
  input  logic              ifft_out_valid,
  input  cplx_t             ifft_out_data,
  // multiply unit
  output logic              mul_in_valid,
  output cplx_t             mul_zk,
  output cplx_t             mul_zm,
  input  logic              mul_out_valid,
  input  cplx_t             mul_p,
  // rotation-factor multiplier
  output logic              rot_en,
  output logic              rot_in_valid,
  output cplx_t             rot_in_data,
  output logic [LOG2N-1:0]  rot_exp,
  output logic              rot_inverse,
  output logic [LOG2K-1:0]  rot_in_tag,
  input  logic              rot_out_valid,
  input  cplx_t             rot_out_data,
  input  logic [LOG2K-1:0]  rot_out_tag,
  // DDR controller
  output logic              mem_cmd_valid,
  input  logic              mem_cmd_ready,
  output logic              mem_cmd_we,
  output logic [ADDR_W-1:0] mem_cmd_addr,
  output cplx_t             mem_cmd_wdata,
  input  logic              mem_rd_valid,
  input  cplx_t             mem_rd_data,
  // result stream to post-processing
  output logic              res_valid,
  output cplx_t             res_data,
  output logic [LOG2N-1:0]  res_idx,
  // status
  output logic              busy,
  output logic              mem_page_cross   // current DDR command opens a new page
);
  localparam int K = 1 << LOG2K;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_FEED, S_DRAIN} state_e;
  state_e state;

  op_e              op_q;
  logic [LOG2K-1:0] line_q;
  logic             inverse_op;

  // counters
  logic [LOG2K:0]   iss_cnt;      // samples requested from the source
  logic [LOG2K:0]   push_cnt;     // samples pushed into the core
  logic [LOG2K:0]   col_cnt;      // core outputs caught
  logic [LOG2K+1:0] rcv_cnt;      // DDR read words received (load phase)
  logic [LOG2K:0]   dr_iss;       // row-buffer reads issued in drain
  logic [LOG2K:0]   dr_done;      // samples delivered in drain
  logic             second_q;     // load phase: mirror row requested

  // buffers
  cplx_t rb   [K];
  cplx_t bufa [K];
  cplx_t bufb [K];

  // address generators: A for reads, B for writes
  logic              ga_start, ga_next, ga_active, ga_last, ga_pc, ga_tiled, ga_col;
  logic [1:0]        ga_region;
  logic [LOG2K-1:0]  ga_line;
  logic [ADDR_W-1:0] ga_addr;
  logic              gb_start, gb_next, gb_active, gb_last, gb_pc, gb_tiled;
  logic [1:0]        gb_region;
  logic [ADDR_W-1:0] gb_addr;

  transpose_addr_gen #(.LOG2K(LOG2K), .LOG2T(LOG2T), .ADDR_W(ADDR_W)) u_gen_rd (
    .clk, .rst_n, .start(ga_start), .region(ga_region), .tiled(ga_tiled),
    .col_mode(ga_col), .line(ga_line), .next(ga_next),
    .active(ga_active), .addr(ga_addr), .last(ga_last), .page_cross(ga_pc));

  transpose_addr_gen #(.LOG2K(LOG2K), .LOG2T(LOG2T), .ADDR_W(ADDR_W)) u_gen_wr (
    .clk, .rst_n, .start(gb_start), .region(gb_region), .tiled(gb_tiled),
    .col_mode(1'b0), .line(line_q), .next(gb_next),
    .active(gb_active), .addr(gb_addr), .last(gb_last), .page_cross(gb_pc));

  assign inverse_op = (op_q == OP_MUL_ROW) || (op_q == OP_INV_COL);
  assign busy       = (state != S_IDLE);

  // ------------------------------------------------------- read generator
  logic [LOG2K-1:0] mirror_line;
  assign mirror_line = LOG2K'(0) - line_q;

  always_comb begin
    ga_start  = 1'b0;
    ga_region = 2'd0;
    ga_tiled  = 1'b1;
    ga_col    = 1'b1;
    ga_line   = op_line;
    if (state == S_IDLE && op_start) begin
      unique case (op)
        OP_FWD_COL: begin ga_start = 1'b1; ga_region = 2'd0; end
        OP_INV_COL: begin ga_start = 1'b1; ga_region = 2'd2; end
        OP_MUL_ROW: begin ga_start = 1'b1; ga_region = 2'd1; ga_tiled = 1'b0; ga_col = 1'b0; end
        default: ;
      endcase
    end else if (state == S_LOAD && !second_q && ga_active && ga_last && mem_cmd_ready) begin
      ga_start  = 1'b1;
      ga_region = 2'd1;
      ga_tiled  = 1'b0;
      ga_col    = 1'b0;
      ga_line   = mirror_line;
    end
  end

  // ------------------------------------------------------ drain pipeline
  logic             adv;
  logic             wq_valid;
  cplx_t            wq_data;
  logic [LOG2K-1:0] wq_tag;
  logic             dr_v1;
  logic [LOG2K-1:0] dr_k1;
  cplx_t            rb_q;
  logic             to_mem;

  assign to_mem = (op_q != OP_INV_COL);
  assign adv    = !(wq_valid && to_mem && !mem_cmd_ready);

  assign rot_en       = adv;
  assign rot_in_valid = dr_v1;
  assign rot_in_data  = rb_q;
  assign rot_exp      = (op_q == OP_FWD_ROW || op_q == OP_MUL_ROW) ? LOG2N'(line_q) * LOG2N'(dr_k1) : '0;
  assign rot_inverse  = (op_q == OP_MUL_ROW);
  assign rot_in_tag   = dr_k1;

  assign gb_region = (op_q == OP_FWD_ROW) ? 2'd0 : (op_q == OP_FWD_COL) ? 2'd1 : 2'd2;
  assign gb_tiled  = (op_q != OP_FWD_COL);
  assign gb_next   = (state == S_DRAIN) && wq_valid && to_mem && mem_cmd_ready;

  // ------------------------------------------------------- DDR command mux
  always_comb begin
    mem_cmd_valid  = 1'b0;
    mem_cmd_we     = 1'b0;
    mem_cmd_addr   = ga_addr;
    mem_cmd_wdata  = wq_data;
    mem_page_cross = 1'b0;
    ga_next        = 1'b0;
    if (state == S_DRAIN) begin
      mem_cmd_valid  = wq_valid && to_mem;
      mem_cmd_we     = 1'b1;
      mem_cmd_addr   = gb_addr;
      mem_page_cross = mem_cmd_valid && gb_pc;
    end else if ((state == S_LOAD || state == S_FEED) && ga_active) begin
      mem_cmd_valid  = 1'b1;
      ga_next        = mem_cmd_ready;
      mem_page_cross = ga_pc;
    end
  end

  // ---------------------------------------------------- feed to the cores
  logic             ibv_q;       // input-buffer sample valid
  logic             mrd_q;       // multiply-unit operands valid
  logic             core_in_valid;
  cplx_t            core_in_data;
  logic             core_out_valid;
  cplx_t            core_out_data;
  logic [LOG2K-1:0] k2;

  assign k2 = iss_cnt[LOG2K-1:0];
  assign ib_rd_en   = (state == S_FEED) && (op_q == OP_FWD_ROW) && !iss_cnt[LOG2K];
  assign ib_rd_addr = {line_q, k2};

  assign mul_in_valid = mrd_q;

  always_comb begin
    unique case (op_q)
      OP_FWD_ROW: begin core_in_valid = ibv_q;         core_in_data = ib_rd_data; end
      OP_MUL_ROW: begin core_in_valid = mul_out_valid; core_in_data = mul_p; end
      default:    begin core_in_valid = mem_rd_valid && (state == S_FEED); core_in_data = mem_rd_data; end
    endcase
  end

  assign fft_in_valid   = core_in_valid && !inverse_op;
  assign fft_in_data    = core_in_data;
  assign ifft_in_valid  = core_in_valid && inverse_op;
  assign ifft_in_data   = core_in_data;
  assign core_out_valid = inverse_op ? ifft_out_valid : fft_out_valid;
  assign core_out_data  = inverse_op ? ifft_out_data : fft_out_data;

  // --------------------------------------------------------- result stream
  assign res_valid = (state == S_DRAIN) && wq_valid && !to_mem;
  assign res_data  = wq_data;
  assign res_idx   = {wq_tag, line_q};

  // ------------------------------------------------------------ buffers
  always_ff @(posedge clk) begin
    if (core_out_valid && !col_cnt[LOG2K]) rb[col_cnt[LOG2K-1:0]] <= core_out_data;
    if (state == S_LOAD && mem_rd_valid) begin
      if (!rcv_cnt[LOG2K]) bufa[rcv_cnt[LOG2K-1:0]] <= mem_rd_data;
      else                 bufb[rcv_cnt[LOG2K-1:0]] <= mem_rd_data;
    end
    // multiply-unit operands: Z(k1,k2) and Z(-k1, -k2 - [k1!=0])
    if (state == S_FEED && op_q == OP_MUL_ROW && !iss_cnt[LOG2K]) begin
      mul_zk <= bufa[k2];
      mul_zm <= bufb[LOG2K'(0) - k2 - LOG2K'(line_q != '0)];
    end
    if (adv && state == S_DRAIN && !dr_iss[LOG2K]) rb_q <= rb[dr_iss[LOG2K-1:0]];
  end

  // ------------------------------------------------------------ control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      op_q     <= OP_NONE;
      line_q   <= '0;
      iss_cnt  <= '0;
      push_cnt <= '0;
      col_cnt  <= '0;
      rcv_cnt  <= '0;
      dr_iss   <= '0;
      dr_done  <= '0;
      second_q <= 1'b0;
      ibv_q    <= 1'b0;
      mrd_q    <= 1'b0;
      dr_v1    <= 1'b0;
      dr_k1    <= '0;
      wq_valid <= 1'b0;
      wq_data  <= '0;
      wq_tag   <= '0;
      op_done  <= 1'b0;
      gb_start <= 1'b0;
    end else begin
      op_done  <= 1'b0;
      gb_start <= 1'b0;
      ibv_q    <= ib_rd_en;
      mrd_q    <= (state == S_FEED) && (op_q == OP_MUL_ROW) && !iss_cnt[LOG2K];
      if (core_in_valid)  push_cnt <= push_cnt + 1'b1;
      if (core_out_valid) col_cnt  <= col_cnt + 1'b1;

      unique case (state)
        S_IDLE: if (op_start) begin
          op_q     <= op;
          line_q   <= op_line;
          iss_cnt  <= '0;
          push_cnt <= '0;
          col_cnt  <= '0;
          rcv_cnt  <= '0;
          dr_iss   <= '0;
          dr_done  <= '0;
          second_q <= 1'b0;
          state    <= (op == OP_MUL_ROW) ? S_LOAD : S_FEED;
        end

        S_LOAD: begin
          if (ga_start) second_q <= 1'b1;
          if (mem_rd_valid) rcv_cnt <= rcv_cnt + 1'b1;
          if (mem_rd_valid && rcv_cnt == (LOG2K+2)'(2*K - 1)) state <= S_FEED;
        end

        S_FEED: begin
          if ((op_q == OP_FWD_ROW || op_q == OP_MUL_ROW) && !iss_cnt[LOG2K])
            iss_cnt <= iss_cnt + 1'b1;
          // all K core outputs caught (counting the one arriving now)
          if (core_out_valid && col_cnt == (LOG2K+1)'(K - 1)) begin
            state    <= S_DRAIN;
            gb_start <= to_mem;
          end
        end

        S_DRAIN: begin
          if (adv) begin
            dr_v1 <= !dr_iss[LOG2K];
            dr_k1 <= dr_iss[LOG2K-1:0];
            if (!dr_iss[LOG2K]) dr_iss <= dr_iss + 1'b1;
            wq_valid <= rot_out_valid;
            wq_data  <= rot_out_data;
            wq_tag   <= rot_out_tag;
          end
          if (wq_valid && (!to_mem || mem_cmd_ready)) begin
            dr_done <= dr_done + 1'b1;
            if (dr_done == (LOG2K+1)'(K - 1)) begin
              state    <= S_IDLE;
              op_done  <= 1'b1;
              wq_valid <= 1'b0;
              dr_v1    <= 1'b0;
            end
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // Handshake rules: read data only arrives while a read phase is running,
  // and a core never returns more than K samples per operation.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!mem_rd_valid || state == S_LOAD || state == S_FEED)
        else $error("DDR read data outside a read phase");
      assert (!core_out_valid || !col_cnt[LOG2K])
        else $error("FFT core returned more than K samples");
      assert (!gb_next || gb_active)
        else $error("DDR write issued with no destination line open");
    end
  end
endmodule
