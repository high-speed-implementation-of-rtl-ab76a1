// ddr3_model: behavioural stand-in for the DDR3 SDRAM and its controller.
//
// One command per cycle on a valid/ready port (we = 1 write, 0 read), one
// 64-bit complex word per address. Memory is organised in pages of
// 2^PAGE_W words with one open page: a command to another page is accepted
// but then holds cmd_ready low for MISS_PENALTY cycles, which models the
// cost of a row change ("row-span access"). Reads return in order after
// RD_LAT cycles. Counters expose the number of accesses, page changes and
// stall cycles. Not synthesisable.
module ddr3_model
  import pa_pkg::*;
#(
  parameter int ADDR_W       = 22,
  parameter int PAGE_W       = 10,
  parameter int MISS_PENALTY = 4,
  parameter int RD_LAT       = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic              cmd_we,
  input  logic [ADDR_W-1:0] cmd_addr,
  input  cplx_t             cmd_wdata,
  output logic              rd_valid,
  output cplx_t             rd_data
);
  cplx_t mem [1 << ADDR_W];
  int    stall;
  logic [ADDR_W-1:0] open_page;
  bit    page_open;
  logic  pipe_v [RD_LAT];
  cplx_t pipe_d [RD_LAT];
  longint n_reads, n_writes, n_page_changes, n_stall_cycles;

  assign cmd_ready = (stall == 0);
  assign rd_valid  = pipe_v[RD_LAT-1];
  assign rd_data   = pipe_d[RD_LAT-1];

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stall <= 0; page_open <= 0; open_page <= '0;
      for (int i = 0; i < RD_LAT; i++) begin pipe_v[i] <= 1'b0; pipe_d[i] <= '0; end
      n_reads <= 0; n_writes <= 0; n_page_changes <= 0; n_stall_cycles <= 0;
    end else begin
      for (int i = RD_LAT - 1; i > 0; i--) begin
        pipe_v[i] <= pipe_v[i-1];
        pipe_d[i] <= pipe_d[i-1];
      end
      pipe_v[0] <= 1'b0;
      if (stall > 0) stall <= stall - 1;
      if (cmd_valid && !cmd_ready) n_stall_cycles <= n_stall_cycles + 1;
      if (cmd_valid && cmd_ready) begin
        if (!page_open || (cmd_addr >> PAGE_W) != open_page) begin
          n_page_changes <= n_page_changes + 1;
          open_page <= cmd_addr >> PAGE_W;
          page_open <= 1;
          stall <= MISS_PENALTY;
        end
        if (cmd_we) begin
          mem[cmd_addr] <= cmd_wdata;
          n_writes <= n_writes + 1;
        end else begin
          pipe_v[0] <= 1'b1;
          pipe_d[0] <= mem[cmd_addr];
          n_reads <= n_reads + 1;
        end
      end
    end
  end
endmodule
