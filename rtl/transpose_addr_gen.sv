// transpose_addr_gen: DDR address sequencer for one line (row or column) of
// the K x K working matrix, using the tiled "fast matrix transposition"
// layout.
//
// Layout. The matrix is cut into TILE x TILE tiles and each tile fills one
// DDR page (TILE*TILE elements). With r = {rh, rl} and c = {ch, cl}, where rl
// and cl are the low log2(TILE) bits, element (r, c) of a tiled region sits at
//     addr = {region, rh, ch, rl, cl}
// so a whole matrix row, or a whole column, crosses only K/TILE pages instead
// of one page per element (column walk in a row-major layout). For K = 1024
// and TILE = 32 this gives 32 page changes per line, i.e. 32*1024 for writing
// the matrix by rows plus 32*1024 for reading it by columns. The tile size,
// the matrix size and this access count follow the paper; mapping one tile
// to one DDR page, and the bit order inside the tile, are this design's
// choice. A region can also be addressed linearly ({region, r, c}) for data
// that is only ever read back by rows.
//
// Interface. `start` loads the line number, the direction (col_mode = 1:
// walk down column `line`; 0: walk along row `line`), the region and the
// layout. While `active` is high, `addr` is the current element address and
// `last` marks the K-th one; `next` moves to the following element (so the
// caller ties it to its handshake). `page_cross` is high when `addr` lies in a
// different DDR page from the previous address this generator produced since
// `start` (the first address of a line always counts), which lets a user
// count row-span accesses.
module transpose_addr_gen #(
  parameter int LOG2K = 10,
  parameter int LOG2T = 5,
  parameter int ADDR_W = 2 * LOG2K + 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [1:0]        region,
  input  logic              tiled,
  input  logic              col_mode,
  input  logic [LOG2K-1:0]  line,
  input  logic              next,
  output logic              active,
  output logic [ADDR_W-1:0] addr,
  output logic              last,
  output logic              page_cross
);
  localparam int K = 1 << LOG2K;
  localparam int PAGE_W = ADDR_W - 2 * LOG2T;

  logic [LOG2K-1:0]  idx_q, line_q;
  logic [1:0]        region_q;
  logic              tiled_q, col_q;
  logic [PAGE_W-1:0] prev_page_q;
  logic              first_q;
  logic [LOG2K-1:0]  r, c;

  assign r = col_q ? idx_q : line_q;
  assign c = col_q ? line_q : idx_q;

  always_comb begin
    if (tiled_q)
      addr = {region_q, r[LOG2K-1:LOG2T], c[LOG2K-1:LOG2T], r[LOG2T-1:0], c[LOG2T-1:0]};
    else
      addr = {region_q, r, c};
  end

  assign last       = active && (idx_q == LOG2K'(K - 1));
  assign page_cross = active && (first_q || (addr[ADDR_W-1:2*LOG2T] != prev_page_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active      <= 1'b0;
      idx_q       <= '0;
      line_q      <= '0;
      region_q    <= '0;
      tiled_q     <= 1'b0;
      col_q       <= 1'b0;
      prev_page_q <= '0;
      first_q     <= 1'b0;
    end else if (start) begin
      active   <= 1'b1;
      idx_q    <= '0;
      line_q   <= line;
      region_q <= region;
      tiled_q  <= tiled;
      col_q    <= col_mode;
      first_q  <= 1'b1;
    end else if (active && next) begin
      prev_page_q <= addr[ADDR_W-1:2*LOG2T];
      first_q     <= 1'b0;
      idx_q       <= idx_q + 1'b1;
      if (last) active <= 1'b0;
    end
  end

  initial assert (LOG2T <= LOG2K) else $error("TILE larger than the matrix");
endmodule
