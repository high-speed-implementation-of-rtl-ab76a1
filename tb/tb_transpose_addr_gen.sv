// tb_transpose_addr_gen: checks the tiled address layout at the default
// size (K = 1024, 32 x 32 tiles). It walks every row and then every column
// of a tiled region and of a linear region, compares each address with the
// layout formula, checks that the tiled layout is a one-to-one map, and
// counts page changes: the tiled layout must give 32*1024 for the row walk
// and 32*1024 for the column walk (65,536 in all), the linear layout 1024
// and 1024*1024 (1,049,600 in all), the two row-span counts the paper
// compares.
module tb_transpose_addr_gen;
  localparam int LOG2K = 10, LOG2T = 5, K = 1 << LOG2K, T = 1 << LOG2T;
  localparam int ADDR_W = 2 * LOG2K + 2;

  logic clk = 0, rst_n = 0, start = 0, tiled = 0, col_mode = 0, next = 0;
  logic [1:0] region = 0;
  logic [LOG2K-1:0] line = 0;
  logic active, last, page_cross;
  logic [ADDR_W-1:0] addr;
  int checks = 0, failures = 0;
  bit used [1 << (2 * LOG2K)];

  transpose_addr_gen dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ADDR_W-1:0] ref_addr(int reg_, bit til, int r, int c);
    if (til) return ADDR_W'(reg_ * K * K + ((r / T) * (K / T) + c / T) * T * T + (r % T) * T + c % T);
    return ADDR_W'(reg_ * K * K + r * K + c);
  endfunction

  // walk all K lines in one direction; return the number of page changes
  task automatic walk(bit til, bit col, int reg_, output longint crosses);
    int r, c, n;
    bit bad;
    crosses = 0;
    for (int l = 0; l < K; l++) begin
      @(negedge clk);
      start = 1; tiled = til; col_mode = col; line = LOG2K'(l); region = 2'(reg_);
      @(negedge clk);
      start = 0; next = 1;
      n = 0;
      bad = 0;
      while (active) begin
        r = col ? n : l;
        c = col ? l : n;
        if (addr !== ref_addr(reg_, til, r, c)) begin
          if (!bad) $display("FAIL: addr %h for (%0d,%0d) tiled=%0b", addr, r, c, til);
          bad = 1;
        end
        if (last !== (n == K - 1)) bad = 1;
        if (til && !col) begin
          if (used[addr[2*LOG2K-1:0]]) bad = 1;
          used[addr[2*LOG2K-1:0]] = 1;
        end
        if (page_cross) crosses++;
        n++;
        @(negedge clk);
      end
      // one check per line: every address, the last flag and the line length
      checks++;
      if (n != K) begin bad = 1; $display("FAIL: line %0d had %0d addresses", l, n); end
      if (bad) failures++;
      next = 0;
    end
  endtask

  longint c_tr, c_tc, c_lr, c_lc;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    walk(1, 0, 0, c_tr);
    walk(1, 1, 0, c_tc);
    walk(0, 0, 1, c_lr);
    walk(0, 1, 1, c_lc);
    checks += 4;
    $display("page changes: tiled rows %0d, tiled columns %0d (total %0d); linear rows %0d, linear columns %0d (total %0d)",
             c_tr, c_tc, c_tr + c_tc, c_lr, c_lc, c_lr + c_lc);
    if (c_tr != 32 * 1024 || c_tc != 32 * 1024) begin failures++; $display("FAIL: tiled page changes"); end
    if (c_tr + c_tc != 65536) failures++;
    if (c_lr != 1024 || c_lc != 1024 * 1024) begin failures++; $display("FAIL: linear page changes"); end
    if (c_lr + c_lc != 1049600) failures++;
    checks++;
    foreach (used[i]) if (!used[i]) begin failures++; break; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
