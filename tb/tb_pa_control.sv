// tb_pa_control: answers each operation after a random delay and checks the
// issued sequence (rows, columns, multiply rows, inverse columns, each line
// 0..K-1 in order, K = 4), that nothing starts before the buffer is full,
// and that block_done pulses exactly once at the end, for two blocks.
module tb_pa_control;
  import pa_pkg::*;
  localparam int LOG2K = 2, K = 4;
  logic clk = 0, rst_n = 0, buffer_full = 0, op_start, op_done = 0, busy, block_done;
  op_e op;
  logic [LOG2K-1:0] op_line;
  int checks = 0, failures = 0, n_done = 0, n_ops = 0;
  op_e exp_ops [4] = '{OP_FWD_ROW, OP_FWD_COL, OP_MUL_ROW, OP_INV_COL};

  pa_control #(.LOG2K(LOG2K)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (block_done) n_done++;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (10) begin
      @(negedge clk);
      checks++;
      if (op_start || busy) begin failures++; $display("FAIL: started without data"); end
    end
    for (int b = 0; b < 2; b++) begin
      buffer_full = 1;
      for (int p = 0; p < 4; p++) begin
        for (int l = 0; l < K; l++) begin
          while (!op_start) @(negedge clk);
          checks++;
          n_ops++;
          if (op !== exp_ops[p] || int'(op_line) != l) begin
            failures++; $display("FAIL: got op %s line %0d, expected %s line %0d", op.name(), op_line, exp_ops[p].name(), l);
          end
          repeat ($urandom_range(1, 6)) begin
            @(negedge clk);
            checks++;
            if (op_start) begin failures++; $display("FAIL: op_start while waiting"); end
          end
          op_done = 1;
          @(negedge clk);
          op_done = 0;
        end
      end
      // the top releases the buffer on block_done
      while (!block_done) @(negedge clk);
      buffer_full = 0;
      @(negedge clk);
      checks++;
      if (n_done != b + 1) begin failures++; $display("FAIL: block_done count %0d", n_done); end
      repeat (5) begin
        @(negedge clk);
        checks++;
        if (op_start || block_done) begin failures++; $display("FAIL: activity after block"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
