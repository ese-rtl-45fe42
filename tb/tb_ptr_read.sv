// tb_ptr_read -- checks the column-pointer reader. Each matrix is a list of
// n+1 pointers p_0..p_n ending with wr_last; the reader must offer the n
// column ranges (p_j, p_j+1) in order, the first pointer of every matrix
// being absorbed without a column. Random write gaps and random col_pop,
// with a buffer depth of 4 so that matrices span several banks.
module tb_ptr_read;
  timeunit 1ns; timeprecision 1ps;
  localparam int DEPTH = 4;
  logic clk = 0, rst_n = 0, wr_valid = 0, wr_last = 0, wr_ready, col_valid, col_pop = 0;
  logic [15:0] wr_data = '0, col_start, col_end;
  int checks = 0, failures = 0, n_cols = 0;
  logic [31:0] expq[$];
  logic [16:0] wq[$];
  ptr_read #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int m = 0; m < 40; m++) begin
      int n; logic [15:0] p; n = 1 + $urandom % 12; p = 16'($urandom % 50);
      wq.push_back({1'b0, p});
      for (int j = 0; j < n; j++) begin
        logic [15:0] pn; pn = p + 16'($urandom % 6);
        expq.push_back({p, pn}); wq.push_back({j == n - 1, pn}); p = pn;
      end
    end
    repeat (3) @(posedge clk); rst_n = 1;
    while (expq.size() != 0) begin
      @(negedge clk);
      if (col_valid) begin
        checks++;
        if ({col_start, col_end} != expq[0]) begin
          failures++; $display("col %0d..%0d exp %0d..%0d", col_start, col_end, expq[0][31:16], expq[0][15:0]);
        end
      end
      if (!(wr_valid && !wr_ready)) begin
        wr_valid = wq.size() != 0 && $urandom % 3 != 0;
        {wr_last, wr_data} = wq.size() ? wq[0] : 17'h0;
      end
      col_pop = col_valid && $urandom % 2;
      @(posedge clk);
      if (col_pop) begin void'(expq.pop_front()); n_cols++; end
      if (wr_valid && wr_ready) void'(wq.pop_front());
    end
    $display("columns %0d", n_cols);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
