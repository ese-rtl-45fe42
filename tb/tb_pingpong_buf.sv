// tb_pingpong_buf -- checks the two-bank stream buffer with a small depth
// (8). Words are written with random gaps and random end-of-matrix marks and
// read with random pops; the read side must return every word in order with
// rd_last exactly on the marked words. The test counts hand-overs of a full
// bank, of a bank closed by wr_last, of a part-filled bank handed over
// because the reader ran dry, and cycles where both banks were full and the
// writer had to wait; each must occur.
module tb_pingpong_buf;
  timeunit 1ns; timeprecision 1ps;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0, wr_valid = 0, wr_last = 0, wr_ready, rd_valid, rd_last, rd_pop = 0;
  logic [15:0] wr_data = '0, rd_data;
  int checks = 0, failures = 0, n_full = 0, n_lastc = 0, n_flush = 0, n_wait = 0, n_rd = 0;
  logic [16:0] q[$];
  pingpong_buf #(.WIDTH(16), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n) begin
    if (dut.flush) n_flush++;
    if (wr_valid && wr_ready && wr_last) n_lastc++;
    if (wr_valid && wr_ready && !wr_last && dut.wi_q == DEPTH - 1) n_full++;
    if (wr_valid && !wr_ready) n_wait++;
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      @(negedge clk);
      if (rd_valid) begin
        checks++;
        if (q.size() == 0 || {rd_last, rd_data} != q[0]) begin
          failures++; $display("read %b/%h exp %h", rd_last, rd_data, q.size() ? q[0] : 17'h0);
        end
      end
      // phases: writer faster than reader, then slower
      if (!(wr_valid && !wr_ready)) begin
        wr_valid = ($urandom % 100) < ((i / 1000) % 2 ? 30 : 90);
        wr_data  = 16'($urandom);
        wr_last  = ($urandom % 23 == 0);
      end
      rd_pop = rd_valid && (($urandom % 100) < ((i / 1000) % 2 ? 90 : 30));
      @(posedge clk);
      if (rd_pop) begin void'(q.pop_front()); n_rd++; end
      if (wr_valid && wr_ready) q.push_back({wr_last, wr_data});
    end
    checks += 4;
    if (n_full == 0)  begin failures++; $display("no full-bank hand-over"); end
    if (n_lastc == 0) begin failures++; $display("no wr_last hand-over"); end
    if (n_flush == 0) begin failures++; $display("no part-filled hand-over"); end
    if (n_wait == 0)  begin failures++; $display("writer never waited"); end
    $display("words read %0d, full %0d, last %0d, flush %0d, wait %0d", n_rd, n_full, n_lastc, n_flush, n_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
