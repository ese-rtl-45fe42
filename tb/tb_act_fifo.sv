// tb_act_fifo -- self-checking test of the per-PE activation FIFO.
// Random push/pop traffic (including pushes into a full FIFO attempts being
// suppressed by the testbench, and simultaneous push+pop) is checked against
// a queue model: the head word, full and empty are compared every cycle.
// A small depth (4) is used so that full and empty both occur often.
module tb_act_fifo;
  timeunit 1ns; timeprecision 1ps;
  localparam int DEPTH = 4;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, full, empty;
  logic [15:0] wr_data = '0, rd_data;
  int checks = 0, failures = 0, n_full = 0;
  logic [15:0] q[$];
  act_fifo #(.WIDTH(16), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == DEPTH)) begin
        failures++; $display("flag mismatch size=%0d full=%b empty=%b", q.size(), full, empty);
      end
      if (q.size() != 0) begin
        checks++;
        if (rd_data != q[0]) begin failures++; $display("head %h exp %h", rd_data, q[0]); end
      end
      if (full) n_full++;
      push = ($urandom % 100 < 55) && !full;
      pop  = ($urandom % 100 < 50) && !empty;
      wr_data = 16'($urandom);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wr_data);
    end
    checks++; if (n_full == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
