// tb_act_queue -- checks the activation queue of a channel: a broadcast
// activation is pushed into every PE's FIFO at once, and only when none of
// them is full; otherwise in_ready falls and stall is raised. Each PE pops
// its own FIFO at its own random rate, and every head is compared with a
// per-PE queue model. Stalls must occur.
module tb_act_queue;
  timeunit 1ns; timeprecision 1ps;
  localparam int NUM_PE = 4, DEPTH = 3;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, stall;
  logic [15:0] in_data = '0;
  logic [NUM_PE-1:0] pop = '0, avail;
  logic [NUM_PE-1:0][15:0] head;
  int checks = 0, failures = 0, n_stall = 0;
  logic [15:0] q[NUM_PE][$];
  act_queue #(.NUM_PE(NUM_PE), .DEPTH(DEPTH), .WIDTH(16)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      bit anyfull; anyfull = 0;
      @(negedge clk);
      for (int p = 0; p < NUM_PE; p++) begin
        checks++;
        if (avail[p] != (q[p].size() != 0) || (avail[p] && head[p] != q[p][0])) begin
          failures++; $display("PE %0d head %h avail %b", p, head[p], avail[p]);
        end
        if (q[p].size() == DEPTH) anyfull = 1;
        pop[p] = avail[p] && ($urandom % 100 < 30 + 15 * p);
      end
      in_valid = $urandom % 100 < 70; in_data = 16'($urandom);
      #1;
      checks++;
      if (in_ready != !anyfull || stall != (in_valid && anyfull)) begin failures++; $display("ready/stall wrong"); end
      if (stall) n_stall++;
      @(posedge clk);
      for (int p = 0; p < NUM_PE; p++) if (pop[p]) void'(q[p].pop_front());
      if (in_valid && !anyfull) for (int p = 0; p < NUM_PE; p++) q[p].push_back(in_data);
    end
    checks++; if (n_stall == 0) begin failures++; $display("no stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
