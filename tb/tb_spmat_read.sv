// tb_spmat_read -- checks the sparse-matrix reader. The testbench encodes
// random sparse columns as {12-bit weight, 4-bit relative index} entries,
// where the index is the number of zero rows skipped since the previous
// entry of the column (or since row 0 for the first entry); a gap over 15 is
// bridged by a padding entry of weight 0 and index 15. The reader must
// return every weight with its absolute row, given ent_first on the first
// entry of each column, and ent_last on the entry written with wr_last.
module tb_spmat_read;
  timeunit 1ns; timeprecision 1ps;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0, wr_valid = 0, wr_last = 0, wr_ready, ent_valid, ent_last, ent_pop = 0, ent_first = 0;
  logic [15:0] wr_data = '0; logic signed [11:0] ent_w; logic [15:0] ent_row;
  int checks = 0, failures = 0, n_pad = 0;
  typedef struct packed { logic first; logic last; logic [11:0] w; logic [15:0] row; logic [3:0] idx; } ent_s;
  ent_s eq[$], wq[$];
  spmat_read #(.DEPTH(DEPTH), .ROW_W(16)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int c = 0; c < 120; c++) begin
      int row, next; bit first; row = -1; first = 1;
      for (int r = 0; r < 64; r++) if ($urandom % 100 < 12 || (r == 63 && first)) begin
        int gap; gap = r - row - 1;
        while (gap > 15) begin
          row += 16; eq.push_back('{first, 0, 12'd0, 16'(row), 4'd15}); gap -= 16; first = 0; n_pad++;
        end
        eq.push_back('{first, 0, 12'($urandom % 4095 + 1), 16'(r), 4'(gap)}); row = r; first = 0;
      end
    end
    eq[eq.size() - 1].last = 1;
    wq = eq;
    repeat (3) @(posedge clk); rst_n = 1;
    while (eq.size() != 0) begin
      @(negedge clk);
      ent_first = eq[0].first;
      #1;
      if (ent_valid) begin
        checks++;
        if (ent_w != $signed(eq[0].w) || ent_row != eq[0].row || ent_last != eq[0].last) begin
          failures++; $display("entry w=%0d row=%0d last=%b exp w=%0d row=%0d last=%b",
                               ent_w, ent_row, ent_last, $signed(eq[0].w), eq[0].row, eq[0].last);
        end
      end
      if (!(wr_valid && !wr_ready)) begin
        wr_valid = wq.size() != 0 && $urandom % 4 != 0;
        wr_data = wq.size() ? {wq[0].w, wq[0].idx} : 16'h0;
        wr_last = wq.size() ? wq[0].last : 1'b0;
      end
      ent_pop = ent_valid && $urandom % 3 != 0;
      @(posedge clk);
      if (ent_pop) void'(eq.pop_front());
      if (wr_valid && wr_ready) void'(wq.pop_front());
    end
    checks++; if (n_pad == 0) begin failures++; $display("no padding entry"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
