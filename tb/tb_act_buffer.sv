// tb_act_buffer -- checks the PE's accumulation buffer against a model:
// random accumulate-writes to the nine matrix slots, slot clears, and the
// two read ports (which return 0 for a row not written since the clear),
// plus the read-before-write port used by the accumulator.
module tb_act_buffer;
  timeunit 1ns; timeprecision 1ps;
  localparam int ROWS = 8, NUM_SLOTS = 9;
  logic clk = 0, rst_n = 0, clr = 0, acc_we = 0, acc_prev_valid;
  logic [3:0] clr_slot = '0, acc_slot = '0, rd_slot_a = '0, rd_slot_b = '0;
  logic [2:0] acc_row = '0, rd_row_a = '0, rd_row_b = '0;
  logic signed [31:0] acc_prev, acc_wdata = '0, rd_data_a, rd_data_b;
  int checks = 0, failures = 0;
  logic signed [31:0] m [NUM_SLOTS][ROWS];
  bit v [NUM_SLOTS][ROWS];
  act_buffer #(.ROWS(ROWS), .NUM_SLOTS(NUM_SLOTS)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    foreach (v[s, r]) begin v[s][r] = 0; m[s][r] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      acc_slot = 4'($urandom % NUM_SLOTS); acc_row = 3'($urandom);
      rd_slot_a = 4'($urandom % NUM_SLOTS); rd_row_a = 3'($urandom);
      rd_slot_b = 4'($urandom % NUM_SLOTS); rd_row_b = 3'($urandom);
      acc_we = $urandom % 2; acc_wdata = 32'($urandom);
      clr = ($urandom % 40 == 0); clr_slot = 4'($urandom % NUM_SLOTS);
      #1;
      checks += 3;
      if (acc_prev_valid != v[acc_slot][acc_row] || (v[acc_slot][acc_row] && acc_prev != m[acc_slot][acc_row])) begin
        failures++; $display("acc port mismatch");
      end
      if (rd_data_a != (v[rd_slot_a][rd_row_a] ? m[rd_slot_a][rd_row_a] : 0)) begin failures++; $display("port a mismatch"); end
      if (rd_data_b != (v[rd_slot_b][rd_row_b] ? m[rd_slot_b][rd_row_b] : 0)) begin failures++; $display("port b mismatch"); end
      @(posedge clk);
      if (acc_we) begin m[acc_slot][acc_row] = acc_wdata; v[acc_slot][acc_row] = 1; end
      if (clr) for (int r = 0; r < ROWS; r++) v[clr_slot][r] = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
