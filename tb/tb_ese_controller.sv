// tb_ese_controller -- checks the step scheduler. The expected phase table
// is written out here from the state-flow figure of the design (state, SpMV
// matrix, element-wise operation for each of the 13 phases). For several
// steps the testbench answers each phase_start with a phase_done after a
// random delay and checks: the state/matrix/operation of each phase, that
// phase_start is a single-cycle pulse, that the controller is idle (state
// INITIAL) between steps, that first_step is held for the whole step, that
// step_done pulses once after the last phase, and that fetch_mat always
// names the next SpMV matrix of the schedule.
module tb_ese_controller;
  timeunit 1ns; timeprecision 1ps;
  import ese_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, first_step = 0, first_step_o, busy, step_done, phase_start, phase_done = 0;
  mat_e spmv_mat, fetch_mat; eop_e eop; logic [2:0] state;
  int checks = 0, failures = 0, n_done = 0;
  ese_controller dut (.*);
  always #5 clk = ~clk;

  localparam int NP = 13;
  localparam logic [2:0] EXP_ST [NP] = '{1, 1, 1, 2, 2, 2, 3, 4, 4, 4, 5, 5, 6};
  localparam mat_e EXP_M [NP] = '{M_IX, M_FX, M_CX, M_IR, M_FR, M_CR, M_OX, M_OR,
                                  M_NONE, M_NONE, M_NONE, M_NONE, M_YM};
  localparam eop_e EXP_E [NP] = '{E_NONE, E_NONE, E_PEEP_I, E_PEEP_F, E_GATE_I, E_GATE_F,
                                  E_GATE_G, E_CELL, E_PEEP_O, E_H, E_GATE_O, E_M, E_NONE};
  function automatic mat_e next_mat(int p);
    for (int k = p + 1; k < NP; k++) if (EXP_M[k] != M_NONE) return EXP_M[k];
    return M_IX;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && step_done) n_done++;

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 5; s++) begin
      @(negedge clk);
      checks++; if (state != 3'd0 || busy) begin failures++; $display("not idle"); end
      start = 1; first_step = (s == 0);
      @(negedge clk); start = 0; first_step = 0;
      for (int p = 0; p < NP; p++) begin
        checks++;
        if (!phase_start || state != EXP_ST[p] || spmv_mat != EXP_M[p] || eop != EXP_E[p]) begin
          failures++; $display("step %0d phase %0d: start=%b state=%0d mat=%0d eop=%0d", s, p, phase_start, state, spmv_mat, eop);
        end
        checks++; if (first_step_o != (s == 0)) begin failures++; $display("first_step not held"); end
        checks++; if (fetch_mat != next_mat(p)) begin failures++; $display("fetch_mat %0d exp %0d", fetch_mat, next_mat(p)); end
        repeat ($urandom % 5) begin
          @(negedge clk);
          checks++; if (phase_start) begin failures++; $display("phase_start longer than a cycle"); end
        end
        phase_done = 1; @(negedge clk); phase_done = 0;
      end
      @(negedge clk);
      checks++; if (n_done != s + 1) begin failures++; $display("step_done count %0d", n_done); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
