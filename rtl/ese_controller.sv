// ese_controller -- the ESE Controller (scheduler). It sequences one LSTM
// time step through the states of the paper's state-flow figure, INITIAL and
// STATE_1 .. STATE_6. Each state holds one or more phases; in a phase a
// sparse matrix-vector product (SpMV) and an element-wise operation run
// concurrently on every channel, and the next phase starts when all
// channels report phase_done:
//   STATE_1: W_ix x_t | -        ; W_fx x_t | -        ; W_cx x_t | W_ic c_{t-1}
//   STATE_2: W_ir y   | W_fc c   ; W_fr y   | i_t      ; W_cr y   | f_t
//   STATE_3: W_ox x_t | g_t
//   STATE_4: W_or y   | c_t      ; -        | W_oc c_t ; -        | h_t
//   STATE_5: -        | o_t      ; -        | m_t
//   STATE_6: W_ym m_t -> y_t
// The table is the paper's; splitting a state into sequential phases (one
// per column of the figure) is this design's reading of it.
// Interface: `start` (one cycle, in INITIAL) begins a step, `first_step`
// is sampled with it and held on first_step_o for the step. fetch_mat names
// the matrix the memory side should be streaming next (the next SpMV of the
// schedule), for prefetch into the PEs' ping-pong buffers. step_done pulses
// after STATE_6. phase_start is one cycle; spmv_mat/eop are valid with it.
module ese_controller
  import ese_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  logic   first_step,
  output logic   first_step_o,
  output logic   busy,
  output logic   step_done,
  output logic   phase_start,
  output mat_e   spmv_mat,
  output eop_e   eop,
  output mat_e   fetch_mat,
  input  logic   phase_done,
  output logic [2:0] state
);
  typedef enum logic [2:0] {
    INITIAL = 3'd0, STATE_1 = 3'd1, STATE_2 = 3'd2, STATE_3 = 3'd3,
    STATE_4 = 3'd4, STATE_5 = 3'd5, STATE_6 = 3'd6
  } state_e;

  localparam int NPH = 14;
  typedef struct packed { state_e st; mat_e m; eop_e e; } phase_t;

  function automatic phase_t ph(int i);
    case (i)
      0:  return '{STATE_1, M_IX,   E_NONE};
      1:  return '{STATE_1, M_FX,   E_NONE};
      2:  return '{STATE_1, M_CX,   E_PEEP_I};
      3:  return '{STATE_2, M_IR,   E_PEEP_F};
      4:  return '{STATE_2, M_FR,   E_GATE_I};
      5:  return '{STATE_2, M_CR,   E_GATE_F};
      6:  return '{STATE_3, M_OX,   E_GATE_G};
      7:  return '{STATE_4, M_OR,   E_CELL};
      8:  return '{STATE_4, M_NONE, E_PEEP_O};
      9:  return '{STATE_4, M_NONE, E_H};
      10: return '{STATE_5, M_NONE, E_GATE_O};
      11: return '{STATE_5, M_NONE, E_M};
      12: return '{STATE_6, M_YM,   E_NONE};
      default: return '{INITIAL, M_NONE, E_NONE};
    endcase
  endfunction

  logic [3:0] idx_q;          // current phase; 13 = INITIAL
  logic       run_q, launch_q;
  phase_t     cur;

  assign cur       = ph(int'(idx_q));
  assign state     = run_q ? 3'(cur.st) : 3'(INITIAL);
  assign spmv_mat  = cur.m;
  assign eop       = cur.e;
  assign busy      = run_q;
  assign phase_start = launch_q;

  // next SpMV matrix of the schedule, wrapping to W_ix of the next step
  always_comb begin
    fetch_mat = M_IX;
    if (run_q) begin
      for (int k = NPH - 2; k >= 0; k--)
        if (k > int'(idx_q) && ph(k).m != M_NONE) fetch_mat = ph(k).m;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      idx_q <= 4'd13; run_q <= 1'b0; launch_q <= 1'b0; step_done <= 1'b0;
      first_step_o <= 1'b0;
    end else begin
      launch_q  <= 1'b0;
      step_done <= 1'b0;
      if (!run_q) begin
        if (start) begin
          run_q <= 1'b1; idx_q <= '0; launch_q <= 1'b1;
          first_step_o <= first_step;
        end
      end else if (phase_done) begin
        if (idx_q == 4'd12) begin
          run_q <= 1'b0; idx_q <= 4'd13; step_done <= 1'b1;
        end else begin
          idx_q <= idx_q + 1'b1; launch_q <= 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) phase_done |-> run_q);
endmodule
