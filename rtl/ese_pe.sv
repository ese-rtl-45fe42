// ese_pe -- one Processing Element of an ESE channel.
//
// A channel's matrix rows are interleaved over its PEs: row r belongs to PE
// (r mod NUM_PE) as local row (r div NUM_PE). Each PE holds its slice of a
// matrix in compressed-sparse-column form and processes one column at a
// time: it pops the column's activation a_j from its ActQueue FIFO and the
// pointer pair (p_j, p_{j+1}) from PtrRead, then performs one
// multiply-accumulate per cycle for each of the p_{j+1}-p_j entries that
// SpmatRead delivers: ActBuffer[slot][row] += a_j * w. After the last column
// it discards any padding entries left in the matrix's weight stream (up to
// the entry marked last) and pulses `done`.
//
// Interface: `start` with `mat` and `n_cols` begins a matrix (the Act Buffer
// slot of `mat` is cleared in the same cycle). `mac` is high in every cycle
// that does a multiply-accumulate (the busy cycles behind the paper's
// utilisation figure); `wait_act` is high when the PE could work but its
// FIFO is empty. Timing: one cycle to open each column, one cycle per
// non-zero entry, one per padding entry drained.
// The column-wise dataflow, row interleaving, relative indices and the
// 16x12 multiplier follow the paper; the one-cycle column opening and the
// drain rule are this design's own.
module ese_pe
  import ese_pkg::*;
#(
  parameter int ROWS      = 32,
  parameter int BUF_DEPTH = 512
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // control
  input  logic                    start,
  input  mat_e                    mat,
  input  logic [15:0]             n_cols,
  output logic                    done,
  output logic                    busy,
  output logic                    mac,
  output logic                    wait_act,
  // ActQueue FIFO of this PE
  input  logic                    act_avail,
  input  logic signed [15:0]      act_head,
  output logic                    act_pop,
  // pointer and weight streams
  input  logic                    ptr_valid,
  input  logic [15:0]             ptr_data,
  input  logic                    ptr_last,
  output logic                    ptr_ready,
  input  logic                    w_valid,
  input  logic [15:0]             w_data,
  input  logic                    w_last,
  output logic                    w_ready,
  // Act Buffer read ports for the channel back end
  input  logic [3:0]              rd_slot_a,
  input  logic [$clog2(ROWS)-1:0] rd_row_a,
  output logic signed [31:0]      rd_data_a,
  input  logic [3:0]              rd_slot_b,
  input  logic [$clog2(ROWS)-1:0] rd_row_b,
  output logic signed [31:0]      rd_data_b
);
  localparam int RW = $clog2(ROWS);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state_q;

  mat_e               mat_q;
  logic [15:0]        cols_q, col_q, rem_q;
  logic signed [15:0] a_q;
  logic               first_q, saw_last_q;

  logic               col_valid, col_pop;
  logic [15:0]        col_start, col_end;
  logic               ent_valid, ent_last, ent_pop;
  logic signed [11:0] ent_w;
  logic [15:0]        ent_row;
  logic signed [31:0] prod, prev, sum;
  logic               prev_valid;

  ptr_read #(.DEPTH(BUF_DEPTH)) u_ptr (
    .clk, .rst_n, .wr_valid(ptr_valid), .wr_data(ptr_data), .wr_last(ptr_last),
    .wr_ready(ptr_ready), .col_valid, .col_start, .col_end, .col_pop);

  spmat_read #(.DEPTH(BUF_DEPTH), .ROW_W(16)) u_spmat (
    .clk, .rst_n, .wr_valid(w_valid), .wr_data(w_data), .wr_last(w_last),
    .wr_ready(w_ready), .ent_valid, .ent_w, .ent_row, .ent_last,
    .ent_pop, .ent_first(first_q));

  spmv_mul u_mul (.act(a_q), .w(ent_w), .shift(5'(spmv_shift(mat_q))), .prod);

  accu u_accu (.prod, .prev, .prev_valid, .sum);

  act_buffer #(.ROWS(ROWS), .NUM_SLOTS(NUM_MATS)) u_abuf (
    .clk, .rst_n,
    .clr(state_q == S_IDLE && start), .clr_slot(mat),
    .acc_slot(mat_q), .acc_row(ent_row[RW-1:0]),
    .acc_prev(prev), .acc_prev_valid(prev_valid),
    .acc_we(mac), .acc_wdata(sum),
    .rd_slot_a, .rd_row_a, .rd_data_a, .rd_slot_b, .rd_row_b, .rd_data_b);

  logic open_col;
  assign open_col = (state_q == S_RUN) && (rem_q == '0) && (col_q != cols_q)
                    && col_valid && act_avail;
  assign col_pop  = open_col;
  assign act_pop  = open_col;
  assign mac      = (state_q == S_RUN) && (rem_q != '0) && ent_valid;
  assign ent_pop  = mac || ((state_q == S_DRAIN) && ent_valid);
  assign wait_act = (state_q == S_RUN) && (rem_q == '0) && (col_q != cols_q)
                    && col_valid && !act_avail;
  assign busy     = (state_q != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= S_IDLE; mat_q <= M_IX; cols_q <= '0; col_q <= '0;
      rem_q <= '0; a_q <= '0; first_q <= 1'b1; saw_last_q <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state_q)
        S_IDLE: if (start) begin
          state_q <= S_RUN; mat_q <= mat; cols_q <= n_cols; col_q <= '0;
          rem_q <= '0; saw_last_q <= 1'b0;
        end
        S_RUN: begin
          if (open_col) begin
            rem_q   <= col_end - col_start;
            a_q     <= act_head;
            first_q <= 1'b1;
            col_q   <= col_q + 1'b1;
          end else if (mac) begin
            rem_q   <= rem_q - 1'b1;
            first_q <= 1'b0;
            if (ent_last) saw_last_q <= 1'b1;
          end else if (rem_q == '0 && col_q == cols_q) begin
            if (saw_last_q) begin
              state_q <= S_IDLE; done <= 1'b1;
            end else begin
              state_q <= S_DRAIN;
            end
          end
        end
        S_DRAIN: if (ent_valid && ent_last) begin
          state_q <= S_IDLE; done <= 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // A column may not run past the matrix's last stream entry.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (mac && ent_last) |-> (rem_q == 16'd1));
endmodule
