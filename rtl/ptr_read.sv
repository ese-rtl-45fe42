// ptr_read -- Pointer Read unit of a PE. The pointer stream of one matrix
// holds COLS+1 column pointers p_0..p_COLS (positions of each column's first
// entry in this PE's weight stream). They arrive through a ping-pong buffer;
// ptr_read turns them into one (p_j, p_{j+1}) pair per column, which gives
// the start and the number of entries of column j.
// The pointer written with wr_last ends a matrix, so the next pointer is
// taken as p_0 of the following matrix. col_valid/col_start/col_end present the pair of the
// current column; col_pop advances. Pointers are 16 bit; the ping-pong
// buffer of 2 x 512 entries follows the paper.
module ptr_read #(
  parameter int DEPTH = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_valid,
  input  logic [15:0] wr_data,
  input  logic        wr_last,
  output logic        wr_ready,
  output logic        col_valid,
  output logic [15:0] col_start,
  output logic [15:0] col_end,
  input  logic        col_pop
);
  logic        rd_valid, rd_last, rd_pop;
  logic [15:0] rd_data;
  logic        have_prev_q;
  logic [15:0] prev_q;

  pingpong_buf #(.WIDTH(16), .DEPTH(DEPTH)) u_buf (
    .clk, .rst_n, .wr_valid, .wr_data, .wr_last, .wr_ready,
    .rd_valid, .rd_data, .rd_last, .rd_pop);

  assign col_valid = have_prev_q && rd_valid;
  assign col_start = prev_q;
  assign col_end   = rd_data;
  // The first pointer of a matrix is taken into prev_q without a column.
  assign rd_pop    = rd_valid && (!have_prev_q || col_pop);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      have_prev_q <= 1'b0;
      prev_q      <= '0;
    end else if (rd_pop) begin
      prev_q      <= rd_data;
      // the last pointer of a matrix ends it; the next one is a new p_0
      have_prev_q <= !rd_last;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) col_pop |-> col_valid);
endmodule
