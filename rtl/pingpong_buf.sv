// pingpong_buf -- two-bank (ping-pong) stream buffer used by PtrRead and
// SpmatRead. The memory side fills one bank while the PE reads the other, so
// fetching the next words overlaps computing with the current ones.
// Write side: a bank accepts words while it is empty or being filled; it is
// handed to the reader when it holds DEPTH words or when the word is marked
// wr_last (end of one matrix). A partly filled bank is also handed over when
// the reader has run dry and no word is being written in that cycle; without
// this, a PE whose read bank is empty could wait forever on a bank that the
// (stalled, broadcast) stream never finishes filling. Read side: rd_valid/rd_data present the next
// word of the oldest handed-over bank (read is combinational, as from
// distributed RAM); rd_pop consumes it, and a drained bank returns to the
// writer. rd_last marks the word that was written with wr_last.
// Two banks of 512 x 16 bit follow the paper; the hand-over rule is this
// design's own.
module pingpong_buf #(
  parameter int WIDTH = 16,
  parameter int DEPTH = 512
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_valid,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             wr_last,
  output logic             wr_ready,
  output logic             rd_valid,
  output logic [WIDTH-1:0] rd_data,
  output logic             rd_last,
  input  logic             rd_pop
);
  localparam int AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [2][DEPTH];
  logic [1:0]       full_q;            // bank handed to reader
  logic [1:0]       last_q;            // bank was closed by wr_last
  logic [AW:0]      count_q [2];
  logic             wb_q, rb_q;        // bank being written / read
  logic [AW:0]      wi_q, ri_q;

  assign wr_ready = !full_q[wb_q];
  assign rd_valid = full_q[rb_q];
  assign rd_data  = mem[rb_q][ri_q[AW-1:0]];
  assign rd_last  = rd_valid && last_q[rb_q] && (ri_q + 1'b1 == count_q[rb_q]);

  always_ff @(posedge clk) begin
    if (wr_valid && wr_ready) mem[wb_q][wi_q[AW-1:0]] <= wr_data;
  end

  logic wr_fire, flush;
  assign wr_fire = wr_valid && wr_ready;
  assign flush   = !wr_fire && !full_q[rb_q] && (rb_q == wb_q) && (wi_q != '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full_q <= '0; last_q <= '0; wb_q <= 1'b0; rb_q <= 1'b0;
      wi_q <= '0; ri_q <= '0;
      count_q[0] <= '0; count_q[1] <= '0;
    end else begin
      if (flush) begin
        full_q[wb_q]  <= 1'b1;
        last_q[wb_q]  <= 1'b0;
        count_q[wb_q] <= wi_q;
        wb_q <= !wb_q;
        wi_q <= '0;
      end
      if (wr_fire) begin
        if (wr_last || wi_q == (AW+1)'(DEPTH-1)) begin
          full_q[wb_q]  <= 1'b1;
          last_q[wb_q]  <= wr_last;
          count_q[wb_q] <= wi_q + 1'b1;
          wb_q <= !wb_q;
          wi_q <= '0;
        end else begin
          wi_q <= wi_q + 1'b1;
        end
      end
      if (rd_pop && rd_valid) begin
        if (ri_q + 1'b1 == count_q[rb_q]) begin
          full_q[rb_q] <= 1'b0;
          rb_q <= !rb_q;
          ri_q <= '0;
        end else begin
          ri_q <= ri_q + 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) rd_pop |-> rd_valid);
endmodule
