// spmat_read -- Sparse Matrix Read unit of a PE. Encoded entries (12-bit
// weight, 4-bit relative row index) arrive through a ping-pong buffer and
// are read in column order. The relative index counts the zero rows skipped
// since the previous non-zero of the same column (0 for adjacent rows), so
// the absolute local row is recovered by accumulation:
//   row = (first entry of the column ? 0 : previous row + 1) + index.
// A gap of 16 or more rows is bridged by padding entries with weight 0.
// Outputs: ent_valid, ent_w, ent_row (local row of the PE), ent_last (last
// stream entry of the matrix). ent_pop with ent_first consumes the entry as
// the first of a new column. The index semantics follow the paper's CSC
// encoding figure; the 2 x 512 x 16-bit buffer follows the text.
module spmat_read #(
  parameter int DEPTH  = 512,
  parameter int ROW_W  = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_valid,
  input  logic [15:0]              wr_data,
  input  logic                     wr_last,
  output logic                     wr_ready,
  output logic                     ent_valid,
  output logic signed [11:0]       ent_w,
  output logic [ROW_W-1:0]         ent_row,
  output logic                     ent_last,
  input  logic                     ent_pop,
  input  logic                     ent_first
);
  import ese_pkg::*;
  logic        rd_valid, rd_last;
  logic [15:0] rd_data;
  enc_t        e;
  logic [ROW_W-1:0] row_q;

  pingpong_buf #(.WIDTH(16), .DEPTH(DEPTH)) u_buf (
    .clk, .rst_n, .wr_valid, .wr_data, .wr_last, .wr_ready,
    .rd_valid, .rd_data, .rd_last, .rd_pop(ent_pop));

  assign e         = enc_t'(rd_data);
  assign ent_valid = rd_valid;
  assign ent_w     = e.w;
  assign ent_last  = rd_last;
  assign ent_row   = (ent_first ? '0 : row_q + 1'b1) + ROW_W'(e.idx);

  always_ff @(posedge clk) begin
    if (!rst_n) row_q <= '0;
    else if (ent_pop) row_q <= ent_row;
  end
endmodule
