// act_buffer -- the Act Buffer of a PE: partial results of the sparse
// matrix-vector products for the rows this PE owns. The scheduler keeps the
// W*x result of a gate alive until the matching W*y result is ready (for
// example W_ix x_t is made in STATE_1 and used in STATE_2), so the buffer has
// one region ("slot") per matrix: NUM_SLOTS x ROWS words of 32 bit.
// A per-word written flag, cleared for a whole slot by `clr`, makes a new
// matrix start from zero without a clearing pass.
// Ports: one read-modify-write port for the accumulator (acc_*), two
// combinational read ports (a, b) for the adder tree; unwritten words read 0.
// The paper draws the Act Buffer as two ping-pong buffers; the slot
// organisation is this design's choice.
module act_buffer #(
  parameter int ROWS      = 32,
  parameter int NUM_SLOTS = 9
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clr,
  input  logic [3:0]                    clr_slot,
  input  logic [3:0]                    acc_slot,
  input  logic [$clog2(ROWS)-1:0]       acc_row,
  output logic signed [31:0]            acc_prev,
  output logic                          acc_prev_valid,
  input  logic                          acc_we,
  input  logic signed [31:0]            acc_wdata,
  input  logic [3:0]                    rd_slot_a,
  input  logic [$clog2(ROWS)-1:0]       rd_row_a,
  output logic signed [31:0]            rd_data_a,
  input  logic [3:0]                    rd_slot_b,
  input  logic [$clog2(ROWS)-1:0]       rd_row_b,
  output logic signed [31:0]            rd_data_b
);
  logic signed [31:0] mem [NUM_SLOTS][ROWS];
  logic [ROWS-1:0]    wr_q [NUM_SLOTS];

  assign acc_prev       = mem[acc_slot][acc_row];
  assign acc_prev_valid = wr_q[acc_slot][acc_row];
  assign rd_data_a      = wr_q[rd_slot_a][rd_row_a] ? mem[rd_slot_a][rd_row_a] : '0;
  assign rd_data_b      = wr_q[rd_slot_b][rd_row_b] ? mem[rd_slot_b][rd_row_b] : '0;

  always_ff @(posedge clk) begin
    if (acc_we) mem[acc_slot][acc_row] <= acc_wdata;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < NUM_SLOTS; s++) wr_q[s] <= '0;
    end else begin
      if (acc_we) wr_q[acc_slot][acc_row] <= 1'b1;
      if (clr)    wr_q[clr_slot] <= '0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) acc_we |-> (acc_slot < 4'(NUM_SLOTS)));
endmodule
