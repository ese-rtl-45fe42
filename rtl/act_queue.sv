// act_queue -- the Activation Vector Queue of one channel. Every element
// a_j of the input vector (x_t, y_{t-1} or m_t) is needed by every PE, so
// the queue writes it into all NUM_PE FIFOs in the same cycle. A new element
// is accepted (in_ready) only while no FIFO is full; a cycle with a valid
// element and a full FIFO is reported on `stall`. Each PE pops its own FIFO
// independently, which decouples PEs whose number of non-zeros per column
// differs. One FIFO per PE and the 16-bit x depth-8 size follow the paper;
// the all-or-nothing broadcast is this design's choice.
module act_queue #(
  parameter int NUM_PE = 32,
  parameter int DEPTH  = 8,
  parameter int WIDTH  = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [WIDTH-1:0] in_data,
  output logic             in_ready,
  output logic             stall,
  input  logic [NUM_PE-1:0] pop,
  output logic [NUM_PE-1:0][WIDTH-1:0] head,
  output logic [NUM_PE-1:0] avail
);
  logic [NUM_PE-1:0] full, empty;
  assign in_ready = ~|full;
  assign stall    = in_valid && !in_ready;
  assign avail    = ~empty;

  for (genvar p = 0; p < NUM_PE; p++) begin : g_fifo
    act_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .push(in_valid && in_ready), .wr_data(in_data),
      .pop(pop[p]), .rd_data(head[p]), .full(full[p]), .empty(empty[p]));
  end
endmodule
