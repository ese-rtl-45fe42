// act_fifo -- one FIFO of the ActQueue. It holds activation elements for one
// PE so that a PE with little work can run ahead of a busy one.
// Synchronous, first-word-fall-through: rd_data is the head whenever
// !empty; a push and a pop may happen in the same cycle. Width 16 bit and
// depth 8 follow the paper (it builds these FIFOs in distributed RAM); a
// push into a full FIFO or a pop from an empty one is a protocol error and is
// flagged by assertions.
module act_fifo #(
  parameter int WIDTH = 16,
  parameter int DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             full,
  output logic             empty
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [AW:0]      cnt;

  assign full    = (cnt == (AW+1)'(DEPTH));
  assign empty   = (cnt == '0);
  assign rd_data = mem[rp];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (push) wp <= inc(wp);
      if (pop)  rp <= inc(rp);
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
