// y_assemble -- the Y_ASSEMBLE unit of the memory controller. Results y_t
// leave a channel as 16-bit values, one per cycle; this unit gathers eight
// consecutive values into one 128-bit word (the PCIe data width) so they can
// be written to DDR and returned to the host. Value k of a group sits in
// bits [16k+15:16k] (this design's choice). `in_last` closes a partly
// filled word, padding the rest with zeros. out_valid is a one-cycle pulse,
// registered, one cycle after the eighth value.
module y_assemble (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [15:0]  in_data,
  input  logic         in_last,
  output logic         out_valid,
  output logic [127:0] out_data
);
  logic [127:0] acc_q;
  logic [2:0]   n_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_q <= '0; n_q <= '0; out_valid <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        logic [127:0] nxt;
        nxt = acc_q;
        nxt[16*n_q +: 16] = in_data;
        if (n_q == 3'd7 || in_last) begin
          out_valid <= 1'b1;
          out_data  <= nxt;
          acc_q     <= '0;
          n_q       <= '0;
        end else begin
          acc_q <= nxt;
          n_q   <= n_q + 1'b1;
        end
      end
    end
  end
endmodule
