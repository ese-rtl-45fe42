// elem_mul -- an ElemMul unit of a channel: LANES (16 in the paper)
// element-wise multipliers. Lane l computes
//   out[l] = ((a[l] * b[l]) >>> shift) + addend[l]
// on 16-bit signed operands, giving a 32-bit result. The adder serves the
// second ElemMul of the channel, which forms c_t = f_t.c_{t-1} + i_t.g_t;
// the first ElemMul (peepholes W_c . c) is given addend 0. The shift sets
// the binary point per operation. Combinational.
module elem_mul #(
  parameter int LANES = 16
) (
  input  logic [LANES-1:0][15:0] a,
  input  logic [LANES-1:0][15:0] b,
  input  logic [4:0]             shift,
  input  logic [LANES-1:0][31:0] addend,
  output logic [LANES-1:0][31:0] out
);
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [31:0] p;
      p = $signed(a[l]) * $signed(b[l]);
      out[l] = 32'((p >>> shift) + $signed(addend[l]));
    end
  end
endmodule
