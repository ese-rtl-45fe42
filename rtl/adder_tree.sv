// adder_tree -- the Adder Tree of a channel. For each of LANES lanes it sums
// four 32-bit operands in two levels, (a + b) + (c + d): the W*x_t and
// W*y_{t-1} partial results from the PEs, the peephole product from ElemMul
// and the bias. The sum is also given saturated to 16 bit (the paper's
// 16-bit intermediate-result width) for the Sigmoid/Tanh unit.
// Combinational.
module adder_tree #(
  parameter int LANES = 16
) (
  input  logic [LANES-1:0][31:0] a,
  input  logic [LANES-1:0][31:0] b,
  input  logic [LANES-1:0][31:0] c,
  input  logic [LANES-1:0][31:0] d,
  output logic [LANES-1:0][31:0] sum,
  output logic [LANES-1:0][15:0] sum_sat
);
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [33:0] s0, s1, s;
      s0 = 34'($signed(a[l])) + 34'($signed(b[l]));
      s1 = 34'($signed(c[l])) + 34'($signed(d[l]));
      s  = s0 + s1;
      sum[l] = s[31:0];
      if (s > 34'sd32767)       sum_sat[l] = 16'h7fff;
      else if (s < -34'sd32768) sum_sat[l] = 16'h8000;
      else                      sum_sat[l] = s[15:0];
    end
  end
endmodule
