// spmv_mul -- the SpMV multiplier of a PE: one 16-bit activation times one
// 12-bit weight per cycle (the paper's 16x12 multiplier), then an arithmetic
// right shift by `shift` that aligns the product to the partial-sum format
// (dynamic precision: the shift depends on the matrix). Combinational.
module spmv_mul (
  input  logic signed [15:0] act,
  input  logic signed [11:0] w,
  input  logic [4:0]         shift,
  output logic signed [31:0] prod
);
  logic signed [27:0] p;
  assign p    = act * w;
  assign prod = 32'(p >>> shift);
endmodule
