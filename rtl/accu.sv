// accu -- the Accumulator of a PE. It adds the new SpMV product to the
// partial sum already held for the same row in the Act Buffer, or passes the
// product on when the row has not been written yet in this matrix.
// Combinational; 32-bit partial sums (this design's width).
module accu (
  input  logic signed [31:0] prod,
  input  logic signed [31:0] prev,
  input  logic               prev_valid,
  output logic signed [31:0] sum
);
  assign sum = prev_valid ? prev + prod : prod;
endmodule
