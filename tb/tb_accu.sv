// tb_accu -- checks the PE accumulator adder: with prev_valid the product is
// added to the stored partial sum, without it the product starts a new sum
// (the Act Buffer entry has not been written yet in this matrix).
module tb_accu;
  timeunit 1ns; timeprecision 1ps;
  logic signed [31:0] prod, prev, sum; logic prev_valid;
  int checks = 0, failures = 0;
  accu dut (.*);
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 3000; i++) begin
      logic signed [31:0] e;
      prod = $signed(32'($urandom)) >>> 4; prev = $signed(32'($urandom)) >>> 4;
      prev_valid = 1'($urandom); #1;
      e = prev_valid ? prev + prod : prod;
      checks++;
      if (sum !== e) begin failures++; $display("sum %0d exp %0d", sum, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
