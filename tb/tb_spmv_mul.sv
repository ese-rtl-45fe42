// tb_spmv_mul -- checks the PE multiplier (16-bit activation x 12-bit weight,
// arithmetic right shift to the partial-sum binary point) against an
// integer model on random operands, the extreme operands and every shift
// the engine uses (7 and 10 for the x/r/ym matrices, plus 0..15).
module tb_spmv_mul;
  timeunit 1ns; timeprecision 1ps;
  logic signed [15:0] act; logic signed [11:0] w; logic [4:0] shift;
  logic signed [31:0] prod;
  int checks = 0, failures = 0;
  spmv_mul dut (.*);
  task automatic check1(int a, int b, int s);
    longint e;
    act = 16'(a); w = 12'(b); shift = 5'(s); #1;
    e = (longint'(act) * longint'(w)) >>> s;
    checks++;
    if (prod != 32'(e)) begin failures++; $display("%0d*%0d>>%0d = %0d exp %0d", act, w, s, prod, e); end
  endtask
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    check1(-32768, -2048, 0); check1(32767, 2047, 10); check1(-32768, 2047, 7); check1(-1, 1, 7);
    for (int i = 0; i < 3000; i++) check1($urandom, $urandom, (i % 3 == 0) ? 7 : (i % 3 == 1) ? 10 : $urandom % 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
