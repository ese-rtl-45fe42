// tb_elem_mul -- checks the element-wise multiplier array: for every lane,
// out = ((a * b) >>> shift) + addend with signed 16-bit a and b. Shifts 15,
// 19 and 22 are the ones the channel uses; others are drawn at random.
module tb_elem_mul;
  timeunit 1ns; timeprecision 1ps;
  localparam int LANES = 16;
  logic [LANES-1:0][15:0] a, b; logic [4:0] shift;
  logic [LANES-1:0][31:0] addend, out;
  int checks = 0, failures = 0;
  elem_mul #(.LANES(LANES)) dut (.*);
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 500; i++) begin
      for (int l = 0; l < LANES; l++) begin
        a[l] = 16'($urandom); b[l] = 16'($urandom); addend[l] = 32'($signed(16'($urandom)));
      end
      shift = (i % 4 == 0) ? 5'd15 : (i % 4 == 1) ? 5'd19 : (i % 4 == 2) ? 5'd22 : 5'($urandom % 24);
      #1;
      for (int l = 0; l < LANES; l++) begin
        longint e;
        e = ((longint'($signed(a[l])) * longint'($signed(b[l]))) >>> shift) + longint'($signed(addend[l]));
        checks++;
        if (out[l] != 32'(e)) begin failures++; $display("lane %0d: %h exp %h", l, out[l], 32'(e)); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
