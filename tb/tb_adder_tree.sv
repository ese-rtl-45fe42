// tb_adder_tree -- checks the 4-input adder tree of each lane: the full sum
// and its saturation to 16 bits, on random and on overflowing operands.
module tb_adder_tree;
  timeunit 1ns; timeprecision 1ps;
  localparam int LANES = 16;
  logic [LANES-1:0][31:0] a, b, c, d, sum; logic [LANES-1:0][15:0] sum_sat;
  int checks = 0, failures = 0, n_sat = 0;
  adder_tree #(.LANES(LANES)) dut (.*);
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 500; i++) begin
      for (int l = 0; l < LANES; l++) begin
        int sh; sh = (i % 2) ? 17 : 2;
        a[l] = $signed(32'($urandom)) >>> sh; b[l] = $signed(32'($urandom)) >>> sh;
        c[l] = $signed(32'($urandom)) >>> sh; d[l] = $signed(32'($urandom)) >>> sh;
      end
      #1;
      for (int l = 0; l < LANES; l++) begin
        longint e; logic [15:0] es;
        e = longint'($signed(a[l])) + longint'($signed(b[l])) + longint'($signed(c[l])) + longint'($signed(d[l]));
        es = (e > 32767) ? 16'h7fff : (e < -32768) ? 16'h8000 : 16'(e);
        if (e > 32767 || e < -32768) n_sat++;
        checks += 2;
        if (sum[l] != 32'(e)) begin failures++; $display("sum %h exp %h", sum[l], 32'(e)); end
        if (sum_sat[l] != es) begin failures++; $display("sat %h exp %h", sum_sat[l], es); end
      end
    end
    checks++; if (n_sat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
