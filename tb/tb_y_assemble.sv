// tb_y_assemble -- checks the packer that gathers 16-bit outputs into
// 128-bit words: value k of a word sits in bits [16k+15:16k], a word is
// emitted after 8 values or at the value marked last (then zero-padded),
// one cycle after the last value it holds.
module tb_y_assemble;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0, in_valid = 0, in_last = 0, out_valid;
  logic [15:0] in_data = '0; logic [127:0] out_data;
  int checks = 0, failures = 0, n_part = 0;
  logic [127:0] exp_q[$];
  y_assemble dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected word"); end
    else begin
      logic [127:0] e; e = exp_q.pop_front();
      if (out_data != e) begin failures++; $display("word %h exp %h", out_data, e); end
    end
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int v = 0; v < 60; v++) begin
      int len; logic [127:0] w; len = 1 + $urandom % 30; w = '0;
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        in_valid = 1; in_data = 16'($urandom); in_last = (i == len - 1);
        w[16*(i%8) +: 16] = in_data;
        if (i % 8 == 7 || in_last) begin
          exp_q.push_back(w); if (i % 8 != 7) n_part++; w = '0;
        end
        if ($urandom % 4 == 0) begin @(negedge clk); in_valid = 0; in_last = 0; end
      end
      @(negedge clk); in_valid = 0; in_last = 0;
    end
    repeat (4) @(posedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("%0d words missing", exp_q.size()); end
    checks++; if (n_part == 0) begin failures++; $display("no partial word"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
