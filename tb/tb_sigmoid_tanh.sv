// tb_sigmoid_tanh -- checks the interpolated sigmoid and tanh look-up
// against the exact functions computed with $exp. The input is 16 bit with
// 8 fractional bits, the output 16 bit with 15 fractional bits. Every input
// code is applied once per function; the error must stay below 2^-9 (linear interpolation over a 1/8 step of the tanh table gives up to about 1.5e-3), and
// the mean error below 2^-13. Saturation at the range ends is also checked.
module tb_sigmoid_tanh;
  timeunit 1ns; timeprecision 1ps;
  localparam int LANES = 16;
  logic is_tanh; logic [LANES-1:0][15:0] x, y;
  int checks = 0, failures = 0;
  sigmoid_tanh #(.LANES(LANES)) dut (.*);
  initial begin
    #10000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int f = 0; f < 2; f++) begin
      real max_err = 0.0, sum_err = 0.0;
      is_tanh = 1'(f);
      for (int base = 0; base < 65536; base += LANES) begin
        for (int l = 0; l < LANES; l++) x[l] = 16'(base + l);
        #1;
        for (int l = 0; l < LANES; l++) begin
          real xr, er, gr, err;
          xr = real'($signed(x[l])) / 256.0;
          er = f ? (1.0 - $exp(-2.0 * xr)) / (1.0 + $exp(-2.0 * xr)) : 1.0 / (1.0 + $exp(-xr));
          gr = real'($signed(y[l])) / 32768.0;
          err = (gr > er) ? gr - er : er - gr;
          sum_err += err; if (err > max_err) max_err = err;
          checks++;
          if (err > 1.0 / 512.0) begin
            failures++; $display("%s(%f) = %f exp %f", f ? "tanh" : "sigmoid", xr, gr, er);
          end
        end
      end
      $display("%s: max error %e, mean %e", f ? "tanh" : "sigmoid", max_err, sum_err / 65536.0);
      checks++; if (sum_err / 65536.0 > 1.0 / 8192.0) begin failures++; $display("mean error too large"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
