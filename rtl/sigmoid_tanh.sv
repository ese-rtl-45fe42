// sigmoid_tanh -- the Sigmoid/Tanh unit of a channel: LANES activation
// function evaluations per cycle by table lookup with linear interpolation.
//
// Input: 16-bit values with 8 fractional bits (the intermediate-result
// format, range [-128, 128)). Output: 16-bit values with 15 fractional bits.
// `is_tanh` selects the function for all lanes.
//   sigmoid: 2048 samples of sigmoid(x) on [-64, 64), step 1/16. The input is
//            clamped to that range; index = bits [14:4] of (x + 64), the low
//            4 bits interpolate between sample i and i+1.
//   tanh:    2048 samples of tanh(x) on [-128, 128), step 1/8; index = bits
//            [15:5] of (x + 128), the low 5 bits interpolate.
// Sample i holds round-down(f(x_i) * 2^15), limited to +-32767. The last
// sample interpolates towards itself. Tables are computed at elaboration
// time by constant functions (no data files). Sampling ranges, 2048 points
// and 16-bit/15-fraction outputs follow the paper; the index/interpolation
// arithmetic is this design's. Combinational.
module sigmoid_tanh #(
  parameter int LANES = 16
) (
  input  logic                            is_tanh,
  input  logic [LANES-1:0][15:0]          x,
  output logic [LANES-1:0][15:0]          y
);
  localparam int N = 2048;
  typedef logic signed [15:0] tab_t [N];

  function automatic tab_t gen_tab(bit tanh_f);
    tab_t t;
    for (int i = 0; i < N; i++) begin
      real xv, fv, s;
      if (tanh_f) begin
        xv = -128.0 + real'(i) / 8.0;
        fv = (1.0 - $exp(-2.0 * xv)) / (1.0 + $exp(-2.0 * xv));
        if (xv < -20.0) fv = -1.0;
      end else begin
        xv = -64.0 + real'(i) / 16.0;
        fv = 1.0 / (1.0 + $exp(-xv));
      end
      s = $floor(fv * 32768.0);
      if (s > 32767.0)  s = 32767.0;
      if (s < -32767.0) s = -32767.0;
      t[i] = 16'(int'(s));
    end
    return t;
  endfunction

  localparam tab_t SIG_TAB  = gen_tab(1'b0);
  localparam tab_t TANH_TAB = gen_tab(1'b1);

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic [15:0]        u;
      logic [10:0]        i0, i1;
      logic [4:0]         fr;
      logic signed [15:0] y0, y1;
      logic signed [22:0] d;
      if (is_tanh) begin
        u  = x[l] ^ 16'h8000;                 // x + 128 in units of 1/256
        i0 = u[15:5];
        fr = u[4:0];
        i1 = (i0 == 11'h7ff) ? i0 : i0 + 1'b1;
        y0 = TANH_TAB[i0];
        y1 = TANH_TAB[i1];
        d  = (23'(y1) - 23'(y0)) * $signed({1'b0, fr});
        y[l] = 16'(y0 + 16'(d >>> 5));
      end else begin
        if ($signed(x[l]) >= 16'sh4000)       u = 16'h7fff;
        else if ($signed(x[l]) < -16'sh4000)  u = 16'h0000;
        else                                  u = x[l] + 16'h4000;
        i0 = u[14:4];
        fr = {1'b0, u[3:0]};
        i1 = (i0 == 11'h7ff) ? i0 : i0 + 1'b1;
        y0 = SIG_TAB[i0];
        y1 = SIG_TAB[i1];
        d  = (23'(y1) - 23'(y0)) * $signed({1'b0, fr});
        y[l] = 16'(y0 + 16'(d >>> 4));
      end
    end
  end
endmodule
