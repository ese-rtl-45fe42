// ese_pkg -- widths, fixed-point formats and encodings shared by the ESE
// sparse-LSTM engine.
//
// Number formats (two's complement):
//   activation  x_t, y_t, m_t : 16 bit, 11 fractional bits (the LSTM input
//                              format of the paper's activation table)
//   weight                    : 12 bit; its binary point depends on the matrix
//                              (dynamic precision, LSTM1 12-bit column of the
//                              paper's weight table)
//   encoded weight entry      : 16 bit = {12-bit weight, 4-bit relative index}
//   partial sum / Act Buffer  : 32 bit, 8 fractional bits (intermediate-result
//                              binary point of the paper, widened so that a
//                              long dot product does not overflow)
//   intermediate, cell c_t    : 16 bit, 8 fractional bits
//   sigmoid/tanh outputs      : 16 bit, 15 fractional bits
// The placement of the index in the low 4 bits and the 32-bit partial sum
// are this design's choices; the paper gives only the widths.
package ese_pkg;

  localparam int ACT_FRAC  = 11;
  localparam int WGT_W     = 12;
  localparam int IDX_W     = 4;
  localparam int ACC_FRAC  = 8;
  localparam int INT_FRAC  = 8;
  localparam int GATE_FRAC = 15;

  // Binary points of the 12-bit quantised LSTM parameters.
  localparam int FRAC_W_X  = 4;   // W_gifo_x
  localparam int FRAC_W_R  = 7;   // W_gifo_r
  localparam int FRAC_BIAS = 9;   // b_i, b_f, b_c, b_o
  localparam int FRAC_WIC  = 11;
  localparam int FRAC_WFC  = 11;
  localparam int FRAC_WOC  = 10;
  localparam int FRAC_WYM  = 7;

  // The nine sparse matrices, in the order the scheduler multiplies them.
  typedef enum logic [3:0] {
    M_IX = 4'd0, M_FX = 4'd1, M_CX = 4'd2, M_IR = 4'd3, M_FR = 4'd4,
    M_CR = 4'd5, M_OX = 4'd6, M_OR = 4'd7, M_YM = 4'd8, M_NONE = 4'd15
  } mat_e;
  localparam int NUM_MATS = 9;

  // Element-wise / activation operations of the channel back end.
  typedef enum logic [3:0] {
    E_NONE   = 4'd0,
    E_PEEP_I = 4'd1,   // W_ic . c_{t-1}
    E_PEEP_F = 4'd2,   // W_fc . c_{t-1}
    E_GATE_I = 4'd3,   // i_t = sigmoid(W_ix x + W_ir y + W_ic c + b_i)
    E_GATE_F = 4'd4,   // f_t
    E_GATE_G = 4'd5,   // g_t = tanh(W_cx x + W_cr y + b_c)
    E_CELL   = 4'd6,   // c_t = f_t . c_{t-1} + i_t . g_t
    E_PEEP_O = 4'd7,   // W_oc . c_t
    E_H      = 4'd8,   // h_t = tanh(c_t)
    E_GATE_O = 4'd9,   // o_t
    E_M      = 4'd10   // m_t = o_t . h_t
  } eop_e;

  // Per-channel vectors written from the memory side.
  typedef enum logic [3:0] {
    V_X = 4'd0, V_BI = 4'd1, V_BF = 4'd2, V_BC = 4'd3, V_BO = 4'd4,
    V_WIC = 4'd5, V_WFC = 4'd6, V_WOC = 4'd7
  } vec_e;

  typedef struct packed {
    logic signed [WGT_W-1:0] w;
    logic [IDX_W-1:0]        idx;
  } enc_t;

  // Right shift that brings activation x weight to the partial-sum format.
  function automatic int spmv_shift(mat_e m);
    case (m)
      M_IX, M_FX, M_CX, M_OX: return ACT_FRAC + FRAC_W_X - ACC_FRAC;
      M_YM:                   return ACT_FRAC + FRAC_WYM - ACC_FRAC;
      default:                return ACT_FRAC + FRAC_W_R - ACC_FRAC;
    endcase
  endfunction

  // Saturate a wide signed value to 16 bits.
  function automatic logic signed [15:0] sat16(logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return v[15:0];
  endfunction

endpackage
