// ese_channel -- one ESE channel: runs the LSTM for one voice-vector
// sequence. It contains the ActQueue, NUM_PE processing elements, two
// ElemMul units, the Adder Tree, the Sigmoid/Tanh unit and the vector
// buffers (input x_t, y_{t-1}, m_t, biases, peephole diagonals, and the
// H_t buffer that keeps c, h and the gate vectors).
//
// The controller runs the channel phase by phase. A phase (phase_start with
// spmv_mat, eop) has two concurrent parts, and phase_done pulses once both
// have finished:
//   * SpMV part (spmv_mat != M_NONE): all PEs start on that matrix while the
//     ActQueue broadcasts the source vector (x_t for W_*x, y_{t-1} for W_*r,
//     m_t for W_ym) one element per cycle. For W_ym the result y_t is then
//     read out of the PEs one row per cycle, converted to the activation
//     format, kept as y_{t-1} for the next step and sent on y_valid/y_data.
//   * element-wise part (eop != E_NONE): one pass over the HIDDEN cell rows,
//     LANES rows per cycle, through ElemMul -> Adder Tree -> Sigmoid/Tanh ->
//     ElemMul -> H_t buffer (see ese_pkg::eop_e for the operations).
// first_step makes c_{t-1} and y_{t-1} read as zero (start of a sequence).
// Rows are interleaved over PEs (row r in PE r mod NUM_PE); reading LANES
// consecutive rows therefore touches LANES different PEs, which needs
// NUM_PE to be a multiple of LANES.
// Streams: ptr_* and w_* carry one 16-bit pointer / encoded weight per PE
// per beat (NUM_PE x 16 = 512 bit for 32 PEs, the DDR word width); *_last
// marks the end of a matrix. vec_* writes one 16-bit element of a vector.
// Structure and operation split follow the paper's channel figure and its
// operation table; buffer organisation and handshakes are this design's.
// Lint note: the adder tree's full 32-bit sum (tsum) is left unused, as only
// its 16-bit saturated form feeds the activation unit; the upper bits of
// vec_addr are unused at sizes whose vectors need fewer address bits.
module ese_channel
  import ese_pkg::*;
#(
  parameter int NUM_PE     = 32,
  parameter int HIDDEN     = 1024,
  parameter int IN_DIM     = 153,
  parameter int PROJ       = 512,
  parameter int LANES      = 16,
  parameter int FIFO_DEPTH = 8,
  parameter int BUF_DEPTH  = 512
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // control
  input  logic                       phase_start,
  input  mat_e                       spmv_mat,
  input  eop_e                       eop,
  input  logic                       first_step,
  output logic                       phase_done,
  // compressed matrix streams (shared by all channels)
  input  logic                       ptr_valid,
  input  logic [NUM_PE-1:0][15:0]    ptr_data,
  input  logic                       ptr_last,
  output logic                       ptr_ready,
  input  logic                       w_valid,
  input  logic [NUM_PE-1:0][15:0]    w_data,
  input  logic                       w_last,
  output logic                       w_ready,
  // vector writes (x_t, biases, peephole diagonals)
  input  logic                       vec_we,
  input  vec_e                       vec_sel,
  input  logic [15:0]                vec_addr,
  input  logic [15:0]                vec_data,
  // result y_t
  output logic                       y_valid,
  output logic [15:0]                y_data,
  output logic                       y_last,
  // activity, one bit per cycle
  output logic [NUM_PE-1:0]          pe_mac,
  output logic [NUM_PE-1:0]          pe_wait,
  output logic                       queue_stall
);
  localparam int ROWS = HIDDEN / NUM_PE;
  localparam int RW   = $clog2(ROWS);
  localparam int G    = HIDDEN / LANES;
  localparam int GW   = $clog2(G);
  localparam int LW   = (LANES > 1) ? $clog2(LANES) : 1;

  typedef logic [LANES-1:0][15:0] vec16_t;

  // ---------------- vector buffers ----------------
  logic [15:0] xbuf [IN_DIM];
  logic [15:0] ybuf [PROJ];
  vec16_t bias_i [G], bias_f [G], bias_c [G], bias_o [G];
  vec16_t wic [G], wfc [G], woc [G];
  // H_t buffer: cell state, h, gates, peephole products, m
  vec16_t cbuf [G], hbuf [G], ig [G], fg [G], gg [G], og [G];
  vec16_t pi [G], pf [G], po [G], mbuf [G];

  always_ff @(posedge clk) begin
    if (vec_we) begin
      case (vec_sel)
        V_X:   xbuf[vec_addr[$clog2(IN_DIM)-1:0]] <= vec_data;
        V_BI:  bias_i[vec_addr[GW+LW-1:LW]][vec_addr[LW-1:0]] <= vec_data;
        V_BF:  bias_f[vec_addr[GW+LW-1:LW]][vec_addr[LW-1:0]] <= vec_data;
        V_BC:  bias_c[vec_addr[GW+LW-1:LW]][vec_addr[LW-1:0]] <= vec_data;
        V_BO:  bias_o[vec_addr[GW+LW-1:LW]][vec_addr[LW-1:0]] <= vec_data;
        V_WIC: wic[vec_addr[GW+LW-1:LW]][vec_addr[LW-1:0]] <= vec_data;
        V_WFC: wfc[vec_addr[GW+LW-1:LW]][vec_addr[LW-1:0]] <= vec_data;
        V_WOC: woc[vec_addr[GW+LW-1:LW]][vec_addr[LW-1:0]] <= vec_data;
        default: ;
      endcase
    end
  end

  // ---------------- phase bookkeeping ----------------
  mat_e        mat_q;
  eop_e        eop_q;
  logic        spmv_busy_q, ywb_busy_q, eop_busy_q, phase_q;
  logic [15:0] bc_q;                 // broadcast element index
  logic [15:0] n_cols;
  logic [NUM_PE-1:0] pe_done, pe_done_q, pe_start;
  logic [15:0] yr_q;                 // y write-back row
  logic [GW-1:0] g_q;                // element-wise group

  always_comb begin
    case (mat_q)
      M_IX, M_FX, M_CX, M_OX: n_cols = 16'(IN_DIM);
      M_YM:                   n_cols = 16'(HIDDEN);
      default:                n_cols = 16'(PROJ);
    endcase
  end

  // ---------------- ActQueue broadcast ----------------
  logic              bc_valid, bc_ready;
  logic [15:0]       bc_data;
  logic [NUM_PE-1:0] q_pop, q_avail;
  logic [NUM_PE-1:0][15:0] q_head;

  assign bc_valid = spmv_busy_q && (bc_q < n_cols);
  always_comb begin
    case (mat_q)
      M_IX, M_FX, M_CX, M_OX: bc_data = xbuf[bc_q[$clog2(IN_DIM)-1:0]];
      M_YM:                   bc_data = mbuf[bc_q[GW+LW-1:LW]][bc_q[LW-1:0]];
      default:                bc_data = first_step ? 16'h0 : ybuf[bc_q[$clog2(PROJ)-1:0]];
    endcase
  end

  act_queue #(.NUM_PE(NUM_PE), .DEPTH(FIFO_DEPTH), .WIDTH(16)) u_queue (
    .clk, .rst_n, .in_valid(bc_valid), .in_data(bc_data), .in_ready(bc_ready),
    .stall(queue_stall), .pop(q_pop), .head(q_head), .avail(q_avail));

  // ---------------- PEs ----------------
  logic [NUM_PE-1:0] p_ready, wr_rdy;
  logic [3:0]        slot_a, slot_b;
  logic [RW-1:0]     row_rd;
  logic [NUM_PE-1:0][31:0] rda, rdb;

  assign ptr_ready = &p_ready;
  assign w_ready   = &wr_rdy;
  assign pe_start  = {NUM_PE{phase_start && spmv_mat != M_NONE}};

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    logic busy_unused;
    ese_pe #(.ROWS(ROWS), .BUF_DEPTH(BUF_DEPTH)) u_pe (
      .clk, .rst_n,
      .start(pe_start[p]), .mat(spmv_mat),
      .n_cols(spmv_mat == M_YM ? 16'(HIDDEN) :
              (spmv_mat inside {M_IX, M_FX, M_CX, M_OX}) ? 16'(IN_DIM) : 16'(PROJ)),
      .done(pe_done[p]), .busy(busy_unused), .mac(pe_mac[p]), .wait_act(pe_wait[p]),
      .act_avail(q_avail[p]), .act_head(q_head[p]), .act_pop(q_pop[p]),
      .ptr_valid(ptr_valid && ptr_ready), .ptr_data(ptr_data[p]), .ptr_last,
      .ptr_ready(p_ready[p]),
      .w_valid(w_valid && w_ready), .w_data(w_data[p]), .w_last, .w_ready(wr_rdy[p]),
      .rd_slot_a(slot_a), .rd_row_a(row_rd), .rd_data_a(rda[p]),
      .rd_slot_b(slot_b), .rd_row_b(row_rd), .rd_data_b(rdb[p]));
  end

  // ---------------- element-wise datapath ----------------
  localparam int PEW = (NUM_PE > 1) ? $clog2(NUM_PE) : 1;
  logic [31:0]  gbase;               // first row of the group
  logic [PEW-1:0] pe_base;
  vec16_t       cprev, e1a, e1b, e2a, e2b, lut_in, lut_out, bias_v;
  logic [LANES-1:0][31:0] acc_a, acc_b, peep32, bias32, zero32, e1out, e2out, tsum;
  vec16_t       tsat;
  logic [4:0]   e1sh, e2sh;
  logic         is_tanh;

  assign gbase   = 32'(g_q) * LANES;
  assign pe_base = PEW'(gbase % NUM_PE);
  assign zero32  = '0;

  always_comb begin
    slot_a = 4'(M_IX); slot_b = 4'(M_IR);
    row_rd = RW'(gbase / NUM_PE);
    if (ywb_busy_q) begin
      slot_a = 4'(M_YM);
      row_rd = RW'(yr_q / 16'(NUM_PE));
    end else begin
      case (eop_q)
        E_GATE_F: begin slot_a = 4'(M_FX); slot_b = 4'(M_FR); end
        E_GATE_G: begin slot_a = 4'(M_CX); slot_b = 4'(M_CR); end
        E_GATE_O: begin slot_a = 4'(M_OX); slot_b = 4'(M_OR); end
        default:  ;
      endcase
    end
  end

  always_comb begin
    cprev = first_step ? '0 : cbuf[g_q];
    for (int l = 0; l < LANES; l++) begin
      acc_a[l] = rda[32'(pe_base) + l];
      acc_b[l] = rdb[32'(pe_base) + l];
    end
    // ElemMul 1: peepholes, and f_t . c_{t-1}
    e1a = fg[g_q]; e1b = cprev; e1sh = 5'(GATE_FRAC);
    case (eop_q)
      E_PEEP_I: begin e1a = wic[g_q]; e1sh = 5'(FRAC_WIC); end
      E_PEEP_F: begin e1a = wfc[g_q]; e1sh = 5'(FRAC_WFC); end
      E_PEEP_O: begin e1a = woc[g_q]; e1b = cbuf[g_q]; e1sh = 5'(FRAC_WOC); end
      default:  ;
    endcase
    // ElemMul 2: i_t . g_t (+ f_t . c_{t-1}) and o_t . h_t
    if (eop_q == E_M) begin
      e2a = og[g_q]; e2b = hbuf[g_q]; e2sh = 5'(2*GATE_FRAC - ACT_FRAC);
    end else begin
      e2a = ig[g_q]; e2b = gg[g_q];   e2sh = 5'(2*GATE_FRAC - INT_FRAC);
    end
    // Adder tree operands
    case (eop_q)
      E_GATE_F: begin bias_v = bias_f[g_q]; end
      E_GATE_G: begin bias_v = bias_c[g_q]; end
      E_GATE_O: begin bias_v = bias_o[g_q]; end
      default:  begin bias_v = bias_i[g_q]; end
    endcase
    for (int l = 0; l < LANES; l++) begin
      bias32[l] = 32'($signed(bias_v[l]) >>> (FRAC_BIAS - INT_FRAC));
      case (eop_q)
        E_GATE_I: peep32[l] = 32'($signed(pi[g_q][l]));
        E_GATE_F: peep32[l] = 32'($signed(pf[g_q][l]));
        E_GATE_O: peep32[l] = 32'($signed(po[g_q][l]));
        default:  peep32[l] = '0;
      endcase
    end
    is_tanh = (eop_q == E_GATE_G) || (eop_q == E_H);
    lut_in  = (eop_q == E_H) ? cbuf[g_q] : tsat;
  end

  elem_mul #(.LANES(LANES)) u_em1 (.a(e1a), .b(e1b), .shift(e1sh), .addend(zero32), .out(e1out));
  elem_mul #(.LANES(LANES)) u_em2 (.a(e2a), .b(e2b), .shift(e2sh),
                                   .addend(eop_q == E_CELL ? e1out : zero32), .out(e2out));
  adder_tree #(.LANES(LANES)) u_tree (.a(acc_a), .b(acc_b), .c(peep32), .d(bias32),
                                      .sum(tsum), .sum_sat(tsat));
  sigmoid_tanh #(.LANES(LANES)) u_act (.is_tanh, .x(lut_in), .y(lut_out));

  function automatic vec16_t sat_vec(logic [LANES-1:0][31:0] v);
    vec16_t r;
    for (int l = 0; l < LANES; l++) r[l] = sat16(48'($signed(v[l])));
    return r;
  endfunction

  always_ff @(posedge clk) begin
    if (eop_busy_q) begin
      case (eop_q)
        E_PEEP_I: pi[g_q]   <= sat_vec(e1out);
        E_PEEP_F: pf[g_q]   <= sat_vec(e1out);
        E_PEEP_O: po[g_q]   <= sat_vec(e1out);
        E_GATE_I: ig[g_q]   <= lut_out;
        E_GATE_F: fg[g_q]   <= lut_out;
        E_GATE_G: gg[g_q]   <= lut_out;
        E_GATE_O: og[g_q]   <= lut_out;
        E_CELL:   cbuf[g_q] <= sat_vec(e2out);
        E_H:      hbuf[g_q] <= lut_out;
        E_M:      mbuf[g_q] <= sat_vec(e2out);
        default:  ;
      endcase
    end
    if (ywb_busy_q) ybuf[yr_q[$clog2(PROJ)-1:0]] <= y_data;
  end

  // y_t write-back: partial sums (8 fractional bits) to activations (11)
  logic [31:0] y_acc;
  assign y_acc  = rda[yr_q % 16'(NUM_PE)];
  assign y_data = sat16(48'($signed(y_acc)) <<< (ACT_FRAC - ACC_FRAC));
  assign y_valid = ywb_busy_q;
  assign y_last  = ywb_busy_q && (yr_q == 16'(PROJ - 1));

  // ---------------- phase control ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mat_q <= M_NONE; eop_q <= E_NONE; phase_q <= 1'b0;
      spmv_busy_q <= 1'b0; ywb_busy_q <= 1'b0; eop_busy_q <= 1'b0;
      bc_q <= '0; pe_done_q <= '0; yr_q <= '0; g_q <= '0; phase_done <= 1'b0;
    end else begin
      phase_done <= 1'b0;
      if (phase_start) begin
        mat_q <= spmv_mat; eop_q <= eop; phase_q <= 1'b1;
        spmv_busy_q <= (spmv_mat != M_NONE); eop_busy_q <= (eop != E_NONE);
        bc_q <= '0; pe_done_q <= '0; g_q <= '0; yr_q <= '0;
      end else begin
        if (bc_valid && bc_ready) bc_q <= bc_q + 1'b1;
        if (spmv_busy_q) begin
          if (&(pe_done_q | pe_done)) begin
            spmv_busy_q <= 1'b0;
            ywb_busy_q  <= (mat_q == M_YM);
          end else begin
            pe_done_q <= pe_done_q | pe_done;
          end
        end
        if (ywb_busy_q) begin
          yr_q <= yr_q + 1'b1;
          if (y_last) ywb_busy_q <= 1'b0;
        end
        if (eop_busy_q) begin
          g_q <= g_q + 1'b1;
          if (g_q == GW'(G - 1)) eop_busy_q <= 1'b0;
        end
        if (phase_q && !spmv_busy_q && !ywb_busy_q && !eop_busy_q) begin
          phase_q <= 1'b0; phase_done <= 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   phase_start |-> !phase_q);
  assert property (@(posedge clk) disable iff (!rst_n)
                   (phase_start && spmv_mat == M_YM) |-> (eop == E_NONE));
endmodule
