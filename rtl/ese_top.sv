// ese_top -- the ESE accelerator: the ESE Controller driving NUM_CH
// channels of NUM_PE processing elements each, plus one Y_ASSEMBLE per
// channel for the results.
//
// Every channel runs the same LSTM on its own voice-vector sequence, so the
// compressed weights and pointers are fetched once and broadcast: one
// 512-bit beat (NUM_PE x 16 bit) of the weight stream gives each PE of every
// channel one encoded entry, and likewise for the pointer stream. A stream
// beat is taken only when all channels can accept it. The memory side is
// expected to stream the matrices in schedule order (fetch_mat names the
// next one); the PEs' ping-pong buffers let it run ahead of the computation.
// x_t, biases and peephole diagonals are written with vec_*; vec_bcast
// writes all channels, otherwise channel vec_ch.
// A time step: pulse `start` (first_step=1 on the first step of a
// sequence), wait for `step_done`. y_t appears as 128-bit words on
// y_word_valid/y_word per channel during STATE_6.
// The DDR3 memories, their MIG controllers, the PCIe core and the host are
// outside this module; their data arrives through these ports.
// Activity counters (all channels): mac_count counts PE multiply-
// accumulate cycles, stall_count cycles in which an ActQueue could not take
// a new element, wait_count PE-cycles spent waiting for an activation.
// Limit: because a beat needs room in every PE, the difference between PEs
// in entries consumed must stay below two buffer banks (2 x BUF_DEPTH),
// otherwise the stream and the ActQueue wait on each other. Pruning that
// balances nonzeros over PEs keeps the difference far smaller.
// Reset is synchronous. Follows the paper: controller, channels, Y_ASSEMBLE,
// 32 x 32 organisation and 512-bit memory word. This design's own: the
// stream and vector-write interfaces and the phase-completion join.
module ese_top
  import ese_pkg::*;
#(
  parameter int NUM_CH     = 32,
  parameter int NUM_PE     = 32,
  parameter int HIDDEN     = 1024,
  parameter int IN_DIM     = 153,
  parameter int PROJ       = 512,
  parameter int LANES      = 16,
  parameter int FIFO_DEPTH = 8,
  parameter int BUF_DEPTH  = 512
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic                         first_step,
  output logic                         busy,
  output logic                         step_done,
  output logic [2:0]                   state,
  output mat_e                         fetch_mat,
  input  logic                         ptr_valid,
  input  logic [NUM_PE-1:0][15:0]      ptr_data,
  input  logic                         ptr_last,
  output logic                         ptr_ready,
  input  logic                         w_valid,
  input  logic [NUM_PE-1:0][15:0]      w_data,
  input  logic                         w_last,
  output logic                         w_ready,
  input  logic                         vec_we,
  input  logic                         vec_bcast,
  input  logic [$clog2(NUM_CH+1)-1:0]  vec_ch,
  input  vec_e                         vec_sel,
  input  logic [15:0]                  vec_addr,
  input  logic [15:0]                  vec_data,
  output logic [NUM_CH-1:0]            y_word_valid,
  output logic [NUM_CH-1:0][127:0]     y_word,
  output logic [31:0]                  mac_count,
  output logic [31:0]                  stall_count,
  output logic [31:0]                  wait_count
);
  logic        phase_start, phase_done_all, first_q;
  mat_e        spmv_mat;
  eop_e        eop;
  logic [NUM_CH-1:0] ch_done, done_q, ch_pr, ch_wr, ch_stall;
  logic [NUM_CH-1:0][NUM_PE-1:0] ch_mac, ch_wait;

  ese_controller u_ctrl (
    .clk, .rst_n, .start, .first_step, .first_step_o(first_q), .busy, .step_done,
    .phase_start, .spmv_mat, .eop, .fetch_mat, .phase_done(phase_done_all), .state);

  assign ptr_ready = &ch_pr;
  assign w_ready   = &ch_wr;

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    logic        yv, yl;
    logic [15:0] yd;
    ese_channel #(
      .NUM_PE(NUM_PE), .HIDDEN(HIDDEN), .IN_DIM(IN_DIM), .PROJ(PROJ),
      .LANES(LANES), .FIFO_DEPTH(FIFO_DEPTH), .BUF_DEPTH(BUF_DEPTH)
    ) u_ch (
      .clk, .rst_n, .phase_start, .spmv_mat, .eop, .first_step(first_q),
      .phase_done(ch_done[c]),
      .ptr_valid(ptr_valid && ptr_ready), .ptr_data, .ptr_last, .ptr_ready(ch_pr[c]),
      .w_valid(w_valid && w_ready), .w_data, .w_last, .w_ready(ch_wr[c]),
      .vec_we(vec_we && (vec_bcast || vec_ch == ($clog2(NUM_CH+1))'(c))),
      .vec_sel, .vec_addr, .vec_data,
      .y_valid(yv), .y_data(yd), .y_last(yl),
      .pe_mac(ch_mac[c]), .pe_wait(ch_wait[c]), .queue_stall(ch_stall[c]));
    y_assemble u_yasm (
      .clk, .rst_n, .in_valid(yv), .in_data(yd), .in_last(yl),
      .out_valid(y_word_valid[c]), .out_data(y_word[c]));
  end

  // All channels must finish a phase before the controller moves on.
  assign phase_done_all = &(done_q | ch_done);
  always_ff @(posedge clk) begin
    if (!rst_n) done_q <= '0;
    else if (phase_start || phase_done_all) done_q <= '0;
    else done_q <= done_q | ch_done;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mac_count <= '0; stall_count <= '0; wait_count <= '0;
    end else begin
      logic [31:0] m, w;
      m = '0; w = '0;
      for (int c = 0; c < NUM_CH; c++)
        for (int p = 0; p < NUM_PE; p++) begin
          m += 32'(ch_mac[c][p]);
          w += 32'(ch_wait[c][p]);
        end
      mac_count   <= mac_count + m;
      wait_count  <= wait_count + w;
      stall_count <= stall_count + 32'(|ch_stall);
    end
  end
endmodule
