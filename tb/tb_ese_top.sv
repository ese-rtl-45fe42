// tb_ese_top -- end-to-end test of ese_top at reduced size: 2 channels of 4
// PEs, 128 cells, 24 inputs, 16 projections, a 4-lane element-wise unit,
// depth-2 ActQueue FIFOs and 128-entry ping-pong banks (so matrices span
// several banks; 32 rows per PE give row gaps over 15), three LSTM time steps.
//
// The testbench generates random sparse LSTM weights with deliberately
// uneven density per PE, encodes them itself in the relative-index CSC
// format (column pointers, entries of 12-bit weight + 4-bit index, zero
// padding for row gaps of 16 or more, tail padding so that every PE's
// stream of a matrix has the same length), streams them into the design in
// schedule order and compares every y_t value with a bit-exact fixed-point
// model of the LSTM computed here from the dense matrices. It also checks
// that the number of multiply-accumulate cycles equals the number of
// encoded entries, that the step latency lies between the busiest PE's
// stream length and a bound, and that each mechanism happened: every
// scheduler state, ActQueue stalls, PEs waiting on their FIFO, tail-padding
// drain, ping-pong bank swaps, gap padding, and the recurrence over steps.
module tb_ese_top;
  localparam int NUM_CH = 2, NUM_PE = 4, HIDDEN = 128, IN_DIM = 24, PROJ = 16;
  localparam int LANES = 4, FIFO_DEPTH = 2, BUF_DEPTH = 128, STEPS = 3;
  localparam int MAX_CYCLES = 400000;
  timeunit 1ns; timeprecision 1ps;
  import ese_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---------------- stimulus data ----------------
  int wmat [NUM_MATS][][];           // dense weights [mat][row][col]
  int bias [4][HIDDEN];              // i f c o, 12-bit, 9 fraction bits
  int wdg  [3][HIDDEN];              // W_ic W_fc W_oc
  int xin  [NUM_CH][STEPS][IN_DIM];
  logic [15:0] wstr [NUM_MATS][NUM_PE][$];
  logic [15:0] pstr [NUM_MATS][NUM_PE][$];
  int slen [NUM_MATS];               // stream length (beats) per matrix
  int n_entries = 0, n_gap_pad = 0, n_tail_pad = 0;

  function automatic int rows_of(int m);  return (m == 8) ? PROJ : HIDDEN; endfunction
  function automatic int cols_of(int m);
    if (m == 8) return HIDDEN;
    if (m == 0 || m == 1 || m == 2 || m == 6) return IN_DIM;
    return PROJ;
  endfunction
  function automatic int srnd(int lim); // uniform in [-lim, lim]
    return int'($urandom_range(2*lim)) - lim;
  endfunction

  task automatic gen_and_encode();
    for (int m = 0; m < NUM_MATS; m++) begin
      int R = rows_of(m), C = cols_of(m), maxlen = 1;
      wmat[m] = new[R];
      for (int r = 0; r < R; r++) begin
        // per-PE density between 9 % and 13 %: uneven work per PE, but kept
        // within what the ping-pong buffers can absorb (see README)
        int dens = 9 + ((r % NUM_PE) + m) % 5;
        wmat[m][r] = new[C];
        for (int c = 0; c < C; c++) begin
          int v = 0;
          if (int'($urandom_range(99)) < dens) begin
            v = srnd(60);
            if (v == 0) v = 1;
          end
          wmat[m][r][c] = v;
        end
      end
      for (int p = 0; p < NUM_PE; p++) begin
        wstr[m][p] = {};
        pstr[m][p] = {16'd0};
        for (int c = 0; c < C; c++) begin
          int prev = -1;
          for (int lr = 0; lr * NUM_PE + p < R; lr++) begin
            int v = wmat[m][lr * NUM_PE + p][c];
            if (v != 0) begin
              int gap = lr - prev - 1;
              while (gap > 15) begin
                wstr[m][p].push_back({12'd0, 4'd15});
                n_gap_pad++; prev += 16; gap -= 16;
              end
              wstr[m][p].push_back({12'(v), 4'(gap)});
              n_entries++;
              prev = lr;
            end
          end
          pstr[m][p].push_back(16'(wstr[m][p].size()));
        end
        if (wstr[m][p].size() > maxlen) maxlen = wstr[m][p].size();
      end
      slen[m] = maxlen;
      for (int p = 0; p < NUM_PE; p++)
        while (wstr[m][p].size() < maxlen) begin
          wstr[m][p].push_back(16'h0000);
          n_tail_pad++;
        end
    end
    for (int k = 0; k < 4; k++) for (int r = 0; r < HIDDEN; r++) bias[k][r] = srnd(400);
    for (int k = 0; k < 3; k++) for (int r = 0; r < HIDDEN; r++) wdg[k][r] = srnd(900);
    for (int ch = 0; ch < NUM_CH; ch++) for (int s = 0; s < STEPS; s++)
      for (int c = 0; c < IN_DIM; c++) xin[ch][s][c] = srnd(2047);
  endtask

  // ---------------- reference model ----------------
  function automatic int sat16i(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction
  function automatic int lut_sample(bit th, int i);
    real xv, fv, s;
    if (th) begin
      xv = -128.0 + real'(i) / 8.0;
      fv = (xv < -20.0) ? -1.0 : (1.0 - $exp(-2.0 * xv)) / (1.0 + $exp(-2.0 * xv));
    end else begin
      xv = -64.0 + real'(i) / 16.0;
      fv = 1.0 / (1.0 + $exp(-xv));
    end
    s = $floor(fv * 32768.0);
    if (s > 32767.0) s = 32767.0;
    if (s < -32767.0) s = -32767.0;
    return int'(s);
  endfunction
  function automatic int act_f(bit th, int x);   // x: 16-bit, 8 fraction bits
    int u, i0, i1, fr, sh, y0, y1;
    if (th) begin u = x + 32768; sh = 5; end
    else begin
      if (x >= 16384) u = 32767; else if (x < -16384) u = 0; else u = x + 16384;
      sh = 4;
    end
    i0 = u >> sh; fr = u & ((1 << sh) - 1);
    i1 = (i0 == 2047) ? 2047 : i0 + 1;
    y0 = lut_sample(th, i0); y1 = lut_sample(th, i1);
    return y0 + (((y1 - y0) * fr) >>> sh);
  endfunction
  function automatic int shr(longint v, int s); return int'(v >>> s); endfunction

  int ref_c [NUM_CH][HIDDEN];
  int ref_y [NUM_CH][STEPS][PROJ];

  task automatic reference();
    for (int ch = 0; ch < NUM_CH; ch++) begin
      int yp [PROJ];
      foreach (yp[k]) yp[k] = 0;
      foreach (ref_c[ch][k]) ref_c[ch][k] = 0;
      for (int s = 0; s < STEPS; s++) begin
        int acc [8][HIDDEN];
        int gi [HIDDEN], gf [HIDDEN], gg [HIDDEN], go [HIDDEN], m [HIDDEN];
        for (int g = 0; g < 8; g++) for (int r = 0; r < HIDDEN; r++) begin
          int a = 0;
          bit isx = (g == 0 || g == 1 || g == 2 || g == 6);
          for (int c = 0; c < cols_of(g); c++) if (wmat[g][r][c] != 0)
            a += shr(longint'(isx ? xin[ch][s][c] : yp[c]) * wmat[g][r][c], isx ? 7 : 10);
          acc[g][r] = a;
        end
        for (int r = 0; r < HIDDEN; r++) begin
          int cp = ref_c[ch][r], pi, pf, po, c, h;
          pi = sat16i(shr(longint'(wdg[0][r]) * cp, 11));
          pf = sat16i(shr(longint'(wdg[1][r]) * cp, 11));
          gi[r] = act_f(0, sat16i(longint'(acc[0][r]) + acc[3][r] + pi + (bias[0][r] >>> 1)));
          gf[r] = act_f(0, sat16i(longint'(acc[1][r]) + acc[4][r] + pf + (bias[1][r] >>> 1)));
          gg[r] = act_f(1, sat16i(longint'(acc[2][r]) + acc[5][r] + (bias[2][r] >>> 1)));
          c = sat16i(longint'(shr(longint'(gi[r]) * gg[r], 22)) + shr(longint'(gf[r]) * cp, 15));
          po = sat16i(shr(longint'(wdg[2][r]) * c, 10));
          h = act_f(1, c);
          go[r] = act_f(0, sat16i(longint'(acc[6][r]) + acc[7][r] + po + (bias[3][r] >>> 1)));
          m[r] = sat16i(shr(longint'(go[r]) * h, 19));
          ref_c[ch][r] = c;
        end
        for (int r = 0; r < PROJ; r++) begin
          int a = 0;
          for (int c = 0; c < HIDDEN; c++) if (wmat[8][r][c] != 0)
            a += shr(longint'(m[c]) * wmat[8][r][c], 10);
          ref_y[ch][s][r] = sat16i(longint'(a) <<< 3);
          yp[r] = ref_y[ch][s][r];
        end
      end
    end
  endtask

  // ---------------- DUT ----------------
  logic start = 0, first_step = 0, busy, step_done;
  logic [2:0] state;
  mat_e fetch_mat;
  logic ptr_valid = 0, ptr_last = 0, ptr_ready, w_valid = 0, w_last = 0, w_ready;
  logic [NUM_PE-1:0][15:0] ptr_data = '0, w_data = '0;
  logic vec_we = 0, vec_bcast = 0;
  logic [$clog2(NUM_CH+1)-1:0] vec_ch = '0;
  vec_e vec_sel = V_X;
  logic [15:0] vec_addr = '0, vec_data = '0;
  logic [NUM_CH-1:0] y_word_valid;
  logic [NUM_CH-1:0][127:0] y_word;
  logic [31:0] mac_count, stall_count, wait_count;

  ese_top #(
    .NUM_CH(NUM_CH), .NUM_PE(NUM_PE), .HIDDEN(HIDDEN), .IN_DIM(IN_DIM), .PROJ(PROJ),
    .LANES(LANES), .FIFO_DEPTH(FIFO_DEPTH), .BUF_DEPTH(BUF_DEPTH)
  ) dut (.*);

  // ---------------- memory-side streams, schedule order ----------------
  localparam int ORDER [9] = '{0, 1, 2, 3, 4, 5, 6, 7, 8};
  initial begin : w_driver
    wait (rst_n);
    for (int s = 0; s < STEPS; s++)
      for (int k = 0; k < 9; k++) begin
        automatic int m = ORDER[k];
        for (int b = 0; b < slen[m]; b++) begin
          @(negedge clk);
          w_valid = 1;
          for (int p = 0; p < NUM_PE; p++) w_data[p] = wstr[m][p][b];
          w_last = (b == slen[m] - 1);
          while (!w_ready) @(negedge clk);   // ready depends on state only
          @(posedge clk);
        end
      end
    @(negedge clk); w_valid = 0;
  end
  initial begin : p_driver
    wait (rst_n);
    for (int s = 0; s < STEPS; s++)
      for (int k = 0; k < 9; k++) begin
        automatic int m = ORDER[k];
        for (int b = 0; b <= cols_of(m); b++) begin
          @(negedge clk);
          ptr_valid = 1;
          for (int p = 0; p < NUM_PE; p++) ptr_data[p] = pstr[m][p][b];
          ptr_last = (b == cols_of(m));
          while (!ptr_ready) @(negedge clk);
          @(posedge clk);
        end
      end
    @(negedge clk); ptr_valid = 0;
  end

  // ---------------- y collection ----------------
  int ywords [NUM_CH];
  int y_errs = 0;
  int cur_step = 0;
  always @(posedge clk) begin
    for (int ch = 0; ch < NUM_CH; ch++) if (y_word_valid[ch]) begin
      for (int k = 0; k < 8; k++) begin
        automatic int r = ywords[ch] * 8 + k;
        if (r < PROJ) begin
          checks++;
          if ($signed(y_word[ch][16*k +: 16]) != ref_y[ch][cur_step][r]) begin
            failures++;
            if (y_errs++ < 10)
              $display("y mismatch ch%0d step%0d row%0d: got %0d want %0d", ch, cur_step, r,
                       $signed(y_word[ch][16*k +: 16]), ref_y[ch][cur_step][r]);
          end
        end
      end
      ywords[ch]++;
    end
  end

  // ---------------- mechanism counters ----------------
  int states_seen [7];
  // bank_swaps counts hand-overs of a weight bank to the reader in PE 0 of
  // channel 0 (every change of the bank being written).
  int bank_swaps = 0, cycles = 0;
  logic wb_prev = 1'b0;
  always @(posedge clk) if (rst_n) begin
    cycles++;
    states_seen[state]++;
    if (dut.g_ch[0].u_ch.g_pe[0].u_pe.u_spmat.u_buf.wb_q != wb_prev) bank_swaps++;
    wb_prev <= dut.g_ch[0].u_ch.g_pe[0].u_pe.u_spmat.u_buf.wb_q;
  end

  task automatic vec_write(vec_e sel, int ch, bit bc, int addr, int data);
    @(negedge clk);
    vec_we = 1; vec_sel = sel; vec_ch = ($clog2(NUM_CH+1))'(ch); vec_bcast = bc;
    vec_addr = 16'(addr); vec_data = 16'(data);
    @(negedge clk);
    vec_we = 0;
  endtask

  // ---------------- main sequence ----------------
  initial begin
    int step_cycles [STEPS];
    gen_and_encode();
    reference();
    $display("entries=%0d gap_pad=%0d tail_pad=%0d", n_entries, n_gap_pad, n_tail_pad);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < HIDDEN; r++) begin
      vec_write(V_BI, 0, 1, r, bias[0][r]); vec_write(V_BF, 0, 1, r, bias[1][r]);
      vec_write(V_BC, 0, 1, r, bias[2][r]); vec_write(V_BO, 0, 1, r, bias[3][r]);
      vec_write(V_WIC, 0, 1, r, wdg[0][r]); vec_write(V_WFC, 0, 1, r, wdg[1][r]);
      vec_write(V_WOC, 0, 1, r, wdg[2][r]);
    end
    for (int s = 0; s < STEPS; s++) begin
      int t0;
      for (int ch = 0; ch < NUM_CH; ch++)
        for (int c = 0; c < IN_DIM; c++) vec_write(V_X, ch, 0, c, xin[ch][s][c]);
      foreach (ywords[ch]) ywords[ch] = 0;
      cur_step = s;
      @(negedge clk); start = 1; first_step = (s == 0);
      @(negedge clk); start = 0;
      t0 = cycles;
      @(posedge step_done);
      step_cycles[s] = cycles - t0;
      repeat (3) @(posedge clk);
      for (int ch = 0; ch < NUM_CH; ch++) begin
        checks++;
        if (ywords[ch] != (PROJ + 7) / 8) begin
          failures++; $display("ch%0d: %0d y words, want %0d", ch, ywords[ch], (PROJ + 7) / 8);
        end
      end
      $display("step %0d: %0d cycles", s, step_cycles[s]);
    end
    // every compressed entry (incl. gap padding) is one MAC in every channel
    checks++;
    if (mac_count != 32'((n_entries + n_gap_pad) * NUM_CH * STEPS)) begin
      failures++;
      $display("mac_count %0d want %0d", mac_count, (n_entries + n_gap_pad) * NUM_CH * STEPS);
    end
    // a step can not be shorter than the busiest PE's stream, and should stay
    // within 3x of the padded stream plus column overheads
    begin
      longint lb = 0, ub = 0;
      for (int m = 0; m < 9; m++) begin lb += slen[m]; ub += slen[m] + cols_of(m) + 4; end
      ub = 3 * ub + 12 * (HIDDEN / LANES + 8) + 2 * PROJ;
      checks++;
      if (step_cycles[STEPS-1] < lb || step_cycles[STEPS-1] > ub) begin
        failures++; $display("step cycles %0d outside [%0d, %0d]", step_cycles[STEPS-1], lb, ub);
      end
    end
    // mechanisms
    $display("stalls=%0d pe_wait=%0d bank_swaps=%0d macs=%0d", stall_count, wait_count,
             bank_swaps, mac_count);
    for (int st = 1; st <= 6; st++) begin
      checks++;
      if (states_seen[st] == 0) begin failures++; $display("STATE_%0d never entered", st); end
    end
    checks++; if (stall_count == 0) begin failures++; $display("no ActQueue stall"); end
    checks++; if (wait_count == 0)  begin failures++; $display("no PE waited for data"); end
    checks++; if (n_tail_pad == 0)  begin failures++; $display("no tail padding drained"); end
    checks++; if (STEPS < 2)        begin failures++; $display("recurrence not exercised"); end
    if (BUF_DEPTH < 512 || HIDDEN / NUM_PE > 16) begin
      checks++; if (bank_swaps == 0) begin failures++; $display("no ping-pong bank swap"); end
    end
    if (HIDDEN / NUM_PE > 16) begin
      checks++; if (n_gap_pad == 0) begin failures++; $display("no gap padding"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (MAX_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
