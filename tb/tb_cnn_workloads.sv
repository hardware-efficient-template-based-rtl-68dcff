// tb_cnn_workloads: slices of the three networks the design targets.
//
// Runs layers and layer slices of AlexNet, VGG16 and LeNet-5 on the
// default-size accelerator (mu = 12, tau = 24, lambda = 576, Omega = 96),
// with the host's work (tiling, zero padding of channel counts to multiples
// of mu and tau, ReLU, 2x2 max pooling, flattening) done by this testbench
// between layers, as the host processor would do it. Weights and inputs are
// random (no trained model is used); the point is the data movement,
// tiling and arithmetic at the networks' real shapes.
//   AlexNet conv1   11x11 kernel, stride 4, 3 input channels padded to 12,
//                   24 of the 64 output channels, one 14x14 input patch
//   AlexNet FC      1152 inputs (two lambda tiles chained with acc_in)
//                   -> 120 outputs (two Omega tiles: 96 + 24)
//   VGG16 conv1_2   3x3, 64 input channels (six mu tiles chained with
//                   acc_in, the last one padded), 24 output channels, a
//                   14x14 patch giving 12x12 outputs
//   LeNet-5         C3 14x14x6 -> 10x10x16 (5x5, one tile); host ReLU +
//                   2x2 max pool -> 400 (+8 zero); F5 408 -> 120 (two
//                   tiles); ReLU; F6 120 -> 84 (padded to 96); ReLU;
//                   F7 84 -> 10 (padded to 24)
// Every stored output is compared with a reference computed here from the
// DRAM contents: exact integer sums, arithmetic shift by 14 and saturation,
// and for a chained tile the stored partial sum plus the new tile's shifted
// sum, saturated. Padded outputs must be zero. Cycles per layer are printed.
module tb_cnn_workloads;
  import cnn_pkg::*;

  localparam int unsigned MU = MU_DEF, TAU = TAU_DEF;
  localparam int unsigned WORDS = 524288;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, idle, load_busy, comp_busy, store_busy, bus_err;
  tile_cmd_t cmd;
  logic          d_ar_valid, d_ar_ready, d_r_valid, d_r_ready, d_r_last;
  logic [AW-1:0] d_ar_addr, d_aw_addr, g_ar_addr;
  logic [7:0]    d_ar_len, d_aw_len, g_ar_len;
  logic [DW-1:0] d_r_data, d_w_data, g_r_data;
  logic [1:0]    d_r_resp, d_b_resp, g_r_resp;
  logic          d_aw_valid, d_aw_ready, d_w_valid, d_w_ready, d_w_last, d_b_valid, d_b_ready;
  logic          g_ar_valid, g_ar_ready, g_r_valid, g_r_ready, g_r_last;

  cnn_accel_top dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .idle,
    .load_busy, .comp_busy, .store_busy, .bus_err,
    .m_data_ar_valid(d_ar_valid), .m_data_ar_ready(d_ar_ready),
    .m_data_ar_addr(d_ar_addr), .m_data_ar_len(d_ar_len),
    .m_data_r_valid(d_r_valid), .m_data_r_ready(d_r_ready), .m_data_r_data(d_r_data),
    .m_data_r_resp(d_r_resp), .m_data_r_last(d_r_last),
    .m_data_aw_valid(d_aw_valid), .m_data_aw_ready(d_aw_ready),
    .m_data_aw_addr(d_aw_addr), .m_data_aw_len(d_aw_len),
    .m_data_w_valid(d_w_valid), .m_data_w_ready(d_w_ready), .m_data_w_data(d_w_data),
    .m_data_w_last(d_w_last),
    .m_data_b_valid(d_b_valid), .m_data_b_ready(d_b_ready), .m_data_b_resp(d_b_resp),
    .m_wgt_ar_valid(g_ar_valid), .m_wgt_ar_ready(g_ar_ready),
    .m_wgt_ar_addr(g_ar_addr), .m_wgt_ar_len(g_ar_len),
    .m_wgt_r_valid(g_r_valid), .m_wgt_r_ready(g_r_ready), .m_wgt_r_data(g_r_data),
    .m_wgt_r_resp(g_r_resp), .m_wgt_r_last(g_r_last)
  );

  axi_mem_model #(.WORDS(WORDS), .STALL(1'b1)) u_mem (
    .clk, .rst_n,
    .d_ar_valid, .d_ar_ready, .d_ar_addr, .d_ar_len,
    .d_r_valid, .d_r_ready, .d_r_data, .d_r_resp, .d_r_last,
    .d_aw_valid, .d_aw_ready, .d_aw_addr, .d_aw_len,
    .d_w_valid, .d_w_ready, .d_w_data, .d_w_last,
    .d_b_valid, .d_b_ready, .d_b_resp,
    .g_ar_valid, .g_ar_ready, .g_ar_addr, .g_ar_len,
    .g_r_valid, .g_r_ready, .g_r_data, .g_r_resp, .g_r_last
  );

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- DRAM helpers (word addresses) ----------------
  int unsigned next_word = 0;
  function automatic int unsigned alloc(input int unsigned n);
    int unsigned a = next_word;
    next_word += n;
    return a;
  endfunction
  function automatic int rdw(input int unsigned wa);
    return int'(signed'(u_mem.mem[wa]));
  endfunction
  function automatic int sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction
  function automatic int rnd(input int lim);
    return int'($urandom_range(0, 2 * lim)) - lim;
  endfunction

  task automatic run(input tile_cmd_t t);
    @(negedge clk);
    cmd_valid = 1'b1; cmd = t;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 1'b0;
  endtask

  task automatic wait_idle();
    repeat (3) @(posedge clk);
    while (!idle) @(posedge clk);
  endtask

  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // One convolution over n_ch input-channel tiles (n_real real channels in
  // all, inputs in [-in_lim, in_lim]) chained with acc_in, producing
  // n_out_real real output channels of one tau group. Input and weight
  // regions are allocated and filled here; the output region is returned.
  task automatic conv_layer(input string name, input int n_ch, input int n_real,
                            input int rows, input int cols, input int k, input int s,
                            input int n_out_real, input int in_lim, input int w_lim,
                            output int unsigned out_w);
    int orows, ocols, p;
    int unsigned in_w [8];
    int unsigned w_w [8];
    longint t0, acc;
    tile_cmd_t t;
    orows = (rows - k) / s + 1;
    ocols = (cols - k) / s + 1;
    out_w = alloc(orows * ocols * TAU);
    for (int q = 0; q < n_ch; q++) begin
      in_w[q] = alloc(rows * cols * MU);
      w_w[q]  = alloc(k * k * MU * TAU);
      for (int px = 0; px < rows * cols; px++)
        for (int ci = 0; ci < int'(MU); ci++)
          u_mem.mem[in_w[q] + px * MU + ci] = (q * int'(MU) + ci < n_real) ? 16'(rnd(in_lim)) : 16'h0;
      for (int kk = 0; kk < k * k; kk++)
        for (int ci = 0; ci < int'(MU); ci++)
          for (int co = 0; co < int'(TAU); co++)
            u_mem.mem[w_w[q] + kk * MU * TAU + ci * TAU + co] =
              (q * int'(MU) + ci < n_real && co < n_out_real) ? 16'(rnd(w_lim)) : 16'h0;
    end
    t0 = cycle;
    for (int q = 0; q < n_ch; q++) begin
      t = '0;
      t.acc_in = (q != 0); t.store = (q == n_ch - 1);
      t.in_rows = 8'(rows); t.in_cols = 8'(cols); t.k = 4'(k); t.stride = 3'(s);
      t.out_rows = 8'(orows); t.out_cols = 8'(ocols);
      t.ifm_addr = AW'(in_w[q] * 2); t.w_addr = AW'(w_w[q] * 2); t.ofm_addr = AW'(out_w * 2);
      run(t);
    end
    wait_idle();
    $display("%s: %0d tiles, %0d cycles", name, n_ch, cycle - t0);
    for (int r = 0; r < orows; r++)
      for (int c = 0; c < ocols; c++)
        for (int co = 0; co < int'(TAU); co++) begin
          p = 0;
          for (int q = 0; q < n_ch; q++) begin
            acc = 0;
            for (int i = 0; i < k; i++)
              for (int j = 0; j < k; j++)
                for (int ci = 0; ci < int'(MU); ci++)
                  acc += longint'(rdw(in_w[q] + ((s * r + i) * cols + s * c + j) * MU + ci)) *
                         longint'(rdw(w_w[q] + (i * k + j) * MU * TAU + ci * TAU + co));
            p = sat(longint'(p) + (acc >>> 14));
          end
          chk(name, rdw(out_w + (r * ocols + c) * TAU + co), p);
          if (co >= n_out_real) chk({name, " padding"}, rdw(out_w + (r * ocols + c) * TAU + co), 0);
        end
  endtask

  // One FC layer: nin_ch input chunks (nin_real real inputs) already in DRAM
  // at in_w, nout real outputs written from out_w on. Outputs are split into
  // tiles of at most Omega, inputs into tiles of at most lambda chained with
  // acc_in; the weights are allocated and filled here.
  task automatic fc_layer(input string name, input int unsigned in_w, input int nin_ch,
                          input int nin_real, input int nout, input int unsigned out_w);
    localparam int OCH = int'(OMEGA_DEF / TAU_DEF), ICH = int'(LAMBDA_DEF / MU_DEF);
    int nout_ch, ntiles, nch, ich, p;
    int unsigned wb [16][16];
    longint t0, acc;
    tile_cmd_t t;
    nout_ch = (nout + int'(TAU) - 1) / int'(TAU);
    ntiles = 0;
    t0 = cycle;
    for (int o0 = 0; o0 < nout_ch; o0 += OCH) begin
      nch = (nout_ch - o0 > OCH) ? OCH : nout_ch - o0;
      for (int i0 = 0; i0 < nin_ch; i0 += ICH) begin
        ich = (nin_ch - i0 > ICH) ? ICH : nin_ch - i0;
        wb[o0 / OCH][i0 / ICH] = alloc(ich * nch * MU * TAU);
        for (int o = 0; o < nch; o++)
          for (int ch = 0; ch < ich; ch++)
            for (int ci = 0; ci < int'(MU); ci++)
              for (int co = 0; co < int'(TAU); co++)
                u_mem.mem[wb[o0 / OCH][i0 / ICH] + (o * ich + ch) * MU * TAU + ci * TAU + co] =
                  ((i0 + ch) * int'(MU) + ci < nin_real && (o0 + o) * int'(TAU) + co < nout)
                    ? 16'(rnd(2048)) : 16'h0;
        t = '0;
        t.is_fc = 1'b1; t.acc_in = (i0 != 0); t.store = (i0 + ich == nin_ch);
        t.n_in_chunks = 8'(ich); t.n_out_chunks = 8'(nch);
        t.ifm_addr = AW'((in_w + i0 * MU) * 2); t.w_addr = AW'(wb[o0 / OCH][i0 / ICH] * 2);
        t.ofm_addr = AW'((out_w + o0 * TAU) * 2);
        ntiles++;
        run(t);
      end
    end
    wait_idle();
    $display("%s: %0d tiles, %0d cycles", name, ntiles, cycle - t0);
    for (int o0 = 0; o0 < nout_ch; o0 += OCH) begin
      nch = (nout_ch - o0 > OCH) ? OCH : nout_ch - o0;
      for (int o = 0; o < nch; o++)
        for (int co = 0; co < int'(TAU); co++) begin
          p = 0;
          for (int i0 = 0; i0 < nin_ch; i0 += ICH) begin
            ich = (nin_ch - i0 > ICH) ? ICH : nin_ch - i0;
            acc = 0;
            for (int ch = 0; ch < ich; ch++)
              for (int ci = 0; ci < int'(MU); ci++)
                acc += longint'(rdw(in_w + (i0 + ch) * MU + ci)) *
                       longint'(rdw(wb[o0 / OCH][i0 / ICH] + (o * ich + ch) * MU * TAU + ci * TAU + co));
            p = sat(longint'(p) + (acc >>> 14));
          end
          chk(name, rdw(out_w + (o0 + o) * TAU + co), p);
          if ((o0 + o) * int'(TAU) + co >= nout) chk({name, " padding"}, rdw(out_w + (o0 + o) * TAU + co), 0);
        end
    end
  endtask

  // host ReLU in place; words from n_real on are set to zero
  task automatic relu(input int unsigned wa, input int n_real, input int n_pad);
    int v;
    for (int k = 0; k < n_pad; k++) begin
      v = rdw(wa + k);
      u_mem.mem[wa + k] = (k >= n_real || v < 0) ? 16'h0 : 16'(v);
    end
  endtask

  int unsigned a1_out, afc_in, afc_out, v12_out, c3_out, f5_in, f5_out, f6_out, f7_out;
  int m, v;

  initial begin
    cmd_valid = 1'b0; cmd = '0;
    for (int unsigned a = 0; a < WORDS; a++) u_mem.mem[a] = '0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;

    // ---------- AlexNet ----------
    conv_layer("AlexNet conv1", 1, 3, 14, 14, 11, 4, 24, 16384, 1024, a1_out);
    afc_in = alloc(1152);
    for (int k = 0; k < 1152; k++) u_mem.mem[afc_in + k] = 16'($urandom_range(0, 4096));
    afc_out = alloc(5 * TAU);
    fc_layer("AlexNet FC", afc_in, 96, 1152, 120, afc_out);

    // ---------- VGG16 ----------
    conv_layer("VGG16 conv1_2", 6, 64, 14, 14, 3, 1, 24, 8192, 1024, v12_out);

    // ---------- LeNet-5 ----------
    conv_layer("LeNet C3", 1, 6, 14, 14, 5, 1, 16, 16384, 1024, c3_out);
    f5_in = alloc(408);
    for (int r = 0; r < 5; r++)
      for (int c = 0; c < 5; c++)
        for (int ch = 0; ch < 16; ch++) begin
          m = 0;
          for (int dr = 0; dr < 2; dr++)
            for (int dc = 0; dc < 2; dc++) begin
              v = rdw(c3_out + ((2 * r + dr) * 10 + 2 * c + dc) * TAU + ch);
              if (v > m) m = v;
            end
          u_mem.mem[f5_in + (r * 5 + c) * 16 + ch] = 16'(m);
        end
    f5_out = alloc(5 * TAU);
    fc_layer("LeNet F5", f5_in, 34, 400, 120, f5_out);
    relu(f5_out, 120, 120);
    f6_out = alloc(4 * TAU);
    fc_layer("LeNet F6", f5_out, 10, 120, 84, f6_out);
    relu(f6_out, 84, 96);
    f7_out = alloc(TAU);
    fc_layer("LeNet F7", f6_out, 7, 84, 10, f7_out);

    checks++;
    if (bus_err) begin failures++; $display("FAIL bus error"); end
    $display("DRAM words used: %0d of %0d", next_word, WORDS);
    checks++;
    if (next_word > WORDS) begin failures++; $display("FAIL DRAM model too small"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
