// cnn_cfg_harness: runs a fixed set of tiles on one build of the accelerator.
//
// Instantiates cnn_accel_top with the given compute shape (MU x TAU) and FC
// tile sizes (LAMBDA, OMEGA), a behavioural DRAM with random stalls, and a
// host sequence started by go:
//   conv  14x14 patch, 3x3 kernel, stride 1, 2*MU input channels as two
//         tiles chained with acc_in, TAU output channels
//   conv  14x14 patch, 5x5 kernel, stride 2, MU input channels
//   FC    2*LAMBDA inputs (two full lambda tiles chained) -> OMEGA outputs
// Every stored output is compared with a reference computed from the DRAM
// contents (exact sums, arithmetic shift by 14, saturation; chained tiles
// add the shifted sum of each tile to the saturated partial sum). done rises
// when the sequence has finished; checks and failures count the comparisons.
// Used by tb_cnn_table1_configs for the larger compute shapes.
module cnn_cfg_harness
  import cnn_pkg::*;
#(
  parameter int unsigned MU     = MU_DEF,
  parameter int unsigned TAU    = TAU_DEF,
  parameter int unsigned LAMBDA = LAMBDA_DEF,
  parameter int unsigned OMEGA  = OMEGA_DEF,
  parameter int unsigned WORDS  = 262144
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic done,
  output int   checks,
  output int   failures
);

  logic cmd_valid, cmd_ready, idle, load_busy, comp_busy, store_busy, bus_err;
  tile_cmd_t cmd;
  logic          d_ar_valid, d_ar_ready, d_r_valid, d_r_ready, d_r_last;
  logic [AW-1:0] d_ar_addr, d_aw_addr, g_ar_addr;
  logic [7:0]    d_ar_len, d_aw_len, g_ar_len;
  logic [DW-1:0] d_r_data, d_w_data, g_r_data;
  logic [1:0]    d_r_resp, d_b_resp, g_r_resp;
  logic          d_aw_valid, d_aw_ready, d_w_valid, d_w_ready, d_w_last, d_b_valid, d_b_ready;
  logic          g_ar_valid, g_ar_ready, g_r_valid, g_r_ready, g_r_last;

  cnn_accel_top #(.MU(MU), .TAU(TAU), .LAMBDA(LAMBDA), .OMEGA(OMEGA)) dut (
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

  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

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
      if (failures < 10) $display("FAIL %s %0dx%0d: got %0d expected %0d", what, MU, TAU, got, exp);
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
    $display("%0dx%0d %s: %0d tiles, %0d cycles", MU, TAU, name, n_ch, cycle - t0);
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
    localparam int OCH = int'(OMEGA / TAU), ICH = int'(LAMBDA / MU);
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
    $display("%0dx%0d %s: %0d tiles, %0d cycles", MU, TAU, name, ntiles, cycle - t0);
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

  int unsigned o1, o2, f_in, f_out;

  initial begin
    done = 1'b0; checks = 0; failures = 0;
    cmd_valid = 1'b0; cmd = '0;
    for (int unsigned a = 0; a < WORDS; a++) u_mem.mem[a] = '0;
    while (!(go && rst_n)) @(posedge clk);
    conv_layer("conv 3x3", 2, 2 * int'(MU), 14, 14, 3, 1, int'(TAU), 8192, 1024, o1);
    conv_layer("conv 5x5/2", 1, int'(MU), 14, 14, 5, 2, int'(TAU), 8192, 1024, o2);
    f_in = alloc(2 * LAMBDA);
    for (int k = 0; k < int'(2 * LAMBDA); k++) u_mem.mem[f_in + k] = 16'($urandom_range(0, 4096));
    f_out = alloc(OMEGA);
    fc_layer("FC", f_in, int'(2 * LAMBDA / MU), int'(2 * LAMBDA), int'(OMEGA), f_out);
    checks++;
    if (bus_err || next_word > WORDS) begin
      failures++;
      $display("FAIL %0dx%0d: bus error or DRAM model too small", MU, TAU);
    end
    done = 1'b1;
  end

endmodule
