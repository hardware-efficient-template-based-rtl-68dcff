// tb_cnn_accel_top: end-to-end test of the accelerator at its default sizes.
//
// A behavioural DRAM (axi_mem_model, with random handshake stalls) is filled
// with random Q2.14 inputs and weights, and seven tile commands are issued
// back to back:
//   A  conv 6x6 patch, k=3, s=1, first input-channel tile (not stored)
//   B  conv 6x6 patch, k=3, s=1, second tile added to A, stored
//   C  conv 13x13 patch, k=5, s=2, stored
//   D  FC 12 inputs -> 24 outputs, stored; inputs and output 0's weights
//      set to 1.0 so that output 0 saturates
//   E  FC 576 inputs (the full lambda) -> 96 outputs (the full Omega), not stored
//   F  FC 24 more inputs added to E, stored
//   G  conv 14x14 patch (the full tile), k=11 (KMAX), s=3, stored
// The stored outputs are compared word by word with a reference computed
// here from the DRAM contents (exact integer sums, arithmetic shift by 14,
// saturation to 16 bits, partial sums rounded the same way). The compute time
// of each tile is checked against beats + 3 cycles. The test also counts, and
// requires at least once: loading overlapped with computing, storing
// overlapped with computing, a conv-to-FC and an FC-to-conv mode switch,
// accumulation onto partial sums, saturation, a DRAM stall and a burst cut
// short at a 4 KiB boundary.
module tb_cnn_accel_top;
  import cnn_pkg::*;

  localparam int unsigned MU = MU_DEF, TAU = TAU_DEF;
  localparam int unsigned WORDS = 131072;

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

  // ---------------- watchdog ----------------
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- tile commands ----------------
  localparam int NT = 7;
  tile_cmd_t cmds [NT];
  int unsigned next_word = 2040;   // first input straddles a 4 KiB boundary

  function automatic int unsigned alloc(input int unsigned n);
    int unsigned a = next_word;
    next_word += n;
    return a * 2;   // byte address
  endfunction

  function automatic tile_cmd_t conv_cmd(input int rows, input int cols, input int k,
                                         input int s, input bit acc, input bit st);
    tile_cmd_t t = '0;
    t.is_fc = 1'b0; t.acc_in = acc; t.store = st;
    t.in_rows = 8'(rows); t.in_cols = 8'(cols); t.k = 4'(k); t.stride = 3'(s);
    t.out_rows = 8'((rows - k) / s + 1); t.out_cols = 8'((cols - k) / s + 1);
    t.ifm_addr = alloc(rows * cols * MU);
    t.w_addr   = alloc(k * k * MU * TAU);
    t.ofm_addr = alloc(((rows - k) / s + 1) * ((cols - k) / s + 1) * TAU);
    return t;
  endfunction

  function automatic tile_cmd_t fc_cmd(input int nin, input int nout, input bit acc, input bit st);
    tile_cmd_t t = '0;
    t.is_fc = 1'b1; t.acc_in = acc; t.store = st;
    t.n_in_chunks = 8'(nin); t.n_out_chunks = 8'(nout);
    t.ifm_addr = alloc(nin * MU);
    t.w_addr   = alloc(nin * nout * MU * TAU);
    t.ofm_addr = alloc(nout * TAU);
    return t;
  endfunction

  // ---------------- reference model ----------------
  function automatic int rd(input int unsigned byte_addr, input int unsigned idx);
    return int'(signed'(u_mem.mem[byte_addr / 2 + idx]));
  endfunction

  function automatic int sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  int sat_events = 0;

  // full-precision sum of one output of tile t
  function automatic longint conv_sum(input tile_cmd_t t, input int r, input int c, input int co);
    longint s = 0;
    for (int i = 0; i < int'(t.k); i++)
      for (int j = 0; j < int'(t.k); j++)
        for (int ci = 0; ci < MU; ci++)
          s += longint'(rd(t.ifm_addr, ((int'(t.stride)*r + i) * int'(t.in_cols) + int'(t.stride)*c + j) * MU + ci))
             * longint'(rd(t.w_addr, (i * int'(t.k) + j) * MU * TAU + ci * TAU + co));
    return s;
  endfunction

  function automatic longint fc_sum(input tile_cmd_t t, input int o, input int co);
    longint s = 0;
    for (int ch = 0; ch < int'(t.n_in_chunks); ch++)
      for (int ci = 0; ci < MU; ci++)
        s += longint'(rd(t.ifm_addr, ch * MU + ci))
           * longint'(rd(t.w_addr, (o * int'(t.n_in_chunks) + ch) * MU * TAU + ci * TAU + co));
    return s;
  endfunction

  function automatic int q(input longint s);   // sum -> stored Q2.14 value
    longint v = s >>> 14;
    return sat(v);
  endfunction

  task automatic check_word(input string name, input int unsigned ofm, input int idx, input int exp);
    int got = rd(ofm, idx);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s word %0d: got %0d expected %0d", name, idx, got, exp);
    end
    if (exp == 32767 || exp == -32768) sat_events++;
  endtask

  // conv tile; prev is an accumulated-onto tile or has k == 0
  task automatic check_conv(input string name, input tile_cmd_t t, input tile_cmd_t prev);
    for (int r = 0; r < int'(t.out_rows); r++)
      for (int c = 0; c < int'(t.out_cols); c++)
        for (int co = 0; co < TAU; co++) begin
          longint s = conv_sum(t, r, c, co);
          if (t.acc_in) s += longint'(q(conv_sum(prev, r, c, co))) <<< 14;
          check_word(name, t.ofm_addr, (r * int'(t.out_cols) + c) * TAU + co, q(s));
        end
  endtask

  task automatic check_fc(input string name, input tile_cmd_t t, input tile_cmd_t prev);
    for (int o = 0; o < int'(t.n_out_chunks); o++)
      for (int co = 0; co < TAU; co++) begin
        longint s = fc_sum(t, o, co);
        if (t.acc_in) s += longint'(q(fc_sum(prev, o, co))) <<< 14;
        check_word(name, t.ofm_addr, o * TAU + co, q(s));
      end
  endtask

  // ---------------- mechanism counters ----------------
  int ov_load_comp = 0, ov_store_comp = 0, sw_conv_fc = 0, sw_fc_conv = 0;
  int acc_tiles = 0, stall_cycles = 0, boundary_bursts = 0;
  logic prev_fc = 1'b0;
  bit   seen_tile = 1'b0;
  logic comp_busy_d = 1'b0;
  int   comp_len = 0, tile_idx = 0;
  int   comp_lens [NT];

  always @(posedge clk) if (rst_n) begin
    if (load_busy && comp_busy) ov_load_comp++;
    if (store_busy && comp_busy) ov_store_comp++;
    if ((d_r_ready && !d_r_valid && u_mem.d_rbusy) || (d_w_valid && !d_w_ready)) stall_cycles++;
    if (d_ar_valid && d_ar_ready && (d_ar_addr % 4096) + (int'(d_ar_len) + 1) * 2 == 4096 && d_ar_len != 8'(MAX_BURST - 1))
      boundary_bursts++;
    if (g_ar_valid && g_ar_ready && (g_ar_addr % 4096) + (int'(g_ar_len) + 1) * 2 == 4096 && g_ar_len != 8'(MAX_BURST - 1))
      boundary_bursts++;
    // compute time of each tile
    if (comp_busy) comp_len++;
    else if (comp_len != 0) begin
      if (tile_idx < NT) comp_lens[tile_idx] = comp_len;
      tile_idx++;
      comp_len = 0;
    end
    comp_busy_d <= comp_busy;
    if (comp_busy && !comp_busy_d) begin
      if (seen_tile && prev_fc && !dut.cu_fc) sw_fc_conv++;
      if (seen_tile && !prev_fc && dut.cu_fc) sw_conv_fc++;
      if (dut.u_sched.ccmd.acc_in) acc_tiles++;
      prev_fc   <= dut.cu_fc;
      seen_tile <= 1'b1;
    end
  end

  task automatic need(input string what, input int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never happened: %s", what);
    end else $display("mechanism %-28s %0d", what, n);
  endtask

  // ---------------- stimulus ----------------
  initial begin
    longint t0;
    cmd_valid = 1'b0;
    cmd = '0;
    cmds[0] = conv_cmd(6, 6, 3, 1, 1'b0, 1'b0);     // A
    cmds[1] = conv_cmd(6, 6, 3, 1, 1'b1, 1'b1);     // B
    cmds[2] = conv_cmd(13, 13, 5, 2, 1'b0, 1'b1);   // C
    cmds[3] = fc_cmd(1, 1, 1'b0, 1'b1);             // D
    cmds[4] = fc_cmd(48, 4, 1'b0, 1'b0);            // E
    cmds[5] = fc_cmd(2, 4, 1'b1, 1'b1);             // F
    cmds[6] = conv_cmd(14, 14, 11, 3, 1'b0, 1'b1);  // G
    if (next_word > WORDS) $fatal(1, "DRAM model too small");
    // random Q2.14 data, mostly small, with a few large values to saturate
    for (int unsigned a = 0; a < WORDS; a++) begin
      automatic int v = int'($urandom_range(0, 8191)) - 4096;
      if ($urandom_range(0, 63) == 0) v = v * 8;
      u_mem.mem[a] = 16'(v);
    end
    for (int ci = 0; ci < MU; ci++) begin
      u_mem.mem[cmds[3].ifm_addr / 2 + ci] = 16'h4000;
      u_mem.mem[cmds[3].w_addr / 2 + ci * TAU] = 16'h4000;
    end
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    t0 = cycle;
    for (int n = 0; n < NT; n++) begin
      @(negedge clk);
      cmd_valid = 1'b1;
      cmd = cmds[n];
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);
      @(negedge clk);
      cmd_valid = 1'b0;
    end
    repeat (5) @(posedge clk);
    while (!idle) @(posedge clk);
    $display("all tiles done in %0d cycles", cycle - t0);

    check_conv("B", cmds[1], cmds[0]);
    check_conv("C", cmds[2], '0);
    check_fc("D", cmds[3], '0);
    check_fc("F", cmds[5], cmds[4]);
    check_conv("G", cmds[6], '0);

    // compute time: beats + 3 cycles per tile
    for (int n = 0; n < NT; n++) begin
      automatic int beats = cmds[n].is_fc ? int'(cmds[n].n_in_chunks) * int'(cmds[n].n_out_chunks)
                : int'(cmds[n].out_rows) * int'(cmds[n].out_cols) * int'(cmds[n].k) * int'(cmds[n].k);
      checks++;
      if (comp_lens[n] != beats + 3) begin
        failures++;
        $display("FAIL tile %0d compute took %0d cycles, expected %0d", n, comp_lens[n], beats + 3);
      end
    end
    checks++;
    if (bus_err) begin failures++; $display("FAIL bus error"); end

    need("load overlaps compute", ov_load_comp);
    need("store overlaps compute", ov_store_comp);
    need("switch conv -> FC", sw_conv_fc);
    need("switch FC -> conv", sw_fc_conv);
    need("accumulate onto partial sums", acc_tiles);
    need("saturated output", sat_events);
    need("DRAM stall", stall_cycles);
    need("burst cut at 4 KiB boundary", boundary_bursts);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
