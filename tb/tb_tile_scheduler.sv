// tb_tile_scheduler: self-checking test of the scheduler on its own.
//
// The ports and the compute unit are emulated: a read or write transfer
// started by the scheduler finishes after a random 5 to 60 cycles, and the
// compute unit's result flag follows a beat with cu_last by one cycle, as in
// the real unit. Four tiles (conv, FC, conv with stride 2, FC accumulating
// onto the previous one) are queued back to back. The test checks
//   - the element counts and addresses of every load and store transfer;
//   - every compute beat: input row, weight row, first/last flags and the
//     partial-sum read, against loop nests written out here independently;
//   - the result-row write address of each finished output;
//   - the compute time of each tile (beats + 3 cycles);
//   - the ping-pong behaviour: input banks alternate, a load overlaps a
//     compute, stores happen only for tiles with store set.
module tb_tile_scheduler;
  import cnn_pkg::*;

  localparam int unsigned MU = 2, TAU = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, idle, load_busy, comp_busy, store_busy;
  tile_cmd_t cmd;
  logic rd_start, rd_done, wt_start, wt_done, ld_start, ld_fc, ld_bank;
  logic [AW-1:0] rd_addr, wt_addr, wr_addr;
  logic [LENW-1:0] rd_n, wt_n, wr_n;
  logic cu_fc, in_bank, out_bank, in_re, w_re, ps_re;
  logic [15:0] in_row, w_row, ps_row, res_row, st_rows;
  logic cu_valid, cu_first, cu_last, cu_acc_in, cu_out_valid, res_we;
  logic st_start, st_fc, st_bank, wr_start, wr_done;

  tile_scheduler #(.MU(MU), .TAU(TAU)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  // ---------- emulated ports ----------
  int rd_cnt = 0, wt_cnt = 0, wr_cnt = 0;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_done <= 0; wt_done <= 0; wr_done <= 0; rd_cnt <= 0; wt_cnt <= 0; wr_cnt <= 0;
      cu_out_valid <= 0;
    end else begin
      rd_done <= (rd_cnt == 1);
      wt_done <= (wt_cnt == 1);
      wr_done <= (wr_cnt == 1);
      rd_cnt <= rd_start ? int'($urandom_range(5, 60)) : (rd_cnt > 0 ? rd_cnt - 1 : 0);
      wt_cnt <= wt_start ? int'($urandom_range(5, 60)) : (wt_cnt > 0 ? wt_cnt - 1 : 0);
      wr_cnt <= wr_start ? int'($urandom_range(5, 60)) : (wr_cnt > 0 ? wr_cnt - 1 : 0);
      cu_out_valid <= cu_valid && cu_last;
    end
  end

  // ---------- commands and expected behaviour ----------
  localparam int NT = 4;
  tile_cmd_t cmds [NT];

  typedef struct { int in_row; int w_row; bit first; bit last; int orow; } beat_t;
  beat_t exp_beats [$];
  int    exp_res [$];

  function automatic tile_cmd_t mk_conv(int rows, int cols, int k, int s, bit acc, bit st, int base);
    tile_cmd_t t = '0;
    t.in_rows = 8'(rows); t.in_cols = 8'(cols); t.k = 4'(k); t.stride = 3'(s);
    t.out_rows = 8'((rows - k) / s + 1); t.out_cols = 8'((cols - k) / s + 1);
    t.acc_in = acc; t.store = st;
    t.ifm_addr = AW'(base); t.w_addr = AW'(base + 'h1000); t.ofm_addr = AW'(base + 'h2000);
    return t;
  endfunction

  function automatic tile_cmd_t mk_fc(int nin, int nout, bit acc, bit st, int base);
    tile_cmd_t t = '0;
    t.is_fc = 1; t.n_in_chunks = 8'(nin); t.n_out_chunks = 8'(nout);
    t.acc_in = acc; t.store = st;
    t.ifm_addr = AW'(base); t.w_addr = AW'(base + 'h1000); t.ofm_addr = AW'(base + 'h2000);
    return t;
  endfunction

  function automatic int n_beats(tile_cmd_t t);
    return t.is_fc ? int'(t.n_in_chunks) * int'(t.n_out_chunks)
                   : int'(t.out_rows) * int'(t.out_cols) * int'(t.k) * int'(t.k);
  endfunction

  task automatic expect_tile(tile_cmd_t t);
    beat_t b;
    if (!t.is_fc) begin
      for (int r = 0; r < int'(t.out_rows); r++)
        for (int c = 0; c < int'(t.out_cols); c++) begin
          for (int i = 0; i < int'(t.k); i++)
            for (int j = 0; j < int'(t.k); j++) begin
              b.in_row = (int'(t.stride) * r + i) * int'(t.in_cols) + int'(t.stride) * c + j;
              b.w_row  = i * int'(t.k) + j;
              b.first  = (i == 0 && j == 0);
              b.last   = (i == int'(t.k) - 1 && j == int'(t.k) - 1);
              b.orow   = r * int'(t.out_cols) + c;
              exp_beats.push_back(b);
            end
          exp_res.push_back(r * int'(t.out_cols) + c);
        end
    end else begin
      for (int o = 0; o < int'(t.n_out_chunks); o++) begin
        for (int ch = 0; ch < int'(t.n_in_chunks); ch++) begin
          b.in_row = ch;
          b.w_row  = o * int'(t.n_in_chunks) + ch;
          b.first  = (ch == 0);
          b.last   = (ch == int'(t.n_in_chunks) - 1);
          b.orow   = o;
          exp_beats.push_back(b);
        end
        exp_res.push_back(o);
      end
    end
  endtask

  // ---------- monitors ----------
  int load_idx = 0, store_idx = 0, comp_idx = 0, comp_len = 0;
  int ov_load_comp = 0, n_stores = 0;
  logic last_ld_bank = 1'b1;
  bit   fst_q, lst_q;
  tile_cmd_t cur;

  always @(posedge clk) if (rst_n) begin
    if (load_busy && comp_busy) ov_load_comp++;
    if (rd_start) begin
      automatic tile_cmd_t t = cmds[load_idx];
      chk(rd_addr == t.ifm_addr && wt_addr == t.w_addr && wt_start && ld_start, "load addresses");
      chk(rd_n == LENW'(t.is_fc ? int'(t.n_in_chunks) * MU : int'(t.in_rows) * int'(t.in_cols) * MU),
          "input element count");
      chk(wt_n == LENW'(t.is_fc ? int'(t.n_in_chunks) * int'(t.n_out_chunks) * MU * TAU
                                : int'(t.k) * int'(t.k) * MU * TAU), "weight element count");
      chk(ld_bank != last_ld_bank && ld_fc == t.is_fc, "input banks alternate");
      last_ld_bank <= ld_bank;
      load_idx++;
    end
    if (wr_start) begin
      while (store_idx < NT && !cmds[store_idx].store) store_idx++;
      if (store_idx < NT) begin
        automatic tile_cmd_t t = cmds[store_idx];
        chk(wr_addr == t.ofm_addr && st_start && st_fc == t.is_fc, "store address");
        chk(wr_n == LENW'(t.is_fc ? int'(t.n_out_chunks) * TAU
                                  : int'(t.out_rows) * int'(t.out_cols) * TAU), "store count");
        chk(st_rows == 16'(t.is_fc ? int'(t.n_out_chunks) : int'(t.out_rows) * int'(t.out_cols)),
            "store rows");
      end else chk(0, "unexpected store");
      store_idx++;
      n_stores++;
    end
    if (in_re) begin
      if (exp_beats.size() == 0) chk(0, "unexpected beat");
      else begin
        automatic beat_t b = exp_beats.pop_front();
        chk(w_re && int'(in_row) == b.in_row && int'(w_row) == b.w_row, "beat rows");
        chk(ps_re == (b.first && cur.acc_in) && (!ps_re || int'(ps_row) == b.orow), "partial-sum read");
        fst_q <= b.first; lst_q <= b.last;
      end
    end
    if (cu_valid) chk(cu_first == fst_q && cu_last == lst_q, "beat flags");
    if (res_we) begin
      if (exp_res.size() == 0) chk(0, "unexpected result");
      else chk(int'(res_row) == exp_res.pop_front(), "result row");
    end
    if (comp_busy) comp_len++;
    else if (comp_len != 0) begin
      chk(comp_len == n_beats(cmds[comp_idx]) + 3, "compute time");
      comp_idx++;
      comp_len = 0;
    end
  end
  assign cur = dut.ccmd;

  initial begin
    cmd_valid = 0; cmd = '0;
    cmds[0] = mk_conv(5, 6, 2, 1, 0, 1, 'h10000);
    cmds[1] = mk_fc(3, 2, 0, 0, 'h20000);
    cmds[2] = mk_conv(7, 7, 3, 2, 0, 1, 'h30000);
    cmds[3] = mk_fc(2, 2, 1, 1, 'h40000);
    for (int n = 0; n < NT; n++) expect_tile(cmds[n]);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NT; n++) begin
      @(negedge clk);
      cmd_valid = 1; cmd = cmds[n];
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);
      @(negedge clk);
      cmd_valid = 0;
    end
    repeat (3) @(posedge clk);
    while (!idle) @(posedge clk);
    chk(load_idx == NT, "all tiles loaded");
    chk(comp_idx == NT, "all tiles computed");
    chk(n_stores == 3, "three stores");
    chk(exp_beats.size() == 0 && exp_res.size() == 0, "all beats and results seen");
    chk(ov_load_comp > 0, "load overlapped compute");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
