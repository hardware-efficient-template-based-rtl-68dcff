// tb_mem_interconnect: self-checking test of the DRAM-side interconnect.
//
// With MU = 3 and TAU = 4: (1) a convolution load into bank 1 and an FC load
// into bank 0, each with input and weight elements arriving at random times;
// every buffer write must go to the right buffer and bank, with the row and
// lane of the element's position in its stream (lanes 0..MU-1 for inputs,
// 0..MU*TAU-1 for weights). (2) Stores of 5 conv rows and 2 FC rows from
// model output buffers (registered reads, like the real buffers) into a sink
// that accepts at random; the element sequence must be the buffer contents in
// row-major order, with no loss or duplication under back-pressure, and
// st_done must pulse once at the end.
module tb_mem_interconnect;
  import cnn_pkg::*;

  localparam int unsigned MU = 3, TAU = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic ld_start, ld_fc, ld_bank, din_valid, wgt_valid;
  logic [DW-1:0] din_data, wgt_data, in_wdata, w_wdata;
  logic in_we_conv, in_we_fc, w_we_conv, w_we_fc, ld_bank_o;
  logic [15:0] in_row, in_lane, w_row, w_lane;
  logic st_start, st_fc, st_bank, st_busy, st_done;
  logic [15:0] st_rows, out_row, out_lane;
  logic out_re_conv, out_re_fc, st_bank_o;
  logic [DW-1:0] out_rdata_conv, out_rdata_fc, o_data;
  logic o_valid, o_ready;

  mem_interconnect #(.MU(MU), .TAU(TAU)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------- load checking ----------
  int n_in_seen, n_w_seen;
  bit exp_fc, exp_bank;
  always @(posedge clk) if (rst_n) begin
    if (din_valid) begin
      checks++;
      if (in_we_conv != !exp_fc || in_we_fc != exp_fc || ld_bank_o != exp_bank ||
          in_row != 16'(n_in_seen / MU) || in_lane != 16'(n_in_seen % MU) || in_wdata != din_data) begin
        failures++;
        $display("FAIL input element %0d: row %0d lane %0d", n_in_seen, in_row, in_lane);
      end
      n_in_seen++;
    end else if (in_we_conv || in_we_fc) begin
      checks++; failures++; $display("FAIL input write without data");
    end
    if (wgt_valid) begin
      checks++;
      if (w_we_conv != !exp_fc || w_we_fc != exp_fc ||
          w_row != 16'(n_w_seen / (MU * TAU)) || w_lane != 16'(n_w_seen % (MU * TAU)) || w_wdata != wgt_data) begin
        failures++;
        $display("FAIL weight element %0d: row %0d lane %0d", n_w_seen, w_row, w_lane);
      end
      n_w_seen++;
    end
  end

  task automatic load(input bit fc, input bit bank, input int nin, input int nw);
    int si = 0, sw = 0;
    exp_fc = fc; exp_bank = bank; n_in_seen = 0; n_w_seen = 0;
    @(negedge clk);
    ld_start = 1; ld_fc = fc; ld_bank = bank;
    @(negedge clk);
    ld_start = 0;
    while (si < nin || sw < nw) begin
      din_valid = (si < nin) && ($urandom_range(0, 2) != 0);
      wgt_valid = (sw < nw) && ($urandom_range(0, 2) != 0);
      din_data = 16'($urandom); wgt_data = 16'($urandom);
      if (din_valid) si++;
      if (wgt_valid) sw++;
      @(negedge clk);
    end
    din_valid = 0; wgt_valid = 0;
    @(negedge clk);
    checks++;
    if (n_in_seen != nin || n_w_seen != nw) begin failures++; $display("FAIL load counts"); end
  endtask

  // ---------- model output buffers (registered element read) ----------
  logic [DW-1:0] obuf_conv [2][8][TAU];
  logic [DW-1:0] obuf_fc   [2][8][TAU];
  always @(posedge clk) begin
    if (out_re_conv) out_rdata_conv <= obuf_conv[st_bank_o][3'(out_row)][2'(out_lane)];
    if (out_re_fc)   out_rdata_fc   <= obuf_fc[st_bank_o][3'(out_row)][2'(out_lane)];
  end

  logic [DW-1:0] sunk [$];
  int done_pulses;
  always @(posedge clk) if (rst_n) begin
    if (o_valid && o_ready) sunk.push_back(o_data);
    if (st_done) done_pulses++;
  end
  always @(negedge clk) o_ready <= ($urandom_range(0, 2) != 0);

  task automatic store(input bit fc, input bit bank, input int rows);
    int waited = 0;
    sunk.delete(); done_pulses = 0;
    @(negedge clk);
    st_start = 1; st_fc = fc; st_bank = bank; st_rows = 16'(rows);
    @(negedge clk);
    st_start = 0;
    while (st_busy && waited < 2000) begin @(negedge clk); waited++; end
    repeat (3) @(negedge clk);
    checks++;
    if (sunk.size() != rows * TAU || done_pulses != 1) begin
      failures++;
      $display("FAIL store: %0d elements, %0d done pulses", sunk.size(), done_pulses);
    end
    for (int k = 0; k < sunk.size() && k < rows * TAU; k++) begin
      automatic logic [DW-1:0] e = fc ? obuf_fc[bank][k / TAU][k % TAU]
                                      : obuf_conv[bank][k / TAU][k % TAU];
      checks++;
      if (sunk[k] !== e) begin failures++; $display("FAIL store element %0d", k); end
    end
  endtask

  initial begin
    ld_start = 0; ld_fc = 0; ld_bank = 0; din_valid = 0; wgt_valid = 0;
    din_data = '0; wgt_data = '0; st_start = 0; st_fc = 0; st_bank = 0; st_rows = '0;
    out_rdata_conv = '0; out_rdata_fc = '0;
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < 8; r++)
        for (int l = 0; l < TAU; l++) begin
          obuf_conv[b][r][l] = 16'($urandom);
          obuf_fc[b][r][l]   = 16'($urandom);
        end
    repeat (3) @(posedge clk);
    rst_n = 1;
    load(0, 1, 4 * MU, 2 * MU * TAU);
    load(1, 0, 5 * MU, 3 * MU * TAU);
    store(0, 1, 5);
    store(1, 0, 2);
    store(0, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
