// tb_data_port: self-checking test of the read/write data port.
//
// The port is connected to the data-port channels of the behavioural DRAM,
// which stalls at random. Write transfers of several lengths and alignments
// (one straddling a 4 KiB boundary) are fed from a source that itself pauses
// at random; afterwards the memory must hold exactly the written elements and
// the words around them must be untouched. A read transfer runs at the same
// time as one of the writes, from a different region, and is compared with
// memory. Every write burst is checked for at most 16 beats, no 4 KiB
// crossing and a w_last on its final beat only.
module tb_data_port;
  import cnn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic            rd_start, rd_busy, rd_done, rd_err, rd_valid;
  logic [AW-1:0]   rd_addr, wr_addr;
  logic [LENW-1:0] rd_n, wr_n;
  logic [DW-1:0]   rd_data, i_data;
  logic            wr_start, wr_busy, wr_done, wr_err, i_valid, i_ready;
  logic            ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [AW-1:0]   ar_addr, aw_addr;
  logic [7:0]      ar_len, aw_len;
  logic [DW-1:0]   r_data, w_data;
  logic [1:0]      r_resp, b_resp;
  logic            aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid, b_ready;

  data_port dut (.*);

  logic          g_ar_ready, g_r_valid, g_r_last;
  logic [DW-1:0] g_r_data;
  logic [1:0]    g_r_resp;

  axi_mem_model #(.WORDS(8192), .STALL(1'b1)) u_mem (
    .clk, .rst_n,
    .d_ar_valid(ar_valid), .d_ar_ready(ar_ready), .d_ar_addr(ar_addr), .d_ar_len(ar_len),
    .d_r_valid(r_valid), .d_r_ready(r_ready), .d_r_data(r_data), .d_r_resp(r_resp),
    .d_r_last(r_last),
    .d_aw_valid(aw_valid), .d_aw_ready(aw_ready), .d_aw_addr(aw_addr), .d_aw_len(aw_len),
    .d_w_valid(w_valid), .d_w_ready(w_ready), .d_w_data(w_data), .d_w_last(w_last),
    .d_b_valid(b_valid), .d_b_ready(b_ready), .d_b_resp(b_resp),
    .g_ar_valid(1'b0), .g_ar_ready, .g_ar_addr('0), .g_ar_len('0),
    .g_r_valid, .g_r_ready(1'b0), .g_r_data, .g_r_resp, .g_r_last
  );

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [DW-1:0] golden [8192];
  initial i_valid = 1'b0;
  logic [DW-1:0] src [$];
  logic [DW-1:0] got [$];
  int beats_left = 0;

  // write-burst rules and read stream capture
  always @(posedge clk) if (rst_n) begin
    if (rd_valid) got.push_back(rd_data);
    if (aw_valid && aw_ready) begin
      checks++;
      if (aw_len > 8'd15 || (aw_addr % 4096) + (int'(aw_len) + 1) * 2 > 4096) begin
        failures++; $display("FAIL write burst addr %h len %0d", aw_addr, aw_len);
      end
      beats_left = int'(aw_len) + 1;
    end
    if (w_valid && w_ready) begin
      checks++;
      if (w_last != (beats_left == 1)) begin failures++; $display("FAIL w_last misplaced"); end
      beats_left--;
    end
  end

  // element source with random pauses
  // an offered element stays offered until it is taken
  logic taken_q = 1'b0;
  always @(posedge clk) taken_q <= i_valid && i_ready;
  always @(negedge clk) begin
    if (taken_q) void'(src.pop_front());
    if (!i_valid || taken_q) begin
      i_valid <= (src.size() != 0) && ($urandom_range(0, 3) != 0);
      i_data  <= (src.size() != 0) ? src[0] : '0;
    end
  end

  task automatic write_xfer(input int unsigned addr, input int unsigned n, input bit with_read);
    int waited = 0;
    bit seen_done = 0, seen_rdone = 0;
    for (int k = 0; k < n; k++) begin
      automatic logic [DW-1:0] v = 16'($urandom);
      src.push_back(v);
      golden[addr / 2 + k] = v;
    end
    got.delete();
    @(negedge clk);
    wr_start = 1; wr_addr = addr; wr_n = LENW'(n);
    if (with_read) begin rd_start = 1; rd_addr = 0; rd_n = 200; end
    @(negedge clk);
    wr_start = 0; rd_start = 0;
    while (!(seen_done && (seen_rdone || !with_read)) && waited < 20000) begin
      @(posedge clk);
      if (wr_done) seen_done = 1;
      if (rd_done) seen_rdone = 1;
      waited++;
    end
    checks++;
    if (!seen_done) begin failures++; $display("FAIL no wr_done for n=%0d", n); end
    if (with_read) begin
      checks++;
      if (got.size() != 200) begin failures++; $display("FAIL read got %0d", got.size()); end
      for (int k = 0; k < got.size(); k++) begin
        checks++;
        if (got[k] !== golden[k]) begin failures++; $display("FAIL read element %0d", k); end
      end
    end
  endtask

  initial begin
    rd_start = 0; wr_start = 0; rd_addr = '0; wr_addr = '0; rd_n = '0; wr_n = '0;
    for (int a = 0; a < 8192; a++) begin
      u_mem.mem[a] = 16'($urandom);
      golden[a] = u_mem.mem[a];
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    write_xfer(1024, 1, 0);
    write_xfer(2048, 16, 0);
    write_xfer(3000, 37, 1);
    write_xfer(4096 - 10, 64, 0);   // straddles the 4 KiB boundary
    write_xfer(9000, 250, 0);
    repeat (5) @(posedge clk);
    for (int a = 0; a < 8192; a++) begin
      checks++;
      if (u_mem.mem[a] !== golden[a]) begin
        failures++;
        if (failures < 10) $display("FAIL memory word %0d", a);
      end
    end
    checks++;
    if (wr_err || rd_err || wr_busy || rd_busy) begin failures++; $display("FAIL status"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
