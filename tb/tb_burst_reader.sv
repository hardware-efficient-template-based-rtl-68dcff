// tb_burst_reader: self-checking test of the burst read master (weight port).
//
// The reader is connected to the weight-port channels of the behavioural
// DRAM, which stalls at random. Transfers of 0, 1, 15, 16, 17, 100 and 300
// elements at aligned, unaligned and 4 KiB-straddling addresses are run; the
// element stream is compared with the memory, the done pulse is checked, and
// every address beat is checked against the AXI rules used here: at most 16
// beats, no 4 KiB crossing, and bursts that cover the transfer exactly.
module tb_burst_reader;
  import cnn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic            start, busy, done, err, o_valid;
  logic [AW-1:0]   base_addr;
  logic [LENW-1:0] n_elems;
  logic [DW-1:0]   o_data;
  logic            ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [AW-1:0]   ar_addr;
  logic [7:0]      ar_len;
  logic [DW-1:0]   r_data;
  logic [1:0]      r_resp;

  burst_reader dut (.*);

  // unused data-port channels of the memory model
  logic          d_ar_ready, d_r_valid, d_r_last, d_aw_ready, d_w_ready, d_b_valid;
  logic [DW-1:0] d_r_data;
  logic [1:0]    d_r_resp, d_b_resp;

  axi_mem_model #(.WORDS(8192), .STALL(1'b1)) u_mem (
    .clk, .rst_n,
    .d_ar_valid(1'b0), .d_ar_ready, .d_ar_addr('0), .d_ar_len('0),
    .d_r_valid, .d_r_ready(1'b0), .d_r_data, .d_r_resp, .d_r_last,
    .d_aw_valid(1'b0), .d_aw_ready, .d_aw_addr('0), .d_aw_len('0),
    .d_w_valid(1'b0), .d_w_ready, .d_w_data('0), .d_w_last(1'b0),
    .d_b_valid, .d_b_ready(1'b0), .d_b_resp,
    .g_ar_valid(ar_valid), .g_ar_ready(ar_ready), .g_ar_addr(ar_addr), .g_ar_len(ar_len),
    .g_r_valid(r_valid), .g_r_ready(r_ready), .g_r_data(r_data), .g_r_resp(r_resp),
    .g_r_last(r_last)
  );

  int checks = 0, failures = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // received stream and address beats
  logic [DW-1:0] got [$];
  longint unsigned next_addr;
  int beats_covered;
  always @(posedge clk) if (rst_n) begin
    if (o_valid) got.push_back(o_data);
    if (ar_valid && ar_ready) begin
      checks++;
      if (ar_len > 8'd15 || (ar_addr % 4096) + (int'(ar_len) + 1) * 2 > 4096 || longint'(ar_addr) != next_addr) begin
        failures++;
        $display("FAIL burst addr %h len %0d (expected addr %h)", ar_addr, ar_len, next_addr);
      end
      next_addr = longint'(ar_addr) + (longint'(ar_len) + 1) * 2;
      beats_covered += int'(ar_len) + 1;
    end
  end

  task automatic xfer(input int unsigned addr, input int unsigned n);
    int waited = 0;
    got.delete();
    next_addr = longint'(addr);
    beats_covered = 0;
    @(negedge clk);
    start = 1; base_addr = addr; n_elems = LENW'(n);
    @(negedge clk);
    start = 0;
    while (!done && waited < 20000) begin @(negedge clk); waited++; end
    checks++;
    if (!done) begin failures++; $display("FAIL no done for n=%0d", n); end
    checks++;
    if (got.size() != n || beats_covered != n) begin
      failures++;
      $display("FAIL n=%0d: got %0d elements, bursts cover %0d", n, got.size(), beats_covered);
    end
    for (int k = 0; k < got.size() && k < n; k++) begin
      checks++;
      if (got[k] !== u_mem.mem[addr / 2 + k]) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d element %0d", n, k);
      end
    end
    @(negedge clk);
    checks++;
    if (busy || err) begin failures++; $display("FAIL busy/err after done"); end
  endtask

  initial begin
    start = 0; base_addr = '0; n_elems = '0;
    for (int a = 0; a < 8192; a++) u_mem.mem[a] = 16'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    xfer(0, 0);
    xfer(0, 1);
    xfer(64, 15);
    xfer(96, 16);
    xfer(130, 17);
    xfer(4096 - 20, 100);   // straddles the 4 KiB boundary
    xfer(2, 300);
    xfer(8192 + 4096 - 2, 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
