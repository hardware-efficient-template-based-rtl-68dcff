// tb_pingpong_buffer: self-checking test of the double-banked buffer.
//
// With LANES = 5 and DEPTH = 12, the test fills bank 0 element by element
// through port A, then reads it back row by row through port B while port A
// fills bank 1 with different data in the same cycles (the ping-pong case).
// It then writes whole rows into bank 0 through port B while port A reads
// bank 1 element by element, and finally reads bank 0 elements through
// port A. Every read is compared with a shadow copy kept by the testbench,
// one cycle after the read is issued; held read data is checked too.
module tb_pingpong_buffer;
  import cnn_pkg::*;

  localparam int unsigned LANES = 5, DEPTH = 12;
  localparam int unsigned RW = $clog2(DEPTH), LW = $clog2(LANES);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic a_bank, a_we, a_re, b_bank, b_re, b_we;
  logic [RW-1:0] a_row, b_row, b_wrow;
  logic [LW-1:0] a_lane;
  logic [DW-1:0] a_wdata, a_rdata;
  logic [LANES-1:0][DW-1:0] b_rdata, b_wdata;

  pingpong_buffer #(.LANES(LANES), .DEPTH(DEPTH)) dut (.*);

  logic [DW-1:0] shadow [2][DEPTH][LANES];
  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle_ports();
    a_we = 0; a_re = 0; b_we = 0; b_re = 0;
  endtask

  initial begin
    idle_ports();
    a_bank = 0; b_bank = 1; a_row = '0; b_row = '0; b_wrow = '0; a_lane = '0;
    a_wdata = '0; b_wdata = '0;
    @(negedge clk);
    // 1. fill bank 0 through port A
    for (int r = 0; r < DEPTH; r++)
      for (int l = 0; l < LANES; l++) begin
        a_bank = 0; a_we = 1; a_row = RW'(r); a_lane = LW'(l);
        a_wdata = 16'($urandom); shadow[0][r][l] = a_wdata;
        @(negedge clk);
      end
    idle_ports();
    // 2. read bank 0 rows on B while A writes bank 1
    for (int r = 0; r < DEPTH; r++) begin
      b_bank = 0; b_re = 1; b_row = RW'(r);
      for (int l = 0; l < LANES; l++) begin
        a_bank = 1; a_we = 1; a_row = RW'(r); a_lane = LW'(l);
        a_wdata = 16'($urandom); shadow[1][r][l] = a_wdata;
        @(negedge clk);
        b_re = 0;
        for (int k = 0; k < LANES; k++) begin   // valid, then held
          checks++;
          if (b_rdata[k] !== shadow[0][r][k]) begin
            failures++;
            $display("FAIL B read bank0 row %0d lane %0d", r, k);
          end
        end
      end
    end
    idle_ports();
    // 3. B writes bank 0 rows while A reads bank 1 elements
    for (int r = 0; r < DEPTH; r++) begin
      b_bank = 0; b_we = 1; b_wrow = RW'(DEPTH - 1 - r);
      for (int k = 0; k < LANES; k++) begin
        b_wdata[k] = 16'($urandom);
        shadow[0][DEPTH - 1 - r][k] = b_wdata[k];
      end
      for (int l = 0; l < LANES; l++) begin
        a_bank = 1; a_re = 1; a_row = RW'(r); a_lane = LW'(l);
        @(negedge clk);
        b_we = 0;
        checks++;
        if (a_rdata !== shadow[1][r][l]) begin
          failures++;
          $display("FAIL A read bank1 row %0d lane %0d", r, l);
        end
      end
    end
    idle_ports();
    // 4. A reads bank 0 (written as rows)
    for (int r = 0; r < DEPTH; r++)
      for (int l = 0; l < LANES; l++) begin
        a_bank = 0; a_re = 1; a_row = RW'(r); a_lane = LW'(l);
        @(negedge clk);
        a_re = 0;
        @(negedge clk);   // data must hold while a_re is low
        checks++;
        if (a_rdata !== shadow[0][r][l]) begin
          failures++;
          $display("FAIL A read bank0 row %0d lane %0d", r, l);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
