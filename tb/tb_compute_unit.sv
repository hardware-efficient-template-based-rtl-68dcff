// tb_compute_unit: self-checking test of the mu x tau dot-product array.
//
// Runs the default 12 x 24 array through random sums of 1 to 9 beats, with
// and without an initial partial sum, and compares every output with an
// independent model: exact integer sum of products, plus init shifted left by
// 14 when acc_in is set, arithmetic shift right by 14, saturation to 16
// bits. Also checks that a result appears exactly one cycle after the last
// beat, that bubbles (in_valid low) between beats do not disturb the sum, and
// that large operands saturate.
module tb_compute_unit;
  import cnn_pkg::*;

  localparam int unsigned MU = MU_DEF, TAU = TAU_DEF;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, first, last, acc_in, out_valid;
  logic [MU-1:0][DW-1:0]     in_vec;
  logic [MU*TAU-1:0][DW-1:0] w;
  logic [TAU-1:0][DW-1:0]    init, out_vec;

  compute_unit #(.MU(MU), .TAU(TAU)) dut (.*);

  int checks = 0, failures = 0, sats = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  longint ref_sum [TAU];

  task automatic beat(input bit f, input bit l, input int big);
    for (int ci = 0; ci < MU; ci++)
      in_vec[ci] = 16'(int'($urandom_range(0, 2 * big)) - big);
    for (int k = 0; k < MU * TAU; k++)
      w[k] = 16'(int'($urandom_range(0, 2 * big)) - big);
    for (int co = 0; co < TAU; co++)
      for (int ci = 0; ci < MU; ci++)
        ref_sum[co] += longint'(signed'(in_vec[ci])) * longint'(signed'(w[ci * TAU + co]));
    in_valid = 1'b1; first = f; last = l;
    @(posedge clk); #1;
    in_valid = 1'b0; first = 1'b0; last = 1'b0;
  endtask

  initial begin
    in_valid = 0; first = 0; last = 0; acc_in = 0; in_vec = '0; w = '0; init = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 60; t++) begin
      automatic int nb  = int'($urandom_range(1, 9));
      automatic int big = (t % 5 == 4) ? 32767 : 4096;
      acc_in = 1'($urandom_range(0, 1));
      for (int co = 0; co < TAU; co++) begin
        init[co] = 16'($urandom_range(0, 65535));
        ref_sum[co] = acc_in ? (longint'(signed'(init[co])) <<< 14) : 0;
      end
      for (int b = 0; b < nb; b++) begin
        beat(b == 0, b == nb - 1, big);
        if (b != nb - 1 && $urandom_range(0, 2) == 0) begin
          // bubble: nothing must change
          @(posedge clk); #1;
        end
        if (b == 0) init = '0 - 1;   // init only matters on the first beat
      end
      // result must be visible right after the edge that followed the last beat
      checks++;
      if (!out_valid) begin failures++; $display("FAIL no out_valid after last beat"); end
      for (int co = 0; co < TAU; co++) begin
        automatic int exp = sat(ref_sum[co] >>> 14);
        checks++;
        if (exp == 32767 || exp == -32768) sats++;
        if (int'(signed'(out_vec[co])) != exp) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d co=%0d got %0d exp %0d", t, co, signed'(out_vec[co]), exp);
        end
      end
      @(posedge clk); #1;
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid longer than one cycle"); end
    end
    checks++;
    if (sats == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
