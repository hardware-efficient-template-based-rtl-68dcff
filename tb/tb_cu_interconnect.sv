// tb_cu_interconnect: self-checking test of the compute-side interconnect.
//
// With MU = 2 and TAU = 3, random buffer rows are applied with sel_fc low and
// high; the compute-unit operands must come from the convolution buffers in
// the first case and from the FC buffers in the second, and a result must
// raise only the write enable of the matching output buffer.
module tb_cu_interconnect;
  import cnn_pkg::*;

  localparam int unsigned MU = 2, TAU = 3;

  logic sel_fc, res_valid, we_conv, we_fc;
  logic [MU-1:0][DW-1:0]     in_conv, in_fc, cu_in;
  logic [MU*TAU-1:0][DW-1:0] w_conv, w_fc, cu_w;
  logic [TAU-1:0][DW-1:0]    psum_conv, psum_fc, cu_init;

  cu_interconnect #(.MU(MU), .TAU(TAU)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int k = 0; k < MU; k++) begin in_conv[k] = 16'($urandom); in_fc[k] = 16'($urandom); end
      for (int k = 0; k < MU * TAU; k++) begin w_conv[k] = 16'($urandom); w_fc[k] = 16'($urandom); end
      for (int k = 0; k < TAU; k++) begin psum_conv[k] = 16'($urandom); psum_fc[k] = 16'($urandom); end
      sel_fc = t[0];
      res_valid = t[1];
      #1;
      checks++;
      if (sel_fc) begin
        if (cu_in !== in_fc || cu_w !== w_fc || cu_init !== psum_fc) begin
          failures++; $display("FAIL fc operands at %0d", t);
        end
      end else begin
        if (cu_in !== in_conv || cu_w !== w_conv || cu_init !== psum_conv) begin
          failures++; $display("FAIL conv operands at %0d", t);
        end
      end
      checks++;
      if (we_conv !== (res_valid && !sel_fc) || we_fc !== (res_valid && sel_fc)) begin
        failures++; $display("FAIL write enables at %0d", t);
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
