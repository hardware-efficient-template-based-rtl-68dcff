// compute_unit: the mu x tau dot-product array of the accelerator.
//
// Every cycle in which in_valid is high, the unit multiplies a vector of MU
// input neurons by an MU x TAU block of weights and adds, for each of the TAU
// output channels, the MU products to that channel's accumulator. A convolution
// pixel takes K*K such cycles (one per kernel position), a fully-connected
// output chunk takes one cycle per input chunk of MU neurons. The same array
// serves both layer types, which is the central idea of the design.
//
// Interface
//   in_vec[ci]          input neuron ci (Q2.14)
//   w[ci*TAU + co]      weight from input ci to output co (Q2.14)
//   first               this beat starts a new sum; the accumulator is loaded
//                       with init (when acc_in is set) or with zero
//   last                this beat ends the sum; the result is produced
//   init[co], acc_in    a partial sum from an earlier input-channel tile
//   out_valid, out_vec  one cycle after a beat with last: the TAU sums,
//                       shifted back to Q2.14 (arithmetic shift, truncation)
//                       and saturated to 16 bits.
// Timing: one beat per cycle, result registered one cycle after the last beat.
//
// The mu x tau shape and the Q2.14 data follow the published design. The
// 48-bit accumulator, truncating rounding and saturation are this design's
// choices.
module compute_unit
  import cnn_pkg::*;
#(
  parameter int unsigned MU  = MU_DEF,
  parameter int unsigned TAU = TAU_DEF
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic                        first,
  input  logic                        last,
  input  logic                        acc_in,
  input  logic [MU-1:0][DW-1:0]       in_vec,
  input  logic [MU*TAU-1:0][DW-1:0]   w,
  input  logic [TAU-1:0][DW-1:0]      init,
  output logic                        out_valid,
  output logic [TAU-1:0][DW-1:0]      out_vec
);

  logic signed [47:0] acc [TAU];
  logic signed [47:0] nxt [TAU];

  always_comb begin
    for (int co = 0; co < TAU; co++) begin
      logic signed [47:0] s;
      if (!first)
        s = acc[co];
      else if (acc_in)
        s = 48'(signed'(init[co])) <<< FRAC;
      else
        s = '0;
      for (int ci = 0; ci < MU; ci++)
        s += 48'(signed'(in_vec[ci]) * signed'(w[ci*TAU + co]));
      nxt[co] = s;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_vec   <= '0;
      for (int co = 0; co < TAU; co++) acc[co] <= '0;
    end else begin
      out_valid <= in_valid && last;
      if (in_valid) begin
        for (int co = 0; co < TAU; co++) acc[co] <= nxt[co];
        if (last)
          for (int co = 0; co < TAU; co++) out_vec[co] <= sat16(nxt[co] >>> FRAC);
      end
    end
  end

endmodule
