// cu_interconnect: interconnect between the buffers and the compute unit.
//
// The compute unit is shared by convolution and fully-connected layers, while
// each layer type has its own input, weight and output buffers. For the tile
// being computed (sel_fc), this block selects which input row, weight row and
// partial-sum row feed the compute unit, and raises the write enable of the
// matching output buffer when the compute unit delivers a result row. It is
// purely combinational; the buffers' read registers and the compute unit's
// output register give the pipeline its stages.
//
// The two sets of buffers and the single shared compute unit follow the
// published block diagram; the multiplexer form is this design's choice.
module cu_interconnect
  import cnn_pkg::*;
#(
  parameter int unsigned MU  = MU_DEF,
  parameter int unsigned TAU = TAU_DEF
) (
  input  logic                      sel_fc,
  // buffer rows
  input  logic [MU-1:0][DW-1:0]     in_conv,
  input  logic [MU-1:0][DW-1:0]     in_fc,
  input  logic [MU*TAU-1:0][DW-1:0] w_conv,
  input  logic [MU*TAU-1:0][DW-1:0] w_fc,
  input  logic [TAU-1:0][DW-1:0]    psum_conv,
  input  logic [TAU-1:0][DW-1:0]    psum_fc,
  // to the compute unit
  output logic [MU-1:0][DW-1:0]     cu_in,
  output logic [MU*TAU-1:0][DW-1:0] cu_w,
  output logic [TAU-1:0][DW-1:0]    cu_init,
  // result write-back
  input  logic                      res_valid,
  output logic                      we_conv,
  output logic                      we_fc
);

  always_comb begin
    if (sel_fc) begin
      cu_in   = in_fc;
      cu_w    = w_fc;
      cu_init = psum_fc;
    end else begin
      cu_in   = in_conv;
      cu_w    = w_conv;
      cu_init = psum_conv;
    end
    we_conv = res_valid && !sel_fc;
    we_fc   = res_valid &&  sel_fc;
  end

endmodule
