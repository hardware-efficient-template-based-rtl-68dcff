// pingpong_buffer: a double-banked (ping-pong) on-chip buffer.
//
// All six on-chip buffers of the accelerator (convolution and fully-connected
// input, weight and output buffers) are instances of this module with
// different shapes. Each bank holds DEPTH rows of LANES 16-bit elements. A row
// is what the compute unit consumes or produces in one cycle: MU input
// neurons, MU*TAU weights or TAU output neurons. Because the two sides of the
// buffer work on opposite banks, the DRAM side can fill (or drain) one bank
// while the compute unit works on the other, which is the ping-pong transfer
// of the published design.
//
// Port A (DRAM side, one element per cycle):
//   a_we writes a_wdata to element a_lane of row a_row in bank a_bank;
//   a_re reads element a_lane of row a_row; a_rdata is valid the next cycle
//   and holds until the next a_re.
// Port B (compute side, one whole row per cycle):
//   b_re reads row b_row of bank b_bank; b_rdata is valid the next cycle and
//   holds until the next b_re. b_we writes the whole row b_wdata to b_wrow.
// The assertion checks the ping-pong rule: the two ports never touch the same
// bank in the same cycle.
//
// Splitting each buffer into rows of MU or TAU parallel elements follows the
// published partitioning of the buffers; the two-port organisation and the
// registered reads are this design's choices.
module pingpong_buffer
  import cnn_pkg::*;
#(
  parameter int unsigned LANES = MU_DEF,
  parameter int unsigned DEPTH = TROW_DEF * TCOL_DEF,
  localparam int unsigned RW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LW = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                     clk,
  // port A: element access from the DRAM side
  input  logic                     a_bank,
  input  logic                     a_we,
  input  logic                     a_re,
  input  logic [RW-1:0]            a_row,
  input  logic [LW-1:0]            a_lane,
  input  logic [DW-1:0]            a_wdata,
  output logic [DW-1:0]            a_rdata,
  // port B: row access from the compute side
  input  logic                     b_bank,
  input  logic                     b_re,
  input  logic [RW-1:0]            b_row,
  output logic [LANES-1:0][DW-1:0] b_rdata,
  input  logic                     b_we,
  input  logic [RW-1:0]            b_wrow,
  input  logic [LANES-1:0][DW-1:0] b_wdata
);

  logic [LANES-1:0][DW-1:0] mem0 [DEPTH];
  logic [LANES-1:0][DW-1:0] mem1 [DEPTH];

  always_ff @(posedge clk) begin
    if (a_we) begin
      if (a_bank) mem1[a_row][a_lane] <= a_wdata;
      else        mem0[a_row][a_lane] <= a_wdata;
    end
    if (b_we) begin
      if (b_bank) mem1[b_wrow] <= b_wdata;
      else        mem0[b_wrow] <= b_wdata;
    end
    if (a_re) a_rdata <= a_bank ? mem1[a_row][a_lane] : mem0[a_row][a_lane];
    if (b_re) b_rdata <= b_bank ? mem1[b_row] : mem0[b_row];
  end

  a_pingpong : assert property (@(posedge clk)
    ((a_we || a_re) && (b_we || b_re)) |-> (a_bank != b_bank))
    else $error("pingpong_buffer: both ports on bank %0d", a_bank);

endmodule
