// cnn_pkg: types and constants shared by the tiled CNN accelerator.
//
// Numbers follow the 16-bit Q2.14 fixed-point format (2 integer bits, 14
// fraction bits). The default compute-unit shape mu x tau = 12 x 24 is the
// Ultra96 configuration; the tile sizes T, C, K, lambda and Omega are this
// design's own choices, since no values are published for them.
//
// A tile command (tile_cmd_t) is what the host processor hands to the
// accelerator: one convolution tile or one fully-connected tile, with the
// DRAM byte addresses of its input, weight and output data and the loop
// bounds of the tile.
package cnn_pkg;

  // Data format: Q2.14
  localparam int unsigned DW   = 16;
  localparam int unsigned FRAC = 14;

  // Defaults of the compute unit and buffers
  localparam int unsigned MU_DEF     = 12;   // input channels per cycle (mu)
  localparam int unsigned TAU_DEF    = 24;   // output channels per cycle (tau)
  localparam int unsigned TROW_DEF   = 14;   // tile rows (script T)
  localparam int unsigned TCOL_DEF   = 14;   // tile columns (fraktur C)
  localparam int unsigned KMAX_DEF   = 11;   // largest kernel side (K)
  localparam int unsigned LAMBDA_DEF = 576;  // FC input tile (lambda)
  localparam int unsigned OMEGA_DEF  = 96;   // FC output tile (Omega)

  // DRAM side
  localparam int unsigned AW       = 32;     // byte address width
  localparam int unsigned MAX_BURST = 16;    // beats per burst
  localparam int unsigned LENW     = 20;     // width of an element count

  typedef logic signed [DW-1:0] q214_t;

  // Buffer selector used by the memory-side interconnect
  typedef enum logic [2:0] {
    BUF_IN_CONV  = 3'd0,
    BUF_W_CONV   = 3'd1,
    BUF_OUT_CONV = 3'd2,
    BUF_IN_FC    = 3'd3,
    BUF_W_FC     = 3'd4,
    BUF_OUT_FC   = 3'd5
  } buf_sel_e;

  typedef struct packed {
    logic          is_fc;      // 0: convolution tile, 1: fully-connected tile
    logic          acc_in;     // add to the partial sums already in the output bank
    logic          store;      // write the output bank to DRAM after this tile
    logic [AW-1:0] ifm_addr;   // byte address of the input tile
    logic [AW-1:0] w_addr;     // byte address of the weight tile
    logic [AW-1:0] ofm_addr;   // byte address of the output tile
    logic [7:0]    in_rows;    // conv: rows of the input patch    (<= T)
    logic [7:0]    in_cols;    // conv: columns of the input patch (<= C)
    logic [7:0]    out_rows;   // conv: (in_rows - k) / stride + 1
    logic [7:0]    out_cols;   // conv: (in_cols - k) / stride + 1
    logic [3:0]    k;          // conv: kernel side (<= KMAX)
    logic [2:0]    stride;     // conv: stride (>= 1)
    logic [7:0]    n_in_chunks;  // fc: input neurons / mu  (<= lambda / mu)
    logic [7:0]    n_out_chunks; // fc: output neurons / tau (<= Omega / tau)
  } tile_cmd_t;

  // Saturate a wide signed value to Q2.14
  function automatic q214_t sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return v[DW-1:0];
  endfunction

endpackage
