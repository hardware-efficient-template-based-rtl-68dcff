// cnn_accel_top: tiled CNN accelerator for convolutional and fully-connected
// layers.
//
// The host processor splits a layer into tiles and issues one tile command at
// a time (cmd_valid / cmd_ready / cmd, see cnn_pkg::tile_cmd_t). For each
// tile the accelerator
//   1. loads the input tile through the data port and the weight tile
//      through the weight port into one bank of the ping-pong input and
//      weight buffers (convolution or FC set, by cmd.is_fc);
//   2. runs the tile on the MU x TAU compute unit, one MU-input by
//      TAU-output block product per cycle, into the output buffer;
//   3. if cmd.store is set, writes the output buffer back to DRAM through
//      the data port.
// The three steps of consecutive tiles overlap on opposite buffer banks.
//
// Structure (left to right as in the block diagram): data port and weight
// port -> memory-side interconnect -> six ping-pong buffers (input, weight
// and output, for convolution and for FC) -> compute-side interconnect ->
// compute unit; tile_scheduler controls all of them.
//
// External interfaces: two AXI4-style master ports with 16-bit data and byte
// addresses, m_data_* (read and write, feature maps) and m_wgt_* (read only,
// weights), both without IDs, one burst in flight per channel. The host's
// register interface is not modelled: the command is a plain struct port.
//
// Buffer sizes: input conv TROW*TCOL rows of MU; weight conv KMAX*KMAX rows of
// MU*TAU; output conv TROW*TCOL rows of TAU; input FC LAMBDA/MU rows of MU;
// weight FC (LAMBDA/MU)*(OMEGA/TAU) rows of MU*TAU; output FC OMEGA/TAU rows
// of TAU. LAMBDA must be a multiple of MU and OMEGA of TAU. The compute shape
// 12 x 24 is the Ultra96 configuration of the published design; TROW, TCOL,
// KMAX, LAMBDA and OMEGA are this design's choices.
module cnn_accel_top
  import cnn_pkg::*;
#(
  parameter int unsigned MU     = MU_DEF,
  parameter int unsigned TAU    = TAU_DEF,
  parameter int unsigned TROW   = TROW_DEF,
  parameter int unsigned TCOL   = TCOL_DEF,
  parameter int unsigned KMAX   = KMAX_DEF,
  parameter int unsigned LAMBDA = LAMBDA_DEF,
  parameter int unsigned OMEGA  = OMEGA_DEF
) (
  input  logic            clk,
  input  logic            rst_n,
  // host command
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  tile_cmd_t       cmd,
  output logic            idle,
  output logic            load_busy,
  output logic            comp_busy,
  output logic            store_busy,
  output logic            bus_err,
  // data port (feature maps)
  output logic            m_data_ar_valid,
  input  logic            m_data_ar_ready,
  output logic [AW-1:0]   m_data_ar_addr,
  output logic [7:0]      m_data_ar_len,
  input  logic            m_data_r_valid,
  output logic            m_data_r_ready,
  input  logic [DW-1:0]   m_data_r_data,
  input  logic [1:0]      m_data_r_resp,
  input  logic            m_data_r_last,
  output logic            m_data_aw_valid,
  input  logic            m_data_aw_ready,
  output logic [AW-1:0]   m_data_aw_addr,
  output logic [7:0]      m_data_aw_len,
  output logic            m_data_w_valid,
  input  logic            m_data_w_ready,
  output logic [DW-1:0]   m_data_w_data,
  output logic            m_data_w_last,
  input  logic            m_data_b_valid,
  output logic            m_data_b_ready,
  input  logic [1:0]      m_data_b_resp,
  // weight port
  output logic            m_wgt_ar_valid,
  input  logic            m_wgt_ar_ready,
  output logic [AW-1:0]   m_wgt_ar_addr,
  output logic [7:0]      m_wgt_ar_len,
  input  logic            m_wgt_r_valid,
  output logic            m_wgt_r_ready,
  input  logic [DW-1:0]   m_wgt_r_data,
  input  logic [1:0]      m_wgt_r_resp,
  input  logic            m_wgt_r_last
);

  localparam int unsigned D_TILE = TROW * TCOL;
  localparam int unsigned D_WC   = KMAX * KMAX;
  localparam int unsigned D_IFC  = LAMBDA / MU;
  localparam int unsigned D_WFC  = (LAMBDA / MU) * (OMEGA / TAU);
  localparam int unsigned D_OFC  = OMEGA / TAU;
  localparam int unsigned WMT    = MU * TAU;

  function automatic int unsigned cw(input int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

  localparam int unsigned R_TILE = cw(D_TILE);
  localparam int unsigned R_WC   = cw(D_WC);
  localparam int unsigned R_IFC  = cw(D_IFC);
  localparam int unsigned R_WFC  = cw(D_WFC);
  localparam int unsigned R_OFC  = cw(D_OFC);
  localparam int unsigned L_MU   = cw(MU);
  localparam int unsigned L_TAU  = cw(TAU);
  localparam int unsigned L_WMT  = cw(WMT);

  // ---------------- scheduler signals ----------------
  logic            rd_start, wt_start, ld_start, ld_fc, ld_bank;
  logic [AW-1:0]   rd_addr, wt_addr, wr_addr;
  logic [LENW-1:0] rd_n, wt_n, wr_n;
  logic            rd_done, wt_done, wr_done;
  logic            cu_fc, in_bank, out_bank;
  logic            in_re, w_re, ps_re;
  logic [15:0]     in_row, w_row, ps_row, res_row;
  logic            cu_valid, cu_first, cu_last, cu_acc_in, cu_out_valid, res_we;
  logic            st_start, st_fc, st_bank;
  logic [15:0]     st_rows;
  logic            wr_start;

  // ---------------- port <-> interconnect ----------------
  logic            din_valid, wgt_valid;
  logic [DW-1:0]   din_data, wgt_data;
  logic            o_valid, o_ready;
  logic [DW-1:0]   o_data;
  logic            rd_busy, rd_err, wr_busy, wr_err, wt_busy, wt_err;

  // ---------------- interconnect <-> buffers ----------------
  logic            in_we_conv, in_we_fc, w_we_conv, w_we_fc, ld_bank_o;
  logic [15:0]     ic_in_row, ic_in_lane, ic_w_row, ic_w_lane;
  logic [DW-1:0]   ic_in_wdata, ic_w_wdata;
  logic            st_busy, st_done, out_re_conv, out_re_fc, st_bank_o;
  logic [15:0]     ic_out_row, ic_out_lane;
  logic [DW-1:0]   out_rdata_conv, out_rdata_fc;

  // ---------------- buffers <-> compute ----------------
  logic [MU-1:0][DW-1:0]  in_conv_row, in_fc_row, cu_in;
  logic [WMT-1:0][DW-1:0] w_conv_row, w_fc_row, cu_w;
  logic [TAU-1:0][DW-1:0] ps_conv_row, ps_fc_row, cu_init, cu_out;
  logic                   we_conv, we_fc;

  tile_scheduler #(.MU(MU), .TAU(TAU)) u_sched (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd, .idle, .load_busy, .comp_busy, .store_busy,
    .rd_start, .rd_addr, .rd_n, .rd_done,
    .wt_start, .wt_addr, .wt_n, .wt_done,
    .ld_start, .ld_fc, .ld_bank,
    .cu_fc, .in_bank, .out_bank,
    .in_re, .in_row, .w_re, .w_row, .ps_re, .ps_row,
    .cu_valid, .cu_first, .cu_last, .cu_acc_in, .cu_out_valid,
    .res_we, .res_row,
    .st_start, .st_fc, .st_bank, .st_rows,
    .wr_start, .wr_addr, .wr_n, .wr_done
  );

  data_port u_data_port (
    .clk, .rst_n,
    .rd_start, .rd_addr, .rd_n, .rd_busy, .rd_done, .rd_err,
    .rd_valid(din_valid), .rd_data(din_data),
    .wr_start, .wr_addr, .wr_n, .wr_busy, .wr_done, .wr_err,
    .i_valid(o_valid), .i_ready(o_ready), .i_data(o_data),
    .ar_valid(m_data_ar_valid), .ar_ready(m_data_ar_ready),
    .ar_addr(m_data_ar_addr), .ar_len(m_data_ar_len),
    .r_valid(m_data_r_valid), .r_ready(m_data_r_ready), .r_data(m_data_r_data),
    .r_resp(m_data_r_resp), .r_last(m_data_r_last),
    .aw_valid(m_data_aw_valid), .aw_ready(m_data_aw_ready),
    .aw_addr(m_data_aw_addr), .aw_len(m_data_aw_len),
    .w_valid(m_data_w_valid), .w_ready(m_data_w_ready), .w_data(m_data_w_data),
    .w_last(m_data_w_last),
    .b_valid(m_data_b_valid), .b_ready(m_data_b_ready), .b_resp(m_data_b_resp)
  );

  burst_reader u_wgt_port (
    .clk, .rst_n,
    .start(wt_start), .base_addr(wt_addr), .n_elems(wt_n),
    .busy(wt_busy), .done(wt_done), .err(wt_err),
    .o_valid(wgt_valid), .o_data(wgt_data),
    .ar_valid(m_wgt_ar_valid), .ar_ready(m_wgt_ar_ready),
    .ar_addr(m_wgt_ar_addr), .ar_len(m_wgt_ar_len),
    .r_valid(m_wgt_r_valid), .r_ready(m_wgt_r_ready), .r_data(m_wgt_r_data),
    .r_resp(m_wgt_r_resp), .r_last(m_wgt_r_last)
  );

  assign bus_err = rd_err || wr_err || wt_err;

  mem_interconnect #(.MU(MU), .TAU(TAU)) u_mem_ic (
    .clk, .rst_n,
    .ld_start, .ld_fc, .ld_bank,
    .din_valid, .din_data, .wgt_valid, .wgt_data,
    .in_we_conv, .in_we_fc, .in_row(ic_in_row), .in_lane(ic_in_lane), .in_wdata(ic_in_wdata),
    .w_we_conv, .w_we_fc, .w_row(ic_w_row), .w_lane(ic_w_lane), .w_wdata(ic_w_wdata),
    .ld_bank_o,
    .st_start, .st_fc, .st_bank, .st_rows, .st_busy, .st_done,
    .out_re_conv, .out_re_fc, .out_row(ic_out_row), .out_lane(ic_out_lane),
    .out_rdata_conv, .out_rdata_fc, .st_bank_o,
    .o_valid, .o_ready, .o_data
  );

  // ---------------- the six ping-pong buffers ----------------
  // The weight buffers' row-write ports are unused; a zero row, written out
  // element by element, ties them off.
  logic [WMT-1:0][DW-1:0] zero_wrow;
  always_comb for (int k = 0; k < int'(WMT); k++) zero_wrow[k] = '0;

  pingpong_buffer #(.LANES(MU), .DEPTH(D_TILE)) u_in_conv (
    .clk,
    .a_bank(ld_bank_o), .a_we(in_we_conv), .a_re(1'b0),
    .a_row(ic_in_row[R_TILE-1:0]), .a_lane(ic_in_lane[L_MU-1:0]), .a_wdata(ic_in_wdata),
    .a_rdata(),
    .b_bank(in_bank), .b_re(in_re && !cu_fc), .b_row(in_row[R_TILE-1:0]), .b_rdata(in_conv_row),
    .b_we(1'b0), .b_wrow('0), .b_wdata('0)
  );

  pingpong_buffer #(.LANES(WMT), .DEPTH(D_WC)) u_w_conv (
    .clk,
    .a_bank(ld_bank_o), .a_we(w_we_conv), .a_re(1'b0),
    .a_row(ic_w_row[R_WC-1:0]), .a_lane(ic_w_lane[L_WMT-1:0]), .a_wdata(ic_w_wdata),
    .a_rdata(),
    .b_bank(in_bank), .b_re(w_re && !cu_fc), .b_row(w_row[R_WC-1:0]), .b_rdata(w_conv_row),
    .b_we(1'b0), .b_wrow('0), .b_wdata(zero_wrow)
  );

  pingpong_buffer #(.LANES(TAU), .DEPTH(D_TILE)) u_out_conv (
    .clk,
    .a_bank(st_bank_o), .a_we(1'b0), .a_re(out_re_conv),
    .a_row(ic_out_row[R_TILE-1:0]), .a_lane(ic_out_lane[L_TAU-1:0]), .a_wdata('0),
    .a_rdata(out_rdata_conv),
    .b_bank(out_bank), .b_re(ps_re && !cu_fc), .b_row(ps_row[R_TILE-1:0]), .b_rdata(ps_conv_row),
    .b_we(we_conv), .b_wrow(res_row[R_TILE-1:0]), .b_wdata(cu_out)
  );

  pingpong_buffer #(.LANES(MU), .DEPTH(D_IFC)) u_in_fc (
    .clk,
    .a_bank(ld_bank_o), .a_we(in_we_fc), .a_re(1'b0),
    .a_row(ic_in_row[R_IFC-1:0]), .a_lane(ic_in_lane[L_MU-1:0]), .a_wdata(ic_in_wdata),
    .a_rdata(),
    .b_bank(in_bank), .b_re(in_re && cu_fc), .b_row(in_row[R_IFC-1:0]), .b_rdata(in_fc_row),
    .b_we(1'b0), .b_wrow('0), .b_wdata('0)
  );

  pingpong_buffer #(.LANES(WMT), .DEPTH(D_WFC)) u_w_fc (
    .clk,
    .a_bank(ld_bank_o), .a_we(w_we_fc), .a_re(1'b0),
    .a_row(ic_w_row[R_WFC-1:0]), .a_lane(ic_w_lane[L_WMT-1:0]), .a_wdata(ic_w_wdata),
    .a_rdata(),
    .b_bank(in_bank), .b_re(w_re && cu_fc), .b_row(w_row[R_WFC-1:0]), .b_rdata(w_fc_row),
    .b_we(1'b0), .b_wrow('0), .b_wdata(zero_wrow)
  );

  pingpong_buffer #(.LANES(TAU), .DEPTH(D_OFC)) u_out_fc (
    .clk,
    .a_bank(st_bank_o), .a_we(1'b0), .a_re(out_re_fc),
    .a_row(ic_out_row[R_OFC-1:0]), .a_lane(ic_out_lane[L_TAU-1:0]), .a_wdata('0),
    .a_rdata(out_rdata_fc),
    .b_bank(out_bank), .b_re(ps_re && cu_fc), .b_row(ps_row[R_OFC-1:0]), .b_rdata(ps_fc_row),
    .b_we(we_fc), .b_wrow(res_row[R_OFC-1:0]), .b_wdata(cu_out)
  );

  // ---------------- compute side ----------------
  cu_interconnect #(.MU(MU), .TAU(TAU)) u_cu_ic (
    .sel_fc(cu_fc),
    .in_conv(in_conv_row), .in_fc(in_fc_row),
    .w_conv(w_conv_row), .w_fc(w_fc_row),
    .psum_conv(ps_conv_row), .psum_fc(ps_fc_row),
    .cu_in, .cu_w, .cu_init,
    .res_valid(res_we), .we_conv, .we_fc
  );

  compute_unit #(.MU(MU), .TAU(TAU)) u_cu (
    .clk, .rst_n,
    .in_valid(cu_valid), .first(cu_first), .last(cu_last), .acc_in(cu_acc_in),
    .in_vec(cu_in), .w(cu_w), .init(cu_init),
    .out_valid(cu_out_valid), .out_vec(cu_out)
  );

endmodule
