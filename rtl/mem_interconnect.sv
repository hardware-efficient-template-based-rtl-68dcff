// mem_interconnect: interconnect between the two DRAM ports and the buffers.
//
// Load direction: the data port's read stream carries input neurons and the
// weight port's read stream carries weights. After ld_start the interconnect
// steers each stream into the convolution or fully-connected buffer (ld_fc)
// of bank ld_bank, turning the flat element order of DRAM into (row, lane)
// buffer coordinates: lanes count 0..MU-1 for input rows and 0..MU*TAU-1 for
// weight rows, then the row advances. DRAM therefore holds an input tile as
// rows of MU channels and a weight tile as rows of MU*TAU weights (input
// channel major, output channel minor).
//
// Store direction: after st_start the interconnect reads st_rows rows of TAU
// output neurons from the convolution or fully-connected output buffer (st_fc)
// of bank st_bank, element by element, and offers them to the data port's
// write stream (o_valid / o_ready / o_data), one per cycle when the port
// accepts. st_done pulses when the last element has been accepted.
//
// The interconnect's existence and position follow the published block
// diagram; its element ordering and handshakes are this design's choices.
module mem_interconnect
  import cnn_pkg::*;
#(
  parameter int unsigned MU  = MU_DEF,
  parameter int unsigned TAU = TAU_DEF
) (
  input  logic            clk,
  input  logic            rst_n,
  // load control
  input  logic            ld_start,
  input  logic            ld_fc,
  input  logic            ld_bank,
  // streams from the ports
  input  logic            din_valid,
  input  logic [DW-1:0]   din_data,
  input  logic            wgt_valid,
  input  logic [DW-1:0]   wgt_data,
  // writes into the input buffers (conv and FC share address and data)
  output logic            in_we_conv,
  output logic            in_we_fc,
  output logic [15:0]     in_row,
  output logic [15:0]     in_lane,
  output logic [DW-1:0]   in_wdata,
  // writes into the weight buffers
  output logic            w_we_conv,
  output logic            w_we_fc,
  output logic [15:0]     w_row,
  output logic [15:0]     w_lane,
  output logic [DW-1:0]   w_wdata,
  output logic            ld_bank_o,
  // store control
  input  logic            st_start,
  input  logic            st_fc,
  input  logic            st_bank,
  input  logic [15:0]     st_rows,
  output logic            st_busy,
  output logic            st_done,
  // reads from the output buffers
  output logic            out_re_conv,
  output logic            out_re_fc,
  output logic [15:0]     out_row,
  output logic [15:0]     out_lane,
  input  logic [DW-1:0]   out_rdata_conv,
  input  logic [DW-1:0]   out_rdata_fc,
  output logic            st_bank_o,
  // stream to the data port's write half
  output logic            o_valid,
  input  logic            o_ready,
  output logic [DW-1:0]   o_data
);

  // ---------------- load ----------------
  logic ld_fc_q, ld_bank_q;
  logic [15:0] irow, ilane, wrow, wlane;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_fc_q <= 1'b0; ld_bank_q <= 1'b0;
      irow <= '0; ilane <= '0; wrow <= '0; wlane <= '0;
    end else if (ld_start) begin
      ld_fc_q <= ld_fc; ld_bank_q <= ld_bank;
      irow <= '0; ilane <= '0; wrow <= '0; wlane <= '0;
    end else begin
      if (din_valid) begin
        if (ilane == 16'(MU - 1)) begin ilane <= '0; irow <= irow + 16'd1; end
        else ilane <= ilane + 16'd1;
      end
      if (wgt_valid) begin
        if (wlane == 16'(MU*TAU - 1)) begin wlane <= '0; wrow <= wrow + 16'd1; end
        else wlane <= wlane + 16'd1;
      end
    end
  end

  assign in_we_conv = din_valid && !ld_fc_q;
  assign in_we_fc   = din_valid &&  ld_fc_q;
  assign in_row     = irow;
  assign in_lane    = ilane;
  assign in_wdata   = din_data;
  assign w_we_conv  = wgt_valid && !ld_fc_q;
  assign w_we_fc    = wgt_valid &&  ld_fc_q;
  assign w_row      = wrow;
  assign w_lane     = wlane;
  assign w_wdata    = wgt_data;
  assign ld_bank_o  = ld_bank_q;

  // ---------------- store ----------------
  logic        st_fc_q, st_bank_q, st_active;
  logic [15:0] srow, slane, srows_q;
  logic        issue, last_issued, held;

  // issue a read when there is room: nothing held, or the held one leaves now
  assign issue = st_active && !last_issued && (!held || o_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_active <= 1'b0; st_fc_q <= 1'b0; st_bank_q <= 1'b0;
      srow <= '0; slane <= '0; srows_q <= '0;
      last_issued <= 1'b0; held <= 1'b0; st_done <= 1'b0;
    end else begin
      st_done <= 1'b0;
      if (st_start && !st_active) begin
        st_active   <= (st_rows != '0);
        st_done     <= (st_rows == '0);
        st_fc_q     <= st_fc;
        st_bank_q   <= st_bank;
        srows_q     <= st_rows;
        srow        <= '0;
        slane       <= '0;
        last_issued <= 1'b0;
        held        <= 1'b0;
      end else if (st_active) begin
        if (issue) begin
          if (slane == 16'(TAU - 1)) begin
            slane <= '0;
            srow  <= srow + 16'd1;
            if (srow == srows_q - 16'd1) last_issued <= 1'b1;
          end else begin
            slane <= slane + 16'd1;
          end
        end
        held <= issue || (held && !o_ready);
        if (last_issued && held && o_ready) begin
          st_active <= 1'b0;
          st_done   <= 1'b1;
        end
      end
    end
  end

  assign st_busy     = st_active;
  assign out_re_conv = issue && !st_fc_q;
  assign out_re_fc   = issue &&  st_fc_q;
  assign out_row     = srow;
  assign out_lane    = slane;
  assign st_bank_o   = st_bank_q;
  assign o_valid     = held;
  assign o_data      = st_fc_q ? out_rdata_fc : out_rdata_conv;

endmodule
