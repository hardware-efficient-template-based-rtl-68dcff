// data_port: memory-mapped burst master for feature maps (the data port).
//
// The data port both reads input feature maps from DRAM and writes output
// feature maps back. Its read half is a burst_reader. Its write half takes a
// start pulse, a byte address and an element count, and drains an element
// stream (i_valid / i_ready / i_data) into AXI4-style write bursts: an AW
// address beat, then up to MAX_BURST W beats with w_last on the final one,
// then the B response. Bursts never cross a 4 KiB boundary and one burst is in
// flight at a time. wr_done pulses after the last response; wr_err is set by
// a non-OKAY response. Reads and writes are independent and may overlap, as
// on an AXI port.
//
// Timing: one element per cycle within a burst when i_valid and w_ready are
// both high; per burst, one cycle for the address and one or more for the
// response.
//
// One read/write port for IFM and OFM and burst transfers follow the
// published design; bus width, single outstanding burst and the missing IDs
// are this design's choices.
module data_port
  import cnn_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  // read command and element stream
  input  logic            rd_start,
  input  logic [AW-1:0]   rd_addr,
  input  logic [LENW-1:0] rd_n,
  output logic            rd_busy,
  output logic            rd_done,
  output logic            rd_err,
  output logic            rd_valid,
  output logic [DW-1:0]   rd_data,
  // write command and element stream
  input  logic            wr_start,
  input  logic [AW-1:0]   wr_addr,
  input  logic [LENW-1:0] wr_n,
  output logic            wr_busy,
  output logic            wr_done,
  output logic            wr_err,
  input  logic            i_valid,
  output logic            i_ready,
  input  logic [DW-1:0]   i_data,
  // AXI4-style read channels
  output logic            ar_valid,
  input  logic            ar_ready,
  output logic [AW-1:0]   ar_addr,
  output logic [7:0]      ar_len,
  input  logic            r_valid,
  output logic            r_ready,
  input  logic [DW-1:0]   r_data,
  input  logic [1:0]      r_resp,
  input  logic            r_last,
  // AXI4-style write channels
  output logic            aw_valid,
  input  logic            aw_ready,
  output logic [AW-1:0]   aw_addr,
  output logic [7:0]      aw_len,
  output logic            w_valid,
  input  logic            w_ready,
  output logic [DW-1:0]   w_data,
  output logic            w_last,
  input  logic            b_valid,
  output logic            b_ready,
  input  logic [1:0]      b_resp
);

  burst_reader u_rd (
    .clk, .rst_n,
    .start(rd_start), .base_addr(rd_addr), .n_elems(rd_n),
    .busy(rd_busy), .done(rd_done), .err(rd_err),
    .o_valid(rd_valid), .o_data(rd_data),
    .ar_valid, .ar_ready, .ar_addr, .ar_len,
    .r_valid, .r_ready, .r_data, .r_resp, .r_last
  );

  // ---------------- write half ----------------
  typedef enum logic [1:0] {W_IDLE, W_ADDR, W_DATA, W_RESP} wstate_e;
  wstate_e wstate;

  logic [AW-1:0]   waddr;
  logic [LENW-1:0] wremaining;
  logic [8:0]      wbeats;
  logic [8:0]      wcount;        // beats left in the current burst
  logic [11:0]     wto_boundary;

  always_comb begin
    wto_boundary = 12'((13'h1000 - {1'b0, waddr[11:0]}) >> 1);
    wbeats = 9'(MAX_BURST);
    if (LENW'(wbeats) > wremaining) wbeats = 9'(wremaining);
    if ({3'b0, wbeats} > wto_boundary) wbeats = 9'(wto_boundary);
  end

  assign wr_busy = (wstate != W_IDLE);
  assign w_valid = (wstate == W_DATA) && i_valid;
  assign w_data  = i_data;
  assign w_last  = (wcount == 9'd1);
  assign i_ready = (wstate == W_DATA) && w_ready;
  assign b_ready = (wstate == W_RESP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wstate     <= W_IDLE;
      waddr      <= '0;
      wremaining <= '0;
      wcount     <= '0;
      aw_valid   <= 1'b0;
      aw_addr    <= '0;
      aw_len     <= '0;
      wr_done    <= 1'b0;
      wr_err     <= 1'b0;
    end else begin
      wr_done <= 1'b0;
      case (wstate)
        W_IDLE: if (wr_start) begin
          waddr      <= wr_addr;
          wremaining <= wr_n;
          wr_err     <= 1'b0;
          if (wr_n == '0) wr_done <= 1'b1;
          else            wstate  <= W_ADDR;
        end
        W_ADDR: begin
          if (!aw_valid) begin
            aw_valid   <= 1'b1;
            aw_addr    <= waddr;
            aw_len     <= 8'(wbeats - 9'd1);
            wcount     <= wbeats;
            waddr      <= waddr + AW'({wbeats, 1'b0});
            wremaining <= wremaining - LENW'(wbeats);
          end else if (aw_ready) begin
            aw_valid <= 1'b0;
            wstate   <= W_DATA;
          end
        end
        W_DATA: if (w_valid && w_ready) begin
          wcount <= wcount - 9'd1;
          if (w_last) wstate <= W_RESP;
        end
        W_RESP: if (b_valid) begin
          if (b_resp != 2'b00) wr_err <= 1'b1;
          if (wremaining == '0) begin
            wstate  <= W_IDLE;
            wr_done <= 1'b1;
          end else begin
            wstate <= W_ADDR;
          end
        end
        default: wstate <= W_IDLE;
      endcase
    end
  end

  a_aw_stable : assert property (@(posedge clk) disable iff (!rst_n)
    (aw_valid && !aw_ready) |=> (aw_valid && $stable(aw_addr) && $stable(aw_len)));
  a_w_stable : assert property (@(posedge clk) disable iff (!rst_n)
    (w_valid && !w_ready) |=> (w_valid && $stable(w_data)));

endmodule
