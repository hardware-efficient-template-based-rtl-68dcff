// burst_reader: memory-mapped burst read master (the weight port).
//
// Given a start pulse, a byte address and a number of 16-bit elements, the
// reader fetches the elements from DRAM over the read channels of an AXI4
// style interface (AR address channel, R data channel) and hands each element
// to the on-chip side as a one-cycle o_valid pulse. It splits the transfer into
// incrementing bursts of at most MAX_BURST beats that never cross a 4 KiB
// boundary, with one burst outstanding at a time. done pulses for one cycle
// after the last element; err is set if any beat returned a non-OKAY response
// and stays set until the next start.
//
// Timing: one element per cycle while R beats arrive back to back; one idle
// cycle between bursts for the next address handshake.
//
// Burst transfers over a memory-mapped master port follow the published
// design. The 16-bit data bus, the single outstanding burst and the absence
// of IDs are this design's choices. The same module is the read half of the
// data port.
module burst_reader
  import cnn_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  // command
  input  logic            start,
  input  logic [AW-1:0]   base_addr,
  input  logic [LENW-1:0] n_elems,
  output logic            busy,
  output logic            done,
  output logic            err,
  // element stream to the on-chip side
  output logic            o_valid,
  output logic [DW-1:0]   o_data,
  // AXI4-style read address channel
  output logic            ar_valid,
  input  logic            ar_ready,
  output logic [AW-1:0]   ar_addr,
  output logic [7:0]      ar_len,
  // AXI4-style read data channel
  input  logic            r_valid,
  output logic            r_ready,
  input  logic [DW-1:0]   r_data,
  input  logic [1:0]      r_resp,
  input  logic            r_last
);

  typedef enum logic [1:0] {S_IDLE, S_ADDR, S_DATA} state_e;
  state_e state;

  logic [AW-1:0]   addr;
  logic [LENW-1:0] remaining;
  logic [8:0]      beats;        // beats of the burst being set up
  logic [11:0]     to_boundary;  // beats left before the next 4 KiB boundary

  always_comb begin
    to_boundary = 12'((13'h1000 - {1'b0, addr[11:0]}) >> 1);
    beats = 9'(MAX_BURST);
    if (LENW'(beats) > remaining) beats = 9'(remaining);
    if ({3'b0, beats} > to_boundary) beats = 9'(to_boundary);
  end

  assign busy    = (state != S_IDLE);
  assign r_ready = (state == S_DATA);
  assign o_valid = r_valid && r_ready;
  assign o_data  = r_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      addr      <= '0;
      remaining <= '0;
      ar_valid  <= 1'b0;
      ar_addr   <= '0;
      ar_len    <= '0;
      done      <= 1'b0;
      err       <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          addr      <= base_addr;
          remaining <= n_elems;
          err       <= 1'b0;
          if (n_elems == '0) done  <= 1'b1;
          else               state <= S_ADDR;
        end
        S_ADDR: begin
          if (!ar_valid) begin
            ar_valid <= 1'b1;
            ar_addr  <= addr;
            ar_len   <= 8'(beats - 9'd1);
            addr      <= addr + AW'({beats, 1'b0});
            remaining <= remaining - LENW'(beats);
          end else if (ar_ready) begin
            ar_valid <= 1'b0;
            state    <= S_DATA;
          end
        end
        S_DATA: if (r_valid) begin
          if (r_resp != 2'b00) err <= 1'b1;
          if (r_last) begin
            if (remaining == '0) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              state <= S_ADDR;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI rule: the address stays stable until it is accepted
  a_ar_stable : assert property (@(posedge clk) disable iff (!rst_n)
    (ar_valid && !ar_ready) |=> (ar_valid && $stable(ar_addr) && $stable(ar_len)));

endmodule
