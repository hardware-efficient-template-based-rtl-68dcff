// axi_mem_model: behavioural DRAM for the testbenches (not synthesizable).
//
// A word-addressed memory of WORDS 16-bit words behind the two AXI4-style
// master ports of the accelerator: the data port (read and write channels)
// and the weight port (read channels). Byte address a maps to word a/2.
// Ready and valid signals of the memory side are driven at random when
// STALL is set (about one cycle in four is a stall), so that the masters'
// handshakes are exercised. Bursts are served one at a time per channel.
// The testbench reads and writes the array mem directly to load inputs and
// check results.
module axi_mem_model
  import cnn_pkg::*;
#(
  parameter int unsigned WORDS = 65536,
  parameter bit          STALL = 1'b1
) (
  input  logic          clk,
  input  logic          rst_n,
  // data port, read
  input  logic          d_ar_valid,
  output logic          d_ar_ready,
  input  logic [AW-1:0] d_ar_addr,
  input  logic [7:0]    d_ar_len,
  output logic          d_r_valid,
  input  logic          d_r_ready,
  output logic [DW-1:0] d_r_data,
  output logic [1:0]    d_r_resp,
  output logic          d_r_last,
  // data port, write
  input  logic          d_aw_valid,
  output logic          d_aw_ready,
  input  logic [AW-1:0] d_aw_addr,
  input  logic [7:0]    d_aw_len,
  input  logic          d_w_valid,
  output logic          d_w_ready,
  input  logic [DW-1:0] d_w_data,
  input  logic          d_w_last,
  output logic          d_b_valid,
  input  logic          d_b_ready,
  output logic [1:0]    d_b_resp,
  // weight port, read
  input  logic          g_ar_valid,
  output logic          g_ar_ready,
  input  logic [AW-1:0] g_ar_addr,
  input  logic [7:0]    g_ar_len,
  output logic          g_r_valid,
  input  logic          g_r_ready,
  output logic [DW-1:0] g_r_data,
  output logic [1:0]    g_r_resp,
  output logic          g_r_last
);

  logic [DW-1:0] mem [WORDS];

  int unsigned bursts_rd, bursts_wr, stalls;

  function automatic logic coin();
    return !STALL || (($urandom % 4) != 0);
  endfunction

  // ---------- data port read ----------
  logic        d_rbusy;
  int unsigned d_raddr, d_rleft;
  assign d_r_resp = 2'b00;
  assign g_r_resp = 2'b00;
  assign d_b_resp = 2'b00;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_rbusy <= 0; d_ar_ready <= 0; d_r_valid <= 0; d_r_last <= 0; d_r_data <= '0;
      d_raddr <= 0; d_rleft <= 0; bursts_rd <= 0; stalls <= 0;
    end else begin
      if (!d_rbusy) begin
        d_r_valid  <= 0;
        d_ar_ready <= coin();
        if (d_ar_valid && d_ar_ready) begin
          d_rbusy    <= 1;
          d_ar_ready <= 0;
          d_raddr    <= d_ar_addr / 2;
          d_rleft    <= int'(d_ar_len) + 1;
          bursts_rd  <= bursts_rd + 1;
        end
      end else begin
        if (!d_r_valid || d_r_ready) begin
          if (d_r_valid && d_r_last) begin
            d_r_valid <= 0; d_rbusy <= 0;
          end else if (d_rleft != 0 && coin()) begin
            d_r_valid <= 1;
            d_r_data  <= mem[d_raddr % WORDS];
            d_r_last  <= (d_rleft == 1);
            d_raddr   <= d_raddr + 1;
            d_rleft   <= d_rleft - 1;
          end else begin
            d_r_valid <= 0;
            if (d_rleft != 0) stalls <= stalls + 1;
          end
        end
      end
    end
  end

  // ---------- weight port read ----------
  logic        g_rbusy;
  int unsigned g_raddr, g_rleft;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_rbusy <= 0; g_ar_ready <= 0; g_r_valid <= 0; g_r_last <= 0; g_r_data <= '0;
      g_raddr <= 0; g_rleft <= 0;
    end else begin
      if (!g_rbusy) begin
        g_r_valid  <= 0;
        g_ar_ready <= coin();
        if (g_ar_valid && g_ar_ready) begin
          g_rbusy    <= 1;
          g_ar_ready <= 0;
          g_raddr    <= g_ar_addr / 2;
          g_rleft    <= int'(g_ar_len) + 1;
        end
      end else begin
        if (!g_r_valid || g_r_ready) begin
          if (g_r_valid && g_r_last) begin
            g_r_valid <= 0; g_rbusy <= 0;
          end else if (g_rleft != 0 && coin()) begin
            g_r_valid <= 1;
            g_r_data  <= mem[g_raddr % WORDS];
            g_r_last  <= (g_rleft == 1);
            g_raddr   <= g_raddr + 1;
            g_rleft   <= g_rleft - 1;
          end else begin
            g_r_valid <= 0;
          end
        end
      end
    end
  end

  // ---------- data port write ----------
  typedef enum logic [1:0] {WI, WD, WB} ws_e;
  ws_e         ws;
  int unsigned d_waddr;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws <= WI; d_aw_ready <= 0; d_w_ready <= 0; d_b_valid <= 0; d_waddr <= 0; bursts_wr <= 0;
    end else begin
      case (ws)
        WI: begin
          d_aw_ready <= coin();
          if (d_aw_valid && d_aw_ready) begin
            d_aw_ready <= 0;
            d_waddr    <= d_aw_addr / 2;
            ws         <= WD;
            d_w_ready  <= coin();
            bursts_wr  <= bursts_wr + 1;
          end
        end
        WD: begin
          if (d_w_valid && d_w_ready) begin
            mem[d_waddr % WORDS] <= d_w_data;
            d_waddr <= d_waddr + 1;
            if (d_w_last) begin
              ws        <= WB;
              d_w_ready <= 0;
              d_b_valid <= 1;
            end else d_w_ready <= coin();
          end else d_w_ready <= coin();
        end
        WB: if (d_b_ready) begin
          d_b_valid <= 0;
          ws        <= WI;
        end
        default: ws <= WI;
      endcase
    end
  end

endmodule
