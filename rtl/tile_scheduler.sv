// tile_scheduler: control of the accelerator (the scheduling mechanism).
//
// The scheduler accepts tile commands from the host and runs three engines
// that work concurrently on different banks of the ping-pong buffers:
//
//   load     fetches the input tile through the data port and, at the same
//            time, the weight tile through the weight port into input bank lb;
//   compute  walks the tile's loops, reading one input row (MU neurons) and
//            one weight row (MU x TAU) per cycle from input bank cb and
//            writing TAU results per finished output into output bank ob;
//   store    writes a finished output bank sb back to DRAM through the data
//            port.
//
// A bank flag in_full[b] marks an input bank that is loaded and not yet
// computed, out_full[b] an output bank that is computed and not yet stored.
// Load waits for an empty input bank, compute for a full input bank and an
// empty output bank, store for a full output bank, so that loading tile n+1
// and storing tile n-1 overlap computing tile n.
//
// Compute loop order. Convolution (Fig. 4 order): for each output row r and
// column c, for each kernel position (i, j): input row (s*r+i)*in_cols +
// (s*c+j), weight row i*k+j; the sum starts at (0,0) and ends at (k-1,k-1),
// so one output pixel of TAU channels takes k*k cycles. Fully connected
// (Fig. 5): for each output chunk o of TAU neurons, for each input chunk ch of
// MU neurons: input row ch, weight row o*n_in_chunks+ch; one output chunk
// takes n_in_chunks cycles. A command with acc_in adds its sums to the
// partial sums already in the output bank (input-channel tiling); a command
// with store releases the output bank to the store engine.
//
// Timing: buffer reads are registered, so the compute unit sees a beat one
// cycle after the scheduler issues it and a result row is written two cycles
// after the last beat of its sum. A convolution tile computes in
// out_rows*out_cols*k*k cycles plus a three-cycle drain; an FC tile in
// n_out_chunks*n_in_chunks cycles plus the drain.
//
// The loop orders and the ping-pong scheme follow the published dataflow;
// the command format, the bank flags and the handshakes are this design's.
module tile_scheduler
  import cnn_pkg::*;
#(
  parameter int unsigned MU  = MU_DEF,
  parameter int unsigned TAU = TAU_DEF
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
  // load: data port read, weight port read, memory interconnect
  output logic            rd_start,
  output logic [AW-1:0]   rd_addr,
  output logic [LENW-1:0] rd_n,
  input  logic            rd_done,
  output logic            wt_start,
  output logic [AW-1:0]   wt_addr,
  output logic [LENW-1:0] wt_n,
  input  logic            wt_done,
  output logic            ld_start,
  output logic            ld_fc,
  output logic            ld_bank,
  // compute: buffer reads, compute unit control, result write
  output logic            cu_fc,
  output logic            in_bank,
  output logic            out_bank,
  output logic            in_re,
  output logic [15:0]     in_row,
  output logic            w_re,
  output logic [15:0]     w_row,
  output logic            ps_re,
  output logic [15:0]     ps_row,
  output logic            cu_valid,
  output logic            cu_first,
  output logic            cu_last,
  output logic            cu_acc_in,
  input  logic            cu_out_valid,
  output logic            res_we,
  output logic [15:0]     res_row,
  // store: memory interconnect and data port write
  output logic            st_start,
  output logic            st_fc,
  output logic            st_bank,
  output logic [15:0]     st_rows,
  output logic            wr_start,
  output logic [AW-1:0]   wr_addr,
  output logic [LENW-1:0] wr_n,
  input  logic            wr_done
);

  // ---------------- bank bookkeeping ----------------
  logic      lb, cb, ob, sb;
  logic [1:0] in_full, out_full;
  tile_cmd_t bcmd [2];   // command that loaded input bank b
  tile_cmd_t scmd [2];   // command whose results sit in output bank b
  logic      set_in, clr_in, set_out, clr_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_full  <= '0;
      out_full <= '0;
    end else begin
      if (set_in)  in_full[lb]  <= 1'b1;
      if (clr_in)  in_full[cb]  <= 1'b0;
      if (set_out) out_full[ob] <= 1'b1;
      if (clr_out) out_full[sb] <= 1'b0;
    end
  end

  // ---------------- load engine ----------------
  typedef enum logic [1:0] {L_IDLE, L_BUSY} lstate_e;
  lstate_e   lstate;
  tile_cmd_t lcmd;
  logic      got_rd, got_wt;

  assign cmd_ready = (lstate == L_IDLE) && !in_full[lb];
  assign set_in    = (lstate == L_BUSY) && (got_rd || rd_done) && (got_wt || wt_done);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lstate <= L_IDLE; lcmd <= '0; lb <= 1'b0;
      got_rd <= 1'b0; got_wt <= 1'b0;
      rd_start <= 1'b0; wt_start <= 1'b0; ld_start <= 1'b0;
      rd_addr <= '0; rd_n <= '0; wt_addr <= '0; wt_n <= '0;
      ld_fc <= 1'b0; ld_bank <= 1'b0;
      bcmd[0] <= '0; bcmd[1] <= '0;
    end else begin
      rd_start <= 1'b0; wt_start <= 1'b0; ld_start <= 1'b0;
      case (lstate)
        L_IDLE: if (cmd_valid && cmd_ready) begin
          lcmd     <= cmd;
          rd_start <= 1'b1;
          wt_start <= 1'b1;
          ld_start <= 1'b1;
          ld_fc    <= cmd.is_fc;
          ld_bank  <= lb;
          rd_addr  <= cmd.ifm_addr;
          wt_addr  <= cmd.w_addr;
          if (cmd.is_fc) begin
            rd_n <= LENW'(cmd.n_in_chunks * MU);
            wt_n <= LENW'(cmd.n_in_chunks * cmd.n_out_chunks * MU * TAU);
          end else begin
            rd_n <= LENW'(cmd.in_rows * cmd.in_cols * MU);
            wt_n <= LENW'(cmd.k * cmd.k * MU * TAU);
          end
          got_rd <= 1'b0;
          got_wt <= 1'b0;
          lstate <= L_BUSY;
        end
        L_BUSY: begin
          if (rd_done) got_rd <= 1'b1;
          if (wt_done) got_wt <= 1'b1;
          if (set_in) begin
            bcmd[lb] <= lcmd;
            lb       <= ~lb;
            lstate   <= L_IDLE;
          end
        end
        default: lstate <= L_IDLE;
      endcase
    end
  end

  // ---------------- compute engine ----------------
  typedef enum logic [1:0] {C_IDLE, C_RUN, C_DRAIN} cstate_e;
  cstate_e   cstate;
  tile_cmd_t ccmd;
  logic [7:0] r, c, o, ch;
  logic [3:0] i, j;
  logic       beat_first, beat_last, tile_last;
  logic       v1, f1, l1;
  logic [15:0] orow0, orow1, orow2;
  logic [1:0]  drain;

  // addresses and flags of the beat issued this cycle
  always_comb begin
    if (ccmd.is_fc) begin
      in_row     = 16'(ch);
      w_row      = 16'(o) * 16'(ccmd.n_in_chunks) + 16'(ch);
      orow0      = 16'(o);
      beat_first = (ch == 8'd0);
      beat_last  = (ch == ccmd.n_in_chunks - 8'd1);
      tile_last  = beat_last && (o == ccmd.n_out_chunks - 8'd1);
    end else begin
      in_row     = (16'(ccmd.stride) * 16'(r) + 16'(i)) * 16'(ccmd.in_cols)
                 + 16'(ccmd.stride) * 16'(c) + 16'(j);
      w_row      = 16'(i) * 16'(ccmd.k) + 16'(j);
      orow0      = 16'(r) * 16'(ccmd.out_cols) + 16'(c);
      beat_first = (i == 4'd0) && (j == 4'd0);
      beat_last  = (i == ccmd.k - 4'd1) && (j == ccmd.k - 4'd1);
      tile_last  = beat_last && (r == ccmd.out_rows - 8'd1) && (c == ccmd.out_cols - 8'd1);
    end
  end

  logic start_comp;
  assign start_comp = (cstate == C_IDLE) && in_full[cb] && !out_full[ob];
  assign in_re  = (cstate == C_RUN);
  assign w_re   = (cstate == C_RUN);
  assign ps_re  = (cstate == C_RUN) && beat_first && ccmd.acc_in;
  assign ps_row = orow0;
  assign clr_in  = (cstate == C_DRAIN) && (drain == 2'd0);
  assign set_out = clr_in && ccmd.store;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cstate <= C_IDLE; ccmd <= '0; cb <= 1'b0; ob <= 1'b0;
      r <= '0; c <= '0; o <= '0; ch <= '0; i <= '0; j <= '0;
      v1 <= 1'b0; f1 <= 1'b0; l1 <= 1'b0; orow1 <= '0; orow2 <= '0;
      drain <= '0;
      scmd[0] <= '0; scmd[1] <= '0;
    end else begin
      // pipeline: beat issued -> buffer data valid -> compute unit result
      v1    <= (cstate == C_RUN);
      f1    <= beat_first;
      l1    <= beat_last;
      orow1 <= orow0;
      if (v1 && l1) orow2 <= orow1;

      case (cstate)
        C_IDLE: if (start_comp) begin
          ccmd <= bcmd[cb];
          r <= '0; c <= '0; o <= '0; ch <= '0; i <= '0; j <= '0;
          cstate <= C_RUN;
        end
        C_RUN: begin
          if (ccmd.is_fc) begin
            if (beat_last) begin
              ch <= '0;
              o  <= o + 8'd1;
            end else ch <= ch + 8'd1;
          end else begin
            if (j == ccmd.k - 4'd1) begin
              j <= '0;
              if (i == ccmd.k - 4'd1) begin
                i <= '0;
                if (c == ccmd.out_cols - 8'd1) begin
                  c <= '0;
                  r <= r + 8'd1;
                end else c <= c + 8'd1;
              end else i <= i + 4'd1;
            end else j <= j + 4'd1;
          end
          if (tile_last) begin
            cstate <= C_DRAIN;
            drain  <= 2'd2;
          end
        end
        C_DRAIN: begin
          if (drain != 2'd0) drain <= drain - 2'd1;
          else begin
            cb <= ~cb;
            if (ccmd.store) begin
              scmd[ob] <= ccmd;
              ob       <= ~ob;
            end
            cstate <= C_IDLE;
          end
        end
        default: cstate <= C_IDLE;
      endcase
    end
  end

  assign cu_fc     = ccmd.is_fc;
  assign in_bank   = cb;
  assign out_bank  = ob;
  assign cu_valid  = v1;
  assign cu_first  = f1;
  assign cu_last   = l1;
  assign cu_acc_in = ccmd.acc_in;
  assign res_we    = cu_out_valid;
  assign res_row   = orow2;

  // ---------------- store engine ----------------
  typedef enum logic [1:0] {S_IDLE, S_BUSY} sstate_e;
  sstate_e   sstate;
  tile_cmd_t stc;

  assign stc     = scmd[sb];
  assign clr_out = (sstate == S_BUSY) && wr_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sstate <= S_IDLE; sb <= 1'b0;
      st_start <= 1'b0; wr_start <= 1'b0;
      st_fc <= 1'b0; st_bank <= 1'b0; st_rows <= '0;
      wr_addr <= '0; wr_n <= '0;
    end else begin
      st_start <= 1'b0; wr_start <= 1'b0;
      case (sstate)
        S_IDLE: if (out_full[sb]) begin
          st_start <= 1'b1;
          wr_start <= 1'b1;
          st_fc    <= stc.is_fc;
          st_bank  <= sb;
          wr_addr  <= stc.ofm_addr;
          if (stc.is_fc) begin
            st_rows <= 16'(stc.n_out_chunks);
            wr_n    <= LENW'(stc.n_out_chunks * TAU);
          end else begin
            st_rows <= 16'(stc.out_rows) * 16'(stc.out_cols);
            wr_n    <= LENW'(stc.out_rows * stc.out_cols * TAU);
          end
          sstate <= S_BUSY;
        end
        S_BUSY: if (wr_done) begin
          sb     <= ~sb;
          sstate <= S_IDLE;
        end
        default: sstate <= S_IDLE;
      endcase
    end
  end

  assign load_busy  = (lstate != L_IDLE);
  assign comp_busy  = (cstate != C_IDLE);
  assign store_busy = (sstate != S_IDLE);
  assign idle       = !load_busy && !comp_busy && !store_busy &&
                      (in_full == 2'b00) && (out_full == 2'b00) && !cmd_valid;

  // the output bank in use by compute is never the one being stored
  a_out_bank : assert property (@(posedge clk) disable iff (!rst_n)
    (comp_busy && store_busy) |-> (ob != sb));

endmodule
