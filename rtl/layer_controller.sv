// Layer controller: runs one tile operation of a layer on the PE array in the
// dataflow the operation selects (op_desc_t.mode), so that each layer can use
// weight-stationary (WS) or output-stationary (OS) processing and switching
// between them costs nothing beyond the next command.
//
// WS operation (1x1 convolution or fully-connected layer slice):
//   1. preload: N weight rows (w_base + N-1 first) are pushed down from the
//      top, so PE (r,c) holds the weight from input channel r to output
//      channel c;
//   2. stream: n_pix pixel vectors (one line each, from in_base) are given to
//      the broadcast buffer, one per cycle, which skews them row by row; the
//      columns sum down the adder chain and the N output channels of pixel p
//      leave the bottom N cycles later and are written to line out_base + p.
// OS operation (F x F convolution, stride 1 or 2, on an N x N output block):
//   1. clear (skipped with os_keep): register-file entries 0..K-1 of all PEs
//      are zeroed (K cycles);
//   2. for each input channel ch and filter column kx: N input rows are
//      pushed in (row y = N+F-2 first, pixels offset by kx), so PE (r,c) holds
//      in(ch, r+F-1, c+kx); then for ky = F-1 down to 0: the stream buffer
//      broadcasts the non-zero weights of tap (ch,ky,kx) for the K filters,
//      each a MAC into register-file entry k of every PE; between two ky the
//      input window moves one row with a single push from the top;
//   3. drain (skipped with os_hold): for each k, the k-th entries are
//      shifted out through the bottom row in N cycles; output row r of
//      filter k goes to out_base + k*N + r.
// Stride 2 (os_s2): PE (r,c) works on input (2r+ky, 2c+kx). One push from the
// top now moves the window by two input rows, so each filter column is done
// in two phases: filter rows F-1, F-3, .. after one preload, then rows
// F-2, F-4, .. after another. The preload buffer spaces the rows by two and
// picks every second pixel; the input tile is 2(N-1)+F rows of 3 lines, and
// the weight lines of each (ch, kx) follow the same row order.
// The input channels of one output block may be split over several OS
// operations: os_hold skips the drain and os_keep skips the clear, so the
// register files keep accumulating from one operation to the next.
// Results are requantised (arithmetic shift by `shift`, saturation to 16 bits)
// on their way to the global buffer.
//
// Interface: start is taken when busy is low; done pulses for one cycle at
// the end. Timing: WS takes N (preload) + n_pix + N cycles plus a few cycles
// of fetch latency; OS takes K (clear) + C*F*(N + F-1) row pushes (stride 2:
// C*F*(2N + F - 2) at most) + one
// cycle per non-zero weight (one per all-zero tap) + K*N (drain) cycles plus
// fetch stalls.
//
// The two operation sequences follow the paper's description of the two
// modes; the vertical-only movement of the OS input window, the stride-2
// phases, the clear phase,
// the drain through the adder chain, the memory layouts and the requantisation
// are this design's choices.
module layer_controller
  import sqz_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  op_desc_t          op,
  output logic              busy,
  output logic              done,
  // preload buffer command and rows
  output logic              pl_start,
  output pl_cmd_t           pl_cmd,
  input  logic              pl_row_valid,
  output logic              pl_row_pop,
  // stream buffer command and elements
  output logic              sb_start,
  output mode_e             sb_mode,
  output logic [ADDR_W-1:0] sb_base,
  output logic [ADDR_W-1:0] sb_count,
  output logic [8:0]        sb_n_k,
  input  logic              sb_valid,
  output logic              sb_ready,
  input  logic              sb_nz,
  input  logic [RFA_W-1:0]  sb_k,
  input  logic              sb_eol,
  // PE array and broadcast buffer
  output pe_ctrl_t          pe_ctrl,
  output mode_e             bb_mode,
  input  acc_t              bottom_psum [N],
  // result writes to the global buffer
  output logic              wr_req,
  output logic [ADDR_W-1:0] wr_addr,
  output data_t             wr_data [N]
);

  typedef enum logic [2:0] {
    S_IDLE, S_CLEAR, S_PRE, S_MAC, S_SHIFT, S_WS, S_DRAIN, S_FLUSH
  } state_e;

  state_e            st;
  op_desc_t          o;
  logic [5:0]        cnt;       // row counter (preload) / drain row
  logic [8:0]        kc;        // filter counter (clear / drain)
  logic [3:0]        ky, kx;    // ky: filter rows left in the current phase
  logic              ph;        // stride 2: 0 = phase of filter row F-1, 1 = phase of row F-2
  logic [3:0]        n_taps;    // filter rows in the current phase
  logic [11:0]       ch;
  logic [15:0]       pix;

  // result write pipeline: WS uses an N-deep valid/index delay line,
  // OS drains use a one-cycle delay
  logic              wsv [N];
  logic [15:0]       wsi [N];
  logic              dv_q;
  logic [ADDR_W-1:0] da_q;
  logic              ws_pipe_busy;

  // ---------------- command outputs ----------------
  always_comb begin
    pl_start     = start && !busy;
    sb_start     = start && !busy;
    sb_mode      = op.mode;
    sb_n_k       = op.n_k;
    pl_cmd       = '0;
    if (op.mode == MODE_WS) begin
      pl_cmd.base    = op.w_base;
      pl_cmd.n_ch    = 12'd1;
      pl_cmd.n_kx    = 5'd1;
      pl_cmd.rows    = 6'(N);
      pl_cmd.n_lines = 2'd1;
      sb_base        = op.in_base;
      sb_count       = op.n_pix;
    end else begin
      pl_cmd.base    = op.in_base;
      pl_cmd.n_ch    = op.n_ch;
      pl_cmd.n_kx    = 5'(op.f);
      if (!op.os_s2) begin
        pl_cmd.ch_stride = ADDR_W'((N + 32'(op.f) - 1) * 2);
        pl_cmd.rows      = 6'(N + 32'(op.f) - 1);
        pl_cmd.n_lines   = 2'd2;
      end else begin
        pl_cmd.ch_stride = ADDR_W'((2 * (N - 1) + 32'(op.f)) * 3);
        pl_cmd.rows      = 6'(N + (32'(op.f) - 1) / 2);
        pl_cmd.rows1     = (op.f > 4'd1) ? 6'(N + (32'(op.f) - 2) / 2) : 6'd0;
        pl_cmd.y_off     = ~op.f[0];
        pl_cmd.step2     = 1'b1;
        pl_cmd.n_lines   = 2'd3;
      end
      sb_base        = op.w_base;
      sb_count       = ADDR_W'(32'(op.n_ch) * 32'(op.f) * 32'(op.f));
    end
  end

  assign n_taps  = !o.os_s2 ? o.f : (ph ? (o.f >> 1) : ((o.f + 4'd1) >> 1));
  assign busy    = (st != S_IDLE);
  assign bb_mode = o.mode;

  // ---------------- per-cycle PE command ----------------
  always_comb begin
    pe_ctrl    = '0;
    pl_row_pop = 1'b0;
    sb_ready   = 1'b0;
    unique case (st)
      S_CLEAR: begin
        pe_ctrl.rf_clr  = 1'b1;
        pe_ctrl.rf_we   = 1'b1;
        pe_ctrl.rf_addr = RFA_W'(kc);
      end
      S_PRE, S_SHIFT: begin
        pl_row_pop     = pl_row_valid;
        pe_ctrl.act_ld = pl_row_valid;
      end
      S_MAC: begin
        sb_ready        = 1'b1;
        pe_ctrl.mul_en  = sb_valid && sb_nz;
        pe_ctrl.rf_we   = sb_valid && sb_nz;
        pe_ctrl.rf_addr = sb_k;
      end
      S_WS, S_FLUSH: begin
        sb_ready        = (st == S_WS);
        pe_ctrl.mul_en  = 1'b1;
        pe_ctrl.add_top = 1'b1;
        pe_ctrl.out_we  = 1'b1;
      end
      S_DRAIN: begin
        pe_ctrl.out_we  = 1'b1;
        pe_ctrl.add_top = (cnt != 0);
        pe_ctrl.rf_addr = RFA_W'(kc);
      end
      default: ;
    endcase
  end

  // ---------------- sequencing ----------------
  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (!rst_n) begin
      st <= S_IDLE;
    end else begin
      unique case (st)
        S_IDLE: if (start) begin
          o   <= op;
          cnt <= '0;
          kc  <= '0;
          ch  <= '0;
          kx  <= '0;
          ph  <= 1'b0;
          pix <= '0;
          st  <= (op.mode == MODE_WS || op.n_k == 0 || op.os_keep) ? S_PRE : S_CLEAR;
        end
        S_CLEAR: begin
          kc <= kc + 1'b1;
          if (kc + 1'b1 == o.n_k) st <= S_PRE;
        end
        S_PRE: if (pl_row_valid) begin
          cnt <= cnt + 1'b1;
          if (32'(cnt) == N - 1) begin
            cnt <= '0;
            ky  <= n_taps - 1'b1;
            st  <= (o.mode == MODE_WS) ? S_WS : S_MAC;
          end
        end
        S_SHIFT: if (pl_row_valid) st <= S_MAC;
        S_MAC: if (sb_valid && sb_eol) begin
          if (ky != 0) begin
            ky <= ky - 1'b1;
            st <= S_SHIFT;
          end else if (o.os_s2 && !ph && o.f > 4'd1) begin
            ph <= 1'b1;
            st <= S_PRE;
          end else if (kx != o.f - 1'b1) begin
            ph <= 1'b0;
            kx <= kx + 1'b1;
            st <= S_PRE;
          end else begin
            kx <= '0;
            ph <= 1'b0;
            if (ch != o.n_ch - 1'b1) begin
              ch <= ch + 1'b1;
              st <= S_PRE;
            end else begin
              kc  <= '0;
              cnt <= '0;
              st  <= (o.n_k == 0 || o.os_hold) ? S_FLUSH : S_DRAIN;
            end
          end
        end
        S_WS: if (sb_valid) begin
          pix <= pix + 1'b1;
          if (pix + 1'b1 == o.n_pix) st <= S_FLUSH;
        end
        S_DRAIN: begin
          cnt <= cnt + 1'b1;
          if (32'(cnt) == N - 1) begin
            cnt <= '0;
            kc  <= kc + 1'b1;
            if (kc + 1'b1 == o.n_k) st <= S_FLUSH;
          end
        end
        S_FLUSH: if (!ws_pipe_busy && !dv_q) begin
          st   <= S_IDLE;
          done <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // ---------------- result path ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) wsv[i] <= 1'b0;
      dv_q <= 1'b0;
    end else begin
      wsv[0] <= (st == S_WS) && sb_valid;
      wsi[0] <= pix;
      for (int i = 1; i < N; i++) begin
        wsv[i] <= wsv[i-1];
        wsi[i] <= wsi[i-1];
      end
      dv_q <= (st == S_DRAIN);
      da_q <= o.out_base + ADDR_W'(32'(kc) * N + (N - 1 - 32'(cnt)));
    end
  end

  always_comb begin
    ws_pipe_busy = 1'b0;
    for (int i = 0; i < N - 1; i++) ws_pipe_busy = ws_pipe_busy || wsv[i];
  end

  // wsv[N-1] marks the cycle in which the bottom row holds pixel wsi[N-1]
  assign wr_req  = wsv[N-1] || dv_q;
  assign wr_addr = dv_q ? da_q : o.out_base + wsi[N-1];
  always_comb begin
    for (int c = 0; c < N; c++) wr_data[c] = requant(bottom_psum[c], o.shift);
  end

endmodule
