// Stream buffer: feeds the PE array continuously while an operation runs.
//
// A command fetches `count` consecutive global-buffer lines from `base` into
// a small FIFO (fetching ahead, one read per cycle when granted). The head
// line is then handed out according to the dataflow:
//  * weight-stationary: one element per line; out_vec is the whole line, a
//    pixel vector with one word per input channel (word r -> PE row r).
//  * output-stationary: the line holds the weights of one filter tap for
//    filters k = 0..n_k-1 (word k). Only the non-zero ones are handed out, one
//    per cycle, as (out_w, out_k), lowest k first, so zero weights cost no
//    PE-array cycle. out_eol marks the last element of a line. A line whose
//    n_k weights are all zero still gives one element, with out_nz = 0, so
//    that the consumer sees the end of the tap.
// Elements move on out_valid && out_ready; a new line can follow the last
// element of the previous one in the next cycle, so full-rate streaming is
// one line per cycle in weight-stationary mode.
//
// The paper gives the function (continuous streaming, broadcasting only
// non-zero weights); the FIFO, the line format and the priority encoder are
// this design's.
module stream_buffer
  import sqz_pkg::*;
#(
  parameter int unsigned N     = 16,
  parameter int unsigned DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              start,
  input  mode_e             mode,
  input  logic [ADDR_W-1:0] base,
  input  logic [ADDR_W-1:0] count,
  input  logic [8:0]        n_k,
  output logic              busy,
  // global-buffer read port
  output logic              rd_req,
  output logic [ADDR_W-1:0] rd_addr,
  input  logic              rd_gnt,
  input  logic              rd_valid,
  input  data_t             rd_data [N],
  // stream to the array
  output logic              out_valid,
  input  logic              out_ready,
  output data_t             out_vec [N],
  output logic              out_nz,
  output data_t             out_w,
  output logic [RFA_W-1:0]  out_k,
  output logic              out_eol
);

  localparam int unsigned PW = $clog2(DEPTH);
  localparam int unsigned KW = $clog2(N);

  // ---------------- fetch ----------------
  logic              active;
  logic [ADDR_W-1:0] addr_q, left_q;
  mode_e             mode_q;
  logic [8:0]        nk_q;
  logic [PW:0]       count_q, inflight;

  assign rd_req  = active && (32'(count_q) + 32'(inflight) < DEPTH);
  assign rd_addr = addr_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active <= 1'b0;
    end else if (!active) begin
      if (start && count != 0) begin
        active <= 1'b1;
        addr_q <= base;
        left_q <= count;
        mode_q <= mode;
        nk_q   <= n_k;
      end
    end else if (rd_gnt) begin
      addr_q <= addr_q + 1'b1;
      left_q <= left_q - 1'b1;
      if (left_q == 1) active <= 1'b0;
    end
  end

  // ---------------- line FIFO ----------------
  data_t         fifo [DEPTH][N];
  logic [PW-1:0] wp, rp;
  logic          f_pop;

  always_ff @(posedge clk) begin
    if (rd_valid) fifo[wp] <= rd_data;
  end

  // ---------------- current line ----------------
  logic           cur_valid;
  data_t          cur [N];
  logic [N-1:0]   mask, head_mask;
  logic [KW-1:0]  sel;
  logic           take, last;

  always_comb begin
    for (int c = 0; c < N; c++)
      head_mask[c] = (fifo[rp][c] != 0) && (c < 32'(nk_q));
  end

  always_comb begin
    sel = '0;
    for (int c = N - 1; c >= 0; c--)
      if (mask[c]) sel = KW'(c);
  end

  assign last      = (mode_q == MODE_WS) || ((mask & (mask - 1'b1)) == '0);
  assign out_valid = cur_valid;
  assign out_vec   = cur;
  assign out_nz    = (mode_q == MODE_WS) || (mask != '0);
  assign out_w     = cur[sel];
  assign out_k     = RFA_W'(sel);
  assign out_eol   = last;
  assign take      = cur_valid && out_ready;
  assign f_pop     = (count_q != 0) && (!cur_valid || (take && last));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cur_valid <= 1'b0;
      wp        <= '0;
      rp        <= '0;
      count_q   <= '0;
      inflight  <= '0;
    end else begin
      if (f_pop) begin
        cur_valid <= 1'b1;
        cur       <= fifo[rp];
        mask      <= head_mask;
      end else if (take) begin
        if (last) cur_valid <= 1'b0;
        else      mask      <= mask & (mask - 1'b1);
      end
      if (rd_valid) wp <= (32'(wp) == DEPTH-1) ? '0 : wp + 1'b1;
      if (f_pop)    rp <= (32'(rp) == DEPTH-1) ? '0 : rp + 1'b1;
      count_q  <= count_q + (PW+1)'(rd_valid) - (PW+1)'(f_pop);
      inflight <= inflight + (PW+1)'(rd_gnt) - (PW+1)'(rd_valid);
    end
  end

  assign busy = active || (inflight != 0) || (count_q != 0) || cur_valid;

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("stream_buffer: DEPTH must be a power of two >= 2");

endmodule
