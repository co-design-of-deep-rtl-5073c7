// Preload buffer: prepares rows of data for the top row of the PE array.
//
// A command (pl_cmd_t) describes a sequence of rows to fetch from the global
// buffer:
//   for ch in 0..n_ch-1, for kx in 0..n_kx-1, for ph in phases, for i in 0..R-1:
//     stride 1 (step2 = 0): one phase, R = rows,  y = R-1-i
//     stride 2 (step2 = 1): phase 0,   R = rows,  y = 2(R-1-i) + y_off
//                           phase 1,   R = rows1, y = 2(R-1-i) + !y_off  (only if rows1 != 0)
//     line = base + ch*ch_stride + y*n_lines
// Rows are handed out bottom row of the block first. With n_lines = 1 the row
// is that one line (weight rows in weight-stationary mode). With n_lines = 2
// or 3 the row is a window over the lines line .. line+n_lines-1, which hold
// pixels x = 0 .. n_lines*N-1 of one input row: word c of the row is pixel
// x = c + kx (stride 1) or x = 2c + kx (stride 2). The column offset kx and
// the row spacing give the PE array the input block of filter column kx in
// output-stationary mode. Stride 2 needs 3 lines per row and splits each
// filter column into two phases, the even and the odd filter rows. Rows are
// fetched ahead into a DEPTH-entry FIFO, so the array can take one row per
// cycle (row_valid / row_pop) while the next rows are fetched, including while
// it computes.
//
// Timing: one global-buffer read per cycle when granted, n_lines reads per
// row; a row enters the FIFO the cycle after its last read returns. cmd is
// taken with start while busy is low. The paper says only that the preload
// buffer prepares data for the array before the operation; the fetch order,
// the line window, the stride-2 phases and the FIFO are this design's.
module preload_buffer
  import sqz_pkg::*;
#(
  parameter int unsigned N     = 16,
  parameter int unsigned DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              start,
  input  pl_cmd_t           cmd,
  output logic              busy,
  // global-buffer read port
  output logic              rd_req,
  output logic [ADDR_W-1:0] rd_addr,
  input  logic              rd_gnt,
  input  logic              rd_valid,
  input  data_t             rd_data [N],
  // rows to the PE array
  output logic              row_valid,
  output data_t             row_data [N],
  input  logic              row_pop
);

  localparam int unsigned PW = $clog2(DEPTH);

  // ---------------- address generator ----------------
  logic              active, ph;
  logic [1:0]        sub;
  logic [11:0]       ch;
  logic [4:0]        kx;
  logic [5:0]        idx;
  pl_cmd_t           c_q;
  logic [PW:0]       count, inflight;
  logic              push, first_rd, last_rd, last_row, last_ph;
  logic [ADDR_W-1:0] row_line;
  logic [5:0]        n_rows;
  logic [6:0]        y_row;

  assign n_rows   = ph ? c_q.rows1 : c_q.rows;
  assign y_row    = c_q.step2 ? {n_rows - 6'd1 - idx, c_q.y_off ^ ph}
                              : {1'b0, n_rows - 6'd1 - idx};
  assign row_line = c_q.base + ADDR_W'(ch) * c_q.ch_stride + ADDR_W'(y_row) * ADDR_W'(c_q.n_lines);
  assign first_rd = (sub == 2'd0);
  assign last_rd  = (sub == c_q.n_lines - 2'd1);
  assign last_row = (idx == n_rows - 6'd1);
  assign last_ph  = !c_q.step2 || ph || (c_q.rows1 == 0);
  assign rd_req   = active && (!first_rd || (32'(count) + 32'(inflight) < DEPTH));
  assign rd_addr  = row_line + ADDR_W'(sub);
  assign busy     = active || (inflight != 0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active <= 1'b0;
      sub    <= '0;
      ph     <= 1'b0;
      ch     <= '0;
      kx     <= '0;
      idx    <= '0;
    end else if (!active) begin
      if (start && cmd.rows != 0 && cmd.n_ch != 0 && cmd.n_kx != 0 && cmd.n_lines != 0) begin
        active <= 1'b1;
        sub    <= '0;
        ph     <= 1'b0;
        ch     <= '0;
        kx     <= '0;
        idx    <= '0;
      end
    end else if (rd_gnt) begin
      if (!last_rd) begin
        sub <= sub + 2'd1;
      end else begin
        sub <= '0;
        if (!last_row) idx <= idx + 6'd1;
        else begin
          idx <= '0;
          if (!last_ph) ph <= 1'b1;
          else begin
            ph <= 1'b0;
            if (kx != c_q.n_kx - 5'd1) kx <= kx + 5'd1;
            else begin
              kx <= '0;
              if (ch != c_q.n_ch - 12'd1) ch <= ch + 12'd1;
              else active <= 1'b0;
            end
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!active && start) c_q <= cmd;
  end

  // ---------------- returning data ----------------
  // The first lines of a row are held until its last line returns; the row
  // is then assembled from them and the last line on the read data bus.
  logic       ret_last, ret_s2;
  logic [1:0] ret_sub, ret_nl;
  logic [4:0] ret_kx;
  data_t      l0_q [N], l1_q [N];
  data_t      row_new [N];

  always_ff @(posedge clk) begin
    if (rd_gnt) begin
      ret_last <= last_rd;
      ret_sub  <= sub;
      ret_nl   <= c_q.n_lines;
      ret_s2   <= c_q.step2;
      ret_kx   <= kx;
    end
    if (rd_valid && !ret_last && ret_sub == 2'd0) l0_q <= rd_data;
    if (rd_valid && !ret_last && ret_sub == 2'd1) l1_q <= rd_data;
  end

  for (genvar c = 0; c < N; c++) begin : g_win
    logic [7:0] x;    // pixel index within the row window
    logic [7:0] ln;   // line of the window holding it
    logic [$clog2(N)-1:0] w;    // word within that line
    assign x  = 8'(c * (1 + 32'(ret_s2))) + 8'(ret_kx);
    assign ln = 8'(32'(x) / N);
    assign w  = $bits(w)'(32'(x) % N);
    assign row_new[c] = (ret_nl == 2'd1)               ? rd_data[c] :
                        (32'(ln) >= 32'(ret_nl) - 1)   ? rd_data[w] :
                        (ln == 8'd0)                   ? l0_q[w]    : l1_q[w];
  end

  assign push = rd_valid && ret_last;

  // ---------------- row FIFO ----------------
  data_t         fifo [DEPTH][N];
  logic [PW-1:0] wp, rp;
  logic          pop;

  assign row_valid = (count != 0);
  assign pop       = row_pop && row_valid;
  assign row_data  = fifo[rp];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp       <= '0;
      rp       <= '0;
      count    <= '0;
      inflight <= '0;
    end else begin
      if (push) wp <= (32'(wp) == DEPTH-1) ? '0 : wp + 1'b1;
      if (pop)  rp <= (32'(rp) == DEPTH-1) ? '0 : rp + 1'b1;
      count    <= count + (PW+1)'(push) - (PW+1)'(pop);
      inflight <= inflight + (PW+1)'(rd_gnt && first_rd && active) - (PW+1)'(push);
    end
  end

  always_ff @(posedge clk) begin
    if (push) fifo[wp] <= row_new;
  end

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("preload_buffer: DEPTH must be a power of two >= 2");

  // A pop is only legal when a row is available.
  always_ff @(posedge clk) begin
    if (rst_n) assert (!(row_pop && !row_valid))
      else $error("preload_buffer: row_pop while empty");
  end

endmodule
