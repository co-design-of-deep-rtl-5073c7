// Top level of the dual-dataflow CNN accelerator.
//
// An N x N PE array (N = 16 by default) is surrounded by a preload buffer
// feeding its top row, a broadcast buffer feeding every row from the side, a
// stream buffer that supplies the broadcast buffer during an operation, and a
// 128 KB global buffer that receives the bottom row's results and serves all
// the buffers. A DMA controller moves data between the global buffer and
// external memory over a line-wide request/response bus. A layer controller
// runs one tile operation (op_desc_t) in weight-stationary or
// output-stationary mode, chosen per operation.
//
// Interface: the host issues operations with op_start/op (taken when op_busy
// is low, op_done pulses at the end) and DMA copies with dma_start/dma_cmd
// (taken when dma_busy is low). Both may run at once: the DMA uses the
// global-buffer ports the array leaves free. The external memory itself is
// outside this design; its bus is brought out as ports.
//
// Timing: a WS operation takes about 2N + n_pix cycles; an OS operation
// about K + C*F*(N+F-1) + (non-zero weights) + K*N cycles (stride 1), see
// layer_controller. The DMA moves up to one line per cycle when the bus
// and the global buffer allow it.
//
// The block structure and connections follow the paper's block diagram; the
// bus protocols, the global-buffer organisation and the controller are this
// design's choices (see the individual modules).
module squeezelerator
  import sqz_pkg::*;
#(
  parameter int unsigned N        = 16,
  parameter int unsigned RF_DEPTH = 16,
  parameter int unsigned GB_BYTES = 131072
) (
  input  logic              clk,
  input  logic              rst_n,
  // layer operations
  input  logic              op_start,
  input  op_desc_t          op,
  output logic              op_busy,
  output logic              op_done,
  // DMA commands
  input  logic              dma_start,
  input  dma_cmd_t          dma_cmd,
  output logic              dma_busy,
  // external memory bus
  output logic              ext_req_valid,
  input  logic              ext_req_ready,
  output logic              ext_req_write,
  output logic [EXT_AW-1:0] ext_req_addr,
  output data_t             ext_req_wdata [N],
  input  logic              ext_rsp_valid,
  output logic              ext_rsp_ready,
  input  data_t             ext_rsp_rdata [N]
);

  // global-buffer ports
  logic              rd_req   [3];
  logic [ADDR_W-1:0] rd_addr  [3];
  logic              rd_gnt   [3];
  logic              rd_valid [3];
  data_t             rd_data  [N];
  logic              wr_req   [2];
  logic [ADDR_W-1:0] wr_addr  [2];
  data_t             wr_data  [2][N];
  logic              wr_gnt   [2];

  // preload buffer
  logic              pl_start, pl_busy, pl_row_valid, pl_row_pop;
  pl_cmd_t           pl_cmd;
  data_t             pl_row [N];

  // stream buffer
  logic              sb_start, sb_busy, sb_valid, sb_ready, sb_nz, sb_eol;
  mode_e             sb_mode;
  logic [ADDR_W-1:0] sb_base, sb_count;
  logic [8:0]        sb_n_k;
  data_t             sb_vec [N];
  data_t             sb_w;
  logic [RFA_W-1:0]  sb_k;

  // array
  pe_ctrl_t          pe_ctrl;
  mode_e             bb_mode;
  data_t             bcast  [N];
  acc_t              bottom [N];

  global_buffer #(.N(N), .GB_BYTES(GB_BYTES)) u_gb (
    .clk, .rst_n,
    .rd_req, .rd_addr, .rd_gnt, .rd_valid, .rd_data,
    .wr_req, .wr_addr, .wr_data, .wr_gnt
  );

  preload_buffer #(.N(N)) u_pl (
    .clk, .rst_n,
    .start     (pl_start),
    .cmd       (pl_cmd),
    .busy      (pl_busy),
    .rd_req    (rd_req[1]),
    .rd_addr   (rd_addr[1]),
    .rd_gnt    (rd_gnt[1]),
    .rd_valid  (rd_valid[1]),
    .rd_data   (rd_data),
    .row_valid (pl_row_valid),
    .row_data  (pl_row),
    .row_pop   (pl_row_pop)
  );

  stream_buffer #(.N(N)) u_sb (
    .clk, .rst_n,
    .start     (sb_start),
    .mode      (sb_mode),
    .base      (sb_base),
    .count     (sb_count),
    .n_k       (sb_n_k),
    .busy      (sb_busy),
    .rd_req    (rd_req[0]),
    .rd_addr   (rd_addr[0]),
    .rd_gnt    (rd_gnt[0]),
    .rd_valid  (rd_valid[0]),
    .rd_data   (rd_data),
    .out_valid (sb_valid),
    .out_ready (sb_ready),
    .out_vec   (sb_vec),
    .out_nz    (sb_nz),
    .out_w     (sb_w),
    .out_k     (sb_k),
    .out_eol   (sb_eol)
  );

  broadcast_buffer #(.N(N)) u_bb (
    .clk,
    .mode      (bb_mode),
    .ws_vec    (sb_vec),
    .os_weight (sb_w),
    .row_out   (bcast)
  );

  pe_array #(.N(N), .RF_DEPTH(RF_DEPTH)) u_array (
    .clk, .rst_n,
    .ctrl        (pe_ctrl),
    .preload_row (pl_row),
    .bcast       (bcast),
    .bottom_psum (bottom)
  );

  layer_controller #(.N(N)) u_ctrl (
    .clk, .rst_n,
    .start        (op_start),
    .op           (op),
    .busy         (op_busy),
    .done         (op_done),
    .pl_start, .pl_cmd,
    .pl_row_valid, .pl_row_pop,
    .sb_start, .sb_mode, .sb_base, .sb_count, .sb_n_k,
    .sb_valid, .sb_ready, .sb_nz, .sb_k, .sb_eol,
    .pe_ctrl, .bb_mode,
    .bottom_psum  (bottom),
    .wr_req       (wr_req[0]),
    .wr_addr      (wr_addr[0]),
    .wr_data      (wr_data[0])
  );

  dma_controller #(.N(N)) u_dma (
    .clk, .rst_n,
    .start       (dma_start),
    .cmd         (dma_cmd),
    .busy        (dma_busy),
    .ext_req_valid, .ext_req_ready, .ext_req_write, .ext_req_addr, .ext_req_wdata,
    .ext_rsp_valid, .ext_rsp_ready, .ext_rsp_rdata,
    .gb_rd_req   (rd_req[2]),
    .gb_rd_addr  (rd_addr[2]),
    .gb_rd_gnt   (rd_gnt[2]),
    .gb_rd_valid (rd_valid[2]),
    .gb_rd_data  (rd_data),
    .gb_wr_req   (wr_req[1]),
    .gb_wr_addr  (wr_addr[1]),
    .gb_wr_data  (wr_data[1]),
    .gb_wr_gnt   (wr_gnt[1])
  );

  // The array side never waits for a result write: it has the write port's
  // top priority.
  // The buffers are idle whenever a new operation starts.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!wr_req[0] || wr_gnt[0])
        else $error("squeezelerator: result write not granted");
      assert (!(op_start && !op_busy) || (!pl_busy && !sb_busy))
        else $error("squeezelerator: operation started while buffers busy");
    end
  end

endmodule
