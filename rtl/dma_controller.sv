// DMA controller: copies lines between external memory (DRAM) and the global
// buffer.
//
// One command (dma_cmd_t) moves `len` lines. LOAD issues read requests on the
// external bus as fast as it accepts them (many may be outstanding; the
// external side answers in order, with back-pressure on ext_rsp_ready), and
// writes every returning line into the global buffer at gb_addr, gb_addr+1,
// and so on. STORE reads a global-buffer line, holds it in a one-line buffer
// and sends it as an external write request, overlapping the next read with
// the wait for the bus. The external bus is one line (N words) wide.
//
// The DMA uses the lowest-priority global-buffer ports, so it only takes
// cycles the PE array side leaves free; that lets transfers for the next layer
// run while the array computes (double buffering, with the two halves chosen
// by the software's addresses). start is taken when busy is low; busy falls
// when the last line is written.
//
// The paper only names the DMA controller and says it attaches to the global
// buffer; the bus protocol and all of the above are this design's.
module dma_controller
  import sqz_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  dma_cmd_t          cmd,
  output logic              busy,
  // external memory bus
  output logic              ext_req_valid,
  input  logic              ext_req_ready,
  output logic              ext_req_write,
  output logic [EXT_AW-1:0] ext_req_addr,
  output data_t             ext_req_wdata [N],
  input  logic              ext_rsp_valid,
  output logic              ext_rsp_ready,
  input  data_t             ext_rsp_rdata [N],
  // global-buffer read port
  output logic              gb_rd_req,
  output logic [ADDR_W-1:0] gb_rd_addr,
  input  logic              gb_rd_gnt,
  input  logic              gb_rd_valid,
  input  data_t             gb_rd_data [N],
  // global-buffer write port
  output logic              gb_wr_req,
  output logic [ADDR_W-1:0] gb_wr_addr,
  output data_t             gb_wr_data [N],
  input  logic              gb_wr_gnt
);

  logic              active;
  dma_cmd_t          c_q;
  logic [ADDR_W-1:0] issued, done_cnt;
  logic              buf_full, rd_pend;
  data_t             buf_q [N];

  logic is_load, is_store;
  assign is_load  = active && (c_q.dir == DMA_LOAD);
  assign is_store = active && (c_q.dir == DMA_STORE);

  // external requests
  assign ext_req_valid = (is_load && issued != c_q.len) || (is_store && buf_full);
  assign ext_req_write = is_store;
  assign ext_req_addr  = c_q.ext_addr + EXT_AW'(is_store ? done_cnt : issued);
  assign ext_req_wdata = buf_q;

  // LOAD: responses go straight into the global buffer
  assign gb_wr_req     = is_load && ext_rsp_valid;
  assign gb_wr_addr    = c_q.gb_addr + done_cnt;
  assign gb_wr_data    = ext_rsp_rdata;
  assign ext_rsp_ready = is_load && gb_wr_gnt;

  // STORE: read the next line when the one-line buffer will have room for it
  logic st_send;
  assign st_send    = is_store && buf_full && ext_req_ready;
  assign gb_rd_req  = is_store && issued != c_q.len && !rd_pend && (!buf_full || st_send);
  assign gb_rd_addr = c_q.gb_addr + issued;

  assign busy = active;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active   <= 1'b0;
      issued   <= '0;
      done_cnt <= '0;
      buf_full <= 1'b0;
      rd_pend  <= 1'b0;
    end else if (!active) begin
      if (start && cmd.len != 0) begin
        active   <= 1'b1;
        c_q      <= cmd;
        issued   <= '0;
        done_cnt <= '0;
        buf_full <= 1'b0;
        rd_pend  <= 1'b0;
      end
    end else if (is_load) begin
      if (ext_req_valid && ext_req_ready) issued <= issued + 1'b1;
      if (ext_rsp_valid && ext_rsp_ready) begin
        done_cnt <= done_cnt + 1'b1;
        if (done_cnt + 1'b1 == c_q.len) active <= 1'b0;
      end
    end else begin
      if (gb_rd_gnt) begin
        issued  <= issued + 1'b1;
        rd_pend <= 1'b1;
      end
      if (gb_rd_valid) begin
        rd_pend  <= 1'b0;
        buf_q    <= gb_rd_data;
      end
      if (st_send) begin
        done_cnt <= done_cnt + 1'b1;
        if (done_cnt + 1'b1 == c_q.len) active <= 1'b0;
      end
      buf_full <= gb_rd_valid || (buf_full && !st_send);
    end
  end

  // Responses may only arrive for requests that were issued.
  always_ff @(posedge clk) begin
    if (rst_n && is_load) assert (!ext_rsp_valid || done_cnt != issued)
      else $error("dma_controller: response without request");
  end

endmodule
