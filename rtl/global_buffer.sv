// Global buffer: the accelerator's on-chip SRAM (128 KB by default) and its
// switching logic.
//
// The SRAM is organised in lines of N data words, the width of one PE-array
// row, so that 128 KB with N = 16 gives 4096 lines of 256 bits. It has one
// read port and one write port per cycle. The switching logic connects them
// to the units around the buffer with fixed priorities:
//   read port : requester 0 = stream buffer, 1 = preload buffer, 2 = DMA
//   write port: requester 0 = PE-array results, 1 = DMA
// A requester sees rd_gnt/wr_gnt combinationally in the cycle of its request.
// Read data appear on rd_data one cycle after the grant, flagged by
// rd_valid[requester]. A write is done at the end of its granted cycle; a
// read of the same line in that cycle returns the old contents.
//
// The paper gives the capacity and which units the buffer connects to; line
// width, port count and priorities are this design's choices. Result writes
// have top priority because the weight-stationary pipeline cannot stall.
module global_buffer
  import sqz_pkg::*;
#(
  parameter int unsigned N        = 16,
  parameter int unsigned GB_BYTES = 131072,
  parameter int unsigned NRD      = 3,
  parameter int unsigned NWR      = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // read port
  input  logic              rd_req   [NRD],
  input  logic [ADDR_W-1:0] rd_addr  [NRD],
  output logic              rd_gnt   [NRD],
  output logic              rd_valid [NRD],
  output data_t             rd_data  [N],
  // write port
  input  logic              wr_req   [NWR],
  input  logic [ADDR_W-1:0] wr_addr  [NWR],
  input  data_t             wr_data  [NWR][N],
  output logic              wr_gnt   [NWR]
);

  localparam int unsigned LINE_BYTES = N * DATA_W / 8;
  localparam int unsigned LINES      = GB_BYTES / LINE_BYTES;
  localparam int unsigned LA_W       = $clog2(LINES);

  logic [N*DATA_W-1:0] mem [LINES];

  // ---------------- switching logic: fixed-priority arbiters ----------------
  logic              rd_any, wr_any;
  logic [ADDR_W-1:0] ra, wa;
  data_t             wd [N];

  always_comb begin
    rd_any = 1'b0;
    ra     = '0;
    for (int i = 0; i < NRD; i++) begin
      rd_gnt[i] = rd_req[i] && !rd_any;
      if (rd_gnt[i]) ra = rd_addr[i];
      rd_any = rd_any || rd_req[i];
    end
  end

  always_comb begin
    wr_any = 1'b0;
    wa     = '0;
    for (int c = 0; c < N; c++) wd[c] = '0;
    for (int i = 0; i < NWR; i++) begin
      wr_gnt[i] = wr_req[i] && !wr_any;
      if (wr_gnt[i]) begin
        wa = wr_addr[i];
        for (int c = 0; c < N; c++) wd[c] = wr_data[i][c];
      end
      wr_any = wr_any || wr_req[i];
    end
  end

  // ---------------- SRAM ----------------
  logic [N*DATA_W-1:0] rline;
  logic [N*DATA_W-1:0] wline;

  always_comb begin
    for (int c = 0; c < N; c++) wline[c*DATA_W +: DATA_W] = wd[c];
  end

  always_ff @(posedge clk) begin
    if (wr_any) mem[wa[LA_W-1:0]] <= wline;
    if (rd_any) rline <= mem[ra[LA_W-1:0]];
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < NRD; i++) rd_valid[i] <= rst_n && rd_gnt[i];
  end

  always_comb begin
    for (int c = 0; c < N; c++) rd_data[c] = data_t'(rline[c*DATA_W +: DATA_W]);
  end

endmodule
