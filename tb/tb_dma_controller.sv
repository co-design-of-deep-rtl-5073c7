// Self-checking test of the DMA controller (N = 16).
//
// The DMA is connected to a global buffer and to the external-memory model
// (100-cycle read latency, a request refused every 5th cycle). Random traffic
// on the global buffer's higher-priority ports takes cycles away from the
// DMA. The test loads 60 lines from external memory into the global buffer,
// stores them back to another external region, and checks every word of
// both copies, that the DMA was made to wait at least once, and that the load
// finished within 60 + 100 + a margin cycles, i.e. the reads were overlapped
// rather than done one at a time.
module tb_dma_controller;
  import sqz_pkg::*;

  localparam int N = 16;
  localparam int L = 60;

  logic              clk = 0, rst_n = 0;
  logic              start = 0, busy;
  dma_cmd_t          cmd;
  logic              ext_req_valid, ext_req_ready, ext_req_write, ext_rsp_valid, ext_rsp_ready;
  logic [EXT_AW-1:0] ext_req_addr;
  data_t             ext_req_wdata [N], ext_rsp_rdata [N];
  logic              rd_req [3], rd_gnt [3], rd_valid [3];
  logic [ADDR_W-1:0] rd_addr [3];
  data_t             rd_data [N];
  logic              wr_req [2], wr_gnt [2];
  logic [ADDR_W-1:0] wr_addr [2];
  data_t             wr_data [2][N];
  always #5 clk = ~clk;

  dma_controller #(.N(N)) dut (
    .clk, .rst_n, .start, .cmd, .busy,
    .ext_req_valid, .ext_req_ready, .ext_req_write, .ext_req_addr, .ext_req_wdata,
    .ext_rsp_valid, .ext_rsp_ready, .ext_rsp_rdata,
    .gb_rd_req(rd_req[2]), .gb_rd_addr(rd_addr[2]), .gb_rd_gnt(rd_gnt[2]),
    .gb_rd_valid(rd_valid[2]), .gb_rd_data(rd_data),
    .gb_wr_req(wr_req[1]), .gb_wr_addr(wr_addr[1]), .gb_wr_data(wr_data[1]), .gb_wr_gnt(wr_gnt[1])
  );

  global_buffer #(.N(N)) u_gb (.*);

  dram_model #(.N(N), .LINES(1024), .LATENCY(100), .STALL_EVERY(5)) u_dram (
    .clk, .req_valid(ext_req_valid), .req_ready(ext_req_ready), .req_write(ext_req_write),
    .req_addr(ext_req_addr), .req_wdata(ext_req_wdata),
    .rsp_valid(ext_rsp_valid), .rsp_ready(ext_rsp_ready), .rsp_rdata(ext_rsp_rdata)
  );

  // competing traffic on the higher-priority ports
  bit traffic = 0;
  always @(posedge clk) begin
    rd_req[0] <= traffic && ($urandom % 3 == 0);
    rd_req[1] <= traffic && ($urandom % 3 == 0);
    rd_addr[0] <= ADDR_W'(3000); rd_addr[1] <= ADDR_W'(3001);
    wr_req[0] <= traffic && ($urandom % 3 == 0);
    wr_addr[0] <= ADDR_W'(3002);
    for (int c = 0; c < N; c++) wr_data[0][c] <= '0;
  end

  int checks = 0, failures = 0, stalls = 0;
  longint cyc = 0, t0, t_load;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if ((rd_req[2] && !rd_gnt[2]) || (wr_req[1] && !wr_gnt[1])) stalls++;
  end

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic data_t pat(int a, int c);
    return data_t'(a * 131 + c * 7 - 1000);
  endfunction

  task automatic go(dma_dir_e dir, int ext, int gb, int len);
    @(negedge clk);
    cmd.dir = dir; cmd.ext_addr = EXT_AW'(ext); cmd.gb_addr = ADDR_W'(gb); cmd.len = ADDR_W'(len);
    start = 1;
    @(negedge clk); start = 0;
    t0 = cyc;
    while (busy) @(negedge clk);
  endtask

  initial begin
    for (int i = 0; i < 3; i++) rd_req[i] = 0;
    for (int i = 0; i < 2; i++) wr_req[i] = 0;
    for (int a = 0; a < L; a++) for (int c = 0; c < N; c++) u_dram.mem[100 + a][c] = pat(a, c);
    repeat (3) @(posedge clk);
    rst_n = 1;
    traffic = 1;
    go(DMA_LOAD, 100, 200, L);
    t_load = cyc - t0;
    for (int a = 0; a < L; a++) for (int c = 0; c < N; c++)
      chk($signed(u_gb.mem[200 + a][c*16 +: 16]), pat(a, c), "loaded line");
    go(DMA_STORE, 500, 200, L);
    repeat (3) @(negedge clk);
    for (int a = 0; a < L; a++) for (int c = 0; c < N; c++)
      chk(u_dram.mem[500 + a][c], pat(a, c), "stored line");
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL DMA never waited for the global buffer"); end
    $display("load of %0d lines: %0d cycles", L, t_load);
    chk(t_load < L * 2 + 100 + 20, 1, "load overlaps its reads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
