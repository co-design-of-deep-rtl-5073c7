// Workload test: the first layers of SqueezeNet v1.1 on one 16 x 16 output
// tile, at the accelerator's default size.
//
// Each layer's operands (random values, real layer shapes) are placed in
// external memory, loaded into the global buffer by DMA, computed by the
// operations a compiler would issue for the tile, stored back by DMA and
// compared word by word with a reference computed here:
//   conv1       3x3, stride 2, 3 -> 64 channels: 4 stride-2 OS operations of 16 filters
//   fire2 squeeze  1x1, 64 -> 16 channels: one OS operation with F = 1, C = 64
//   fire2 expand1x1  1x1, 16 -> 64 channels over 256 pixels: 4 WS operations
//   fire2 expand3x3  3x3, 16 -> 64 channels: 4 OS operations of 16 filters
// Weights are about 40 % zeros. The layers use independent data: the output
// layout of one operation is not the input layout of the next, and the
// re-layout (as well as pooling and activation) is outside the accelerator.
// The test prints the cycles of each layer's operations (DMA excluded), so
// the WS / OS choice per layer can be judged.
module tb_squeezenet_tile;
  import sqz_pkg::*;

  localparam int N   = 16;
  localparam int F   = 3;
  localparam int XO  = 4096;   // external address offset per layer

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     op_start = 0, op_busy, op_done;
  op_desc_t op;
  logic     dma_start = 0, dma_busy;
  dma_cmd_t dcmd;
  logic              ext_req_valid, ext_req_ready, ext_req_write, ext_rsp_valid, ext_rsp_ready;
  logic [EXT_AW-1:0] ext_req_addr;
  data_t             ext_req_wdata [N], ext_rsp_rdata [N];

  squeezelerator dut (
    .clk, .rst_n, .op_start, .op, .op_busy, .op_done,
    .dma_start, .dma_cmd(dcmd), .dma_busy,
    .ext_req_valid, .ext_req_ready, .ext_req_write, .ext_req_addr, .ext_req_wdata,
    .ext_rsp_valid, .ext_rsp_ready, .ext_rsp_rdata
  );

  dram_model #(.N(N), .LINES(4 * XO), .LATENCY(100)) u_dram (
    .clk, .req_valid(ext_req_valid), .req_ready(ext_req_ready), .req_write(ext_req_write),
    .req_addr(ext_req_addr), .req_wdata(ext_req_wdata),
    .rsp_valid(ext_rsp_valid), .rsp_ready(ext_rsp_ready), .rsp_rdata(ext_rsp_rdata)
  );

  int checks = 0, failures = 0;
  int layer = 0;       // selects the external region
  longint op_cycles;

  // ---------------- helpers ----------------
  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  function automatic int wrnd();
    return (($urandom % 100) < 40) ? 0 : rnd(-60, 60);
  endfunction

  function automatic int sat(longint v, int sh);
    longint s;
    s = v >>> sh;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return int'(s);
  endfunction

  task automatic put(int gb_line, int c, int v);
    u_dram.mem[gb_line + layer * XO][c] = data_t'(v);
  endtask

  function automatic int get(int gb_line, int c);
    return int'(u_dram.mem[gb_line + layer * XO][c]);
  endfunction

  task automatic dma(dma_dir_e dir, int gb, int len);
    @(posedge clk);
    while (dma_busy) @(posedge clk);
    dcmd.dir = dir; dcmd.gb_addr = ADDR_W'(gb); dcmd.ext_addr = EXT_AW'(gb + layer * XO);
    dcmd.len = ADDR_W'(len);
    dma_start <= 1'b1;
    @(posedge clk);
    dma_start <= 1'b0;
    @(posedge clk);
    while (dma_busy) @(posedge clk);
  endtask

  task automatic run(op_desc_t o);
    longint t;
    op <= o;
    op_start <= 1'b1;
    @(posedge clk);
    op_start <= 1'b0;
    t = 0;
    while (!op_done) begin @(posedge clk); t++; end
    op_cycles += t + 1;
  endtask

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // ---------------- data ----------------
  int c1I [3][33][33];          // conv1 input tile (stride 2: 2*15+3 rows)
  int c1W [64][3][F][F];
  int sqI [64][16][16];         // squeeze input
  int sqW [16][64];
  int e1X [256][16];            // expand1x1 input, [pixel][channel]
  int e1W [16][64];             // [in][out]
  int e3I [16][18][18];         // expand3x3 input tile
  int e3W [64][16][F][F];

  function automatic int tap_pos(int ky, bit s2);
    int d;
    d = F - 1 - ky;
    if (!s2) return d;
    return (d % 2 == 0) ? d / 2 : (F + 1) / 2 + (d - 1) / 2;
  endfunction

  initial begin
    op_desc_t o;
    longint s;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // ---------- conv1: 3x3/2, 3 -> 64 ----------
    layer = 0;
    for (int ch = 0; ch < 3; ch++) for (int y = 0; y < 33; y++) for (int x = 0; x < 48; x++) begin
      if (x < 33) c1I[ch][y][x] = rnd(-128, 127);
      put(0 + (ch*33 + y)*3 + x / N, x % N, (x < 33) ? c1I[ch][y][x] : 0);
    end
    for (int k = 0; k < 64; k++) for (int ch = 0; ch < 3; ch++)
      for (int ky = 0; ky < F; ky++) for (int kx = 0; kx < F; kx++) begin
        c1W[k][ch][ky][kx] = wrnd();
        put(300 + (k / 16)*27 + (ch*F + kx)*F + tap_pos(ky, 1'b1), k % 16, c1W[k][ch][ky][kx]);
      end
    dma(DMA_LOAD, 0, 300 + 4*27);
    op_cycles = 0;
    for (int g = 0; g < 4; g++) begin
      o = '0; o.mode = MODE_OS; o.os_s2 = 1'b1; o.f = 4'(F); o.n_ch = 12'd3; o.n_k = 9'd16;
      o.in_base = 16'd0; o.w_base = ADDR_W'(300 + g*27); o.out_base = ADDR_W'(500 + g*256);
      o.shift = 5'd4;
      run(o);
    end
    $display("conv1 (3x3/2, 3->64):        %0d cycles", op_cycles);
    dma(DMA_STORE, 500, 4*256);
    for (int k = 0; k < 64; k++) for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
      s = 0;
      for (int ch = 0; ch < 3; ch++) for (int ky = 0; ky < F; ky++) for (int kx = 0; kx < F; kx++)
        s += longint'(c1I[ch][2*r+ky][2*c+kx]) * c1W[k][ch][ky][kx];
      chk(get(500 + k*N + r, c), sat(s, 4), "conv1");
    end

    // ---------- fire2 squeeze: 1x1, 64 -> 16, OS with F = 1 ----------
    layer = 1;
    for (int ch = 0; ch < 64; ch++) for (int y = 0; y < 16; y++) for (int x = 0; x < 32; x++) begin
      if (x < 16) sqI[ch][y][x] = rnd(-128, 127);
      put((ch*16 + y)*2 + x / N, x % N, (x < 16) ? sqI[ch][y][x] : 0);
    end
    for (int k = 0; k < 16; k++) for (int ch = 0; ch < 64; ch++) begin
      sqW[k][ch] = wrnd();
      put(2100 + ch, k, sqW[k][ch]);
    end
    dma(DMA_LOAD, 0, 2048);
    dma(DMA_LOAD, 2100, 64);
    op_cycles = 0;
    o = '0; o.mode = MODE_OS; o.f = 4'd1; o.n_ch = 12'd64; o.n_k = 9'd16;
    o.in_base = 16'd0; o.w_base = 16'd2100; o.out_base = 16'd2200; o.shift = 5'd5;
    run(o);
    $display("fire2 squeeze (1x1, 64->16): %0d cycles (OS, F = 1)", op_cycles);
    dma(DMA_STORE, 2200, 256);
    for (int k = 0; k < 16; k++) for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
      s = 0;
      for (int ch = 0; ch < 64; ch++) s += longint'(sqI[ch][r][c]) * sqW[k][ch];
      chk(get(2200 + k*N + r, c), sat(s, 5), "fire2 squeeze");
    end

    // ---------- fire2 expand1x1: 1x1, 16 -> 64 over 256 pixels, WS ----------
    layer = 2;
    for (int i = 0; i < 16; i++) for (int k = 0; k < 64; k++) begin
      e1W[i][k] = wrnd();
      put((k / 16)*16 + i, k % 16, e1W[i][k]);
    end
    for (int p = 0; p < 256; p++) for (int i = 0; i < 16; i++) begin
      e1X[p][i] = rnd(-128, 127);
      put(100 + p, i, e1X[p][i]);
    end
    dma(DMA_LOAD, 0, 356);
    op_cycles = 0;
    for (int g = 0; g < 4; g++) begin
      o = '0; o.mode = MODE_WS; o.w_base = ADDR_W'(g*16); o.in_base = 16'd100;
      o.out_base = ADDR_W'(400 + g*256); o.n_pix = 16'd256; o.shift = 5'd4;
      run(o);
    end
    $display("fire2 expand1x1 (16->64):    %0d cycles (WS)", op_cycles);
    checks++;
    if (op_cycles > 4 * (2*N + 256 + 10)) begin
      failures++; $display("FAIL WS rate: %0d cycles", op_cycles);
    end
    dma(DMA_STORE, 400, 1024);
    for (int g = 0; g < 4; g++) for (int p = 0; p < 256; p++) for (int c = 0; c < N; c++) begin
      s = 0;
      for (int i = 0; i < 16; i++) s += longint'(e1X[p][i]) * e1W[i][g*16 + c];
      chk(get(400 + g*256 + p, c), sat(s, 4), "fire2 expand1x1");
    end

    // ---------- fire2 expand3x3: 3x3, 16 -> 64, OS ----------
    layer = 3;
    for (int ch = 0; ch < 16; ch++) for (int y = 0; y < 18; y++) for (int x = 0; x < 32; x++) begin
      if (x < 18) e3I[ch][y][x] = rnd(-128, 127);
      put(1500 + (ch*18 + y)*2 + x / N, x % N, (x < 18) ? e3I[ch][y][x] : 0);
    end
    for (int k = 0; k < 64; k++) for (int ch = 0; ch < 16; ch++)
      for (int ky = 0; ky < F; ky++) for (int kx = 0; kx < F; kx++) begin
        e3W[k][ch][ky][kx] = wrnd();
        put(2100 + (k / 16)*144 + (ch*F + kx)*F + tap_pos(ky, 1'b0), k % 16, e3W[k][ch][ky][kx]);
      end
    dma(DMA_LOAD, 1500, 576);
    dma(DMA_LOAD, 2100, 576);
    op_cycles = 0;
    for (int g = 0; g < 4; g++) begin
      o = '0; o.mode = MODE_OS; o.f = 4'(F); o.n_ch = 12'd16; o.n_k = 9'd16;
      o.in_base = 16'd1500; o.w_base = ADDR_W'(2100 + g*144); o.out_base = ADDR_W'(2700 + g*256);
      o.shift = 5'd6;
      run(o);
    end
    $display("fire2 expand3x3 (16->64):    %0d cycles (OS)", op_cycles);
    dma(DMA_STORE, 2700, 1024);
    for (int k = 0; k < 64; k++) for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
      s = 0;
      for (int ch = 0; ch < 16; ch++) for (int ky = 0; ky < F; ky++) for (int kx = 0; kx < F; kx++)
        s += longint'(e3I[ch][r+ky][c+kx]) * e3W[k][ch][ky][kx];
      chk(get(2700 + k*N + r, c), sat(s, 6), "fire2 expand3x3");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
