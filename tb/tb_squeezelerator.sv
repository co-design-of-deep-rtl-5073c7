// End-to-end test of the accelerator at its default size (16 x 16 PEs,
// 16-entry register files, 128 KB global buffer).
//
// The test places a weight-stationary job (a 1x1 convolution: 16 input
// channels to 16 output channels over 64 pixels) and an output-stationary job
// (a 3x3 convolution, 3 input channels, 8 filters, 16 x 16 output block, with
// about 40 % zero weights) in external memory, DMAs them into the global
// buffer, runs the WS operation and then the OS operation back to back,
// loads the data of a second OS job while the first one computes, runs it
// as two operations whose input channels accumulate in the register files,
// then a stride-2 3x3 job (3 channels, 8 filters, as in a first layer),
// DMAs all results back out, and compares every output word with a
// reference computed here. It also counts the mechanisms the design has:
// each dataflow mode, a mode switch with no idle cycle, zero-weight skips,
// all-zero taps, vertical input-window shifts, register-file drains,
// accumulation across operations, stride-2 operations, DMA
// loads and stores, DMA running during an operation, and global-buffer
// arbitration stalls of the DMA. A mechanism that never happens counts as a
// failure. The WS operation's cycle count is also checked against
// N (preload) + P (one pixel per cycle) + N (adder chain) plus a small
// pipeline overhead.
module tb_squeezelerator;
  import sqz_pkg::*;

  localparam int N  = 16;
  localparam int P  = 64;      // WS pixels
  localparam int F  = 3;
  localparam int C  = 3;
  localparam int K  = 8;
  localparam int T  = N + F - 1;   // OS input tile side

  // global-buffer layout (lines)
  localparam int WS_W   = 0;
  localparam int WS_IN  = 16;
  localparam int WS_OUT = 96;
  localparam int OS_IN  = 160;                  // C*T*2 = 108 lines
  localparam int OS_W   = OS_IN + C*T*2;        // C*F*F = 27 lines
  localparam int OS_OUT = 400;                  // K*N = 128 lines
  localparam int OS2_IN  = 600;
  localparam int OS2_W   = OS2_IN + C*T*2;
  localparam int OS2_OUT = 800;
  localparam int T3      = 2*(N - 1) + F;        // stride-2 input tile side
  localparam int OS3_IN  = 1100;                 // C*T3*3 = 297 lines
  localparam int OS3_W   = OS3_IN + C*T3*3;
  localparam int OS3_OUT = 1500;
  localparam int EXT_OFS = 1000;               // external address = GB line + EXT_OFS

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

  dram_model #(.N(N), .LINES(4096), .LATENCY(100), .STALL_EVERY(7)) u_dram (
    .clk, .req_valid(ext_req_valid), .req_ready(ext_req_ready), .req_write(ext_req_write),
    .req_addr(ext_req_addr), .req_wdata(ext_req_wdata),
    .rsp_valid(ext_rsp_valid), .rsp_ready(ext_rsp_ready), .rsp_rdata(ext_rsp_rdata)
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- data ----------------
  int wsW [N][N];          // [in ch][out ch]
  int wsX [P][N];          // [pixel][in ch]
  int osI [2][C][T][T];    // [job][ch][y][x]
  int osW [2][K][C][F][F]; // [job][k][ch][ky][kx]
  int s2I [C][T3][T3];     // stride-2 job input [ch][y][x]
  int s2W [K][C][F][F];    // stride-2 job weights

  // Position of filter row ky among the F weight lines of one (ch, kx):
  // rows F-1, F-3, .. then F-2, F-4, .. for stride 2, rows F-1 .. 0 for stride 1.
  function automatic int tap_pos(int ky, bit s2);
    int d;
    d = F - 1 - ky;
    if (!s2) return d;
    return (d % 2 == 0) ? d / 2 : (F + 1) / 2 + (d - 1) / 2;
  endfunction

  function automatic int sat(longint v, int sh);
    longint s = v >>> sh;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return int'(s);
  endfunction

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  task automatic put(int line, int c, int v);
    u_dram.mem[line + EXT_OFS][c] = data_t'(v);
  endtask

  task automatic build();
    for (int l = 0; l < 1000; l++) for (int c = 0; c < N; c++) put(l, c, 0);
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
      wsW[r][c] = rnd(-100, 100);
      put(WS_W + r, c, wsW[r][c]);
    end
    for (int p = 0; p < P; p++) for (int r = 0; r < N; r++) begin
      wsX[p][r] = rnd(-128, 127);
      put(WS_IN + p, r, wsX[p][r]);
    end
    for (int j = 0; j < 2; j++) begin
      int ib = j ? OS2_IN : OS_IN;
      int wb = j ? OS2_W : OS_W;
      for (int ch = 0; ch < C; ch++) for (int y = 0; y < T; y++) for (int x = 0; x < T; x++) begin
        osI[j][ch][y][x] = rnd(-128, 127);
        put(ib + (ch*T + y)*2 + x / N, x % N, osI[j][ch][y][x]);
      end
      for (int k = 0; k < K; k++) for (int ch = 0; ch < C; ch++)
        for (int ky = 0; ky < F; ky++) for (int kx = 0; kx < F; kx++) begin
          // about 40 % zeros; tap (ch 1, ky 1, kx 1) is zero for all filters
          if ((ch == 1 && ky == 1 && kx == 1) || ($urandom % 100) < 40) osW[j][k][ch][ky][kx] = 0;
          else osW[j][k][ch][ky][kx] = rnd(-60, 60);
          put(wb + (ch*F + kx)*F + (F-1-ky), k, osW[j][k][ch][ky][kx]);
        end
    end
    for (int ch = 0; ch < C; ch++) for (int y = 0; y < T3; y++) for (int x = 0; x < T3; x++) begin
      s2I[ch][y][x] = rnd(-128, 127);
      put(OS3_IN + (ch*T3 + y)*3 + x / N, x % N, s2I[ch][y][x]);
    end
    for (int k = 0; k < K; k++) for (int ch = 0; ch < C; ch++)
      for (int ky = 0; ky < F; ky++) for (int kx = 0; kx < F; kx++) begin
        s2W[k][ch][ky][kx] = (($urandom % 100) < 40) ? 0 : rnd(-60, 60);
        put(OS3_W + (ch*F + kx)*F + tap_pos(ky, 1'b1), k, s2W[k][ch][ky][kx]);
      end
  endtask

  // ---------------- host helpers ----------------
  task automatic dma(dma_dir_e dir, int gb, int len);
    while (dma_busy) @(posedge clk);
    dcmd.dir = dir; dcmd.gb_addr = ADDR_W'(gb); dcmd.ext_addr = EXT_AW'(gb + EXT_OFS);
    dcmd.len = ADDR_W'(len);
    dma_start <= 1'b1;
    @(posedge clk);
    dma_start <= 1'b0;
    @(posedge clk);
  endtask

  task automatic dma_wait();
    while (dma_busy) @(posedge clk);
  endtask

  function automatic op_desc_t ws_op();
    op_desc_t o = '0;
    o.mode = MODE_WS; o.w_base = ADDR_W'(WS_W); o.in_base = ADDR_W'(WS_IN);
    o.out_base = ADDR_W'(WS_OUT); o.n_pix = 16'(P); o.shift = 5'd4;
    return o;
  endfunction

  function automatic op_desc_t os_op(int j);
    op_desc_t o = '0;
    o.mode = MODE_OS; o.w_base = ADDR_W'(j ? OS2_W : OS_W); o.in_base = ADDR_W'(j ? OS2_IN : OS_IN);
    o.out_base = ADDR_W'(j ? OS2_OUT : OS_OUT); o.f = 4'(F); o.n_ch = 12'(C); o.n_k = 9'(K);
    o.shift = 5'd3;
    return o;
  endfunction

  int fail_by [string];

  task automatic check(int line, int c, int exp, string what);
    int got = int'(u_dram.mem[line + EXT_OFS][c]);
    checks++;
    if (got !== exp) begin
      failures++;
      if (!fail_by.exists(what)) fail_by[what] = 0;
      fail_by[what]++;
      if (fail_by[what] < 4) $display("FAIL %s line %0d word %0d: got %0d expected %0d", what, line, c, got, exp);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_ws = 0, n_os = 0, n_switch = 0, n_skip = 0, n_zero_tap = 0, n_vshift = 0;
  int n_keep = 0, n_s2 = 0;
  int n_drain = 0, n_dma_ld = 0, n_dma_st = 0, n_overlap = 0, n_gb_stall = 0;
  logic  done_q = 0;
  mode_e last_mode = MODE_WS;
  int    n_ops = 0;

  always @(posedge clk) if (rst_n) begin
    done_q <= op_done;
    if (op_start && !op_busy) begin
      if (op.mode == MODE_WS) n_ws++; else n_os++;
      if (op.mode == MODE_OS && op.os_keep) n_keep++;
      if (op.mode == MODE_OS && op.os_s2) n_s2++;
      if (n_ops > 0 && op.mode != last_mode && done_q) n_switch++;
      last_mode = op.mode;
      n_ops++;
    end
    if (dut.u_ctrl.st == dut.u_ctrl.S_MAC && dut.sb_valid && !dut.sb_nz) n_zero_tap++;
    if (dut.u_ctrl.st == dut.u_ctrl.S_SHIFT && dut.pl_row_valid) n_vshift++;
    if (dut.u_ctrl.st == dut.u_ctrl.S_DRAIN && dut.u_ctrl.cnt == 0) n_drain++;
    if (dma_start && !dma_busy) begin
      if (dcmd.dir == DMA_LOAD) n_dma_ld++; else n_dma_st++;
    end
    if (dma_busy && op_busy) n_overlap++;
    if ((dut.rd_req[2] && !dut.rd_gnt[2]) || (dut.wr_req[1] && !dut.wr_gnt[1])) n_gb_stall++;
  end

  // zero weights skipped = weights in the lines minus MAC cycles issued
  int n_mac = 0;
  always @(posedge clk) if (rst_n && dut.pe_ctrl.mul_en && dut.u_ctrl.st == dut.u_ctrl.S_MAC) n_mac++;

  task automatic mech(string name, int n);
    checks++;
    $display("mechanism %-28s : %0d", name, n);
    if (n == 0) begin failures++; $display("FAIL mechanism %s never happened", name); end
  endtask

  // ---------------- test ----------------
  longint t0, t_ws;
  op_desc_t o2;
  int nz_weights;

  initial begin
    build();
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // bring WS job and first OS job into the global buffer
    dma(DMA_LOAD, WS_W, 16 + P);
    dma(DMA_LOAD, OS_IN, C*T*2 + C*F*F);
    dma_wait();

    // WS operation
    op <= ws_op();
    op_start <= 1'b1;
    @(posedge clk);
    t0 = cyc;
    op_start <= 1'b0;
    while (!op_done) @(posedge clk);
    t_ws = cyc - t0;
    // OS operation right after, with no idle cycle
    op <= os_op(0);
    op_start <= 1'b1;
    @(posedge clk);
    op_start <= 1'b0;
    // double buffering: second OS job arrives while the first one runs
    dma(DMA_LOAD, OS2_IN, C*T*2 + C*F*F);
    while (!op_done) @(posedge clk);
    dma_wait();
    // second OS job: channels 0..C-2 in one operation that keeps its sums in
    // the register files, the last channel in a second one that adds to them
    o2 = os_op(1);
    o2.n_ch = 12'(C - 1); o2.os_hold = 1'b1;
    op <= o2;
    op_start <= 1'b1;
    @(posedge clk);
    op_start <= 1'b0;
    // store WS results while the second OS job runs
    dma(DMA_STORE, WS_OUT, P);
    while (!op_done) @(posedge clk);
    o2 = os_op(1);
    o2.n_ch = 12'(1); o2.os_keep = 1'b1;
    o2.in_base = ADDR_W'(OS2_IN + (C - 1)*T*2); o2.w_base = ADDR_W'(OS2_W + (C - 1)*F*F);
    op <= o2;
    op_start <= 1'b1;
    @(posedge clk);
    op_start <= 1'b0;
    // stride-2 job (first-layer style) arrives while the last operation runs
    dma(DMA_LOAD, OS3_IN, C*T3*3 + C*F*F);
    while (!op_done) @(posedge clk);
    dma_wait();
    o2 = os_op(0);
    o2.os_s2 = 1'b1; o2.in_base = ADDR_W'(OS3_IN); o2.w_base = ADDR_W'(OS3_W);
    o2.out_base = ADDR_W'(OS3_OUT);
    op <= o2;
    op_start <= 1'b1;
    @(posedge clk);
    op_start <= 1'b0;
    while (!op_done) @(posedge clk);
    dma(DMA_STORE, OS3_OUT, K*N);
    dma_wait();
    dma(DMA_STORE, OS_OUT, K*N);
    dma_wait();
    dma(DMA_STORE, OS2_OUT, K*N);
    dma_wait();

    // WS results
    for (int p = 0; p < P; p++) for (int c = 0; c < N; c++) begin
      longint s;
      s = 0;
      for (int r = 0; r < N; r++) s += longint'(wsW[r][c]) * wsX[p][r];
      check(WS_OUT + p, c, sat(s, 4), "WS");
    end
    // OS results
    for (int j = 0; j < 2; j++)
      for (int k = 0; k < K; k++) for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
        longint s;
        s = 0;
        for (int ch = 0; ch < C; ch++) for (int ky = 0; ky < F; ky++) for (int kx = 0; kx < F; kx++)
          s += longint'(osI[j][ch][r+ky][c+kx]) * osW[j][k][ch][ky][kx];
        check((j ? OS2_OUT : OS_OUT) + k*N + r, c, sat(s, 3), j ? "OS2" : "OS");
      end

    // stride-2 results: output (r, c) reads input (2r+ky, 2c+kx)
    for (int k = 0; k < K; k++) for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
      longint s;
      s = 0;
      for (int ch = 0; ch < C; ch++) for (int ky = 0; ky < F; ky++) for (int kx = 0; kx < F; kx++)
        s += longint'(s2I[ch][2*r+ky][2*c+kx]) * s2W[k][ch][ky][kx];
      check(OS3_OUT + k*N + r, c, sat(s, 3), "OS stride 2");
    end
    // WS rate: preload N rows, P pixels at one per cycle, N-cycle adder chain
    checks++;
    $display("WS operation: %0d cycles (N + P + N = %0d)", t_ws, 2*N + P);
    if (t_ws < 2*N + P || t_ws > 2*N + P + 10) begin
      failures++; $display("FAIL WS cycle count %0d", t_ws);
    end
    // zero skipping: MAC cycles equal the non-zero weights exactly
    nz_weights = 0;
    for (int j = 0; j < 2; j++) for (int k = 0; k < K; k++) for (int ch = 0; ch < C; ch++)
      for (int ky = 0; ky < F; ky++) for (int kx = 0; kx < F; kx++)
        if (osW[j][k][ch][ky][kx] != 0) nz_weights++;
    for (int k = 0; k < K; k++) for (int ch = 0; ch < C; ch++)
      for (int ky = 0; ky < F; ky++) for (int kx = 0; kx < F; kx++)
        if (s2W[k][ch][ky][kx] != 0) nz_weights++;
    n_skip = 3*K*C*F*F - n_mac;
    checks++;
    if (n_mac != nz_weights) begin
      failures++; $display("FAIL MAC cycles %0d, non-zero weights %0d", n_mac, nz_weights);
    end

    mech("weight-stationary operation", n_ws);
    mech("output-stationary operation", n_os);
    mech("mode switch without gap", n_switch);
    mech("zero weight skipped", n_skip);
    mech("all-zero tap", n_zero_tap);
    mech("vertical input shift", n_vshift);
    mech("register-file drain", n_drain);
    mech("accumulation across operations", n_keep);
    mech("stride-2 operation", n_s2);
    mech("DMA load", n_dma_ld);
    mech("DMA store", n_dma_st);
    mech("DMA during operation", n_overlap);
    mech("DMA stalled by arbitration", n_gb_stall);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
