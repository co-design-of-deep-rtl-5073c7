// Self-checking test of the layer controller (N = 8).
//
// The controller drives a real preload buffer, stream buffer, broadcast
// buffer, PE array and global buffer; the testbench writes the operands
// straight into the global buffer's memory and reads the results from it.
// It runs a weight-stationary operation (8 -> 8 channels, 30 pixels), then
// immediately an output-stationary 3x3 operation (2 input channels, 5
// filters, some zero weights, one all-zero tap), then a 1x1 output-stationary
// operation (F = 1), then a 3x3 job whose two input channels are split over
// two operations that accumulate in the register files (os_hold, os_keep),
// then stride-2 operations with F = 3 and F = 2,
// and checks every output word against a reference
// computed here, including requantisation with saturation. It also checks
// that busy/done behave, and that the output-stationary MAC cycles equal the
// number of non-zero weights (zero weights take no array cycle).
module tb_layer_controller;
  import sqz_pkg::*;

  localparam int N = 8;
  localparam int P = 30;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     start = 0, busy, done;
  op_desc_t op;

  logic              rd_req [3], rd_gnt [3], rd_valid [3];
  logic [ADDR_W-1:0] rd_addr [3];
  data_t             rd_data [N];
  logic              wr_req [2], wr_gnt [2];
  logic [ADDR_W-1:0] wr_addr [2];
  data_t             wr_data [2][N];

  logic              pl_start, pl_busy, pl_row_valid, pl_row_pop;
  pl_cmd_t           pl_cmd;
  data_t             pl_row [N];
  logic              sb_start, sb_busy, sb_valid, sb_ready, sb_nz, sb_eol;
  mode_e             sb_mode, bb_mode;
  logic [ADDR_W-1:0] sb_base, sb_count;
  logic [8:0]        sb_n_k;
  data_t             sb_vec [N], sb_w, bcast [N];
  logic [RFA_W-1:0]  sb_k;
  pe_ctrl_t          pe_ctrl;
  acc_t              bottom [N];

  assign rd_req[2] = 1'b0;
  assign rd_addr[2] = '0;
  assign wr_req[1] = 1'b0;
  assign wr_addr[1] = '0;
  always_comb for (int c = 0; c < N; c++) wr_data[1][c] = '0;

  layer_controller #(.N(N)) dut (
    .clk, .rst_n, .start, .op, .busy, .done,
    .pl_start, .pl_cmd,
    .pl_row_valid, .pl_row_pop,
    .sb_start, .sb_mode, .sb_base, .sb_count, .sb_n_k,
    .sb_valid, .sb_ready, .sb_nz, .sb_k, .sb_eol,
    .pe_ctrl, .bb_mode, .bottom_psum(bottom),
    .wr_req(wr_req[0]), .wr_addr(wr_addr[0]), .wr_data(wr_data[0])
  );
  global_buffer #(.N(N), .GB_BYTES(16384)) u_gb (.*);
  preload_buffer #(.N(N)) u_pl (
    .clk, .rst_n, .start(pl_start), .cmd(pl_cmd), .busy(pl_busy),
    .rd_req(rd_req[1]), .rd_addr(rd_addr[1]), .rd_gnt(rd_gnt[1]), .rd_valid(rd_valid[1]),
    .rd_data, .row_valid(pl_row_valid), .row_data(pl_row), .row_pop(pl_row_pop)
  );
  stream_buffer #(.N(N)) u_sb (
    .clk, .rst_n, .start(sb_start), .mode(sb_mode), .base(sb_base), .count(sb_count),
    .n_k(sb_n_k), .busy(sb_busy), .rd_req(rd_req[0]), .rd_addr(rd_addr[0]), .rd_gnt(rd_gnt[0]),
    .rd_valid(rd_valid[0]), .rd_data, .out_valid(sb_valid), .out_ready(sb_ready),
    .out_vec(sb_vec), .out_nz(sb_nz), .out_w(sb_w), .out_k(sb_k), .out_eol(sb_eol)
  );
  broadcast_buffer #(.N(N)) u_bb (.clk, .mode(bb_mode), .ws_vec(sb_vec), .os_weight(sb_w), .row_out(bcast));
  pe_array #(.N(N), .RF_DEPTH(8)) u_arr (.clk, .rst_n, .ctrl(pe_ctrl), .preload_row(pl_row), .bcast, .bottom_psum(bottom));

  int checks = 0, failures = 0, n_mac = 0;
  always @(posedge clk) if (pe_ctrl.mul_en && !pe_ctrl.add_top) n_mac++;  // OS MAC cycles

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int sat(longint v, int sh);
    longint s;
    s = v >>> sh;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return int'(s);
  endfunction

  task automatic gb_put(int line, int c, int v);
    u_gb.mem[line][c*16 +: 16] = 16'(v);
  endtask

  function automatic int gb_get(int line, int c);
    return int'($signed(u_gb.mem[line][c*16 +: 16]));
  endfunction

  task automatic run(op_desc_t o);
    @(negedge clk);
    op = o; start = 1;
    @(negedge clk); start = 0;
    chk(busy, 1, "busy after start");
    while (!done) @(negedge clk);
    @(negedge clk);
    chk(busy, 0, "idle after done");
  endtask

  int W [N][N], X [P][N];
  int F, C, K;
  int I [2][17][17];
  int Wt [5][2][3][3];
  int nzc;

  // Position of filter row ky among the F weight lines of one (channel, kx):
  // stride 1 uses rows F-1 .. 0; stride 2 uses rows F-1, F-3, .. then F-2, F-4, ..
  function automatic int tap_pos(int f, int ky, bit s2);
    int d;
    d = f - 1 - ky;
    if (!s2) return d;
    return (d % 2 == 0) ? d / 2 : (f + 1) / 2 + (d - 1) / 2;
  endfunction

  initial begin
    op_desc_t o;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---------------- WS ----------------
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
      W[r][c] = int'($urandom % 2001) - 1000; gb_put(0 + r, c, W[r][c]);
    end
    for (int p = 0; p < P; p++) for (int r = 0; r < N; r++) begin
      X[p][r] = int'($urandom % 2001) - 1000; gb_put(20 + p, r, X[p][r]);
    end
    o = '0; o.mode = MODE_WS; o.w_base = 0; o.in_base = 20; o.out_base = 60; o.n_pix = P; o.shift = 6;
    run(o);
    for (int p = 0; p < P; p++) for (int c = 0; c < N; c++) begin
      longint s;
      s = 0;
      for (int r = 0; r < N; r++) s += longint'(W[r][c]) * X[p][r];
      chk(gb_get(60 + p, c), sat(s, 6), "WS output");
    end
    // ---------------- OS, 3x3 then 1x1 ----------------
    for (int pass = 0; pass < 5; pass++) begin
      int T, S, NL, IB;
      F = (pass == 1) ? 1 : (pass == 4) ? 2 : 3; C = 2; K = 5;
      S  = (pass >= 3) ? 2 : 1;             // passes 3 and 4: stride 2
      T  = S * (N - 1) + F;                 // input tile side
      NL = (S == 2) ? 3 : 2;                // lines per input row
      IB = (S == 2) ? 400 : 100;
      nzc = 0; n_mac = 0;
      for (int ch = 0; ch < C; ch++) for (int y = 0; y < T; y++) for (int x = 0; x < T; x++) begin
        I[ch][y][x] = int'($urandom % 256) - 128;
        gb_put(IB + (ch*T + y)*NL + x / N, x % N, I[ch][y][x]);
      end
      for (int k = 0; k < K; k++) for (int ch = 0; ch < C; ch++)
        for (int ky = 0; ky < F; ky++) for (int kx = 0; kx < F; kx++) begin
          Wt[k][ch][ky][kx] = ((ch == 0 && ky == 0 && kx == 0 && F > 1) || $urandom % 10 < 4)
                              ? 0 : int'($urandom % 201) - 100;
          if (Wt[k][ch][ky][kx] != 0) nzc++;
          gb_put(200 + (ch*F + kx)*F + tap_pos(F, ky, S == 2), k, Wt[k][ch][ky][kx]);
        end
      for (int ch = 0; ch < C; ch++) for (int ky = 0; ky < F; ky++) for (int kx = 0; kx < F; kx++)
        for (int k = K; k < N; k++) gb_put(200 + (ch*F + kx)*F + (F-1-ky), k, 99);  // beyond n_k: ignored
      o = '0; o.mode = MODE_OS; o.w_base = 200; o.in_base = ADDR_W'(IB); o.out_base = 300;
      o.os_s2 = (S == 2);
      o.f = 4'(F); o.n_ch = 12'(C); o.n_k = 9'(K); o.shift = (pass == 1) ? 0 : 2;
      if (pass != 2) run(o);
      else begin
        // channel 0, results held in the register files; then channel 1 on top
        o.n_ch = 1; o.os_hold = 1;
        run(o);
        o.os_hold = 0; o.os_keep = 1;
        o.in_base = ADDR_W'(100 + T*2); o.w_base = ADDR_W'(200 + F*F);
        run(o);
      end
      for (int k = 0; k < K; k++) for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
        longint s;
        s = 0;
        for (int ch = 0; ch < C; ch++) for (int ky = 0; ky < F; ky++) for (int kx = 0; kx < F; kx++)
          s += longint'(I[ch][S*r+ky][S*c+kx]) * Wt[k][ch][ky][kx];
        chk(gb_get(300 + k*N + r, c), sat(s, (pass == 1) ? 0 : 2),
            (pass == 0) ? "OS 3x3 output" : (pass == 1) ? "OS 1x1 output" :
            (pass == 2) ? "OS split-channel output" : "OS stride-2 output");
      end
      chk(n_mac, nzc, "MAC cycles = non-zero weights");
    end
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
