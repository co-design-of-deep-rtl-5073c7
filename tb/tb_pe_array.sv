// Self-checking test of the PE array (N = 8 to keep it short).
//
// Weight-stationary: pushes an N x N weight block through the top row, feeds
// skewed pixel vectors (row r delayed r cycles, as the broadcast buffer does)
// and checks every column sum leaving the bottom exactly N cycles after the
// pixel entered row 0. Output-stationary: loads an input block, accumulates a
// broadcast weight per filter into the register files over two window
// positions (one vertical push between them), drains each filter through the
// bottom row and checks all N x N results and their order.
module tb_pe_array;
  import sqz_pkg::*;

  localparam int N = 8;
  localparam int P = 20;

  logic     clk = 0, rst_n = 0;
  pe_ctrl_t ctrl;
  data_t    preload_row [N], bcast [N];
  acc_t     bottom_psum [N];
  always #5 clk = ~clk;

  pe_array #(.N(N), .RF_DEPTH(4)) dut (.*);

  int checks = 0, failures = 0;
  int W [N][N], X [P][N], A [N+1][N];
  int w_os [3][2];

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    ctrl = '0;
    for (int i = 0; i < N; i++) begin preload_row[i] = 0; bcast[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---------------- weight stationary ----------------
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) W[r][c] = int'($urandom % 201) - 100;
    for (int p = 0; p < P; p++) for (int r = 0; r < N; r++) X[p][r] = int'($urandom % 256) - 128;
    for (int r = N - 1; r >= 0; r--) begin
      @(negedge clk);
      ctrl = '0; ctrl.act_ld = 1;
      for (int c = 0; c < N; c++) preload_row[c] = data_t'(W[r][c]);
    end
    for (int t = 0; t < P + N; t++) begin
      @(negedge clk);
      ctrl = '0; ctrl.mul_en = 1; ctrl.add_top = 1; ctrl.out_we = 1;
      for (int r = 0; r < N; r++)
        bcast[r] = (t - r >= 0 && t - r < P) ? data_t'(X[t-r][r]) : '0;
      // pixel p entered row 0 at cycle p, its sums are at the bottom at cycle p+N
      if (t >= N) for (int c = 0; c < N; c++) begin
        longint s;
        s = 0;
        for (int r = 0; r < N; r++) s += longint'(W[r][c]) * X[t-N][r];
        chk(bottom_psum[c], s, "WS column sum");
      end
    end
    // ---------------- output stationary ----------------
    for (int y = 0; y <= N; y++) for (int c = 0; c < N; c++) A[y][c] = int'($urandom % 256) - 128;
    for (int k = 0; k < 3; k++) for (int j = 0; j < 2; j++) w_os[k][j] = int'($urandom % 61) - 30;
    for (int k = 0; k < 3; k++) begin
      @(negedge clk); ctrl = '0; ctrl.rf_clr = 1; ctrl.rf_we = 1; ctrl.rf_addr = RFA_W'(k);
    end
    // block rows y = 1..N (PE row r holds A[r+1]), pushed bottom row first
    for (int y = N; y >= 1; y--) begin
      @(negedge clk); ctrl = '0; ctrl.act_ld = 1;
      for (int c = 0; c < N; c++) preload_row[c] = data_t'(A[y][c]);
    end
    for (int k = 0; k < 3; k++) begin
      @(negedge clk); ctrl = '0; ctrl.mul_en = 1; ctrl.rf_we = 1; ctrl.rf_addr = RFA_W'(k);
      for (int r = 0; r < N; r++) bcast[r] = data_t'(w_os[k][1]);
    end
    // one vertical push: PE row r now holds A[r]
    @(negedge clk); ctrl = '0; ctrl.act_ld = 1;
    for (int c = 0; c < N; c++) preload_row[c] = data_t'(A[0][c]);
    for (int k = 0; k < 3; k++) begin
      @(negedge clk); ctrl = '0; ctrl.mul_en = 1; ctrl.rf_we = 1; ctrl.rf_addr = RFA_W'(k);
      for (int r = 0; r < N; r++) bcast[r] = data_t'(w_os[k][0]);
    end
    // drain
    for (int k = 0; k < 3; k++) for (int j = 0; j < N; j++) begin
      @(negedge clk); ctrl = '0; ctrl.out_we = 1; ctrl.add_top = (j != 0); ctrl.rf_addr = RFA_W'(k);
      @(posedge clk); #1;
      for (int c = 0; c < N; c++) begin
        int r;
        r = N - 1 - j;
        chk(bottom_psum[c], longint'(A[r+1][c]) * w_os[k][1] + longint'(A[r][c]) * w_os[k][0], "OS drain");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
