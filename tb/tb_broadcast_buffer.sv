// Self-checking test of the broadcast buffer (N = 8).
//
// Weight-stationary mode: feeds a new random pixel vector every cycle and
// checks that row r shows word r of the vector fed r cycles earlier.
// Output-stationary mode: checks that every row shows the weight in the same
// cycle. Then switches back and checks the skew again.
module tb_broadcast_buffer;
  import sqz_pkg::*;

  localparam int N = 8;
  localparam int T = 60;

  logic  clk = 0;
  mode_e mode;
  data_t ws_vec [N], os_weight, row_out [N];
  always #5 clk = ~clk;

  broadcast_buffer #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  data_t hist [T][N];

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    mode = MODE_WS; os_weight = 0;
    for (int pass = 0; pass < 2; pass++) begin
      mode = MODE_WS;
      for (int t = 0; t < T; t++) begin
        @(negedge clk);
        for (int r = 0; r < N; r++) begin hist[t][r] = data_t'($urandom); ws_vec[r] = hist[t][r]; end
        #1;
        if (t >= N) for (int r = 0; r < N; r++) chk(row_out[r], hist[t-r][r], "WS skew");
      end
      mode = MODE_OS;
      for (int t = 0; t < 20; t++) begin
        @(negedge clk);
        os_weight = data_t'($urandom);
        for (int r = 0; r < N; r++) ws_vec[r] = data_t'($urandom);
        #1;
        for (int r = 0; r < N; r++) chk(row_out[r], os_weight, "OS broadcast");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
