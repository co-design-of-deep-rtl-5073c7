// Self-checking test of the global buffer at its full 128 KB size.
//
// Random reads and writes from all requesters, each requesting with 50 %
// probability, against a model of the memory: checks the fixed priorities of
// the read and write arbiters, that the granted read returns the line the
// model holds one cycle later with rd_valid only for the granted requester,
// and that a granted write lands. It also writes the first and last line.
module tb_global_buffer;
  import sqz_pkg::*;

  localparam int N     = 16;
  localparam int LINES = 131072 / (N * 2);

  logic              clk = 0, rst_n = 0;
  logic              rd_req [3], rd_gnt [3], rd_valid [3];
  logic [ADDR_W-1:0] rd_addr [3];
  data_t             rd_data [N];
  logic              wr_req [2], wr_gnt [2];
  logic [ADDR_W-1:0] wr_addr [2];
  data_t             wr_data [2][N];
  always #5 clk = ~clk;

  global_buffer #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  data_t model [int][N];
  int    exp_addr;

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic data_t mword(int a, int c);
    return model.exists(a) ? model[a][c] : data_t'(0);
  endfunction

  initial begin
    for (int i = 0; i < 3; i++) begin rd_req[i] = 0; rd_addr[i] = 0; end
    for (int i = 0; i < 2; i++) begin wr_req[i] = 0; wr_addr[i] = 0; end
    // zero the lines the test uses
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 64; a++) begin
      @(negedge clk);
      wr_req[1] = 1; wr_addr[1] = ADDR_W'(a < 32 ? a : LINES - 64 + a);
      for (int c = 0; c < N; c++) wr_data[1][c] = '0;
      model[int'(wr_addr[1])] = wr_data[1];
    end
    @(negedge clk); wr_req[1] = 0;
    for (int t = 0; t < 3000; t++) begin
      int g, w;
      @(negedge clk);
      for (int i = 0; i < 3; i++) begin
        rd_req[i]  = $urandom % 2;
        rd_addr[i] = ADDR_W'(($urandom % 2) ? $urandom % 32 : LINES - 32 + $urandom % 32);
      end
      for (int i = 0; i < 2; i++) begin
        wr_req[i]  = $urandom % 2;
        wr_addr[i] = ADDR_W'(($urandom % 2) ? $urandom % 32 : LINES - 32 + $urandom % 32);
        for (int c = 0; c < N; c++) wr_data[i][c] = data_t'($urandom);
      end
      #1;
      g = rd_req[0] ? 0 : rd_req[1] ? 1 : rd_req[2] ? 2 : -1;
      w = wr_req[0] ? 0 : wr_req[1] ? 1 : -1;
      for (int i = 0; i < 3; i++) chk(rd_gnt[i], (i == g), "read priority");
      for (int i = 0; i < 2; i++) chk(wr_gnt[i], (i == w), "write priority");
      exp_addr = (g >= 0) ? int'(rd_addr[g]) : 0;
      // read of a line written in the same cycle returns the old contents:
      // the model is updated after the expectation is taken
      @(posedge clk);
      if (g >= 0) begin
        data_t old [N];
        for (int c = 0; c < N; c++) old[c] = mword(exp_addr, c);
        if (w >= 0) model[int'(wr_addr[w])] = wr_data[w];
        #1;
        for (int c = 0; c < N; c++) chk(rd_data[c], old[c], "read data (same cycle)");
        for (int i = 0; i < 3; i++) chk(rd_valid[i], (i == g), "rd_valid");
      end else if (w >= 0) model[int'(wr_addr[w])] = wr_data[w];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
