// Self-checking test of the preload buffer (N = 8).
//
// A model of the global-buffer read port in the testbench grants requests at
// random and returns line a, word c = a*37 + c*5 one cycle later. The test
// runs a stride-1 window command (2 lines per row) over 2 channels x 3 filter
// columns x 10 rows, a one-line (weight-stationary) command, and stride-2
// window commands (3 lines per row, even and odd row phases) for F = 3, 2
// and 1. It pops rows at random and checks each row's words against the
// pixel window worked out from the command, in the documented order. It also
// checks that no more than DEPTH rows are ever fetched ahead of the consumer.
module tb_preload_buffer;
  import sqz_pkg::*;

  localparam int N = 8;

  logic              clk = 0, rst_n = 0;
  logic              start = 0, busy;
  pl_cmd_t           cmd;
  logic              rd_req, rd_gnt, rd_valid = 0;
  logic [ADDR_W-1:0] rd_addr;
  data_t             rd_data [N];
  logic              row_valid, row_pop;
  data_t             row_data [N];
  always #5 clk = ~clk;

  preload_buffer #(.N(N), .DEPTH(4)) dut (.*);

  int checks = 0, failures = 0;
  bit gnt_en;

  function automatic data_t word(int a, int c);
    return data_t'(a * 37 + c * 5);
  endfunction

  // global-buffer read port model
  assign rd_gnt = rd_req && gnt_en;
  always @(posedge clk) begin
    gnt_en   <= ($urandom % 4) != 0;
    rd_valid <= rd_gnt;
    if (rd_gnt) for (int c = 0; c < N; c++) rd_data[c] <= word(int'(rd_addr), c);
  end

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Pops the next row (random back-pressure) and checks it against the row
  // y of channel ch with column offset kx, taken from n_lines lines with
  // pixel x = s*c + kx.
  task automatic expect_row(pl_cmd_t k, int ch, int kx, int y);
    int line, x, s;
    do begin
      @(negedge clk);
      row_pop = row_valid && ($urandom % 3 != 0);
      chk(dut.count + dut.inflight <= 4, 1, "fetch-ahead limit");
    end while (!row_pop);
    line = int'(k.base) + ch * int'(k.ch_stride) + y * int'(k.n_lines);
    s    = k.step2 ? 2 : 1;
    for (int c = 0; c < N; c++) begin
      x = (k.n_lines == 1) ? c : s * c + kx;
      chk(row_data[c], word(line + x / N, x % N), "row word");
    end
  endtask

  // Issues a command and walks its row sequence, bottom row of each block first.
  task automatic run(pl_cmd_t k);
    @(negedge clk);
    cmd = k; start = 1;
    @(negedge clk); start = 0;
    for (int ch = 0; ch < int'(k.n_ch); ch++)
      for (int kx = 0; kx < int'(k.n_kx); kx++)
        for (int ph = 0; ph < ((k.step2 && k.rows1 != 0) ? 2 : 1); ph++) begin
          int nr, off;
          nr  = ph ? int'(k.rows1) : int'(k.rows);
          off = k.step2 ? int'(k.y_off ^ ph[0]) : 0;
          for (int i = nr - 1; i >= 0; i--) expect_row(k, ch, kx, k.step2 ? 2 * i + off : i);
        end
    @(negedge clk); row_pop = 0;
    repeat (3) @(negedge clk);
    chk(busy, 0, "idle at end");
    chk(row_valid, 0, "no extra rows");
  endtask

  initial begin
    pl_cmd_t k;
    row_pop = 0; cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // stride-1 window: 2 channels x 3 filter columns x 10 rows over 2 lines per row
    k = '0; k.base = 100; k.ch_stride = 20; k.n_ch = 2; k.n_kx = 3; k.rows = 10; k.n_lines = 2;
    run(k);
    // one line per row (weight rows)
    k = '0; k.base = 7; k.n_ch = 1; k.n_kx = 1; k.rows = 8; k.n_lines = 1;
    run(k);
    // stride-2 window over 3 lines per row, F = 3: phases of 9 and 8 rows
    k = '0; k.base = 300; k.ch_stride = 51; k.n_ch = 2; k.n_kx = 3; k.rows = 9; k.rows1 = 8;
    k.y_off = 0; k.step2 = 1; k.n_lines = 3;
    run(k);
    // stride 2, F = 2 (y_off = 1), and F = 1 (no phase 1)
    k.n_ch = 1; k.n_kx = 2; k.rows = 8; k.rows1 = 8; k.y_off = 1;
    run(k);
    k.n_kx = 1; k.rows = 8; k.rows1 = 0; k.y_off = 0;
    run(k);
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
