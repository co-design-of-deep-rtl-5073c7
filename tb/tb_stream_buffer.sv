// Self-checking test of the stream buffer (N = 8).
//
// A global-buffer read-port model in the testbench returns line a, word c
// from a table filled here (weights with about 40 % zeros and some all-zero
// lines). Output-stationary run: 30 lines, n_k = 6, random consumer
// back-pressure; checks that exactly the non-zero weights among the first
// n_k words come out, lowest k first, with out_eol on the last one of each
// line and one out_nz = 0 element for an all-zero line. Weight-stationary
// run: 40 lines with the port always granted and the consumer always ready;
// checks each vector and that, once streaming, one line leaves per cycle.
module tb_stream_buffer;
  import sqz_pkg::*;

  localparam int N = 8;

  logic              clk = 0, rst_n = 0;
  logic              start = 0, busy;
  mode_e             mode;
  logic [ADDR_W-1:0] base, count;
  logic [8:0]        n_k;
  logic              rd_req, rd_gnt, rd_valid = 0;
  logic [ADDR_W-1:0] rd_addr;
  data_t             rd_data [N];
  logic              out_valid, out_ready, out_nz, out_eol;
  data_t             out_vec [N], out_w;
  logic [RFA_W-1:0]  out_k;
  always #5 clk = ~clk;

  stream_buffer #(.N(N), .DEPTH(4)) dut (.*);

  int checks = 0, failures = 0;
  bit always_gnt = 0;
  bit gnt_en;
  data_t mem [128][N];

  assign rd_gnt = rd_req && (gnt_en || always_gnt);
  always @(posedge clk) begin
    gnt_en   <= ($urandom % 3) != 0;
    rd_valid <= rd_gnt;
    if (rd_gnt) for (int c = 0; c < N; c++) rd_data[c] <= mem[rd_addr][c];
  end

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int first_t, last_t, cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    out_ready = 0; mode = MODE_OS; base = 0; count = 0; n_k = 0;
    for (int a = 0; a < 128; a++) for (int c = 0; c < N; c++)
      mem[a][c] = (a % 7 == 3 || $urandom % 100 < 40) ? data_t'(0) : data_t'($urandom % 200 + 1);
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---------------- output stationary ----------------
    @(negedge clk);
    mode = MODE_OS; base = 10; count = 30; n_k = 6; start = 1;
    @(negedge clk); start = 0;
    for (int l = 0; l < 30; l++) begin
      int nz [$];
      nz.delete();
      for (int k = 0; k < 6; k++) if (mem[10 + l][k] != 0) nz.push_back(k);
      if (nz.size() == 0) begin
        do begin @(negedge clk); out_ready = ($urandom % 4 != 0); end while (!(out_valid && out_ready));
        chk(out_nz, 0, "all-zero line nz");
        chk(out_eol, 1, "all-zero line eol");
      end else
        for (int j = 0; j < nz.size(); j++) begin
          do begin @(negedge clk); out_ready = ($urandom % 4 != 0); end while (!(out_valid && out_ready));
          chk(out_nz, 1, "nz");
          chk(out_k, nz[j], "k");
          chk(out_w, mem[10 + l][nz[j]], "weight");
          chk(out_eol, j == nz.size() - 1, "eol");
        end
    end
    @(negedge clk); out_ready = 0;
    repeat (4) @(negedge clk);
    chk(busy, 0, "OS idle");
    // ---------------- weight stationary ----------------
    always_gnt = 1;
    @(negedge clk);
    mode = MODE_WS; base = 50; count = 40; start = 1; out_ready = 1;
    @(negedge clk); start = 0;
    for (int l = 0; l < 40; l++) begin
      while (!out_valid) @(negedge clk);
      if (l == 0) first_t = cyc;
      last_t = cyc;
      for (int c = 0; c < N; c++) chk(out_vec[c], mem[50 + l][c], "WS vector");
      chk(out_eol, 1, "WS eol");
      @(negedge clk);
    end
    chk(last_t - first_t, 39, "WS one line per cycle");
    repeat (3) @(negedge clk);
    chk(busy, 0, "WS idle");
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
