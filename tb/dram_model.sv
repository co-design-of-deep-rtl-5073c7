// Behavioural model of the external DRAM seen through the accelerator's
// line-wide memory bus (not synthesizable, testbench use only).
//
// Accepts one request per cycle (one 32-byte line per cycle, 16 GB/s at a
// 500 MHz clock). A read is answered, in order, LATENCY cycles after it was
// accepted (100 cycles by default); answers wait while rsp_ready is low.
// Writes take effect when accepted. req_ready can be made to drop every
// STALL_EVERY-th cycle to exercise back-pressure (0 = never).
module dram_model
  import sqz_pkg::*;
#(
  parameter int unsigned N           = 16,
  parameter int unsigned LINES       = 8192,
  parameter int unsigned LATENCY     = 100,
  parameter int unsigned STALL_EVERY = 0
) (
  input  logic              clk,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_write,
  input  logic [EXT_AW-1:0] req_addr,
  input  data_t             req_wdata [N],
  output logic              rsp_valid,
  input  logic              rsp_ready,
  output data_t             rsp_rdata [N]
);

  typedef data_t line_t [N];

  line_t  mem [LINES];
  line_t  q_data [$];
  longint q_due  [$];
  longint now = 0;

  // Outputs are recomputed with non-blocking updates at every clock edge.
  initial begin
    rsp_valid = 1'b0;
    for (int c = 0; c < N; c++) rsp_rdata[c] = '0;
  end

  initial req_ready = 1'b1;

  always @(posedge clk) begin
    if (rsp_valid && rsp_ready) begin
      void'(q_data.pop_front());
      void'(q_due.pop_front());
    end
    if (req_valid && req_ready) begin
      if (req_write) mem[req_addr % LINES] = req_wdata;
      else begin
        q_data.push_back(mem[req_addr % LINES]);
        q_due.push_back(now + LATENCY);
      end
    end
    now = now + 1;
    req_ready <= (STALL_EVERY == 0) || ((now % STALL_EVERY) != 0);
    rsp_valid <= (q_due.size() != 0) && (q_due[0] <= now);
    for (int c = 0; c < N; c++) rsp_rdata[c] <= (q_data.size() != 0) ? q_data[0][c] : '0;
  end

endmodule
