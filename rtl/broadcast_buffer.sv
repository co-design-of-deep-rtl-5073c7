// Broadcast buffer: drives the broadcast operand of every PE row.
//
// Weight-stationary mode: the input is a pixel vector holding one word per
// input channel; word r goes to PE row r, delayed by r cycles, so that the
// partial sum running down a column meets row r's product exactly when it
// arrives there (a skewed, systolic feed). Row 0 is not delayed.
// Output-stationary mode: the single weight os_weight is given to all rows in
// the same cycle, without delay.
//
// The delay lines shift every cycle whatever the mode; the caller keeps
// feeding (or accepts garbage in) cycles without valid data and tracks
// validity itself. The paper says what the buffer provides in each mode; the
// skew registers are this design's way of feeding a registered adder chain.
module broadcast_buffer
  import sqz_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic  clk,
  input  mode_e mode,
  input  data_t ws_vec    [N],  // WS: pixel of input channel r in word r
  input  data_t os_weight,      // OS: weight for all PEs
  output data_t row_out   [N]
);

  // skew[r][d]: word r delayed by d+1 cycles
  data_t skew [N][N];

  always_ff @(posedge clk) begin
    for (int r = 1; r < N; r++) begin
      skew[r][0] <= ws_vec[r];
      for (int d = 1; d < r; d++) skew[r][d] <= skew[r][d-1];
    end
  end

  always_comb begin
    for (int r = 0; r < N; r++) begin
      if (mode == MODE_OS)  row_out[r] = os_weight;
      else if (r == 0)      row_out[r] = ws_vec[0];
      else                  row_out[r] = skew[r][r-1];
    end
  end

endmodule
