// N x N array of processing elements with mesh links.
//
// Each PE passes its operand register and its partial-sum register to the PE
// below it. The top row takes its operands from the preload buffer
// (preload_row) and a zero partial sum; the bottom row's partial sums leave
// the array towards the global buffer (bottom_psum). Every PE of row r takes
// its broadcast operand from bcast[r]: in weight-stationary mode the
// broadcast buffer gives each row its own input-channel pixel, in
// output-stationary mode all rows see the same weight. All PEs execute the
// same command (ctrl) in the same cycle.
//
// Weight-stationary use: after N act_ld pushes the array holds an N x N weight
// block (row r = input channel r, column c = output channel c); with
// add_top = 1 the column is an adder chain whose sum for a pixel vector leaves
// the bottom N cycles after row 0 saw it. Output-stationary use: PE (r,c)
// owns output pixel (r,c) of the block and accumulates into its register file;
// a vertical act_ld push moves the input window one row, and a drain shifts
// the register-file contents out through the bottom row.
//
// The paper gives the mesh and the top/bottom/broadcast connections. This
// design uses only the vertical neighbour links (its output-stationary
// schedule moves the input window vertically); horizontal links are not built.
module pe_array
  import sqz_pkg::*;
#(
  parameter int unsigned N        = 16,
  parameter int unsigned RF_DEPTH = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  pe_ctrl_t ctrl,
  input  data_t    preload_row [N],  // into the top row, one word per column
  input  data_t    bcast       [N],  // one word per row
  output acc_t     bottom_psum [N]   // out of the bottom row, one per column
);

  data_t act  [N+1][N];
  acc_t  psum [N+1][N];

  for (genvar c = 0; c < N; c++) begin : g_top
    assign act[0][c]      = preload_row[c];
    assign psum[0][c]     = '0;
    assign bottom_psum[c] = psum[N][c];
  end

  for (genvar r = 0; r < N; r++) begin : g_row
    for (genvar c = 0; c < N; c++) begin : g_col
      pe #(.RF_DEPTH(RF_DEPTH)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .ctrl     (ctrl),
        .act_in   (act[r][c]),
        .bcast_in (bcast[r]),
        .psum_in  (psum[r][c]),
        .act_out  (act[r+1][c]),
        .psum_out (psum[r+1][c])
      );
    end
  end

endmodule
