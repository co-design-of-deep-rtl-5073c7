// Processing element (PE) of the accelerator array.
//
// Datapath, following the PE drawing of the accelerator: an input MUX that
// loads the moving/stationary operand register from the PE above (for the top
// row this is the preload buffer); a 16 x 16 signed multiplier whose second
// operand comes from the broadcast buffer; a second MUX that chooses the
// adder's other operand, either the partial sum arriving from the PE above
// (weight-stationary adder chain) or an entry of the local register file
// (output-stationary accumulation); and the adder, whose result is written to
// the register file and/or to the partial-sum register that feeds the PE below.
//
// Timing: all registers update on the rising clock edge. The product and the
// sum are combinational within one cycle, so an operand applied in cycle t is
// visible on psum_out / in the register file from cycle t+1.
//
// Own choices: 32-bit partial sums, an explicit "read register file as zero"
// control to start an accumulation, synchronous active-low reset of the
// operand and partial-sum registers. The register file has RF_DEPTH = 16
// entries (the size after the 8 -> 16 tune-up).
module pe
  import sqz_pkg::*;
#(
  parameter int unsigned RF_DEPTH = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  pe_ctrl_t ctrl,
  input  data_t    act_in,    // operand from the PE above / preload buffer
  input  data_t    bcast_in,  // operand from the broadcast buffer
  input  acc_t     psum_in,   // partial sum from the PE above
  output data_t    act_out,   // operand register, forwarded to adjacent PEs
  output acc_t     psum_out   // partial-sum register, to the PE below
);

  localparam int unsigned RA_W = (RF_DEPTH > 1) ? $clog2(RF_DEPTH) : 1;

  data_t act_q;
  acc_t  psum_q;
  acc_t  rf [RF_DEPTH];

  logic [RA_W-1:0] ra;
  acc_t            prod, rf_rd, addend, sum;

  assign ra     = ctrl.rf_addr[RA_W-1:0];
  assign prod   = ctrl.mul_en ? acc_t'(act_q) * acc_t'(bcast_in) : '0;
  assign rf_rd  = ctrl.rf_clr ? '0 : rf[ra];
  assign addend = ctrl.add_top ? psum_in : rf_rd;
  assign sum    = prod + addend;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      act_q  <= '0;
      psum_q <= '0;
    end else begin
      if (ctrl.act_ld) act_q  <= act_in;
      if (ctrl.out_we) psum_q <= sum;
    end
  end

  always_ff @(posedge clk) begin
    if (ctrl.rf_we) rf[ra] <= sum;
  end

  assign act_out  = act_q;
  assign psum_out = psum_q;

endmodule
