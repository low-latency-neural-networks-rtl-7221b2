// tanh_activation -- the activation function applied to every neuron's sum.
//
// The paper uses the hyperbolic tangent for all neurons and keeps every value in
// [-1,1]. Here the sum (24 fractional bits) is reduced to 8 fractional bits,
// saturated to [-4,4) and used to address a 2048-entry table of tanh values in
// Q1.12 (nnt_pkg::TANH_TABLE, computed at elaboration; outside [-4,4) tanh differs
// from +-1 by less than 7e-4). The table size and the one-cycle registered lookup
// are this design's own choices; the paper draws the activation as one clock step
// following the adder (Fig. 6/7 schedules).
// Timing: y is valid the cycle after en.
module tanh_activation
  import nnt_pkg::*;
(
  input  logic  clk,
  input  logic  en,
  input  acc_t  x,
  output data_t y
);

  localparam int SHIFT = 2 * DATA_FRAC - 8;  // 24 -> 8 fractional bits
  localparam acc_t AMAX = acc_t'(2**(ACT_ADDR_W-1) - 1);

  acc_t                  xs;
  logic [ACT_ADDR_W-1:0] addr;

  always_comb begin
    xs = x >>> SHIFT;
    if (xs > AMAX)            addr = '1;
    else if (xs < -AMAX - 1)  addr = '0;
    else                      addr = ACT_ADDR_W'(xs + AMAX + 1);
  end

  always_ff @(posedge clk)
    if (en) y <= TANH_TABLE[addr];

endmodule
