// mac_unit -- one multiply-accumulate unit of the time-multiplexed network.
//
// Each cycle with en high it multiplies a data value (Q1.12) by a weight (Q3.12)
// and adds the product to its accumulator; with first high the accumulator is
// restarted with the product instead. So a MAC that sees three inputs of the same
// neuron in three cycles holds their partial sum, as the DSP's internal
// accumulator does in the paper's schedule, and the adder tree behind it only
// adds the partial sums. acc is registered: the product of cycle n is in acc in
// cycle n+1.
//
// USE_LUT selects the resource. 0 maps the product onto a DSP slice (inferred
// multiplier). 1 builds it from fabric logic as a shift-and-add of partial
// products; this is the paper's "SRAM-LUT" MAC. Both compute the same number; the
// paper chooses per MAC which resource is used, and so does this parameter. The
// paper uses LUT MACs mainly for constant weights; here both kinds take run-time
// weights because the five networks are switched at run time (own choice).
module mac_unit
  import nnt_pkg::*;
#(
  parameter bit USE_LUT = 1'b0
) (
  input  logic    clk,
  input  logic    en,
  input  logic    first,
  input  data_t   a,
  input  weight_t b,
  output acc_t    acc
);

  acc_t prod;

  if (USE_LUT) begin : g_lut
    // shift-and-add: one partial product per weight bit, the sign bit negative
    always_comb begin
      prod = '0;
      for (int i = 0; i < W_W - 1; i++)
        if (b[i]) prod += acc_t'(a) <<< i;
      if (b[W_W-1]) prod -= acc_t'(a) <<< (W_W - 1);
    end
  end else begin : g_dsp
    (* use_dsp = "yes" *) acc_t dsp_prod;
    assign dsp_prod = acc_t'(a) * acc_t'(b);
    assign prod = dsp_prod;
  end

  always_ff @(posedge clk)
    if (en) acc <= (first ? acc_t'(0) : acc) + prod;

endmodule
