// macro_neuron -- nine MACs, an adder tree and a tanh unit shared by several neurons.
//
// This is the processing element of the paper's "Makro-Neuron V2" schedule. In every
// cycle each of the N_MAC MACs multiplies one input by one weight; a neuron's inputs
// are spread over several cycles (MAC-Ops 1/3, 2/3, 3/3) and the MACs keep partial
// sums in their accumulators. In the cycle after a neuron's last MAC cycle the
// adder tree adds the N_MAC partial sums (sum_en); in the cycle after that the
// activation is looked up (act_en). Both overlap with the MACs of the next neuron,
// as in Fig. 6 of the paper.
//
// Control, driven by mlp_core:
//   mac_en/mac_first : MAC cycle, first MAC cycle of a neuron (clears accumulators)
//   sum_en/sum_clear : adder-tree cycle; with sum_clear the sum register is loaded
//                      with tree + bias, otherwise tree is added to it. Hidden
//                      neurons always clear; an output neuron, whose 81 inputs come
//                      in three groups, clears on the first group only and so
//                      accumulates three partial trees (the three Sigma boxes of its
//                      row in Fig. 7).
//   act_en           : activation cycle; y valid the next cycle.
// Bias is Q3.12 like the weights and is aligned to the 24-bit fraction of the sum.
// LUT_MASK bit i selects the fabric (LUT) implementation for MAC i.
module macro_neuron
  import nnt_pkg::*;
#(
  parameter int unsigned         N_MAC    = MACS,
  parameter logic [N_MAC-1:0]    LUT_MASK = '0
) (
  input  logic    clk,
  input  logic    mac_en,
  input  logic    mac_first,
  input  data_t   x    [N_MAC],
  input  weight_t w    [N_MAC],
  input  logic    sum_en,
  input  logic    sum_clear,
  input  weight_t bias,
  input  logic    act_en,
  output data_t   y
);

  acc_t acc [N_MAC];
  acc_t tree;
  acc_t sum_q;

  for (genvar i = 0; i < N_MAC; i++) begin : g_mac
    mac_unit #(.USE_LUT(LUT_MASK[i])) u_mac (
      .clk   (clk),
      .en    (mac_en),
      .first (mac_first),
      .a     (x[i]),
      .b     (w[i]),
      .acc   (acc[i])
    );
  end

  always_comb begin
    tree = sum_clear ? (acc_t'(bias) <<< DATA_FRAC) : sum_q;
    for (int i = 0; i < N_MAC; i++) tree += acc[i];
  end

  always_ff @(posedge clk)
    if (sum_en) sum_q <= tree;

  tanh_activation u_act (
    .clk (clk),
    .en  (act_en),
    .x   (sum_q),
    .y   (y)
  );

endmodule
