// weight_memory -- weights and biases of the five networks, loadable at run time.
//
// The trigger holds five networks: one for tracks with track segments in all four
// stereo super layers and one for each case with a single stereo layer missing.
// The network for a track is chosen per track while running, so all five weight
// sets are stored side by side and the read ports take the network index.
//
// Storage: hidden layer 5 x 81 x (27 weights + bias), output layer 5 x 2 x (81
// weights + bias), Q3.12 each. The write port (one weight per cycle, wr_cmd_t) is
// this design's own choice; the paper does not describe how weights are loaded.
// Nothing is reset: the weights must be written before the first track.
//
// Read ports (combinational), laid out for the macro-neuron schedule:
//   hidden weights : macro neuron g, MAC m in slot s, cycle j reads
//                    W_hid[net][27*s+g][9*j+m]
//   hidden biases  : bias of neuron 27*s+g
//   output weights : output neuron k, MAC m in slot s, cycle j reads
//                    W_out[net][k][27*s+9*j+m]
//   output biases  : bias of output neuron k
module weight_memory
  import nnt_pkg::*;
(
  input  logic    clk,
  input  logic    wr_en,
  input  wr_cmd_t wr_cmd,

  input  net_t        hw_net,
  input  logic [1:0]  hw_slot,
  input  logic [1:0]  hw_cyc,
  output weight_t     hw [N_MACRO][MACS],

  input  net_t        hb_net,
  input  logic [1:0]  hb_slot,
  output weight_t     hb [N_MACRO],

  input  net_t        ow_net,
  input  logic [1:0]  ow_slot,
  input  logic [1:0]  ow_cyc,
  output weight_t     ow [N_OUT][MACS],

  input  net_t        ob_net,
  output weight_t     ob [N_OUT]
);

  weight_t w_hid [N_NETS][N_HID][N_IN+1];
  weight_t w_out [N_NETS][N_OUT][N_HID+1];

  always_ff @(posedge clk)
    if (wr_en && 32'(wr_cmd.net) < N_NETS) begin
      if (!wr_cmd.layer) begin
        if (32'(wr_cmd.neuron) < N_HID && 32'(wr_cmd.index) <= N_IN)
          w_hid[wr_cmd.net][wr_cmd.neuron][5'(wr_cmd.index)] <= wr_cmd.value;
      end else begin
        if (32'(wr_cmd.neuron) < N_OUT && 32'(wr_cmd.index) <= N_HID)
          w_out[wr_cmd.net][1'(wr_cmd.neuron)][wr_cmd.index] <= wr_cmd.value;
      end
    end

  always_comb begin
    for (int g = 0; g < N_MACRO; g++) begin
      for (int m = 0; m < MACS; m++)
        hw[g][m] = w_hid[hw_net][N_MACRO*hw_slot + g][MACS*hw_cyc + m];
      hb[g] = w_hid[hb_net][N_MACRO*hb_slot + g][N_IN];
    end
    for (int k = 0; k < N_OUT; k++) begin
      for (int m = 0; m < MACS; m++)
        ow[k][m] = w_out[ow_net][k][N_MACRO*ow_slot + MACS*ow_cyc + m];
      ob[k] = w_out[ob_net][k][N_HID];
    end
  end

endmodule
