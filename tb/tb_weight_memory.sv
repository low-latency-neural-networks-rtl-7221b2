// tb_weight_memory -- writes every weight of the five networks with a value that
// encodes its position, then reads back through all four read ports for every
// network, slot and cycle and compares with the layout rule of the schedule.
// Out-of-range writes must not disturb stored weights.
`timescale 1ns/1ps
module tb_weight_memory;
  import nnt_pkg::*;
  logic clk = 1'b0;
  always #4 clk = ~clk;
  logic wr_en;
  wr_cmd_t wr_cmd;
  net_t hw_net, hb_net, ow_net, ob_net;
  logic [1:0] hw_slot, hw_cyc, hb_slot, ow_slot, ow_cyc;
  weight_t hw [N_MACRO][MACS];
  weight_t hb [N_MACRO];
  weight_t ow [N_OUT][MACS];
  weight_t ob [N_OUT];
  int checks = 0, failures = 0;

  weight_memory dut (.*);

  function automatic int code(int layer, int net, int neuron, int index);
    return ((layer * 5 + net) * 83 + neuron) * 83 + index - 32768 + 7;
  endfunction

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int layer, int net, int neuron, int index, int value);
    @(negedge clk);
    wr_en = 1'b1;
    wr_cmd = '{layer: 1'(layer), net: net_t'(net), neuron: 7'(neuron), index: 7'(index),
               value: weight_t'(value)};
  endtask

  initial begin
    wr_en = 0; wr_cmd = '0;
    {hw_net, hb_net, ow_net, ob_net} = '0;
    {hw_slot, hw_cyc, hb_slot, ow_slot, ow_cyc} = '0;
    for (int n = 0; n < N_NETS; n++) begin
      for (int j = 0; j < N_HID; j++)
        for (int i = 0; i <= N_IN; i++) wr(0, n, j, i, code(0, n, j, i));
      for (int k = 0; k < N_OUT; k++)
        for (int i = 0; i <= N_HID; i++) wr(1, n, k, i, code(1, n, k, i));
    end
    // out-of-range writes
    wr(0, 5, 0, 0, 1); wr(0, 0, 81, 0, 1); wr(0, 0, 0, 28, 1); wr(1, 0, 2, 0, 1); wr(1, 0, 0, 82, 1);
    @(negedge clk) wr_en = 1'b0;
    for (int n = 0; n < N_NETS; n++)
      for (int s = 0; s < 3; s++)
        for (int j = 0; j < 3; j++) begin
          @(negedge clk);
          hw_net = net_t'(n); hb_net = net_t'(n); ow_net = net_t'(n); ob_net = net_t'(n);
          hw_slot = 2'(s); hw_cyc = 2'(j); hb_slot = 2'(s); ow_slot = 2'(s); ow_cyc = 2'(j);
          #1;
          for (int g = 0; g < N_MACRO; g++) begin
            for (int m = 0; m < MACS; m++) begin
              checks++;
              if (int'(hw[g][m]) != code(0, n, 27*s + g, 9*j + m)) failures++;
            end
            checks++;
            if (int'(hb[g]) != code(0, n, 27*s + g, 27)) failures++;
          end
          for (int k = 0; k < N_OUT; k++) begin
            for (int m = 0; m < MACS; m++) begin
              checks++;
              if (int'(ow[k][m]) != code(1, n, k, 27*s + 9*j + m)) failures++;
            end
            checks++;
            if (int'(ob[k]) != code(1, n, k, 81)) failures++;
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
