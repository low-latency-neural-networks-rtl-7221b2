// tb_macro_neuron -- drives one macro neuron through the schedule of the paper:
// three MAC cycles per neuron, adder tree one cycle later, activation one cycle
// after that, next neuron's MACs overlapping. Hidden mode (sum_clear every
// neuron, bias added) and output mode (three partial trees accumulated, bias once)
// are both compared with an integer model.
`timescale 1ns/1ps
module tb_macro_neuron;
  import nnt_pkg::*;
  logic clk = 1'b0;
  always #4 clk = ~clk;
  logic mac_en, mac_first, sum_en, sum_clear, act_en;
  data_t x [MACS];
  weight_t w [MACS];
  weight_t bias;
  data_t y;
  int checks = 0, failures = 0;

  macro_neuron #(.N_MAC(MACS), .LUT_MASK(9'b101100101)) dut (.*);

  function automatic int ref_tanh(longint s);
    longint q;
    int v;
    q = s >>> 16;
    if (q > 1023) q = 1023;
    if (q < -1024) q = -1024;
    v = int'($floor($tanh(real'(q) / 256.0) * 4096.0 + 0.5));
    if (v > 4095) v = 4095;
    if (v < -4095) v = -4095;
    return v;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // neuron n: groups of 27 products, MAC cycles 3n..3n+2
  localparam int NN = 60;
  int xs [NN][27];
  int ws [NN][27];
  int bs [NN];
  longint sums [NN];
  int exp_y [NN];
  logic outmode;

  initial begin
    mac_en = 0; mac_first = 0; sum_en = 0; sum_clear = 0; act_en = 0; bias = '0;
    for (int m = 0; m < MACS; m++) begin x[m] = '0; w[m] = '0; end
    for (int pass = 0; pass < 2; pass++) begin
      outmode = pass[0];
      for (int n = 0; n < NN; n++) begin
        bs[n] = int'($urandom_range(4000)) - 2000;
        for (int i = 0; i < 27; i++) begin
          xs[n][i] = int'($urandom_range(8190)) - 4095;
          ws[n][i] = int'($urandom_range(3000)) - 1500;
        end
      end
      // model
      for (int n = 0; n < NN; n++) begin
        longint s;
        s = 0;
        for (int i = 0; i < 27; i++) s += longint'(xs[n][i]) * ws[n][i];
        if (!outmode) sums[n] = s + (longint'(bs[n]) <<< 12);
        else if (n % 3 == 0) sums[n] = s + (longint'(bs[n]) <<< 12);
        else sums[n] = sums[n-1] + s;
        exp_y[n] = ref_tanh(sums[n]);
      end
      // drive: cycle t = 3n + j is MAC cycle j of neuron n; sum at 3n+3, act at 3n+4
      for (int t = 0; t < 3 * NN + 2; t++) begin
        int n, j;
        @(negedge clk);
        n = t / 3; j = t % 3;
        mac_en = (n < NN);
        mac_first = (j == 0);
        for (int m = 0; m < MACS; m++) begin
          x[m] = n < NN ? data_t'(xs[n][9*j + m]) : '0;
          w[m] = n < NN ? weight_t'(ws[n][9*j + m]) : '0;
        end
        sum_en = (t >= 3 && t % 3 == 0);
        sum_clear = !outmode || ((t / 3 - 1) % 3 == 0);
        bias = t >= 3 ? weight_t'(bs[t/3 - 1]) : '0;
        act_en = outmode ? (t >= 4 && t % 3 == 1 && ((t - 4) / 3) % 3 == 2)
                         : (t >= 4 && t % 3 == 1);
        @(posedge clk);
        #1;
        if (act_en) begin
          int k;
          k = (t - 4) / 3;
          checks++;
          if (int'(y) != exp_y[k]) begin
            failures++;
            $display("mode %0d neuron %0d: y %0d exp %0d", outmode, k, y, exp_y[k]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
