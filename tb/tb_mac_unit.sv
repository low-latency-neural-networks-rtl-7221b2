// tb_mac_unit -- checks the DSP and the LUT variant of the MAC against an integer
// model: random data and weights, neurons of 1 to 4 accumulation cycles, idle
// cycles with en low (accumulator must hold).
`timescale 1ns/1ps
module tb_mac_unit;
  import nnt_pkg::*;
  logic clk = 1'b0;
  always #4 clk = ~clk;
  logic en, first;
  data_t a;
  weight_t b;
  acc_t acc_dsp, acc_lut;
  int checks = 0, failures = 0;
  longint model;

  mac_unit #(.USE_LUT(1'b0)) u_dsp (.clk, .en, .first, .a, .b, .acc(acc_dsp));
  mac_unit #(.USE_LUT(1'b1)) u_lut (.clk, .en, .first, .a, .b, .acc(acc_lut));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = 0;
    en = 1'b0; first = 1'b0; a = '0; b = '0;
    for (int n = 0; n < 300; n++) begin
      int len;
      len = $urandom_range(1, 4);
      for (int c = 0; c < len; c++) begin
        @(negedge clk);
        en = 1'b1;
        first = (c == 0);
        a = data_t'(int'($urandom_range(8190)) - 4095);
        b = weight_t'($urandom);
        if (n % 7 == 0) b = weight_t'(-32768);
        model = (first ? 0 : model) + longint'(a) * longint'(b);
        @(posedge clk);
        #1;
        checks += 2;
        if (longint'(acc_dsp) != model) begin failures++; $display("dsp %0d exp %0d", acc_dsp, model); end
        if (longint'(acc_lut) != model) begin failures++; $display("lut %0d exp %0d", acc_lut, model); end
      end
      if (n % 5 == 0) begin
        @(negedge clk);
        en = 1'b0;
        a = data_t'($urandom); b = weight_t'($urandom); first = 1'b1;
        @(posedge clk);
        #1;
        checks += 2;
        if (longint'(acc_dsp) != model || longint'(acc_lut) != model) begin failures++; $display("hold"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
