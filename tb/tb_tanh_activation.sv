// tb_tanh_activation -- compares the table lookup with round(4096*tanh(x)) for
// sums across and beyond the table range, and checks the one-cycle latency and
// that the output holds while en is low.
`timescale 1ns/1ps
module tb_tanh_activation;
  import nnt_pkg::*;
  logic clk = 1'b0;
  always #4 clk = ~clk;
  logic en;
  acc_t x;
  data_t y;
  int checks = 0, failures = 0;

  tanh_activation dut (.clk, .en, .x, .y);

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
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    en = 1'b0; x = '0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      en = 1'b1;
      case (n % 4)
        0: x = acc_t'(longint'($urandom_range(2**20)) - 2**19);            // |x| < 8
        1: x = acc_t'((longint'($urandom) << 3) - (longint'(1) << 34));   // wide
        2: x = acc_t'(longint'(n - 1000) <<< 16);                         // each entry
        default: x = acc_t'(longint'($urandom_range(2**17)) - 2**16);     // near zero
      endcase
      e = ref_tanh(longint'(x));
      @(posedge clk);
      #1;
      checks++;
      if (int'(y) != e) begin failures++; $display("x %0d y %0d exp %0d", x, y, e); end
      @(negedge clk);
      en = 1'b0;
      x = acc_t'($urandom);
      @(posedge clk);
      #1;
      checks++;
      if (int'(y) != e) begin failures++; $display("hold failed"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
