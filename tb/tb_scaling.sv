// tb_scaling -- random per-layer values, including ones that must saturate and
// layers without a segment, compared with a model of the input layout
// x[3sl] = alpha*4, x[3sl+1] = phi_rel*512, x[3sl+2] = (t - t0 mod 512)*16,
// each limited to +-4095, zero for a missing layer.
`timescale 1ns/1ps
module tb_scaling;
  import nnt_pkg::*;
  localparam int DEPTH = 4;
  logic clk = 1'b0;
  always #4 clk = ~clk;
  logic rst_n, in_valid, out_valid;
  sphi_t alpha [N_SL];
  dts_t delta [N_SL];
  logic found [N_SL];
  logic [1:0] sel [N_SL];
  ts_t cand [N_SL][DEPTH];
  tick_t event_time;
  data_t x [N_IN];
  int checks = 0, failures = 0;

  scaling #(.DEPTH(DEPTH)) dut (.*);

  function automatic int sat(int v);
    return v > 4095 ? 4095 : (v < -4095 ? -4095 : v);
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e [N_IN];
    rst_n = 1'b0; in_valid = 1'b0; event_time = '0;
    for (int sl = 0; sl < N_SL; sl++) begin
      alpha[sl] = '0; delta[sl] = '0; found[sl] = 0; sel[sl] = '0;
      for (int i = 0; i < DEPTH; i++) cand[sl][i] = '0;
    end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      in_valid = 1'b1;
      event_time = tick_t'($urandom);
      for (int sl = 0; sl < N_SL; sl++) begin
        int a, d, dt;
        a = (n % 2 != 0) ? int'($urandom_range(2047)) - 1024 : int'($urandom_range(2000)) - 1000;
        d = (n % 3 != 0) ? int'($urandom_range(16)) - 8 : int'($urandom_range(400)) - 200;
        alpha[sl] = sphi_t'(a);
        delta[sl] = dts_t'(d);
        found[sl] = ($urandom_range(4) != 0);
        sel[sl] = 2'($urandom);
        for (int i = 0; i < DEPTH; i++) begin
          cand[sl][i] = '{valid: 1'b1, id: ts_id_t'($urandom), t: tick_t'($urandom)};
          if (n % 2 == 0) cand[sl][i].t = event_time + tick_t'($urandom_range(300));
        end
        dt = (int'(cand[sl][sel[sl]].t) - int'(event_time) + 512) % 512;
        e[3*sl]   = found[sl] ? sat(a * 4) : 0;
        e[3*sl+1] = found[sl] ? sat(d * 512) : 0;
        e[3*sl+2] = found[sl] ? sat(dt * 16) : 0;
      end
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid) failures++;
      for (int i = 0; i < N_IN; i++) begin
        checks++;
        if (int'(x[i]) != e[i]) begin failures++; $display("x[%0d] %0d exp %0d", i, x[i], e[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
