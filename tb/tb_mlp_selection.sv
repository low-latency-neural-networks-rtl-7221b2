// tb_mlp_selection -- all 512 hit patterns of the nine super layers: network 0
// with all stereo layers hit, network k+1 with only stereo layer 2k+1 missing, no
// network with two or more missing; axial layers must not matter. One-cycle latency.
`timescale 1ns/1ps
module tb_mlp_selection;
  import nnt_pkg::*;
  logic clk = 1'b0;
  always #4 clk = ~clk;
  logic rst_n, in_valid, out_valid, ok;
  logic hit [N_SL];
  net_t net;
  int checks = 0, failures = 0;

  mlp_selection dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; in_valid = 1'b0;
    for (int i = 0; i < N_SL; i++) hit[i] = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int p = 0; p < 512; p++) begin
      int miss, en;
      @(negedge clk);
      in_valid = 1'b1;
      for (int i = 0; i < N_SL; i++) hit[i] = p[i];
      miss = 0; en = 0;
      for (int k = 0; k < 4; k++) if (!p[2*k+1]) begin miss++; en = k + 1; end
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid || ok != (miss <= 1) || (miss <= 1 && int'(net) != en)) begin
        failures++;
        $display("pattern %b: ok %b net %0d, expected miss %0d net %0d", 9'(p), ok, net, miss, en);
      end
    end
    @(negedge clk) in_valid = 1'b0;
    @(posedge clk) #1;
    checks++;
    if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
