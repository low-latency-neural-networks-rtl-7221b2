// tb_alpha_refid_calc -- random 2D tracks (straight, curved, strongly curved so
// that alpha saturates, azimuth near the wrap-around) compared with a model of
// the crossing geometry: alpha = r*omega/256 limited to +-1023, crossing azimuth
// phi0 - alpha modulo 4096, reference id = floor(phi_cross * NTS / 4096).
`timescale 1ns/1ps
module tb_alpha_refid_calc;
  import nnt_pkg::*;
  logic clk = 1'b0;
  always #4 clk = ~clk;
  logic rst_n, in_valid, out_valid;
  track2d_t track;
  sphi_t alpha [N_SL];
  ts_id_t ref_id [N_SL];
  int checks = 0, failures = 0;
  localparam int R [9] = '{198, 311, 424, 537, 650, 763, 876, 989, 1102};
  localparam int T [9] = '{160, 160, 192, 224, 256, 288, 320, 352, 384};

  alpha_refid_calc dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; track = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 1000; n++) begin
      int phi0, om;
      @(negedge clk);
      in_valid = 1'b1;
      phi0 = (n % 10 == 0) ? n % 8 : int'($urandom_range(4095));
      case (n % 3)
        0: om = 0;
        1: om = int'($urandom_range(100)) - 50;
        default: om = int'($urandom_range(1023)) - 512;
      endcase
      track = '{phi0: phi_t'(phi0), omega: omega_t'(om)};
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid) failures++;
      for (int sl = 0; sl < N_SL; sl++) begin
        int a, px, id;
        a = (R[sl] * om);
        a = a >= 0 ? a / 256 : -((-a + 255) / 256);   // floor division
        if (a > 1023) a = 1023;
        if (a < -1023) a = -1023;
        px = ((phi0 - a) % 4096 + 4096) % 4096;
        id = px * T[sl] / 4096;
        checks += 2;
        if (int'(alpha[sl]) != a) begin failures++; $display("sl %0d alpha %0d exp %0d", sl, alpha[sl], a); end
        if (int'(ref_id[sl]) != id) begin failures++; $display("sl %0d ref %0d exp %0d", sl, ref_id[sl], id); end
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
