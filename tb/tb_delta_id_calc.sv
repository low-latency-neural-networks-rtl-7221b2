// tb_delta_id_calc -- random reference ids and candidate sets (some near the
// azimuth wrap-around, some layers empty) compared with a model that takes the
// valid candidate with the smallest wrapped |id - ref|, lowest index on ties.
`timescale 1ns/1ps
module tb_delta_id_calc;
  import nnt_pkg::*;
  localparam int DEPTH = 4;
  logic clk = 1'b0;
  always #4 clk = ~clk;
  logic rst_n, in_valid, out_valid;
  sphi_t alpha_in [N_SL], alpha [N_SL];
  ts_id_t ref_id [N_SL];
  ts_t cand [N_SL][DEPTH];
  dts_t delta [N_SL];
  logic found [N_SL];
  logic [1:0] sel [N_SL];
  int checks = 0, failures = 0;
  localparam int T [9] = '{160, 160, 192, 224, 256, 288, 320, 352, 384};

  delta_id_calc #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ed [N_SL], ei [N_SL], ef [N_SL], ea [N_SL];
    rst_n = 1'b0; in_valid = 1'b0;
    for (int sl = 0; sl < N_SL; sl++) begin
      alpha_in[sl] = '0; ref_id[sl] = '0;
      for (int i = 0; i < DEPTH; i++) cand[sl][i] = '0;
    end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      in_valid = 1'b1;
      for (int sl = 0; sl < N_SL; sl++) begin
        int r, best;
        r = (n % 4 == 0) ? (n % 8 < 4 ? 1 : T[sl] - 2) : int'($urandom_range(T[sl] - 1));
        ref_id[sl] = ts_id_t'(r);
        alpha_in[sl] = sphi_t'($urandom);
        ea[sl] = int'(alpha_in[sl]);
        best = 100000; ef[sl] = 0; ed[sl] = 0; ei[sl] = 0;
        for (int i = 0; i < DEPTH; i++) begin
          int id, d;
          id = (r + int'($urandom_range(20)) - 10 + T[sl]) % T[sl];
          if ($urandom_range(3) == 0) id = int'($urandom_range(T[sl] - 1));
          cand[sl][i].valid = ($urandom_range(9) < 6);
          cand[sl][i].id = ts_id_t'(id);
          cand[sl][i].t = tick_t'($urandom);
          d = id - r;
          if (d >= T[sl] / 2) d -= T[sl];
          if (d < -T[sl] / 2) d += T[sl];
          if (cand[sl][i].valid && (d < 0 ? -d : d) < best) begin
            best = d < 0 ? -d : d; ed[sl] = d; ei[sl] = i; ef[sl] = 1;
          end
        end
      end
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid) failures++;
      for (int sl = 0; sl < N_SL; sl++) begin
        checks++;
        if (int'(found[sl]) != ef[sl] || int'(alpha[sl]) != ea[sl] ||
            (ef[sl] != 0 && (int'(delta[sl]) != ed[sl] || int'(sel[sl]) != ei[sl]))) begin
          failures++;
          $display("sl %0d found %b delta %0d sel %0d, exp %0d %0d %0d", sl, found[sl],
                   delta[sl], sel[sl], ef[sl], ed[sl], ei[sl]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
