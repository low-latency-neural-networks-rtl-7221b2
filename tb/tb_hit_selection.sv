// tb_hit_selection -- random segment streams of different density per super
// layer. A model records each segment's arrival cycle; the i-th newest segment
// must be candidate i while fewer than HOLD+1 cycles old, and has_hit must be set
// exactly when a layer has a candidate. Reduced HOLD to reach expiry often.
`timescale 1ns/1ps
module tb_hit_selection;
  import nnt_pkg::*;
  localparam int DEPTH = 4, HOLD = 12;
  logic clk = 1'b0;
  always #4 clk = ~clk;
  logic rst_n;
  ts_t ts_in [N_SL];
  ts_t cand [N_SL][DEPTH];
  logic has_hit [N_SL];
  int checks = 0, failures = 0;
  int cyc = 0;
  int arr_cyc [N_SL][$];
  ts_t arr_ts [N_SL][$];

  hit_selection #(.DEPTH(DEPTH), .HOLD(HOLD)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0;
    for (int sl = 0; sl < N_SL; sl++) ts_in[sl] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int sl = 0; sl < N_SL; sl++) begin
        ts_in[sl].valid = ($urandom_range(99) < 3 + 7 * sl + (n / 500) * 5);
        ts_in[sl].id = ts_id_t'($urandom);
        ts_in[sl].t = tick_t'($urandom);
        if (ts_in[sl].valid) begin
          arr_cyc[sl].push_front(cyc);
          arr_ts[sl].push_front(ts_in[sl]);
        end
      end
      @(posedge clk);
      cyc++;
      #1;
      for (int sl = 0; sl < N_SL; sl++) begin
        logic any;
        any = 1'b0;
        for (int i = 0; i < DEPTH; i++) begin
          logic v;
          v = i < arr_cyc[sl].size() && (cyc - arr_cyc[sl][i]) <= HOLD;
          any |= v;
          checks++;
          if (cand[sl][i].valid != v || (v && (cand[sl][i].id != arr_ts[sl][i].id ||
                                               cand[sl][i].t != arr_ts[sl][i].t))) begin
            failures++;
            $display("cyc %0d sl %0d slot %0d valid %b exp %b", cyc, sl, i, cand[sl][i].valid, v);
          end
        end
        checks++;
        if (has_hit[sl] != any) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
