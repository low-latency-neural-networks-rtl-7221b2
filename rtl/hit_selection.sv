// hit_selection -- keeps the recent track segments of every super layer.
//
// The track segment finders deliver, per super layer and clock, at most one track
// segment (id and priority time). A track from the 2D finder arrives later than
// the segments it belongs to, so this block holds, for each super layer, the last
// DEPTH segments in a shift register and drops each one HOLD cycles after it
// arrived. The held segments are the candidates offered to DELTA ID CALC, and
// has_hit tells MLP SELECTION which super layers have any candidate.
//
// The paper gives only the block's name and its place in the data flow (it feeds
// DELTA ID CALC, Scaling and MLP SELECTION, and takes nothing from the track);
// the buffer depth, the age limit and the newest-first order are this design's own.
// Timing: a segment at ts_in in cycle n is a candidate from cycle n+1 to n+HOLD.
module hit_selection
  import nnt_pkg::*;
#(
  parameter int unsigned DEPTH = 4,
  parameter int unsigned HOLD  = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  ts_t  ts_in   [N_SL],
  output ts_t  cand    [N_SL][DEPTH],
  output logic has_hit [N_SL]
);

  localparam int unsigned AGE_W = $clog2(HOLD + 1);

  for (genvar sl = 0; sl < N_SL; sl++) begin : g_sl
    ts_t              buf_q [DEPTH];
    logic [AGE_W-1:0] age_q [DEPTH];

    always_ff @(posedge clk)
      if (!rst_n) begin
        for (int i = 0; i < DEPTH; i++) begin
          buf_q[i].valid <= 1'b0;
          age_q[i]       <= '0;
        end
      end else if (ts_in[sl].valid) begin
        buf_q[0] <= ts_in[sl];
        age_q[0] <= AGE_W'(1);
        for (int i = 1; i < DEPTH; i++) begin
          buf_q[i]       <= buf_q[i-1];
          buf_q[i].valid <= buf_q[i-1].valid && age_q[i-1] < AGE_W'(HOLD);
          age_q[i]       <= age_q[i-1] + AGE_W'(1);
        end
      end else begin
        for (int i = 0; i < DEPTH; i++) begin
          if (age_q[i] >= AGE_W'(HOLD)) buf_q[i].valid <= 1'b0;
          else                          age_q[i] <= age_q[i] + AGE_W'(1);
        end
      end

    always_comb begin
      has_hit[sl] = 1'b0;
      for (int i = 0; i < DEPTH; i++) begin
        cand[sl][i] = buf_q[i];
        has_hit[sl] |= buf_q[i].valid;
      end
    end
  end

endmodule
