// delta_id_calc -- matches one track segment per super layer to the track.
//
// For each super layer it compares every candidate segment id with the reference
// id where the 2D track crosses that layer, takes the difference modulo the number
// of segments in the layer (so it wraps around at azimuth 0) and keeps the
// candidate with the smallest absolute difference. The signed difference is the
// relative wire position phi_rel of Fig. 4 of the paper, in units of one segment;
// the index of the chosen candidate goes on to Scaling, which takes its drift time.
// The crossing angle alpha is passed through so that all inputs of a track leave
// in the same cycle.
//
// The paper gives only the name and the data flow; the nearest-candidate rule and
// the lowest-index tie break are this design's own.
// Timing: one register stage, out_valid follows in_valid by one cycle.
module delta_id_calc
  import nnt_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  sphi_t  alpha_in [N_SL],
  input  ts_id_t ref_id   [N_SL],
  input  ts_t    cand     [N_SL][DEPTH],
  output logic   out_valid,
  output sphi_t  alpha    [N_SL],
  output dts_t   delta    [N_SL],
  output logic   found    [N_SL],
  output logic [$clog2(DEPTH)-1:0] sel [N_SL]
);

  localparam int SEL_W = $clog2(DEPTH);

  always_ff @(posedge clk)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;

  for (genvar sl = 0; sl < N_SL; sl++) begin : g_sl
    localparam int N = NTS[sl];

    dts_t             best_d;
    int               best_abs;
    logic             best_ok;
    logic [SEL_W-1:0] best_i;

    always_comb begin
      best_d   = '0;
      best_abs = N;
      best_ok  = 1'b0;
      best_i   = '0;
      for (int i = 0; i < DEPTH; i++) begin
        int d;
        d = int'(cand[sl][i].id) - int'(ref_id[sl]);
        if (d >= N / 2)  d -= N;
        if (d < -N / 2)  d += N;
        if (cand[sl][i].valid && (d < 0 ? -d : d) < best_abs) begin
          best_abs = d < 0 ? -d : d;
          best_d   = dts_t'(d);
          best_ok  = 1'b1;
          best_i   = SEL_W'(i);
        end
      end
    end

    always_ff @(posedge clk)
      if (in_valid) begin
        alpha[sl] <= alpha_in[sl];
        delta[sl] <= best_d;
        found[sl] <= best_ok;
        sel[sl]   <= best_i;
      end
  end

endmodule
