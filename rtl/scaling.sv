// scaling -- turns the per-layer track quantities into the 27 network inputs.
//
// The network expects every input in [-1,1] (Q1.12 here). For super layer sl the
// three inputs are x[3*sl] = alpha, x[3*sl+1] = phi_rel, x[3*sl+2] = drift time,
// the order in which the paper lists them. The drift time is the chosen segment's
// priority time minus the event time from the event time finder (the paper feeds
// the event time into this block, Fig. 5). Each quantity is multiplied by a power
// of two and saturated:
//   alpha   (azimuth units, 1024 = pi/2)   << ALPHA_SHIFT
//   phi_rel (segment units)                 << PHIREL_SHIFT
//   drift   (clock ticks, modulo 512)       << DRIFT_SHIFT
// A super layer without a matched segment contributes three zeros. The scale
// factors and the zero for a missing layer are this design's own choices.
// Timing: one register stage.
module scaling
  import nnt_pkg::*;
#(
  parameter int unsigned DEPTH        = 4,
  parameter int unsigned ALPHA_SHIFT  = 2,
  parameter int unsigned PHIREL_SHIFT = 9,
  parameter int unsigned DRIFT_SHIFT  = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  sphi_t  alpha  [N_SL],
  input  dts_t   delta  [N_SL],
  input  logic   found  [N_SL],
  input  logic [$clog2(DEPTH)-1:0] sel [N_SL],
  input  ts_t    cand   [N_SL][DEPTH],
  input  tick_t  event_time,
  output logic   out_valid,
  output data_t  x      [N_IN]
);

  function automatic data_t sat(int v);
    if (v > int'(DATA_MAX)) return DATA_MAX;
    if (v < int'(DATA_MIN)) return DATA_MIN;
    return data_t'(v);
  endfunction

  always_ff @(posedge clk)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;

  for (genvar sl = 0; sl < N_SL; sl++) begin : g_sl
    logic signed [TIME_W:0] dt;
    data_t xa, xp, xd;

    always_comb begin
      dt = signed'({1'b0, cand[sl][sel[sl]].t - event_time});
      xa = sat(int'(alpha[sl]) <<< ALPHA_SHIFT);
      xp = sat(int'(delta[sl]) <<< PHIREL_SHIFT);
      xd = sat(int'(dt) <<< DRIFT_SHIFT);
    end

    always_ff @(posedge clk)
      if (in_valid) begin
        x[3*sl]     <= found[sl] ? xa : '0;
        x[3*sl + 1] <= found[sl] ? xp : '0;
        x[3*sl + 2] <= found[sl] ? xd : '0;
      end
  end

endmodule
