// alpha_refid_calc -- crossing angle and reference track segment per super layer.
//
// For every 2D track (azimuth phi0 at the origin, signed curvature omega) this
// block computes, for each of the nine super layers, where the track crosses the
// layer: the crossing angle alpha between the track and the radial direction (one
// of the three network inputs, Fig. 4 of the paper) and the reference id, the
// track-segment number at the crossing azimuth, against which the measured track
// segments are compared later (DELTA ID CALC).
//
// The paper names the block and its outputs but gives no formula. This design uses
// the small-angle form of a circle through the origin: alpha = r * omega / 2^S
// (S = OMEGA_SHIFT) in azimuth units of 2*pi/4096, saturated to +-pi/2; the
// crossing azimuth is phi0 - alpha and ref_id = floor(phi_cross * NTS / 4096),
// with the super layer radius r and track-segment count NTS from nnt_pkg.
// Timing: one register stage, out_valid follows in_valid by one cycle.
module alpha_refid_calc
  import nnt_pkg::*;
#(
  parameter int unsigned OMEGA_SHIFT = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  track2d_t track,
  output logic     out_valid,
  output sphi_t    alpha  [N_SL],
  output ts_id_t   ref_id [N_SL]
);

  localparam int AMAX = 2**(PHI_W-2) - 1;   // just under pi/2

  always_ff @(posedge clk)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;

  for (genvar sl = 0; sl < N_SL; sl++) begin : g_sl
    logic signed [31:0] a_full;
    sphi_t              a_sat;
    phi_t               phi_x;
    ts_id_t             id_x;

    always_comb begin
      a_full = (int'(track.omega) * int'(RADIUS_MM[sl])) >>> OMEGA_SHIFT;
      if (a_full > AMAX)       a_sat = sphi_t'(AMAX);
      else if (a_full < -AMAX) a_sat = sphi_t'(-AMAX);
      else                     a_sat = sphi_t'(a_full);
      phi_x   = track.phi0 - phi_t'(a_sat);
      id_x    = ts_id_t'((32'(phi_x) * 32'(NTS[sl])) >> PHI_W);
    end

    always_ff @(posedge clk)
      if (in_valid) begin
        alpha[sl]  <= a_sat;
        ref_id[sl] <= id_x;
      end
  end

endmodule
