// mlp_selection -- chooses which of the five networks processes a track.
//
// The paper's trigger keeps five networks: one trained on tracks with segments in
// all four stereo super layers (SL1, SL3, SL5, SL7) and one specialised network for
// each case in which exactly one of them has no matching segment. This block
// looks at the stereo layers' hit flags:
//   all four present        -> net 0
//   only stereo layer k missing (SL 2k+1) -> net k+1
//   two or more missing     -> ok = 0, no network (the track is not processed)
// The network numbering and the handling of two or more missing layers are this
// design's own choices. Timing: one register stage.
module mlp_selection
  import nnt_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic hit [N_SL],
  output logic out_valid,
  output logic ok,
  output net_t net
);

  logic [N_STEREO-1:0] miss;
  int                  n_miss;
  net_t                net_d;

  always_comb begin
    n_miss = 0;
    net_d  = '0;
    for (int k = 0; k < N_STEREO; k++) begin
      miss[k] = !hit[2*k + 1];
      if (miss[k]) begin
        n_miss++;
        net_d = net_t'(k + 1);
      end
    end
  end

  always_ff @(posedge clk)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;

  always_ff @(posedge clk)
    if (in_valid) begin
      ok  <= n_miss <= 1;
      net <= n_miss == 0 ? net_t'(0) : net_d;
    end

endmodule
