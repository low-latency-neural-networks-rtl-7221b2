// nnt_top -- neural z-vertex trigger: preprocessing and two parallel networks.
//
// Data flow (Fig. 5 of the paper): the event time, the 2D tracks and the track
// segments of the nine super layers arrive already decoded from their links
// (the transceivers and link protocol modules are outside this RTL). For each 2D
// track:
//   cycle T    track at the input; the segments then held by HIT SELECTION are
//              taken as its candidates
//   T+1        ALPHA & REFID CALC: crossing angle and reference id per layer;
//              MLP SELECTION: network from the stereo hit pattern
//   T+2        DELTA ID CALC: nearest candidate per layer, phi_rel
//   T+3        SCALING: 27 inputs in [-1,1]; MLP selection delayed to match
//   T+3        dispatch to one of N_CORES network cores (mlp_core)
//   T+3+17     result: the two network outputs (z-vertex and a second estimate)
// Blocks without a data dependence run side by side and their results are delayed
// so that all inputs of a track meet in the same cycle, as the paper describes.
//
// Two network cores run in parallel (the paper's aim: "two neural networks in
// parallel on the targeted FPGA"). Each accepts a track every 9 cycles. The
// dispatcher gives a track to the core after the one used last if that core is
// free, else to the other; if both are busy the track is dropped and counted in
// n_dropped (a trigger cannot stall). Tracks for which no network exists (two or
// more stereo layers without segments) are counted in n_no_net. The round robin,
// the drop policy and the counters are this design's own choices.
//
// Weights for all cores are written through wr_en/wr_cmd before use. Reset is
// synchronous and active low (own choice; the paper does not discuss reset).
module nnt_top
  import nnt_pkg::*;
#(
  parameter int unsigned N_CORES  = 2,
  parameter int unsigned LUT_PCT  = 40,
  parameter int unsigned TS_DEPTH = 4,
  parameter int unsigned TS_HOLD  = 64
) (
  input  logic        clk,
  input  logic        rst_n,

  // weight loading, broadcast to all cores
  input  logic        wr_en,
  input  wr_cmd_t     wr_cmd,

  // decoded inputs
  input  logic        event_time_valid,
  input  tick_t       event_time,
  input  logic        track_valid,
  input  track2d_t    track,
  input  ts_t         ts_in [N_SL],

  // result towards the global decision logic
  output logic        out_valid,
  output data_t       out_y [N_OUT],
  output net_t        out_net,
  output logic [7:0]  out_tag,
  output logic [$clog2(N_CORES)-1:0] out_core,

  // status
  output logic [15:0] n_dropped,
  output logic [15:0] n_no_net
);

  localparam int SEL_W  = $clog2(TS_DEPTH);
  localparam int CORE_W = $clog2(N_CORES);

  // ---------------------------------------------------------------- event time
  tick_t t0_q;
  always_ff @(posedge clk)
    if (!rst_n)                t0_q <= '0;
    else if (event_time_valid) t0_q <= event_time;

  // ---------------------------------------------------------------- track tag
  logic [7:0] tag_q [4];
  always_ff @(posedge clk)
    if (!rst_n) tag_q[0] <= '0;
    else if (track_valid) tag_q[0] <= tag_q[0] + 8'd1;

  // tag of the track at stage k (k = 1..3)
  always_ff @(posedge clk) begin
    tag_q[1] <= tag_q[0];
    tag_q[2] <= tag_q[1];
    tag_q[3] <= tag_q[2];
  end

  // ---------------------------------------------------------------- hit selection
  ts_t  cand    [N_SL][TS_DEPTH];
  logic has_hit [N_SL];

  hit_selection #(.DEPTH(TS_DEPTH), .HOLD(TS_HOLD)) u_hits (
    .clk (clk), .rst_n (rst_n), .ts_in (ts_in), .cand (cand), .has_hit (has_hit)
  );

  ts_t cand_q1 [N_SL][TS_DEPTH];
  ts_t cand_q2 [N_SL][TS_DEPTH];
  always_ff @(posedge clk) begin
    if (track_valid) cand_q1 <= cand;
    cand_q2 <= cand_q1;
  end

  // ---------------------------------------------------------------- alpha & ref id
  logic   a_valid;
  sphi_t  a_alpha [N_SL];
  ts_id_t a_ref   [N_SL];

  alpha_refid_calc u_alpha (
    .clk (clk), .rst_n (rst_n), .in_valid (track_valid), .track (track),
    .out_valid (a_valid), .alpha (a_alpha), .ref_id (a_ref)
  );

  // ---------------------------------------------------------------- MLP selection
  logic s_valid, s_ok;
  net_t s_net;
  logic s_valid_q [2];
  logic s_ok_q  [2];
  net_t s_net_q [2];

  mlp_selection u_sel (
    .clk (clk), .rst_n (rst_n), .in_valid (track_valid), .hit (has_hit),
    .out_valid (s_valid), .ok (s_ok), .net (s_net)
  );

  always_ff @(posedge clk) begin
    s_valid_q[0] <= s_valid;      s_valid_q[1] <= s_valid_q[0];
    s_ok_q[0]    <= s_ok;         s_ok_q[1]    <= s_ok_q[0];
    s_net_q[0]   <= s_net;        s_net_q[1]   <= s_net_q[0];
  end

  // ---------------------------------------------------------------- delta id
  logic             d_valid;
  sphi_t            d_alpha [N_SL];
  dts_t             d_delta [N_SL];
  logic             d_found [N_SL];
  logic [SEL_W-1:0] d_sel   [N_SL];

  delta_id_calc #(.DEPTH(TS_DEPTH)) u_delta (
    .clk (clk), .rst_n (rst_n), .in_valid (a_valid),
    .alpha_in (a_alpha), .ref_id (a_ref), .cand (cand_q1),
    .out_valid (d_valid), .alpha (d_alpha), .delta (d_delta), .found (d_found), .sel (d_sel)
  );

  // ---------------------------------------------------------------- scaling
  logic  x_valid;
  data_t x [N_IN];

  scaling #(.DEPTH(TS_DEPTH)) u_scale (
    .clk (clk), .rst_n (rst_n), .in_valid (d_valid),
    .alpha (d_alpha), .delta (d_delta), .found (d_found), .sel (d_sel), .cand (cand_q2),
    .event_time (t0_q), .out_valid (x_valid), .x (x)
  );

  // ---------------------------------------------------------------- dispatch
  logic              core_ready [N_CORES];
  logic              core_start [N_CORES];
  logic              core_valid [N_CORES];
  data_t             core_y     [N_CORES][N_OUT];
  net_t              core_net   [N_CORES];
  logic [7:0]        core_tag   [N_CORES];
  logic [CORE_W-1:0] rr_q, pick;
  logic              pick_ok;

  always_comb begin
    pick    = rr_q;
    pick_ok = 1'b0;
    for (int k = N_CORES - 1; k >= 0; k--) begin
      logic [CORE_W-1:0] c;
      c = CORE_W'((int'(rr_q) + k) % N_CORES);
      if (core_ready[c]) begin
        pick    = c;
        pick_ok = 1'b1;
      end
    end
    for (int k = 0; k < N_CORES; k++)
      core_start[k] = x_valid && s_ok_q[1] && pick_ok && pick == CORE_W'(k);
  end

  always_ff @(posedge clk)
    if (!rst_n) begin
      rr_q      <= '0;
      n_dropped <= '0;
      n_no_net  <= '0;
    end else if (x_valid) begin
      if (!s_ok_q[1])    n_no_net  <= n_no_net + 16'd1;
      else if (!pick_ok) n_dropped <= n_dropped + 16'd1;
      else               rr_q      <= CORE_W'((int'(pick) + 1) % N_CORES);
    end

  for (genvar k = 0; k < N_CORES; k++) begin : g_core
    mlp_core #(.LUT_PCT(LUT_PCT), .TAG_W(8)) u_core (
      .clk       (clk),
      .rst_n     (rst_n),
      .wr_en     (wr_en),
      .wr_cmd    (wr_cmd),
      .in_valid  (core_start[k]),
      .in_ready  (core_ready[k]),
      .in_x      (x),
      .in_net    (s_net_q[1]),
      .in_tag    (tag_q[3]),
      .out_valid (core_valid[k]),
      .out_y     (core_y[k]),
      .out_net   (core_net[k]),
      .out_tag   (core_tag[k])
    );
  end

  // ---------------------------------------------------------------- output merge
  // Cores start in different cycles and have the same latency, so at most one
  // result appears per cycle.
  always_comb begin
    out_valid = 1'b0;
    out_y     = core_y[0];
    out_net   = core_net[0];
    out_tag   = core_tag[0];
    out_core  = '0;
    for (int k = 0; k < N_CORES; k++)
      if (core_valid[k]) begin
        out_valid = 1'b1;
        out_y     = core_y[k];
        out_net   = core_net[k];
        out_tag   = core_tag[k];
        out_core  = CORE_W'(k);
      end
  end

  int n_results;
  always_comb begin
    n_results = 0;
    for (int k = 0; k < N_CORES; k++) n_results += int'(core_valid[k]);
  end

  // the network choice and the scaled inputs of a track must arrive together
  a_aligned: assert property (@(posedge clk) disable iff (!rst_n) x_valid == s_valid_q[1]);

  a_one_result: assert property (@(posedge clk) disable iff (!rst_n) n_results <= 1);

endmodule
