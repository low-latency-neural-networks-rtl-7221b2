// tb_nnt_top -- end-to-end test of the trigger at its default sizes.
//
// Loads random weights for the five networks into both cores, then plays events:
// an event time, a few track segments per super layer (some layers left empty),
// and one to four 2D tracks, offered in consecutive cycles or spaced out. Between
// events the segments are left to expire. For every track the testbench computes
// the expected result with its own model of the whole chain (crossing angle,
// reference id, nearest segment, scaling, network choice, 27-81-2 tanh network)
// and compares it with the output carrying the track's tag; the result must come
// 20 cycles after the track. It also counts how often each mechanism occurred and
// fails if one never did: each of the five networks, a track with no network, a
// track dropped because both cores were busy, each core used, a layer left empty,
// a segment expiring before a later event.
`timescale 1ns/1ps
module tb_nnt_top;
  import nnt_pkg::*;

  localparam int DEPTH = 4, HOLD = 64, NEV = 60;
  localparam int R [9] = '{198, 311, 424, 537, 650, 763, 876, 989, 1102};
  localparam int T [9] = '{160, 160, 192, 224, 256, 288, 320, 352, 384};

  logic clk = 1'b0;
  always #4 clk = ~clk;

  logic        rst_n;
  logic        wr_en;
  wr_cmd_t     wr_cmd;
  logic        event_time_valid;
  tick_t       event_time;
  logic        track_valid;
  track2d_t    track;
  ts_t         ts_in [N_SL];
  logic        out_valid;
  data_t       out_y [N_OUT];
  net_t        out_net;
  logic [7:0]  out_tag;
  logic        out_core;
  logic [15:0] n_dropped, n_no_net;

  nnt_top dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------------------------------------------------------- model state
  int wh [N_NETS][N_HID][N_IN+1];
  int wo [N_NETS][N_OUT][N_HID+1];
  int nseg [N_SL];          // segments of the current event, newest first
  int seg_id [N_SL][DEPTH];
  int seg_t  [N_SL][DEPTH];
  int t0;

  // expected result per tag
  logic exp_pending [256];
  int   exp_y   [256][N_OUT];
  int   exp_net [256];
  int   exp_cyc [256];

  // mechanism counters
  int cnt_net [N_NETS];
  int cnt_no_net = 0, cnt_empty_layer = 0, cnt_expired = 0, cnt_core [2];
  int n_tracks = 0, n_results = 0, exp_no_net = 0;

  function automatic int act(longint s);
    longint a;
    int v;
    a = s >>> 16;
    if (a > 1023) a = 1023;
    if (a < -1024) a = -1024;
    v = int'($floor($tanh(real'(a) / 256.0) * 4096.0 + 0.5));
    if (v > 4095) v = 4095;
    if (v < -4095) v = -4095;
    return v;
  endfunction

  function automatic int sat(int v);
    return v > 4095 ? 4095 : (v < -4095 ? -4095 : v);
  endfunction

  function automatic int rnd(int lim);
    return int'($urandom_range(2 * lim)) - lim;
  endfunction

  // expected inputs, network choice and outputs for one track
  task automatic model_track(int tag, int phi0, int om);
    int x [N_IN];
    int h [N_HID];
    int miss, net;
    longint s;
    miss = 0; net = 0;
    for (int sl = 0; sl < N_SL; sl++) begin
      int a, px, r, best, bd, bi;
      a = R[sl] * om;
      a = a >= 0 ? a / 256 : -((-a + 255) / 256);
      if (a > 1023) a = 1023;
      if (a < -1023) a = -1023;
      px = ((phi0 - a) % 4096 + 4096) % 4096;
      r = px * T[sl] / 4096;
      best = 100000; bd = 0; bi = -1;
      for (int i = 0; i < nseg[sl]; i++) begin
        int d;
        d = seg_id[sl][i] - r;
        if (d >= T[sl] / 2) d -= T[sl];
        if (d < -T[sl] / 2) d += T[sl];
        if ((d < 0 ? -d : d) < best) begin best = d < 0 ? -d : d; bd = d; bi = i; end
      end
      if (bi < 0) begin
        x[3*sl] = 0; x[3*sl+1] = 0; x[3*sl+2] = 0;
        if (sl % 2 == 1) begin miss++; net = (sl - 1) / 2 + 1; end
      end else begin
        x[3*sl]   = sat(a * 4);
        x[3*sl+1] = sat(bd * 512);
        x[3*sl+2] = sat(((seg_t[sl][bi] - t0 + 512) % 512) * 16);
      end
    end
    if (miss > 1) begin
      exp_no_net++;
      cnt_no_net++;
      return;
    end
    if (miss == 0) net = 0;
    for (int n = 0; n < N_HID; n++) begin
      s = longint'(wh[net][n][N_IN]) <<< 12;
      for (int i = 0; i < N_IN; i++) s += longint'(x[i]) * wh[net][n][i];
      h[n] = act(s);
    end
    for (int k = 0; k < N_OUT; k++) begin
      s = longint'(wo[net][k][N_HID]) <<< 12;
      for (int n = 0; n < N_HID; n++) s += longint'(h[n]) * wo[net][k][n];
      exp_y[tag][k] = act(s);
    end
    exp_net[tag] = net;
    exp_pending[tag] = 1'b1;
  endtask

  // ---------------------------------------------------------------- watchdog
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- output checker
  int track_cyc [256];
  always @(posedge clk) if (rst_n && out_valid) begin
    int tg;
    tg = int'(out_tag);
    n_results++;
    cnt_core[out_core]++;
    checks++;
    if (!exp_pending[tg] || int'(out_net) != exp_net[tg] || cyc - track_cyc[tg] != 20) begin
      failures++;
      $display("tag %0d: pending %b net %0d exp %0d latency %0d", tg, exp_pending[tg], out_net,
               exp_net[tg], cyc - track_cyc[tg]);
    end else begin
      cnt_net[exp_net[tg]]++;
      for (int k = 0; k < N_OUT; k++) begin
        checks++;
        if (int'(out_y[k]) != exp_y[tg][k]) begin
          failures++;
          $display("tag %0d out %0d: %0d exp %0d", tg, k, out_y[k], exp_y[tg][k]);
        end
      end
    end
    exp_pending[tg] = 1'b0;
  end

  // ---------------------------------------------------------------- stimulus
  initial begin
    rst_n = 1'b0; wr_en = 1'b0; wr_cmd = '0;
    event_time_valid = 1'b0; event_time = '0; track_valid = 1'b0; track = '0;
    for (int sl = 0; sl < N_SL; sl++) ts_in[sl] = '0;
    for (int i = 0; i < 256; i++) exp_pending[i] = 1'b0;
    for (int n = 0; n < N_NETS; n++) cnt_net[n] = 0;
    cnt_core[0] = 0; cnt_core[1] = 0;
    for (int n = 0; n < N_NETS; n++) begin
      for (int j = 0; j < N_HID; j++)
        for (int i = 0; i <= N_IN; i++) wh[n][j][i] = rnd(i == N_IN ? 4000 : 1500 + 500 * n);
      for (int k = 0; k < N_OUT; k++)
        for (int i = 0; i <= N_HID; i++) wo[n][k][i] = rnd(900);
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < N_NETS; n++) begin
      for (int j = 0; j < N_HID; j++)
        for (int i = 0; i <= N_IN; i++) begin
          @(negedge clk);
          wr_en = 1'b1;
          wr_cmd = '{layer: 1'b0, net: net_t'(n), neuron: 7'(j), index: 7'(i), value: weight_t'(wh[n][j][i])};
        end
      for (int k = 0; k < N_OUT; k++)
        for (int i = 0; i <= N_HID; i++) begin
          @(negedge clk);
          wr_en = 1'b1;
          wr_cmd = '{layer: 1'b1, net: net_t'(n), neuron: 7'(k), index: 7'(i), value: weight_t'(wo[n][k][i])};
        end
    end
    @(negedge clk) wr_en = 1'b0;

    for (int ev = 0; ev < NEV; ev++) begin
      int phi0, om, ntr, gap, skip;
      logic prev_had [N_SL];
      phi0 = int'($urandom_range(4095));
      om = rnd(ev % 3 == 0 ? 300 : 60);
      // event time
      @(negedge clk);
      t0 = int'($urandom_range(511));
      event_time_valid = 1'b1;
      event_time = tick_t'(t0);
      // layers left empty: none, one stereo layer, two stereo layers, an axial one
      skip = ev % 6;
      for (int sl = 0; sl < N_SL; sl++) begin
        prev_had[sl] = nseg[sl] > 0;
        case (skip)
          1, 4:    nseg[sl] = (sl == 2 * ((ev / 6) % 4) + 1) ? 0 : int'($urandom_range(1, DEPTH));
          2:       nseg[sl] = (sl == 3 || sl == 7) ? 0 : int'($urandom_range(1, DEPTH));
          3:       nseg[sl] = (sl == 4) ? 0 : int'($urandom_range(1, DEPTH));
          default: nseg[sl] = int'($urandom_range(1, DEPTH));
        endcase
        if (nseg[sl] == 0) cnt_empty_layer++;
        if (nseg[sl] == 0 && prev_had[sl]) cnt_expired++;
      end
      // segments near the tracks' reference ids, one per layer and cycle
      for (int c = 0; c < DEPTH; c++) begin
        if (c > 0) @(negedge clk);
        event_time_valid = (c == 0);
        for (int sl = 0; sl < N_SL; sl++) begin
          int k, a, px, r;
          ts_in[sl] = '0;
          if (c < nseg[sl]) begin
            k = nseg[sl] - 1 - c;    // newest first in the model
            a = R[sl] * om;
            a = a >= 0 ? a / 256 : -((-a + 255) / 256);
            if (a > 1023) a = 1023;
            if (a < -1023) a = -1023;
            px = ((phi0 - a) % 4096 + 4096) % 4096;
            r = px * T[sl] / 4096;
            seg_id[sl][k] = (r + rnd(6) + T[sl]) % T[sl];
            seg_t[sl][k] = (t0 + int'($urandom_range(200))) % 512;
            ts_in[sl] = '{valid: 1'b1, id: ts_id_t'(seg_id[sl][k]), t: tick_t'(seg_t[sl][k])};
          end
        end
      end
      @(negedge clk);
      event_time_valid = 1'b0;
      for (int sl = 0; sl < N_SL; sl++) ts_in[sl] = '0;
      // tracks of this event: similar azimuth, consecutive or spaced
      ntr = int'($urandom_range(1, 4));
      gap = (ev % 2 == 0) ? 0 : int'($urandom_range(3, 12));
      for (int i = 0; i < ntr; i++) begin
        int p;
        @(negedge clk);
        p = (phi0 + rnd(8) + 4096) % 4096;
        track_valid = 1'b1;
        track = '{phi0: phi_t'(p), omega: omega_t'(om)};
        track_cyc[n_tracks % 256] = cyc;
        model_track(n_tracks % 256, p, om);
        n_tracks++;
        if (gap > 0) begin
          @(negedge clk) track_valid = 1'b0;
          repeat (gap - 1) @(negedge clk);
        end
      end
      @(negedge clk) track_valid = 1'b0;
      repeat (HOLD + 30) @(negedge clk);
    end
    repeat (40) @(negedge clk);

    // ------------------------------------------------------------ totals
    checks++;
    if (n_results + int'(n_dropped) + int'(n_no_net) != n_tracks) begin
      failures++;
      $display("tracks %0d, results %0d + dropped %0d + no net %0d", n_tracks, n_results,
               n_dropped, n_no_net);
    end
    checks++;
    if (int'(n_no_net) != exp_no_net) begin
      failures++;
      $display("no-net %0d, expected %0d", n_no_net, exp_no_net);
    end
    $display("tracks %0d results %0d dropped %0d no-net %0d", n_tracks, n_results, n_dropped, n_no_net);
    $display("per network %0d %0d %0d %0d %0d, core0 %0d core1 %0d, empty layers %0d, expired %0d",
             cnt_net[0], cnt_net[1], cnt_net[2], cnt_net[3], cnt_net[4], cnt_core[0], cnt_core[1],
             cnt_empty_layer, cnt_expired);
    for (int n = 0; n < N_NETS; n++) begin
      checks++;
      if (cnt_net[n] == 0) begin failures++; $display("network %0d never used", n); end
    end
    checks += 6;
    if (cnt_no_net == 0)      begin failures++; $display("no track without network"); end
    if (n_dropped == 0)       begin failures++; $display("no track dropped"); end
    if (cnt_core[0] == 0)     begin failures++; $display("core 0 unused"); end
    if (cnt_core[1] == 0)     begin failures++; $display("core 1 unused"); end
    if (cnt_empty_layer == 0) begin failures++; $display("no empty layer"); end
    if (cnt_expired == 0)     begin failures++; $display("no segment expired"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
