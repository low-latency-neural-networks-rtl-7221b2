// tb_mlp_core -- self-checking test of the time-multiplexed 27-81-2 network.
//
// Loads random weights for all five networks, then offers input vectors back to
// back with a random network index each. Every result is compared with an integer
// model of the same fixed-point arithmetic (tanh from $tanh), the latency from
// acceptance to result must be 17 cycles and the core must accept one vector every
// 9 cycles when it is offered one every cycle.
`timescale 1ns/1ps
module tb_mlp_core;
  import nnt_pkg::*;

  localparam int NVEC = 40;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #4 clk = ~clk;

  logic    wr_en = 1'b0;
  wr_cmd_t wr_cmd = '0;
  logic    in_valid = 1'b0, in_ready;
  data_t   in_x [N_IN];
  net_t    in_net = '0;
  logic [7:0] in_tag = '0;
  logic    out_valid;
  data_t   out_y [N_OUT];
  net_t    out_net;
  logic [7:0] out_tag;

  mlp_core dut (.*);

  int checks = 0, failures = 0;

  // reference weights
  int wh [N_NETS][N_HID][N_IN+1];
  int wo [N_NETS][N_OUT][N_HID+1];
  int vx [NVEC][N_IN];
  int vnet [NVEC];
  longint t_acc [NVEC];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int act(longint s);
    longint a;
    real r;
    int v;
    a = s >>> 16;
    if (a > 1023) a = 1023;
    if (a < -1024) a = -1024;
    r = $tanh(real'(a) / 256.0) * 4096.0;
    v = int'($floor(r + 0.5));
    if (v > 4095) v = 4095;
    if (v < -4095) v = -4095;
    return v;
  endfunction

  function automatic int model(int v, int k);
    int h [N_HID];
    longint s;
    for (int n = 0; n < N_HID; n++) begin
      s = longint'(wh[vnet[v]][n][N_IN]) <<< 12;
      for (int i = 0; i < N_IN; i++) s += longint'(vx[v][i]) * wh[vnet[v]][n][i];
      h[n] = act(s);
    end
    s = longint'(wo[vnet[v]][k][N_HID]) <<< 12;
    for (int n = 0; n < N_HID; n++) s += longint'(h[n]) * wo[vnet[v]][k][n];
    return act(s);
  endfunction

  function automatic int rnd(int lim);
    return int'($urandom_range(2 * lim)) - lim;
  endfunction

  task automatic write_w(logic layer, int net, int neuron, int index, int value);
    wr_en  <= 1'b1;
    wr_cmd <= '{layer: layer, net: net_t'(net), neuron: 7'(neuron), index: 7'(index),
                value: weight_t'(value)};
    @(posedge clk);
  endtask

  // watchdog
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nout = 0;
  int accepted = 0;
  longint last_acc = -1;

  // count acceptances and check the 9-cycle initiation interval
  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    t_acc[accepted] = cyc;
    accepted++;
    if (last_acc >= 0) begin
      checks++;
      if (cyc - last_acc != 9) begin
        failures++;
        $display("interval %0d, expected 9", cyc - last_acc);
      end
    end
    last_acc = cyc;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int v;
    v = int'(out_tag);
    checks++;
    if (v != nout || cyc - t_acc[v] != 17 || out_net != net_t'(vnet[v])) begin
      failures++;
      $display("vector %0d: tag %0d latency %0d net %0d", nout, v, cyc - t_acc[v], out_net);
    end
    for (int k = 0; k < N_OUT; k++) begin
      int e;
      e = model(nout, k);
      checks++;
      if (int'(out_y[k]) != e) begin
        failures++;
        $display("vector %0d out %0d: got %0d expected %0d", nout, k, out_y[k], e);
      end
    end
    nout++;
  end

  initial begin
    for (int i = 0; i < N_IN; i++) in_x[i] = '0;
    for (int n = 0; n < N_NETS; n++) begin
      for (int j = 0; j < N_HID; j++)
        for (int i = 0; i <= N_IN; i++) wh[n][j][i] = rnd(j % 3 == 0 ? 16000 : 2500);
      for (int k = 0; k < N_OUT; k++)
        for (int i = 0; i <= N_HID; i++) wo[n][k][i] = rnd(1200);
    end
    for (int v = 0; v < NVEC; v++) begin
      vnet[v] = $urandom_range(N_NETS - 1);
      for (int i = 0; i < N_IN; i++) vx[v][i] = rnd(4095);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int n = 0; n < N_NETS; n++) begin
      for (int j = 0; j < N_HID; j++)
        for (int i = 0; i <= N_IN; i++) write_w(1'b0, n, j, i, wh[n][j][i]);
      for (int k = 0; k < N_OUT; k++)
        for (int i = 0; i <= N_HID; i++) write_w(1'b1, n, k, i, wo[n][k][i]);
    end
    wr_en <= 1'b0;
    // offer vectors every cycle; the core takes one every 9 cycles
    for (int v = 0; v < NVEC; v++) begin
      in_valid <= 1'b1;
      for (int i = 0; i < N_IN; i++) in_x[i] <= data_t'(vx[v][i]);
      in_net <= net_t'(vnet[v]);
      in_tag <= 8'(v);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (40) @(posedge clk);
    checks++;
    if (nout != NVEC) begin
      failures++;
      $display("%0d results, expected %0d", nout, NVEC);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
