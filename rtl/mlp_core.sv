// mlp_core -- the 27-81-2 tanh network, scheduled as "Makro-Neuron V2".
//
// Resources: 27 hidden macro neurons with 9 MACs each and 2 output neurons with 9
// MACs each, 261 MACs in all (Fig. 7 of the paper: "27 x 9 MACs (Hidden-Layer),
// 2 x 9 MACs (Output-Layer)"). LUT_PCT percent of them are built from fabric logic,
// the rest are DSP slices (paper: 40 % SRAM-LUT, 60 % DSP).
//
// Schedule, in cycles t after the hidden phase starts (all numbers follow from the
// boxes of Fig. 7, each box one clock):
//   t = 3s .. 3s+2  hidden slot s (s = 0,1,2): macro neuron g computes neuron
//                   27s+g; in cycle j of the slot its MAC m takes input 9j+m
//   t = 3s+3        adder tree of hidden slot s
//   t = 3s+4        tanh of hidden slot s  -> 27 hidden values of this slot
//   t = 3s+5..3s+7  output MACs consume those 27 values (MAC-Ops s/3), MAC m
//                   in cycle j taking hidden neuron 27s+9j+m
//   t = 3s+8        output adder tree, partial sum s
//   t = 15          output tanh; out_valid in cycle t = 16
// The hidden phase takes 9 cycles, so a new input vector is accepted every 9
// cycles (in_ready), while the output phase of the previous vector is still
// running. From the cycle in which in_valid && in_ready the result appears
// LATENCY = 17 cycles later (with the paper's 127 MHz clock, 134 ns).
//
// Inputs x are Q1.12 in [-1,1]; net picks one of the five stored weight sets for
// this vector; tag is carried along unchanged to identify the result. Weights are
// written through wr_en/wr_cmd (see weight_memory). Only the control state is reset.
module mlp_core
  import nnt_pkg::*;
#(
  parameter int unsigned LUT_PCT = 40,
  parameter int unsigned TAG_W   = 8
) (
  input  logic             clk,
  input  logic             rst_n,

  input  logic             wr_en,
  input  wr_cmd_t          wr_cmd,

  input  logic             in_valid,
  output logic             in_ready,
  input  data_t            in_x [N_IN],
  input  net_t             in_net,
  input  logic [TAG_W-1:0] in_tag,

  output logic             out_valid,
  output data_t            out_y [N_OUT],
  output net_t             out_net,
  output logic [TAG_W-1:0] out_tag
);

  localparam int unsigned LATENCY = 17;
  localparam int unsigned DEPTH   = 8;     // control delay line c[0..8]

  typedef struct packed {
    logic             active;
    logic [1:0]       slot;
    logic [1:0]       cyc;
    net_t             net;
    logic [TAG_W-1:0] tag;
  } ctrl_t;

  function automatic logic [MACS-1:0] lut_mask(int unsigned first_mac);
    logic [MACS-1:0] m;
    for (int i = 0; i < MACS; i++) m[i] = mac_on_lut(first_mac + i, LUT_PCT);
    return m;
  endfunction

  // ---------------------------------------------------------------- control
  logic             hid_active;
  logic [3:0]       hid_t;
  net_t             hid_net;
  logic [TAG_W-1:0] hid_tag;
  ctrl_t            c [DEPTH+1];
  data_t            x_q [N_IN];
  logic             accept;

  assign in_ready = !hid_active || hid_t == 4'(SLOTS*CYC - 1);
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk)
    if (!rst_n) begin
      hid_active <= 1'b0;
      hid_t      <= '0;
    end else if (accept) begin
      hid_active <= 1'b1;
      hid_t      <= '0;
    end else if (hid_active) begin
      if (hid_t == 4'(SLOTS*CYC - 1)) hid_active <= 1'b0;
      else                            hid_t <= hid_t + 4'd1;
    end

  always_ff @(posedge clk)
    if (accept) begin
      x_q     <= in_x;
      hid_net <= in_net;
      hid_tag <= in_tag;
    end

  assign c[0] = '{active: hid_active, slot: 2'(hid_t / 4'(CYC)), cyc: 2'(hid_t % 4'(CYC)),
                  net: hid_net, tag: hid_tag};

  for (genvar k = 1; k <= DEPTH; k++) begin : g_dly
    always_ff @(posedge clk)
      if (!rst_n) c[k] <= '0;
      else        c[k] <= c[k-1];
  end

  // ---------------------------------------------------------------- weights
  weight_t hw [N_MACRO][MACS];
  weight_t hb [N_MACRO];
  weight_t ow [N_OUT][MACS];
  weight_t ob [N_OUT];

  weight_memory u_wmem (
    .clk     (clk),
    .wr_en   (wr_en),
    .wr_cmd  (wr_cmd),
    .hw_net  (c[0].net), .hw_slot (c[0].slot), .hw_cyc (c[0].cyc), .hw (hw),
    .hb_net  (c[1].net), .hb_slot (c[1].slot), .hb (hb),
    .ow_net  (c[5].net), .ow_slot (c[5].slot), .ow_cyc (c[5].cyc), .ow (ow),
    .ob_net  (c[6].net), .ob (ob)
  );

  // ---------------------------------------------------------------- hidden layer
  data_t hid_y [N_MACRO];
  data_t hid_x [MACS];

  always_comb
    for (int m = 0; m < MACS; m++) hid_x[m] = x_q[MACS*c[0].cyc + m];

  for (genvar g = 0; g < N_MACRO; g++) begin : g_hid
    macro_neuron #(.N_MAC(MACS), .LUT_MASK(lut_mask(MACS*g))) u_neuron (
      .clk       (clk),
      .mac_en    (c[0].active),
      .mac_first (c[0].cyc == 2'd0),
      .x         (hid_x),
      .w         (hw[g]),
      .sum_en    (c[1].active && c[1].cyc == 2'd2),
      .sum_clear (1'b1),
      .bias      (hb[g]),
      .act_en    (c[2].active && c[2].cyc == 2'd2),
      .y         (hid_y[g])
    );
  end

  // ---------------------------------------------------------------- output layer
  data_t out_x [MACS];

  always_comb
    for (int m = 0; m < MACS; m++) out_x[m] = hid_y[MACS*c[5].cyc + m];

  for (genvar k = 0; k < N_OUT; k++) begin : g_out
    macro_neuron #(.N_MAC(MACS), .LUT_MASK(lut_mask(N_MACRO*MACS + MACS*k))) u_neuron (
      .clk       (clk),
      .mac_en    (c[5].active),
      .mac_first (c[5].cyc == 2'd0),
      .x         (out_x),
      .w         (ow[k]),
      .sum_en    (c[6].active && c[6].cyc == 2'd2),
      .sum_clear (c[6].slot == 2'd0),
      .bias      (ob[k]),
      .act_en    (c[7].active && c[7].cyc == 2'd2 && c[7].slot == 2'(SLOTS - 1)),
      .y         (out_y[k])
    );
  end

  assign out_valid = c[8].active && c[8].cyc == 2'd2 && c[8].slot == 2'(SLOTS - 1);
  assign out_net   = c[8].net;
  assign out_tag   = c[8].tag;

  // the result must come exactly LATENCY cycles after the vector was accepted
  property p_latency;
    @(posedge clk) disable iff (!rst_n) accept |-> ##(LATENCY) out_valid;
  endproperty
  a_latency: assert property (p_latency);

endmodule
