// nnt_pkg -- types, widths and constants shared by the neural z-vertex trigger.
//
// The network is a 27-81-2 multilayer perceptron with tanh activation; its inputs
// are three values (crossing angle alpha, relative wire position phi_rel and drift
// time) for each of the nine super layers (SL0..SL8) of the drift chamber. These
// sizes, the five selectable networks and the four stereo super layers (SL1, SL3,
// SL5, SL7) come from the paper. The fixed-point formats, the azimuth resolution,
// the track-segment counts and the super-layer radii are this design's own choices:
//   data    : signed Q1.12 in 13 bits, the [-1,1] range of the network's values
//   weights : signed Q3.12 in 16 bits (fits the 18-bit DSP multiplier port)
//   sums    : signed, 24 fractional bits, 36 bits wide
//   azimuth : unsigned, 2^12 steps per full turn
// The tanh table is computed at elaboration from $tanh: 2048 entries covering the
// activation input range [-4,4) in steps of 1/256, saturating outside it.
package nnt_pkg;

  // ---------------------------------------------------------------- network sizes
  localparam int unsigned N_SL      = 9;   // super layers SL0..SL8
  localparam int unsigned N_IN      = 27;  // 3 inputs per super layer
  localparam int unsigned N_HID     = 81;  // hidden neurons
  localparam int unsigned N_OUT     = 2;   // output neurons
  localparam int unsigned N_NETS    = 5;   // full network + one per missing stereo SL
  localparam int unsigned N_STEREO  = 4;   // SL1, SL3, SL5, SL7

  // Macro-neuron V2 schedule: 9 MACs per macro neuron, 3 cycles per neuron,
  // 3 neurons (slots) per macro neuron.
  localparam int unsigned MACS      = 9;
  localparam int unsigned CYC       = 3;   // cycles per neuron (MAC-Ops 1/3..3/3 each 3 cycles)
  localparam int unsigned SLOTS     = 3;   // neurons per macro neuron
  localparam int unsigned N_MACRO   = N_HID / SLOTS;  // 27 hidden macro neurons

  // ---------------------------------------------------------------- number formats
  localparam int unsigned DATA_W    = 13;  // Q1.12
  localparam int unsigned DATA_FRAC = 12;
  localparam int unsigned W_W       = 16;  // Q3.12
  localparam int unsigned W_FRAC    = 12;
  localparam int unsigned ACC_W     = 36;  // 24 fractional bits
  localparam int unsigned ACT_ADDR_W = 11; // tanh table address, 8 fractional bits

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [W_W-1:0]    weight_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  localparam data_t DATA_MAX = data_t'((1 << DATA_FRAC) - 1);   // +4095/4096
  localparam data_t DATA_MIN = data_t'(-((1 << DATA_FRAC) - 1)); // -4095/4096

  // ---------------------------------------------------------------- detector data
  localparam int unsigned PHI_W     = 12;  // azimuth, 4096 steps per turn
  localparam int unsigned OMEGA_W   = 10;  // signed track curvature
  localparam int unsigned TS_ID_W   = 9;   // track segment id within a super layer
  localparam int unsigned TIME_W    = 9;   // priority / event time, in trigger clock ticks
  localparam int unsigned NET_W     = 3;   // network index 0..4

  typedef logic [PHI_W-1:0]           phi_t;
  typedef logic signed [OMEGA_W-1:0]  omega_t;
  typedef logic [TS_ID_W-1:0]         ts_id_t;
  typedef logic [TIME_W-1:0]          tick_t;
  typedef logic signed [PHI_W-1:0]    sphi_t;   // signed azimuth difference
  typedef logic signed [TS_ID_W:0]    dts_t;    // signed id difference
  typedef logic [NET_W-1:0]           net_t;

  // 2D track from the 2D finder
  typedef struct packed {
    phi_t   phi0;
    omega_t omega;
  } track2d_t;

  // one track segment of one super layer
  typedef struct packed {
    logic   valid;
    ts_id_t id;
    tick_t  t;
  } ts_t;

  // Track segments per super layer (Belle II CDC values, not given in the paper).
  localparam int unsigned NTS [N_SL] = '{160, 160, 192, 224, 256, 288, 320, 352, 384};
  // Radius of each super layer in mm, evenly spaced over the chamber (assumed).
  localparam int unsigned RADIUS_MM [N_SL] = '{198, 311, 424, 537, 650, 763, 876, 989, 1102};

  function automatic logic is_stereo(int unsigned sl);
    return (sl % 2) == 1;
  endfunction

  // ---------------------------------------------------------------- activation table
  function automatic data_t tanh_entry(int k);
    real x;
    int  v;
    x = real'(k) / 256.0;
    v = int'($floor($tanh(x) * 4096.0 + 0.5));
    if (v > 4095)  v = 4095;
    if (v < -4095) v = -4095;
    return data_t'(v);
  endfunction

  function automatic data_t [2**ACT_ADDR_W-1:0] make_tanh_table();
    data_t [2**ACT_ADDR_W-1:0] t;
    for (int i = 0; i < 2**ACT_ADDR_W; i++)
      t[i] = tanh_entry(i - 2**(ACT_ADDR_W-1));
    return t;
  endfunction

  // indexed by (signed address + 1024)
  localparam data_t [2**ACT_ADDR_W-1:0] TANH_TABLE = make_tanh_table();

  // ---------------------------------------------------------------- weight loading
  // One write of the configuration port. Hidden layer: neuron 0..80, index 0..26 is
  // the weight of input index, 27 is the bias. Output layer: neuron 0..1, index
  // 0..80 is the weight of hidden neuron index, 81 is the bias.
  typedef struct packed {
    logic          layer;   // 0 = hidden, 1 = output
    net_t          net;
    logic [6:0]    neuron;
    logic [6:0]    index;
    weight_t       value;
  } wr_cmd_t;

  // Heterogeneous mapping: MAC number i of the whole network runs on LUT fabric when
  // floor((i+1)*pct/100) > floor(i*pct/100), spreading pct % of the MACs evenly.
  function automatic logic mac_on_lut(int unsigned i, int unsigned pct);
    return ((i + 1) * pct) / 100 > (i * pct) / 100;
  endfunction

endpackage
