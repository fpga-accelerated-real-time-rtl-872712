// snl_pkg - sizes, number formats and shared types of the BES inference pipeline.
//
// The network sizes (768 inputs = 48 time slices x 16 BES channels, two hidden
// layers of 50 ReLU neurons, up to 4 outputs), the batch of 18 frames, the
// 8-features-per-clock input interface and the 160-channel digitizer stream are
// the published design's numbers. The number formats are this design's choice:
// the published design names no word widths, so activations use signed 16-bit
// fixed point with 8 fraction bits and weights signed 16-bit with 12 fraction
// bits, accumulated in 40 bits. Biases use the weight format.
package snl_pkg;

  // ---- digitizer stream --------------------------------------------------
  localparam int unsigned N_CH_IN   = 160;  // channels per time slice from the digitizer
  localparam int unsigned ADC_W     = 18;   // digitizer sample width
  localparam int unsigned N_BES     = 16;   // BES channels kept per time slice

  // ---- frames and batches ------------------------------------------------
  localparam int unsigned N_SLICES  = 48;   // time slices per frame (48 us at 1 MHz)
  localparam int unsigned N_FRAMES  = 18;   // frames per inference call
  localparam int unsigned N_FEAT    = N_SLICES * N_BES;  // 768 features per frame
  localparam int unsigned IN_PAR    = 8;    // features delivered per clock

  // ---- network -----------------------------------------------------------
  localparam int unsigned N_HID1    = 50;
  localparam int unsigned N_HID2    = 50;
  localparam int unsigned N_OUT     = 4;    // output neurons built; 1..4 active

  // ---- number formats ----------------------------------------------------
  localparam int unsigned DATA_W    = 16;   // activation width
  localparam int unsigned DATA_FRAC = 8;    // activation fraction bits
  localparam int unsigned WGT_W     = 16;   // weight and bias width
  localparam int unsigned WGT_FRAC  = 12;   // weight and bias fraction bits
  localparam int unsigned ACC_W     = 40;   // accumulator width

  typedef logic signed [DATA_W-1:0] act_t;
  typedef logic signed [WGT_W-1:0]  wgt_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // ---- parameter and configuration address map ---------------------------
  // One flat word address. Weights are numbered neuron-major inside a layer
  // (address = base + neuron * fan_in + input), biases follow each layer's
  // weights. Addresses at and above CFG_BASE are configuration registers.
  localparam int unsigned PADDR_W   = 17;
  localparam int unsigned L1_WBASE  = 0;
  localparam int unsigned L1_BBASE  = L1_WBASE + N_HID1 * N_FEAT;   // 38400
  localparam int unsigned L2_WBASE  = L1_BBASE + N_HID1;            // 38450
  localparam int unsigned L2_BBASE  = L2_WBASE + N_HID2 * N_HID1;   // 40950
  localparam int unsigned L3_WBASE  = L2_BBASE + N_HID2;            // 41000
  localparam int unsigned L3_BBASE  = L3_WBASE + N_OUT * N_HID2;    // 41200
  localparam int unsigned N_PARAMS  = L3_BBASE + N_OUT;             // 41204
  localparam int unsigned CFG_BASE  = 65536;
  localparam int unsigned CFG_CHMAP = CFG_BASE;        // +0..+15: BES channel table
  localparam int unsigned CFG_NOUT  = CFG_BASE + 16;   // number of active outputs, 1..4

  // One parameter write as seen by a layer.
  typedef struct packed {
    logic        en;
    logic        is_bias;
    logic [15:0] neuron;
    logic [15:0] input_idx;
    wgt_t        data;
  } layer_wr_t;

  // Multiply-accumulate result to activation: drop the weight fraction bits,
  // optional ReLU, saturate to DATA_W.
  function automatic act_t requant(input acc_t acc, input logic relu);
    acc_t s;
    s = acc >>> WGT_FRAC;
    if (relu && s < 0) s = '0;
    if (s > acc_t'(2**(DATA_W-1) - 1))     return act_t'(2**(DATA_W-1) - 1);
    if (s < -acc_t'(2**(DATA_W-1)))        return act_t'(-(2**(DATA_W-1)));
    return act_t'(s);
  endfunction

endpackage
