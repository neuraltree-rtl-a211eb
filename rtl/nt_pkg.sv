// nt_pkg: sizes, feature codes and configuration record shared by the
// NeuralTree SoC digital core.
//
// The whole core runs from one 6.4 MHz clock (the delta-sigma rate of the
// DC servo loop). The 128 kHz sample rate and the 640 kHz stimulator clock
// are clock enables derived from it. This single-clock arrangement is a
// choice of this design; the chip uses separate clocks.
//
// Feature codes (4 bits, one per TDM slot): the code packs feature type and
// frequency band so that one slot entry is {channel 8b, code 4b, weight 12b}.
// Pair features (HFO ratio, PAC, PLV) use two consecutive slots 2k and 2k+1;
// the result appears in the odd slot and the even slot contributes zero.
package nt_pkg;

  localparam int unsigned N_CH       = 256;  // recording channels
  localparam int unsigned N_SLOTS    = 64;   // TDM slots per AFE module / features per node
  localparam int unsigned SLOT_W     = 6;
  localparam int unsigned CH_W       = 8;
  localparam int unsigned ADC_W      = 10;   // SAR ADC resolution
  localparam int unsigned EDO_W      = 9;    // coarse DSL / CDAC resolution
  localparam int unsigned DSL_INT_W  = 19;   // fine DSL integrator width
  localparam int unsigned TICKS      = 50;   // 6.4 MHz ticks per 128 kHz sample slot (OSR)
  localparam int unsigned COEF_W     = 12;   // FIR coefficient width
  localparam int unsigned N_BANDS    = 8;    // bandpass coefficient sets
  localparam int unsigned N_TAPS_SYM = 16;   // multipliers (symmetric halves)
  localparam int unsigned DATA_W     = 16;   // filtered sample width
  localparam int unsigned FEAT_W     = 16;   // feature width into the classifier
  localparam int unsigned W_W        = 12;   // classifier weight width
  localparam int unsigned TH_W       = 12;   // classifier threshold width
  localparam int unsigned N_NODES    = 15;   // internal nodes (depth-4 tree)
  localparam int unsigned N_LEAVES   = 16;
  localparam int unsigned NODE_W     = 4;
  localparam int unsigned CLASS_W    = 3;    // up to 8 classes
  localparam int unsigned N_CFG      = 20;   // 16-bit configuration registers (0.04 kB)
  localparam int unsigned N_STIM     = 16;   // stimulation channels

  typedef enum logic [3:0] {
    F_LL   = 4'd0,
    F_ACT  = 4'd1,
    F_LMP  = 4'd2,
    F_MOB  = 4'd3,
    F_COM  = 4'd4,
    F_HFOR = 4'd5,
    F_PAC  = 4'd6,
    F_PLV  = 4'd7,
    F_SE0  = 4'd8    // 8..15: spectral energy in band (code - 8)
  } feat_e;

  // Input path of a slot into the FEE.
  typedef enum logic [1:0] {
    SRC_ADC = 2'd0,   // temporal features, FIR bypassed
    SRC_BPF = 2'd1,   // spectral features
    SRC_HT  = 2'd2    // phase features (analytic signal)
  } src_e;

  typedef struct packed {
    logic [CH_W-1:0] ch;
    feat_e           code;
  } slot_cfg_t;

  // Decoded configuration registers.
  typedef struct packed {
    logic        run;            // reg0[0]
    logic        infer;          // reg0[1]  0 = training mode, 1 = inference mode
    logic        chop_en;        // reg0[2]
    logic        stim_en;        // reg0[3]
    logic [11:0] win_len;        // reg1: rounds (samples per channel) per window
    logic [3:0]  dsl_shift;      // reg2: integrator right shift (high-pass pole)
    logic [4:0]  feat_shift;     // reg3: accumulator to feature scaling
    logic [4:0]  th_shift;       // reg4: threshold left shift
    logic [2:0]  plv_band;       // reg5[2:0]
    logic [2:0]  pac_ph_band;    // reg5[5:3]
    logic [2:0]  pac_amp_band;   // reg5[8:6]
    logic [2:0]  hfo1_band;      // reg5[11:9]
    logic [2:0]  hfo2_band;      // reg5[14:12]
    logic [7:0]  stim_class_mask;// reg6[7:0]  classes that trigger stimulation
    logic [15:0] stim_ch_en;     // reg7
    logic [7:0]  stim_amp;       // reg8[7:0]   current DAC code
    logic [7:0]  stim_pw;        // reg9[7:0]   phase width, 640 kHz ticks
    logic [16:0] stim_period;    // reg10 + reg11[0], 640 kHz ticks
    logic [7:0]  stim_cb_t;      // reg12[7:0]  active charge-balance time
    logic [7:0]  stim_pas_t;     // reg13[7:0]  passive discharge time
  } cfg_t;

  function automatic logic [2:0] band_of(feat_e code, logic odd, cfg_t c);
    case (code)
      F_HFOR:  return odd ? c.hfo2_band : c.hfo1_band;
      F_PAC:   return odd ? c.pac_amp_band : c.pac_ph_band;
      F_PLV:   return c.plv_band;
      default: return code[2:0];
    endcase
  endfunction

  function automatic src_e src_of(feat_e code);
    if (code[3] || code == F_HFOR) return SRC_BPF;
    if (code == F_PAC || code == F_PLV) return SRC_HT;
    return SRC_ADC;
  endfunction

endpackage
