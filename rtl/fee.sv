// fee: the TDM feature-extraction engine with its front filter.
//
// Samples of the main AFE module arrive one per 128 kHz slot (s_valid) with
// the slot's feature code. The code picks the path (package functions
// src_of/band_of):
//   temporal codes (LL, ACT, LMP, MOB, COM)  ADC word, FIR bypassed
//   SE and HFO ratio                         bandpass output
//   PAC and PLV                              bandpass then Hilbert (re/im)
// and the FIR band: SE uses band code[2:0]; HFO ratio, PAC and PLV take their
// bands from configuration registers (even/odd slot of a pair). The band
// selects the coefficient set in the parameter memory through `band`.
// All paths are aligned to the FIR latency of two clocks; the feature MUX
// then forwards the result of the temporal/spectral or the phase extractor
// (feat_valid three clocks after the slot's last sample). Extractors that a
// slot does not use receive no valid strobe (data gating).
// From the paper: the FIR bypass for temporal features, BPF for spectral and
// HT for phase features, the three extractors and the feature MUX (Fig. 9).
// The code-to-path table is this design's.
module fee
  import nt_pkg::*;
#(
  parameter int unsigned N_SLOTS = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       s_valid,
  input  logic                       s_first,
  input  logic                       s_last,
  input  logic [$clog2(N_SLOTS)-1:0] s_slot,
  input  feat_e                      s_code,
  input  logic [ADC_W-1:0]           s_adc,      // offset binary
  input  cfg_t                       cfg,
  output logic [2:0]                 band,
  input  logic [15:0][COEF_W-1:0]    bpf_coef,
  input  logic [15:0][COEF_W-1:0]    ht_coef,
  output logic                       feat_valid,
  output logic [$clog2(N_SLOTS)-1:0] feat_slot,
  output logic signed [FEAT_W-1:0]   feat
);
  localparam int unsigned SW = $clog2(N_SLOTS);

  src_e src;
  logic signed [ADC_W-1:0] adc_s;
  always_comb begin
    src   = src_of(s_code);
    band  = band_of(s_code, s_slot[0], cfg);
    adc_s = $signed(s_adc ^ (ADC_W'(1) << (ADC_W - 1)));
  end

  // FIR
  logic fir_valid;
  logic [SW-1:0] fir_slot;
  logic signed [DATA_W-1:0] bpf_out, re_out, im_out;
  tdm_fir #(.N_SLOTS(N_SLOTS), .IN_W(ADC_W), .DATA_W(DATA_W), .COEF_W(COEF_W)) u_fir (
    .clk, .rst_n,
    .ce_in(s_valid && src != SRC_ADC), .first(s_first), .slot(s_slot), .din(adc_s),
    .ht_en(src == SRC_HT), .bpf_coef, .ht_coef,
    .out_valid(fir_valid), .out_slot(fir_slot), .bpf_out, .re_out, .im_out);

  // two-clock alignment of the sample side-information
  logic [1:0] v_d, f_d, l_d;
  logic [SW-1:0] slot_d [2];
  feat_e code_d [2];
  src_e  src_d  [2];
  logic signed [ADC_W-1:0] adc_d [2];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_d <= '0; f_d <= '0; l_d <= '0;
      for (int i = 0; i < 2; i++) begin
        slot_d[i] <= '0; code_d[i] <= F_LL; src_d[i] <= SRC_ADC; adc_d[i] <= '0;
      end
    end else begin
      v_d <= {v_d[0], s_valid};
      f_d <= {f_d[0], s_first};
      l_d <= {l_d[0], s_last};
      slot_d[0] <= s_slot; slot_d[1] <= slot_d[0];
      code_d[0] <= s_code; code_d[1] <= code_d[0];
      src_d[0]  <= src;    src_d[1]  <= src_d[0];
      adc_d[0]  <= adc_s;  adc_d[1]  <= adc_d[0];
    end
  end

  logic ts_valid, ph_valid;
  logic signed [DATA_W-1:0] ts_x;
  always_comb begin
    ts_valid = v_d[1] && src_d[1] != SRC_HT;
    ph_valid = v_d[1] && src_d[1] == SRC_HT;
    ts_x     = (src_d[1] == SRC_ADC) ? DATA_W'(adc_d[1]) : bpf_out;
  end

  logic ts_fv, ph_fv;
  logic [SW-1:0] ts_fs, ph_fs;
  logic signed [FEAT_W-1:0] ts_f, ph_f;
  logic [9:0] theta_unused;

  temporal_spectral_fe #(.N_SLOTS(N_SLOTS), .DATA_W(DATA_W), .FEAT_W(FEAT_W)) u_ts (
    .clk, .rst_n, .valid(ts_valid), .first(f_d[1]), .last(l_d[1]), .slot(slot_d[1]),
    .code(code_d[1]), .x(ts_x), .feat_shift(cfg.feat_shift),
    .feat_valid(ts_fv), .feat_slot(ts_fs), .feat(ts_f));

  phase_fe #(.N_SLOTS(N_SLOTS), .DATA_W(DATA_W), .FEAT_W(FEAT_W)) u_ph (
    .clk, .rst_n, .valid(ph_valid), .first(f_d[1]), .last(l_d[1]), .slot(slot_d[1]),
    .code(code_d[1]), .re(re_out), .im(im_out), .feat_shift(cfg.feat_shift),
    .feat_valid(ph_fv), .feat_slot(ph_fs), .feat(ph_f), .theta_dbg(theta_unused));

  // feature MUX
  always_comb begin
    feat_valid = ts_fv || ph_fv;
    feat_slot  = ph_fv ? ph_fs : ts_fs;
    feat       = ph_fv ? ph_f  : ts_f;
  end

  // fir_valid/fir_slot duplicate the aligned strobes; they must agree.
  always @(posedge clk) if (rst_n && fir_valid) assert (fir_slot == slot_d[1]);
endmodule
