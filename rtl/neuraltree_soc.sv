// neuraltree_soc: digital core of the 256-channel closed-loop neural
// interface: AFE sequencing and DC servo loops, TDM filter and feature
// extraction, NeuralTree classifier and stimulator control.
//
// Data flow (inference): system_ctrl walks 64 TDM slots (128 kHz) per round;
// for each slot it takes the channel index of the current tree node from the
// parameter memory and drives the switch-matrix / MUX-CHOP controls so that
// electrode channel reaches AFE module 1. dsl_ctrl of module 1 cancels the
// electrode offset (binary search in the first round of every window,
// delta-sigma fine loop afterwards). The ADC words go through the FEE
// (FIR + extractors) which emits one feature per slot in the last round of
// the window; the NeuralTree MACs them with the node's weights and, at the
// window end, moves to a child node or, at a leaf, outputs a class. A class
// inside stim_class_mask triggers the stimulator until the next decision.
// In training mode all four AFE modules run over their own 64 channels and
// their ADC words leave through train_data for off-chip training.
// Clock: one 6.4 MHz clock; 128 kHz sampling and 640 kHz stimulator timing
// are enables. Analog parts (switches, LNA, Gm-C, SAR ADC, CDAC, comparator,
// charge pump, H-bridge) are outside; their digital controls and data are
// the ports below. Configuration and parameters load through SPI.
// train_data carries the four ADC words straight through (the receiver takes
// them on train_valid) and stim_amp is the configured amplitude code; these
// are the only outputs that come directly from inputs or registers.
// From the paper: the partition into AFE/DSL, FEE, NeuralTree and
// stimulator, the 256-channel matrix with four 64-channel modules, training
// and inference modes, and closed-loop stimulation on detection. This
// design's own: the SPI port, the single clock with enables, module 0 as the
// inference module, and the class-mask rule that triggers stimulation.
module neuraltree_soc
  import nt_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // SPI configuration port
  input  logic              spi_sclk,
  input  logic              spi_cs_n,
  input  logic              spi_mosi,
  output logic              spi_miso,
  // switch matrix and MUX-CHOP controls
  output logic [15:0]       col_sel,
  output logic [3:0][3:0]   phi1_train,
  output logic [3:0][3:0]   phi2_train,
  output logic [3:0][3:0]   phi1_infer,
  output logic [3:0][3:0]   phi2_infer,
  output logic              phi1_ref,
  output logic              phi2_ref,
  // AFE module timing and data
  output logic [3:0]        afe_en,
  output logic              phi_rst,
  output logic              phi_clr,
  output logic              phi_smp,
  output logic              fchop,
  output logic              phi_comp,
  input  logic [3:0]        comp_in,
  input  logic [3:0][9:0]   adc_data,
  output logic [3:0][8:0]   cdac_code,
  output logic [3:0][62:0]  cdac_unary,
  output logic [3:0][2:0]   cdac_bin,
  // training-mode read-out
  output logic              train_valid,
  output logic [5:0]        train_slot,
  output logic [3:0][9:0]   train_data,
  // classification
  output logic              class_valid,
  output logic [2:0]        class_label,
  // stimulator
  input  logic [15:0]       res_hi,
  input  logic [15:0]       res_lo,
  output logic [15:0]       stim_pos_h,
  output logic [15:0]       stim_neg_h,
  output logic [15:0]       stim_pos2,
  output logic [15:0]       stim_neg2,
  output logic [15:0]       stim_pas,
  output logic [15:0]       stim_en_cbp,
  output logic [15:0]       stim_en_cbn,
  output logic              stim_cb1,
  output logic [3:0]        stim_cp_en,
  output logic [7:0]        stim_amp
);
  // ---------------- configuration ----------------
  logic        bus_wr;
  logic [15:0] bus_addr, bus_wdata, bus_rdata;
  cfg_t        cfg;

  spi_slave u_spi (
    .clk, .rst_n, .sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi), .miso(spi_miso),
    .wr_en(bus_wr), .addr(bus_addr), .wdata(bus_wdata), .rdata(bus_rdata));

  logic [3:0]       node, leaf;
  logic [5:0]       slot, fee_slot_o;
  slot_cfg_t        a_cfg, b_cfg;
  logic [11:0]      b_weight, b_th;
  logic [2:0]       leaf_label, band;
  logic [15:0][11:0] bpf_coef, ht_coef;

  // port B follows the FEE input slot; the weight is read again for the
  // feature slot (same node during a window) through the same port.
  logic [5:0] b_slot;
  logic       fee_fv;
  logic       fee_v;

  param_mem u_mem (
    .clk, .rst_n, .wr_en(bus_wr), .addr(bus_addr), .wdata(bus_wdata), .rdata(bus_rdata),
    .a_node(node), .a_slot(slot), .a_cfg,
    .b_node(node), .b_slot, .b_cfg, .b_weight, .b_th,
    .leaf, .leaf_label, .band, .bpf_coef, .ht_coef, .cfg);

  // ---------------- timing and sequencing ----------------
  logic [5:0]  tick;
  logic        slot_start, ce_smp, coarse;
  logic [11:0] round;
  logic [3:0]  addr_row, addr_col;
  logic        fee_first, fee_last, win_done;

  afe_timing u_tim (
    .clk, .rst_n, .en(cfg.run), .chop_en(cfg.chop_en), .tick, .slot_start, .ce_smp,
    .phi_rst, .phi_clr, .phi_smp, .fchop, .phi_comp);

  system_ctrl u_sys (
    .clk, .rst_n, .cfg, .ce_smp, .slot, .round, .coarse, .slot_cfg(a_cfg),
    .addr_row, .addr_col, .afe_en, .fee_valid(fee_v), .fee_first, .fee_last,
    .win_done, .train_valid);

  mux_chop_ctrl u_mux (
    .clk, .rst_n, .infer(cfg.infer), .chop_en(cfg.chop_en), .fchop,
    .addr_row, .addr_col, .col_sel, .phi1_train, .phi2_train, .phi1_infer, .phi2_infer,
    .phi1_ref, .phi2_ref);

  // ---------------- DC servo loops, one per AFE module ----------------
  for (genvar m = 0; m < 4; m++) begin : g_dsl
    logic       edo_wr_unused;
    logic [8:0] edo_unused;
    dsl_ctrl u_dsl (
      .clk, .rst_n, .en(afe_en[m]), .coarse, .slot, .slot_start, .phi_comp, .ce_smp,
      .comp_in(comp_in[m]), .adc_data(adc_data[m]), .dsl_shift(cfg.dsl_shift),
      .dac_code(cdac_code[m]), .cdac_unary(cdac_unary[m]), .cdac_bin(cdac_bin[m]),
      .edo_wr(edo_wr_unused), .edo_code(edo_unused));
  end

  assign train_slot = slot;
  assign train_data = adc_data;

  // ---------------- feature extraction and classification ----------------
  logic signed [15:0] feat;
  assign b_slot = fee_fv ? fee_slot_o : slot;

  fee u_fee (
    .clk, .rst_n, .s_valid(fee_v), .s_first(fee_first), .s_last(fee_last), .s_slot(slot),
    .s_code(a_cfg.code), .s_adc(adc_data[0]), .cfg, .band, .bpf_coef, .ht_coef,
    .feat_valid(fee_fv), .feat_slot(fee_slot_o), .feat);

  logic went_left;
  logic [6:0] mac_count;
  neuraltree u_nt (
    .clk, .rst_n, .en(cfg.run && cfg.infer), .feat_valid(fee_fv), .feat,
    .weight(b_weight), .th(b_th), .th_shift(cfg.th_shift), .win_done,
    .node, .leaf, .leaf_label, .class_valid, .class_label, .went_left, .mac_count);

  // ---------------- stimulation ----------------
  logic have_class, stim_trig, pulse_start;
  logic [2:0] last_class;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_class <= 1'b0; last_class <= '0;
    end else if (!(cfg.run && cfg.infer)) begin
      have_class <= 1'b0;
    end else if (class_valid) begin
      have_class <= 1'b1; last_class <= class_label;
    end
  end
  assign stim_trig = have_class && cfg.stim_class_mask[last_class];

  stim_ctrl u_stim (
    .clk, .rst_n, .enable(cfg.stim_en), .trigger(stim_trig), .ch_en(cfg.stim_ch_en),
    .amp_in(cfg.stim_amp), .pw(cfg.stim_pw), .period(cfg.stim_period), .cb_t(cfg.stim_cb_t),
    .pas_t(cfg.stim_pas_t), .res_hi, .res_lo,
    .pos_h(stim_pos_h), .neg_h(stim_neg_h), .pos2(stim_pos2), .neg2(stim_neg2),
    .pas(stim_pas), .en_cbp(stim_en_cbp), .en_cbn(stim_en_cbn), .cb1(stim_cb1),
    .cp_en(stim_cp_en), .amp(stim_amp), .pulse_start);
endmodule
