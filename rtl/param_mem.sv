// param_mem: on-chip parameter memory of the classification processor.
//
// Holds, as register arrays written through one 16-bit port (normally the
// SPI port):
//   NeuralTree memory  per internal node (15) and slot (64): channel index
//                      (8 b) and feature code (4 b); weight (12 b); per node a
//                      threshold (12 b); per leaf (16) a class label (3 b).
//                      15*(64*24+12)+16*3 bits = 2.91 kB.
//   FIR memory         8 bandpass sets of 16 symmetric coefficients and one
//                      Hilbert set, 12 b each: 9*16*12 bits = 0.22 kB.
//   configuration      20 registers of 16 b = 0.04 kB, decoded into cfg_t.
// Address map (addr[15:10] selects the region):
//   0x0000 + node*64 + slot   {code[3:0], ch[7:0]}
//   0x0400 + node*64 + slot   weight
//   0x0800 + node             threshold
//   0x0C00 + leaf             class label
//   0x1000 + set*16 + tap     FIR coefficient (set 8 = Hilbert)
//   0x2000 + reg              configuration register
// Reads are combinational. Two node/slot read ports serve the channel
// sequencer (port A) and the feature path and classifier (port B).
// The paper gives the contents (channel index, feature type, weight,
// threshold, decision LUT, FIR coefficients) and the sizes 2.93 kB, 0.2 kB
// and 0.04 kB; the field widths, address map and register layout are this
// design's.
module param_mem
  import nt_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  logic [15:0]          addr,
  input  logic [15:0]          wdata,
  output logic [15:0]          rdata,
  // read port A
  input  logic [NODE_W-1:0]    a_node,
  input  logic [SLOT_W-1:0]    a_slot,
  output slot_cfg_t            a_cfg,
  // read port B
  input  logic [NODE_W-1:0]    b_node,
  input  logic [SLOT_W-1:0]    b_slot,
  output slot_cfg_t            b_cfg,
  output logic [W_W-1:0]       b_weight,
  output logic [TH_W-1:0]      b_th,
  input  logic [NODE_W-1:0]    leaf,
  output logic [CLASS_W-1:0]   leaf_label,
  // FIR coefficients
  input  logic [2:0]           band,
  output logic [15:0][COEF_W-1:0] bpf_coef,
  output logic [15:0][COEF_W-1:0] ht_coef,
  output cfg_t                 cfg
);
  logic [11:0]        node_mem [N_NODES][N_SLOTS];
  logic [W_W-1:0]     w_mem    [N_NODES][N_SLOTS];
  logic [TH_W-1:0]    th_mem   [N_NODES];
  logic [CLASS_W-1:0] lab_mem  [N_LEAVES];
  logic [COEF_W-1:0]  coef_mem [N_BANDS+1][16];
  logic [15:0]        cfg_reg  [N_CFG];

  logic [5:0] region;
  logic [3:0] a_n, b_n, w_n;
  assign region = addr[15:10];
  assign w_n    = addr[9:6];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < int'(N_CFG); r++) cfg_reg[r] <= '0;
    end else if (wr_en && region == 6'h08 && addr[9:0] < 10'(N_CFG)) begin
      cfg_reg[addr[4:0]] <= wdata;
    end
  end

  // Parameter arrays have no reset: they are loaded before use.
  always_ff @(posedge clk) begin
    if (wr_en) begin
      case (region)
        6'h00: if (w_n < 4'(N_NODES)) node_mem[w_n][addr[5:0]] <= wdata[11:0];
        6'h01: if (w_n < 4'(N_NODES)) w_mem[w_n][addr[5:0]]    <= wdata[W_W-1:0];
        6'h02: if (addr[3:0] < 4'(N_NODES)) th_mem[addr[3:0]]   <= wdata[TH_W-1:0];
        6'h03: lab_mem[addr[3:0]] <= wdata[CLASS_W-1:0];
        6'h04: if (addr[7:4] <= 4'(N_BANDS)) coef_mem[addr[7:4]][addr[3:0]] <= wdata[COEF_W-1:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    a_n = (a_node < 4'(N_NODES)) ? a_node : 4'd0;
    b_n = (b_node < 4'(N_NODES)) ? b_node : 4'd0;
    a_cfg    = slot_cfg_t'(node_mem[a_n][a_slot]);
    b_cfg    = slot_cfg_t'(node_mem[b_n][b_slot]);
    b_weight = w_mem[b_n][b_slot];
    b_th     = th_mem[b_n];
    leaf_label = lab_mem[leaf];
    for (int k = 0; k < 16; k++) begin
      bpf_coef[k] = coef_mem[band][k];
      ht_coef[k]  = coef_mem[N_BANDS][k];
    end
    case (region)
      6'h00:   rdata = (w_n < 4'(N_NODES)) ? {4'h0, node_mem[w_n][addr[5:0]]} : '0;
      6'h01:   rdata = (w_n < 4'(N_NODES)) ? 16'(w_mem[w_n][addr[5:0]]) : '0;
      6'h02:   rdata = (addr[3:0] < 4'(N_NODES)) ? 16'(th_mem[addr[3:0]]) : '0;
      6'h03:   rdata = 16'(lab_mem[addr[3:0]]);
      6'h04:   rdata = (addr[7:4] <= 4'(N_BANDS)) ? 16'(coef_mem[addr[7:4]][addr[3:0]]) : '0;
      6'h08:   rdata = (addr[9:0] < 10'(N_CFG)) ? cfg_reg[addr[4:0]] : '0;
      default: rdata = '0;
    endcase
    cfg.run             = cfg_reg[0][0];
    cfg.infer           = cfg_reg[0][1];
    cfg.chop_en         = cfg_reg[0][2];
    cfg.stim_en         = cfg_reg[0][3];
    cfg.win_len         = cfg_reg[1][11:0];
    cfg.dsl_shift       = cfg_reg[2][3:0];
    cfg.feat_shift      = cfg_reg[3][4:0];
    cfg.th_shift        = cfg_reg[4][4:0];
    cfg.plv_band        = cfg_reg[5][2:0];
    cfg.pac_ph_band     = cfg_reg[5][5:3];
    cfg.pac_amp_band    = cfg_reg[5][8:6];
    cfg.hfo1_band       = cfg_reg[5][11:9];
    cfg.hfo2_band       = cfg_reg[5][14:12];
    cfg.stim_class_mask = cfg_reg[6][7:0];
    cfg.stim_ch_en      = cfg_reg[7];
    cfg.stim_amp        = cfg_reg[8][7:0];
    cfg.stim_pw         = cfg_reg[9][7:0];
    cfg.stim_period     = {cfg_reg[11][0], cfg_reg[10]};
    cfg.stim_cb_t       = cfg_reg[12][7:0];
    cfg.stim_pas_t      = cfg_reg[13][7:0];
  end
endmodule
