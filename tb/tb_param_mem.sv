// tb_param_mem: every parameter region is filled with random words through
// the write port, then read back through rdata and through the dedicated
// read ports (slot configuration A/B, weight, threshold, leaf label, FIR
// coefficient bank and decoded configuration), with the stored widths
// masked. The configuration registers must read zero after reset.
// 12-bit weights follow the paper; the address map checked is this design's
// own.
module tb_param_mem;
  import nt_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [15:0] addr = 0, wdata = 0, rdata;
  logic [3:0] a_node = 0, b_node = 0, leaf = 0;
  logic [5:0] a_slot = 0, b_slot = 0;
  slot_cfg_t a_cfg, b_cfg;
  logic [11:0] b_weight, b_th;
  logic [2:0] leaf_label, band = 0;
  logic [15:0][11:0] bpf_coef, ht_coef;
  cfg_t cfg;
  param_mem dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  logic [11:0] NM [15][64], WM [15][64], TM [15], CM [9][16];
  logic [2:0] LM [16];
  logic [15:0] RM [20];

  task automatic wr(input logic [15:0] a, input logic [15:0] d);
    @(negedge clk); wr_en = 1; addr = a; wdata = d;
    @(negedge clk); wr_en = 0;
  endtask
  task automatic rd(input logic [15:0] a, input logic [15:0] exp, input string what);
    @(negedge clk); addr = a; #1;
    chk(rdata == exp, $sformatf("%s @%h read %h exp %h", what, a, rdata, exp));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1;
    for (int r = 0; r < 20; r++) begin
      addr = 16'h2000 + 16'(r); #1;
      chk(rdata == 0, "configuration reset value");
    end
    rst_n = 1;
    for (int n = 0; n < 15; n++) for (int s = 0; s < 64; s++) begin
      logic [15:0] d;
      d = 16'($urandom); NM[n][s] = d[11:0]; wr(16'(n * 64 + s), d);
      d = 16'($urandom); WM[n][s] = d[11:0]; wr(16'h0400 + 16'(n * 64 + s), d);
    end
    for (int n = 0; n < 15; n++) begin TM[n] = 12'($urandom); wr(16'h0800 + 16'(n), {4'hF, TM[n]}); end
    for (int l = 0; l < 16; l++) begin LM[l] = 3'($urandom); wr(16'h0C00 + 16'(l), {13'h1FFF, LM[l]}); end
    for (int b = 0; b < 9; b++) for (int k = 0; k < 16; k++) begin
      CM[b][k] = 12'($urandom); wr(16'h1000 + 16'(b * 16 + k), {4'hA, CM[b][k]});
    end
    for (int r = 0; r < 20; r++) begin RM[r] = 16'($urandom); wr(16'h2000 + 16'(r), RM[r]); end
    wr(16'h3000, 16'hFFFF);  // unmapped region: ignored
    for (int n = 0; n < 15; n++) for (int s = 0; s < 64; s++) begin
      rd(16'(n * 64 + s), {4'h0, NM[n][s]}, "node");
      rd(16'h0400 + 16'(n * 64 + s), {4'h0, WM[n][s]}, "weight");
      a_node = 4'(n); a_slot = 6'(s); b_node = 4'(14 - n); b_slot = 6'(63 - s); #1;
      chk(a_cfg == slot_cfg_t'(NM[n][s]), "port A configuration");
      chk(b_cfg == slot_cfg_t'(NM[14-n][63-s]) && b_weight == WM[14-n][63-s] && b_th == TM[14-n],
          "port B configuration, weight and threshold");
    end
    for (int n = 0; n < 15; n++) rd(16'h0800 + 16'(n), {4'h0, TM[n]}, "threshold");
    for (int l = 0; l < 16; l++) begin
      rd(16'h0C00 + 16'(l), {13'h0, LM[l]}, "label");
      leaf = 4'(l); #1; chk(leaf_label == LM[l], "leaf label port");
    end
    for (int b = 0; b < 9; b++) for (int k = 0; k < 16; k++) rd(16'h1000 + 16'(b * 16 + k), {4'h0, CM[b][k]}, "coef");
    for (int b = 0; b < 8; b++) begin
      band = 3'(b); #1;
      for (int k = 0; k < 16; k++) chk(bpf_coef[k] == CM[b][k] && ht_coef[k] == CM[8][k], "coefficient ports");
    end
    for (int r = 0; r < 20; r++) rd(16'h2000 + 16'(r), RM[r], "config");
    rd(16'h3000, 16'h0, "unmapped");
    chk(cfg.run == RM[0][0] && cfg.infer == RM[0][1] && cfg.chop_en == RM[0][2] && cfg.stim_en == RM[0][3], "mode bits");
    chk(cfg.win_len == RM[1][11:0] && cfg.dsl_shift == RM[2][3:0] && cfg.feat_shift == RM[3][4:0]
        && cfg.th_shift == RM[4][4:0], "window and shifts");
    chk(cfg.plv_band == RM[5][2:0] && cfg.pac_ph_band == RM[5][5:3] && cfg.pac_amp_band == RM[5][8:6]
        && cfg.hfo1_band == RM[5][11:9] && cfg.hfo2_band == RM[5][14:12], "band selections");
    chk(cfg.stim_class_mask == RM[6][7:0] && cfg.stim_ch_en == RM[7] && cfg.stim_amp == RM[8][7:0]
        && cfg.stim_pw == RM[9][7:0] && cfg.stim_period == {RM[11][0], RM[10]}
        && cfg.stim_cb_t == RM[12][7:0] && cfg.stim_pas_t == RM[13][7:0], "stimulation settings");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
