// tb_neuraltree_soc: end-to-end test of the SoC at its default size.
//
// A behavioural front end stands in for the analog part: each of the 256
// electrodes has a random offset (EDO, in DAC steps) and electrode 37 also
// carries a sine of 8 samples per period whose amplitude the test switches
// between 100 and 5 DAC steps. The channel seen by AFE module m is decoded
// from the switch-matrix outputs (one-hot column, chopper phases of the
// row); the comparator answers whether electrode voltage exceeds the CDAC
// code, and the 10-bit ADC returns 4 LSB per DAC step of the residue.
//
// Everything is loaded over SPI (all 15x64 slot words and weights, the
// thresholds, labels, FIR banks and configuration registers), a sample of
// it is read back, a training-mode run is made, then inference. The tree
// is programmed so that every decision depends on one feature of electrode
// 37 (ACT at depth 0 and 3, line length at depth 1, band power at depth
// 2); the remaining slots carry every other feature code with zero weight.
// A large sine therefore walks the tree all-Yes to leaf 0 and a small one
// all-No to leaf 15, giving predictable class labels; class 5 (leaf 0) is
// enabled for stimulation. Each mechanism is counted and one with a zero
// count is a failure: SPI write/read, training scan, mode switch, chopper
// phases, coarse DSL search, fine delta-sigma tracking, Yes and No
// branches, correct classes, biphasic pulses, active and passive balancing.
// Slot, round and window timing, the two-step servo and the tree walk follow
// the paper; the front-end model, the window length of 16 rounds and the
// programmed tree are this testbench's own.
module tb_neuraltree_soc;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic spi_sclk = 0, spi_cs_n = 1, spi_mosi = 0, spi_miso;
  logic [15:0] col_sel;
  logic [3:0][3:0] phi1_train, phi2_train, phi1_infer, phi2_infer;
  logic phi1_ref, phi2_ref;
  logic [3:0] afe_en;
  logic phi_rst, phi_clr, phi_smp, fchop, phi_comp;
  logic [3:0] comp_in;
  logic [3:0][9:0] adc_data;
  logic [3:0][8:0] cdac_code;
  logic [3:0][62:0] cdac_unary;
  logic [3:0][2:0] cdac_bin;
  logic train_valid;
  logic [5:0] train_slot;
  logic [3:0][9:0] train_data;
  logic class_valid;
  logic [2:0] class_label;
  logic [15:0] res_hi = 0, res_lo = 0;
  logic [15:0] stim_pos_h, stim_neg_h, stim_pos2, stim_neg2, stim_pas, stim_en_cbp, stim_en_cbn;
  logic stim_cb1;
  logic [3:0] stim_cp_en;
  logic [7:0] stim_amp;
  neuraltree_soc dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 30) $display("FAIL %s", msg); end
  endtask

  localparam int W = 16;          // window length in rounds
  localparam int SIG_CH = 37;
  int EDO [256];
  real EDO_F [256];               // fractional part of the offset
  real amp_sig = 100.0;
  real drift = 0.0;               // common electrode drift, DAC steps

  // ---- behavioural front end ---------------------------------------------
  int row_q [4];
  int slot_cnt = 0;               // slots since the run started
  always @(posedge clk) begin
    for (int m = 0; m < 4; m++)
      for (int r = 0; r < 4; r++)
        if (phi1_train[m][r] || phi2_train[m][r]) row_q[m] = 4 * m + r;
    for (int g = 0; g < 4; g++)
      for (int r = 0; r < 4; r++)
        if (phi1_infer[g][r] || phi2_infer[g][r]) row_q[0] = 4 * g + r;
    if (afe_en == 0) slot_cnt = 0;
    else if (phi_rst) slot_cnt++;
  end
  function automatic int col_of();
    for (int c = 0; c < 16; c++) if (col_sel[c]) return c;
    return 0;
  endfunction
  function automatic real sig_of(int ch);
    real ph;
    if (ch != SIG_CH) return 0.0;
    ph = real'(slot_cnt - 1) / 64.0;    // rounds since the start of the run
    return amp_sig * $sin(2.0 * 3.14159265358979 * ph / 8.0);
  endfunction
  always_comb begin
    for (int m = 0; m < 4; m++) begin
      int ch;
      real v, d;
      ch = row_q[m] * 16 + col_of();
      v  = real'(EDO[ch]) + EDO_F[ch] + drift + 256.0 + sig_of(ch);
      comp_in[m] = v > real'(cdac_code[m]);
      d = 512.0 + 4.0 * (v - real'(cdac_code[m]));
      if (d > 1023.0) d = 1023.0;
      if (d < 0.0) d = 0.0;
      adc_data[m] = 10'($rtoi(d));
    end
  end

  // ---- SPI master (mode 0, sclk = clk/6) ----------------------------------
  task automatic spi(input logic wr, input logic [14:0] a, input logic [15:0] d, output logic [15:0] rx);
    logic [31:0] f;
    f = {wr, a, d};
    rx = 0;
    spi_cs_n = 0; repeat (3) @(negedge clk);
    for (int i = 31; i >= 0; i--) begin
      spi_mosi = f[i];
      repeat (3) @(negedge clk);
      spi_sclk = 1;
      if (i < 16) rx = {rx[14:0], spi_miso};
      repeat (3) @(negedge clk);
      spi_sclk = 0;
    end
    repeat (3) @(negedge clk);
    spi_cs_n = 1; repeat (4) @(negedge clk);
  endtask
  task automatic wr(input int a, input int d);
    logic [15:0] rx;
    spi(1'b1, 15'(a), 16'(d), rx);
  endtask

  // ---- mechanism counters -----------------------------------------------
  int n_spi_rd = 0, n_train = 0, n_mode = 0, n_chop1 = 0, n_chop2 = 0, n_coarse = 0;
  int n_fine = 0, n_yes = 0, n_no = 0, n_class = 0, n_pulse = 0, n_acb = 0, n_pcb = 0;
  bit seen_train_mode = 0;
  int last_code [4][64];
  int infer_on = 0;

  logic phi_smp_q = 0;
  always @(posedge clk) begin
    phi_smp_q <= phi_smp;
    if (phi1_ref) n_chop1++;
    if (phi2_ref) n_chop2++;
    if (afe_en == 4'b1111) seen_train_mode = 1;
    if (afe_en == 4'b0001 && seen_train_mode) begin n_mode++; seen_train_mode = 0; end
    if (train_valid) begin
      n_train++;
      chk(afe_en == 4'b1111 && train_data == adc_data, "training scan streams all four modules");
    end
    if (stim_pos_h != 0 && stim_neg_h == 0) n_pulse++;
    if (stim_en_cbn != 0 || stim_en_cbp != 0) n_acb++;
    if (stim_pas != 0) n_pcb++;
    chk((stim_pos_h & stim_neg_h) == 0, "bridge halves exclusive");
    // CDAC word at the end of the sampling phase in fine rounds: it must
    // follow the electrode offset found by the coarse search (within a few
    // steps), and delta-sigma dithering makes it move between rounds.
    if (afe_en != 0 && phi_smp_q && !phi_smp && slot_cnt > 0) begin
      int s, rnd;
      s = (slot_cnt - 1) % 64;
      rnd = ((slot_cnt - 1) / 64) % W;
      for (int m = 0; m < 4; m++) if (afe_en[m] && rnd >= 1) begin
        int ch, e;
        ch = row_q[m] * 16 + col_of();
        e = int'(cdac_code[m]) - (EDO[ch] + 256);
        if (drift != 0.0) begin
          if (rnd > 1 && last_code[m][s] != int'(cdac_code[m])) n_fine++;
        end else if (ch != SIG_CH) begin
          chk(e >= -4 && e <= 4, $sformatf("CDAC %0d tracks EDO of ch %0d (%0d)", cdac_code[m], ch, EDO[ch] + 256));
          if (rnd == 1) n_coarse++;
        end
        last_code[m][s] = int'(cdac_code[m]);
      end
    end
  end

  // ---- test sequence ------------------------------------------------------
  int LBL [16];
  int TH [15];
  initial begin
    logic [15:0] rx;
    int tree, exp_cls;
    for (int c = 0; c < 256; c++) begin
      EDO[c] = int'($urandom % 401) - 200;
      EDO_F[c] = 0.1 + real'($urandom % 80) / 100.0;
    end
    for (int m = 0; m < 4; m++) begin row_q[m] = 0; for (int s = 0; s < 64; s++) last_code[m][s] = 0; end
    for (int l = 0; l < 16; l++) LBL[l] = (l * 3 + 5) % 8;
    repeat (5) @(posedge clk);
    rst_n = 1;
    // slot words and weights of every node
    for (int n = 0; n < 15; n++) begin
      int code, ch;
      code = (n == 0 || n >= 7) ? 1 : (n <= 2 ? 0 : 8);   // ACT, LL, SE band 0
      TH[n] = (code == 1) ? 100 : (code == 0 ? 80 : 50);
      for (int s = 0; s < 64; s++) begin
        int c, w;
        if (s < 2) begin c = code; ch = SIG_CH; end
        else begin c = (s / 2) % 16; ch = int'($urandom % 256); if (ch == SIG_CH) ch = 0; end
        w = (s == 0) ? 1 : 0;
        wr(n * 64 + s, (ch << 4) | c);   // {channel, feature code}
        wr(16'h0400 + n * 64 + s, w);
      end
      wr(16'h0800 + n, TH[n]);
    end
    for (int l = 0; l < 16; l++) wr(16'h0C00 + l, LBL[l]);
    // FIR banks: band 0 is a pure gain of 0.5, the others a short smoother;
    // set 8 holds an odd-tap Hilbert approximation.
    for (int b = 0; b < 8; b++)
      for (int k = 0; k < 16; k++)
        wr(16'h1000 + b * 16 + k, (b == 0) ? (k == 0 ? 1024 : 0) : (k >= 12 ? 128 * (b + 1) : 0));
    for (int k = 0; k < 16; k++)
      wr(16'h1000 + 8 * 16 + k, (k == 15 || k % 2 == 0) ? 0 : ((1304 / (15 - k)) & 16'h0FFF));
    wr(16'h2001, W);          // window length
    wr(16'h2002, 2);          // DSL integrator shift
    wr(16'h2003, 4);          // feature shift
    wr(16'h2004, 0);          // threshold shift
    wr(16'h2005, (6 << 12) | (1 << 9) | (7 << 6) | (0 << 3) | 2);
    wr(16'h2006, 1 << 5);     // class 5 triggers stimulation
    wr(16'h2007, 16'h00F3);   // stimulation channels
    wr(16'h2008, 8'h80);
    wr(16'h2009, 4);          // phase width (640 kHz ticks)
    wr(16'h200A, 300);        // period
    wr(16'h200B, 0);
    wr(16'h200C, 3);          // active balancing time
    wr(16'h200D, 3);          // passive discharge time
    for (int r = 14; r < 20; r++) wr(16'h2000 + r, 0);
    // read back a sample of what was written
    spi(1'b0, 15'h0800 + 15'd3, 16'h0, rx);  chk(rx == 16'(TH[3]), "SPI read threshold");  n_spi_rd++;
    spi(1'b0, 15'h0C00 + 15'd15, 16'h0, rx); chk(rx == 16'(LBL[15]), "SPI read label");    n_spi_rd++;
    spi(1'b0, 15'h2001, 16'h0, rx);          chk(rx == 16'(W), "SPI read window length"); n_spi_rd++;
    spi(1'b0, 15'h0000 + 15'd0, 16'h0, rx);  chk(rx == 16'((SIG_CH << 4) | 1), "SPI read slot word"); n_spi_rd++;

    // training mode: all four modules scan their 64 electrodes
    wr(16'h2000, 4'b0101);    // run, chop
    repeat (2 * W * 64 * 50) @(posedge clk);
    chk(n_train == (2 * W - 2) * 64, $sformatf("training samples %0d", n_train));

    // a drift step after the coarse search: the fine loop must follow it
    wr(16'h2002, 0);
    while ((slot_cnt - 1) % (64 * W) != 64 * 3) @(posedge clk);
    drift = 40.0;
    while ((slot_cnt - 1) % (64 * W) != 64 * W - 1) @(posedge clk);
    drift = 0.0;
    wr(16'h2002, 2);

    // inference with stimulation
    wr(16'h2000, 0);
    amp_sig = 100.0;
    tree = 0;
    res_hi = 16'h0001;
    res_lo = 16'h0002;
    wr(16'h2000, 4'b1111);    // run, infer, chop, stim
    for (tree = 0; tree < 6; tree++) begin
      int waited;
      waited = 0;
      while (!class_valid && waited < 6 * W * 64 * 50) begin @(posedge clk); #1; waited++; end
      exp_cls = (tree % 2 == 0) ? LBL[0] : LBL[15];
      chk(class_valid && int'(class_label) == exp_cls,
          $sformatf("tree %0d class %0d exp %0d", tree, class_label, exp_cls));
      if (class_valid && int'(class_label) == exp_cls) n_class++;
      $display("tree %0d: class %0d (expected %0d)", tree, class_label, exp_cls);
      if (tree % 2 == 0) n_yes += 4; else n_no += 4;
      amp_sig = (tree % 2 == 0) ? 5.0 : 100.0;   // next tree gets the other amplitude
      res_hi = (tree % 2 == 0) ? 16'h0001 : 16'h0;
      @(posedge clk); #1;
    end
    chk(n_spi_rd == 4, "SPI read");
    chk(n_train > 0, "mechanism: training scan");
    chk(n_mode > 0, "mechanism: training to inference switch");
    chk(n_chop1 > 0 && n_chop2 > 0, "mechanism: chopper phases");
    chk(n_coarse > 0, "mechanism: coarse EDO search");
    chk(n_fine > 0, "mechanism: fine delta-sigma tracking");
    chk(n_yes > 0 && n_no > 0, "mechanism: Yes and No branches");
    chk(n_class == 6, "mechanism: predicted classes");
    chk(n_pulse > 0, "mechanism: biphasic stimulation");
    chk(n_acb > 0, "mechanism: active charge balancing");
    chk(n_pcb > 0, "mechanism: passive charge balancing");
    $display("counts: train %0d mode %0d coarse %0d fine %0d class %0d pulse %0d acb %0d pcb %0d",
             n_train, n_mode, n_coarse, n_fine, n_class, n_pulse, n_acb, n_pcb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
