// tb_workload_multiclass: six-class decoding with one tree, end to end.
//
// The SoC is run the way a multi-class task such as finger-movement
// decoding uses it: the 16 leaves carry labels 0..5 (leaf l has label
// l mod 6), so a walk to a different leaf gives a different class. The
// behavioural front end is the one of the full-system test: each electrode
// has a random DC offset that the DC servo loop must remove, and four
// electrodes (37, 90, 150, 230) each carry an 8-round sine that is either
// large (100 DAC steps) or small (5). Every node at depth d decides on the
// Hjorth activity of electrode d alone, so the on/off pattern of the four
// sines names one of the 16 leaves: Yes (large sine) goes to child 2n+1,
// No to 2n+2. For each of ten trees a random pattern is drawn, applied for
// the whole tree, and the class returned is compared with the label of the
// leaf the pattern points to. Everything is loaded over SPI; stimulation is
// off. Real ECoG data is not used: the patterns stand for the feature
// vectors a trained tree would route. Six classes in 3-bit leaf labels and
// the top-down walk follow the paper; the signals, the tree and the window
// length of 16 rounds are this testbench's own.
module tb_workload_multiclass;
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
  localparam int E [4] = '{37, 90, 150, 230};   // electrode read at depth d
  bit on [4];                     // tremor-band sine on electrode E[d]
  int EDO [256];
  real EDO_F [256];               // fractional part of the offset
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
    ph = real'(slot_cnt - 1) / 64.0;    // rounds since the start of the run
    for (int d = 0; d < 4; d++)
      if (ch == E[d]) return (on[d] ? 100.0 : 5.0) * $sin(2.0 * 3.14159265358979 * ph / 8.0);
    return 0.0;
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

  // ---- test sequence ------------------------------------------------------
  int LBL [16];
  int n_cls [6];
  initial begin
    int exp_cls, n, distinct;
    for (int c = 0; c < 256; c++) begin
      EDO[c] = int'($urandom % 401) - 200;
      EDO_F[c] = 0.1 + real'($urandom % 80) / 100.0;
    end
    for (int m = 0; m < 4; m++) row_q[m] = 0;
    for (int d = 0; d < 4; d++) on[d] = 1;
    for (int l = 0; l < 16; l++) LBL[l] = l % 6;
    for (int k = 0; k < 6; k++) n_cls[k] = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    for (int nd = 0; nd < 15; nd++) begin
      int d, ch;
      d = (nd == 0) ? 0 : (nd <= 2) ? 1 : (nd <= 6) ? 2 : 3;   // depth of the node
      for (int s = 0; s < 64; s++) begin
        int c;
        if (s < 2) begin c = 1; ch = E[d]; end                  // ACT of E[d]
        else begin
          c = (s / 2) % 16; ch = int'($urandom % 256);
          for (int k = 0; k < 4; k++) if (ch == E[k]) ch = 0;
        end
        wr(nd * 64 + s, (ch << 4) | c);
        wr(16'h0400 + nd * 64 + s, (s == 0) ? 1 : 0);
      end
      wr(16'h0800 + nd, 100);
    end
    for (int l = 0; l < 16; l++) wr(16'h0C00 + l, LBL[l]);
    for (int b = 0; b < 9; b++)
      for (int k = 0; k < 16; k++)
        wr(16'h1000 + b * 16 + k, (b == 0 && k == 0) ? 1024 : 0);
    wr(16'h2001, W);          // window length
    wr(16'h2002, 2);          // DSL integrator shift
    wr(16'h2003, 4);          // feature shift
    wr(16'h2004, 0);          // threshold shift
    for (int r = 5; r < 20; r++) wr(16'h2000 + r, 0);
    wr(16'h2000, 4'b0111);    // run, infer, chop
    distinct = 0;
    for (int tree = 0; tree < 10; tree++) begin
      int waited;
      n = 0;
      for (int d = 0; d < 4; d++) n = on[d] ? 2 * n + 1 : 2 * n + 2;
      exp_cls = LBL[n - 15];
      waited = 0;
      while (!class_valid && waited < 6 * W * 64 * 50) begin @(posedge clk); #1; waited++; end
      chk(class_valid && int'(class_label) == exp_cls,
          $sformatf("tree %0d pattern %0b%0b%0b%0b leaf %0d class %0d exp %0d",
                    tree, on[0], on[1], on[2], on[3], n - 15, class_label, exp_cls));
      $display("tree %0d: leaf %0d class %0d (expected %0d)", tree, n - 15, class_label, exp_cls);
      if (class_valid && int'(class_label) == exp_cls) begin
        if (n_cls[exp_cls] == 0) distinct++;
        n_cls[exp_cls]++;
      end
      // the next tree starts right after this one: new pattern now
      for (int d = 0; d < 4; d++) on[d] = bit'($urandom % 2);
      @(posedge clk); #1;
    end
    chk(distinct >= 3, $sformatf("several classes seen (%0d)", distinct));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
