// tb_stim_ctrl: random pulse widths, charge-balance times and periods; the
// outputs are sampled every clock and the length of each phase (in 640 kHz
// ticks of DIV clocks), the phase order, the residue-dependent active
// balancing, the per-module charge-pump enables and the repetition period
// are checked against the programmed values.
// Biphasic pulses, active and passive balancing and the 640 kHz tick follow
// the paper; phase order and counter widths are this design's own.
module tb_stim_ctrl;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic enable = 0, trigger = 0;
  logic [15:0] ch_en, res_hi = 0, res_lo = 0;
  logic [7:0] amp_in, pw, cb_t, pas_t;
  logic [16:0] period;
  logic [15:0] pos_h, neg_h, pos2, neg2, pas, en_cbp, en_cbn;
  logic cb1;
  logic [3:0] cp_en;
  logic [7:0] amp;
  logic pulse_start;
  stim_ctrl dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // count clocks while a condition holds
  int n_act = 0, n_pas = 0, n_cbn = 0, n_cbp = 0;

  initial begin
    ch_en = 16'h0001; amp_in = 0; pw = 1; cb_t = 1; pas_t = 1; period = 100;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 24; t++) begin
      int c_pos, c_neg, c_cb1, c_cb, c_pas, start_gap, m;
      logic [15:0] exp_hi, exp_lo;
      @(negedge clk);
      ch_en = 16'($urandom) | 16'h1; amp_in = 8'($urandom);
      pw = 8'(1 + $urandom % 20); cb_t = 8'(1 + $urandom % 10); pas_t = 8'(1 + $urandom % 10);
      period = 17'(2 * pw + cb_t + pas_t + 5 + $urandom % 20);
      res_hi = (t % 3 == 0) ? 16'($urandom) : 16'h0;
      res_lo = (t % 3 == 1) ? 16'($urandom) : 16'h0;
      exp_hi = res_hi & ch_en; exp_lo = res_lo & ch_en & ~res_hi;
      enable = 1; trigger = 1;
      wait (pulse_start); #1; trigger = 0;
      c_pos = 0; c_neg = 0; c_cb1 = 0; c_cb = 0; c_pas = 0;
      m = 0;
      while (m < 2 * 10 * int'(period)) begin
        if (m > 0 && pulse_start) break;
        chk((pos_h & neg_h) == 0 && pos2 == pos_h && neg2 == neg_h, "bridge halves exclusive");
        chk(amp == amp_in, "amplitude passed through");
        if (pos_h != 0) begin c_pos++; chk(pos_h == ch_en && c_neg == 0, "anodic first, on enabled channels"); end
        if (neg_h != 0) begin c_neg++; chk(neg_h == ch_en && c_cb1 == 0, "cathodic second"); end
        if (cb1) c_cb1++;
        if (en_cbn != 0 || en_cbp != 0) begin
          c_cb++;
          chk(en_cbn == exp_hi && en_cbp == exp_lo, "active balance follows the residue");
          chk(c_cb1 > 0 && c_pas == 0, "active balance after the check");
        end
        if (pas != 0) begin c_pas++; chk(pas == ch_en, "passive balance on enabled channels"); end
        for (int k = 0; k < 4; k++)
          if (pos_h != 0) chk(cp_en[k] == (ch_en[4*k +: 4] != 0), "charge pump per module");
        @(posedge clk); #1; m++;
      end
      chk(c_pos == 10 * int'(pw) && c_neg == 10 * int'(pw),
          $sformatf("phase widths %0d %0d exp %0d", c_pos, c_neg, 10 * pw));
      chk(c_cb1 == 10, "one check tick");
      chk(c_cb == ((exp_hi | exp_lo) != 0 ? 10 * int'(cb_t) : 0), $sformatf("active balance %0d", c_cb));
      chk(c_pas == 10 * int'(pas_t), $sformatf("passive balance %0d", c_pas));
      if (c_cb != 0) n_act++;
      n_pas++;
      if (en_cbn != 0) n_cbn++;
      if (exp_hi != 0) n_cbn++;
      if (exp_lo != 0) n_cbp++;
      // after the wait, a new trigger starts a pulse exactly one period later
      trigger = 1;
      m = 0;
      while (!pulse_start && m < 100000) begin @(negedge clk); m++; end
      trigger = 0;
      // already past pulse_start in the loop above only when retriggered
    end
    // periodic repetition while trigger stays high
    @(negedge clk); period = 40; pw = 2; cb_t = 2; pas_t = 2; trigger = 1;
    do begin @(posedge clk); #1; end while (!pulse_start);
    begin
      int gap;
      gap = 0;
      do begin @(posedge clk); #1; gap++; end while (!pulse_start);
      chk(gap == 10 * 40, $sformatf("period %0d clocks", gap));
    end
    trigger = 0; enable = 0;
    repeat (2000) @(negedge clk);
    chk(cp_en == 0 && pos_h == 0 && neg_h == 0 && pas == 0, "idle when disabled");
    chk(n_act > 0 && n_cbn > 0 && n_cbp > 0 && n_pas > 0, "every balancing path exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
