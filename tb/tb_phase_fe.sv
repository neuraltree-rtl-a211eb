// tb_phase_fe: the phase estimate is compared with $atan2 for random
// analytic samples (within 1.5 % of a turn); the PLV and PAC vector sums over a window are
// rebuilt here from the observed phases with a sine table made from
// Bhaskara's formula (the table itself is checked against $sin), and the
// feature at the window end is compared exactly. Even slots must output 0.
// PLV and PAC as features follow the paper; the arctangent and sine
// approximations checked are this design's own.
module tb_phase_fe;
  import nt_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic valid = 0, first = 0, last = 0;
  logic [5:0] slot = 0;
  feat_e code;
  logic signed [15:0] re = 0, im = 0;
  logic [4:0] feat_shift;
  logic feat_valid;
  logic [5:0] feat_slot;
  logic signed [15:0] feat;
  logic [9:0] theta_dbg;
  phase_fe dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic int sinb(int idx);   // Bhaskara sine, 256 steps per turn
    longint u, v;
    u = idx % 128;
    v = (127 * 4 * u * (128 - u) + (20480 - u * (128 - u)) / 2) / (20480 - u * (128 - u));
    return idx % 256 >= 128 ? -int'(v) : int'(v);
  endfunction

  longint accs [32], accc [32];
  int thp;
  int n_plv = 0, n_pac = 0;

  initial begin
    real pi;
    pi = 3.14159265358979;
    feat_shift = 4;
    code = F_PLV;
    for (int i = 0; i < 256; i++) begin
      real e;
      e = real'(sinb(i)) - 127.0 * $sin(2.0 * pi * i / 256.0);
      chk(e < 2.0 && e > -2.0, $sformatf("sine table %0d", i));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 10; w++) begin
      int N;
      feat_e codes [32];
      real f_ph [32], f_am [32];
      N = 6 + int'($urandom % 30);
      for (int p = 0; p < 32; p++) begin
        codes[p] = ($urandom % 2) ? F_PAC : F_PLV;
        f_ph[p] = 0.01 + 0.2 * ($urandom % 1000) / 1000.0;
        f_am[p] = 0.01 + 0.2 * ($urandom % 1000) / 1000.0;
      end
      for (int r = 0; r < N; r++)
        for (int s = 0; s < 64; s++) begin
          real a, ph, th_true, err;
          int th;
          @(negedge clk);
          valid = 1; slot = 6'(s); first = (r == 0); last = (r == N - 1);
          code = codes[s / 2];
          ph = 2.0 * pi * ((s % 2) ? f_am[s / 2] : f_ph[s / 2]) * r + 0.3 * s;
          a  = 200.0 + real'($urandom % 20000);
          re = 16'($rtoi(a * $cos(ph)));
          im = 16'($rtoi(a * $sin(ph)));
          #1;
          th = int'(theta_dbg);
          th_true = $atan2(real'(im), real'(re)) / (2.0 * pi) * 1024.0;
          if (th_true < 0) th_true += 1024.0;
          err = real'(th) - th_true;
          if (err > 512.0) err -= 1024.0;
          if (err < -512.0) err += 1024.0;
          chk(err < 15.0 && err > -15.0, $sformatf("phase %0d vs %f (re %0d im %0d)", th, th_true, re, im));
          if (s % 2 == 1) begin
            int idx, amp;
            longint ts, tc;
            idx = (code == F_PLV) ? ((th - thp) & 1023) >> 2 : thp >> 2;
            amp = (re < 0 ? -int'(re) : int'(re));
            if ((im < 0 ? -int'(im) : int'(im)) > amp) amp = im < 0 ? -int'(im) : int'(im);
            ts = sinb(idx); tc = sinb(idx + 64);
            if (code == F_PAC) begin ts *= amp; tc *= amp; end
            if (first) begin accs[s/2] = 0; accc[s/2] = 0; end
            accs[s/2] += ts; accc[s/2] += tc;
          end
          thp = th;
          @(negedge clk);
          valid = 0;
          if (last) begin
            longint ms, mc, e;
            chk(feat_valid && feat_slot == 6'(s), "feature strobe");
            if (s % 2 == 0) chk(feat == 0, "even slot outputs 0");
            else begin
              ms = accs[s/2] < 0 ? -accs[s/2] : accs[s/2];
              mc = accc[s/2] < 0 ? -accc[s/2] : accc[s/2];
              e = (ms > mc ? ms : mc) >>> feat_shift;
              if (e > 32767) e = 32767;
              chk(longint'(feat) == e, $sformatf("%s feat %0d exp %0d", code.name(), feat, e));
              if (code == F_PLV) n_plv++; else n_pac++;
            end
          end
        end
    end
    chk(n_plv > 0 && n_pac > 0, "both PLV and PAC exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
