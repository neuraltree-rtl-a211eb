// tb_fee: the feature-extraction engine with random per-slot feature codes.
// Band-pass set b is programmed as a pure gain C0 = 192*(b+1) so that, for
// windows shorter than the 32-tap line, every band output is known exactly;
// the features of ADC-, BPF- and ratio-based codes are rebuilt here from the
// offset-binary samples and compared (ratios within the reciprocal-LUT
// tolerance). Phase features are checked for their strobe, their zero even
// slot and a non-zero odd slot.
// The feature set follows the paper; codes, pairing and the pure-gain filter
// banks are this testbench's own choices.
module tb_fee;
  import nt_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_first = 0, s_last = 0;
  logic [5:0] s_slot = 0;
  feat_e s_code;
  logic [9:0] s_adc = 0;
  cfg_t cfg;
  logic [2:0] band;
  logic [15:0][11:0] bpf_coef, ht_coef;
  logic feat_valid;
  logic [5:0] feat_slot;
  logic signed [15:0] feat;
  fee dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  always_comb begin
    for (int k = 0; k < 16; k++) begin
      bpf_coef[k] = (k == 0) ? 12'(192 * (int'(band) + 1)) : 12'd0;
      ht_coef[k]  = (k == 15) ? 12'd0 : ((k % 2) ? 12'd0 : 12'(1304 / (15 - k)));
    end
  end

  function automatic longint scl(longint a);
    longint s;
    s = a >>> cfg.feat_shift;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return s;
  endfunction
  function automatic bit near(longint got, longint exact);
    longint e;
    if (exact > 32767) exact = 32767;
    e = got > exact ? got - exact : exact - got;
    return e <= 1 || e * 24 <= exact;
  endfunction

  feat_e codes [64];
  longint a1 [64], a2 [64], a3 [64];
  int xp [64], dp [64];
  int cnt [int];
  bit fgot [64];
  logic signed [15:0] fmem [64];
  always @(posedge clk) if (feat_valid) begin
    fmem[feat_slot] = feat;
    fgot[feat_slot] = 1'b1;
  end

  initial begin
    cfg = '0;
    cfg.feat_shift = 2;
    cfg.hfo1_band = 3'd6; cfg.hfo2_band = 3'd1; cfg.plv_band = 3'd2;
    cfg.pac_ph_band = 3'd0; cfg.pac_amp_band = 3'd7;
    s_code = F_LL;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 16; w++) begin
      int N;
      N = 5 + int'($urandom % 20);
      for (int s = 0; s < 64; s += 2) begin
        int r;
        r = int'($urandom % 20);
        if (r < 2)      begin codes[s] = F_HFOR; codes[s+1] = F_HFOR; end
        else if (r < 4) begin codes[s] = F_PAC;  codes[s+1] = F_PAC;  end
        else if (r < 6) begin codes[s] = F_PLV;  codes[s+1] = F_PLV;  end
        else begin
          codes[s]   = feat_e'(($urandom % 2) ? 8 + $urandom % 8 : $urandom % 5);
          codes[s+1] = feat_e'(($urandom % 2) ? 8 + $urandom % 8 : $urandom % 5);
        end
      end
      for (int r = 0; r < N; r++)
        for (int s = 0; s < 64; s++) begin
          int xv, d, dd, g;
          feat_e c;
          @(negedge clk);
          c = codes[s];
          s_valid = 1; s_slot = 6'(s); s_first = (r == 0); s_last = (r == N - 1);
          s_code = c;
          s_adc = 10'(512 + int'($rtoi(300.0 * $sin(0.7 * r + s))) + int'($urandom % 101) - 50);
          xv = int'(s_adc) - 512;
          if (c >= F_SE0 || c == F_HFOR) begin
            g = 192 * (int'(band_of(c, s[0], cfg)) + 1);
            xv = (xv * g) >>> 11;
          end
          d  = s_first ? 0 : xv - xp[s];
          dd = s_first ? 0 : d - dp[s];
          if (s_first) begin a1[s] = 0; a2[s] = 0; a3[s] = 0; end
          a1[s] += (c == F_LMP) ? xv : (xv < 0 ? -xv : xv);
          a2[s] += d < 0 ? -d : d;
          a3[s] += dd < 0 ? -dd : dd;
          xp[s] = xv; dp[s] = d;
          @(negedge clk); s_valid = 0;
          repeat (3) @(negedge clk);
          if (s_last) begin
            longint s1, s2, s3, e;
            logic signed [15:0] f;
            f = fmem[s];
            chk(fgot[s], "feature strobe for the slot");
            fgot[s] = 1'b0;
            s1 = scl(a1[s]); s2 = scl(a2[s]); s3 = scl(a3[s]);
            cnt[int'(c)]++;
            case (c)
              F_LL:  chk(longint'(f) == s2, $sformatf("LL %0d exp %0d", f, s2));
              F_ACT, F_LMP: chk(longint'(f) == s1, $sformatf("ACT/LMP %0d exp %0d", f, s1));
              F_MOB: begin
                e = s1 == 0 ? 32767 : (s2 << 8) / s1;
                chk(near(longint'(f), e), $sformatf("MOB %0d exp %0d", f, e));
              end
              F_COM: begin
                e = s2 == 0 ? 32767 : ((s1 * s3) << 8) / (s2 * s2);
                chk(near(longint'(f), e), $sformatf("COM %0d exp %0d", f, e));
              end
              F_HFOR: begin
                if (s % 2 == 0) chk(f == 0, "HFO even slot is zero");
                else begin
                  e = s1 == 0 ? 32767 : (scl(a1[s-1]) << 8) / s1;
                  chk(near(longint'(f), e), $sformatf("HFOR %0d exp %0d", f, e));
                end
              end
              F_PAC, F_PLV: begin
                if (s % 2 == 0) chk(f == 0, "phase even slot is zero");
                else chk(f > 0, $sformatf("%s odd slot non-zero", c.name()));
              end
              default: chk(longint'(f) == s1, $sformatf("SE %0d exp %0d", f, s1));
            endcase
          end
        end
    end
    for (int c = 0; c < 16; c++) chk(cnt[c] > 0, $sformatf("code %0d exercised", c));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
