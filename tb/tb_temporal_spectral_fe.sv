// tb_temporal_spectral_fe: random samples on 64 slots with a random feature
// code per slot and window; the features at the window end are compared
// with sums computed here from the definitions (LL, ACT, LMP, SE exactly;
// MOB, COM and HFO ratio within the reciprocal-LUT tolerance).
// Absolute-value forms of the features follow the paper; scaling and slot
// pairing are this design's own.
module tb_temporal_spectral_fe;
  import nt_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic valid = 0, first = 0, last = 0;
  logic [5:0] slot = 0;
  feat_e code;
  logic signed [15:0] x = 0;
  logic [4:0] feat_shift;
  logic feat_valid;
  logic [5:0] feat_slot;
  logic signed [15:0] feat;
  temporal_spectral_fe dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic longint scl(longint a);
    longint s;
    s = a >>> feat_shift;
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

  initial begin
    feat_shift = 3;
    code = F_LL;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 12; w++) begin
      int N;
      N = 5 + int'($urandom % 20);
      for (int s = 0; s < 64; s += 2) begin
        feat_e c;
        c = feat_e'($urandom % 16);
        if (c == F_PAC || c == F_PLV) c = F_HFOR;
        codes[s] = c;
        codes[s+1] = (c == F_HFOR) ? F_HFOR : feat_e'($urandom % 6);
        if (codes[s+1] == F_HFOR && c != F_HFOR) codes[s+1] = F_SE0;
      end
      for (int r = 0; r < N; r++)
        for (int s = 0; s < 64; s++) begin
          int xv, d, dd;
          @(negedge clk);
          valid = 1; slot = 6'(s); first = (r == 0); last = (r == N - 1);
          code = codes[s];
          xv = int'($urandom % 2001) - 1000;
          x = 16'(xv);
          d  = first ? 0 : xv - xp[s];
          dd = first ? 0 : d - dp[s];
          if (first) begin a1[s] = 0; a2[s] = 0; a3[s] = 0; end
          a1[s] += (code == F_LMP) ? xv : (xv < 0 ? -xv : xv);
          a2[s] += d < 0 ? -d : d;
          a3[s] += dd < 0 ? -dd : dd;
          xp[s] = xv; dp[s] = d;
          @(negedge clk);
          valid = 0;
          if (last) begin
            longint s1, s2, s3, e;
            s1 = scl(a1[s]); s2 = scl(a2[s]); s3 = scl(a3[s]);
            chk(feat_valid && feat_slot == 6'(s), "feature strobe");
            cnt[int'(code)]++;
            case (code)
              F_LL:  chk(longint'(feat) == s2, $sformatf("LL %0d exp %0d", feat, s2));
              F_ACT, F_LMP: chk(longint'(feat) == s1, $sformatf("ACT/LMP %0d exp %0d", feat, s1));
              F_MOB: begin
                e = s1 == 0 ? 32767 : (s2 << 8) / s1;
                chk(near(longint'(feat), e), $sformatf("MOB %0d exp %0d", feat, e));
              end
              F_COM: begin
                e = s2 == 0 ? 32767 : ((s1 * s3) << 8) / (s2 * s2);
                chk(near(longint'(feat), e), $sformatf("COM %0d exp %0d", feat, e));
              end
              F_HFOR: begin
                if (s % 2 == 0) chk(feat == 0, "HFO even slot is zero");
                else begin
                  e = s1 == 0 ? 32767 : (scl(a1[s-1]) << 8) / s1;
                  chk(near(longint'(feat), e), $sformatf("HFOR %0d exp %0d", feat, e));
                end
              end
              default: chk(longint'(feat) == s1, $sformatf("SE %0d exp %0d", feat, s1));
            endcase
          end
        end
    end
    for (int c = 0; c < 16; c++) if (c != 6 && c != 7) chk(cnt[c] > 0, $sformatf("code %0d exercised", c));
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
