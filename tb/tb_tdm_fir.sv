// tb_tdm_fir: random symmetric bandpass and antisymmetric Hilbert
// coefficients, random ADC samples on 64 interleaved slots; every output is
// compared with a direct-form convolution over the slot's own history
// (cleared at the slot's first sample), including saturation and the
// two-clock latency.
// 32-tap BPF and 31-tap HT follow the paper; coefficient format and
// saturation are this design's own.
module tb_tdm_fir;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic ce_in = 0, first = 0, ht_en = 0;
  logic [5:0] slot = 0;
  logic signed [9:0] din = 0;
  logic [15:0][11:0] bpf_coef, ht_coef;
  logic out_valid;
  logic [5:0] out_slot;
  logic signed [15:0] bpf_out, re_out, im_out;
  tdm_fir dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  int hist [64][$];    // ADC history, newest first
  int bhist [64][$];   // BPF output history, newest first

  function automatic int sat16(longint a);
    longint s;
    s = a >>> 11;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return int'(s);
  endfunction

  function automatic int h_of(int k);  // full 32-tap response from the 16 halves
    return (k < 16) ? int'($signed(bpf_coef[k])) : int'($signed(bpf_coef[31 - k]));
  endfunction

  initial begin
    int eb, er, ei;
    for (int k = 0; k < 16; k++) begin
      bpf_coef[k] = 12'($urandom % 1024) - 12'd512;
      ht_coef[k]  = (k == 15) ? '0 : 12'($urandom % 2048) - 12'd1024;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 70; r++) begin
      for (int s = 0; s < 64; s++) begin
        longint acc;
        @(negedge clk);
        ce_in = 1; slot = 6'(s); first = (r == 0) || (r == 40 && s % 2 == 0);
        ht_en = (s % 3) != 0;
        din = 10'($urandom);
        if (first) begin hist[s].delete(); bhist[s].delete(); end
        hist[s].push_front(int'(din));
        acc = 0;
        for (int k = 0; k < 32; k++)
          if (k < hist[s].size()) acc += longint'(h_of(k)) * longint'(hist[s][k]);
        eb = sat16(acc);
        if (ht_en) begin
          bhist[s].push_front(eb);
          acc = 0;
          for (int k = 0; k < 15; k++) begin
            longint a, b;
            a = (k < bhist[s].size()) ? longint'(bhist[s][k]) : 0;
            b = (30 - k < bhist[s].size()) ? longint'(bhist[s][30 - k]) : 0;
            acc += longint'($signed(ht_coef[k])) * (a - b);
          end
          ei = sat16(acc);
          er = (15 < bhist[s].size()) ? bhist[s][15] : 0;
        end else begin
          ei = 0; er = 0;
        end
        @(negedge clk); ce_in = 0;
        @(negedge clk);
        chk(out_valid && out_slot == 6'(s), "valid two clocks after the sample");
        chk(int'(bpf_out) == eb, $sformatf("r%0d s%0d bpf %0d exp %0d", r, s, bpf_out, eb));
        chk(int'(re_out) == er && int'(im_out) == ei,
            $sformatf("r%0d s%0d ht %0d/%0d exp %0d/%0d", r, s, re_out, im_out, er, ei));
      end
    end
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
