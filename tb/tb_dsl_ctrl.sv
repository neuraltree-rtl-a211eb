// tb_dsl_ctrl: a comparator model with a random electrode offset per slot
// checks the 9-bit coarse search (code = floor of the offset in DAC LSBs,
// nine compares per slot). Then a constant ADC word is integrated for R
// rounds and the average CDAC code over each slot must equal
// (EDO*2^10 + (integrator >> shift)) / 2^10, which checks the integrator,
// the adder, the shift and the delta-sigma modulator. The unary/binary CDAC
// outputs are checked against the code at every tick.
// The 9-step search, 9-bit EDO and 19-bit integrator follow the paper; the
// comparator model and the loop settings are this testbench's own.
module tb_dsl_ctrl;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 1, chop_en = 1;
  logic [5:0] tick;
  logic slot_start, ce_smp, phi_rst, phi_clr, phi_smp, fchop, phi_comp;
  logic coarse;
  logic [5:0] slot;
  logic comp_in;
  logic [9:0] adc_data;
  logic [3:0] dsl_shift;
  logic [8:0] dac_code;
  logic [62:0] cdac_unary;
  logic [2:0] cdac_bin;
  logic edo_wr;
  logic [8:0] edo_code;

  afe_timing u_tim (.*);
  dsl_ctrl dut (.clk, .rst_n, .en, .coarse, .slot, .slot_start, .phi_comp, .ce_smp,
    .comp_in, .adc_data, .dsl_shift, .dac_code, .cdac_unary, .cdac_bin, .edo_wr, .edo_code);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  real edo [64];          // offset in DAC LSBs relative to mid-scale
  int  ncmp, got_edo;
  always_comb comp_in = (edo[slot] + 256.0) > real'(dac_code);

  always @(posedge clk) if (rst_n) begin
    int th;
    th = int'(dac_code[8:3]);
    chk(cdac_unary == 63'((64'(1) << th) - 1) && cdac_bin == dac_code[2:0], "segmented CDAC code");
  end

  initial begin
    int sumc [64];
    int R;
    for (int i = 0; i < 64; i++) edo[i] = real'(int'($urandom % 500) - 250) + 0.37;
    coarse = 1; slot = 0; adc_data = 10'd512; dsl_shift = 2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    do @(posedge clk); while (!slot_start);
    // coarse round
    for (int s = 0; s < 64; s++) begin
      slot = 6'(s); ncmp = 0; got_edo = -1;
      for (int t = 0; t < 50; t++) begin
        if (phi_comp) ncmp++;
        @(posedge clk);
        #1 if (edo_wr) got_edo = int'(edo_code);
      end
      #1 if (edo_wr) got_edo = int'(edo_code);
      chk(ncmp == 9, "nine compares per slot");
      chk(got_edo == int'($floor(edo[s] + 256.0)),
          $sformatf("slot %0d EDO code %0d exp %0d", s, got_edo, int'($floor(edo[s] + 256.0))));
    end
    // fine rounds with a constant ADC word of +100
    coarse = 0; adc_data = 10'd612; R = 5;
    for (int r = 0; r < R; r++)
      for (int s = 0; s < 64; s++) begin
        slot = 6'(s); sumc[s] = 0;
        for (int t = 0; t < 50; t++) begin
          @(posedge clk);
          sumc[s] += int'(dac_code);
        end
      end
    // slot s of the last round used the integrator after R-1 updates
    for (int s = 0; s < 64; s++) begin
      real expct, got;
      expct = real'(int'($floor(edo[s] + 256.0))) + real'((100 * (R - 1)) >>> 2) / 1024.0;
      got   = real'(sumc[s]) / 50.0;
      chk(got - expct < 0.05 && expct - got < 0.05,
          $sformatf("slot %0d average code %f exp %f", s, got, expct));
    end
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
