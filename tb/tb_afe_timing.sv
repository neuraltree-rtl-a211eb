// tb_afe_timing: counts, over 20 slots, the ticks per slot and the number of
// ticks each AFE timing signal is high, and checks where the pulses sit.
// The 50-tick slot and 2-tick conversion follow the paper's numbers; the
// pulse positions checked are this design's own.
module tb_afe_timing;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, chop_en = 1;
  logic [5:0] tick;
  logic slot_start, ce_smp, phi_rst, phi_clr, phi_smp, fchop, phi_comp;
  afe_timing dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    int n_start, n_smp, n_chop, n_comp, n_rst, cyc, last_start;
    repeat (3) @(posedge clk);
    rst_n = 1; en = 1;
    // align to a slot start
    do @(posedge clk); while (!slot_start);
    last_start = 0; cyc = 0;
    for (int s = 0; s < 20; s++) begin
      n_smp = 0; n_chop = 0; n_comp = 0; n_rst = 0;
      for (int t = 0; t < 50; t++) begin
        chk(tick == 6'(t), $sformatf("tick %0d exp %0d", tick, t));
        chk(slot_start == (t == 0), "slot_start position");
        chk(ce_smp == (t == 49), "ce_smp position");
        chk(phi_comp == (t >= 9 && (t - 9) % 5 == 0), $sformatf("phi_comp at %0d", t));
        n_smp  += phi_smp;
        n_chop += fchop;
        n_comp += phi_comp;
        n_rst  += phi_rst;
        @(posedge clk);
      end
      chk(n_smp == 48, $sformatf("phi_smp high %0d ticks (96%% of 50)", n_smp));
      chk(n_chop == 25, "fchop duty");
      chk(n_comp == 9, "nine compares");
      chk(n_rst == 1, "one reset pulse");
    end
    chop_en = 0;
    repeat (60) begin @(posedge clk); chk(!fchop, "chopper off"); end
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
