// tb_system_ctrl: the sample strobe is driven every few clocks with random
// window lengths in both modes; a reference slot/round counter here checks
// the slot and round sequence, the coarse flag, the FEE strobes and their
// first/last flags, the window-done pulse DONE_LAT clocks after the last
// sample, the training strobe, the AFE enables and the switch-matrix
// address in both modes.
// Coarse step in the first round and the two modes follow the paper; the
// strobe latencies checked are this design's own.
module tb_system_ctrl;
  import nt_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic ce_smp = 0;
  logic [5:0] slot;
  logic [11:0] round;
  logic coarse;
  slot_cfg_t slot_cfg;
  logic [3:0] addr_row, addr_col, afe_en;
  logic fee_valid, fee_first, fee_last, win_done, train_valid;
  system_ctrl dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  logic [7:0] CH [64];
  assign slot_cfg.ch = CH[slot];
  assign slot_cfg.code = F_LL;

  int done_at = -1, clk_n = 0, n_done = 0, n_coarse = 0, n_train = 0;
  always @(posedge clk) begin
    clk_n++;
    if (win_done) begin n_done++; chk(clk_n == done_at, $sformatf("win_done at %0d exp %0d", clk_n, done_at)); end
  end

  initial begin
    cfg = '0;
    for (int s = 0; s < 64; s++) CH[s] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 6; m++) begin
      int exp_slot, exp_round;
      @(negedge clk);
      cfg.run = 0;
      @(negedge clk);
      chk(slot == 0 && round == 0 && afe_en == 0, "stopped state");
      cfg.infer = m % 2; cfg.win_len = 12'(3 + $urandom % 6); cfg.run = 1;
      exp_slot = 0; exp_round = 0;
      for (int n = 0; n < 64 * int'(cfg.win_len) * 3; n++) begin
        repeat (4) @(negedge clk);
        ce_smp = 1; #1;
        chk(int'(slot) == exp_slot && int'(round) == exp_round, $sformatf("slot %0d round %0d exp %0d %0d", slot, round, exp_slot, exp_round));
        chk(coarse == (exp_round == 0), "coarse flag in round 0");
        if (coarse) n_coarse++;
        chk(fee_valid == (cfg.infer && exp_round != 0), "fee strobe");
        chk(train_valid == (!cfg.infer && exp_round != 0), "training strobe");
        if (train_valid) n_train++;
        if (fee_valid) chk(fee_first == (exp_round == 1) && fee_last == (exp_round == int'(cfg.win_len) - 1), "first/last flags");
        chk(afe_en == (cfg.infer ? 4'b0001 : 4'b1111), "AFE enables");
        if (cfg.infer) chk({addr_row, addr_col} == CH[exp_slot], "inference address from the slot's channel");
        else chk(addr_row == 4'(exp_slot / 16) && addr_col == 4'(exp_slot % 16), "training scan address");
        if (cfg.infer && exp_slot == 63 && exp_round == int'(cfg.win_len) - 1) done_at = clk_n + 5;
        @(negedge clk); ce_smp = 0;
        exp_slot = (exp_slot + 1) % 64;
        if (exp_slot == 0) exp_round = (exp_round + 1) % int'(cfg.win_len);
      end
    end
    repeat (8) @(negedge clk);
    chk(n_done == 9 && n_coarse > 0 && n_train > 0, $sformatf("windows done %0d", n_done));
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
