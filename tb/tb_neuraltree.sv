// tb_neuraltree: a random 15-node oblique tree (random weights, thresholds,
// threshold shift and leaf labels) is walked window by window with random
// 64-feature vectors; each decision, the node sequence, the MAC count and
// the final class label are compared with a reference walk done here.
// 64 MACs per node and multi-bit labels follow the paper; tree depth and
// heap order are this design's own.
module tb_neuraltree;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic en = 0, feat_valid = 0, win_done = 0;
  logic signed [15:0] feat = 0;
  logic signed [11:0] weight = 0, th;
  logic [4:0] th_shift;
  logic [3:0] node, leaf;
  logic [2:0] leaf_label;
  logic class_valid;
  logic [2:0] class_label;
  logic went_left;
  logic [6:0] mac_count;
  neuraltree dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  logic signed [11:0] W [15][64];
  logic signed [11:0] TH [15];
  logic [2:0] LBL [16];
  int n_yes = 0, n_no = 0, leaves [16];

  assign th = TH[node];
  assign leaf_label = LBL[leaf];

  initial begin
    th_shift = 14;
    for (int n = 0; n < 15; n++) begin
      TH[n] = 12'($urandom % 64) - 12'd32;
      for (int k = 0; k < 64; k++) W[n][k] = 12'($urandom);
    end
    for (int l = 0; l < 16; l++) LBL[l] = 3'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); en = 1;
    for (int t = 0; t < 60; t++) begin
      int n;
      n = 0;
      for (int d = 0; d < 4; d++) begin
        longint acc, ths;
        bit yes;
        acc = 0;
        chk(int'(node) == n, $sformatf("tree %0d depth %0d node %0d exp %0d", t, d, node, n));
        for (int k = 0; k < 64; k++) begin
          @(negedge clk);
          feat_valid = 1;
          feat = 16'($urandom);
          weight = W[n][k];
          acc += longint'(feat) * longint'(weight);
        end
        @(negedge clk); feat_valid = 0;
        chk(mac_count == 7'd64, "64 MACs per node");
        ths = longint'(TH[n]) <<< th_shift;
        yes = acc > ths;
        if (yes) n_yes++; else n_no++;
        @(negedge clk); win_done = 1;
        @(negedge clk); win_done = 0;
        chk(went_left == yes, "decision direction");
        n = yes ? 2 * n + 1 : 2 * n + 2;
        if (d < 3) chk(!class_valid, "no class before a leaf");
      end
      chk(class_valid && class_label == LBL[n - 15],
          $sformatf("class %0d exp %0d (leaf %0d)", class_label, LBL[n - 15], n - 15));
      leaves[n - 15]++;
    end
    chk(n_yes > 20 && n_no > 20, "both branch directions taken");
    @(negedge clk); en = 0;
    @(negedge clk);
    chk(node == 0 && mac_count == 0, "disable returns to the root");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
