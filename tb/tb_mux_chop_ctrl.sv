// tb_mux_chop_ctrl: random row/column addresses in both modes; checks the
// one-hot column decode, which chopper phase switches close, the dead time
// after each fchop edge and that phi1/phi2 never overlap.
// The 16x16 matrix and four MUX-CHOPs follow the paper; channel numbering
// and dead time are this design's own.
module tb_mux_chop_ctrl;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, infer = 0, chop_en = 1, fchop = 0;
  logic [3:0] addr_row, addr_col;
  logic [15:0] col_sel;
  logic [3:0][3:0] phi1_train, phi2_train, phi1_infer, phi2_infer;
  logic phi1_ref, phi2_ref;
  mux_chop_ctrl dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  int ph = 0;
  logic f_prev = 0;
  int since_edge = 99;
  initial begin
    addr_row = 0; addr_col = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      // fchop: 25 ticks high, 25 low
      @(negedge clk);
      fchop = (ph % 50) < 25; ph++;
      if (i % 50 == 0) begin
        addr_row = 4'($urandom); addr_col = 4'($urandom);
        infer = (i / 1000) % 2 == 1;
      end
      since_edge = (fchop != f_prev) ? 0 : since_edge + 1;
      f_prev = fchop;
      #1;
      chk(col_sel == 16'(1) << addr_col, "column decode");
      chk(!(phi1_ref && phi2_ref), "reference phases overlap");
      if (since_edge <= 1) chk(!phi1_ref && !phi2_ref, "dead time after fchop edge");
      else chk(phi1_ref == fchop && phi2_ref == !fchop, "phase follows fchop");
      for (int m = 0; m < 4; m++)
        for (int r = 0; r < 4; r++) begin
          logic sel_t, sel_i;
          sel_t = !infer && r == int'(addr_row[1:0]);
          sel_i = infer && m == int'(addr_row[3:2]) && r == int'(addr_row[1:0]);
          chk(phi1_train[m][r] == (sel_t && phi1_ref) && phi2_train[m][r] == (sel_t && phi2_ref),
              "training switch");
          chk(phi1_infer[m][r] == (sel_i && phi1_ref) && phi2_infer[m][r] == (sel_i && phi2_ref),
              "inference switch");
        end
    end
    chop_en = 0; #1;
    chk(phi1_ref && !phi2_ref, "no chopping: straight path");
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
