// tb_ratio_calc: checks the divider-free ratio against an exact integer
// division for random and corner operands; the relative error must stay
// below 2^-5 (LUT of 2^6 entries plus truncation) or within 1 LSB.
// The divider is this design's own; the paper only needs the ratios.
module tb_ratio_calc;
  int checks = 0, failures = 0;
  logic [31:0] n, d;
  logic [15:0] r;
  ratio_calc dut (.numer(n), .denom(d), .ratio(r));

  task automatic check(input logic [31:0] nn, input logic [31:0] dd);
    longint exact, got, err;
    n = nn; d = dd; #1;
    checks++;
    if (dd == 0) exact = 65535;
    else begin
      exact = (longint'(nn) << 8) / longint'(dd);
      if (exact > 65535) exact = 65535;
    end
    got = longint'(r);
    err = got > exact ? got - exact : exact - got;
    if (err > 1 && err * 32 > exact) begin
      failures++;
      $display("FAIL n=%0d d=%0d got=%0d exact=%0d", nn, dd, got, exact);
    end
  endtask

  initial begin
    check(1, 1); check(100, 3); check(0, 5); check(5, 0); check(65535, 1);
    check(3000, 7000); check(12345, 12345); check(32'hFFFF_FFFF, 32'hFFFF_FFFF);
    check(7, 1 << 20); check(1 << 20, 7);
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] a, b;
      a = $urandom() >> ($urandom() % 32);
      b = $urandom() >> ($urandom() % 32);
      check(a, b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
