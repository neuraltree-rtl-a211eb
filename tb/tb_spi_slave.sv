// tb_spi_slave: random 32-bit mode-0 frames at clk/8. Writes must produce
// one wr_en pulse with the frame's address and data; reads must return, MSB
// first on MOSI-sampling edges, the word the register model here gives for
// the frame's address. Raising CS mid-frame must abort it.
// The serial port is this design's own; the paper does not describe its host
// interface.
module tb_spi_slave;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic sclk = 0, cs_n = 1, mosi = 0, miso;
  logic wr_en;
  logic [15:0] addr, wdata, rdata;
  spi_slave dut (.*);
  always #5 clk = ~clk;
  assign rdata = addr ^ 16'hA5C3;   // register model: data depends on address

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  int n_wr = 0;
  logic [15:0] last_a, last_d;
  always @(posedge clk) if (wr_en) begin n_wr++; last_a = addr; last_d = wdata; end

  task automatic frame(input logic [31:0] f, input int nbits, output logic [15:0] rx);
    rx = 0;
    cs_n = 0; repeat (4) @(negedge clk);
    for (int i = 31; i > 31 - nbits; i--) begin
      mosi = f[i];
      repeat (4) @(negedge clk);
      sclk = 1;
      if (i < 16) rx = {rx[14:0], miso};
      repeat (4) @(negedge clk);
      sclk = 0;
    end
    repeat (4) @(negedge clk);
    cs_n = 1; repeat (8) @(negedge clk);
  endtask

  initial begin
    logic [15:0] rx;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      logic [14:0] a;
      logic [15:0] d;
      int n0;
      a = 15'($urandom); d = 16'($urandom);
      n0 = n_wr;
      if (t % 2 == 0) begin
        frame({1'b1, a, d}, 32, rx);
        chk(n_wr == n0 + 1 && last_a == {1'b0, a} && last_d == d, $sformatf("write %h %h", a, d));
      end else begin
        frame({1'b0, a, d}, 32, rx);
        chk(n_wr == n0, "read does not write");
        chk(rx == ({1'b0, a} ^ 16'hA5C3), $sformatf("read %h got %h", a, rx));
      end
      if (t % 10 == 9) begin
        n0 = n_wr;
        frame({1'b1, a, d}, 20, rx);
        chk(n_wr == n0, "aborted frame does not write");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
