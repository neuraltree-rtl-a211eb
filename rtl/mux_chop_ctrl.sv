// mux_chop_ctrl: control of the 16x16 switch matrix and the four dual
// MUX-CHOPs that route 256 electrodes to the AFE modules.
//
// Channel c (0..255) sits at row c[7:4], column c[3:0]. Each MUX-CHOP serves
// four rows (rows 4m..4m+3 for MUX-CHOP m) and holds a training path to its
// own AFE module and an inference path to the shared input of module #1.
//   training : every module sees its own four rows; addr_row[1:0] picks the
//              row inside each group, addr_col the column (64 channels per
//              module).
//   inference: addr_row[3:0] names one row of 256-channel matrix, only the
//              MUX-CHOP owning that row closes its inference switch.
// The column decoder output col_sel is one-hot. The chopper phases
// phi1 (straight) and phi2 (crossed) follow fchop; both are held low for
// DEAD ticks after every fchop edge so that they never overlap, and the
// reference input is chopped with the same phases (phi1_ref/phi2_ref).
// Paper: 4-bit Addr_COL and Addr_ROW, column decoder, f_CHOP, Mode_AFE and a
// non-overlapping clock generator (Fig. 4, Fig. 6). This design's choices:
// the channel numbering, a dead time counted in clock ticks, and the
// rule that with chopping disabled phi1 stays closed.
module mux_chop_ctrl #(
  parameter int unsigned N_ROW = 16,
  parameter int unsigned N_COL = 16,
  parameter int unsigned DEAD  = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             infer,        // Mode_AFE: 0 training, 1 inference
  input  logic             chop_en,
  input  logic             fchop,
  input  logic [3:0]       addr_row,
  input  logic [3:0]       addr_col,
  output logic [N_COL-1:0] col_sel,
  output logic [3:0][3:0]  phi1_train,   // [mux-chop][row in group]
  output logic [3:0][3:0]  phi2_train,
  output logic [3:0][3:0]  phi1_infer,
  output logic [3:0][3:0]  phi2_infer,
  output logic             phi1_ref,
  output logic             phi2_ref
);
  logic fchop_q;
  logic [3:0] dead_cnt;
  logic ph1, ph2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fchop_q  <= 1'b0;
      dead_cnt <= '0;
    end else begin
      fchop_q <= fchop;
      if (fchop != fchop_q)   dead_cnt <= 4'(DEAD);
      else if (dead_cnt != 0) dead_cnt <= dead_cnt - 4'd1;
    end
  end

  always_comb begin
    logic quiet;
    quiet = (fchop != fchop_q) || (dead_cnt != 0);
    if (!chop_en) begin
      ph1 = 1'b1;
      ph2 = 1'b0;
    end else begin
      ph1 = !quiet && fchop;
      ph2 = !quiet && !fchop;
    end
    phi1_ref = ph1;
    phi2_ref = ph2;
    col_sel  = '0;
    col_sel[addr_col] = 1'b1;
    phi1_train = '0;
    phi2_train = '0;
    phi1_infer = '0;
    phi2_infer = '0;
    if (!infer) begin
      for (int m = 0; m < 4; m++) begin
        phi1_train[m][addr_row[1:0]] = ph1;
        phi2_train[m][addr_row[1:0]] = ph2;
      end
    end else begin
      phi1_infer[addr_row[3:2]][addr_row[1:0]] = ph1;
      phi2_infer[addr_row[3:2]][addr_row[1:0]] = ph2;
    end
  end

  // The straight and crossed chopper phases must never be closed together.
  always @(posedge clk) if (rst_n) assert (!(ph1 && ph2));
endmodule
