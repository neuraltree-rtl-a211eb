// afe_timing: per-slot timing of one 64-channel CS-TDM AFE module.
//
// A sample slot lasts TICKS_PER_SLOT ticks of the 6.4 MHz clock (7.8125 us,
// one channel at 128 kS/s). Within a slot:
//   tick 0                      phi_rst and phi_clr (reset of the feed-forward
//                               nodes and of the Gm-C integrator), slot_start
//   ticks 0 .. T-CONV-1         phi_smp high: the Gm-C integrator integrates
//   last CONV_TICKS ticks       phi_smp low: the SAR ADC converts (312.5 ns)
//   first half of the slot      fchop high, second half low (128 kHz chopping)
//   ticks 9, 14, .., 49         phi_comp: the nine coarse binary-search compares
//   last tick                   ce_smp: the ADC word of this slot is valid
// The slot length, the 96 % integration time, the 312.5 ns conversion and
// the one-period-per-slot chopper follow the paper. Pulse widths of one tick
// and the positions of the compare strobes are this design's choice.
module afe_timing #(
  parameter int unsigned TICKS_PER_SLOT = 50,
  parameter int unsigned CONV_TICKS     = 2,
  parameter int unsigned N_CMP          = 9,
  parameter int unsigned CMP_STEP       = 5,
  parameter int unsigned CMP_FIRST      = 9
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic       chop_en,
  output logic [5:0] tick,
  output logic       slot_start,
  output logic       ce_smp,
  output logic       phi_rst,
  output logic       phi_clr,
  output logic       phi_smp,
  output logic       fchop,
  output logic       phi_comp
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         tick <= '0;
    else if (!en)                       tick <= '0;
    else if (tick == 6'(TICKS_PER_SLOT - 1)) tick <= '0;
    else                                tick <= tick + 6'd1;
  end

  always_comb begin
    slot_start = en && tick == 6'd0;
    ce_smp     = en && tick == 6'(TICKS_PER_SLOT - 1);
    phi_rst    = slot_start;
    phi_clr    = slot_start;
    phi_smp    = en && tick < 6'(TICKS_PER_SLOT - CONV_TICKS);
    fchop      = en && chop_en && tick < 6'(TICKS_PER_SLOT / 2);
    phi_comp   = 1'b0;
    for (int k = 0; k < int'(N_CMP); k++)
      if (tick == 6'(CMP_FIRST + CMP_STEP * k)) phi_comp = en;
  end
endmodule
