// system_ctrl: window, round and slot sequencing of the SoC.
//
// A feature-extraction window is win_len rounds; a round visits the 64 TDM
// slots once (one slot = one 128 kHz sample = 50 ticks). Per window:
//   round 0                 coarse DC-servo step (binary search of every
//                           slot's electrode offset); no sample is used
//   rounds 1 .. win_len-1   fine DC-servo step; samples go to the FEE in
//                           inference mode (fee_first in round 1, fee_last in
//                           round win_len-1, so features finish and the
//                           classifier MACs them during the last 64 samples)
// win_done pulses DONE_LAT clocks after the last sample of a window, when the
// last feature has passed the FEE, so the classifier can decide.
// Channel addressing of the current slot:
//   training : addr_col = slot[3:0], addr_row = slot[5:4] (inside each group
//              of four rows; every AFE module sees its own 64 channels)
//   inference: the slot's channel index of the current tree node, read from
//              the parameter memory (row = ch[7:4], col = ch[3:0])
// AFE module 1 runs whenever `run` is set; modules 2-4 only in training mode.
// train_valid marks ADC words for read-out in training mode (rounds >= 1).
// From the paper: coarse step in the first sampling period of every window,
// fine step for the rest, NeuralTree in the last 64 cycles, window-by-window
// channel selection, auxiliary modules disabled in inference. The counters,
// latencies and signal names are this design's.
module system_ctrl
  import nt_pkg::*;
#(
  parameter int unsigned N_SLOTS  = 64,
  parameter int unsigned DONE_LAT = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  cfg_t                       cfg,
  input  logic                       ce_smp,
  output logic [$clog2(N_SLOTS)-1:0] slot,
  output logic [11:0]                round,
  output logic                       coarse,
  input  slot_cfg_t                  slot_cfg,    // channel/code of (node, slot)
  output logic [3:0]                 addr_row,
  output logic [3:0]                 addr_col,
  output logic [3:0]                 afe_en,
  output logic                       fee_valid,
  output logic                       fee_first,
  output logic                       fee_last,
  output logic                       win_done,
  output logic                       train_valid
);
  logic [DONE_LAT-1:0] done_sr;
  logic end_of_win;

  always_comb begin
    coarse     = cfg.run && round == '0;
    end_of_win = ce_smp && slot == $clog2(N_SLOTS)'(N_SLOTS - 1) && round >= cfg.win_len - 12'd1;
    fee_valid  = cfg.run && cfg.infer && ce_smp && round != '0;
    fee_first  = round == 12'd1;
    fee_last   = round >= cfg.win_len - 12'd1;
    train_valid = cfg.run && !cfg.infer && ce_smp && round != '0;
    win_done   = done_sr[DONE_LAT-1];
    afe_en     = cfg.run ? (cfg.infer ? 4'b0001 : 4'b1111) : 4'b0000;
    if (cfg.infer) begin
      addr_row = slot_cfg.ch[7:4];
      addr_col = slot_cfg.ch[3:0];
    end else begin
      addr_row = {2'b00, slot[5:4]};
      addr_col = slot[3:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot <= '0; round <= '0; done_sr <= '0;
    end else begin
      done_sr <= {done_sr[DONE_LAT-2:0], cfg.run && cfg.infer && end_of_win};
      if (!cfg.run) begin
        slot <= '0; round <= '0;
      end else if (ce_smp) begin
        slot <= slot + 1'b1;
        if (slot == $clog2(N_SLOTS)'(N_SLOTS - 1))
          round <= end_of_win ? '0 : round + 12'd1;
      end
    end
  end
endmodule
