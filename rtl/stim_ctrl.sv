// stim_ctrl: digital control of the 16-channel biphasic current stimulator
// (four modules of four channels, each module sharing one charge pump).
//
// Timing runs on a 640 kHz enable (one tick every DIV core clocks). While
// `trigger` is high and stimulation is enabled, the channels enabled in
// ch_en receive one biphasic pulse every `period` ticks:
//   ANODIC    pw ticks    pos_h and pos2 closed (current sink through the bridge)
//   CATHODIC  pw ticks    neg_h and neg2 closed (same sink, reversed bridge)
//   CHECK     1 tick      cb1 strobe: the residual-voltage comparators
//                         (res_hi: above +V_SAFE, res_lo: below -V_SAFE) are
//                         latched per channel
//   ACTIVE_CB cb_t ticks  channels with a latched residual get extra current:
//                         en_cbn if above +V_SAFE, en_cbp if below -V_SAFE
//   PASSIVE   pas_t ticks pas closed: both electrodes discharged to ground
//   WAIT      until `period` ticks have passed since the pulse started
// cp_en (the VCO enable of a module's charge pump) is high in a module while
// any of its channels is enabled and the stimulator is active.
// amp is the current-DAC code passed to the analog driver.
// From the paper: biphasic pulses with one current sink for both phases,
// residual check against +/-V_SAFE, active charge balancing followed by
// passive discharge, programmable amplitude, pulse width and rate at
// 640 kHz, one charge pump per four channels, the switch names (Fig. 14(b)).
// This design's own: which switches close in which phase, the polarity of the
// correction, all field widths and the CB/discharge durations.
module stim_ctrl
  import nt_pkg::*;
#(
  parameter int unsigned N_STIM = 16,
  parameter int unsigned DIV    = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  input  logic              trigger,
  input  logic [N_STIM-1:0] ch_en,
  input  logic [7:0]        amp_in,
  input  logic [7:0]        pw,
  input  logic [16:0]       period,
  input  logic [7:0]        cb_t,
  input  logic [7:0]        pas_t,
  input  logic [N_STIM-1:0] res_hi,
  input  logic [N_STIM-1:0] res_lo,
  output logic [N_STIM-1:0] pos_h,
  output logic [N_STIM-1:0] neg_h,
  output logic [N_STIM-1:0] pos2,
  output logic [N_STIM-1:0] neg2,
  output logic [N_STIM-1:0] pas,
  output logic [N_STIM-1:0] en_cbp,
  output logic [N_STIM-1:0] en_cbn,
  output logic              cb1,
  output logic [3:0]        cp_en,
  output logic [7:0]        amp,
  output logic              pulse_start
);
  typedef enum logic [2:0] {S_IDLE, S_ANODIC, S_CATHODIC, S_CHECK, S_ACTIVE_CB, S_PASSIVE, S_WAIT} st_e;
  st_e st;
  logic [$clog2(DIV)-1:0] div;
  logic ce;
  logic [16:0] per_cnt;
  logic [7:0]  ph_cnt;
  logic [N_STIM-1:0] lat_hi, lat_lo, act;

  assign ce = (div == $clog2(DIV)'(DIV - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div <= '0; st <= S_IDLE; per_cnt <= '0; ph_cnt <= '0;
      lat_hi <= '0; lat_lo <= '0; act <= '0; pulse_start <= 1'b0;
    end else begin
      div <= ce ? '0 : div + 1'b1;
      pulse_start <= 1'b0;
      if (ce) begin
        per_cnt <= per_cnt + 17'd1;
        ph_cnt  <= ph_cnt + 8'd1;
        unique case (st)
          S_IDLE, S_WAIT:
            if ((st == S_IDLE || per_cnt + 17'd1 >= period) && enable && trigger && ch_en != '0) begin
              st <= S_ANODIC; act <= ch_en; per_cnt <= '0; ph_cnt <= '0; pulse_start <= 1'b1;
            end else if (st == S_WAIT && per_cnt + 17'd1 >= period) begin
              st <= S_IDLE;
            end
          S_ANODIC:   if (ph_cnt + 8'd1 >= pw) begin st <= S_CATHODIC; ph_cnt <= '0; end
          S_CATHODIC: if (ph_cnt + 8'd1 >= pw) begin st <= S_CHECK; ph_cnt <= '0; end
          S_CHECK: begin
            lat_hi <= res_hi & act;
            lat_lo <= res_lo & act & ~res_hi;
            st <= ((res_hi | res_lo) & act) != '0 ? S_ACTIVE_CB : S_PASSIVE;
            ph_cnt <= '0;
          end
          S_ACTIVE_CB: if (ph_cnt + 8'd1 >= cb_t)  begin st <= S_PASSIVE; ph_cnt <= '0; end
          S_PASSIVE:   if (ph_cnt + 8'd1 >= pas_t) begin st <= S_WAIT; ph_cnt <= '0; lat_hi <= '0; lat_lo <= '0; end
          default: st <= S_IDLE;
        endcase
      end
    end
  end

  always_comb begin
    pos_h  = (st == S_ANODIC)   ? act : '0;
    pos2   = pos_h;
    neg_h  = (st == S_CATHODIC) ? act : '0;
    neg2   = neg_h;
    pas    = (st == S_PASSIVE)  ? act : '0;
    en_cbn = (st == S_ACTIVE_CB) ? lat_hi : '0;
    en_cbp = (st == S_ACTIVE_CB) ? lat_lo : '0;
    cb1    = (st == S_CHECK);
    amp    = amp_in;
    for (int m = 0; m < 4; m++)
      cp_en[m] = enable && (st != S_IDLE) && (act[m*4 +: 4] != '0);
  end

  // The two halves of the bridge are never driven together.
  always @(posedge clk) if (rst_n) assert ((pos_h & neg_h) == '0);
endmodule
