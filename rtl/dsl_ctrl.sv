// dsl_ctrl: digital half of the two-step (coarse/fine) mixed-signal DC servo
// loop of one 64-channel TDM AFE module.
//
// Coarse step (coarse = 1, first round of a feature-extraction window): in
// every slot a 9-bit successive-approximation search drives the CDAC. On each
// phi_comp strobe the comparator bit (comp_in = 1: LNA output positive, the
// DAC is still below the electrode offset) keeps or clears the bit under test,
// MSB first. After nine compares the code is the electrode DC offset (EDO) of
// that channel and is written to a 64 x 9-bit memory; the slot's integrator
// is cleared.
// Fine step (coarse = 0): at the end of each slot (ce_smp) the signed ADC word
// is added to the slot's 19-bit integrator (saturating). The feedback word is
// the stored EDO placed on the 9 MSBs of a 19-bit word plus the integrator
// output shifted right by dsl_shift. A first-order delta-sigma modulator turns
// that 19-bit word into a 9-bit CDAC code at every 6.4 MHz tick, so the Gm-C
// integrator averages 50 codes per sample (OSR 50). The modulator residue is
// cleared at each slot start.
// The CDAC code leaves as offset binary and as the segmented form the CDAC
// uses: 6 MSBs thermometer-coded on 63 unary elements, 3 LSBs binary.
// From the paper: the SAR search, the 64x9b memory, the 19-bit integrator,
// the EDO added on the 9 MSBs, the delta-sigma modulator, the MUX, the
// 6b unary + 3b binary split, OSR 50 and the shift. This design's own: the
// first-order modulator, offset-binary codes, per-slot residue reset and
// integrator saturation.
module dsl_ctrl
  import nt_pkg::*;
#(
  parameter int unsigned N_SLOTS = 64,
  parameter int unsigned EDO_W   = 9,
  parameter int unsigned INT_W   = 19,
  parameter int unsigned ADC_W   = 10
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 coarse,
  input  logic [$clog2(N_SLOTS)-1:0] slot,
  input  logic                 slot_start,
  input  logic                 phi_comp,
  input  logic                 ce_smp,
  input  logic                 comp_in,
  input  logic [ADC_W-1:0]     adc_data,    // offset binary
  input  logic [3:0]           dsl_shift,
  output logic [EDO_W-1:0]     dac_code,    // offset binary
  output logic [62:0]          cdac_unary,
  output logic [2:0]           cdac_bin,
  output logic                 edo_wr,      // pulses when an EDO code is stored
  output logic [EDO_W-1:0]     edo_code
);
  localparam int unsigned FR = INT_W - EDO_W;   // 10 fractional bits

  logic [EDO_W-1:0]        edo_mem [N_SLOTS];
  logic signed [INT_W-1:0] integ   [N_SLOTS];
  logic [EDO_W-1:0]        sar_code;
  logic [3:0]              sar_bit;
  logic                    sar_busy;
  logic [FR-1:0]           dsm_err;
  logic [EDO_W-1:0]        dsm_code;            // offset binary

  // feedback word of the current slot
  logic signed [INT_W:0]   fb;
  logic signed [INT_W+1:0] dsm_sum;
  logic signed [EDO_W:0]   dsm_q;
  logic signed [INT_W:0]   int_next;
  logic signed [ADC_W:0]   adc_s;

  always_comb begin
    logic signed [EDO_W-1:0] edo_s;
    edo_s   = $signed(edo_mem[slot] ^ (EDO_W'(1) << (EDO_W - 1)));
    fb      = (INT_W+1)'($signed({edo_s, {FR{1'b0}}})) + (INT_W+1)'(integ[slot] >>> dsl_shift);
    dsm_sum = (INT_W+2)'(fb) + (INT_W+2)'($signed({1'b0, dsm_err}));
    dsm_q   = (EDO_W+1)'(dsm_sum >>> FR);
    adc_s   = $signed({1'b0, adc_data}) - $signed((ADC_W+1)'(1) << (ADC_W - 1));
    int_next = (INT_W+1)'(integ[slot]) + (INT_W+1)'(adc_s);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sar_code <= EDO_W'(1) << (EDO_W - 1);
      sar_bit  <= 4'(EDO_W - 1);
      sar_busy <= 1'b0;
      dsm_err  <= '0;
      dsm_code <= EDO_W'(1) << (EDO_W - 1);
      edo_wr   <= 1'b0;
      edo_code <= '0;
      for (int i = 0; i < int'(N_SLOTS); i++) begin
        edo_mem[i] <= EDO_W'(1) << (EDO_W - 1);
        integ[i]   <= '0;
      end
    end else begin
      edo_wr <= 1'b0;
      if (en && coarse) begin
        if (slot_start) begin
          sar_code <= EDO_W'(1) << (EDO_W - 1);
          sar_bit  <= 4'(EDO_W - 1);
          sar_busy <= 1'b1;
          integ[slot] <= '0;
        end else if (phi_comp && sar_busy) begin
          logic [EDO_W-1:0] c;
          c = sar_code;
          if (!comp_in) c[sar_bit] = 1'b0;
          if (sar_bit == 0) begin
            sar_busy      <= 1'b0;
            edo_mem[slot] <= c;
            edo_wr        <= 1'b1;
            edo_code      <= c;
          end else begin
            c[sar_bit - 1] = 1'b1;
            sar_bit <= sar_bit - 4'd1;
          end
          sar_code <= c;
        end
      end else if (en) begin
        // fine loop
        if (slot_start) begin
          dsm_err <= '0;
        end
        begin
          logic signed [EDO_W:0] q;
          logic signed [INT_W+1:0] s;
          s = slot_start ? (INT_W+2)'(fb) : dsm_sum;
          q = (EDO_W+1)'(s >>> FR);
          dsm_err <= slot_start ? FR'(fb) : FR'(dsm_sum);
          // saturate to the 9-bit signed range
          if (q > $signed((EDO_W+1)'((1 << (EDO_W - 1)) - 1)))
            dsm_code <= {1'b1, {(EDO_W-1){1'b1}}};
          else if (q < -$signed((EDO_W+1)'(1 << (EDO_W - 1))))
            dsm_code <= '0;
          else
            dsm_code <= EDO_W'(q) ^ (EDO_W'(1) << (EDO_W - 1));
        end
        if (ce_smp) begin
          if (int_next > $signed((INT_W+1)'((1 << (INT_W - 1)) - 1)))
            integ[slot] <= {1'b0, {(INT_W-1){1'b1}}};
          else if (int_next < -$signed((INT_W+1)'(1 << (INT_W - 1))))
            integ[slot] <= {1'b1, {(INT_W-1){1'b0}}};
          else
            integ[slot] <= INT_W'(int_next);
        end
      end
    end
  end

  // MUX: coarse search or delta-sigma code, then binary-to-unary encoding
  always_comb begin
    dac_code = coarse ? sar_code : dsm_code;
    for (int i = 0; i < 63; i++)
      cdac_unary[i] = 32'(dac_code[EDO_W-1:3]) > i;
    cdac_bin = dac_code[2:0];
  end
endmodule
