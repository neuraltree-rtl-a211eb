// tdm_fir: time-division-multiplexed FIR filter shared by 64 slots, used as a
// 32-tap bandpass filter (BPF) or as BPF followed by a 31-tap Hilbert
// transformer (HT).
//
// Each slot owns a 32-word BPF delay line and a 31-word HT delay line, kept
// as one memory word per slot (read, shifted by one sample, written back). With
// ce_in a new ADC sample of slot `slot` enters its BPF line and the symmetric
// filter output is formed with 16 pre-adders and 16 multipliers:
//     bpf = sum_{k=0}^{15} C_k * (D[n-k] + D[n-31+k])
// one tick later the BPF output enters the slot's HT line and the
// antisymmetric Hilbert output is formed with 15 pre-subtractors:
//     im  = sum_{k=0}^{14} H_k * (E[n-k] - E[n-30+k]),  re = E[n-15]
// (re is the BPF output delayed by the HT group delay, so re/im form the
// analytic signal). Both results are registered; out_valid comes two ticks
// after ce_in. Coefficients are signed Q1.11; results are shifted by 11 and
// saturated to DATA_W bits. `first` clears the slot's delay lines before
// the sample is written (a new channel enters the slot at a window start);
// the memories have no reset, so every slot must start with `first`.
// From the paper: one arithmetic set shared by 64 channels, 32-tap BPF,
// 31-tap HT fed by the BPF output, a data MUX between the two delay lines,
// pre-adders D[n]+D[n-31] .. and multipliers C0..C15 (Fig. 9). This design's
// own: the HT stage has its own 15 multipliers, one pipeline stage after the
// BPF, instead of reusing the BPF array in a second pass; widths and scaling;
// clearing at window start.
module tdm_fir
  import nt_pkg::*;
#(
  parameter int unsigned N_SLOTS = 64,
  parameter int unsigned IN_W    = 10,
  parameter int unsigned DATA_W  = 16,
  parameter int unsigned COEF_W  = 12
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        ce_in,
  input  logic                        first,
  input  logic [$clog2(N_SLOTS)-1:0]  slot,
  input  logic signed [IN_W-1:0]      din,
  input  logic                        ht_en,     // also run the Hilbert stage
  input  logic [15:0][COEF_W-1:0]     bpf_coef,  // C0..C15 of the slot's band
  input  logic [15:0][COEF_W-1:0]     ht_coef,   // H0..H14 (index 15 unused)
  output logic                        out_valid,
  output logic [$clog2(N_SLOTS)-1:0]  out_slot,
  output logic signed [DATA_W-1:0]    bpf_out,
  output logic signed [DATA_W-1:0]    re_out,
  output logic signed [DATA_W-1:0]    im_out
);
  localparam int unsigned ACC_W = DATA_W + COEF_W + 6;
  localparam int unsigned FRAC  = COEF_W - 1;

  // One word per slot holds that slot's whole delay line, so the lines map
  // onto two plain memories (no reset; a slot's first sample clears its line).
  logic [32*IN_W-1:0]   dl_mem [N_SLOTS];
  logic [31*DATA_W-1:0] hl_mem [N_SLOTS];
  logic [$clog2(N_SLOTS)-1:0] slot_q;
  logic [32*IN_W-1:0]   dl_rd;
  logic [31*DATA_W-1:0] hl_rd;
  assign dl_rd = dl_mem[slot];
  assign hl_rd = hl_mem[slot_q];
  logic stage2, ht_q, first_q;
  logic signed [DATA_W-1:0] bpf_q;

  function automatic logic signed [DATA_W-1:0] sat(input logic signed [ACC_W-1:0] a);
    logic signed [ACC_W-1:0] s;
    s = a >>> FRAC;
    if (s > $signed(ACC_W'((1 << (DATA_W - 1)) - 1)))  return {1'b0, {(DATA_W-1){1'b1}}};
    if (s < -$signed(ACC_W'(1 << (DATA_W - 1))))       return {1'b1, {(DATA_W-1){1'b0}}};
    return DATA_W'(s);
  endfunction

  // stage 1: BPF of the incoming sample (delay line including din)
  logic signed [ACC_W-1:0] bpf_acc;
  always_comb begin
    logic signed [IN_W-1:0] d [32];
    d[0] = din;
    for (int k = 1; k < 32; k++) d[k] = first ? '0 : dl_rd[(k-1)*IN_W +: IN_W];
    bpf_acc = '0;
    for (int k = 0; k < 16; k++)
      bpf_acc += ACC_W'($signed(COEF_W'(bpf_coef[k]))) *
                 (ACC_W'(d[k]) + ACC_W'(d[31-k]));
  end

  // stage 2: Hilbert transform of the BPF output
  logic signed [ACC_W-1:0] ht_acc;
  logic signed [DATA_W-1:0] ht_re;
  always_comb begin
    logic signed [DATA_W-1:0] e [31];
    e[0] = bpf_q;
    for (int k = 1; k < 31; k++) e[k] = first_q ? '0 : hl_rd[(k-1)*DATA_W +: DATA_W];
    ht_acc = '0;
    for (int k = 0; k < 15; k++)
      ht_acc += ACC_W'($signed(COEF_W'(ht_coef[k]))) *
                (ACC_W'(e[k]) - ACC_W'(e[30-k]));
    ht_re = e[15];
  end

  // Delay-line memories: shift by one sample when the slot is processed.
  always_ff @(posedge clk) begin
    if (ce_in)
      dl_mem[slot] <= {(first ? {(31*IN_W){1'b0}} : dl_rd[31*IN_W-1:0]), din};
    if (stage2 && ht_q)
      hl_mem[slot_q] <= {(first_q ? {(30*DATA_W){1'b0}} : hl_rd[30*DATA_W-1:0]), bpf_q};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage2 <= 1'b0; ht_q <= 1'b0; first_q <= 1'b0; slot_q <= '0; bpf_q <= '0;
      out_valid <= 1'b0; out_slot <= '0; bpf_out <= '0; re_out <= '0; im_out <= '0;
    end else begin
      stage2    <= ce_in;
      out_valid <= stage2;
      if (ce_in) begin
        bpf_q   <= sat(bpf_acc);
        slot_q  <= slot;
        ht_q    <= ht_en;
        first_q <= first;
      end
      if (stage2) begin
        out_slot <= slot_q;
        bpf_out  <= bpf_q;
        if (ht_q) begin
          re_out <= ht_re;
          im_out <= sat(ht_acc);
        end else begin
          re_out <= '0;
          im_out <= '0;
        end
      end
    end
  end
endmodule
