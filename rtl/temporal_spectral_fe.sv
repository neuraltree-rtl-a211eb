// temporal_spectral_fe: TDM extractor of the temporal and spectral features
// line-length (LL), Hjorth activity/mobility/complexity (ACT/MOB/COM), local
// motor potential (LMP), spectral energy (SE) and HFO ratio (HFO_R).
//
// Each of the 64 slots owns three accumulators and two delay registers:
//   acc1 += |x| (ACT, SE)   or  x (LMP)
//   acc2 += |x - x[-1]|            (first derivative, LL)
//   acc3 += |dx - dx[-1]|          (second derivative)
// `first` marks the first sample of a window (accumulators restart, the
// derivatives of that sample are taken as zero); `last` the final one. On
// `last` the slot's feature is formed from the accumulators, each scaled by
// 2^-feat_shift and saturated to 16 bits (this scaling stands for the 1/N of
// the definitions):
//   LL = a2, ACT = a1, LMP = a1 (signed), SE = a1 (x is then the BPF output)
//   MOB = a2 / a1,  COM = a1*a3 / a2^2     through the shared ratio_calc
//   HFO_R: slots 2k (slow HFO band) and 2k+1 (fast HFO band) each accumulate
//   SE; the odd slot emits a1[2k] / a1[2k+1], the even slot emits 0.
// Ratios are unsigned Q8.8 (saturated to 0x7FFF). feat_valid follows
// `valid && last` by one tick. x must be the sign-extended ADC word for
// temporal codes and the BPF output for SE/HFO_R.
// From the paper: the three accumulator rows with their delay registers,
// absolute values, LMP bypass, the two multipliers, the F_TYPE mux and the
// shared ratio calculator (Fig. 10(a)), and the absolute-value forms of
// ACT/MOB/COM/SE. This design's own: widths, scaling, slot pairing for HFO_R.
module temporal_spectral_fe
  import nt_pkg::*;
#(
  parameter int unsigned N_SLOTS = 64,
  parameter int unsigned DATA_W  = 16,
  parameter int unsigned ACC_W   = 32,
  parameter int unsigned FEAT_W  = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        valid,
  input  logic                        first,
  input  logic                        last,
  input  logic [$clog2(N_SLOTS)-1:0]  slot,
  input  feat_e                       code,
  input  logic signed [DATA_W-1:0]    x,
  input  logic [4:0]                  feat_shift,
  output logic                        feat_valid,
  output logic [$clog2(N_SLOTS)-1:0]  feat_slot,
  output logic signed [FEAT_W-1:0]    feat
);
  localparam logic signed [ACC_W-1:0] FMAX = ACC_W'((1 << (FEAT_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] FMIN = -ACC_W'(1 << (FEAT_W - 1));

  logic signed [ACC_W-1:0]  acc1 [N_SLOTS];
  logic signed [ACC_W-1:0]  acc2 [N_SLOTS];
  logic signed [ACC_W-1:0]  acc3 [N_SLOTS];
  logic signed [DATA_W-1:0] xprev [N_SLOTS];
  logic signed [DATA_W:0]   dprev [N_SLOTS];

  function automatic logic signed [ACC_W-1:0] scale(input logic signed [ACC_W-1:0] a,
                                                     input logic [4:0] sh);
    logic signed [ACC_W-1:0] s;
    s = a >>> sh;
    if (s > FMAX) return FMAX;
    if (s < FMIN) return FMIN;
    return s;
  endfunction

  logic signed [DATA_W:0]   d;
  logic signed [DATA_W+1:0] dd;
  logic signed [ACC_W-1:0]  n1, n2, n3, s1, s2, s3, s1_prev;
  logic [31:0]              r_num, r_den;
  logic [15:0]              r_out;

  always_comb begin
    d  = first ? '0 : (DATA_W+1)'(x) - (DATA_W+1)'(xprev[slot]);
    dd = first ? '0 : (DATA_W+2)'(d) - (DATA_W+2)'(dprev[slot]);
    n1 = (first ? '0 : acc1[slot]) +
         ((code == F_LMP) ? ACC_W'(x) : ACC_W'(x < 0 ? -x : x));
    n2 = (first ? '0 : acc2[slot]) + ACC_W'(d < 0 ? -d : d);
    n3 = (first ? '0 : acc3[slot]) + ACC_W'(dd < 0 ? -dd : dd);
    s1 = scale(n1, feat_shift);
    s2 = scale(n2, feat_shift);
    s3 = scale(n3, feat_shift);
    s1_prev = scale(acc1[slot ^ 1'b1], feat_shift);
    // F_TYPE mux into the ratio calculator
    case (code)
      F_MOB:   begin r_num = 32'(s2);      r_den = 32'(s1);      end
      F_COM:   begin r_num = 32'(s1 * s3); r_den = 32'(s2 * s2); end
      default: begin r_num = 32'(s1_prev); r_den = 32'(s1);      end
    endcase
  end

  ratio_calc #(.NW(32), .DW(32), .R(6), .Q(8), .OUT_W(16)) u_ratio (
    .numer(r_num), .denom(r_den), .ratio(r_out));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      feat_valid <= 1'b0;
      feat_slot  <= '0;
      feat       <= '0;
      for (int i = 0; i < int'(N_SLOTS); i++) begin
        acc1[i] <= '0; acc2[i] <= '0; acc3[i] <= '0; xprev[i] <= '0; dprev[i] <= '0;
      end
    end else begin
      feat_valid <= valid && last;
      if (valid) begin
        acc1[slot]  <= n1;
        acc2[slot]  <= n2;
        acc3[slot]  <= n3;
        xprev[slot] <= x;
        dprev[slot] <= d;
        if (last) begin
          feat_slot <= slot;
          case (code)
            F_LL:    feat <= FEAT_W'(s2);
            F_ACT,
            F_LMP:   feat <= FEAT_W'(s1);
            F_MOB,
            F_COM:   feat <= r_out[15] ? FEAT_W'(FMAX) : FEAT_W'(r_out);
            F_HFOR:  feat <= !slot[0] ? '0 : (r_out[15] ? FEAT_W'(FMAX) : FEAT_W'(r_out));
            default: feat <= code[3] ? FEAT_W'(s1) : '0;
          endcase
        end
      end
    end
  end
endmodule
