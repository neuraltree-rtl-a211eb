// phase_fe: TDM extractor of phase-locking value (PLV) and phase-amplitude
// coupling (PAC) from band-limited analytic signals (re, im).
//
// Per sample:
//   amplitude  A = max(|re|, |im|)                 (l-inf norm)
//   phase      the octant ratio x = min/max (|re|,|im|) is formed with a
//              ratio_calc; atan(x) ~ (pi/4) x (linear approximation) plus a
//              32-entry correction LUT 0.273 x (1-x); octant and quadrant
//              folding give theta in units of 2*pi/2^PH_W.
//   z^-1       the phase of the previous sample (the even slot of the pair)
//   PLV        phi = theta - theta[-1]  (cross-channel phase difference)
//   PAC        phi = theta[-1] (low-band phase), weight A (high-band amplitude)
//   sin/cos    256-entry LUT, signed 8 bit
// Slots 2k and 2k+1 form pair k; the odd slot updates the pair's two
// accumulators (x32) with A*sin/A*cos (PAC) or sin/cos (PLV). On `last` the
// odd slot emits the l-inf magnitude max(|S|,|C|) scaled by 2^-feat_shift
// and saturated to 16 bits; the even slot emits 0. feat_valid follows
// `valid && last` by one tick.
// The sine table uses Bhaskara's rational approximation of sin and the
// correction table the formula above; both are computed at elaboration.
// From the paper: LAA phase with LUT correction, l-inf amplitude, z^-1 and
// subtractor, PAC/PLV muxes, sin/cos LUT, two multipliers, 32 accumulator
// pairs and l-inf magnitude (Fig. 10(b)). This design's own: the ratio used
// inside the LAA, table sizes, widths and slot pairing.
module phase_fe
  import nt_pkg::*;
#(
  parameter int unsigned N_SLOTS = 64,
  parameter int unsigned DATA_W  = 16,
  parameter int unsigned PH_W    = 10,
  parameter int unsigned ACC_W   = 40,
  parameter int unsigned FEAT_W  = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        valid,
  input  logic                        first,
  input  logic                        last,
  input  logic [$clog2(N_SLOTS)-1:0]  slot,
  input  feat_e                       code,
  input  logic signed [DATA_W-1:0]    re,
  input  logic signed [DATA_W-1:0]    im,
  input  logic [4:0]                  feat_shift,
  output logic                        feat_valid,
  output logic [$clog2(N_SLOTS)-1:0]  feat_slot,
  output logic signed [FEAT_W-1:0]    feat,
  output logic [PH_W-1:0]             theta_dbg
);
  localparam int unsigned N_PAIRS = N_SLOTS / 2;
  localparam logic signed [ACC_W-1:0] FMAX = ACC_W'((1 << (FEAT_W - 1)) - 1);

  function automatic logic signed [7:0] sin_entry(input int unsigned idx);
    longint u, num, den, v;
    u   = longint'(idx % 128);
    num = 4 * u * (128 - u);
    den = 20480 - u * (128 - u);
    v   = (127 * num + den / 2) / den;
    return (idx >= 128) ? -8'(v) : 8'(v);
  endfunction

  function automatic logic [3:0] corr_entry(input int unsigned i);
    longint a;
    a = longint'(2 * i + 1) * longint'(63 - 2 * i);
    return 4'((4449 * a * (1 << PH_W) / 1024 + 204800) / 409600);
  endfunction

  logic signed [7:0] sin_lut [256];
  logic [3:0]        corr_lut [32];
  always_comb begin
    for (int unsigned i = 0; i < 256; i++) sin_lut[i] = sin_entry(i);
    for (int unsigned i = 0; i < 32; i++)  corr_lut[i] = corr_entry(i);
  end

  logic signed [ACC_W-1:0] acc_s [N_PAIRS];
  logic signed [ACC_W-1:0] acc_c [N_PAIRS];
  logic [PH_W-1:0]         theta_q;

  logic [DATA_W-1:0] ax, ay, amp, mn, mx;
  logic [8:0]        xr;
  logic [PH_W-1:0]   th_oct, th, phi;
  logic signed [7:0] sv, cv;
  logic signed [ACC_W-1:0] ts, tc, ns, nc, ms, mc, mag;

  ratio_calc #(.NW(DATA_W), .DW(DATA_W), .R(6), .Q(8), .OUT_W(9)) u_ratio (
    .numer(mn), .denom(mx), .ratio(xr));

  // Magnitudes and the octant ratio operands (kept apart from the block
  // below so that the divider sits between two separate processes).
  always_comb begin
    ax  = re[DATA_W-1] ? DATA_W'(-re) : DATA_W'(re);
    ay  = im[DATA_W-1] ? DATA_W'(-im) : DATA_W'(im);
    amp = (ax > ay) ? ax : ay;
    mn  = (ay <= ax) ? ay : ax;
    mx  = (ay <= ax) ? ax : ay;
  end

  always_comb begin
    logic [8:0] xq;
    xq  = (xr > 9'd256) ? 9'd256 : xr;
    // linear arctangent plus correction, first octant, 2*pi = 2^PH_W
    th_oct = PH_W'((32'(xq) << (PH_W - 3)) >> 8) + PH_W'(corr_lut[xq[7:3]]);
    if (xq == 9'd256) th_oct = PH_W'(1 << (PH_W - 3));
    th = (ay > ax) ? PH_W'((1 << (PH_W - 2))) - th_oct : th_oct;   // octant
    if (re < 0) th = PH_W'(1 << (PH_W - 1)) - th;                    // quadrant II/III
    if (im < 0) th = -th;                                            // lower half
    phi = (code == F_PLV) ? th - theta_q : theta_q;
    sv  = sin_lut[phi[PH_W-1 -: 8]];
    cv  = sin_lut[8'(phi[PH_W-1 -: 8] + 8'd64)];
    if (code == F_PAC) begin
      ts = ACC_W'($signed({1'b0, amp})) * ACC_W'(sv);
      tc = ACC_W'($signed({1'b0, amp})) * ACC_W'(cv);
    end else begin
      ts = ACC_W'(sv);
      tc = ACC_W'(cv);
    end
    ns = (first ? '0 : acc_s[slot[$clog2(N_SLOTS)-1:1]]) + ts;
    nc = (first ? '0 : acc_c[slot[$clog2(N_SLOTS)-1:1]]) + tc;
    ms = ns < 0 ? -ns : ns;
    mc = nc < 0 ? -nc : nc;
    mag = ((ms > mc) ? ms : mc) >>> feat_shift;
  end

  assign theta_dbg = th;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      feat_valid <= 1'b0;
      feat_slot  <= '0;
      feat       <= '0;
      theta_q    <= '0;
      for (int i = 0; i < int'(N_PAIRS); i++) begin acc_s[i] <= '0; acc_c[i] <= '0; end
    end else begin
      feat_valid <= valid && last;
      if (valid) begin
        theta_q <= th;
        if (slot[0]) begin
          acc_s[slot[$clog2(N_SLOTS)-1:1]] <= ns;
          acc_c[slot[$clog2(N_SLOTS)-1:1]] <= nc;
        end
        if (last) begin
          feat_slot <= slot;
          feat <= !slot[0] ? '0 : (mag > FMAX ? FEAT_W'(FMAX) : FEAT_W'(mag));
        end
      end
    end
  end
endmodule
