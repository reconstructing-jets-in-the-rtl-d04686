// jet_axis: forms a jet from its constituents (step 3 of the algorithm).
//
// The jet pT is the sum of the constituent pT; the jet eta and phi are the
// pT-weighted means of the constituents' eta and phi. The means are taken of
// the offsets from the seed (phi offset wrapped around 2*pi) and added back
// to the seed position, so a cone that straddles phi = +-pi averages
// correctly; the result phi is wrapped into -720..719 again. Division
// truncates towards zero.
//
// Pipeline, AX_LAT = 4 cycles, a new jet every cycle (II = 1):
//   1 pT*deta, pT*dphi for every list entry (zero for non-constituents)
//   2 partial sums over groups of 16      3 totals
//   4 divide and add the seed position
// Interface: in_cons holds the constituents in place (other entries null),
// in_seed the seed, in_tag/in_jet_valid/in_last travel alongside; out_pt is
// the raw, uncorrected pT sum at full width (PT_W + log2(N) bits).
//
// From the paper: sum of pT and pT-weighted average of eta and phi, II = 1.
// This design's choices: seed-relative averaging, truncating division, the
// split into 4 stages (the paper's 'sum pT, axis' takes about 45 ns).
module jet_axis
  import sc_pkg::*;
#(
  parameter int N = NPART
) (
  input  logic      clk,
  input  logic      rst,
  input  particle_t in_cons [N],
  input  particle_t in_seed,
  input  pass_tag_t in_tag,
  input  logic      in_jet_valid,
  input  logic      in_last,
  output logic [PT_W+$clog2(N)-1:0] out_pt,
  output eta_t      out_eta,
  output phi_t      out_phi,
  output pass_tag_t out_tag,
  output logic      out_jet_valid,
  output logic      out_last
);

  localparam int DW  = PHI_W + 2;               // offset width
  localparam int PRW = PT_W + DW;               // product width (signed)
  localparam int GS  = 16;                      // group size for partial sums
  localparam int NGR = (N + GS - 1) / GS;
  localparam int SPW = PT_W + $clog2(N);        // pT sum width
  localparam int SXW = PRW + $clog2(N);         // weighted sum width (signed)

  typedef struct packed {
    pass_tag_t tag;
    logic      jv;
    logic      last;
    eta_t      seta;
    phi_t      sphi;
  } side_t;

  side_t side1, side2, side3;

  // ---- stage 1: weighted offsets ----
  logic        [PT_W-1:0] pt1 [N];
  logic signed [PRW-1:0]  we1 [N];
  logic signed [PRW-1:0]  wp1 [N];

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      logic signed [DW-1:0] de, dp;
      de = DW'(signed'(in_cons[i].eta)) - DW'(signed'(in_seed.eta));
      dp = dphi_wrap(in_cons[i].phi, in_seed.phi);
      pt1[i] <= in_cons[i].pt;
      we1[i] <= signed'({1'b0, in_cons[i].pt}) * de;
      wp1[i] <= signed'({1'b0, in_cons[i].pt}) * dp;
    end
    side1 <= '{tag: in_tag, jv: in_jet_valid, last: in_last,
               seta: in_seed.eta, sphi: in_seed.phi};
    if (rst) side1.tag.valid <= 1'b0;
  end

  // ---- stage 2: partial sums ----
  logic        [SPW-1:0] ps2 [NGR];
  logic signed [SXW-1:0] es2 [NGR];
  logic signed [SXW-1:0] fs2 [NGR];

  always_ff @(posedge clk) begin
    for (int g = 0; g < NGR; g++) begin
      logic        [SPW-1:0] a;
      logic signed [SXW-1:0] b, c;
      a = '0; b = '0; c = '0;
      for (int k = 0; k < GS; k++) begin
        if (g * GS + k < N) begin
          a = a + SPW'(pt1[g*GS+k]);
          b = b + SXW'(we1[g*GS+k]);
          c = c + SXW'(wp1[g*GS+k]);
        end
      end
      ps2[g] <= a;
      es2[g] <= b;
      fs2[g] <= c;
    end
    side2 <= side1;
    if (rst) side2.tag.valid <= 1'b0;
  end

  // ---- stage 3: totals ----
  logic        [SPW-1:0] ps3;
  logic signed [SXW-1:0] es3, fs3;

  always_ff @(posedge clk) begin
    logic        [SPW-1:0] a;
    logic signed [SXW-1:0] b, c;
    a = '0; b = '0; c = '0;
    for (int g = 0; g < NGR; g++) begin
      a = a + ps2[g];
      b = b + es2[g];
      c = c + fs2[g];
    end
    ps3   <= a;
    es3   <= b;
    fs3   <= c;
    side3 <= side2;
    if (rst) side3.tag.valid <= 1'b0;
  end

  // ---- stage 4: divide, add the seed position ----
  always_ff @(posedge clk) begin
    logic signed [SXW-1:0] den, qe, qp;
    logic signed [DW:0]    phi_abs;
    den = (ps3 == '0) ? SXW'(1) : SXW'(ps3);
    qe  = es3 / den;
    qp  = fs3 / den;
    phi_abs = (DW+1)'(signed'(side3.sphi)) + (DW+1)'(qp);
    if (phi_abs >= (DW+1)'(PHI_PI))       phi_abs = phi_abs - (DW+1)'(PHI_2PI);
    else if (phi_abs < -(DW+1)'(PHI_PI))  phi_abs = phi_abs + (DW+1)'(PHI_2PI);
    out_pt        <= ps3;
    out_eta       <= ETA_W'(SXW'(signed'(side3.seta)) + qe);
    out_phi       <= PHI_W'(phi_abs);
    out_tag       <= side3.tag;
    out_jet_valid <= side3.tag.valid && side3.jv;
    out_last      <= side3.tag.valid && side3.last;
    if (rst) begin
      out_tag.valid <= 1'b0;
      out_jet_valid <= 1'b0;
      out_last      <= 1'b0;
    end
  end

endmodule
