// jet_corrections: jet energy correction (JEC), step 4 of the algorithm.
//
// The raw jet pT is multiplied by a factor read from a table binned in |eta|
// and raw pT, and the product is saturated to the PT_W-bit jet pT.
//   eta bin = min(|eta| >> ETA_SHIFT, NETA-1)   (128 codes = 0.56 in eta)
//   pT bin  = min(pT_raw >> PT_SHIFT, NPTB-1)   (32 codes  = 8 GeV)
//   factor  = unsigned, FRAC fractional bits (1.0 = 2^FRAC = 512)
//   pT_corr = min((pT_raw * factor) >> FRAC, 2^PT_W - 1)
// The table is a register array, set to 1.0 everywhere by reset and written
// through the cfg_* port (address = eta bin * NPTB + pT bin), so the factors
// derived offline can be loaded at run time.
//
// Timing: LAT = 2 cycles (table read, then multiply), one jet per cycle. The
// tag, jet-valid and last flags travel alongside unchanged.
//
// From the paper: a table of correction factors in bins of eta and pT,
// applied to the jet pT. The paper gives neither the binning nor the factors;
// the bin counts, bin widths, factor format and the writable table are this
// design's choices.
module jet_corrections
  import sc_pkg::*;
#(
  parameter int RAW_W     = PT_W + 7,
  parameter int NETA      = 8,
  parameter int NPTB      = 16,
  parameter int ETA_SHIFT = 7,
  parameter int PT_SHIFT  = 5,
  parameter int FW        = 12,
  parameter int FRAC      = 9
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              cfg_we,
  input  logic [$clog2(NETA*NPTB)-1:0] cfg_addr,
  input  logic [FW-1:0]     cfg_data,
  input  logic [RAW_W-1:0]  in_pt,
  input  eta_t              in_eta,
  input  phi_t              in_phi,
  input  pass_tag_t         in_tag,
  input  logic              in_jet_valid,
  input  logic              in_last,
  output jet_t              out_jet,
  output pass_tag_t         out_tag,
  output logic              out_jet_valid,
  output logic              out_last
);

  localparam int NT = NETA * NPTB;
  localparam int AW = $clog2(NT);

  logic [FW-1:0] table_q [NT];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < NT; k++) table_q[k] <= FW'(1 << FRAC);
    end else if (cfg_we) begin
      table_q[cfg_addr] <= cfg_data;
    end
  end

  // ---- stage 1: bin and read the factor ----
  logic [ETA_W-1:0] aeta;
  logic [AW-1:0]    addr;

  always_comb begin
    logic [ETA_W-1:0] eb;
    logic [RAW_W-1:0] pb;
    aeta = in_eta[ETA_W-1] ? ETA_W'(-in_eta) : ETA_W'(in_eta);
    eb   = aeta >> ETA_SHIFT;
    pb   = in_pt >> PT_SHIFT;
    if (eb > ETA_W'(NETA - 1)) eb = ETA_W'(NETA - 1);
    if (pb > RAW_W'(NPTB - 1)) pb = RAW_W'(NPTB - 1);
    addr = AW'(eb * ETA_W'(NPTB)) + AW'(pb);
  end

  logic [FW-1:0]    f1;
  logic [RAW_W-1:0] pt1;
  eta_t             eta1;
  phi_t             phi1;
  pass_tag_t        tag1;
  logic             jv1, last1;

  always_ff @(posedge clk) begin
    f1    <= table_q[addr];
    pt1   <= in_pt;
    eta1  <= in_eta;
    phi1  <= in_phi;
    tag1  <= in_tag;
    jv1   <= in_jet_valid;
    last1 <= in_last;
    if (rst) begin
      tag1.valid <= 1'b0;
      jv1        <= 1'b0;
      last1      <= 1'b0;
    end
  end

  // ---- stage 2: multiply and saturate ----
  always_ff @(posedge clk) begin
    logic [RAW_W+FW-1:0] prod;
    logic [RAW_W+FW-1:0] shifted;
    prod    = (RAW_W+FW)'(pt1) * (RAW_W+FW)'(f1);
    shifted = prod >> FRAC;
    out_jet.pt    <= (shifted > (RAW_W+FW)'({PT_W{1'b1}})) ? {PT_W{1'b1}} : PT_W'(shifted);
    out_jet.eta   <= eta1;
    out_jet.phi   <= phi1;
    out_tag       <= tag1;
    out_jet_valid <= jv1;
    out_last      <= last1;
    if (rst) begin
      out_tag.valid <= 1'b0;
      out_jet_valid <= 1'b0;
      out_last      <= 1'b0;
    end
  end

endmodule
