// seed_cone_loop: one iteration of the seeded-cone jet search, as an
// 8-stage pipeline that accepts a new particle list on every cycle.
//
// For the list that enters, it finds the seed (the particle of highest pT),
// marks every non-null particle whose distance to the seed satisfies
// deta^2 + dphi^2 <= R^2 (phi difference wrapped around 2*pi) as a
// constituent, and splits the list into the constituents and the remainder
// (constituent pT set to zero, i.e. removed). These are steps 1, 2 and 5 of
// the algorithm: the path that carries the dependence from one jet to the
// next. The radius is taken per pass from the tag (R^2 in its r2 field).
//
// Stages (one register each, LOOP_LAT = 8 cycles from in_* to out_*):
//   1 best of each group of 8 particles   2 best of the 16 group winners
//   3 read the seed                        4 deta, dphi for every particle
//   5 squares                              6 sum and compare with R^2
//   7 split into constituents/remainder    8 end-of-pass decision
// out_last is set when this pass ends the event's search for this radius:
// no seed was found, the iteration was the 16th, or nothing is left. The
// remainder of a pass that is not last goes back to the loop input.
// out_jet_valid says the pass found a seed, so out_seed/out_cons form a jet.
//
// From the paper: the three steps, II = 1, an 8-cycle iteration, up to 16
// iterations, radii 0.4/0.8. This design's choices: how the 8 stages are
// split, ties in pT going to the lower list index, the <= in the cone test
// and the early stop when the remainder is empty.
module seed_cone_loop
  import sc_pkg::*;
#(
  parameter int N = NPART
) (
  input  logic      clk,
  input  logic      rst,
  input  particle_t in_list [N],
  input  pass_tag_t in_tag,
  output particle_t out_rem  [N],
  output particle_t out_cons [N],
  output particle_t out_seed,
  output pass_tag_t out_tag,
  output logic      out_last,
  output logic      out_jet_valid
);

  localparam int G  = 8;                 // particles per first-level group
  localparam int NG = (N + G - 1) / G;   // groups
  localparam int IW = $clog2(N);
  localparam int DW = PHI_W + 2;         // width of eta/phi differences
  localparam int SW = 2 * DW;            // width of a square

  // The stage split below is fixed; the package constant must agree with it.
  if (LOOP_LAT != 8) begin : g_lat_check
    $error("seed_cone_loop: the pipeline has 8 stages, LOOP_LAT must be 8");
  end

  // ---------------- stage 1: group maxima ----------------
  particle_t        l1 [N];
  pass_tag_t        t1;
  pt_t              g1_pt  [NG];
  logic [IW-1:0]    g1_idx [NG];

  always_ff @(posedge clk) begin
    for (int g = 0; g < NG; g++) begin
      pt_t           bp;
      logic [IW-1:0] bi;
      bp = '0;
      bi = IW'(g * G);
      for (int k = 0; k < G; k++) begin
        if (g * G + k < N) begin
          if (in_list[g*G+k].pt > bp) begin
            bp = in_list[g*G+k].pt;
            bi = IW'(g * G + k);
          end
        end
      end
      g1_pt[g]  <= bp;
      g1_idx[g] <= bi;
    end
    l1 <= in_list;
    t1 <= in_tag;
    if (rst) t1.valid <= 1'b0;
  end

  // ---------------- stage 2: overall maximum ----------------
  particle_t        l2 [N];
  pass_tag_t        t2;
  pt_t              s2_pt;
  logic [IW-1:0]    s2_idx;

  always_ff @(posedge clk) begin
    pt_t           bp;
    logic [IW-1:0] bi;
    bp = '0;
    bi = '0;
    for (int g = 0; g < NG; g++) begin
      if (g1_pt[g] > bp) begin
        bp = g1_pt[g];
        bi = g1_idx[g];
      end
    end
    s2_pt  <= bp;
    s2_idx <= bi;
    l2     <= l1;
    t2     <= t1;
    if (rst) t2.valid <= 1'b0;
  end

  // ---------------- stage 3: read the seed ----------------
  particle_t        l3 [N];
  pass_tag_t        t3;
  particle_t        seed3;
  logic             has3;

  always_ff @(posedge clk) begin
    seed3 <= l2[s2_idx];
    has3  <= (s2_pt != '0);
    l3    <= l2;
    t3    <= t2;
    if (rst) t3.valid <= 1'b0;
  end

  // ---------------- stage 4: differences ----------------
  particle_t               l4 [N];
  pass_tag_t               t4;
  particle_t               seed4;
  logic                    has4;
  logic signed [DW-1:0]    de4 [N];
  logic signed [DW-1:0]    dp4 [N];

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      de4[i] <= DW'(signed'(l3[i].eta)) - DW'(signed'(seed3.eta));
      dp4[i] <= dphi_wrap(l3[i].phi, seed3.phi);
    end
    l4    <= l3;
    t4    <= t3;
    if (rst) t4.valid <= 1'b0;
    seed4 <= seed3;
    has4  <= has3;
  end

  // ---------------- stage 5: squares ----------------
  particle_t               l5 [N];
  pass_tag_t               t5;
  particle_t               seed5;
  logic                    has5;
  logic [SW-1:0]           de2 [N];
  logic [SW-1:0]           dp2 [N];

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      de2[i] <= unsigned'(SW'(de4[i]) * SW'(de4[i]));
      dp2[i] <= unsigned'(SW'(dp4[i]) * SW'(dp4[i]));
    end
    l5    <= l4;
    t5    <= t4;
    if (rst) t5.valid <= 1'b0;
    seed5 <= seed4;
    has5  <= has4;
  end

  // ---------------- stage 6: cone test ----------------
  particle_t               l6 [N];
  pass_tag_t               t6;
  particle_t               seed6;
  logic                    has6;
  logic [N-1:0]            in6;

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++)
      in6[i] <= (l5[i].pt != '0) &&
                ((SW+1)'(de2[i]) + (SW+1)'(dp2[i]) <= (SW+1)'(t5.r2));
    l6    <= l5;
    t6    <= t5;
    if (rst) t6.valid <= 1'b0;
    seed6 <= seed5;
    has6  <= has5;
  end

  // ---------------- stage 7: split ----------------
  particle_t               rem7  [N];
  particle_t               cons7 [N];
  pass_tag_t               t7;
  particle_t               seed7;
  logic                    has7;
  logic                    left7;

  always_ff @(posedge clk) begin
    logic any;
    any = 1'b0;
    for (int i = 0; i < N; i++) begin
      if (in6[i]) begin
        cons7[i] <= l6[i];
        rem7[i]  <= '0;
      end else begin
        cons7[i] <= '0;
        rem7[i]  <= l6[i];
        any = any | (l6[i].pt != '0);
      end
    end
    left7 <= any;
    t7    <= t6;
    if (rst) t7.valid <= 1'b0;
    seed7 <= seed6;
    has7  <= has6;
  end

  // ---------------- stage 8: end-of-pass decision ----------------
  always_ff @(posedge clk) begin
    out_rem       <= rem7;
    out_cons      <= cons7;
    out_seed      <= seed7;
    out_jet_valid <= t7.valid && has7;
    out_last      <= t7.valid && (!has7 || !left7 || (t7.iter == ITER_W'(MAX_JETS - 1)));
    out_tag       <= t7;
    if (rst) begin
      out_tag.valid <= 1'b0;
      out_jet_valid <= 1'b0;
      out_last      <= 1'b0;
    end
  end

endmodule
