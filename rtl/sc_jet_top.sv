// sc_jet_top: seeded-cone jet finder of one Correlator Layer-2 FPGA.
//
// Data flow (one event every 48 cycles of a 320 MHz clock = 150 ns):
//   in_lanes --> deregionizer --> loop_controller <--> seed_cone_loop
//                                                       |
//                        jet_axis <-- constituents -----+
//                           |
//                     jet_corrections --> jet_sorter x NSORT --> output_link
// The deregionizer packs an event's candidates into one 128-entry list. The
// controller starts two passes per event (R = 0.4 and R = 0.8) in free slots
// of the 8-stage seed/cone loop and sends every unfinished list around again,
// so up to 16 jets per pass are found one per 8 cycles, while several passes
// of different events share the loop. Each found jet (seed + constituents)
// leaves the loop for the axis and correction pipelines, which work in the
// shadow of the next iterations, and is inserted into the sorter of its pass.
// When a pass's last result arrives, its sorter releases its 12 leading jets
// to the output link and becomes free again.
//
// Interface:
//   in_valid/in_last/in_lanes  decoded Layer-1 link words (see deregionizer)
//   jec_we/jec_addr/jec_data   correction-table writes (see jet_corrections)
//   cone_we/cone_sel/cone_r2_data  set R^2 of the first or second pass
//                              (see loop_controller; reset: R = 0.4, 0.8)
//   out_*                      one jet per cycle, 12-word frames per
//                              collection, header = event tag and radius
//   err_*                      sticky overflow flags (never set at rate)
//   stat_*                     one-cycle event markers, for monitoring
// Latency at the default sizes: deregionizer 1 cycle, each loop pass 8
// cycles per jet, jet axis 4, corrections 2, sorter 1, link 1.
//
// The structure (deregionizer, a loop-carried seed/cone iteration shared by
// events and radii through a control module, axis and correction off the
// loop, per-collection sorting, serial output) follows the paper. The clock
// of 320 MHz is inferred from it: 8 cycles per iteration and 400 ns for 16
// iterations. The serial link and the transceivers are not part of this
// module; their decoded data are its ports.
module sc_jet_top
  import sc_pkg::*;
#(
  parameter int NLINKS = 24,
  parameter int N      = NPART
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       in_valid,
  input  logic       in_last,
  input  particle_t  in_lanes [NLINKS],
  input  logic       jec_we,
  input  logic [6:0] jec_addr,
  input  logic [11:0] jec_data,
  input  logic       cone_we,
  input  cone_t      cone_sel,
  input  logic [R2_W-1:0] cone_r2_data,
  output logic       out_valid,
  output logic       out_first,
  output logic       out_last,
  output coll_hdr_t  out_hdr,
  output jet_t       out_jet,
  output logic       err_ctrl_overflow,
  output logic       err_link_overflow,
  output logic       stat_event_in,
  output logic       stat_trunc,
  output logic       stat_recirc,
  output logic       stat_inject,
  output logic       stat_stall_slot,
  output logic       stat_stall_sorter,
  output logic       stat_jet
);

  localparam int RAW_W = PT_W + $clog2(N);

  // ---------------- deregionizer ----------------
  logic       dr_valid, dr_trunc;
  particle_t  dr_list [N];

  deregionizer #(.NLINKS(NLINKS), .NOUT(N)) u_dereg (
    .clk, .rst, .in_valid, .in_last, .in_lanes,
    .out_valid(dr_valid), .out_list(dr_list), .out_count(),
    .out_trunc(dr_trunc)
  );

  // ---------------- loop and its controller ----------------
  particle_t  lp_in_list [N];
  pass_tag_t  lp_in_tag;
  particle_t  lp_rem  [N];
  particle_t  lp_cons [N];
  particle_t  lp_seed;
  pass_tag_t  lp_tag;
  logic       lp_last, lp_jv;
  logic [NSORT-1:0] sorter_release;

  loop_controller #(.N(N), .NS(NSORT)) u_ctrl (
    .clk, .rst,
    .ev_valid(dr_valid), .ev_list(dr_list),
    .ret_list(lp_rem), .ret_tag(lp_tag), .ret_last(lp_last),
    .sorter_release,
    .cfg_r2_we(cone_we), .cfg_r2_sel(cone_sel), .cfg_r2_data(cone_r2_data),
    .loop_list(lp_in_list), .loop_tag(lp_in_tag),
    .err_overflow(err_ctrl_overflow),
    .stat_recirc, .stat_inject, .stat_stall_slot, .stat_stall_sorter
  );

  seed_cone_loop #(.N(N)) u_loop (
    .clk, .rst,
    .in_list(lp_in_list), .in_tag(lp_in_tag),
    .out_rem(lp_rem), .out_cons(lp_cons), .out_seed(lp_seed),
    .out_tag(lp_tag), .out_last(lp_last), .out_jet_valid(lp_jv)
  );

  // ---------------- jet axis and corrections ----------------
  logic [RAW_W-1:0] ax_pt;
  eta_t             ax_eta;
  phi_t             ax_phi;
  pass_tag_t        ax_tag;
  logic             ax_jv, ax_last;

  jet_axis #(.N(N)) u_axis (
    .clk, .rst,
    .in_cons(lp_cons), .in_seed(lp_seed), .in_tag(lp_tag),
    .in_jet_valid(lp_jv), .in_last(lp_last),
    .out_pt(ax_pt), .out_eta(ax_eta), .out_phi(ax_phi),
    .out_tag(ax_tag), .out_jet_valid(ax_jv), .out_last(ax_last)
  );

  jet_t       jc_jet;
  pass_tag_t  jc_tag;
  logic       jc_jv, jc_last;

  jet_corrections #(.RAW_W(RAW_W)) u_jec (
    .clk, .rst,
    .cfg_we(jec_we), .cfg_addr(jec_addr), .cfg_data(jec_data),
    .in_pt(ax_pt), .in_eta(ax_eta), .in_phi(ax_phi),
    .in_tag(ax_tag), .in_jet_valid(ax_jv), .in_last(ax_last),
    .out_jet(jc_jet), .out_tag(jc_tag),
    .out_jet_valid(jc_jv), .out_last(jc_last)
  );

  // ---------------- sorters, one per pass in flight ----------------
  logic [NSORT-1:0] so_valid;
  jet_t             so_jets  [NSORT][NOUT_JETS];
  logic [$clog2(NOUT_JETS+1)-1:0] so_count [NSORT];

  for (genvar s = 0; s < NSORT; s++) begin : g_sort
    logic ins, fl;
    assign ins = jc_jv   && (jc_tag.sorter == SORT_W'(s));
    assign fl  = jc_last && (jc_tag.sorter == SORT_W'(s));
    assign sorter_release[s] = fl;
    jet_sorter #(.DEPTH(NOUT_JETS)) u_sorter (
      .clk, .rst,
      .in_valid(ins), .in_jet(jc_jet), .in_flush(fl),
      .out_valid(so_valid[s]), .out_jets(so_jets[s]), .out_count(so_count[s])
    );
  end

  // At most one pass ends per cycle, so one register remembers whose
  // collection the sorters release in the next cycle.
  logic [SORT_W-1:0] fl_idx;
  logic [EVID_W-1:0] fl_evid;
  cone_t             fl_cone;

  always_ff @(posedge clk) begin
    if (jc_last) begin
      fl_idx  <= jc_tag.sorter;
      fl_evid <= jc_tag.evid;
      fl_cone <= jc_tag.cone;
    end
  end

  logic      ol_valid;
  coll_hdr_t ol_hdr;

  assign ol_valid      = so_valid[fl_idx];
  assign ol_hdr.evid   = fl_evid;
  assign ol_hdr.cone   = fl_cone;
  assign ol_hdr.njets  = so_count[fl_idx];

  output_link #(.NJ(NOUT_JETS), .DEPTH(4)) u_link (
    .clk, .rst,
    .in_valid(ol_valid), .in_hdr(ol_hdr), .in_jets(so_jets[fl_idx]),
    .in_ready(),
    .out_valid, .out_first, .out_last, .out_hdr, .out_jet,
    .err_overflow(err_link_overflow)
  );

  assign stat_event_in = dr_valid;
  assign stat_trunc    = dr_valid && dr_trunc;
  assign stat_jet      = jc_jv;

  // Passes end one at a time, so the sorters never release together.
  assert property (@(posedge clk) disable iff (rst) $onehot0(so_valid))
    else $error("sc_jet_top: two sorters released in one cycle");

endmodule
