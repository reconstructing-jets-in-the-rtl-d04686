// tb_workloads: the jet finder at its default sizes under the three event
// classes whose particle multiplicities the CMS study shows: pileup-only
// events at 200 interactions per crossing (peak near 30 particles), top-pair
// events at the same pileup (peak near 55) and four-top events at 300
// (peak near 115, tail to about 190, beyond the 128-particle list).
//
// Each class is NPER events sent back to back at one event per 48 cycles of
// a 320 MHz clock. The per-lane occupancy of an event is drawn from 0.5 to
// 1.6 times the class mean, which spreads the counts over roughly the range
// of the published spectra. Clusters and soft particles are mixed as in the
// end-to-end test, and the same independent algorithm model checks every
// output word. Reported per class: truncated events, jets found, and the
// worst time from an event's first input word to its first output jet,
// which must stay below 1 us.
module tb_workloads;
  import sc_pkg::*;

  localparam int NL    = 24;
  localparam int N     = NPART;
  localparam int TMUX  = 48;
  localparam int NPER  = 30;
  localparam int NEV   = 3 * NPER;

  logic clk = 1'b0, rst = 1'b1;
  logic in_valid, in_last;
  particle_t in_lanes [NL];
  logic jec_we;
  logic [6:0] jec_addr;
  logic [11:0] jec_data;
  logic cone_we;
  cone_t cone_sel;
  logic [R2_W-1:0] cone_r2_data;
  int r2_cfg [2] = '{8404, 33616};
  logic out_valid, out_first, out_last;
  coll_hdr_t out_hdr;
  jet_t out_jet;
  logic err_ctrl_overflow, err_link_overflow;
  logic stat_event_in, stat_trunc, stat_recirc, stat_inject, stat_stall_slot,
        stat_stall_sorter, stat_jet;

  sc_jet_top dut (.*);

  always #1.5625 clk = ~clk;   // 320 MHz

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  int factor [128];
  int cls_trunc [3] = '{0, 0, 0};
  int cls_part  [3] = '{0, 0, 0};
  int cls_lat   [3] = '{0, 0, 0};
  int cls_jets  [3] = '{0, 0, 0};
  int n_trunc = 0, n_cap16 = 0, n_exhaust = 0, n_empty = 0, n_reorder = 0;

  function automatic int wrap(int d);
    if (d >= 720) d -= 1440;
    if (d < -720) d += 1440;
    return d;
  endfunction

  function automatic int jec(longint raw, int eta);
    int ae, eb, pb;
    longint v;
    ae = (eta < 0) ? -eta : eta;
    eb = ae / 128; if (eb > 7) eb = 7;
    pb = (raw / 32 > 15) ? 15 : int'(raw / 32);
    v  = (raw * factor[eb*16 + pb]) / 512;
    return (v > 65535) ? 65535 : int'(v);
  endfunction

  jet_t exp_jets [256][2][NOUT_JETS];
  int   exp_n    [256][2];
  bit   exp_set  [256][2];
  longint t_first_in [256];

  task automatic model_event(int ev, particle_t flat [$]);
    particle_t l [N];
    for (int i = 0; i < N; i++) l[i] = (i < flat.size()) ? flat[i] : '0;
    if (flat.size() == 0) n_empty++;
    for (int c = 0; c < 2; c++) begin
      particle_t w [N];
      jet_t found [$];
      jet_t sorted [$];
      int r2;
      bit reordered;
      r2 = r2_cfg[c];
      w = l;
      for (int it = 0; it < MAX_JETS; it++) begin
        int best, bi, ae, ap;
        longint sp, se, sf;
        bit left;
        jet_t j;
        best = 0; bi = 0;
        for (int i = 0; i < N; i++) if (int'(w[i].pt) > best) begin best = int'(w[i].pt); bi = i; end
        if (best == 0) break;
        sp = 0; se = 0; sf = 0; left = 0;
        ae = int'(w[bi].eta); ap = int'(w[bi].phi);
        for (int i = 0; i < N; i++) begin
          int de, dp;
          de = int'(w[i].eta) - ae;
          dp = wrap(int'(w[i].phi) - ap);
          if (w[i].pt != 0 && de*de + dp*dp <= r2) begin
            sp += w[i].pt; se += longint'(w[i].pt) * de; sf += longint'(w[i].pt) * dp;
            w[i] = '0;
          end else if (w[i].pt != 0) left = 1;
        end
        j.eta = eta_t'(ae + int'(se / sp));
        j.phi = phi_t'(wrap(ap + int'(sf / sp)));
        j.pt  = pt_t'(jec(sp, int'(j.eta)));
        found.push_back(j);
        if (!left) begin n_exhaust++; break; end
        if (it == MAX_JETS - 1) n_cap16++;
      end
      reordered = 0;
      foreach (found[k]) begin
        int p;
        p = sorted.size();
        for (int q = 0; q < sorted.size(); q++)
          if (sorted[q].pt < found[k].pt) begin p = q; break; end
        if (p != sorted.size()) reordered = 1;
        sorted.insert(p, found[k]);
      end
      if (reordered) n_reorder++;
      for (int q = 0; q < NOUT_JETS; q++)
        exp_jets[ev % 256][c][q] = (q < sorted.size()) ? sorted[q] : '0;
      exp_n[ev % 256][c]   = (sorted.size() > NOUT_JETS) ? NOUT_JETS : sorted.size();
      exp_set[ev % 256][c] = 1;
    end
  endtask

  // ---------------- stimulus ----------------
  function automatic particle_t make_particle(int ncl, int ceta [8], int cphi [8]);
    particle_t p;
    int e, ph, k;
    if (ncl > 0 && ($urandom % 100) < 50) begin
      k  = $urandom % ncl;
      e  = ceta[k] + int'($urandom % 241) - 120;
      ph = wrap(cphi[k] + int'($urandom % 241) - 120);
      p.pt = pt_t'(20 + $urandom % 1500);
    end else begin
      e  = int'($urandom % 2000) - 1000;
      ph = int'($urandom % 1440) - 720;
      p.pt = pt_t'(1 + $urandom % 60);
    end
    p.eta = eta_t'(e);
    p.phi = phi_t'(ph);
    return p;
  endfunction

  task automatic send_event(int ev);
    particle_t flat [$];
    int ceta [8], cphi [8];
    int ncl, prob;
    ncl = $urandom % 9;
    for (int k = 0; k < 8; k++) begin
      ceta[k] = int'($urandom % 1600) - 800;
      cphi[k] = (k == 0) ? 715 : int'($urandom % 1440) - 720;   // one cluster across phi = pi
    end
    // occupancy in lanes per thousand: class mean times 0.5 .. 1.6
    prob = (ev < NPER) ? 26 : (ev < 2 * NPER) ? 48 : 100;
    prob = prob * (50 + int'($urandom % 111)) / 100;
    for (int c = 0; c < TMUX; c++) begin
      @(negedge clk);
      if (c == 0) t_first_in[ev % 256] = cyc;
      in_valid = 1;
      in_last  = (c == TMUX - 1);
      for (int i = 0; i < NL; i++) begin
        particle_t p;
        p = '0;
        if (($urandom % 1000) < prob) p = make_particle(ncl, ceta, cphi);
        in_lanes[i] = p;
        if (p.pt != 0) flat.push_back(p);
      end
    end
    if (flat.size() > N) begin n_trunc++; cls_trunc[ev / NPER]++; flat = flat[0:N-1]; end
    cls_part[ev / NPER] += flat.size();
    model_event(ev, flat);
  endtask

  // ---------------- output checker ----------------
  int word = 0, frames = 0, max_lat = 0, first_ev_seen [256];
  coll_hdr_t cur;

  always @(negedge clk) if (!rst && out_valid) begin
    int e, c;
    if (out_first) cur = out_hdr;
    e = int'(cur.evid); c = int'(cur.cone);
    checks++;
    if (!exp_set[e][c] || out_hdr != cur || out_first != (word == 0) || out_last != (word == NOUT_JETS - 1)) begin
      failures++; $display("frame framing/header wrong: ev %0d cone %0d word %0d", e, c, word);
    end else if (out_jet != exp_jets[e][c][word]) begin
      failures++;
      if (failures < 12)
        $display("ev %0d cone %0d jet %0d: got pt %0d eta %0d phi %0d, expected pt %0d eta %0d phi %0d",
                 e, c, word, out_jet.pt, out_jet.eta, out_jet.phi,
                 exp_jets[e][c][word].pt, exp_jets[e][c][word].eta, exp_jets[e][c][word].phi);
    end
    if (word == 0) begin
      checks++;
      if (int'(out_hdr.njets) != exp_n[e][c]) begin failures++; $display("njets %0d expected %0d", out_hdr.njets, exp_n[e][c]); end
      if (first_ev_seen[e] == 0) begin
        int lat;
        lat = int'(cyc - t_first_in[e]);
        first_ev_seen[e] = 1;
        if (lat > max_lat) max_lat = lat;
        if (lat > cls_lat[e / NPER]) cls_lat[e / NPER] = lat;
        checks++;
        if (lat > 320) begin failures++; $display("event %0d: first jet after %0d cycles", e, lat); end
      end
    end
    if (out_jet.pt != 0) cls_jets[e / NPER]++;
    if (word == NOUT_JETS - 1) begin
      word = 0; frames++; exp_set[e][c] = 0;
    end else word++;
  end

  initial begin
    in_valid = 0; in_last = 0; jec_we = 0; jec_addr = 0; jec_data = 0;
    cone_we = 0; cone_sel = CONE_R04; cone_r2_data = '0;
    foreach (in_lanes[i]) in_lanes[i] = '0;
    foreach (first_ev_seen[e]) first_ev_seen[e] = 0;
    foreach (exp_set[e, c]) exp_set[e][c] = 0;
    repeat (4) @(negedge clk);
    rst = 0;
    for (int a = 0; a < 128; a++) begin
      factor[a] = 400 + 2 * a;
      @(negedge clk);
      jec_we = 1; jec_addr = 7'(a); jec_data = 12'(factor[a]);
    end
    @(negedge clk);
    jec_we = 0;
    for (int ev = 0; ev < NEV; ev++) begin
      send_event(ev);
    end
    @(negedge clk);
    in_valid = 0; in_last = 0;
    repeat (800) @(negedge clk);
    checks++;
    if (frames != 2 * NEV) begin failures++; $display("%0d of %0d collections received", frames, 2 * NEV); end
    checks++;
    if (err_ctrl_overflow || err_link_overflow) begin failures++; $display("overflow at nominal rate"); end
    $display("collections %0d, worst first-jet latency %0d cycles = %0d ns",
             frames, max_lat, max_lat * 3125 / 1000);
    for (int k = 0; k < 3; k++) begin
      $display("class %0d: %0d events, mean %0d particles after packing, %0d truncated, %0d jets sent, worst latency %0d ns",
               k, NPER, cls_part[k] / NPER, cls_trunc[k], cls_jets[k], cls_lat[k] * 3125 / 1000);
      checks++;
      if (cls_lat[k] > 320) begin failures++; $display("class %0d over 1 us", k); end
    end
    checks++; if (cls_trunc[0] != 0) begin failures++; $display("pileup-only events should not truncate"); end
    checks++; if (cls_trunc[2] == 0) begin failures++; $display("four-top class never reached the list size"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
