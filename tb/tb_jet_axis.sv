// tb_jet_axis: self-checking test of the jet axis unit.
//
// Drives one constituent set per cycle: random cones around a random seed,
// cones across phi = +-pi, single-particle jets and empty sets. The expected
// pT sum and pT-weighted eta/phi are computed here with 64-bit integers
// (seed-relative offsets, division truncating towards zero), and each result
// must appear exactly AX_LAT = 4 cycles after its input.
module tb_jet_axis;
  import sc_pkg::*;

  localparam int N = NPART;
  localparam int AX_LAT = 4;

  logic clk = 1'b0, rst = 1'b1;
  particle_t in_cons [N];
  particle_t in_seed;
  pass_tag_t in_tag;
  logic in_jet_valid, in_last;
  logic [PT_W+$clog2(N)-1:0] out_pt;
  eta_t out_eta;
  phi_t out_phi;
  pass_tag_t out_tag;
  logic out_jet_valid, out_last;

  int checks = 0, failures = 0, cyc = 0;

  jet_axis #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { longint pt; int eta, phi; pass_tag_t tag; logic jv, last; int due; } exp_t;
  exp_t exp_q [$];

  function automatic int wrap(int d);
    if (d >= 720) d -= 1440;
    if (d < -720) d += 1440;
    return d;
  endfunction

  initial begin
    particle_t c [N];
    particle_t s;
    pass_tag_t t;
    in_tag = '0; in_jet_valid = 0; in_last = 0; in_seed = '0;
    foreach (in_cons[i]) in_cons[i] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int k = 0; k < 300; k++) begin
      exp_t e;
      longint sp, se, sf;
      int nc;
      s.eta = eta_t'(int'($urandom % 2000) - 1000);
      s.phi = (k % 4 == 1) ? phi_t'(710) : phi_t'(int'($urandom % 1440) - 720);
      s.pt  = pt_t'(1 + $urandom % 4000);
      nc = (k % 10 == 3) ? 0 : (k % 10 == 4) ? 1 : $urandom % 40;
      foreach (c[i]) c[i] = '0;
      for (int j = 0; j < nc; j++) begin
        int i, de, dp;
        i  = $urandom % N;
        de = int'($urandom % 367) - 183;
        dp = int'($urandom % 367) - 183;
        c[i].pt  = pt_t'($urandom % 65536);
        c[i].eta = eta_t'(int'(s.eta) + de);
        c[i].phi = phi_t'(wrap(int'(s.phi) + dp));
      end
      if (k % 10 == 4) begin c[7] = s; end
      sp = 0; se = 0; sf = 0;
      for (int i = 0; i < N; i++) begin
        sp += c[i].pt;
        se += longint'(c[i].pt) * (int'(c[i].eta) - int'(s.eta));
        sf += longint'(c[i].pt) * wrap(int'(c[i].phi) - int'(s.phi));
      end
      e.pt  = sp;
      e.eta = int'(s.eta) + int'(se / ((sp == 0) ? 1 : sp));
      e.phi = wrap(int'(s.phi) + int'(sf / ((sp == 0) ? 1 : sp)));
      t = '0;
      t.valid = 1; t.evid = EVID_W'(k); t.cone = cone_t'(k % 2); t.iter = ITER_W'(k);
      e.tag = t; e.jv = (nc != 0); e.last = (k % 7 == 0);
      e.due = cyc + 1 + AX_LAT;
      for (int i = 0; i < N; i++) in_cons[i] <= c[i];
      in_seed <= s; in_tag <= t; in_jet_valid <= e.jv; in_last <= e.last;
      exp_q.push_back(e);
      @(posedge clk);
    end
    in_tag <= '0; in_jet_valid <= 0; in_last <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (!rst && out_tag.valid) begin
      exp_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = exp_q.pop_front();
        if (cyc != e.due) begin failures++; $display("latency: at %0d due %0d", cyc, e.due); end
        checks++;
        if (out_tag != e.tag || out_jet_valid != e.jv || out_last != e.last) begin
          failures++; $display("flags wrong for evid %0d", e.tag.evid);
        end
        if (e.jv) begin
          checks++;
          if (longint'(out_pt) != e.pt || int'(out_eta) != e.eta || int'(out_phi) != e.phi) begin
            failures++;
            if (failures < 10) $display("jet %0d: got pt %0d eta %0d phi %0d, expected %0d %0d %0d",
              e.tag.evid, out_pt, out_eta, out_phi, e.pt, e.eta, e.phi);
          end
        end
      end
    end
  end
endmodule
