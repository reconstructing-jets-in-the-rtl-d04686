// tb_seed_cone_loop: self-checking test of one seed/cone iteration.
//
// A new random list enters on every cycle (II = 1): lists of random fill,
// clustered particles, particles near phi = +-pi (wrap-around), equal-pT ties,
// empty lists and iteration 15. An independent model computes the seed, the
// constituents, the remainder and the end-of-pass flags; each result must
// come out exactly LOOP_LAT = 8 cycles after its list went in.
module tb_seed_cone_loop;
  import sc_pkg::*;

  localparam int N = NPART;

  logic clk = 1'b0, rst = 1'b1;
  particle_t in_list [N];
  pass_tag_t in_tag;
  particle_t out_rem [N], out_cons [N], out_seed;
  pass_tag_t out_tag;
  logic out_last, out_jet_valid;

  int checks = 0, failures = 0;
  int cyc = 0;

  seed_cone_loop #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    particle_t rem  [N];
    particle_t cons [N];
    particle_t seed;
    pass_tag_t tag;
    logic      jv, last;
    int        due;
  } exp_t;

  exp_t exp_q [$];

  function automatic int wrapd(int a, int b);
    int d = a - b;
    if (d >= 720) d -= 1440;
    if (d < -720) d += 1440;
    return d;
  endfunction

  function automatic exp_t model(particle_t l [N], pass_tag_t t);
    exp_t e;
    int best = 0, bi = 0, r2;
    bit any = 0;
    for (int i = 0; i < N; i++) if (int'(l[i].pt) > best) begin best = l[i].pt; bi = i; end
    r2 = int'(t.r2);
    e.seed = l[bi];
    for (int i = 0; i < N; i++) begin
      int de, dp;
      de = int'(l[i].eta) - int'(l[bi].eta);
      dp = wrapd(int'(l[i].phi), int'(l[bi].phi));
      if (l[i].pt != 0 && de*de + dp*dp <= r2) begin
        e.cons[i] = l[i]; e.rem[i] = '0;
      end else begin
        e.cons[i] = '0; e.rem[i] = l[i];
        if (l[i].pt != 0) any = 1;
      end
    end
    e.tag  = t;
    e.jv   = (best != 0);
    e.last = (best == 0) || !any || (t.iter == 15);
    return e;
  endfunction

  function automatic particle_t rnd_particle(int mode, int ceta, int cphi);
    particle_t p;
    int e, ph;
    p.pt = pt_t'($urandom % 2000);
    if (mode == 1) begin
      e  = ceta + int'($urandom % 301) - 150;
      ph = cphi + int'($urandom % 301) - 150;
    end else begin
      e  = int'($urandom % 2000) - 1000;
      ph = int'($urandom % 1440) - 720;
    end
    if (ph >= 720) ph -= 1440;
    if (ph < -720) ph += 1440;
    p.eta = eta_t'(e);
    p.phi = phi_t'(ph);
    return p;
  endfunction

  initial begin
    particle_t l [N];
    pass_tag_t t;
    in_tag = '0;
    foreach (in_list[i]) in_list[i] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int k = 0; k < 400; k++) begin
      int fill, mode, ceta, cphi;
      fill = $urandom % (N + 1);
      mode = $urandom % 3;
      ceta = int'($urandom % 1000) - 500;
      cphi = (mode == 2) ? 700 : int'($urandom % 1440) - 720;
      if (mode == 2) mode = 1;
      for (int i = 0; i < N; i++)
        l[i] = ($urandom % (N + 1) < fill) ? rnd_particle(mode, ceta, cphi) : '0;
      if (k % 17 == 5) foreach (l[i]) l[i] = '0;                 // empty list
      if (k % 13 == 7) begin l[3].pt = 3000; l[90].pt = 3000; end // tie
      t.valid  = (k % 11 != 4);
      t.evid   = EVID_W'(k);
      t.cone   = cone_t'($urandom % 2);
      t.iter   = (k % 9 == 0) ? ITER_W'(15) : ITER_W'($urandom % 15);
      t.sorter = SORT_W'($urandom % NSORT);
      // the two standard radii, and now and then another one
      t.r2     = (k % 7 == 2) ? R2_W'($urandom % 60000) : (t.cone == CONE_R08) ? R2_W'(33616) : R2_W'(8404);
      for (int i = 0; i < N; i++) in_list[i] <= l[i];
      in_tag  <= t;
      if (t.valid) begin
        exp_t e;
        e = model(l, t);
        e.due = cyc + 1 + LOOP_LAT;   // input is sampled at the next edge
        exp_q.push_back(e);
      end
      @(posedge clk);
    end
    in_tag.valid <= 0;
    repeat (20) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output checker
  always @(negedge clk) begin
    if (!rst && out_tag.valid) begin
      exp_t e;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected output at cycle %0d", cyc);
      end else begin
        e = exp_q.pop_front();
        if (cyc != e.due) begin
          failures++; $display("latency: result at cycle %0d, due %0d", cyc, e.due);
        end
        checks++;
        if (out_tag != e.tag || out_jet_valid != e.jv || out_last != e.last) begin
          failures++; $display("flags: tag %h/%h jv %0b/%0b last %0b/%0b", out_tag, e.tag,
                               out_jet_valid, e.jv, out_last, e.last);
        end
        if (e.jv) begin
          checks++;
          if (out_seed != e.seed) begin failures++; $display("seed %h expected %h", out_seed, e.seed); end
        end
        for (int i = 0; i < N; i++) begin
          checks++;
          if (out_cons[i] != e.cons[i] || out_rem[i] != e.rem[i]) begin
            failures++;
            if (failures < 10) $display("entry %0d cons %h/%h rem %h/%h", i, out_cons[i], e.cons[i], out_rem[i], e.rem[i]);
          end
        end
      end
    end
  end
endmodule
