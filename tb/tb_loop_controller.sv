// tb_loop_controller: self-checking test of the loop orchestration.
//
// The seed/cone loop is replaced by an 8-cycle delay line that hands every
// list back unchanged; a pass is declared finished when its iteration count
// reaches a length derived from the list (0..15). Sorters are released a
// random time after their pass finishes. The test checks that
//  * every event starts exactly two passes, R = 0.4 first, then R = 0.8,
//    with iteration 0, the event's tag and the event's list;
//  * every unfinished list goes back in on the cycle it returns, with its
//    iteration raised by one and its tag otherwise unchanged;
//  * a busy sorter is never handed out, and all passes finish;
//  * held-back injections (busy slot, all sorters busy) and the overflow
//    flag for an event arriving too early all occur.
module tb_loop_controller;
  import sc_pkg::*;

  localparam int N = 8;
  localparam int NS = NSORT;

  logic clk = 1'b0, rst = 1'b1;
  logic ev_valid;
  particle_t ev_list [N];
  particle_t ret_list [N];
  pass_tag_t ret_tag;
  logic ret_last;
  logic [NS-1:0] sorter_release;
  logic cfg_r2_we;
  cone_t cfg_r2_sel;
  logic [R2_W-1:0] cfg_r2_data;
  int r2_ref [2] = '{8404, 33616};
  particle_t loop_list [N];
  pass_tag_t loop_tag;
  logic err_overflow, stat_recirc, stat_inject, stat_stall_slot, stat_stall_sorter;

  int checks = 0, failures = 0;
  int n_stall_slot = 0, n_stall_sorter = 0, n_recirc = 0, n_inject = 0;

  loop_controller #(.N(N), .NS(NS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // 8-cycle loop model
  particle_t dl_list [LOOP_LAT][N];
  pass_tag_t dl_tag  [LOOP_LAT];

  function automatic int pass_len(particle_t l [N]);
    return int'(l[0].pt) % 16;
  endfunction

  always_comb begin
    ret_list = dl_list[LOOP_LAT-1];
    ret_tag  = dl_tag[LOOP_LAT-1];
    ret_last = ret_tag.valid && (int'(ret_tag.iter) >= pass_len(ret_list));
  end

  always_ff @(posedge clk) begin
    for (int s = LOOP_LAT - 1; s > 0; s--) begin
      dl_list[s] <= dl_list[s-1];
      dl_tag[s]  <= dl_tag[s-1];
    end
    dl_list[0] <= loop_list;
    dl_tag[0]  <= loop_tag;
    if (rst) for (int s = 0; s < LOOP_LAT; s++) dl_tag[s].valid <= 1'b0;
  end

  // reference state
  particle_t ev_ref [256][N];
  int        starts [256];
  int        finished = 0, n_events = 0;
  bit        tb_busy [NS];
  int        rel_at  [NS];
  int        cyc = 0;

  always @(negedge clk) if (!rst) begin
    cyc++;
    if (stat_stall_slot)   n_stall_slot++;
    if (stat_stall_sorter) n_stall_sorter++;
    if (loop_tag.valid) begin
      if (ret_tag.valid && !ret_last) begin
        pass_tag_t e;
        n_recirc++;
        e = ret_tag; e.iter = ret_tag.iter + 1'b1;
        checks++;
        if (loop_tag != e || loop_list != ret_list) begin
          failures++; $display("recirculation wrong at cycle %0d", cyc);
        end
      end else begin
        int ev;
        n_inject++;
        ev = int'(loop_tag.evid);
        checks++;
        if (loop_tag.iter != 0 || loop_list != ev_ref[ev] ||
            int'(loop_tag.r2) != r2_ref[(starts[ev] == 0) ? 0 : 1] ||
            loop_tag.cone != ((starts[ev] == 0) ? CONE_R04 : CONE_R08) || starts[ev] > 1) begin
          failures++; $display("bad injection of event %0d (start %0d)", ev, starts[ev]);
        end
        starts[ev]++;
        checks++;
        if (tb_busy[loop_tag.sorter] || int'(loop_tag.sorter) >= NS) begin
          failures++; $display("busy sorter %0d handed out", loop_tag.sorter);
        end
        tb_busy[loop_tag.sorter] = 1;
        rel_at[loop_tag.sorter]  = -1;
      end
    end else begin
      checks++;
      if (ret_tag.valid && !ret_last) begin failures++; $display("returning list dropped"); end
    end
    if (ret_last) begin
      finished++;
      rel_at[ret_tag.sorter] = cyc + 1 + int'($urandom % ((n_events < 20) ? 3 : 60));
    end
  end

  // mirror of the radius registers
  always @(posedge clk) if (!rst && cfg_r2_we) r2_ref[int'(cfg_r2_sel)] = int'(cfg_r2_data);

  // sorter release driver
  always @(negedge clk) begin
    sorter_release = '0;
    for (int s = 0; s < NS; s++)
      if (tb_busy[s] && rel_at[s] == cyc) begin
        sorter_release[s] = 1'b1;
        tb_busy[s] = 0;
      end
  end

  task automatic send_event(int gap);
    particle_t l [N];
    for (int i = 0; i < N; i++) begin
      l[i].pt = pt_t'($urandom); l[i].eta = eta_t'($urandom); l[i].phi = phi_t'($urandom);
    end
    ev_ref[n_events % 256] = l;
    n_events++;
    @(negedge clk);
    ev_valid = 1; ev_list = l;
    @(negedge clk);
    ev_valid = 0;
    repeat (gap) @(negedge clk);
  endtask

  initial begin
    ev_valid = 0; sorter_release = '0;
    cfg_r2_we = 0; cfg_r2_sel = CONE_R04; cfg_r2_data = '0;
    foreach (ev_list[i]) ev_list[i] = '0;
    foreach (tb_busy[s]) begin tb_busy[s] = 0; rel_at[s] = -1; end
    foreach (starts[e]) starts[e] = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int e = 0; e < 20; e++) send_event(46);       // one event every 48 cycles
    for (int e = 0; e < 15; e++) send_event(20 + $urandom % 30);  // slow releases
    // change both radii while passes are running; new passes must use them
    @(negedge clk);
    cfg_r2_we = 1; cfg_r2_sel = CONE_R04; cfg_r2_data = 17'd4000;
    @(negedge clk);
    cfg_r2_sel = CONE_R08; cfg_r2_data = 17'd20000;
    @(negedge clk);
    cfg_r2_we = 0;
    for (int e = 0; e < 15; e++) send_event(20 + $urandom % 30);
    repeat (2000) @(negedge clk);
    checks++;
    if (finished != 2 * n_events) begin failures++; $display("%0d of %0d passes finished", finished, 2 * n_events); end
    checks++;
    if (err_overflow) begin failures++; $display("overflow at nominal rate"); end
    // two events on consecutive cycles: the second must be refused
    ev_ref[n_events % 256] = ev_list;
    n_events++;
    @(negedge clk);
    ev_valid = 1;
    repeat (2) @(negedge clk);
    ev_valid = 0;
    repeat (200) @(negedge clk);
    checks++;
    if (!err_overflow) begin failures++; $display("overflow not flagged"); end
    $display("recirc %0d inject %0d stall_slot %0d stall_sorter %0d",
             n_recirc, n_inject, n_stall_slot, n_stall_sorter);
    checks++; if (n_stall_slot == 0)   begin failures++; $display("no slot stall seen"); end
    checks++; if (n_stall_sorter == 0) begin failures++; $display("no sorter stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
