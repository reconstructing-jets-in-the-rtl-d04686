// loop_controller: orchestrates the jet-finding loop.
//
// The seed/cone pipeline (seed_cone_loop) has LOOP_LAT = 8 stages and takes a
// new list every cycle, but a list that comes out must go back in for its
// next jet, so one event uses only one of the 8 pipeline slots. This
// controller fills the free slots:
//  * every cycle, a list returning from the loop that is not finished goes
//    straight back in, with its iteration count raised by one;
//  * otherwise, if an event from the deregionizer is waiting and a sorter is
//    free, a new pass of that event enters the loop: first with R = 0.4, then
//    (in a later free slot) with R = 0.8. Each pass gets its own sorter, the
//    event's tag and iteration 0;
//  * a sorter becomes free again when the jet pipeline signals, through
//    sorter_release, that the pass's last result has reached it.
// Returning lists always win over new passes, so a pass never waits once
// started and its latency is fixed. A waiting event is held in one register;
// if the next event arrives while both passes of the previous one have not
// yet started, the new event is dropped and err_overflow is set (sticky).
// At the paper's rate (one event per 48 cycles) this cannot happen.
//
// The cone radius of each of the two passes is a register here (R^2, reset
// to R = 0.4 and R = 0.8), written through cfg_r2_*; it is stamped into the
// tag when a pass starts, so a change never affects a pass already running.
// Outputs loop_list/loop_tag go combinationally into the loop input. The
// stat_* pulses mark a recirculation, an injection, a cycle in which a
// waiting pass was held back by a busy slot, and one held back because all
// sorters were busy.
//
// From the paper: a control module orchestrates the injection of event data
// and the loop iteration, tracks the iteration of each event, processes each
// event twice with two radii and sends the jets of each event and radius to
// separate sorting modules. This design's choices: priority to returning
// lists, the one-event holding register, R = 0.4 before R = 0.8, the lowest
// free sorter first, NSORT = 6 (3 events in flight x 2 radii), the radius
// held as R^2 and carried in the tag.
module loop_controller
  import sc_pkg::*;
#(
  parameter int N      = NPART,
  parameter int NS     = NSORT
) (
  input  logic      clk,
  input  logic      rst,
  // new events
  input  logic      ev_valid,
  input  particle_t ev_list [N],
  // lists returning from the loop
  input  particle_t ret_list [N],
  input  pass_tag_t ret_tag,
  input  logic      ret_last,
  // sorter bookkeeping
  input  logic [NS-1:0] sorter_release,
  // cone radius configuration (R^2 in (pi/720)^2 units) for each pass type
  input  logic      cfg_r2_we,
  input  cone_t     cfg_r2_sel,
  input  logic [R2_W-1:0] cfg_r2_data,
  // loop input
  output particle_t loop_list [N],
  output pass_tag_t loop_tag,
  // status
  output logic      err_overflow,
  output logic      stat_recirc,
  output logic      stat_inject,
  output logic      stat_stall_slot,
  output logic      stat_stall_sorter
);

  localparam int SW = (NS > 1) ? $clog2(NS) : 1;

  particle_t         pend_list [N];
  logic [1:0]        pend_open;   // bit 0: R=0.4 pass to start, bit 1: R=0.8
  logic [EVID_W-1:0] pend_evid;
  logic [EVID_W-1:0] next_evid;
  logic [NS-1:0]     busy;
  logic [R2_W-1:0]   r2_q [2];      // R^2 of the first and second pass

  logic              recirc, have_free, inject;
  logic [SW-1:0]     free_idx;
  cone_t             inj_cone;

  assign recirc = ret_tag.valid && !ret_last;

  always_comb begin
    have_free = 1'b0;
    free_idx  = '0;
    for (int s = NS - 1; s >= 0; s--) begin
      if (!busy[s]) begin
        have_free = 1'b1;
        free_idx  = SW'(s);
      end
    end
  end

  assign inject   = !recirc && (pend_open != 2'b00) && have_free;
  assign inj_cone = pend_open[0] ? CONE_R04 : CONE_R08;

  always_comb begin
    loop_tag = '0;
    if (recirc) begin
      loop_list      = ret_list;
      loop_tag       = ret_tag;
      loop_tag.iter  = ret_tag.iter + 1'b1;
    end else begin
      loop_list      = pend_list;
      loop_tag.valid = inject;
      loop_tag.evid  = pend_evid;
      loop_tag.cone  = inj_cone;
      loop_tag.iter  = '0;
      loop_tag.sorter = SORT_W'(free_idx);
      loop_tag.r2     = r2_q[inj_cone];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pend_open    <= 2'b00;
      pend_evid    <= '0;
      next_evid    <= '0;
      busy         <= '0;
      err_overflow <= 1'b0;
      r2_q[0]      <= R2_SC4;
      r2_q[1]      <= R2_SC8;
      for (int i = 0; i < N; i++) pend_list[i] <= '0;
    end else begin
      logic [1:0] open_nx;
      if (cfg_r2_we) r2_q[cfg_r2_sel] <= cfg_r2_data;
      open_nx = pend_open;
      if (inject) open_nx[pend_open[0] ? 0 : 1] = 1'b0;
      busy <= (busy & ~sorter_release) | (inject ? (NS'(1) << free_idx) : '0);
      if (ev_valid) begin
        if (open_nx != 2'b00) begin
          err_overflow <= 1'b1;
        end else begin
          pend_list <= ev_list;
          pend_evid <= next_evid;
          next_evid <= next_evid + 1'b1;
          open_nx   = 2'b11;
        end
      end
      pend_open <= open_nx;
    end
  end

  assign stat_recirc       = recirc;
  assign stat_inject       = inject;
  assign stat_stall_slot   = recirc && (pend_open != 2'b00);
  assign stat_stall_sorter = !recirc && (pend_open != 2'b00) && !have_free;

  // A sorter is only released while it is allocated.
  assert property (@(posedge clk) disable iff (rst) (sorter_release & ~busy) == '0)
    else $error("loop_controller: release of a free sorter");

endmodule
