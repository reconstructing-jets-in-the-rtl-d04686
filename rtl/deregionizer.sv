// deregionizer: turns the per-link candidate streams of one event into one
// flat, gap-free list of NPART particles.
//
// Each cycle of an event's time-multiplexed period, every one of the NLINKS
// input lanes may carry one PUPPI candidate; a lane whose pT is zero carries a
// null object and is dropped. The non-null candidates of a cycle are packed
// (lane order, via a prefix count) and appended behind those already stored, so
// the list fills from index 0 upwards with no gaps. Candidates that would land
// beyond index NPART-1 are truncated, as the paper does at 128. On the cycle
// that carries in_last, the completed list (including that cycle's candidates)
// is copied to the output registers and the store is cleared, so the next
// event may start on the very next cycle.
//
// Interface: in_valid qualifies the lanes, in_last marks the last cycle of an
// event. out_valid is a one-cycle pulse, one cycle after in_last, with
// out_list (unused entries are null), out_count (number stored) and
// out_trunc (some candidates were dropped for lack of room).
//
// From the paper: null removal, packing to one end, the 128-entry size and
// truncation. This design's choices: the lane count (24, i.e. 6 boards with 4
// links each, inside the paper's 3 to 6 links per board), one candidate per
// lane per cycle, pT = 0 as the null marker, lane-order packing and a
// one-cycle latency (the paper's deregionizer spends about 70 ns).
module deregionizer
  import sc_pkg::*;
#(
  parameter int NLINKS = 24,
  parameter int NOUT   = NPART
) (
  input  logic      clk,
  input  logic      rst,
  input  logic      in_valid,
  input  logic      in_last,
  input  particle_t in_lanes [NLINKS],
  output logic      out_valid,
  output particle_t out_list [NOUT],
  output logic [$clog2(NOUT+1)-1:0] out_count,
  output logic      out_trunc
);

  localparam int CW = $clog2(NOUT+1);
  localparam int PW = $clog2(NLINKS+1);

  particle_t            store      [NOUT];
  particle_t            store_next [NOUT];
  logic [CW-1:0]        wptr, wptr_next;
  logic                 trunc, trunc_next;

  // Prefix count of non-null lanes: lane i goes to wptr + pre[i].
  logic [PW-1:0]        pre [NLINKS+1];

  always_comb begin
    pre[0] = '0;
    for (int i = 0; i < NLINKS; i++)
      pre[i+1] = pre[i] + PW'(in_lanes[i].pt != '0);
  end

  always_comb begin
    int unsigned pos;
    pos        = 0;
    store_next = store;
    wptr_next  = wptr;
    trunc_next = trunc;
    if (in_valid) begin
      for (int i = 0; i < NLINKS; i++) begin
        pos = int'(wptr) + int'(pre[i]);
        if (in_lanes[i].pt != '0) begin
          if (pos < NOUT) store_next[pos] = in_lanes[i];
          else            trunc_next      = 1'b1;
        end
      end
      if (int'(wptr) + int'(pre[NLINKS]) >= NOUT) wptr_next = CW'(NOUT);
      else                                        wptr_next = wptr + CW'(pre[NLINKS]);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int j = 0; j < NOUT; j++) begin
        store[j]    <= '0;
        out_list[j] <= '0;
      end
      wptr      <= '0;
      trunc     <= 1'b0;
      out_valid <= 1'b0;
      out_count <= '0;
      out_trunc <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid && in_last) begin
        out_list  <= store_next;
        out_count <= wptr_next;
        out_trunc <= trunc_next;
        out_valid <= 1'b1;
        for (int j = 0; j < NOUT; j++) store[j] <= '0;
        wptr  <= '0;
        trunc <= 1'b0;
      end else begin
        store <= store_next;
        wptr  <= wptr_next;
        trunc <= trunc_next;
      end
    end
  end

endmodule
