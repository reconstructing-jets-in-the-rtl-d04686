// jet_sorter: keeps one jet collection ordered by corrected pT.
//
// Jets arrive one at a time in seed order, which is not pT order. Each jet is
// inserted in one cycle into a register list of DEPTH entries kept in
// descending pT: every entry compares itself with the newcomer, entries below
// the insertion point shift down by one and the last one falls off. A jet
// whose pT equals a stored one goes behind it. When in_flush is seen (the
// collection is complete; a jet offered in the same cycle is inserted
// first), the list is presented on out_jets with a one-cycle out_valid pulse,
// and the sorter is cleared for its next collection.
//
// Timing: out_valid follows the flushing cycle by one cycle. Empty entries
// read as null jets (pT = 0); out_count gives the number of jets held.
//
// From the paper: jets are inserted into a module that orders them by pT,
// one such module per event and radius, and up to 12 jets per collection are
// sent on. This design's choices: the register-shift insertion, DEPTH = 12
// (jets beyond the 12th can never be sent, so they are not kept), tie order.
module jet_sorter
  import sc_pkg::*;
#(
  parameter int DEPTH = NOUT_JETS
) (
  input  logic clk,
  input  logic rst,
  input  logic in_valid,
  input  jet_t in_jet,
  input  logic in_flush,
  output logic out_valid,
  output jet_t out_jets [DEPTH],
  output logic [$clog2(DEPTH+1)-1:0] out_count
);

  localparam int CW = $clog2(DEPTH+1);

  jet_t          list_q [DEPTH];
  jet_t          list_n [DEPTH];
  logic [CW-1:0] cnt_q, cnt_n;

  always_comb begin
    logic [DEPTH-1:0] below;   // entry k holds a jet of lower pT (or none)
    for (int k = 0; k < DEPTH; k++)
      below[k] = (CW'(k) >= cnt_q) || (list_q[k].pt < in_jet.pt);
    list_n = list_q;
    cnt_n  = cnt_q;
    if (in_valid) begin
      for (int k = 0; k < DEPTH; k++) begin
        if (below[k]) begin
          if (k == 0)              list_n[k] = in_jet;
          else if (!below[k-1])    list_n[k] = in_jet;
          else                     list_n[k] = list_q[k-1];
        end
      end
      if (cnt_q < CW'(DEPTH)) cnt_n = cnt_q + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < DEPTH; k++) begin
        list_q[k]   <= '0;
        out_jets[k] <= '0;
      end
      cnt_q     <= '0;
      out_valid <= 1'b0;
      out_count <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_flush) begin
        out_jets  <= list_n;
        out_count <= cnt_n;
        out_valid <= 1'b1;
        for (int k = 0; k < DEPTH; k++) list_q[k] <= '0;
        cnt_q <= '0;
      end else begin
        list_q <= list_n;
        cnt_q  <= cnt_n;
      end
    end
  end

endmodule
