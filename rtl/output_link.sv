// output_link: buffers finished jet collections and sends them serially.
//
// A completed, sorted collection (header + NJ jets) is written into a FIFO of
// DEPTH collections. The head collection is sent one jet per cycle, always
// NJ words (empty places as null jets, pT = 0), with out_first on the first
// word and out_last on the NJth; the header (event tag and radius) is
// repeated on every word. Back-to-back collections follow without a gap.
//
// Timing: a collection written in cycle t can start on the link in t+1.
// in_ready is low when the FIFO is full; a write while full is dropped and
// sets the sticky err_overflow (the top never does this at the paper's rate).
//
// From the paper: the jets pass a FIFO and are sent serially on one link,
// up to 12 per collection. This design's choices: one jet per cycle, fixed
// 12-word frames, the FIFO depth and the header fields.
module output_link
  import sc_pkg::*;
#(
  parameter int NJ    = NOUT_JETS,
  parameter int DEPTH = 4
) (
  input  logic      clk,
  input  logic      rst,
  input  logic      in_valid,
  input  coll_hdr_t in_hdr,
  input  jet_t      in_jets [NJ],
  output logic      in_ready,
  output logic      out_valid,
  output logic      out_first,
  output logic      out_last,
  output coll_hdr_t out_hdr,
  output jet_t      out_jet,
  output logic      err_overflow
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int JW = (NJ > 1) ? $clog2(NJ) : 1;

  coll_hdr_t      hdr_mem  [DEPTH];
  jet_t           jet_mem  [DEPTH][NJ];
  logic [AW-1:0]  wp, rp;
  logic [AW:0]    level;
  logic [JW-1:0]  word;

  logic do_wr, do_pop;

  assign in_ready = (level != (AW+1)'(DEPTH));
  assign do_wr    = in_valid && in_ready;
  assign do_pop   = (level != '0) && (word == JW'(NJ - 1));

  always_ff @(posedge clk) begin
    if (rst) begin
      wp           <= '0;
      rp           <= '0;
      level        <= '0;
      word         <= '0;
      err_overflow <= 1'b0;
    end else begin
      if (do_wr) begin
        hdr_mem[wp] <= in_hdr;
        for (int j = 0; j < NJ; j++) jet_mem[wp][j] <= in_jets[j];
        wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      end
      if (in_valid && !in_ready) err_overflow <= 1'b1;
      if (level != '0) begin
        if (do_pop) begin
          word <= '0;
          rp   <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
        end else begin
          word <= word + 1'b1;
        end
      end
      level <= level + (AW+1)'(do_wr) - (AW+1)'(do_pop);
    end
  end

  assign out_valid = (level != '0);
  assign out_first = out_valid && (word == '0);
  assign out_last  = do_pop;
  assign out_hdr   = hdr_mem[rp];
  assign out_jet   = jet_mem[rp][word];

  // The read side never runs ahead of the write side.
  assert property (@(posedge clk) disable iff (rst) level <= (AW+1)'(DEPTH))
    else $error("output_link: level out of range");

endmodule
