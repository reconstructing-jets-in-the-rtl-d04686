// tb_jet_sorter: self-checking test of the insertion sorter.
//
// Fills collections with 0 to 20 jets of random pT (with repeated pT values
// to exercise ties), at random gaps, and flushes them, sometimes in the same
// cycle as the last insertion. The released list must equal the first 12 of
// the jets sorted by descending pT, equal pT in arrival order, padded with
// null jets, one cycle after the flush.
module tb_jet_sorter;
  import sc_pkg::*;

  localparam int D = NOUT_JETS;

  logic clk = 1'b0, rst = 1'b1;
  logic in_valid, in_flush;
  jet_t in_jet;
  logic out_valid;
  jet_t out_jets [D];
  logic [$clog2(D+1)-1:0] out_count;

  int checks = 0, failures = 0;

  jet_sorter #(.DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    jet_t sent [$];
    jet_t ref_list [$];
    in_valid = 0; in_flush = 0; in_jet = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int c = 0; c < 200; c++) begin
      int n;
      bit same;
      n = $urandom % 21;
      same = (n > 0) && ($urandom % 2);
      sent.delete();
      for (int k = 0; k < n; k++) begin
        jet_t j;
        j.pt  = pt_t'((c % 3 == 0) ? ($urandom % 8) * 100 : $urandom % 65536);
        j.eta = eta_t'($urandom); j.phi = phi_t'($urandom);
        sent.push_back(j);
        @(negedge clk);
        in_valid = 1; in_jet = j;
        in_flush = same && (k == n - 1);
        if (!(same && k == n - 1)) begin
          int gap;
          gap = $urandom % 3;
          for (int g = 0; g < gap; g++) begin
            @(negedge clk);
            in_valid = 0; in_flush = 0;
          end
        end
      end
      if (!same) begin
        @(negedge clk);
        in_valid = 0; in_flush = 1;
      end
      @(negedge clk);
      in_valid = 0; in_flush = 0;
      // reference: stable sort by descending pT
      ref_list.delete();
      foreach (sent[k]) begin
        int p;
        p = ref_list.size();
        for (int q = 0; q < ref_list.size(); q++)
          if (ref_list[q].pt < sent[k].pt) begin p = q; break; end
        ref_list.insert(p, sent[k]);
      end
      checks++;
      if (!out_valid) begin failures++; $display("no out_valid after flush"); end
      checks++;
      if (int'(out_count) != ((n > D) ? D : n)) begin failures++; $display("count %0d for %0d jets", out_count, n); end
      for (int q = 0; q < D; q++) begin
        jet_t e;
        e = (q < ref_list.size()) ? ref_list[q] : '0;
        checks++;
        if (out_jets[q] != e) begin
          failures++;
          if (failures < 10) $display("coll %0d pos %0d: got %h expected %h", c, q, out_jets[q], e);
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("out_valid longer than one cycle"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
