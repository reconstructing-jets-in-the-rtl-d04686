// tb_deregionizer: self-checking test of the deregionizer.
//
// Sends events of random length with a random share of null lanes, back to
// back, including events with more than 128 candidates, and compares the
// packed list, the count and the truncation flag with a queue-based model.
// Also checks that the list appears exactly one cycle after in_last.
module tb_deregionizer;
  import sc_pkg::*;

  localparam int NL = 24;
  localparam int NO = NPART;

  logic clk = 1'b0, rst = 1'b1;
  logic in_valid, in_last;
  particle_t in_lanes [NL];
  logic out_valid, out_trunc;
  particle_t out_list [NO];
  logic [$clog2(NO+1)-1:0] out_count;

  int checks = 0, failures = 0;
  int n_trunc = 0;

  deregionizer #(.NLINKS(NL), .NOUT(NO)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  particle_t exp_q [$];

  task automatic check_output();
    int ne;
    ne = (exp_q.size() > NO) ? NO : exp_q.size();
    checks++;
    if (!out_valid) begin
      failures++; $display("no out_valid one cycle after in_last");
    end
    checks++;
    if (int'(out_count) != ne) begin
      failures++; $display("count %0d expected %0d", out_count, ne);
    end
    checks++;
    if (out_trunc != (exp_q.size() > NO)) begin
      failures++; $display("trunc flag %0b wrong (%0d sent)", out_trunc, exp_q.size());
    end
    for (int j = 0; j < NO; j++) begin
      particle_t e;
      e = (j < ne) ? exp_q[j] : '0;
      checks++;
      if (out_list[j] != e) begin
        failures++;
        if (failures < 10) $display("entry %0d: got %h expected %h", j, out_list[j], e);
      end
    end
  endtask

  initial begin
    in_valid = 0; in_last = 0;
    foreach (in_lanes[i]) in_lanes[i] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int ev = 0; ev < 40; ev++) begin
      int ncyc, pnull;
      ncyc  = 1 + ($urandom % 10);
      pnull = (ev % 4 == 3) ? 0 : 30 + ($urandom % 70);
      exp_q.delete();
      for (int c = 0; c < ncyc; c++) begin
        in_valid <= 1;
        in_last  <= (c == ncyc - 1);
        for (int i = 0; i < NL; i++) begin
          particle_t p;
          if (($urandom % 100) < pnull) p = '0;
          else begin
            p.pt  = pt_t'(1 + ($urandom % 65535));
            p.eta = eta_t'($urandom);
            p.phi = phi_t'($urandom);
            exp_q.push_back(p);
          end
          in_lanes[i] <= p;
        end
        @(posedge clk);
      end
      in_valid <= 0; in_last <= 0;
      if (exp_q.size() > NO) n_trunc++;
      #1;
      check_output();
      // next event immediately (back to back) every other time
      if (ev % 2 == 0) @(posedge clk);
    end
    checks++;
    if (n_trunc == 0) begin failures++; $display("no truncating event was sent"); end
    $display("events with truncation: %0d", n_trunc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
