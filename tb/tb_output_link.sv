// tb_output_link: self-checking test of the collection FIFO and serial link.
//
// Writes collections at random intervals, sometimes in bursts that fill the
// FIFO, and checks that each comes out as exactly 12 consecutive words in
// order, first/last flags on the right words, header repeated, with the
// first word on the cycle after the write when the link is idle. A write
// into a full FIFO must raise err_overflow.
module tb_output_link;
  import sc_pkg::*;

  localparam int NJ = NOUT_JETS;

  logic clk = 1'b0, rst = 1'b1;
  logic in_valid;
  coll_hdr_t in_hdr;
  jet_t in_jets [NJ];
  logic in_ready, out_valid, out_first, out_last, err_overflow;
  coll_hdr_t out_hdr;
  jet_t out_jet;

  int checks = 0, failures = 0;

  output_link #(.NJ(NJ), .DEPTH(4)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { coll_hdr_t hdr; jet_t jets [NJ]; } coll_t;
  coll_t q [$];
  int word = 0;
  bit stop_check = 0;
  int n_out = 0, n_in = 0;

  always @(negedge clk) if (!rst && !stop_check) begin
    if (out_valid) begin
      checks++;
      if (q.size() == 0) begin failures++; $display("output with nothing written"); end
      else begin
        if (out_hdr != q[0].hdr || out_jet != q[0].jets[word] ||
            out_first != (word == 0) || out_last != (word == NJ - 1)) begin
          failures++;
          if (failures < 10) $display("word %0d of collection %0d wrong", word, n_out);
        end
        if (word == NJ - 1) begin word = 0; void'(q.pop_front()); n_out++; end
        else word++;
      end
    end else begin
      checks++;
      if (word != 0) begin failures++; $display("gap inside a collection"); end
    end
  end

  task automatic write_coll(int k);
    coll_t c;
    c.hdr.evid = EVID_W'(k); c.hdr.cone = cone_t'(k % 2); c.hdr.njets = '0;
    for (int j = 0; j < NJ; j++) begin
      c.jets[j].pt = pt_t'($urandom); c.jets[j].eta = eta_t'($urandom); c.jets[j].phi = phi_t'($urandom);
    end
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    in_valid = 1; in_hdr = c.hdr;
    for (int j = 0; j < NJ; j++) in_jets[j] = c.jets[j];
    q.push_back(c);
    n_in++;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (q.size() == 1 && !(out_valid && out_first)) begin
      failures++; $display("idle link did not start on the next cycle");
    end
  endtask

  initial begin
    in_valid = 0; in_hdr = '0;
    foreach (in_jets[j]) in_jets[j] = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int k = 0; k < 60; k++) begin
      write_coll(k);
      repeat ((k % 10 < 5) ? ($urandom % 4) : 20 + ($urandom % 20)) @(negedge clk);
    end
    repeat (100) @(negedge clk);
    checks++;
    if (n_out != n_in) begin failures++; $display("%0d of %0d collections sent", n_out, n_in); end
    checks++;
    if (err_overflow) begin failures++; $display("spurious overflow"); end
    // fill the FIFO: 5 writes back to back, the 5th finds it full
    stop_check = 1;
    for (int k = 0; k < 5; k++) begin
      @(negedge clk);
      in_valid = 1;
    end
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!err_overflow) begin failures++; $display("overflow not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
