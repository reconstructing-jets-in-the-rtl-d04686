// tb_jet_corrections: self-checking test of the jet energy correction.
//
// After reset the table must hold 1.0 everywhere (output pT = raw pT,
// saturated). The test then writes a distinct factor into every table
// entry and checks, for random jets over the whole eta and pT range
// (including saturation), that the right bin's factor is applied, with the
// 2-cycle latency.
module tb_jet_corrections;
  import sc_pkg::*;

  localparam int RAW_W = PT_W + 7;
  localparam int LAT = 2;

  logic clk = 1'b0, rst = 1'b1;
  logic cfg_we;
  logic [6:0] cfg_addr;
  logic [11:0] cfg_data;
  logic [RAW_W-1:0] in_pt;
  eta_t in_eta;
  phi_t in_phi;
  pass_tag_t in_tag;
  logic in_jet_valid, in_last;
  jet_t out_jet;
  pass_tag_t out_tag;
  logic out_jet_valid, out_last;

  int checks = 0, failures = 0, cyc = 0;
  int factor [128];
  bit programmed = 0;

  jet_corrections #(.RAW_W(RAW_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int pt; eta_t eta; phi_t phi; pass_tag_t tag; int due; } exp_t;
  exp_t exp_q [$];

  function automatic int expected_pt(int raw, int eta);
    int ae, eb, pb, f;
    longint v;
    ae = (eta < 0) ? -eta : eta;
    eb = ae / 128; if (eb > 7) eb = 7;
    pb = raw / 32; if (pb > 15) pb = 15;
    f  = programmed ? factor[eb*16 + pb] : 512;
    v  = (longint'(raw) * f) / 512;
    return (v > 65535) ? 65535 : int'(v);
  endfunction

  task automatic send_jets(int n);
    for (int k = 0; k < n; k++) begin
      exp_t e;
      int raw;
      pass_tag_t t;
      case (k % 4)
        0: raw = $urandom % 600;
        1: raw = $urandom % 70000;
        2: raw = $urandom % (1 << RAW_W);
        default: raw = $urandom % 5000;
      endcase
      t = '0; t.valid = 1; t.evid = EVID_W'(k);
      e.pt = expected_pt(raw, 0);
      e.eta = eta_t'(int'($urandom % 2300) - 1150);
      e.phi = phi_t'($urandom);
      e.pt = expected_pt(raw, int'(e.eta));
      e.tag = t; e.due = cyc + 1 + LAT;
      in_pt <= RAW_W'(raw); in_eta <= e.eta; in_phi <= e.phi;
      in_tag <= t; in_jet_valid <= 1; in_last <= (k % 5 == 0);
      exp_q.push_back(e);
      @(posedge clk);
    end
    in_tag <= '0; in_jet_valid <= 0; in_last <= 0;
    repeat (5) @(posedge clk);
  endtask

  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_data = 0;
    in_pt = 0; in_eta = 0; in_phi = 0; in_tag = '0; in_jet_valid = 0; in_last = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    send_jets(200);                       // unity table after reset
    for (int a = 0; a < 128; a++) begin   // program a distinct factor per bin
      factor[a] = 300 + a * 7;
      cfg_we <= 1; cfg_addr <= 7'(a); cfg_data <= 12'(factor[a]);
      @(posedge clk);
    end
    cfg_we <= 0;
    @(posedge clk);
    programmed = 1;
    send_jets(600);
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
        if (int'(out_jet.pt) != e.pt || out_jet.eta != e.eta || out_jet.phi != e.phi || out_tag != e.tag) begin
          failures++;
          if (failures < 10) $display("got pt %0d eta %0d, expected %0d %0d", out_jet.pt, out_jet.eta, e.pt, e.eta);
        end
      end
    end
  end
endmodule
