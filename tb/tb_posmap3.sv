// tb_posmap3: two ports issue random read-old/write-new leaf requests to a
// 64-entry PosMap3; each response must return the leaf last written to that
// entry (tracked by a reference array after initialising every entry), one
// cycle after the grant, and simultaneous requests must be served one per cycle.
module tb_posmap3;
  import palermo_pkg::*;
  localparam int NP = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NP-1:0] req_valid = '0, req_ready, resp_valid;
  oram_req_t req [NP];
  oram_resp_t resp;
  int checks = 0, failures = 0;
  logic [LEAF_W-1:0] ref_pm [64];

  palermo_posmap3 #(.N_PORTS(NP), .PM3_AW(6)) dut (.clk, .rst_n, .req_valid, .req, .req_ready, .resp_valid, .resp);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one RMW from port p; returns old leaf
  task automatic rmw(input int p, input int index, input logic [LEAF_W-1:0] nl, output logic [LEAF_W-1:0] old);
    int wait_cyc = 0;
    req[p] = '0;
    req[p].op = OP_PMRMW; req[p].addr = ADDR_W'(index >> 3); req[p].idx = 3'(index); req[p].new_leaf = nl;
    req_valid[p] = 1'b1;
    #1;
    while (!req_ready[p]) begin @(negedge clk); #1; wait_cyc++; end
    @(negedge clk);
    req_valid[p] = 1'b0;
    checks++;
    if (!resp_valid[p]) begin failures++; $display("FAIL: no response one cycle after grant"); end
    old = resp.data[LEAF_W-1:0];
  endtask

  initial begin
    logic [LEAF_W-1:0] o, nl;
    for (int p = 0; p < NP; p++) req[p] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 64; i++) begin
      nl = LEAF_W'($urandom); rmw(i % NP, i, nl, o); ref_pm[i] = nl;
    end
    for (int t = 0; t < 300; t++) begin
      int i;
      i = $urandom_range(0, 63);
      nl = LEAF_W'($urandom);
      rmw($urandom_range(0, NP-1), i, nl, o);
      checks++;
      if (o != ref_pm[i]) begin failures++; $display("FAIL: entry %0d got %h exp %h", i, o, ref_pm[i]); end
      ref_pm[i] = nl;
    end
    // both ports at once: served on consecutive cycles, each correct
    begin
      int i0, i1, granted;
      i0 = 5; i1 = 9;
      req[0] = '0; req[0].op = OP_PMRMW; req[0].addr = ADDR_W'(i0 >> 3); req[0].idx = 3'(i0); req[0].new_leaf = 1;
      req[1] = '0; req[1].op = OP_PMRMW; req[1].addr = ADDR_W'(i1 >> 3); req[1].idx = 3'(i1); req[1].new_leaf = 2;
      req_valid = 2'b11;
      #1;
      checks++;
      if ($countones(req_ready) != 1) begin failures++; $display("FAIL: not exactly one grant"); end
      granted = req_ready[0] ? 0 : 1;
      @(negedge clk);
      req_valid[granted] = 1'b0;
      #1;
      checks++;
      if (resp.data[LEAF_W-1:0] != ref_pm[granted ? i1 : i0]) begin failures++; $display("FAIL: first of pair"); end
      checks++;
      if (!req_ready[1-granted]) begin failures++; $display("FAIL: second not granted next cycle"); end
      @(negedge clk);
      req_valid = '0;
      checks++;
      if (resp.data[LEAF_W-1:0] != ref_pm[granted ? i0 : i1]) begin failures++; $display("FAIL: second of pair"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
