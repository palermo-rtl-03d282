// tb_mesh: four PE ports with random request traffic and a random memory-side
// ready.  Checks that every request appears exactly once on the output with the
// requester's tag and unchanged address, that a port is not starved (round
// robin: with all ports requesting, grants rotate), and that a response goes
// only to the PE named by its tag and waits for that PE's ready.
module tb_mesh;
  import palermo_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] pe_req_valid = '0, pe_req_ready, pe_resp_valid, pe_resp_ready = '0;
  mem_req_t pe_req [N];
  mem_resp_t pe_resp;
  logic out_req_valid, out_req_ready = 0, out_resp_valid = 0, out_resp_ready;
  mem_req_t out_req;
  mem_resp_t out_resp = '0;
  int checks = 0, failures = 0;
  int sent [N], got [N];

  palermo_mesh #(.N(N)) dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // request side: a handshake is judged just before the rising edge
  task automatic observe();
    if (out_req_valid && out_req_ready) begin
      int t;
      t = int'(out_req.tag);
      checks++;
      if (!(t < N && pe_req_ready[t] && $countones(pe_req_ready) == 1 &&
            out_req.addr == MADDR_W'({t, got[t]}))) begin
        failures++; $display("FAIL: request tag %0d addr %h", t, out_req.addr);
      end
      got[t]++;
    end
  endtask

  initial begin
    int last, rot_ok;
    for (int i = 0; i < N; i++) begin sent[i] = 0; got[i] = 0; pe_req[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // random traffic
    for (int cyc = 0; cyc < 2000; cyc++) begin
      logic [N-1:0] fired;
      @(negedge clk);
      for (int i = 0; i < N; i++) if (!pe_req_valid[i] && $urandom_range(0, 1)) begin
        pe_req_valid[i] = 1; pe_req[i].addr = MADDR_W'({i, sent[i]}); pe_req[i].tag = '1;
      end
      out_req_ready = $urandom_range(0, 3) != 0;
      #1;
      observe();
      fired = pe_req_valid & pe_req_ready;
      @(posedge clk); #1;
      for (int i = 0; i < N; i++) if (fired[i]) begin sent[i]++; pe_req_valid[i] = 0; end
    end
    @(negedge clk);
    out_req_ready = 0;
    pe_req_valid = '0;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (sent[i] != got[i] || sent[i] == 0) begin failures++; $display("FAIL: port %0d sent %0d got %0d", i, sent[i], got[i]); end
    end
    // round robin with all requesting
    pe_req_valid = '1; out_req_ready = 1; last = -1; rot_ok = 1;
    for (int k = 0; k < 8; k++) begin
      #1;
      if (last >= 0 && int'(out_req.tag) != (last + 1) % N) rot_ok = 0;
      last = int'(out_req.tag);
      @(negedge clk);
    end
    checks++; if (!rot_ok) begin failures++; $display("FAIL: grants do not rotate"); end
    pe_req_valid = '0; out_req_ready = 0;
    // responses
    for (int t = 0; t < 40; t++) begin
      int tg;
      tg = $urandom_range(0, N-1);
      out_resp.tag = TAG_W'(tg); out_resp.addr = MADDR_W'(t); out_resp_valid = 1;
      pe_resp_ready = '0;
      #1;
      checks++;
      if (pe_resp_valid != (N'(1) << tg) || out_resp_ready) begin failures++; $display("FAIL: response steering"); end
      pe_resp_ready = N'(1) << tg;
      #1;
      checks++;
      if (!out_resp_ready || pe_resp.addr != MADDR_W'(t)) begin failures++; $display("FAIL: response ready"); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
