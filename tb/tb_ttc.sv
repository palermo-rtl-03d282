// tb_ttc: a tree-top cache holding the top 2 levels (3 buckets per row, 4 words
// each) in front of a simple memory model with random latency and ready.
// Random reads and writes over the cached and uncached parts of all three rows
// are checked against a reference: cached words are answered locally (and
// counted in hit_count), uncached ones are forwarded unchanged with their tag,
// never-written words read back as the keyed pad (the encryption of zero), and
// reads of one address are answered in request order (a local hit may overtake
// an uncached read of another address).
module tb_ttc;
  import palermo_pkg::*;
  localparam int TL = 2, SL = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [KEY_W-1:0] key = 128'h1234_5678_9ABC_DEF0_0FED_CBA9_8765_4321;
  logic in_req_valid = 0, in_req_ready, in_resp_valid, in_resp_ready = 0;
  mem_req_t in_req = '0;
  mem_resp_t in_resp;
  logic ext_req_valid, ext_req_ready = 0, ext_resp_valid = 0, ext_resp_ready;
  mem_req_t ext_req;
  mem_resp_t ext_resp = '0;
  logic [31:0] hit_count;
  int checks = 0, failures = 0;

  palermo_ttc #(.TTC_LEVELS(TL), .SLOTS(SL)) dut (.*);

  // reference contents and expected response queue
  logic [MEM_W-1:0] ref_mem [logic [MADDR_W-1:0]];
  mem_resp_t exp_q [$];
  // external memory model: in order, random latency
  mem_req_t ext_q [$];
  int ext_delay = 0, n_ext = 0, exp_hits = 0;

  task automatic check(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  function automatic logic [MEM_W-1:0] expect_word(input logic [MADDR_W-1:0] a);
    logic [PAD_W-1:0] z;
    if (ref_mem.exists(a)) return ref_mem[a];
    z = xor_pad(key, a);
    return z[MEM_W-1:0];
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog, %0d reads outstanding (%0d at memory, valid %0b)", exp_q.size(), ext_q.size(), in_req_valid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int issued = 0, answered = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (issued < 1500 || exp_q.size() > 0) begin
      bit fire_in, fire_resp, fire_ext, fire_eresp;
      @(negedge clk);
      // choose new inputs
      if (!in_req_valid && issued < 1500 && $urandom_range(0, 2) != 0) begin
        logic [1:0] row; logic [NODE_W-1:0] node; logic [SLOT_W-1:0] slot;
        row  = 2'($urandom_range(0, 2));
        node = NODE_W'($urandom_range(0, 6));       // 0..2 cached, 3..6 not
        slot = SLOT_W'($urandom_range(0, SL));
        in_req_valid = 1;
        in_req.addr  = MADDR_W'({row, node, slot});
        in_req.we    = $urandom_range(0, 2) == 0;
        in_req.tag   = TAG_W'($urandom);
        for (int w = 0; w < MEM_W/32; w++) in_req.wdata[w*32 +: 32] = $urandom;
      end
      in_resp_ready = $urandom_range(0, 3) != 0;
      ext_req_ready = $urandom_range(0, 3) != 0;
      if (!ext_resp_valid && ext_q.size() > 0 && ext_delay == 0) begin
        mem_req_t q;
        q = ext_q[0];
        ext_resp_valid = 1; ext_resp.addr = q.addr; ext_resp.tag = q.tag; ext_resp.rdata = q.wdata;
      end
      #1;
      // sample handshakes just before the rising edge
      fire_in    = in_req_valid && in_req_ready;
      fire_resp  = in_resp_valid && in_resp_ready;
      fire_ext   = ext_req_valid && ext_req_ready;
      fire_eresp = ext_resp_valid && ext_resp_ready;
      if (fire_resp) begin
        int k;
        k = -1;
        for (int i = exp_q.size() - 1; i >= 0; i--) if (exp_q[i].addr == in_resp.addr) k = i;
        check(k >= 0, "response expected");
        if (k >= 0) begin
          check(in_resp.tag == exp_q[k].tag, "oldest read of this address answered first, tag kept");
          check(in_resp.rdata == exp_q[k].rdata, "response data");
          exp_q.delete(k);
        end
        answered++;
      end
      if (fire_ext) begin
        check(in_req_valid && ext_req == in_req, "forwarded request unchanged");
        check(in_req.addr[2+NODE_W+SLOT_W-1:SLOT_W] >= 3, "only uncached buckets forwarded");
        if (!ext_req.we) begin
          mem_req_t q;
          q = ext_req; q.wdata = expect_word(ext_req.addr);   // memory is read at arrival
          ext_q.push_back(q);
        end
        n_ext++;
      end
      if (fire_in) begin
        logic [NODE_W-1:0] nd;
        nd = in_req.addr[SLOT_W +: NODE_W];
        if (nd < 3) exp_hits++;
        if (in_req.we) ref_mem[in_req.addr] = in_req.wdata;
        else begin
          mem_resp_t e;
          e.addr = in_req.addr; e.tag = in_req.tag; e.rdata = expect_word(in_req.addr);
          exp_q.push_back(e);
        end
        issued++;
      end
      @(posedge clk); #1;
      if (fire_in) in_req_valid = 0;
      if (fire_eresp) begin ext_resp_valid = 0; void'(ext_q.pop_front()); ext_delay = $urandom_range(0, 6); end
      else if (ext_delay > 0) ext_delay--;
    end
    check(int'(hit_count) == exp_hits && exp_hits > 300, "hit count");
    check(n_ext > 300, "uncached traffic forwarded");
    $display("issued %0d hits %0d forwarded %0d", issued, exp_hits, n_ext);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
