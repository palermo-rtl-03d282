// tb_stash: an 8-entry stash with two ports and a 4-level tree (3 leaf bits),
// driven with random INSERT / ACCESS (read, write, position-map update) / PICK
// operations against a reference model.  Checks hit and miss results and data,
// allocation on a miss, the 64-bit lane update of a position-map access, that a
// PICK returns only an unlocked block whose leaf shares the requested prefix
// (and finds one whenever the model holds one), occupancy, and the sticky
// overflow flag when a ninth block is inserted.  Responses arrive the cycle
// after the grant; two simultaneous requests are served on successive cycles.
module tb_stash;
  import palermo_pkg::*;
  localparam int NP = 2, SN = 8, LV = 4, L = LV - 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NP-1:0] req_valid = '0, req_ready, resp_valid, lock_valid = '0;
  stash_req_t req [NP];
  stash_resp_t resp;
  logic [ADDR_W-1:0] lock_addr [NP];
  logic overflow;
  logic [$clog2(SN+1)-1:0] occupancy;
  int checks = 0, failures = 0;

  palermo_stash #(.N_PORTS(NP), .STASH_N(SN), .LEVELS(LV)) dut (.*);

  // reference model
  bit               m_v [SN];
  logic [ADDR_W-1:0] m_a [SN];
  logic [LEAF_W-1:0] m_l [SN];
  logic [BLOCK_W-1:0] m_d [SN];

  task automatic check(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_op(input int p, input stash_req_t rq, output stash_resp_t rs);
    req[p] = rq; req_valid[p] = 1'b1;
    #1;
    while (!req_ready[p]) begin @(negedge clk); #1; end
    @(negedge clk);
    req_valid[p] = 1'b0;
    check(resp_valid[p] == 1'b1, "response one cycle after grant");
    rs = resp;
  endtask

  function automatic int m_find(input logic [ADDR_W-1:0] a);
    for (int e = 0; e < SN; e++) if (m_v[e] && m_a[e] == a) return e;
    return -1;
  endfunction
  function automatic int m_count();
    int n = 0;
    for (int e = 0; e < SN; e++) n += m_v[e];
    return n;
  endfunction
  function automatic int m_free();
    for (int e = 0; e < SN; e++) if (!m_v[e]) return e;
    return -1;
  endfunction
  function automatic logic [BLOCK_W-1:0] rnd_blk();
    logic [BLOCK_W-1:0] d;
    for (int w = 0; w < BLOCK_W/32; w++) d[w*32 +: 32] = $urandom;
    return d;
  endfunction
  function automatic bit prefix_ok(input logic [LEAF_W-1:0] a, input logic [LEAF_W-1:0] b, input int lvl);
    for (int k = 0; k < lvl; k++) if (a[L-1-k] != b[L-1-k]) return 0;
    return 1;
  endfunction

  int n_hit = 0, n_miss = 0, n_pick = 0, n_pmrmw = 0, n_lockskip = 0;

  initial begin
    stash_req_t rq;
    stash_resp_t rs;
    for (int p = 0; p < NP; p++) begin req[p] = '0; lock_addr[p] = '0; end
    for (int e = 0; e < SN; e++) m_v[e] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 3000; t++) begin
      int kind, p, e;
      p = $urandom_range(0, NP-1);
      rq = '0;
      rq.addr = ADDR_W'($urandom_range(0, 11));
      rq.leaf = LEAF_W'($urandom_range(0, (1 << L) - 1));
      kind = $urandom_range(0, 9);
      // random lock on port 1 (as an in-flight PE would hold)
      lock_valid[1] = $urandom_range(0, 2) == 0;
      lock_addr[1]  = ADDR_W'($urandom_range(0, 11));
      if (kind < 3 && m_count() < SN - 1 && m_find(rq.addr) < 0) begin
        rq.op = ST_INSERT; rq.data = rnd_blk();
        do_op(p, rq, rs);
        e = m_free(); m_v[e] = 1; m_a[e] = rq.addr; m_l[e] = rq.leaf; m_d[e] = rq.data;
      end else if (kind < 7 && m_count() < SN - 1) begin
        logic [BLOCK_W-1:0] exp_new;
        rq.op = ST_ACCESS;
        rq.acc_op = op_e'($urandom_range(0, 2));
        rq.data = rnd_blk(); rq.idx = 3'($urandom); rq.pm_val = LEAF_W'($urandom);
        do_op(p, rq, rs);
        e = m_find(rq.addr);
        check(rs.found == (e >= 0), "access hit/miss");
        check(rs.data == (e >= 0 ? m_d[e] : '0), "access old data");
        if (e >= 0) n_hit++; else begin n_miss++; e = m_free(); m_v[e] = 1; m_a[e] = rq.addr; m_d[e] = '0; end
        exp_new = m_d[e];
        if (rq.acc_op == OP_WRITE) exp_new = rq.data;
        if (rq.acc_op == OP_PMRMW) begin exp_new[int'(rq.idx)*64 +: 64] = 64'(rq.pm_val); n_pmrmw++; end
        m_d[e] = exp_new; m_l[e] = rq.leaf;
      end else begin
        int lvl; bit any_elig, lock_blocked;
        lvl = $urandom_range(0, L);
        rq.op = ST_PICK; rq.level = 5'(lvl);
        any_elig = 0; lock_blocked = 0;
        for (int k = 0; k < SN; k++) if (m_v[k] && prefix_ok(m_l[k], rq.leaf, lvl)) begin
          if (lock_valid[1] && m_a[k] == lock_addr[1]) lock_blocked = 1; else any_elig = 1;
        end
        do_op(p, rq, rs);
        check(rs.found == any_elig, "pick finds an eligible block iff one exists");
        if (rs.found) begin
          e = m_find(rs.addr);
          check(e >= 0, "picked block was in the stash");
          check(!(lock_valid[1] && rs.addr == lock_addr[1]), "locked block not picked");
          if (e >= 0) begin
            check(prefix_ok(rs.leaf, rq.leaf, lvl) && rs.leaf == m_l[e], "picked leaf shares the path prefix");
            check(rs.data == m_d[e], "picked data");
            m_v[e] = 0;
          end
          n_pick++;
        end
        if (!any_elig && lock_blocked) n_lockskip++;
      end
      check(int'(occupancy) == m_count(), "occupancy");
      check(!overflow, "no overflow while space remains");
    end
    lock_valid = '0;
    check(n_hit > 100 && n_miss > 100 && n_pick > 100 && n_pmrmw > 50 && n_lockskip > 0, "all cases exercised");
    // simultaneous requests on both ports
    rq = '0; rq.op = ST_PICK; rq.level = '0;
    req[0] = rq; req[1] = rq; req_valid = 2'b11;
    #1;
    check($countones(req_ready) == 1, "one grant per cycle");
    @(negedge clk);
    req_valid = req_valid & ~resp_valid;
    #1;
    check(req_ready == req_valid && req_valid != 0, "second port granted next cycle");
    @(negedge clk);
    req_valid = '0;
    // fill and overflow
    for (int e = 0; e < SN; e++) m_v[e] = 0;
    while (int'(occupancy) > 0) begin rq = '0; rq.op = ST_PICK; do_op(0, rq, rs); end
    for (int k = 0; k < SN; k++) begin rq = '0; rq.op = ST_INSERT; rq.addr = ADDR_W'(100 + k); do_op(0, rq, rs); end
    check(int'(occupancy) == SN && !overflow, "stash full without overflow");
    rq = '0; rq.op = ST_INSERT; rq.addr = ADDR_W'(200); do_op(0, rq, rs);
    check(overflow, "ninth insert flags overflow");
    $display("hits %0d misses %0d picks %0d pmrmw %0d lock-skips %0d", n_hit, n_miss, n_pick, n_pmrmw, n_lockskip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
