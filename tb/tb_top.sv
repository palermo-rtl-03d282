// tb_top: end-to-end test of the Palermo controller at reduced tree sizes.
// A 3x3 PE array (as in the paper's walk-through) with Z=16, S=27, A=20 runs a
// random mix of reads and writes on a small pool of blocks against a simple
// reference memory; every read must return the last value written before it
// was issued.  Requests to the same block are issued back to back to exercise
// the pending rule.  It then idles the LLC with padding on and checks that
// dummy requests are issued but never answered.  Each mechanism must occur:
// early reshuffle, evict path, pending route, stash hit, tree-top-cache hit,
// dummy padding, overlapping path reads of different requests in one row,
// overlapping work of different rows of one request, and several DRAM reads in
// flight at once.  The stash must never overflow.
module tb_top;
  import palermo_pkg::*;

  localparam int NC = 3;
  localparam int NOPS = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [KEY_W-1:0] key = 128'h0123_4567_89AB_CDEF_FEDC_BA98_7654_3210;
  logic pad_en = 0;
  logic llc_req_valid = 0, llc_req_ready, llc_resp_valid;
  llc_req_t llc_req = '0;
  llc_resp_t llc_resp;
  logic mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready;
  mem_req_t mem_req;
  mem_resp_t mem_resp;
  logic [2:0] stash_overflow;
  logic [8:0] stash_occ [3];
  phase_e pe_phase [3][NC];
  stats_t stats;
  int n_reads, n_writes, max_out;

  palermo_top #(.N_COLS(NC), .DATA_LEVELS(10), .TTC_LEVELS(2), .PM3_AW(6),
                .ISSUE_INTERVAL(1)) dut (
    .clk, .rst_n, .key, .pad_en,
    .llc_req_valid, .llc_req, .llc_req_ready, .llc_resp_valid, .llc_resp,
    .mem_req_valid, .mem_req, .mem_req_ready, .mem_resp_valid, .mem_resp, .mem_resp_ready,
    .stash_overflow, .stash_occupancy(stash_occ), .pe_phase, .stats
  );

  dram_model #(.LATENCY(30)) u_mem (
    .clk, .rst_n, .key, .req_valid(mem_req_valid), .req(mem_req), .req_ready(mem_req_ready),
    .resp_valid(mem_resp_valid), .resp(mem_resp), .resp_ready(mem_resp_ready),
    .n_reads, .n_writes, .max_outstanding(max_out)
  );

  int checks = 0, failures = 0;
  logic [BLOCK_W-1:0] ref_mem [int];
  logic [BLOCK_W-1:0] expect_q [256];
  logic               is_read [256];
  logic               outstanding [256];
  int n_resp = 0, n_issued = 0;
  int rp_overlap = 0, row_overlap = 0;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // responses
  always @(negedge clk) if (rst_n && llc_resp_valid) begin
    n_resp++;
    check(outstanding[llc_resp.id], $sformatf("response for id %0d not outstanding", llc_resp.id));
    outstanding[llc_resp.id] = 1'b0;
    if (is_read[llc_resp.id])
      check(llc_resp.data == expect_q[llc_resp.id],
            $sformatf("read id %0d data mismatch", llc_resp.id));
  end

  // mechanism monitors
  always @(negedge clk) if (rst_n) begin
    for (int r = 0; r < 3; r++) begin
      int nrp = 0;
      for (int c = 0; c < NC; c++) if (pe_phase[r][c] == PH_RP) nrp++;
      if (nrp >= 2) rp_overlap++;
    end
    for (int c = 0; c < NC; c++) begin
      int nact = 0;
      for (int r = 0; r < 3; r++)
        if (pe_phase[r][c] inside {PH_LM, PH_ER, PH_RP, PH_EP}) nact++;
      if (nact >= 2) row_overlap++;
    end
  end

  // called at a falling edge; returns at a falling edge with the request taken
  task automatic issue(input bit we, input int blk, input logic [BLOCK_W-1:0] d, input logic [7:0] id);
    bit rdy;
    llc_req_valid = 1'b1;
    llc_req.we    = we;
    llc_req.pa    = 34'(blk) << 6;
    llc_req.wdata = d;
    llc_req.id    = id;
    forever begin
      rdy = llc_req_ready;
      @(posedge clk);
      @(negedge clk);
      if (rdy) break;
    end
    llc_req_valid = 1'b0;
    n_issued++;
  endtask

  initial begin : watchdog
    repeat (400_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout (issued %0d, answered %0d)", n_issued, n_resp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int blk, pool [8];
    logic [7:0] id;
    logic [BLOCK_W-1:0] d;
    bit we;
    for (int i = 0; i < 256; i++) outstanding[i] = 1'b0;
    for (int i = 0; i < 8; i++) pool[i] = $urandom_range(0, 4095);
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    @(negedge clk);
    id = 0;
    for (int op = 0; op < NOPS; op++) begin
      // half the operations reuse the previous block (back-to-back same block)
      blk = (op % 4 == 1) ? blk : pool[$urandom_range(0, 7)];
      we  = ($urandom_range(0, 2) == 0) || !ref_mem.exists(blk);
      for (int w = 0; w < BLOCK_W/32; w++) d[w*32 +: 32] = $urandom;
      while (outstanding[id]) @(negedge clk);
      is_read[id]     = !we;
      expect_q[id]    = ref_mem.exists(blk) ? ref_mem[blk] : '0;
      outstanding[id] = 1'b1;
      if (we) ref_mem[blk] = d;
      issue(we, blk, d, id);
      id++;
    end
    // drain
    while (n_resp < n_issued) @(negedge clk);
    // padding: no LLC traffic, dummy requests keep the issue rate
    pad_en = 1'b1;
    repeat (3000) @(negedge clk);
    pad_en = 1'b0;
    repeat (20000) @(negedge clk);
    check(n_resp == n_issued, "dummy requests must not produce LLC responses");
    // one more read of every pool block after the dummies
    for (int i = 0; i < 8; i++) begin
      blk = pool[i];
      if (ref_mem.exists(blk)) begin
        while (outstanding[id]) @(negedge clk);
        is_read[id] = 1'b1; expect_q[id] = ref_mem[blk]; outstanding[id] = 1'b1;
        issue(1'b0, blk, '0, id);
        id++;
      end
    end
    while (n_resp < n_issued) @(negedge clk);

    check(stash_overflow == 3'b000, "stash overflow");
    check(stats.resets > 0,     $sformatf("early reshuffle happened (%0d)", stats.resets));
    check(stats.evictions > 0,  $sformatf("evict path happened (%0d)", stats.evictions));
    check(stats.pending > 0,    $sformatf("pending route happened (%0d)", stats.pending));
    check(stats.stash_hits > 0, $sformatf("stash hit happened (%0d)", stats.stash_hits));
    check(stats.dummies > 0,    $sformatf("dummy padding happened (%0d)", stats.dummies));
    check(stats.ttc_hits > 0,   $sformatf("tree-top cache hit happened (%0d)", stats.ttc_hits));
    check(rp_overlap > 0,       $sformatf("overlapping RP in a row (%0d cycles)", rp_overlap));
    check(row_overlap > 0,      $sformatf("overlapping rows in a column (%0d cycles)", row_overlap));
    check(max_out > 1,          $sformatf("several DRAM reads in flight (max %0d)", max_out));
    $display("requests %0d, resets %0d, evictions %0d, pending %0d, stash hits %0d, dummies %0d, ttc hits %0d",
             n_issued, stats.resets, stats.evictions, stats.pending, stats.stash_hits, stats.dummies, stats.ttc_hits);
    $display("dram reads %0d writes %0d max in flight %0d, rp overlap %0d, row overlap %0d, stash occ %0d/%0d/%0d",
             n_reads, n_writes, max_out, rp_overlap, row_overlap, stash_occ[0], stash_occ[1], stash_occ[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
