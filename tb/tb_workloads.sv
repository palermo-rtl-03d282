// tb_workloads: the controller with the full 3x8 PE array and Z=16, S=27,
// A=20, on 12-level Data trees (2^14 blocks), driven by three access
// patterns standing in for the evaluated service classes:
//   stream  consecutive cache lines (streaming / SPEC-like sweeps),
//   rand    uniformly random lines over the whole space (random KV access),
//   hot     80% of accesses to 16 hot lines, the rest random (embedding and
//           graph lookups with a skewed popularity).
// Each pattern runs 400 requests (a third writes) issued as fast as the
// controller accepts them; every read is checked against a reference memory.
// The test reports cycles per request, memory words per request and the peak
// stash occupancy of each pattern, and checks that the stash never overflows
// and that its peak stays within the 256-entry bound.  ORAM traffic is meant
// to look the same whatever the pattern, so the memory words per request of
// the three patterns must agree within 25%.
module tb_workloads;
  import palermo_pkg::*;

  localparam int NC = 8;
  localparam int DL = 12;
  localparam int NBLK = 1 << (DL - 1 + 3);
  localparam int NOPS = 400;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [KEY_W-1:0] key = 128'h7777_1111_2222_3333_4444_5555_6666_8888;
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

  palermo_top #(.N_COLS(NC), .DATA_LEVELS(DL), .TTC_LEVELS(3), .PM3_AW(8),
                .ISSUE_INTERVAL(1)) dut (
    .clk, .rst_n, .key, .pad_en,
    .llc_req_valid, .llc_req, .llc_req_ready, .llc_resp_valid, .llc_resp,
    .mem_req_valid, .mem_req, .mem_req_ready, .mem_resp_valid, .mem_resp, .mem_resp_ready,
    .stash_overflow, .stash_occupancy(stash_occ), .pe_phase, .stats
  );

  dram_model #(.LATENCY(40)) u_mem (
    .clk, .rst_n, .key, .req_valid(mem_req_valid), .req(mem_req), .req_ready(mem_req_ready),
    .resp_valid(mem_resp_valid), .resp(mem_resp), .resp_ready(mem_resp_ready),
    .n_reads, .n_writes, .max_outstanding(max_out)
  );

  int checks = 0, failures = 0;
  logic [BLOCK_W-1:0] ref_mem [int];
  logic [BLOCK_W-1:0] expect_q [256];
  logic               is_read [256];
  logic               outstanding [256];
  int n_resp = 0, n_issued = 0, peak_occ = 0;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(negedge clk) if (rst_n) begin
    for (int r = 0; r < 3; r++) if (int'(stash_occ[r]) > peak_occ) peak_occ = int'(stash_occ[r]);
    if (llc_resp_valid) begin
      n_resp++;
      check(outstanding[llc_resp.id], "response for an outstanding id");
      outstanding[llc_resp.id] = 1'b0;
      if (is_read[llc_resp.id])
        check(llc_resp.data == expect_q[llc_resp.id], $sformatf("read id %0d data", llc_resp.id));
    end
  end

  task automatic issue(input bit we, input int blk, input logic [BLOCK_W-1:0] d, input logic [7:0] id);
    bit rdy;
    llc_req_valid = 1'b1;
    llc_req.we = we; llc_req.pa = 34'(blk) << 6; llc_req.wdata = d; llc_req.id = id;
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
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout (issued %0d, answered %0d)", n_issued, n_resp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real words_per_req [3];

  initial begin
    logic [7:0] id;
    int hot [16];
    for (int i = 0; i < 256; i++) outstanding[i] = 1'b0;
    for (int i = 0; i < 16; i++) hot[i] = $urandom_range(0, NBLK - 1);
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    id = 0;
    for (int p = 0; p < 3; p++) begin
      int t0, w0, base;
      string nm;
      nm = (p == 0) ? "stream" : (p == 1) ? "rand" : "hot";
      t0 = $time / 10; w0 = n_reads + n_writes; peak_occ = 0;
      base = $urandom_range(0, NBLK - NOPS - 1);
      for (int op = 0; op < NOPS; op++) begin
        int blk; bit we; logic [BLOCK_W-1:0] d;
        case (p)
          0: blk = base + op;
          1: blk = $urandom_range(0, NBLK - 1);
          default: blk = ($urandom_range(0, 4) != 0) ? hot[$urandom_range(0, 15)] : $urandom_range(0, NBLK - 1);
        endcase
        we = ($urandom_range(0, 2) == 0);
        for (int w = 0; w < BLOCK_W/32; w++) d[w*32 +: 32] = $urandom;
        while (outstanding[id]) @(negedge clk);
        is_read[id] = !we;
        expect_q[id] = ref_mem.exists(blk) ? ref_mem[blk] : '0;
        outstanding[id] = 1'b1;
        if (we) ref_mem[blk] = d;
        issue(we, blk, d, id);
        id++;
      end
      while (n_resp < n_issued) @(negedge clk);
      words_per_req[p] = real'(n_reads + n_writes - w0) / NOPS;
      $display("%-6s: %0d requests, %0.1f cycles/request, %0.1f memory words/request, peak stash %0d",
               nm, NOPS, real'($time / 10 - t0) / NOPS, words_per_req[p], peak_occ);
      check(peak_occ <= 256, $sformatf("%s: stash within bound", nm));
    end
    check(stash_overflow == 3'b000, "no stash overflow");
    for (int p = 1; p < 3; p++)
      check(words_per_req[p] < 1.25 * words_per_req[0] && words_per_req[p] > 0.8 * words_per_req[0],
            "memory traffic per request independent of the access pattern");
    $display("resets %0d evictions %0d pending %0d max memory reads in flight %0d",
             stats.resets, stats.evictions, stats.pending, max_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
