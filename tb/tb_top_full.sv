// tb_top_full: the Palermo controller at its default (paper) sizes: 3x8 PEs,
// Z=16, S=27, A=20, trees of 26/23/20 levels, 256-entry stashes, 6-level
// tree-top cache, 16 MB PosMap3, one issue slot every 420 cycles.
// Writes two blocks, reads them back (the first request also owns an
// eviction, so every row runs CP, LM, ER, RP, EP and FI), reads a block never
// written (must return zero), and checks the data.
module tb_top_full;
  import palermo_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [KEY_W-1:0] key = 128'h0F1E_2D3C_4B5A_6978_8796_A5B4_C3D2_E1F0;
  logic pad_en = 0;
  logic llc_req_valid = 0, llc_req_ready, llc_resp_valid;
  llc_req_t llc_req = '0;
  llc_resp_t llc_resp;
  logic mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready;
  mem_req_t mem_req;
  mem_resp_t mem_resp;
  logic [2:0] stash_overflow;
  logic [8:0] stash_occ [3];
  phase_e pe_phase [3][8];
  stats_t stats;
  int n_reads, n_writes, max_out;

  palermo_top dut (
    .clk, .rst_n, .key, .pad_en,
    .llc_req_valid, .llc_req, .llc_req_ready, .llc_resp_valid, .llc_resp,
    .mem_req_valid, .mem_req, .mem_req_ready, .mem_resp_valid, .mem_resp, .mem_resp_ready,
    .stash_overflow, .stash_occupancy(stash_occ), .pe_phase, .stats
  );

  dram_model #(.LATENCY(60)) u_mem (
    .clk, .rst_n, .key, .req_valid(mem_req_valid), .req(mem_req), .req_ready(mem_req_ready),
    .resp_valid(mem_resp_valid), .resp(mem_resp), .resp_ready(mem_resp_ready),
    .n_reads, .n_writes, .max_outstanding(max_out)
  );

  int checks = 0, failures = 0, n_resp = 0;
  logic [BLOCK_W-1:0] got [256];
  bit seen_ep = 0;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(negedge clk) if (rst_n) begin
    if (llc_resp_valid) begin got[llc_resp.id] = llc_resp.data; n_resp++; end
    for (int r = 0; r < 3; r++) if (pe_phase[r][0] == PH_EP) seen_ep = 1;
  end

  task automatic issue(input bit we, input logic [33:0] pa, input logic [BLOCK_W-1:0] d, input logic [7:0] id);
    bit rdy;
    llc_req_valid = 1'b1; llc_req.we = we; llc_req.pa = pa; llc_req.wdata = d; llc_req.id = id;
    forever begin
      rdy = llc_req_ready;
      @(posedge clk);
      @(negedge clk);
      if (rdy) break;
    end
    llc_req_valid = 1'b0;
  endtask

  initial begin : watchdog
    repeat (400_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout (%0d responses)", n_resp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [BLOCK_W-1:0] d0, d1;
    for (int w = 0; w < BLOCK_W/32; w++) begin d0[w*32 +: 32] = $urandom; d1[w*32 +: 32] = $urandom; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    issue(1'b1, 34'h3_2100_0040, d0, 8'd0);   // write block A (GlobalID 0: also evicts)
    issue(1'b1, 34'h0_0000_1000, d1, 8'd1);   // write block B
    issue(1'b0, 34'h3_2100_0040, '0, 8'd2);   // read A
    issue(1'b0, 34'h0_0000_1000, '0, 8'd3);   // read B
    issue(1'b0, 34'h1_FFFF_FFC0, '0, 8'd4);   // read a block never written
    while (n_resp < 5) @(negedge clk);
    check(got[2] == d0, "read back block A");
    check(got[3] == d1, "read back block B");
    check(got[4] == '0, "untouched block reads as zero");
    check(seen_ep, "evict path ran");
    check(stash_overflow == 3'b000, "no stash overflow");
    check(stats.ttc_hits > 0, "tree-top cache used");
    $display("dram reads %0d writes %0d, ttc hits %0d, evictions %0d", n_reads, n_writes, stats.ttc_hits, stats.evictions);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
