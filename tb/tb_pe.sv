// tb_pe: one Data-row PE on a small tree (6 levels, Z=4, S=5) with its own
// stash, an on-chip position map (palermo_posmap3) as the south neighbour, and
// the behavioural memory.  The PE's token output feeds its own token input, so
// it runs requests back to back.  400 random reads, writes and position-map
// updates over 24 blocks (every 3rd request also evicts, with a
// reverse-lexicographic counter) are checked against a reference copy of the
// block contents: reads return the last data written, a position-map update
// returns the old 64-bit lane value and changes only that lane, and blocks
// never written read as zero.  Also checks that early reshuffles, evictions and
// stash hits all happened, that the stash never overflowed, that the phase
// sequence CP, LM, ER, RP, EP, FI was observed, and that the metadata reads
// of one path were in flight together.
module tb_pe;
  import palermo_pkg::*;
  localparam int LV = 6, ZZ = 4, SS = 5, NB = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [KEY_W-1:0] key = 128'hA5A5_0101_F00D_BEEF_1357_9BDF_2468_ACE0;

  logic n_req_valid = 0, n_req_ready, n_resp_valid, n_resp_ready = 1;
  oram_req_t n_req = '0;
  oram_resp_t n_resp;
  logic s_req_valid, s_resp_ready;
  oram_req_t s_req;
  logic [0:0] s_req_ready, s_resp_valid;
  oram_resp_t s_resp;
  logic token, pending_in = 0, inflight;
  logic [ADDR_W-1:0] cur_addr;
  logic [GID_W-1:0] cur_gid;
  logic st_req_valid, st_req_ready_v;
  logic [0:0] st_req_ready, st_resp_valid;
  stash_req_t st_req;
  stash_resp_t st_resp;
  logic mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready;
  mem_req_t mem_req;
  mem_resp_t mem_resp;
  logic fi;
  phase_e phase;
  logic ev_reset, ev_evict, ev_pending, ev_stash_hit;
  logic overflow;
  logic [6:0] occupancy;
  int n_reads, n_writes, max_out;

  palermo_pe #(.ROW(0), .PE_ID(0), .LEVELS(LV), .Z(ZZ), .S(SS), .TOKEN_INIT(1'b1)) dut (
    .clk, .rst_n, .key,
    .n_req_valid, .n_req, .n_req_ready, .n_resp_valid, .n_resp, .n_resp_ready,
    .s_req_valid, .s_req, .s_req_ready(s_req_ready[0]), .s_resp_valid(s_resp_valid[0]), .s_resp, .s_resp_ready,
    .token_in(token), .token_out(token), .pending_in, .inflight, .cur_addr, .cur_gid,
    .st_req_valid, .st_req, .st_req_ready(st_req_ready[0]), .st_resp_valid(st_resp_valid[0]), .st_resp,
    .mem_req_valid, .mem_req, .mem_req_ready, .mem_resp_valid, .mem_resp, .mem_resp_ready,
    .fi, .fi_all(fi), .phase, .ev_reset, .ev_evict, .ev_pending, .ev_stash_hit
  );

  stash_req_t st_req_a [1];
  oram_req_t s_req_a [1];
  logic [ADDR_W-1:0] lock_addr [1];
  assign st_req_a[0] = st_req;
  assign s_req_a[0]  = s_req;
  assign lock_addr[0] = cur_addr;

  palermo_stash #(.N_PORTS(1), .STASH_N(64), .LEVELS(LV)) u_stash (
    .clk, .rst_n, .req_valid(st_req_valid), .req(st_req_a), .req_ready(st_req_ready),
    .resp_valid(st_resp_valid), .resp(st_resp), .lock_valid(inflight), .lock_addr,
    .overflow, .occupancy
  );

  palermo_posmap3 #(.N_PORTS(1), .PM3_AW(9)) u_pm (
    .clk, .rst_n, .req_valid(s_req_valid), .req(s_req_a), .req_ready(s_req_ready),
    .resp_valid(s_resp_valid), .resp(s_resp)
  );

  dram_model #(.LATENCY(12)) u_mem (
    .clk, .rst_n, .key, .req_valid(mem_req_valid), .req(mem_req), .req_ready(mem_req_ready),
    .resp_valid(mem_resp_valid), .resp(mem_resp), .resp_ready(mem_resp_ready),
    .n_reads, .n_writes, .max_outstanding(max_out)
  );

  int checks = 0, failures = 0;
  int n_reset = 0, n_evict = 0, n_hit = 0, n_pmrmw = 0;
  bit seen [phase_e];

  task automatic check(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  always @(negedge clk) if (rst_n) begin
    n_reset += ev_reset; n_evict += ev_evict; n_hit += ev_stash_hit;
    seen[phase] = 1;
  end

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (phase %s)", phase.name());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [BLOCK_W-1:0] ref_d [NB];

  task automatic access(input op_e op, input int b, input logic [BLOCK_W-1:0] wd, input int gid,
                        output logic [BLOCK_W-1:0] rd);
    n_req_valid = 1;
    n_req = '0;
    n_req.op = op; n_req.addr = ADDR_W'(b); n_req.wdata = wd;
    n_req.idx = 3'($urandom); n_req.new_leaf = LEAF_W'($urandom);
    n_req.gid = GID_W'(gid); n_req.evict = (gid % 3 == 0); n_req.evict_cnt = LEAF_W'(gid / 3);
    #1;
    while (!n_req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    n_req_valid = 0;
    while (!n_resp_valid) @(negedge clk);
    rd = n_resp.data;
  endtask

  initial begin
    logic [BLOCK_W-1:0] wd, rd, exp_d;
    for (int b = 0; b < NB; b++) ref_d[b] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    for (int g = 0; g < 400; g++) begin
      int b, k;
      op_e op;
      b = $urandom_range(0, NB-1);
      k = $urandom_range(0, 9);
      op = (k < 4) ? OP_READ : (k < 8) ? OP_WRITE : OP_PMRMW;
      for (int w = 0; w < BLOCK_W/32; w++) wd[w*32 +: 32] = $urandom;
      access(op, b, wd, g, rd);
      exp_d = ref_d[b];
      case (op)
        OP_READ:  check(rd == exp_d, $sformatf("read block %0d (gid %0d)", b, g));
        OP_WRITE: ref_d[b] = wd;
        default: begin
          check(rd[LEAF_W-1:0] == exp_d[int'(n_req.idx)*64 +: LEAF_W], $sformatf("position-map update of block %0d returns old entry", b));
          ref_d[b][int'(n_req.idx)*64 +: 64] = 64'(n_req.new_leaf);
          n_pmrmw++;
        end
      endcase
      // wait until the PE is idle again (response taken, FI done)
      while (phase != PH_IDLE) @(negedge clk);
    end
    // final read of every block
    for (int b = 0; b < NB; b++) begin
      access(OP_READ, b, '0, 400 + b, rd);
      check(rd == ref_d[b], $sformatf("final read block %0d", b));
      while (phase != PH_IDLE) @(negedge clk);
    end
    check(n_reset > 0, "early reshuffles happened");
    check(n_evict == (400 + NB + 2) / 3, "one eviction every 3 requests");
    check(n_hit > 0, "stash hits");
    check(!overflow, "no stash overflow");
    check(seen[PH_CP] && seen[PH_LM] && seen[PH_ER] && seen[PH_RP] && seen[PH_EP] && seen[PH_FI], "all phases seen");
    check(max_out >= LV, "path reads overlapped at the memory");
    $display("resets %0d evictions %0d stash hits %0d pm-updates %0d mem reads %0d writes %0d max outstanding %0d",
             n_reset, n_evict, n_hit, n_pmrmw, n_reads, n_writes, max_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
