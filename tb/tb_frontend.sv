// tb_frontend: the request frontend with 3 columns, A=3 and one issue slot
// every 4 cycles, in front of three column models that take one request at a
// time and answer after a random delay.  Checks that requests go to the
// columns in ring order, at most one per slot and never closer than the issue
// interval, with consecutive GlobalIDs, the evict flag on every A-th request
// and a running eviction count; that LLC fields are passed through; that with
// padding enabled and no LLC request a dummy is issued, counted and its answer
// dropped; and that each LLC response carries the id of its own request.
module tb_frontend;
  import palermo_pkg::*;
  localparam int NC = 3, AA = 3, II = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pad_en = 0, llc_req_valid = 0, llc_req_ready, llc_resp_valid;
  llc_req_t llc_req = '0;
  llc_resp_t llc_resp;
  logic [NC-1:0] col_req_valid, col_req_ready, col_resp_valid = '0, col_resp_ready;
  oram_req_t col_req;
  oram_resp_t col_resp [NC];
  logic [31:0] dummy_count;
  int checks = 0, failures = 0;

  palermo_frontend #(.N_COLS(NC), .A(AA), .ISSUE_INTERVAL(II)) dut (.*);

  task automatic check(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // column models
  bit busy [NC];
  int delay [NC];
  bit cdummy [NC];
  logic [7:0] cid [NC];
  always_comb for (int c = 0; c < NC; c++) col_req_ready[c] = !busy[c];

  int n_issue = 0, n_dummy = 0, n_resp = 0, exp_col = 0, last_issue = -100, cyc = 0, n_ev = 0;
  int outstanding_ids [256];
  logic [7:0] next_id = 0;

  initial begin
    for (int c = 0; c < NC; c++) begin busy[c] = 0; delay[c] = 0; col_resp[c] = '0; end
    for (int i = 0; i < 256; i++) outstanding_ids[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (n_issue < 600) begin
      bit fire_llc; int fire_col; logic [NC-1:0] fire_resp;
      @(negedge clk);
      cyc++;
      pad_en = (n_issue >= 300);
      if (!llc_req_valid && $urandom_range(0, (n_issue >= 300) ? 7 : 1) == 0) begin
        llc_req_valid = 1;
        llc_req.we = $urandom_range(0, 1);
        llc_req.pa = {$urandom, 2'($urandom)};
        llc_req.id = next_id;
        for (int w = 0; w < BLOCK_W/32; w++) llc_req.wdata[w*32 +: 32] = $urandom;
      end
      for (int c = 0; c < NC; c++)
        if (busy[c] && !col_resp_valid[c]) begin
          if (delay[c] == 0) begin col_resp_valid[c] = 1; col_resp[c].data = BLOCK_W'({cdummy[c], cid[c]}); end
          else delay[c]--;
        end
      #1;
      // judge handshakes before the rising edge
      check($onehot0(col_req_valid), "at most one column request");
      fire_col = -1;
      for (int c = 0; c < NC; c++) if (col_req_valid[c] && col_req_ready[c]) fire_col = c;
      fire_llc = llc_req_valid && llc_req_ready;
      if (fire_col >= 0) begin
        check(fire_col == exp_col, "ring order");
        check(cyc - last_issue >= II, "issue spacing");
        check(col_req.gid == GID_W'(n_issue), "GlobalID");
        check(col_req.evict == (n_issue % AA == 0), "evict every A requests");
        check(col_req.evict_cnt == LEAF_W'((n_issue + AA - 1) / AA), "eviction count");
        check(col_req.dummy == !llc_req_valid, "dummy flag");
        check(fire_llc == llc_req_valid, "LLC accepted exactly when issued");
        if (llc_req_valid) begin
          check(col_req.addr == llc_req.pa[33:6] && col_req.op == (llc_req.we ? OP_WRITE : OP_READ) &&
                (!llc_req.we || col_req.wdata == llc_req.wdata), "LLC fields passed through");
        end else begin
          check(pad_en, "dummy only when padding");
          n_dummy++;
        end
        last_issue = cyc; exp_col = (exp_col + 1) % NC; n_issue++;
        if (col_req.evict) n_ev++;
      end else begin
        check(!fire_llc, "LLC not accepted without issue");
      end
      fire_resp = col_resp_valid & col_resp_ready;
      check($countones(col_resp_ready) <= 1, "one response per cycle");
      if (fire_resp != 0) begin
        int c;
        for (int k = 0; k < NC; k++) if (fire_resp[k]) c = k;
        check(llc_resp_valid == !cdummy[c], "dummy responses dropped");
        if (llc_resp_valid) begin
          check(llc_resp.id == cid[c] && llc_resp.data[7:0] == cid[c], "response id");
          check(outstanding_ids[cid[c]] > 0, "response for an outstanding id");
          outstanding_ids[cid[c]]--;
          n_resp++;
        end
      end else check(!llc_resp_valid, "no response without a column");
      @(posedge clk); #1;
      if (fire_col >= 0) begin
        busy[fire_col] = 1; delay[fire_col] = $urandom_range(2, 20);
        cdummy[fire_col] = !fire_llc; cid[fire_col] = fire_llc ? llc_req.id : 8'hxx;
        if (fire_llc) begin outstanding_ids[llc_req.id]++; next_id++; llc_req_valid = 0; end
      end
      for (int c = 0; c < NC; c++) if (fire_resp[c]) begin busy[c] = 0; col_resp_valid[c] = 0; end
    end
    check(int'(dummy_count) == n_dummy && n_dummy > 50, "dummy count");
    check(n_resp > 200 && n_ev == 200, "responses and evictions");
    $display("issued %0d dummies %0d answered %0d evictions %0d", n_issue, n_dummy, n_resp, n_ev);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
