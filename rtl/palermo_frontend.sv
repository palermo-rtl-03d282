// palermo_frontend: LLC-miss interface of the Palermo controller.
//
// Every ISSUE_INTERVAL cycles there is one issue slot.  In a slot, if the next
// PE column in ring order (0,1,..,N_COLS-1,0,..) is free, the front end hands it
// one ORAM request: the waiting LLC miss, or, when none waits and pad_en is
// set, a dummy read of a random block so that the issue rate seen on the memory
// bus stays constant.  Each request carries its GlobalID (issue count), the
// eviction flag GlobalID % A == 0 and the number of earlier evictions, which
// selects the eviction path.  If the column is still busy, issue waits for it.
// Responses of the Data-row PEs are taken round-robin; those of real requests
// are returned on llc_resp with the LLC's id, those of dummies are dropped.
// From the paper: ring assignment of requests to columns, GlobalID and A, the
// constant rate with dummy padding.  The default interval (420 cycles) is
// derived from the reported 3.8e6 misses/s at 1.6 GHz; the handshakes are this
// design's.
module palermo_frontend
  import palermo_pkg::*;
#(
  parameter int N_COLS         = 8,
  parameter int A              = 20,
  parameter int ISSUE_INTERVAL = 420,
  parameter int BLK_BITS       = 28       // block-address bits used by dummy requests
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              pad_en,
  input  logic              llc_req_valid,
  input  llc_req_t          llc_req,
  output logic              llc_req_ready,
  output logic              llc_resp_valid,
  output llc_resp_t         llc_resp,
  output logic [N_COLS-1:0] col_req_valid,
  output oram_req_t         col_req,
  input  logic [N_COLS-1:0] col_req_ready,
  input  logic [N_COLS-1:0] col_resp_valid,
  input  oram_resp_t        col_resp [N_COLS],
  output logic [N_COLS-1:0] col_resp_ready,
  output logic [31:0]       dummy_count
);
  localparam int CW = (N_COLS > 1) ? $clog2(N_COLS) : 1;
  localparam int TW = $clog2(ISSUE_INTERVAL + 1);

  logic [CW-1:0]      col_q;
  logic [GID_W-1:0]   gid_q;
  logic [$clog2(A+1)-1:0] amod_q;
  logic [LEAF_W-1:0]  ecnt_q;
  logic [TW-1:0]      timer_q;
  logic [7:0]         id_q [N_COLS];
  logic [N_COLS-1:0]  dum_q;
  logic [31:0]        rnd;

  palermo_rng #(.SEED(32'h0BAD_5EED)) u_rng (.clk, .rst_n, .next(1'b1), .value(rnd));

  logic slot_open, col_free, issue, issue_dummy;
  assign slot_open   = (timer_q == '0);
  assign col_free    = col_req_ready[col_q];
  assign issue       = slot_open && col_free && (llc_req_valid || pad_en);
  assign issue_dummy = issue && !llc_req_valid;
  assign llc_req_ready = slot_open && col_free;

  always_comb begin
    col_req           = '0;
    col_req.op        = (llc_req_valid && llc_req.we) ? OP_WRITE : OP_READ;
    col_req.addr      = llc_req_valid ? llc_req.pa[33:6] : (ADDR_W'(rnd) & ADDR_W'((64'd1 << BLK_BITS) - 1));
    col_req.wdata     = llc_req.wdata;
    col_req.gid       = gid_q;
    col_req.evict     = (amod_q == '0);
    col_req.evict_cnt = ecnt_q;
    col_req.dummy     = !llc_req_valid;
    col_req_valid     = '0;
    if (issue) col_req_valid[col_q] = 1'b1;
  end

  // response return
  logic [N_COLS-1:0] grant;
  logic [CW-1:0]     gidx;
  logic              any;
  rr_arbiter #(.N(N_COLS)) u_arb (.clk, .rst_n, .req(col_resp_valid), .advance(1'b1),
                                  .grant, .gidx, .any);
  assign col_resp_ready = grant;
  assign llc_resp_valid = any && !dum_q[gidx];
  assign llc_resp.id    = id_q[gidx];
  assign llc_resp.data  = col_resp[gidx].data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_q   <= '0;
      gid_q   <= '0;
      amod_q  <= '0;
      ecnt_q  <= '0;
      timer_q <= '0;
      dum_q   <= '0;
      dummy_count <= '0;
      for (int c = 0; c < N_COLS; c++) id_q[c] <= '0;
    end else begin
      if (timer_q != '0) timer_q <= timer_q - 1'b1;
      if (issue) begin
        id_q[col_q]  <= llc_req.id;
        dum_q[col_q] <= issue_dummy;
        if (issue_dummy) dummy_count <= dummy_count + 1;
        col_q   <= (int'(col_q) == N_COLS-1) ? '0 : col_q + 1'b1;
        gid_q   <= gid_q + 1'b1;
        amod_q  <= (int'(amod_q) == A-1) ? '0 : amod_q + 1'b1;
        if (amod_q == '0) ecnt_q <= ecnt_q + 1'b1;
        timer_q <= TW'(ISSUE_INTERVAL - 1);
      end
    end
  end

  // assertions are enabled one cycle after reset, from a flop of its own
  logic live_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) live_q <= 1'b0;
    else        live_q <= 1'b1;
  end

  a_one_hot: assert property (@(posedge clk) disable iff (!live_q) $onehot0(col_req_valid));
endmodule
