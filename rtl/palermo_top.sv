// palermo_top: the Palermo ORAM controller.
//
// A 3 x N_COLS array of PEs.  Row 0 serves the Data sub-ORAM, row 1 PosMap1 and
// row 2 PosMap2; column c serves one LLC miss at a time through all three rows
// (each row's PE asks the PE below it for the leaf, the PosMap2 row asks the
// on-chip PosMap3).  Inside a row the PEs pass a sibling-dependency token
// around a ring, so each row's tree is modified by one request at a time in
// issue order while the long path reads of many requests, and the work of
// different rows, overlap.  Each row has its own stash; all PEs share one
// memory port through the mesh arbiter and the tree-top cache, behind which
// sits the (external) memory controller.
//
// Sizes follow the paper's main configuration: 3x8 PEs, Z=16, S=27, A=20,
// 256-entry stashes, 256 KB tree-top cache per sub-ORAM (6 levels), 16 MB
// PosMap3, 16 GB protected space (tree depths 26/23/20 levels for Data,
// PosMap1, PosMap2, eight 8-byte position entries per 64 B block).
//
// Ports: LLC miss requests/responses (valid/ready, 64 B blocks, 8-bit id),
// pad_en (constant-rate dummy padding), the secret key, the memory-controller
// request/response port (valid/ready, 640-bit words, in-order per address is
// required of it), and status: per-row stash occupancy and overflow flags,
// and per-PE protocol phase.
module palermo_top
  import palermo_pkg::*;
#(
  parameter int N_COLS         = 8,
  parameter int Z              = 16,
  parameter int S              = 27,
  parameter int A              = 20,
  parameter int DATA_LEVELS    = 26,
  parameter int STASH_N        = 256,
  parameter int TTC_LEVELS     = 6,
  parameter int PM3_AW         = 22,
  parameter int ISSUE_INTERVAL = 420
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [KEY_W-1:0] key,
  input  logic             pad_en,
  // LLC side
  input  logic             llc_req_valid,
  input  llc_req_t         llc_req,
  output logic             llc_req_ready,
  output logic             llc_resp_valid,
  output llc_resp_t        llc_resp,
  // memory controller side
  output logic             mem_req_valid,
  output mem_req_t         mem_req,
  input  logic             mem_req_ready,
  input  logic             mem_resp_valid,
  input  mem_resp_t        mem_resp,
  output logic             mem_resp_ready,
  // status
  output logic [2:0]       stash_overflow,
  output logic [$clog2(STASH_N+1)-1:0] stash_occupancy [3],
  output phase_e           pe_phase [3][N_COLS],
  output stats_t           stats
);
  localparam int NR = 3;
  localparam int NPE = NR * N_COLS;
  localparam int LEVELS_R [NR] = '{DATA_LEVELS, DATA_LEVELS - 3, DATA_LEVELS - 6};

  // ---------------------------------------------------------------- PE wiring
  logic       n_req_valid  [NR][N_COLS];
  oram_req_t  n_req        [NR][N_COLS];
  logic       n_req_ready  [NR][N_COLS];
  logic       n_resp_valid [NR][N_COLS];
  oram_resp_t n_resp       [NR][N_COLS];
  logic       n_resp_ready [NR][N_COLS];
  logic       s_req_valid  [NR][N_COLS];
  oram_req_t  s_req        [NR][N_COLS];
  logic       s_req_ready  [NR][N_COLS];
  logic       s_resp_valid [NR][N_COLS];
  oram_resp_t s_resp       [NR][N_COLS];
  logic       s_resp_ready [NR][N_COLS];
  logic       token_out    [NR][N_COLS];
  logic       pending      [NR][N_COLS];
  logic       inflight     [NR][N_COLS];
  logic [ADDR_W-1:0] cur_addr [NR][N_COLS];
  logic [GID_W-1:0]  cur_gid  [NR][N_COLS];
  logic       fi           [NR][N_COLS];
  logic       fi_all       [N_COLS];
  logic       ev_reset [NR][N_COLS], ev_evict [NR][N_COLS], ev_pending [NR][N_COLS], ev_stash_hit [NR][N_COLS];

  logic [N_COLS-1:0] st_req_valid [NR];
  stash_req_t        st_req       [NR][N_COLS];
  logic [N_COLS-1:0] st_req_ready [NR];
  logic [N_COLS-1:0] st_resp_valid[NR];
  stash_resp_t       st_resp      [NR];
  logic [N_COLS-1:0] lock_valid   [NR];

  logic [NPE-1:0]    pe_mreq_valid, pe_mreq_ready, pe_mresp_valid, pe_mresp_ready;
  mem_req_t          pe_mreq [NPE];
  mem_resp_t         pe_mresp;

  // ---------------------------------------------------------------- front end (north of row 0)
  logic [N_COLS-1:0] fe_req_valid, fe_req_ready, fe_resp_valid, fe_resp_ready;
  oram_req_t         fe_req;
  oram_resp_t        fe_resp [N_COLS];
  logic [31:0]       dummy_count;
  logic [31:0]       ttc_hits;

  palermo_frontend #(.N_COLS(N_COLS), .A(A), .ISSUE_INTERVAL(ISSUE_INTERVAL),
                     .BLK_BITS(DATA_LEVELS + 2)) u_fe (
    .clk, .rst_n, .pad_en,
    .llc_req_valid, .llc_req, .llc_req_ready, .llc_resp_valid, .llc_resp,
    .col_req_valid(fe_req_valid), .col_req(fe_req), .col_req_ready(fe_req_ready),
    .col_resp_valid(fe_resp_valid), .col_resp(fe_resp), .col_resp_ready(fe_resp_ready),
    .dummy_count
  );

  // ---------------------------------------------------------------- PosMap3 (south of row 2)
  logic [N_COLS-1:0] pm3_req_valid, pm3_req_ready, pm3_resp_valid;
  oram_req_t         pm3_req [N_COLS];
  oram_resp_t        pm3_resp;

  palermo_posmap3 #(.N_PORTS(N_COLS), .PM3_AW(PM3_AW)) u_pm3 (
    .clk, .rst_n, .req_valid(pm3_req_valid), .req(pm3_req), .req_ready(pm3_req_ready),
    .resp_valid(pm3_resp_valid), .resp(pm3_resp)
  );

  for (genvar c = 0; c < N_COLS; c++) begin : g_col
    // column ends
    assign n_req_valid[0][c]  = fe_req_valid[c];
    assign n_req[0][c]        = fe_req;
    assign fe_req_ready[c]    = n_req_ready[0][c];
    assign fe_resp_valid[c]   = n_resp_valid[0][c];
    assign fe_resp[c]         = n_resp[0][c];
    assign n_resp_ready[0][c] = fe_resp_ready[c];

    assign pm3_req_valid[c]     = s_req_valid[NR-1][c];
    assign pm3_req[c]           = s_req[NR-1][c];
    assign s_req_ready[NR-1][c] = pm3_req_ready[c];
    assign s_resp_valid[NR-1][c] = pm3_resp_valid[c];
    assign s_resp[NR-1][c]      = pm3_resp;

    always_comb begin
      fi_all[c] = 1'b1;
      for (int r = 0; r < NR; r++) fi_all[c] &= fi[r][c];
    end

    for (genvar r = 0; r < NR; r++) begin : g_row
      // parent/child links inside the column
      if (r > 0) begin : g_link
        assign n_req_valid[r][c]    = s_req_valid[r-1][c];
        assign n_req[r][c]          = s_req[r-1][c];
        assign s_req_ready[r-1][c]  = n_req_ready[r][c];
        assign s_resp_valid[r-1][c] = n_resp_valid[r][c];
        assign s_resp[r-1][c]       = n_resp[r][c];
        assign n_resp_ready[r][c]   = s_resp_ready[r-1][c];
      end

      // an older in-flight request of the same row holds the same block
      always_comb begin
        pending[r][c] = 1'b0;
        for (int k = 0; k < N_COLS; k++)
          if (k != c && inflight[r][k] && inflight[r][c] && cur_addr[r][k] == cur_addr[r][c] &&
              $signed(cur_gid[r][k] - cur_gid[r][c]) < 0)
            pending[r][c] = 1'b1;
      end
      assign lock_valid[r][c] = inflight[r][c];

      palermo_pe #(
        .ROW(r), .PE_ID(r * N_COLS + c), .LEVELS(LEVELS_R[r]), .Z(Z), .S(S),
        .SEED(32'h9E37_79B9 * (r * N_COLS + c + 1)), .TOKEN_INIT(c == 0)
      ) u_pe (
        .clk, .rst_n, .key,
        .n_req_valid(n_req_valid[r][c]), .n_req(n_req[r][c]), .n_req_ready(n_req_ready[r][c]),
        .n_resp_valid(n_resp_valid[r][c]), .n_resp(n_resp[r][c]), .n_resp_ready(n_resp_ready[r][c]),
        .s_req_valid(s_req_valid[r][c]), .s_req(s_req[r][c]), .s_req_ready(s_req_ready[r][c]),
        .s_resp_valid(s_resp_valid[r][c]), .s_resp(s_resp[r][c]), .s_resp_ready(s_resp_ready[r][c]),
        .token_in(token_out[r][(c + N_COLS - 1) % N_COLS]), .token_out(token_out[r][c]),
        .pending_in(pending[r][c]), .inflight(inflight[r][c]),
        .cur_addr(cur_addr[r][c]), .cur_gid(cur_gid[r][c]),
        .st_req_valid(st_req_valid[r][c]), .st_req(st_req[r][c]), .st_req_ready(st_req_ready[r][c]),
        .st_resp_valid(st_resp_valid[r][c]), .st_resp(st_resp[r]),
        .mem_req_valid(pe_mreq_valid[r*N_COLS+c]), .mem_req(pe_mreq[r*N_COLS+c]),
        .mem_req_ready(pe_mreq_ready[r*N_COLS+c]),
        .mem_resp_valid(pe_mresp_valid[r*N_COLS+c]), .mem_resp(pe_mresp),
        .mem_resp_ready(pe_mresp_ready[r*N_COLS+c]),
        .fi(fi[r][c]), .fi_all(fi_all[c]),
        .phase(pe_phase[r][c]),
        .ev_reset(ev_reset[r][c]), .ev_evict(ev_evict[r][c]),
        .ev_pending(ev_pending[r][c]), .ev_stash_hit(ev_stash_hit[r][c])
      );
    end
  end

  // ---------------------------------------------------------------- stashes
  for (genvar r = 0; r < NR; r++) begin : g_stash
    palermo_stash #(.N_PORTS(N_COLS), .STASH_N(STASH_N), .LEVELS(LEVELS_R[r])) u_stash (
      .clk, .rst_n,
      .req_valid(st_req_valid[r]), .req(st_req[r]), .req_ready(st_req_ready[r]),
      .resp_valid(st_resp_valid[r]), .resp(st_resp[r]),
      .lock_valid(lock_valid[r]), .lock_addr(cur_addr[r]),
      .overflow(stash_overflow[r]), .occupancy(stash_occupancy[r])
    );
  end

  // ---------------------------------------------------------------- event counters
  logic [31:0] n_reset, n_evict, n_pend, n_hit;
  always_comb begin
    n_reset = '0; n_evict = '0; n_pend = '0; n_hit = '0;
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < N_COLS; c++) begin
        n_reset += 32'(ev_reset[r][c]);
        n_evict += 32'(ev_evict[r][c]);
        n_pend  += 32'(ev_pending[r][c]);
        n_hit   += 32'(ev_stash_hit[r][c]);
      end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stats.resets     <= '0;
      stats.evictions  <= '0;
      stats.pending    <= '0;
      stats.stash_hits <= '0;
    end else begin
      stats.resets     <= stats.resets + n_reset;
      stats.evictions  <= stats.evictions + n_evict;
      stats.pending    <= stats.pending + n_pend;
      stats.stash_hits <= stats.stash_hits + n_hit;
    end
  end
  assign stats.dummies  = dummy_count;
  assign stats.ttc_hits = ttc_hits;

  // ---------------------------------------------------------------- mesh + tree-top cache
  logic      mreq_valid, mreq_ready, mresp_valid, mresp_ready;
  mem_req_t  mreq;
  mem_resp_t mresp;

  palermo_mesh #(.N(NPE)) u_mesh (
    .clk, .rst_n,
    .pe_req_valid(pe_mreq_valid), .pe_req(pe_mreq), .pe_req_ready(pe_mreq_ready),
    .pe_resp_valid(pe_mresp_valid), .pe_resp(pe_mresp), .pe_resp_ready(pe_mresp_ready),
    .out_req_valid(mreq_valid), .out_req(mreq), .out_req_ready(mreq_ready),
    .out_resp_valid(mresp_valid), .out_resp(mresp), .out_resp_ready(mresp_ready)
  );

  palermo_ttc #(.TTC_LEVELS(TTC_LEVELS), .SLOTS(Z + S)) u_ttc (
    .clk, .rst_n, .key,
    .in_req_valid(mreq_valid), .in_req(mreq), .in_req_ready(mreq_ready),
    .in_resp_valid(mresp_valid), .in_resp(mresp), .in_resp_ready(mresp_ready),
    .ext_req_valid(mem_req_valid), .ext_req(mem_req), .ext_req_ready(mem_req_ready),
    .ext_resp_valid(mem_resp_valid), .ext_resp(mem_resp), .ext_resp_ready(mem_resp_ready),
    .hit_count(ttc_hits)
  );
endmodule
