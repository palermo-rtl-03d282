// palermo_pe: one Processing Element of the Palermo ORAM controller.
//
// A PE serves one ORAM request on one sub-ORAM tree (row 0 = Data,
// 1 = PosMap1, 2 = PosMap2) and walks it through the protocol phases:
//   CP  Check PosMap: draw a fresh random leaf, send {block>>3, entry, new leaf}
//       south (to the next row, or to the on-chip PosMap3) and receive the old
//       leaf.  If an older in-flight request of this row has the same block
//       (pending_in), a uniformly random leaf is read instead.
//   LM  Load Metadata: wait for the sibling token from the west, then read the
//       metadata word of every bucket on the path (all reads issued back to back).
//   ER  Early Reshuffle pre-check: every bucket whose access count reached S-1
//       is reset now (read its Z remaining/padding slots into the stash, write
//       the bucket back from the stash with a fresh layout) and is bypassed by
//       this request's path read.
//       The metadata of the other buckets is then updated (slot consumed,
//       count+1) and written back, and the path-read requests are issued.
//       Unless this request owns an eviction, the token passes east here: the
//       tree is "good to read" for the next request once these writes and
//       reads are queued in order at the memory.
//   RP  Read Path: collect the read responses, decrypt, insert the real block
//       into the stash, then (after any older same-block request finished)
//       access the block in the stash: remap it to the new leaf, read / write /
//       update one position-map entry, and answer north.
//   EP  Evict Path (GlobalID % A == 0): read all buckets on the eviction path
//       (reverse-lexicographic order), then write them back leaf to root from
//       the stash; only then the token passes east.
//   FI  Finalize: wait until all PEs of this column have finished.
// Memory words are encrypted with xor_cipher on the way out and decrypted on
// return.  Bucket layout: Z+S block slots plus one metadata word (slot Z+S).
// Metadata = {count, used-slot bits, per real block: valid, address, slot}.
//
// Interfaces: north/south are valid/ready request and response channels; the
// token is a one-cycle pulse from the west PE to this one (token_in) and from
// this PE to the east one (token_out); the stash port follows palermo_stash;
// the memory port is valid/ready with self-describing responses (the response
// returns the word address).  Memory responses are refused while a decoded real
// block waits for its stash insertion.
//
// Follows the paper: the phases, their order (ER hoisted before RP, EP after
// RP), the sibling-dependency clear after ER or EP, the S-1 pre-check, the
// pending rule, and Z/S/A.  This design's own choices: the metadata format,
// the slot layout of a rewritten bucket (a random rotation instead of a full
// random permutation), the dummy-slot choice (lowest free slot), and clearing
// the dependency only after the RP reads are queued at the memory.
module palermo_pe
  import palermo_pkg::*;
#(
  parameter int          ROW        = 0,
  parameter int          PE_ID      = 0,
  parameter int          LEVELS     = 26,
  parameter int          Z          = 16,
  parameter int          S          = 27,
  parameter logic [31:0] SEED       = 32'h1234_5678,
  parameter bit          TOKEN_INIT = 1'b0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [KEY_W-1:0] key,
  // north: request from the parent row / front end, response back
  input  logic             n_req_valid,
  input  oram_req_t        n_req,
  output logic             n_req_ready,
  output logic             n_resp_valid,
  output oram_resp_t       n_resp,
  input  logic             n_resp_ready,
  // south: position-map request to the child row / PosMap3
  output logic             s_req_valid,
  output oram_req_t        s_req,
  input  logic             s_req_ready,
  input  logic             s_resp_valid,
  input  oram_resp_t       s_resp,
  output logic             s_resp_ready,
  // sibling dependency (west in, east out)
  input  logic             token_in,
  output logic             token_out,
  // same-block tracking within the row
  input  logic             pending_in,
  output logic             inflight,
  output logic [ADDR_W-1:0] cur_addr,
  output logic [GID_W-1:0] cur_gid,
  // stash
  output logic             st_req_valid,
  output stash_req_t       st_req,
  input  logic             st_req_ready,
  input  logic             st_resp_valid,
  input  stash_resp_t      st_resp,
  // memory
  output logic             mem_req_valid,
  output mem_req_t         mem_req,
  input  logic             mem_req_ready,
  input  logic             mem_resp_valid,
  input  mem_resp_t        mem_resp,
  output logic             mem_resp_ready,
  // column finalize
  output logic             fi,
  input  logic             fi_all,
  // status
  output phase_e           phase,
  output logic             ev_reset,     // one bucket early-reshuffled
  output logic             ev_evict,     // evict path started
  output logic             ev_pending,   // request took the pending (random leaf) route
  output logic             ev_stash_hit  // block found in the stash
);
  localparam int SLOTS = Z + S;
  localparam int L     = LEVELS - 1;
  localparam int LW    = $clog2(LEVELS + 1);
  localparam int JW    = (Z > 1) ? $clog2(Z) : 1;
  localparam int OW    = $clog2(LEVELS * Z + 2);
  localparam logic [LEAF_W-1:0] LMASK = LEAF_W'((64'd1 << L) - 1);

  typedef struct packed {
    logic [SLOT_W-1:0]             count;
    logic [SLOTS-1:0]              used;
    logic [Z-1:0]                  real_v;
    logic [Z-1:0][ADDR_W-1:0]      maddr;
    logic [Z-1:0][SLOT_W-1:0]      mslot;
  } meta_t;

  typedef enum logic [4:0] {
    S_IDLE, S_CP_SEND, S_CP_WAIT, S_LM_TOK, S_LM_ISSUE, S_LM_WAIT, S_ER_SCAN,
    S_MU, S_RP_ISSUE, S_RP_WAIT, S_ACC_PEND, S_ACC_REQ, S_ACC_WAIT, S_RESP,
    S_EP_LM, S_EP_LMWAIT, S_EP_DONE, S_FI,
    S_RS_RLVL, S_RS_READ, S_RS_RWAIT, S_RS_WLVL, S_RS_WSLOT, S_RS_PICK,
    S_RS_PICKW, S_RS_WRITE, S_RS_WMETA
  } state_e;

  state_e             st_q;
  oram_req_t          req_q;
  logic [LEAF_W-1:0]  new_leaf_q, path_q, eng_path_q;
  logic               has_token_q;
  meta_t              meta_q [LEVELS];
  logic [LEVELS-1:0]  bypass_q, eng_mask_q;
  logic [SLOT_W-1:0]  rp_slot_q [LEVELS];
  logic [LW-1:0]      lvl_q;
  logic [JW-1:0]      j_q, jw_q;
  logic [SLOT_W-1:0]  s_q, rot_q;
  logic [SLOTS-1:0]   taken_q;
  meta_t              nmeta_q;
  blk_t               wblk_q;
  logic [OW-1:0]      outst_q;
  logic               ret_ep_q;
  logic               ins_v_q;
  blk_t               ins_q;
  logic [BLOCK_W-1:0] rdata_q;

  // ---------------------------------------------------------------- RNG
  logic [31:0] rnd;
  logic        rnd_next;
  palermo_rng #(.SEED(SEED)) u_rng (.clk, .rst_n, .next(rnd_next), .value(rnd));
  assign rnd_next = 1'b1;

  // ---------------------------------------------------------------- helpers
  function automatic logic [SLOTS-1:0] real_pos(input meta_t m);
    logic [SLOTS-1:0] p;
    p = '0;
    for (int j = 0; j < Z; j++) if (m.real_v[j]) p[m.mslot[j]] = 1'b1;
    return p;
  endfunction

  function automatic logic [SLOT_W-1:0] first_free(input logic [SLOTS-1:0] taken);
    logic [SLOT_W-1:0] r;
    r = '0;
    for (int k = SLOTS-1; k >= 0; k--) if (!taken[k]) r = SLOT_W'(k);
    return r;
  endfunction

  function automatic logic [MADDR_W-1:0] waddr(input logic [LEAF_W-1:0] leaf,
                                               input logic [LW-1:0] lvl,
                                               input logic [SLOT_W-1:0] slot);
    return mem_addr(2'(ROW), node_of(leaf, int'(lvl), L), slot);
  endfunction

  // ---------------------------------------------------------------- MU step (metadata update for one level)
  meta_t             mu_m, mu_new;
  logic [SLOT_W-1:0] mu_slot;
  logic              mu_hit;
  logic [JW-1:0]     mu_hj;
  always_comb begin
    mu_m   = meta_q[lvl_q];
    mu_hit = 1'b0;
    mu_hj  = '0;
    for (int j = Z-1; j >= 0; j--)
      if (mu_m.real_v[j] && mu_m.maddr[j] == req_q.addr) begin mu_hit = 1'b1; mu_hj = JW'(j); end
    mu_slot = mu_hit ? mu_m.mslot[mu_hj] : first_free(mu_m.used | real_pos(mu_m));
    mu_new  = mu_m;
    mu_new.used[mu_slot] = 1'b1;
    mu_new.count = mu_m.count + 1'b1;
    if (mu_hit) mu_new.real_v[mu_hj] = 1'b0;
  end

  // reset/evict engine: slot to read for (level, j)
  meta_t             rs_m;
  logic [SLOT_W-1:0] rs_slot;
  logic [SLOTS-1:0]  rs_taken_init;
  logic [SLOT_W:0]   rs_jdiff;
  always_comb begin
    rs_m          = meta_q[lvl_q];
    rs_taken_init = rs_m.used | real_pos(rs_m);
    rs_slot       = rs_m.real_v[j_q] ? rs_m.mslot[j_q] : first_free(taken_q);
    rs_jdiff      = (s_q >= rot_q) ? {1'b0, s_q - rot_q} : {1'b0, s_q} + (SLOT_W+1)'(SLOTS) - {1'b0, rot_q};
  end

  // ---------------------------------------------------------------- ER pre-check
  logic [LEVELS-1:0] er_mask;
  always_comb
    for (int l = 0; l < LEVELS; l++) er_mask[l] = (meta_q[l].count >= SLOT_W'(S-1));

  // ---------------------------------------------------------------- memory request
  logic [MEM_W-1:0] plain_w, enc_w;
  xor_cipher u_enc (.key, .addr(mem_req.addr), .din(plain_w), .dout(enc_w));

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req       = '0;
    plain_w       = '0;
    unique case (st_q)
      S_LM_ISSUE: begin mem_req_valid = 1'b1; mem_req.addr = waddr(path_q, lvl_q, SLOT_W'(SLOTS)); end
      S_EP_LM:    begin mem_req_valid = 1'b1; mem_req.addr = waddr(eng_path_q, lvl_q, SLOT_W'(SLOTS)); end
      S_MU: if (!bypass_q[lvl_q]) begin
        mem_req_valid = 1'b1; mem_req.we = 1'b1;
        mem_req.addr  = waddr(path_q, lvl_q, SLOT_W'(SLOTS));
        plain_w       = MEM_W'(mu_new);
      end
      S_RP_ISSUE: if (!bypass_q[lvl_q]) begin
        mem_req_valid = 1'b1; mem_req.addr = waddr(path_q, lvl_q, rp_slot_q[lvl_q]);
      end
      S_RS_READ:  begin mem_req_valid = 1'b1; mem_req.addr = waddr(eng_path_q, lvl_q, rs_slot); end
      S_RS_WRITE: begin
        mem_req_valid = 1'b1; mem_req.we = 1'b1;
        mem_req.addr  = waddr(eng_path_q, lvl_q, s_q);
        plain_w       = MEM_W'(wblk_q);
      end
      S_RS_WMETA: begin
        mem_req_valid = 1'b1; mem_req.we = 1'b1;
        mem_req.addr  = waddr(eng_path_q, lvl_q, SLOT_W'(SLOTS));
        plain_w       = MEM_W'(nmeta_q);
      end
      default: ;
    endcase
    mem_req.wdata = enc_w;
    mem_req.tag   = TAG_W'(PE_ID);
  end
  logic mem_fire;
  assign mem_fire = mem_req_valid && mem_req_ready;

  // ---------------------------------------------------------------- memory response
  logic [MEM_W-1:0] dec_w;
  blk_t             dec_blk;
  logic [SLOT_W-1:0] rsp_slot;
  logic [NODE_W-1:0] rsp_node;
  xor_cipher u_dec (.key, .addr(mem_resp.addr), .din(mem_resp.rdata), .dout(dec_w));
  assign dec_blk  = blk_t'(dec_w[$bits(blk_t)-1:0]);
  assign rsp_slot = mem_resp.addr[SLOT_W-1:0];
  assign rsp_node = mem_resp.addr[SLOT_W +: NODE_W];
  assign mem_resp_ready = !ins_v_q;
  logic rsp_fire;
  assign rsp_fire = mem_resp_valid && mem_resp_ready;

  // ---------------------------------------------------------------- stash request
  always_comb begin
    st_req_valid = 1'b0;
    st_req       = '0;
    if (ins_v_q) begin
      st_req_valid = 1'b1;
      st_req.op    = ST_INSERT;
      st_req.addr  = ins_q.addr;
      st_req.leaf  = ins_q.leaf;
      st_req.data  = ins_q.data;
    end else if (st_q == S_RS_PICK) begin
      st_req_valid = 1'b1;
      st_req.op    = ST_PICK;
      st_req.leaf  = eng_path_q;
      st_req.level = 5'(lvl_q);
    end else if (st_q == S_ACC_REQ) begin
      st_req_valid = 1'b1;
      st_req.op    = ST_ACCESS;
      st_req.acc_op = req_q.op;
      st_req.addr  = req_q.addr;
      st_req.leaf  = new_leaf_q;
      st_req.data  = req_q.wdata;
      st_req.idx   = req_q.idx;
      st_req.pm_val = req_q.new_leaf;
    end
  end

  // ---------------------------------------------------------------- static outputs
  assign n_req_ready  = (st_q == S_IDLE);
  assign n_resp_valid = (st_q == S_RESP);
  assign n_resp.data  = rdata_q;
  assign s_req_valid  = (st_q == S_CP_SEND);
  always_comb begin
    s_req          = req_q;
    s_req.op       = OP_PMRMW;
    s_req.addr     = req_q.addr >> 3;
    s_req.idx      = req_q.addr[2:0];
    s_req.new_leaf = new_leaf_q;
    s_req.wdata    = '0;
  end
  assign s_resp_ready = (st_q == S_CP_WAIT);
  assign inflight = (st_q inside {S_CP_SEND, S_CP_WAIT, S_LM_TOK, S_LM_ISSUE, S_LM_WAIT,
                                  S_ER_SCAN, S_MU, S_RP_ISSUE, S_RP_WAIT, S_ACC_PEND,
                                  S_ACC_REQ, S_ACC_WAIT})
                    || (!ret_ep_q && st_q inside {S_RS_RLVL, S_RS_READ, S_RS_RWAIT, S_RS_WLVL,
                                                  S_RS_WSLOT, S_RS_PICK, S_RS_PICKW,
                                                  S_RS_WRITE, S_RS_WMETA});
  assign cur_addr = req_q.addr;
  assign cur_gid  = req_q.gid;
  assign fi       = (st_q == S_FI);

  always_comb begin
    unique case (st_q)
      S_IDLE:                                    phase = PH_IDLE;
      S_CP_SEND, S_CP_WAIT:                      phase = PH_CP;
      S_LM_TOK, S_LM_ISSUE, S_LM_WAIT:           phase = PH_LM;
      S_ER_SCAN, S_MU:                           phase = PH_ER;
      S_RP_ISSUE, S_RP_WAIT, S_ACC_PEND, S_ACC_REQ, S_ACC_WAIT, S_RESP: phase = PH_RP;
      S_EP_LM, S_EP_LMWAIT, S_EP_DONE:           phase = PH_EP;
      S_FI:                                      phase = PH_FI;
      default:                                   phase = ret_ep_q ? PH_EP : PH_ER;
    endcase
  end

  // ---------------------------------------------------------------- main FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q        <= S_IDLE;
      req_q       <= '0;
      new_leaf_q  <= '0;
      path_q      <= '0;
      eng_path_q  <= '0;
      has_token_q <= TOKEN_INIT;
      bypass_q    <= '0;
      eng_mask_q  <= '0;
      lvl_q       <= '0;
      j_q         <= '0;
      jw_q        <= '0;
      s_q         <= '0;
      rot_q       <= '0;
      taken_q     <= '0;
      nmeta_q     <= '0;
      wblk_q      <= '0;
      outst_q     <= '0;
      ret_ep_q    <= 1'b0;
      ins_v_q     <= 1'b0;
      ins_q       <= '0;
      rdata_q     <= '0;
      token_out   <= 1'b0;
      ev_reset    <= 1'b0;
      ev_evict    <= 1'b0;
      ev_pending  <= 1'b0;
      ev_stash_hit <= 1'b0;
      for (int l = 0; l < LEVELS; l++) begin
        meta_q[l]    <= '0;
        rp_slot_q[l] <= '0;
      end
    end else begin
      token_out    <= 1'b0;
      ev_reset     <= 1'b0;
      ev_evict     <= 1'b0;
      ev_pending   <= 1'b0;
      ev_stash_hit <= 1'b0;
      if (token_in) has_token_q <= 1'b1;

      // outstanding read bookkeeping and response decode
      outst_q <= outst_q + OW'(mem_fire && !mem_req.we) - OW'(rsp_fire);
      if (rsp_fire) begin
        if (rsp_slot == SLOT_W'(SLOTS)) begin
          meta_q[level_of(rsp_node)] <= meta_t'(dec_w[$bits(meta_t)-1:0]);
        end else if (dec_blk.real_blk) begin
          ins_v_q <= 1'b1;
          ins_q   <= dec_blk;
        end
      end
      if (ins_v_q && st_req_ready) ins_v_q <= 1'b0;

      unique case (st_q)
        S_IDLE: if (n_req_valid) begin
          req_q      <= n_req;
          new_leaf_q <= LEAF_W'(rnd) & LMASK;
          st_q       <= S_CP_SEND;
        end
        S_CP_SEND: if (s_req_ready) st_q <= S_CP_WAIT;
        S_CP_WAIT: if (s_resp_valid) begin
          path_q     <= pending_in ? (LEAF_W'(rnd) & LMASK) : (s_resp.data[LEAF_W-1:0] & LMASK);
          ev_pending <= pending_in;
          st_q       <= S_LM_TOK;
        end
        S_LM_TOK: if (has_token_q) begin
          lvl_q <= '0;
          st_q  <= S_LM_ISSUE;
        end
        S_LM_ISSUE: if (mem_fire) begin
          if (int'(lvl_q) == L) st_q <= S_LM_WAIT;
          else lvl_q <= lvl_q + 1'b1;
        end
        S_LM_WAIT: if (outst_q == '0) st_q <= S_ER_SCAN;
        S_ER_SCAN: begin
          bypass_q <= er_mask;
          lvl_q    <= '0;
          if (er_mask != '0) begin
            eng_mask_q <= er_mask;
            eng_path_q <= path_q;
            ret_ep_q   <= 1'b0;
            ev_reset   <= 1'b1;
            st_q       <= S_RS_RLVL;
          end else begin
            st_q <= S_MU;
          end
        end
        S_MU: if (bypass_q[lvl_q] || mem_fire) begin
          if (!bypass_q[lvl_q]) begin
            meta_q[lvl_q]    <= mu_new;
            rp_slot_q[lvl_q] <= mu_slot;
          end
          if (int'(lvl_q) == L) begin lvl_q <= '0; st_q <= S_RP_ISSUE; end
          else lvl_q <= lvl_q + 1'b1;
        end
        S_RP_ISSUE: if (bypass_q[lvl_q] || mem_fire) begin
          if (int'(lvl_q) == L) begin
            st_q <= S_RP_WAIT;
            if (!req_q.evict) begin
              token_out   <= 1'b1;
              has_token_q <= 1'b0;
            end
          end else lvl_q <= lvl_q + 1'b1;
        end
        S_RP_WAIT:  if (outst_q == '0 && !ins_v_q && !rsp_fire) st_q <= S_ACC_PEND;
        S_ACC_PEND: if (!pending_in) st_q <= S_ACC_REQ;
        S_ACC_REQ:  if (st_req_ready) st_q <= S_ACC_WAIT;
        S_ACC_WAIT: if (st_resp_valid) begin
          ev_stash_hit <= st_resp.found;
          if (req_q.op == OP_PMRMW)
            rdata_q <= BLOCK_W'(st_resp.data[{req_q.idx, 6'd0} +: LEAF_W]);
          else
            rdata_q <= st_resp.data;
          st_q <= S_RESP;
        end
        S_RESP: if (n_resp_ready) begin
          if (req_q.evict) begin
            eng_path_q <= bitrev(req_q.evict_cnt, L);
            lvl_q      <= '0;
            ev_evict   <= 1'b1;
            st_q       <= S_EP_LM;
          end else st_q <= S_FI;
        end
        S_EP_LM: if (mem_fire) begin
          if (int'(lvl_q) == L) st_q <= S_EP_LMWAIT;
          else lvl_q <= lvl_q + 1'b1;
        end
        S_EP_LMWAIT: if (outst_q == '0) begin
          eng_mask_q <= '1;
          ret_ep_q   <= 1'b1;
          lvl_q      <= '0;
          st_q       <= S_RS_RLVL;
        end
        S_EP_DONE: begin
          token_out   <= 1'b1;
          has_token_q <= 1'b0;
          st_q        <= S_FI;
        end
        S_FI: if (fi_all) st_q <= S_IDLE;

        // ---------------- bucket reset engine (ER resets and EP) ----------------
        S_RS_RLVL: begin
          if (int'(lvl_q) == LEVELS) st_q <= S_RS_RWAIT;
          else if (eng_mask_q[lvl_q]) begin
            taken_q <= rs_taken_init;
            j_q     <= '0;
            st_q    <= S_RS_READ;
          end else lvl_q <= lvl_q + 1'b1;
        end
        S_RS_READ: if (mem_fire) begin
          if (!rs_m.real_v[j_q]) taken_q[rs_slot] <= 1'b1;
          if (int'(j_q) == Z-1) begin
            lvl_q <= lvl_q + 1'b1;
            st_q  <= S_RS_RLVL;
          end else j_q <= j_q + 1'b1;
        end
        S_RS_RWAIT: if (outst_q == '0 && !ins_v_q && !rsp_fire) begin
          lvl_q <= LW'(L);
          st_q  <= S_RS_WLVL;
        end
        S_RS_WLVL: begin
          if (eng_mask_q[lvl_q]) begin
            rot_q   <= (rnd[SLOT_W-1:0] >= SLOT_W'(SLOTS)) ? rnd[SLOT_W-1:0] - SLOT_W'(SLOTS)
                                                           : rnd[SLOT_W-1:0];
            s_q     <= '0;
            nmeta_q <= '0;
            st_q    <= S_RS_WSLOT;
          end else if (lvl_q == '0) begin
            st_q <= ret_ep_q ? S_EP_DONE : S_MU;
          end else lvl_q <= lvl_q - 1'b1;
        end
        S_RS_WSLOT: begin
          jw_q <= JW'(rs_jdiff);
          if (rs_jdiff < (SLOT_W+1)'(Z)) st_q <= S_RS_PICK;
          else begin
            wblk_q      <= '0;
            wblk_q.data <= {(BLOCK_W/32){rnd}};
            st_q        <= S_RS_WRITE;
          end
        end
        S_RS_PICK: if (st_req_ready) st_q <= S_RS_PICKW;
        S_RS_PICKW: if (st_resp_valid) begin
          if (st_resp.found) begin
            wblk_q.real_blk <= 1'b1;
            wblk_q.addr     <= st_resp.addr;
            wblk_q.leaf     <= st_resp.leaf;
            wblk_q.data     <= st_resp.data;
            nmeta_q.real_v[jw_q] <= 1'b1;
            nmeta_q.maddr[jw_q]  <= st_resp.addr;
            nmeta_q.mslot[jw_q]  <= s_q;
          end else begin
            wblk_q      <= '0;
            wblk_q.data <= {(BLOCK_W/32){rnd}};
          end
          st_q <= S_RS_WRITE;
        end
        S_RS_WRITE: if (mem_fire) begin
          if (int'(s_q) == SLOTS-1) st_q <= S_RS_WMETA;
          else begin
            s_q  <= s_q + 1'b1;
            st_q <= S_RS_WSLOT;
          end
        end
        S_RS_WMETA: if (mem_fire) begin
          meta_q[lvl_q] <= nmeta_q;
          if (lvl_q == '0) st_q <= ret_ep_q ? S_EP_DONE : S_MU;
          else begin
            lvl_q <= lvl_q - 1'b1;
            st_q  <= S_RS_WLVL;
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- checks
  initial begin
    assert ($bits(meta_t) <= MEM_W) else $error("bucket metadata does not fit a memory word");
    assert (SLOTS < (1 << SLOT_W)) else $error("Z+S too large for the slot field");
    assert (LEVELS <= NODE_W) else $error("tree too deep for the node field");
  end
  // assertions are enabled one cycle after reset, from a flop of its own
  logic live_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) live_q <= 1'b0;
    else        live_q <= 1'b1;
  end

  a_north_hold: assert property (@(posedge clk) disable iff (!live_q)
    n_resp_valid && !n_resp_ready |=> n_resp_valid);
  a_token_single: assert property (@(posedge clk) disable iff (!live_q)
    !(token_in && has_token_q));
endmodule
