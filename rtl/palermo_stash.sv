// palermo_stash: the stash of one sub-ORAM, shared by the PEs of one row.
//
// A fully associative buffer of STASH_N blocks (256 x 64 B = 16 KB at the
// defaults, as in the paper).  Each entry holds {valid, block address, leaf,
// 64 B data}.  One operation is served per cycle, chosen round-robin among the
// PE ports; its response is registered and appears on the next cycle with
// resp_valid[port] high:
//   ST_INSERT  store a real block read from the tree (overflow sets a sticky flag
//              and drops the block; the paper bounds occupancy below 256)
//   ST_ACCESS  look up `addr`; if missing, allocate it with all-zero data (first
//              touch of a block).  Return the old data (found = hit), set the
//              leaf to the new leaf, and apply the operation: READ leaves data,
//              WRITE replaces it, PMRMW writes `pm_val` into 64-bit entry `idx`.
//   ST_PICK    remove and return one block that may live in the bucket at
//              `level` of the path to leaf `leaf` (its leaf shares the top
//              `level` bits of the path); found = 0 when none qualifies.
// Blocks whose address is held in flight by some PE of the row (lock inputs)
// are never picked, so a block a PE is about to read stays in the stash.
// The lookup/allocation/pick structure is this design's choice; the paper gives
// the stash's role, size and the eviction rule.
module palermo_stash
  import palermo_pkg::*;
#(
  parameter int N_PORTS = 8,
  parameter int STASH_N = 256,
  parameter int LEVELS  = 26       // tree levels of this sub-ORAM (leaf bits = LEVELS-1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic       [N_PORTS-1:0] req_valid,
  input  stash_req_t               req [N_PORTS],
  output logic       [N_PORTS-1:0] req_ready,
  output logic       [N_PORTS-1:0] resp_valid,
  output stash_resp_t              resp,
  input  logic       [N_PORTS-1:0] lock_valid,
  input  logic [ADDR_W-1:0]        lock_addr [N_PORTS],
  output logic                     overflow,
  output logic [$clog2(STASH_N+1)-1:0] occupancy
);
  localparam int EW = $clog2(STASH_N);
  localparam int PW = (N_PORTS > 1) ? $clog2(N_PORTS) : 1;
  localparam int L  = LEVELS - 1;

  logic [STASH_N-1:0]  val_q;
  logic [ADDR_W-1:0]   tag_q  [STASH_N];
  logic [LEAF_W-1:0]   leaf_q [STASH_N];
  logic [BLOCK_W-1:0]  data_q [STASH_N];

  logic [N_PORTS-1:0]  grant;
  logic [PW-1:0]       gidx;
  logic                any;
  stash_req_t          r;

  rr_arbiter #(.N(N_PORTS)) u_arb (
    .clk, .rst_n, .req(req_valid), .advance(1'b1), .grant, .gidx, .any
  );

  assign req_ready = grant;
  assign r         = req[gidx];

  // entry search
  logic [STASH_N-1:0] hit_v, elig_v, lock_v;
  logic [LEAF_W-1:0]  pmask;
  logic               hit_any, free_any, elig_any;
  logic [EW-1:0]      hit_i, free_i, elig_i;

  always_comb begin
    pmask = '0;
    for (int b = 0; b < LEAF_W; b++)
      if (b < L && b >= L - int'(r.level)) pmask[b] = 1'b1;
    for (int e = 0; e < STASH_N; e++) begin
      lock_v[e] = 1'b0;
      for (int k = 0; k < N_PORTS; k++)
        if (lock_valid[k] && lock_addr[k] == tag_q[e]) lock_v[e] = 1'b1;
      hit_v[e]  = val_q[e] && tag_q[e] == r.addr;
      elig_v[e] = val_q[e] && !lock_v[e] && (((leaf_q[e] ^ r.leaf) & pmask) == '0);
    end
    hit_any = 1'b0; free_any = 1'b0; elig_any = 1'b0;
    hit_i = '0; free_i = '0; elig_i = '0;
    for (int e = STASH_N-1; e >= 0; e--) begin
      if (hit_v[e])  begin hit_any  = 1'b1; hit_i  = EW'(e); end
      if (!val_q[e]) begin free_any = 1'b1; free_i = EW'(e); end
      if (elig_v[e]) begin elig_any = 1'b1; elig_i = EW'(e); end
    end
  end

  // ACCESS: new contents of the addressed block
  logic [BLOCK_W-1:0] old_data, new_data;
  always_comb begin
    old_data = hit_any ? data_q[hit_i] : '0;
    new_data = old_data;
    case (r.acc_op)
      OP_WRITE: new_data = r.data;
      OP_PMRMW: new_data[{r.idx, 6'd0} +: 64] = {{(64-LEAF_W){1'b0}}, r.pm_val};
      default:  ;
    endcase
  end

  logic [$clog2(STASH_N+1)-1:0] occ_q;
  assign occupancy = occ_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      val_q      <= '0;
      resp_valid <= '0;
      resp       <= '0;
      overflow   <= 1'b0;
      occ_q      <= '0;
    end else begin
      resp_valid <= '0;
      if (any) begin
        resp_valid[gidx] <= 1'b1;
        resp             <= '0;
        unique case (r.op)
          ST_INSERT: begin
            if (free_any) begin
              val_q[free_i]  <= 1'b1;
              tag_q[free_i]  <= r.addr;
              leaf_q[free_i] <= r.leaf;
              data_q[free_i] <= r.data;
              occ_q          <= occ_q + 1'b1;
            end else begin
              overflow <= 1'b1;
            end
          end
          ST_ACCESS: begin
            resp.found <= hit_any;
            resp.addr  <= r.addr;
            resp.leaf  <= r.leaf;
            resp.data  <= old_data;
            if (hit_any) begin
              leaf_q[hit_i] <= r.leaf;
              data_q[hit_i] <= new_data;
            end else if (free_any) begin
              val_q[free_i]  <= 1'b1;
              tag_q[free_i]  <= r.addr;
              leaf_q[free_i] <= r.leaf;
              data_q[free_i] <= new_data;
              occ_q          <= occ_q + 1'b1;
            end else begin
              overflow <= 1'b1;
            end
          end
          ST_PICK: begin
            resp.found <= elig_any;
            resp.addr  <= tag_q[elig_i];
            resp.leaf  <= leaf_q[elig_i];
            resp.data  <= data_q[elig_i];
            if (elig_any) begin
              val_q[elig_i] <= 1'b0;
              occ_q         <= occ_q - 1'b1;
            end
          end
          default: ;
        endcase
      end
    end
  end

  // assertions are enabled one cycle after reset, from a flop of its own
  logic live_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) live_q <= 1'b0;
    else        live_q <= 1'b1;
  end

  // a request, once raised, is held until granted
  for (genvar k = 0; k < N_PORTS; k++) begin : g_hold
    a_hold: assert property (@(posedge clk) disable iff (!live_q)
      req_valid[k] && !req_ready[k] |=> req_valid[k]);
  end
endmodule
