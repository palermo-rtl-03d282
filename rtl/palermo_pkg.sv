// palermo_pkg: types and constants shared by the Palermo ORAM controller.
//
// Field widths are fixed at the sizes of the 16 GB protected space (64 B cache
// lines, 2^28 data blocks, up to 2^25 leaves); smaller trees simply leave the
// upper bits of addresses and leaves at zero.  Z, S, A and the tree depths stay
// module parameters.  The memory word is 640 bits: large enough for a 64 B block
// with its address/leaf header, and for one bucket's metadata at Z=16, S=27.
//
// The XOR pad below is this design's own stand-in for the keyed pad generator
// (the paper only names "XOR Enc/Dec logic"); it mixes the key with the memory
// address through xorshift rounds and is not a cryptographic cipher.
package palermo_pkg;

  localparam int ADDR_W  = 28;   // block address field (16 GB / 64 B)
  localparam int LEAF_W  = 25;   // leaf identifier field
  localparam int BLOCK_W = 512;  // one cache line
  localparam int GID_W   = 16;   // global issue id (wraps)
  localparam int KEY_W   = 128;
  localparam int MEM_W   = 640;  // one memory word (block + header, or bucket metadata)
  localparam int MADDR_W = 40;   // {row, node, slot} word address
  localparam int NODE_W  = 26;
  localparam int SLOT_W  = 6;
  localparam int TAG_W   = 8;    // requesting PE
  localparam int PAD_W   = 1024;

  typedef enum logic [1:0] {
    OP_READ  = 2'd0,
    OP_WRITE = 2'd1,
    OP_PMRMW = 2'd2   // position-map read-modify-write: return entry, store new leaf
  } op_e;

  // Protocol phase of a PE (legend of the paper's timing diagrams)
  typedef enum logic [2:0] {
    PH_IDLE = 3'd0, PH_CP = 3'd1, PH_LM = 3'd2, PH_ER = 3'd3,
    PH_RP = 3'd4, PH_EP = 3'd5, PH_FI = 3'd6
  } phase_e;

  typedef enum logic [1:0] {
    ST_INSERT = 2'd0,
    ST_ACCESS = 2'd1,
    ST_PICK   = 2'd2
  } stash_op_e;

  // ORAM request travelling down a PE column (north -> south)
  typedef struct packed {
    op_e                op;
    logic [ADDR_W-1:0]  addr;       // block address in this sub-ORAM
    logic [2:0]         idx;        // entry index for OP_PMRMW
    logic [LEAF_W-1:0]  new_leaf;   // value written by OP_PMRMW
    logic [BLOCK_W-1:0] wdata;      // data for OP_WRITE
    logic [GID_W-1:0]   gid;
    logic               evict;      // GlobalID % A == 0
    logic [LEAF_W-1:0]  evict_cnt;  // number of earlier evictions
    logic               dummy;      // padding request
  } oram_req_t;

  typedef struct packed {
    logic [BLOCK_W-1:0] data;       // block (data row) or old leaf in [LEAF_W-1:0]
  } oram_resp_t;

  typedef struct packed {
    stash_op_e          op;
    op_e                acc_op;
    logic [ADDR_W-1:0]  addr;
    logic [LEAF_W-1:0]  leaf;       // INSERT/ACCESS: block leaf; PICK: path leaf
    logic [BLOCK_W-1:0] data;
    logic [2:0]         idx;
    logic [LEAF_W-1:0]  pm_val;
    logic [4:0]         level;      // PICK: bucket level
  } stash_req_t;

  typedef struct packed {
    logic               found;
    logic [ADDR_W-1:0]  addr;
    logic [LEAF_W-1:0]  leaf;
    logic [BLOCK_W-1:0] data;
  } stash_resp_t;

  typedef struct packed {
    logic               we;
    logic [MADDR_W-1:0] addr;
    logic [MEM_W-1:0]   wdata;
    logic [TAG_W-1:0]   tag;
  } mem_req_t;

  typedef struct packed {
    logic [MADDR_W-1:0] addr;
    logic [MEM_W-1:0]   rdata;
    logic [TAG_W-1:0]   tag;
  } mem_resp_t;

  // Block as stored in a bucket slot
  typedef struct packed {
    logic               real_blk;
    logic [ADDR_W-1:0]  addr;
    logic [LEAF_W-1:0]  leaf;
    logic [BLOCK_W-1:0] data;
  } blk_t;

  typedef struct packed {
    logic               we;
    logic [33:0]        pa;         // byte address in the 16 GB space
    logic [BLOCK_W-1:0] wdata;
    logic [7:0]         id;
  } llc_req_t;

  typedef struct packed {
    logic [7:0]         id;
    logic [BLOCK_W-1:0] data;
  } llc_resp_t;

  // event counters of the controller
  typedef struct packed {
    logic [31:0] resets;      // buckets early-reshuffled (ER resets, per ER step)
    logic [31:0] evictions;   // evict-path operations
    logic [31:0] pending;     // requests that found their block pending
    logic [31:0] stash_hits;  // accesses that found their block in the stash
    logic [31:0] dummies;     // padding requests issued
    logic [31:0] ttc_hits;    // memory words served by the tree-top cache
  } stats_t;

  // word address of slot `slot` of heap node `node` in sub-ORAM `row`
  function automatic logic [MADDR_W-1:0] mem_addr(input logic [1:0] row,
                                                  input logic [NODE_W-1:0] node,
                                                  input logic [SLOT_W-1:0] slot);
    return {6'd0, row, node, slot};
  endfunction

  // heap index of the bucket at `level` on the path to `leaf` (tree of L+1 levels)
  function automatic logic [NODE_W-1:0] node_of(input logic [LEAF_W-1:0] leaf,
                                                input int unsigned level,
                                                input int unsigned L);
    logic [NODE_W:0] base;
    logic [LEAF_W-1:0] off;
    base = (NODE_W+1)'(1) << level;
    off  = leaf >> (L - level);
    return NODE_W'(base - (NODE_W+1)'(1) + (NODE_W+1)'(off));
  endfunction

  // level of heap node `node` = floor(log2(node+1))
  function automatic logic [4:0] level_of(input logic [NODE_W-1:0] node);
    logic [NODE_W:0] n1;
    logic [4:0] lv;
    n1 = {1'b0, node} + 1'b1;
    lv = 5'd0;
    for (int i = 0; i <= NODE_W; i++) if (n1[i]) lv = 5'(i);
    return lv;
  endfunction

  // bit-reverse the low `bits` bits of v (reverse-lexicographic eviction order)
  function automatic logic [LEAF_W-1:0] bitrev(input logic [LEAF_W-1:0] v, input int unsigned bits);
    logic [LEAF_W-1:0] r;
    r = '0;
    for (int i = 0; i < LEAF_W; i++) if (i < int'(bits)) r[bits-1-i] = v[i];
    return r;
  endfunction

  function automatic logic [63:0] xs64(input logic [63:0] x);
    logic [63:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 7);
    y = y ^ (y << 17);
    return y;
  endfunction

  // keyed address-dependent pad
  function automatic logic [PAD_W-1:0] xor_pad(input logic [KEY_W-1:0] key,
                                               input logic [MADDR_W-1:0] addr);
    logic [PAD_W-1:0] p;
    logic [63:0] x;
    for (int i = 0; i < PAD_W/64; i++) begin
      x = key[63:0] ^ {addr[MADDR_W-1:0], 24'(i)};
      x = xs64(x);
      x = x ^ key[127:64];
      x = xs64(xs64(x));
      p[i*64 +: 64] = x;
    end
    return p;
  endfunction

endpackage
