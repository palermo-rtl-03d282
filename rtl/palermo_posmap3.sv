// palermo_posmap3: the on-chip last-level position map (PosMap3).
//
// Holds the leaf of every PosMap2 block: 2^PM3_AW entries of 32 bits (16 MB at
// the default 2^22 entries, matching the paper's 16 x 1 MB EDRAM).  It acts as
// the "child" of the bottom (PosMap2) PE row: each port carries the same
// OP_PMRMW request a PE sends south.  One request per cycle is served
// round-robin; it returns the stored leaf and writes the new leaf in the same
// cycle (atomic read-old/write-new), response registered one cycle later on
// resp_valid[port] with the old leaf in resp.data[LEAF_W-1:0].
// Entry index = {addr, idx}, i.e. the PosMap2 block number.  The array is not
// cleared at reset: an arbitrary initial leaf is harmless because a block that
// was never written is absent from its whole path and is created in the stash.
// Banking into 16 macros is not modelled; this is one behavioural array.
module palermo_posmap3
  import palermo_pkg::*;
#(
  parameter int N_PORTS = 8,
  parameter int PM3_AW  = 22
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_PORTS-1:0] req_valid,
  input  oram_req_t          req [N_PORTS],
  output logic [N_PORTS-1:0] req_ready,
  output logic [N_PORTS-1:0] resp_valid,
  output oram_resp_t         resp
);
  localparam int PW = (N_PORTS > 1) ? $clog2(N_PORTS) : 1;

  logic [31:0] mem [2**PM3_AW];

  logic [N_PORTS-1:0] grant;
  logic [PW-1:0]      gidx;
  logic               any;
  logic [PM3_AW-1:0]  index;
  oram_req_t          r;

  rr_arbiter #(.N(N_PORTS)) u_arb (
    .clk, .rst_n, .req(req_valid), .advance(1'b1), .grant, .gidx, .any
  );
  assign req_ready = grant;
  assign r         = req[gidx];
  assign index     = {r.addr[PM3_AW-4:0], r.idx};

  always_ff @(posedge clk) begin
    if (any) mem[index] <= 32'(r.new_leaf);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_valid <= '0;
      resp       <= '0;
    end else begin
      resp_valid <= '0;
      if (any) begin
        resp_valid[gidx] <= 1'b1;
        resp.data        <= BLOCK_W'(mem[index]);
      end
    end
  end
endmodule
