// palermo_ttc: tree-top cache between the PE mesh and the memory controller.
//
// The top TTC_LEVELS levels of each of the three sub-ORAM trees (all slots and
// the metadata word of those buckets) live on chip; with 256 KB per sub-ORAM
// that is 6 levels (63 buckets x 44 words x 80 B).  A request whose bucket lies
// there is served locally: a write is stored, a read answers on the next cycle.
// Every other request goes out unchanged to the memory controller port.  Words
// keep the ciphertext the PE wrote.  A per-word valid bit (cleared at reset)
// makes a never-written word read back as the encryption of zero, exactly what
// untouched external memory returns, so empty buckets look the same wherever
// they live.  Local responses take priority over external ones on the shared
// response port.  The paper gives the cache's role and size (24 banks of
// 32 KB); the single-array organisation is this design's.
module palermo_ttc
  import palermo_pkg::*;
#(
  parameter int TTC_LEVELS = 6,
  parameter int SLOTS      = 43          // Z + S
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [KEY_W-1:0] key,
  input  logic            in_req_valid,
  input  mem_req_t        in_req,
  output logic            in_req_ready,
  output logic            in_resp_valid,
  output mem_resp_t       in_resp,
  input  logic            in_resp_ready,
  output logic            ext_req_valid,
  output mem_req_t        ext_req,
  input  logic            ext_req_ready,
  input  logic            ext_resp_valid,
  input  mem_resp_t       ext_resp,
  output logic            ext_resp_ready,
  output logic [31:0]     hit_count
);
  localparam int NODES = (1 << TTC_LEVELS) - 1;
  localparam int WPN   = SLOTS + 1;               // words per bucket (slots + metadata)
  localparam int WORDS = 3 * NODES * WPN;
  localparam int IW    = $clog2(WORDS);

  logic [MEM_W-1:0] mem [WORDS];
  logic [WORDS-1:0] wvalid_q;

  logic [1:0]        row;
  logic [NODE_W-1:0] node;
  logic [SLOT_W-1:0] slot;
  logic              hit;
  logic [IW-1:0]     widx;

  assign {row, node, slot} = in_req.addr[2+NODE_W+SLOT_W-1:0];
  assign hit  = (node < NODE_W'(NODES)) && (row < 2'd3);
  assign widx = IW'((int'(row) * NODES + int'(node)) * WPN + int'(slot));

  logic      lresp_v_q;
  mem_resp_t lresp_q;
  logic      accept_local;

  always_comb begin
    ext_req       = in_req;
    ext_req_valid = in_req_valid && !hit;
    accept_local  = in_req_valid && hit && (in_req.we || !lresp_v_q || in_resp_ready);
    in_req_ready  = hit ? accept_local : ext_req_ready;
    in_resp_valid = lresp_v_q || ext_resp_valid;
    in_resp       = lresp_v_q ? lresp_q : ext_resp;
    ext_resp_ready = in_resp_ready && !lresp_v_q;
  end

  logic [PAD_W-1:0] zpad;
  assign zpad = xor_pad(key, in_req.addr);

  always_ff @(posedge clk) begin
    if (accept_local && in_req.we) mem[widx] <= in_req.wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wvalid_q  <= WORDS'(0);
      lresp_v_q <= 1'b0;
      lresp_q   <= '0;
      hit_count <= '0;
    end else begin
      if (lresp_v_q && in_resp_ready) lresp_v_q <= 1'b0;
      if (accept_local) begin
        hit_count <= hit_count + 1;
        if (in_req.we) begin
          wvalid_q[widx] <= 1'b1;
        end else begin
          lresp_v_q     <= 1'b1;
          lresp_q.addr  <= in_req.addr;
          lresp_q.tag   <= in_req.tag;
          lresp_q.rdata <= wvalid_q[widx] ? mem[widx] : zpad[MEM_W-1:0];
        end
      end
    end
  end
endmodule
