// palermo_mesh: the network joining the PE array to the memory side.
//
// N PE request ports (valid/ready) are merged round-robin onto one request
// port; the granted PE's index becomes the request tag.  Responses (valid/ready)
// carry the tag back and are steered to that PE only; the response is held
// until that PE accepts it.  Requests are passed through combinationally, so
// the order in which requests are granted is the order the memory sees them,
// which the protocol relies on (a write granted before a later PE's read).
// The paper shows a "Mesh Network" next to each PE without its insides; a
// single arbitrated port is this design's simplest realisation of it.
module palermo_mesh
  import palermo_pkg::*;
#(
  parameter int N = 24
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] pe_req_valid,
  input  mem_req_t     pe_req [N],
  output logic [N-1:0] pe_req_ready,
  output logic [N-1:0] pe_resp_valid,
  output mem_resp_t    pe_resp,
  input  logic [N-1:0] pe_resp_ready,
  output logic         out_req_valid,
  output mem_req_t     out_req,
  input  logic         out_req_ready,
  input  logic         out_resp_valid,
  input  mem_resp_t    out_resp,
  output logic         out_resp_ready
);
  localparam int PW = (N > 1) ? $clog2(N) : 1;
  logic [N-1:0]  grant;
  logic [PW-1:0] gidx;
  logic          any;

  rr_arbiter #(.N(N)) u_arb (
    .clk, .rst_n, .req(pe_req_valid), .advance(out_req_ready), .grant, .gidx, .any
  );

  always_comb begin
    out_req_valid = any;
    out_req       = pe_req[gidx];
    out_req.tag   = TAG_W'(gidx);
    pe_req_ready  = out_req_ready ? grant : '0;
    pe_resp       = out_resp;
    pe_resp_valid = '0;
    out_resp_ready = 1'b0;
    for (int i = 0; i < N; i++) begin
      if (out_resp_valid && int'(out_resp.tag) == i) begin
        pe_resp_valid[i] = 1'b1;
        out_resp_ready   = pe_resp_ready[i];
      end
    end
  end
endmodule
