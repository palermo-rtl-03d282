// rr_arbiter: round-robin arbiter used by the shared on-chip resources.
// Combinational grant among `req`; the priority pointer moves past the granted
// requester when `advance` is high (a grant was consumed).  Grant is one-hot,
// `gidx` its index, `any` high when some request is present.
module rr_arbiter #(
  parameter int N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,
  output logic [N-1:0]         grant,
  output logic [((N > 1) ? $clog2(N) : 1)-1:0] gidx,
  output logic                 any
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] ptr_q;

  always_comb begin
    grant = '0;
    gidx  = '0;
    any   = 1'b0;
    for (int k = 0; k < N; k++) begin
      if (!any && req[(int'(ptr_q) + k) % N]) begin
        any                          = 1'b1;
        grant[(int'(ptr_q) + k) % N] = 1'b1;
        gidx                         = IW'((int'(ptr_q) + k) % N);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              ptr_q <= '0;
    else if (advance && any) ptr_q <= (int'(gidx) == N-1) ? '0 : gidx + 1'b1;
  end
endmodule
