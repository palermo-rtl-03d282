// palermo_rng: 32-bit xorshift generator supplying the uniformly random leaves
// (UniRandLeaf) and bucket permutation offsets of a PE.  A new value is produced
// every cycle `next` is high.  Seeded per instance at reset (zero seed replaced).
// The paper requires uniformly random leaves but does not say how they are made;
// a hardware design would use a true or cryptographic RNG here.
module palermo_rng #(
  parameter logic [31:0] SEED = 32'h1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        next,
  output logic [31:0] value
);
  logic [31:0] s_q, s_d;
  always_comb begin
    s_d = s_q ^ (s_q << 13);
    s_d = s_d ^ (s_d >> 17);
    s_d = s_d ^ (s_d << 5);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    s_q <= (SEED == 32'd0) ? 32'h1 : SEED;
    else if (next) s_q <= s_d;
  end
  assign value = s_q;
endmodule
