// xor_cipher: the PE's XOR encryption/decryption logic.
// out = in XOR pad(key, addr), where the pad is derived from the secret key and
// the memory word address (palermo_pkg::xor_pad).  Being an XOR, the same
// module encrypts a word on its way to memory and decrypts it on return.
// Purely combinational.  The paper names an XOR enc/dec unit inside each PE;
// the pad generator itself is this design's own simple keyed mixer.
module xor_cipher
  import palermo_pkg::*;
#(
  parameter int W = MEM_W
) (
  input  logic [KEY_W-1:0]   key,
  input  logic [MADDR_W-1:0] addr,
  input  logic [W-1:0]       din,
  output logic [W-1:0]       dout
);
  logic [PAD_W-1:0] pad;
  always_comb begin
    pad  = xor_pad(key, addr);
    dout = din ^ pad[W-1:0];
  end
endmodule
