// tb_xor_cipher: checks the XOR encryption unit against an independent
// re-implementation of the keyed pad (xorshift rounds per 64-bit lane), and that
// decrypting an encrypted word returns it, with random keys, addresses, data.
module tb_xor_cipher;
  import palermo_pkg::*;
  logic [KEY_W-1:0]   key;
  logic [MADDR_W-1:0] addr;
  logic [MEM_W-1:0]   din, enc, dec;
  int checks = 0, failures = 0;

  xor_cipher u_enc (.key, .addr, .din, .dout(enc));
  xor_cipher u_dec (.key, .addr, .din(enc), .dout(dec));

  function automatic logic [63:0] rnd64(input logic [63:0] x);
    logic [63:0] y;
    y = x ^ {x[50:0], 13'd0};
    y = y ^ {7'd0, y[63:7]};
    y = y ^ {y[46:0], 17'd0};
    return y;
  endfunction

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [MEM_W-1:0] exp_pad;
    logic [63:0] x;
    for (int t = 0; t < 200; t++) begin
      key  = {$urandom, $urandom, $urandom, $urandom};
      addr = {$urandom, $urandom};
      for (int w = 0; w < MEM_W/32; w++) din[w*32 +: 32] = $urandom;
      for (int i = 0; i < MEM_W/64; i++) begin
        x = key[63:0] ^ {addr, 24'(i)};
        x = rnd64(x) ^ key[127:64];
        x = rnd64(rnd64(x));
        exp_pad[i*64 +: 64] = x;
      end
      #1;
      checks++; if (enc !== (din ^ exp_pad)) begin failures++; $display("FAIL enc t=%0d", t); end
      checks++; if (dec !== din) begin failures++; $display("FAIL dec t=%0d", t); end
      checks++; if (enc == din) begin failures++; $display("FAIL identity t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
