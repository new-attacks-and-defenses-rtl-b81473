// dedrp_cipher: keyed encryption of a line address (the "DE" level).
//
// A line address is encrypted with a key; the low IDX_W bits of the ciphertext
// select an entry of the indirection table. The bank uses two of these, one
// with the current key and one with the target key, so every address selects
// up to two iTable entries. Changing the key re-scatters every address over
// the table.
//
// How it works: a 4-round balanced Feistel network on the 58-bit address split
// into two 29-bit halves. Round r uses the 16-bit round key key[16r +: 16].
// The round function xors the round key in, then mixes by an add of a rotated
// copy and an xor of another rotated copy (all modulo 2^29). A Feistel network
// is a permutation for any round function, so distinct addresses give distinct
// ciphertexts.
//
// Interface and timing: purely combinational, line_addr/key in, cipher/idx out
// in the same cycle.
//
// The paper asks only for a low-latency block cipher and does not name one;
// this particular network, its round count and the 64-bit key are this
// design's choice and are not a vetted cipher.
module dedrp_cipher
  import dedrp_pkg::*;
#(
  parameter int unsigned IDX_W = 15
) (
  input  line_addr_t       line_addr,
  input  key_t             key,
  output line_addr_t       cipher,
  output logic [IDX_W-1:0] idx
);

  localparam int unsigned HALF = LINE_ADDR_W / 2;  // 29

  function automatic logic [HALF-1:0] round_f(input logic [HALF-1:0] r,
                                               input logic [15:0] rk);
    logic [HALF-1:0] t;
    t = r ^ {rk[HALF-17:0], rk};
    t = t + {t[HALF-8:0], t[HALF-1:HALF-7]};     // + rotl(t, 7)
    t = t ^ {t[HALF-14:0], t[HALF-1:HALF-13]};   // ^ rotl(t, 13)
    return t;
  endfunction

  always_comb begin
    logic [HALF-1:0] l, r, nr;
    l = line_addr[LINE_ADDR_W-1:HALF];
    r = line_addr[HALF-1:0];
    for (int i = 0; i < 4; i++) begin
      nr = l ^ round_f(r, key[16*i +: 16]);
      l  = r;
      r  = nr;
    end
    cipher = {l, r};
  end

  assign idx = cipher[IDX_W-1:0];

endmodule
