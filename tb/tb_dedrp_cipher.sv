// tb_dedrp_cipher: checks the line-address cipher.
//
// A reference Feistel network is written here from its description (round
// function, round keys, 4 rounds), together with its inverse. For random
// addresses and keys the checks are: the ciphertext equals the reference, the
// inverse recovers the address (so the map is a permutation), idx is the low
// bits of the ciphertext, and changing the key changes the iTable index of
// most addresses.
module tb_dedrp_cipher;
  import dedrp_pkg::*;
  localparam int unsigned IDX_W = 15;

  line_addr_t       a, c;
  key_t             k;
  logic [IDX_W-1:0] idx;
  int checks = 0, failures = 0;

  dedrp_cipher #(.IDX_W(IDX_W)) dut (.line_addr(a), .key(k), .cipher(c), .idx(idx));

  function automatic logic [28:0] rotl(input logic [28:0] x, input int n);
    return (x << n) | (x >> (29 - n));
  endfunction
  function automatic logic [28:0] f(input logic [28:0] r, input logic [15:0] rk);
    logic [28:0] t;
    t = r ^ {rk[12:0], rk};
    t = t + rotl(t, 7);
    t = t ^ rotl(t, 13);
    return t;
  endfunction
  function automatic line_addr_t enc(input line_addr_t x, input key_t key);
    logic [28:0] l, r, t;
    {l, r} = x;
    for (int i = 0; i < 4; i++) begin
      t = l ^ f(r, key[16*i +: 16]);
      l = r;
      r = t;
    end
    return {l, r};
  endfunction
  function automatic line_addr_t dec(input line_addr_t y, input key_t key);
    logic [28:0] l, r, t;
    {l, r} = y;
    for (int i = 3; i >= 0; i--) begin
      t = r ^ f(l, key[16*i +: 16]);
      r = l;
      l = t;
    end
    return {l, r};
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int differ = 0;
    logic [IDX_W-1:0] idx0;
    for (int n = 0; n < 2000; n++) begin
      a = line_addr_t'({$urandom(), $urandom()});
      k = {$urandom(), $urandom()};
      #1;
      check(c == enc(a, k), "ciphertext matches reference");
      check(dec(c, k) == a, "inverse recovers address");
      check(idx == c[IDX_W-1:0], "idx is low ciphertext bits");
      idx0 = idx;
      k = k ^ {$urandom(), $urandom()} | 64'h1;
      #1;
      if (idx != idx0) differ++;
    end
    check(differ > 1900, $sformatf("rekey moves indices (%0d of 2000)", differ));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
