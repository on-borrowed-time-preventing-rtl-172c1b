// trivium_ref_pkg -- bit-serial Trivium reference model for testbenches.
//
// Written from the cipher's description as three shift registers
// A (93 bits), B (84 bits) and C (111 bits); seeded with K_i = KEY[i-1]
// in A1..A80, IV_i = IV[i-1] in B1..B80 and ones in C109..C111.
// `seed()` does not run the warm-up, so word(n) for n = 0, 1, ... gives
// the keystream exactly as an unrolled generator presents it after its
// reset, warm-up words included.
package trivium_ref_pkg;
  class trivium_ref;
    bit A[1:93];
    bit B[1:84];
    bit C[1:111];

    function void seed(logic [79:0] key, logic [79:0] iv);
      foreach (A[i]) A[i] = 1'b0;
      foreach (B[i]) B[i] = 1'b0;
      foreach (C[i]) C[i] = 1'b0;
      for (int i = 1; i <= 80; i++) begin
        A[i] = key[i-1];
        B[i] = iv[i-1];
      end
      C[109] = 1'b1; C[110] = 1'b1; C[111] = 1'b1;
    endfunction

    function bit step();
      bit t1, t2, t3, z;
      t1 = A[66] ^ A[93];
      t2 = B[69] ^ B[84];
      t3 = C[66] ^ C[111];
      z  = t1 ^ t2 ^ t3;
      t1 = t1 ^ (A[91] & A[92]) ^ B[78];
      t2 = t2 ^ (B[82] & B[83]) ^ C[87];
      t3 = t3 ^ (C[109] & C[110]) ^ A[69];
      for (int i = 93; i > 1; i--)  A[i] = A[i-1];
      for (int i = 84; i > 1; i--)  B[i] = B[i-1];
      for (int i = 111; i > 1; i--) C[i] = C[i-1];
      A[1] = t3; B[1] = t1; C[1] = t2;
      return z;
    endfunction

    // next n (<= 128) keystream bits, first bit in bit 0
    function logic [127:0] word(int n);
      logic [127:0] w = '0;
      for (int b = 0; b < n; b++) w[b] = step();
      return w;
    endfunction
  endclass
endpackage
