// tb_ref_pkg: reference models used by the testbenches, written apart from
// the RTL so that they check it rather than repeat it.
//  * gf16 product by shift-and-reduce inside the loop (the RTL reduces
//    after a carry-less product);
//  * Keccak-f[1600] in the compact lane-walking form (pi and rho merged
//    along the 24-lane cycle), with round constants generated by the
//    degree-8 LFSR of the Keccak reference instead of a table;
//  * SHAKE sponge over a byte array.
package tb_ref_pkg;

  function automatic logic [3:0] ref_gf_mul(logic [3:0] a, logic [3:0] b);
    logic [3:0] r, x;
    r = '0;
    x = a;
    for (int i = 0; i < 4; i++) begin
      if (b[i]) r ^= x;
      x = x[3] ? ((x << 1) ^ 4'h3) : (x << 1);   // multiply by t, t^4 = t + 1
    end
    return r;
  endfunction

  typedef logic [63:0] lanes_t [25];

  function automatic bit lfsr_bit(int t);
    logic [7:0] r;
    r = 8'h01;
    for (int i = 0; i < t % 255; i++)
      r = r[7] ? ((r << 1) ^ 8'h71) : (r << 1);
    return r[0];
  endfunction

  function automatic logic [63:0] ref_rc(int rnd);
    logic [63:0] c;
    c = '0;
    for (int j = 0; j < 7; j++)
      if (lfsr_bit(j + 7 * rnd)) c[(1 << j) - 1] = 1'b1;
    return c;
  endfunction

  function automatic logic [63:0] rol(logic [63:0] v, int n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  function automatic void ref_keccakf(ref lanes_t st);
    int rotc [24] = '{1,3,6,10,15,21,28,36,45,55,2,14,27,41,56,8,25,43,62,18,39,61,20,44};
    int piln [24] = '{10,7,11,17,18,3,5,16,8,21,24,4,15,23,19,13,12,2,20,14,22,9,6,1};
    logic [63:0] bc [5];
    logic [63:0] t;
    for (int r = 0; r < 24; r++) begin
      for (int i = 0; i < 5; i++) bc[i] = st[i] ^ st[i+5] ^ st[i+10] ^ st[i+15] ^ st[i+20];
      for (int i = 0; i < 5; i++) begin
        t = bc[(i+4)%5] ^ rol(bc[(i+1)%5], 1);
        for (int j = 0; j < 25; j += 5) st[j+i] ^= t;
      end
      t = st[1];
      for (int i = 0; i < 24; i++) begin
        int j;
        j = piln[i];
        bc[0] = st[j];
        st[j] = rol(t, rotc[i]);
        t = bc[0];
      end
      for (int j = 0; j < 25; j += 5) begin
        for (int i = 0; i < 5; i++) bc[i] = st[j+i];
        for (int i = 0; i < 5; i++) st[j+i] ^= (~bc[(i+1)%5]) & bc[(i+2)%5];
      end
      st[0] ^= ref_rc(r);
    end
  endfunction

  // SHAKE-style sponge: absorb msg[0..len-1], squeeze nwords 64-bit words
  function automatic void ref_shake(input byte unsigned msg[], input int rate_bytes,
                                    input byte unsigned ds, input int nwords,
                                    output logic [63:0] out[]);
    lanes_t st;
    byte unsigned blk[];
    int n, pos;
    for (int i = 0; i < 25; i++) st[i] = '0;
    n = msg.size();
    // pad into a whole number of blocks
    blk = new[((n / rate_bytes) + 1) * rate_bytes];
    foreach (blk[i]) blk[i] = 8'h00;
    for (int i = 0; i < n; i++) blk[i] = msg[i];
    blk[n] ^= ds;
    blk[blk.size() - 1] ^= 8'h80;
    for (int b = 0; b < blk.size(); b += rate_bytes) begin
      for (int i = 0; i < rate_bytes; i++)
        st[i/8][8*(i%8) +: 8] ^= blk[b + i];
      ref_keccakf(st);
    end
    out = new[nwords];
    pos = 0;
    for (int w = 0; w < nwords; w++) begin
      if (pos == rate_bytes / 8) begin ref_keccakf(st); pos = 0; end
      out[w] = st[pos];
      pos++;
    end
  endfunction

endpackage
