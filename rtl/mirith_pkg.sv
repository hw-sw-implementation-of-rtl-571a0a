// mirith_pkg: shared constants, types and the F_16 arithmetic used by the
// sum-of-scalar-matrix-products accelerator and the Keccak PRNG.
//
// Field: F_q with q = 16, four bits per element, reduced modulo
// x^4 + x + 1 (the reduction polynomial is this design's choice; the field
// size and the 15-element, 60-bit column word follow the paper).
// Matrix shape: 15 rows x 15 columns per matrix M_j, k = 78 matrices
// (the MiRitH-Ia parameter set, which matches the loop bounds
// "for z in [0,14]" of the accelerator's block diagram).
// Memory words are 64 bits wide; a column uses the low 60 bits, element r
// of a column sits in bits [4r+3:4r].
package mirith_pkg;

  localparam int unsigned GF_BITS   = 4;   // q = 16
  localparam int unsigned M_ROWS    = 15;  // elements per column word
  localparam int unsigned N_COLS    = 15;  // columns per matrix (z in [0,14])
  localparam int unsigned K_MATS    = 78;  // k, number of matrices M_1..M_k
  localparam int unsigned COL_BITS  = GF_BITS * M_ROWS;  // 60
  localparam int unsigned BUS_BITS  = 64;  // AXI data width
  localparam int unsigned ADDR_BITS = 32;  // AXI address width

  typedef logic [GF_BITS-1:0]  gf_t;
  typedef logic [COL_BITS-1:0] col_t;

  // Keccak-f[1600]
  localparam int unsigned KECCAK_ROUNDS = 24;
  typedef logic [63:0] lane_t;
  typedef lane_t [24:0] kstate_t;   // lane (x,y) at index x + 5*y

  // Carry-less product of two F_16 elements reduced by x^4 + x + 1.
  function automatic gf_t gf_mul(gf_t a, gf_t b);
    logic [6:0] p;
    p = '0;
    for (int i = 0; i < 4; i++)
      if (b[i]) p ^= 7'(a) << i;
    // fold x^6, x^5, x^4 back: x^4 = x + 1
    for (int i = 6; i >= 4; i--)
      if (p[i]) p ^= 7'(7'b0010011 << (i - 4));
    return p[3:0];
  endfunction

  // Round constants of Keccak-f[1600] (FIPS 202, iota step).
  function automatic lane_t keccak_rc(int unsigned r);
    case (r)
      0:  return 64'h0000000000000001;  1:  return 64'h0000000000008082;
      2:  return 64'h800000000000808A;  3:  return 64'h8000000080008000;
      4:  return 64'h000000000000808B;  5:  return 64'h0000000080000001;
      6:  return 64'h8000000080008081;  7:  return 64'h8000000000008009;
      8:  return 64'h000000000000008A;  9:  return 64'h0000000000000088;
      10: return 64'h0000000080008009;  11: return 64'h000000008000000A;
      12: return 64'h000000008000808B;  13: return 64'h800000000000008B;
      14: return 64'h8000000000008089;  15: return 64'h8000000000008003;
      16: return 64'h8000000000008002;  17: return 64'h8000000000000080;
      18: return 64'h000000000000800A;  19: return 64'h800000008000000A;
      20: return 64'h8000000080008081;  21: return 64'h8000000000008080;
      22: return 64'h0000000080000001;  23: return 64'h8000000080008008;
      default: return 64'h0;
    endcase
  endfunction

  // Rotation offsets of the rho step, lane (x,y) at index x + 5*y.
  function automatic int unsigned keccak_rho(int unsigned i);
    case (i)
      0: return 0;   1: return 1;   2: return 62;  3: return 28;  4: return 27;
      5: return 36;  6: return 44;  7: return 6;   8: return 55;  9: return 20;
      10: return 3;  11: return 10; 12: return 43; 13: return 25; 14: return 39;
      15: return 41; 16: return 45; 17: return 15; 18: return 21; 19: return 8;
      20: return 18; 21: return 2;  22: return 61; 23: return 56; 24: return 14;
      default: return 0;
    endcase
  endfunction

  function automatic lane_t rotl64(lane_t v, int unsigned n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  // One Keccak-f[1600] round: theta, rho, pi, chi, iota.
  function automatic kstate_t keccak_round(kstate_t a, int unsigned r);
    lane_t   c [5];
    lane_t   d [5];
    kstate_t b, o;
    for (int x = 0; x < 5; x++)
      c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
    for (int x = 0; x < 5; x++)
      d[x] = c[(x+4)%5] ^ rotl64(c[(x+1)%5], 1);
    // theta, then rho and pi: B[y, 2x+3y] = rot(A[x,y], r[x,y])
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y + 5*((2*x + 3*y) % 5)] = rotl64(a[x + 5*y] ^ d[x], keccak_rho(x + 5*y));
    // chi
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        o[x + 5*y] = b[x + 5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
    // iota
    o[0] ^= keccak_rc(r);
    return o;
  endfunction

endpackage
