// keccak_pkg: the Keccak-f[400] round (16-bit lanes, 20 rounds).
//
// State layout: lane (x,y) occupies bits [16*(x+5*y) +: 16] of the 400-bit
// vector; bit z of a lane is bit z of that slice. The round constants and
// the rho offsets are not tables: they are derived as in the Keccak
// reference, the constants from the degree-8 LFSR rc(t) (x^8+x^6+x^5+x^4+1)
// and the offsets from the (x,y) -> (y, 2x+3y) walk, taken modulo the lane
// width. These functions fold to constants when their arguments are
// constant.
package keccak_pkg;
  localparam int unsigned W = 16;

  function automatic logic rc_bit(input int t);
    logic [7:0] r;
    int n;
    n = t % 255;
    r = 8'h01;
    for (int i = 0; i < 255; i++) begin
      if (i < n) r = {r[6:0], 1'b0} ^ (r[7] ? 8'h71 : 8'h00);
    end
    return r[0];
  endfunction

  function automatic logic [W-1:0] round_const(input int ir);
    logic [W-1:0] c;
    c = '0;
    for (int j = 0; j <= 4; j++) c[(1 << j) - 1] = rc_bit(j + 7*ir);
    return c;
  endfunction

  function automatic int rho_off(input int x, input int y);
    int cx, cy, nx, off;
    cx = 1; cy = 0; off = 0;
    if (x == 0 && y == 0) return 0;
    for (int t = 0; t < 24; t++) begin
      if (cx == x && cy == y) off = ((t + 1) * (t + 2) / 2) % W;
      nx = cy; cy = (2*cx + 3*cy) % 5; cx = nx;
    end
    return off;
  endfunction

  function automatic logic [W-1:0] rotl(input logic [W-1:0] v, input int n);
    return (n == 0) ? v : ((v << n) | (v >> (W - n)));
  endfunction

  function automatic logic [399:0] round(input logic [399:0] a, input logic [W-1:0] rc);
    logic [W-1:0] A [5][5];
    logic [W-1:0] B [5][5];
    logic [W-1:0] C [5];
    logic [W-1:0] D [5];
    logic [399:0] r;
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) A[x][y] = a[W*(x+5*y) +: W];
    for (int x = 0; x < 5; x++) C[x] = A[x][0] ^ A[x][1] ^ A[x][2] ^ A[x][3] ^ A[x][4];
    for (int x = 0; x < 5; x++) D[x] = C[(x+4)%5] ^ rotl(C[(x+1)%5], 1);
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) A[x][y] = A[x][y] ^ D[x];
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++)
      B[y][(2*x + 3*y) % 5] = rotl(A[x][y], rho_off(x, y));
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++)
      A[x][y] = B[x][y] ^ (~B[(x+1)%5][y] & B[(x+2)%5][y]);
    A[0][0] = A[0][0] ^ rc;
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) r[W*(x+5*y) +: W] = A[x][y];
    return r;
  endfunction
endpackage
