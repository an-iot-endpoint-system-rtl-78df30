// tb_keccak_ref: reference Keccak-f[400] written from the specification's
// tables (round constants truncated to 16 bits, rotation offsets mod 16),
// independent of the RTL's computed constants.
package tb_keccak_ref;
  localparam logic [15:0] RC [20] = '{16'h0001,16'h8082,16'h808A,16'h8000,16'h808B,16'h0001,
    16'h8081,16'h8009,16'h008A,16'h0088,16'h8009,16'h000A,16'h808B,16'h008B,16'h8089,
    16'h8003,16'h8002,16'h0080,16'h800A,16'h000A};
  // R[x][y], the Keccak rho offsets (mod 16 applied when used)
  localparam int R [5][5] = '{'{0,36,3,41,18}, '{1,44,10,45,2}, '{62,6,43,15,61},
                              '{28,55,25,21,56}, '{27,20,39,8,14}};
  function automatic logic [15:0] rol(logic [15:0] v, int n);
    n = n % 16;
    return n == 0 ? v : (v << n) | (v >> (16 - n));
  endfunction
  function automatic logic [399:0] perm(logic [399:0] s, int nr);
    logic [15:0] a [25]; logic [15:0] b [25]; logic [15:0] c [5]; logic [15:0] d;
    for (int i = 0; i < 25; i++) a[i] = s[16*i +: 16];
    for (int ir = 20 - nr; ir < 20; ir++) begin
      for (int x = 0; x < 5; x++) c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
      for (int x = 0; x < 5; x++) begin
        d = c[(x+4)%5] ^ rol(c[(x+1)%5], 1);
        for (int y = 0; y < 5; y++) a[x+5*y] ^= d;
      end
      for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++)
        b[y + 5*((2*x+3*y)%5)] = rol(a[x+5*y], R[x][y]);
      for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++)
        a[x+5*y] = b[x+5*y] ^ (~b[(x+1)%5+5*y] & b[(x+2)%5+5*y]);
      a[0] ^= RC[ir];
    end
    for (int i = 0; i < 25; i++) s[16*i +: 16] = a[i];
    return s;
  endfunction
endpackage
