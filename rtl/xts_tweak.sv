// xts_tweak: XTS tweak generator, T_i = T_(i-1) (x) 2 in GF(2^128).
//
// The paper replaces the general GF(2^128) multiplier of XTS by a one-bit
// shift with a conditional XOR of the polynomial x^128+x^7+x^2+x+1 (Sec.
// IV-A). The byte order of the 128-bit value follows IEEE 1619: byte 0 of
// the block (bits [127:120] here) is the least significant byte, so the
// shift carries from each byte's bit 7 into the next byte's bit 0 and the
// bit falling off byte 15 folds back as 8'h87 into byte 0.
// load_i loads T_0 (the encrypted sector number); each step_i multiplies the
// held tweak by alpha. tweak_o is the current tweak and tweak_next_o the one
// after it, so the two AES instances can use consecutive tweaks at once.
module xts_tweak (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         load_i,
  input  logic [127:0] t0_i,
  input  logic         step2_i,   // advance by two blocks
  output logic [127:0] tweak_o,
  output logic [127:0] tweak_next_o
);
  logic [127:0] t_q;

  function automatic logic [127:0] mul2(input logic [127:0] t);
    logic [127:0] r;
    logic c, n;
    c = 1'b0;
    for (int j = 0; j < 16; j++) begin
      n = t[127 - 8*j];                       // bit 7 of byte j
      r[127 - 8*j -: 8] = {t[126 - 8*j -: 7], c};
      c = n;
    end
    if (c) r[127 -: 8] = r[127 -: 8] ^ 8'h87;
    return r;
  endfunction

  assign tweak_o      = t_q;
  assign tweak_next_o = mul2(t_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)       t_q <= '0;
    else if (load_i)   t_q <= t0_i;
    else if (step2_i)  t_q <= mul2(mul2(t_q));
  end
endmodule
