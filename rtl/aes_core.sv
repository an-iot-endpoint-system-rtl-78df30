// aes_core: one AES-128 datapath instance with two cipher rounds per cycle.
//
// As in the paper (Fig. 3), each instance holds two round stages in series
// and a state register; both directions are supported. On load_i the state
// becomes din_i XOR wkey_i (the initial AddRoundKey). On every run_i cycle
// the state goes through two rounds keyed with rk_a_i and rk_b_i; on the
// cycle with last_i the second round is the final one (no (Inv)MixColumns).
// Ten rounds therefore take five run cycles; dout_o is valid after the
// last one. Round keys come from the shared aes_keygen. With single_i set a
// run cycle applies only one full round keyed by rk_a_i (the AES-NI-like
// single-round operation the paper mentions), so software can build other
// round-based algorithms.
module aes_core (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         dec_i,
  input  logic         load_i,
  input  logic [127:0] din_i,
  input  logic [127:0] wkey_i,
  input  logic         run_i,
  input  logic         last_i,
  input  logic         single_i,
  input  logic [127:0] rk_a_i,
  input  logic [127:0] rk_b_i,
  output logic [127:0] dout_o
);
  import aes_pkg::*;
  logic [127:0] s_q, r1, r2;

  always_comb begin
    if (dec_i) begin
      r1 = dec_round(s_q, rk_a_i, 1'b0);
      r2 = dec_round(r1,  rk_b_i, last_i);
    end else begin
      r1 = enc_round(s_q, rk_a_i, 1'b0);
      r2 = enc_round(r1,  rk_b_i, last_i);
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      s_q <= '0;
    else if (load_i)  s_q <= din_i ^ wkey_i;
    else if (run_i)   s_q <= single_i ? r1 : r2;
  end
  assign dout_o = s_q;
endmodule
