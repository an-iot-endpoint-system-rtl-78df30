// keccak_f400: Keccak-f[400] permutation unit with three rounds per cycle.
//
// The paper's sponge engine uses permutation instances "each based on three
// permutation rounds", with a round count that is a multiple of three or the
// full 20 (Sec. IV-A). Three round stages sit in series behind the state
// register; a cycle applies three rounds, or fewer on the final cycle (20 =
// 6*3 + 2), which is where the bypass multiplexer of Fig. 3 comes in. With
// nrounds_i = n the permutation applies rounds 20-n .. 19, the Keccak-p
// convention for reduced rounds (this design's reading; the paper does not
// say which rounds are kept).
// Interface: start_i loads state_i and nrounds_i (1..20); busy_o stays high
// for ceil(n/3) cycles; done_o pulses in the cycle after the last rounds,
// when state_o holds the result. The round-constant generator of Fig. 3 is
// the function keccak_pkg::round_const applied to a running round index.
module keccak_f400 (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         start_i,
  input  logic [4:0]   nrounds_i,
  input  logic [399:0] state_i,
  output logic         busy_o,
  output logic         done_o,
  output logic [399:0] state_o
);
  import keccak_pkg::*;
  logic [399:0] s_q, s1, s2, s3, s_nx;
  logic [4:0]   ir_q, left_q;
  logic         busy_q, done_q;
  logic [W-1:0] rc_tab [23];

  // Round-constant generator: the 20 constants (plus two spare entries so
  // that the index of an unused third stage stays in range).
  for (genvar i = 0; i < 23; i++) begin : g_rc
    assign rc_tab[i] = round_const(i);
  end

  always_comb begin
    s1 = round(s_q, rc_tab[ir_q]);
    s2 = round(s1,  rc_tab[ir_q + 5'd1]);
    s3 = round(s2,  rc_tab[ir_q + 5'd2]);
    unique case (left_q)
      5'd1:    s_nx = s1;
      5'd2:    s_nx = s2;
      default: s_nx = s3;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      s_q <= '0; ir_q <= '0; left_q <= '0; busy_q <= 1'b0; done_q <= 1'b0;
    end else begin
      done_q <= 1'b0;
      if (start_i && !busy_q) begin
        s_q    <= state_i;
        left_q <= (nrounds_i > 5'd20 || nrounds_i == 0) ? 5'd20 : nrounds_i;
        ir_q   <= (nrounds_i > 5'd20 || nrounds_i == 0) ? 5'd0 : 5'(20 - nrounds_i);
        busy_q <= 1'b1;
      end else if (busy_q) begin
        s_q <= s_nx;
        if (left_q <= 5'd3) begin
          busy_q <= 1'b0; done_q <= 1'b1; left_q <= '0;
        end else begin
          left_q <= left_q - 5'd3; ir_q <= ir_q + 5'd3;
        end
      end
    end
  end
  assign busy_o  = busy_q;
  assign done_o  = done_q;
  assign state_o = s_q;
endmodule
