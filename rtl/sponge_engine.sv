// sponge_engine: the HWCRYPT sponge engine built on two Keccak-f[400]
// permutation units.
//
// What the paper gives (Sec. IV-A, Fig. 3): two permutation instances; the
// sponge state is initialised from the key K and an initial vector; after a
// first permutation an encryption pad is squeezed and XORed onto each
// plaintext block, with a permutation between blocks; the second instance
// computes a prefix MAC over the data for authenticity; the rate is 1 to 128
// bits in powers of two; the round count is configurable; raw permutation
// access and encryption without authentication are also offered.
//
// This design's concrete choices, where the paper is silent:
//   * state layout: key in lanes 0-7 (bits [127:0]), nonce in lanes 8-15,
//     a 144-bit domain constant in lanes 16-24 (the 144-bit "PaddedNonce" of
//     Fig. 3): IV_ENC for the encryption instance, IV_MAC for the MAC one;
//   * the rate part is the low r bits of the state (lanes 0-7 for r = 128);
//   * per chunk of r bits: out = in XOR pad; the MAC state absorbs the
//     ciphertext chunk (XOR into its low r bits); then both instances are
//     permuted. A 128-bit block is r-bit chunks taken from its low end, so it
//     needs 128/r chunks;
//   * the tag is the low 128 bits of the MAC state after the last block.
// Interface: init_i starts a new message (both states loaded and permuted);
// block_i processes one 128-bit block (dec_i selects which side is the
// ciphertext); perm_i permutes raw_i on instance 0 alone. busy_o is high
// while any of them runs; done_o pulses when it ends; data_o holds the
// processed block, raw_o the permuted raw state, tag_o the MAC.
// Lint note (UNUSEDSIGNAL): the busy/done outputs of the two permutation
// instances are not read; the engine's own state machine counts rounds.
module sponge_engine (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic [4:0]   nrounds_i,
  input  logic [2:0]   rate_log2_i,  // rate = 2**rate_log2 bits
  input  logic         init_i,
  input  logic [127:0] key_i,
  input  logic [127:0] nonce_i,
  input  logic         block_i,
  input  logic         dec_i,
  input  logic [127:0] data_i,
  input  logic         perm_i,
  input  logic [399:0] raw_i,
  output logic         busy_o,
  output logic         done_o,
  output logic [127:0] data_o,
  output logic [127:0] tag_o,
  output logic [399:0] raw_o
);
  localparam logic [143:0] IV_ENC = {16'h0001, 128'h0};
  localparam logic [143:0] IV_MAC = {16'h0002, 128'h0};

  typedef enum logic [2:0] {S_IDLE, S_INITP, S_CHUNK, S_PERM, S_RAW} state_e;
  state_e st_q;
  logic [399:0] se_q, sm_q;
  logic [127:0] d_q;
  logic [7:0]   chunks_q;
  logic         dec_q;
  logic [7:0]   rbits;
  logic [127:0] mask, t, cchunk;

  logic         p_start;
  logic [399:0] pe_in, pm_in, pe_out, pm_out;
  logic         pe_busy, pm_busy, pe_done, pm_done;

  assign rbits = 8'(1) << rate_log2_i;
  assign mask  = (rate_log2_i == 3'd7) ? {128{1'b1}} : ((128'h1 << rbits) - 128'h1);
  assign t      = d_q ^ (se_q[127:0] & mask);
  assign cchunk = (dec_q ? d_q : t) & mask;

  function automatic logic [127:0] rotr(input logic [127:0] v, input logic [7:0] n);
    return (n >= 8'd128) ? v : ((v >> n) | (v << (8'd128 - n)));
  endfunction

  keccak_f400 u_perm_enc (.clk_i, .rst_ni, .start_i(p_start), .nrounds_i, .state_i(pe_in),
                          .busy_o(pe_busy), .done_o(pe_done), .state_o(pe_out));
  keccak_f400 u_perm_mac (.clk_i, .rst_ni, .start_i(p_start && st_q != S_RAW), .nrounds_i, .state_i(pm_in),
                          .busy_o(pm_busy), .done_o(pm_done), .state_o(pm_out));

  always_comb begin
    p_start = 1'b0;
    pe_in   = se_q;
    pm_in   = sm_q;
    unique case (st_q)
      S_IDLE: begin
        if (init_i) begin
          p_start = 1'b1;
          pe_in = {IV_ENC, nonce_i, key_i};
          pm_in = {IV_MAC, nonce_i, key_i};
        end else if (perm_i) begin
          p_start = 1'b1;
          pe_in = raw_i;
        end
      end
      S_CHUNK: begin
        p_start = 1'b1;
        pm_in = {sm_q[399:128], sm_q[127:0] ^ cchunk};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q <= S_IDLE; se_q <= '0; sm_q <= '0; d_q <= '0; chunks_q <= '0; dec_q <= 1'b0; done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (st_q)
        S_IDLE: begin
          if (init_i)       st_q <= S_INITP;
          else if (perm_i)  st_q <= S_RAW;
          else if (block_i) begin
            d_q <= data_i; dec_q <= dec_i; chunks_q <= 8'(128 >> rate_log2_i); st_q <= S_CHUNK;
          end
        end
        S_INITP: if (pe_done) begin
          se_q <= pe_out; sm_q <= pm_out; st_q <= S_IDLE; done_o <= 1'b1;
        end
        S_CHUNK: begin  // XOR this chunk, permutations started in this cycle
          d_q      <= rotr(t, rbits);
          chunks_q <= chunks_q - 8'd1;
          st_q     <= S_PERM;
        end
        S_PERM: if (pe_done) begin
          se_q <= pe_out; sm_q <= pm_out;
          if (chunks_q == 8'd0) begin st_q <= S_IDLE; done_o <= 1'b1; end
          else st_q <= S_CHUNK;
        end
        S_RAW: if (pe_done) begin st_q <= S_IDLE; done_o <= 1'b1; end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  assign busy_o = st_q != S_IDLE;
  assign data_o = d_q;
  assign tag_o  = sm_q[127:0];
  assign raw_o  = pe_out;
endmodule
