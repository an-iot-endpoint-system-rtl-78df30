// aes_keygen: shared on-the-fly AES-128 round-key generator.
//
// The paper's AES engine has one round-key module shared by its two
// datapath instances, and it "keeps track of the last round-key during
// encryption", which is the starting point for decryption. This module
// follows that. A job is started with start_i, the 128-bit key and the
// direction. It then goes through
//   LOAD  (1 cycle): load_o is high and wkey_o is the whitening key (round
//                    key 0 for encryption, round key 10 for decryption);
//   RUN   (5 cycles): run_o is high and rk_a_o / rk_b_o carry the two round
//                    keys the datapath needs this cycle (two rounds per
//                    cycle, so ten rounds in five cycles); last_o marks the
//                    fifth cycle.
// For decryption with a key whose last round key is not stored yet, a
// PRE phase of five cycles first runs the schedule forward to find it. The
// stored last key is remembered together with its key, so repeated
// decryptions, and decryptions after encryptions with the same key, need no
// pre-pass. The PRE phase is this design's way of obtaining the last key when
// no encryption preceded; the paper does not say what happens then.
module aes_keygen (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         start_i,
  input  logic         dec_i,
  input  logic [127:0] key_i,
  output logic         busy_o,
  output logic         load_o,
  output logic         run_o,
  output logic         last_o,
  output logic [127:0] wkey_o,
  output logic [127:0] rk_a_o,
  output logic [127:0] rk_b_o
);
  import aes_pkg::*;
  typedef enum logic [1:0] {S_IDLE, S_PRE, S_LOAD, S_RUN} state_e;
  state_e st_q;
  logic [2:0]   cyc_q;
  logic         dec_q;
  logic [127:0] key_q, kq, last_key_q, last_for_q;
  logic         last_valid_q;
  logic [3:0]   ra, rb;

  always_comb begin
    // Round numbers used this cycle.
    if (dec_q && st_q == S_RUN) begin
      ra = 4'(10 - 2*cyc_q);       // key_prev(K_ra) -> K_(ra-1)
      rb = 4'(9 - 2*cyc_q);
      rk_a_o = key_prev(kq, ra);
      rk_b_o = key_prev(rk_a_o, rb);
    end else begin
      ra = 4'(2*cyc_q + 1);
      rb = 4'(2*cyc_q + 2);
      rk_a_o = key_next(kq, ra);
      rk_b_o = key_next(rk_a_o, rb);
    end
  end

  assign busy_o = st_q != S_IDLE;
  assign load_o = st_q == S_LOAD;
  assign run_o  = st_q == S_RUN;
  assign last_o = st_q == S_RUN && cyc_q == 3'd4;
  assign wkey_o = kq;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q <= S_IDLE; cyc_q <= '0; dec_q <= 1'b0; key_q <= '0; kq <= '0;
      last_key_q <= '0; last_for_q <= '0; last_valid_q <= 1'b0;
    end else begin
      unique case (st_q)
        S_IDLE: if (start_i) begin
          dec_q <= dec_i; key_q <= key_i; cyc_q <= '0;
          if (!dec_i) begin kq <= key_i; st_q <= S_LOAD; end
          else if (last_valid_q && last_for_q == key_i) begin kq <= last_key_q; st_q <= S_LOAD; end
          else begin kq <= key_i; st_q <= S_PRE; end
        end
        S_PRE: begin  // forward schedule, no datapath activity
          kq    <= rk_b_o;
          cyc_q <= cyc_q + 1'b1;
          if (cyc_q == 3'd4) begin
            cyc_q <= '0; st_q <= S_LOAD;
            last_key_q <= rk_b_o; last_for_q <= key_q; last_valid_q <= 1'b1;
          end
        end
        S_LOAD: st_q <= S_RUN;
        S_RUN: begin
          kq    <= rk_b_o;
          cyc_q <= cyc_q + 1'b1;
          if (cyc_q == 3'd4) begin
            cyc_q <= '0; st_q <= S_IDLE;
            if (!dec_q) begin last_key_q <= rk_b_o; last_for_q <= key_q; last_valid_q <= 1'b1; end
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end
endmodule
