// hwcrypt: the cluster's hardware cryptography engine (HWCRYPT).
//
// Follows Sec. IV-A / Fig. 3 of the paper: an AES-128 engine made of two
// two-round datapath instances (aes_core) sharing one round-key generator
// (aes_keygen), an XTS tweak generator, a sponge engine with two
// Keccak-f[400] units, a command queue of four pending operations, status
// registers, completion events, and two 32-bit TCDM ports with a 32-to-128
// bit conversion in front of the engines.
//
// Operations (CFG.op): 0 AES-ECB encrypt, 1 AES-ECB decrypt, 2 AES-XTS
// encrypt, 3 AES-XTS decrypt, 4 single AES encryption round, 5 single AES
// decryption round, 8 sponge authenticated encryption, 9 sponge
// authenticated decryption, 10 sponge encryption without authentication,
// 11 raw Keccak-f[400] permutation of a 50-byte state.
// Register map (byte offsets in the 4 kB slot; this design's choice):
//   0x00 SRC, 0x04 DST, 0x08 LEN (bytes), 0x0C CFG {rate_log2[11:9],
//   nrounds[8:4], op[3:0]}, 0x10-0x1C KEY1, 0x20-0x2C KEY2,
//   0x30-0x3C SN / nonce / round key, 0x40 TRIGGER (any write queues the
//   programmed operation; the write stalls while four are pending),
//   0x44 STATUS {done_count[31:16], queued[6:4], busy[0]} (read only).
// AES blocks are taken from memory in FIPS-197 byte order (the first byte
// in memory is byte 0 of the block). XTS follows Eq. (1) of the paper:
// T_0 = E_K1(SN), C_i = E_K2(P_i ^ T_i) ^ T_i, T_i = T_(i-1) (x) 2; the two
// AES instances take blocks i and i+1 with consecutive tweaks. XTS length
// must be a multiple of 16 bytes here: ciphertext stealing is not built.
// Sponge AE writes LEN bytes of output and then the 16-byte tag at DST+LEN.
// Each operation streams data in steps of 32 bytes (AES, two blocks) or 16
// bytes (sponge): read step on the two ports, process, write step. evt_o
// pulses when an operation ends, evt_all_o when the last queued one ends.
// Lint note (UNUSEDSIGNAL): the byte enables of the register request are
// ignored; registers are always written as whole words.
module hwcrypt (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  fulmine_pkg::mem_req_t cfg_req_i,
  output fulmine_pkg::mem_rsp_t cfg_rsp_o,
  output fulmine_pkg::mem_req_t tcdm_req_o [2],
  input  fulmine_pkg::mem_rsp_t tcdm_rsp_i [2],
  output logic                  busy_o,
  output logic                  evt_o,
  output logic                  evt_all_o
);
  import fulmine_pkg::*;

  typedef struct packed {
    logic [31:0]  src, dst, len;
    logic [3:0]   op;
    logic [4:0]   nrounds;
    logic [2:0]   rate;
    logic [127:0] key1, key2, sn;
  } cmd_t;

  localparam logic [3:0] OP_ECB_D = 4'd1, OP_XTS_E = 4'd2, OP_XTS_D = 4'd3,
                         OP_RND_E = 4'd4, OP_RND_D = 4'd5, OP_SP_AE = 4'd8, OP_SP_AD = 4'd9,
                         OP_SP_E = 4'd10, OP_PERM = 4'd11;

  // ---------------- configuration registers and command queue -----------
  cmd_t   prog_q, cmd_q, head;
  logic   q_full, q_empty, q_pop;
  logic [2:0]  q_cnt;
  logic [15:0] done_cnt_q;
  logic        cfg_rvalid_q;
  logic [31:0] cfg_rdata_q;
  logic        trig;
  logic [7:0]  roff;
  assign roff = cfg_req_i.addr[7:0];
  assign trig = cfg_req_i.req && cfg_req_i.we && roff == 8'h40;
  assign cfg_rsp_o.gnt    = cfg_req_i.req && !(trig && q_full);
  assign cfg_rsp_o.rvalid = cfg_rvalid_q;
  assign cfg_rsp_o.rdata  = cfg_rdata_q;

  cmd_fifo #(.T(cmd_t), .DEPTH(4)) u_queue (
    .clk_i, .rst_ni, .push_i(trig && !q_full), .data_i(prog_q), .pop_i(q_pop),
    .head_o(head), .full_o(q_full), .empty_o(q_empty), .count_o(q_cnt));

  typedef enum logic [3:0] {S_IDLE, S_TW, S_TWW, S_SPI, S_RD, S_PROC, S_PROCW, S_WR, S_TAG, S_DONE} state_e;
  state_e st_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      prog_q <= '0; cfg_rvalid_q <= 1'b0; cfg_rdata_q <= '0;
    end else begin
      cfg_rvalid_q <= cfg_rsp_o.gnt;
      if (cfg_rsp_o.gnt && cfg_req_i.we) begin
        unique casez (roff)
          8'h00: prog_q.src <= cfg_req_i.wdata;
          8'h04: prog_q.dst <= cfg_req_i.wdata;
          8'h08: prog_q.len <= cfg_req_i.wdata;
          8'h0C: {prog_q.rate, prog_q.nrounds, prog_q.op} <= cfg_req_i.wdata[11:0];
          8'h1?: prog_q.key1[32*roff[3:2] +: 32] <= cfg_req_i.wdata;
          8'h2?: prog_q.key2[32*roff[3:2] +: 32] <= cfg_req_i.wdata;
          8'h3?: prog_q.sn[32*roff[3:2] +: 32]   <= cfg_req_i.wdata;
          default: ;
        endcase
      end
      if (cfg_rsp_o.gnt && !cfg_req_i.we) begin
        unique case (roff)
          8'h00: cfg_rdata_q <= prog_q.src;
          8'h04: cfg_rdata_q <= prog_q.dst;
          8'h08: cfg_rdata_q <= prog_q.len;
          8'h0C: cfg_rdata_q <= {20'h0, prog_q.rate, prog_q.nrounds, prog_q.op};
          8'h44: cfg_rdata_q <= {done_cnt_q, 9'h0, q_cnt, 3'h0, busy_o};
          default: cfg_rdata_q <= '0;   // keys are write-only
        endcase
      end
    end
  end

  // ---------------- 32-bit <-> 128-bit memory mover (two ports) ----------
  logic [31:0] buf_q [16];
  logic        mv_start, mv_we, mv_busy_q, mv_done;
  logic [31:0] mv_base_q, mv_base;
  logic [4:0]  mv_n_q, mv_n;
  logic [4:0]  ic_q [2], rc_q [2];
  logic        mv_we_q;
  logic [4:0]  widx [2];

  logic proc_started_q;
  always_comb begin
    mv_done = mv_busy_q;
    for (int p = 0; p < 2; p++) begin
      widx[p] = 5'(2*ic_q[p] + p);
      tcdm_req_o[p].req   = mv_busy_q && widx[p] < mv_n_q;
      tcdm_req_o[p].we    = mv_we_q;
      tcdm_req_o[p].addr  = mv_base_q + 32'(widx[p]) * 4;
      tcdm_req_o[p].wdata = buf_q[widx[p][3:0]];
      tcdm_req_o[p].be    = (cmd_q.op == OP_PERM && widx[p] == 5'd12) ? 4'h3 : 4'hF;
      if (5'(2*rc_q[p] + p) < mv_n_q) mv_done = 1'b0;
    end
  end

  // ---------------- engines ----------------------------------------------
  logic         kg_start, kg_dec, kg_busy, kg_load, kg_run, kg_last;
  logic [127:0] kg_key, kg_wkey, kg_rka, kg_rkb;
  logic         core_dec, core_load, core_run, core_last, core_single;
  logic [127:0] core_wkey, core_rka, core_rkb;
  logic [127:0] din_a, din_b, dout_a, dout_b;
  logic         tw_load, tw_step;
  logic [127:0] tw, tw_next;
  logic         sp_init, sp_block, sp_perm, sp_busy, sp_done;
  logic [127:0] sp_dout, sp_tag;
  logic [399:0] sp_raw_out;
  logic [31:0]  off_q;
  logic         single_q;

  aes_keygen u_keygen (.clk_i, .rst_ni, .start_i(kg_start), .dec_i(kg_dec), .key_i(kg_key),
    .busy_o(kg_busy), .load_o(kg_load), .run_o(kg_run), .last_o(kg_last),
    .wkey_o(kg_wkey), .rk_a_o(kg_rka), .rk_b_o(kg_rkb));

  aes_core u_aes_a (.clk_i, .rst_ni, .dec_i(core_dec), .load_i(core_load), .din_i(din_a),
    .wkey_i(core_wkey), .run_i(core_run), .last_i(core_last), .single_i(core_single),
    .rk_a_i(core_rka), .rk_b_i(core_rkb), .dout_o(dout_a));
  aes_core u_aes_b (.clk_i, .rst_ni, .dec_i(core_dec), .load_i(core_load), .din_i(din_b),
    .wkey_i(core_wkey), .run_i(core_run), .last_i(core_last), .single_i(core_single),
    .rk_a_i(core_rka), .rk_b_i(core_rkb), .dout_o(dout_b));

  xts_tweak u_tweak (.clk_i, .rst_ni, .load_i(tw_load), .t0_i(dout_a), .step2_i(tw_step),
    .tweak_o(tw), .tweak_next_o(tw_next));

  sponge_engine u_sponge (.clk_i, .rst_ni, .nrounds_i(cmd_q.nrounds), .rate_log2_i(cmd_q.rate),
    .init_i(sp_init), .key_i(cmd_q.key1), .nonce_i(cmd_q.sn),
    .block_i(sp_block), .dec_i(cmd_q.op == OP_SP_AD), .data_i({buf_q[3], buf_q[2], buf_q[1], buf_q[0]}),
    .perm_i(sp_perm), .raw_i({buf_q[12][15:0], buf_q[11], buf_q[10], buf_q[9], buf_q[8], buf_q[7],
                              buf_q[6], buf_q[5], buf_q[4], buf_q[3], buf_q[2], buf_q[1], buf_q[0]}),
    .busy_o(sp_busy), .done_o(sp_done), .data_o(sp_dout), .tag_o(sp_tag), .raw_o(sp_raw_out));

  function automatic logic [31:0] bswap(input logic [31:0] w);
    return {w[7:0], w[15:8], w[23:16], w[31:24]};
  endfunction
  function automatic logic [127:0] blk(input logic [31:0] w0, w1, w2, w3);
    return {bswap(w0), bswap(w1), bswap(w2), bswap(w3)};
  endfunction

  logic is_aes, is_xts, is_sponge, in_tweak;
  assign is_aes    = cmd_q.op <= OP_RND_D;
  assign is_xts    = cmd_q.op == OP_XTS_E || cmd_q.op == OP_XTS_D;
  assign is_sponge = cmd_q.op == OP_SP_AE || cmd_q.op == OP_SP_AD || cmd_q.op == OP_SP_E;
  assign in_tweak  = st_q == S_TW || st_q == S_TWW;

  always_comb begin
    din_a = blk(buf_q[0], buf_q[1], buf_q[2], buf_q[3]);
    din_b = blk(buf_q[4], buf_q[5], buf_q[6], buf_q[7]);
    if (in_tweak) din_a = cmd_q.sn;
    else if (is_xts) begin din_a = din_a ^ tw; din_b = din_b ^ tw_next; end
    core_dec    = !in_tweak && (cmd_q.op == OP_ECB_D || cmd_q.op == OP_XTS_D || cmd_q.op == OP_RND_D);
    core_single = single_q;
    kg_key      = (in_tweak || !is_xts) ? cmd_q.key1 : cmd_q.key2;
    kg_dec      = core_dec;
    core_load   = single_q ? (st_q == S_PROC) : kg_load;
    core_run    = single_q ? (st_q == S_PROCW && !proc_started_q) : kg_run;
    core_last   = single_q ? 1'b0 : kg_last;
    core_wkey   = single_q ? '0 : kg_wkey;
    core_rka    = single_q ? cmd_q.key1 : kg_rka;
    core_rkb    = kg_rkb;
  end

  // ---------------- sequencing -------------------------------------------
  logic [31:0] step_bytes, remain;
  assign remain     = cmd_q.len - off_q;
  assign step_bytes = (cmd_q.op == OP_PERM) ? 32'd52 : is_sponge ? 32'd16 :
                      (remain >= 32'd32) ? 32'd32 : 32'd16;

  always_comb begin
    q_pop = st_q == S_IDLE && !q_empty;
    kg_start = (st_q == S_TW) || (st_q == S_PROC && is_aes && !single_q);
    tw_load  = st_q == S_TWW && !kg_busy;
    tw_step  = st_q == S_PROCW && is_xts && !kg_busy && !kg_start;
    sp_init  = st_q == S_SPI && !sp_busy && !sp_done;
    sp_block = st_q == S_PROC && is_sponge;
    sp_perm  = st_q == S_PROC && cmd_q.op == OP_PERM;
    mv_start = (st_q == S_RD || st_q == S_WR || st_q == S_TAG) && !mv_busy_q;
    mv_we    = st_q != S_RD;
    mv_base  = st_q == S_RD ? cmd_q.src + off_q : st_q == S_TAG ? cmd_q.dst + cmd_q.len : cmd_q.dst + off_q;
    mv_n     = st_q == S_TAG ? 5'd4 : 5'(32'(step_bytes[31:2]) > 32'd13 ? 32'd8 : step_bytes[31:2]);
    if (cmd_q.op == OP_PERM) mv_n = 5'd13;
  end


  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q <= S_IDLE; cmd_q <= '0; off_q <= '0; mv_busy_q <= 1'b0; mv_we_q <= 1'b0;
      mv_base_q <= '0; mv_n_q <= '0; ic_q <= '{default: '0}; rc_q <= '{default: '0};
      evt_o <= 1'b0; evt_all_o <= 1'b0; done_cnt_q <= '0; single_q <= 1'b0; proc_started_q <= 1'b0;
      for (int i = 0; i < 16; i++) buf_q[i] <= '0;
    end else begin
      evt_o <= 1'b0; evt_all_o <= 1'b0;
      // mover
      if (mv_start) begin
        mv_busy_q <= 1'b1; mv_we_q <= mv_we; mv_base_q <= mv_base; mv_n_q <= mv_n;
        ic_q <= '{default: '0}; rc_q <= '{default: '0};
      end else if (mv_busy_q) begin
        for (int p = 0; p < 2; p++) begin
          if (tcdm_req_o[p].req && tcdm_rsp_i[p].gnt) ic_q[p] <= ic_q[p] + 5'd1;
          if (tcdm_rsp_i[p].rvalid) begin
            if (!mv_we_q) buf_q[4'(2*rc_q[p] + p)] <= tcdm_rsp_i[p].rdata;
            rc_q[p] <= rc_q[p] + 5'd1;
          end
        end
        if (mv_done) mv_busy_q <= 1'b0;
      end

      unique case (st_q)
        S_IDLE: if (!q_empty) begin
          cmd_q <= head; off_q <= '0;
          single_q <= head.op == OP_RND_E || head.op == OP_RND_D;
          if (head.op == OP_XTS_E || head.op == OP_XTS_D) st_q <= S_TW;
          else if (head.op == OP_SP_AE || head.op == OP_SP_AD || head.op == OP_SP_E) st_q <= S_SPI;
          else st_q <= S_RD;
        end
        S_TW:  st_q <= S_TWW;                       // T0 = E_K1(SN) on instance A
        S_TWW: if (!kg_busy) st_q <= S_RD;
        S_SPI: if (sp_done) st_q <= S_RD;
        S_RD:  if (mv_busy_q && mv_done) st_q <= S_PROC;
        S_PROC: begin st_q <= S_PROCW; proc_started_q <= 1'b0; end
        S_PROCW: begin
          logic fin;
          fin = 1'b0;
          if (single_q) begin fin = proc_started_q; proc_started_q <= 1'b1; end
          else if (is_aes) fin = !kg_busy;
          else fin = sp_done;
          if (fin) begin
            if (is_aes) begin
              logic [127:0] oa, ob;
              oa = dout_a; ob = dout_b;
              if (is_xts) begin oa = oa ^ tw; ob = ob ^ tw_next; end
              for (int i = 0; i < 4; i++) begin
                buf_q[i]   <= bswap(oa[127 - 32*i -: 32]);
                buf_q[4+i] <= bswap(ob[127 - 32*i -: 32]);
              end
            end else if (cmd_q.op == OP_PERM) begin
              for (int i = 0; i < 13; i++) buf_q[i] <= sp_raw_out[32*i +: 32];
              buf_q[12] <= {16'h0, sp_raw_out[399:384]};
            end else begin
              for (int i = 0; i < 4; i++) buf_q[i] <= sp_dout[32*i +: 32];
            end
            st_q <= S_WR;
          end
        end
        S_WR: if (mv_busy_q && mv_done) begin
          if (cmd_q.op == OP_PERM || off_q + step_bytes >= cmd_q.len) begin
            if (cmd_q.op == OP_SP_AE || cmd_q.op == OP_SP_AD) begin
              for (int i = 0; i < 4; i++) buf_q[i] <= sp_tag[32*i +: 32];
              st_q <= S_TAG;
            end else st_q <= S_DONE;
          end else begin
            off_q <= off_q + step_bytes; st_q <= S_RD;
          end
        end
        S_TAG: if (mv_busy_q && mv_done) st_q <= S_DONE;
        S_DONE: begin
          evt_o <= 1'b1; evt_all_o <= q_empty; done_cnt_q <= done_cnt_q + 16'd1; st_q <= S_IDLE;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  assign busy_o = st_q != S_IDLE || !q_empty;
endmodule
