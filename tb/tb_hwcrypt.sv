// tb_hwcrypt: self-checking test of the HWCRYPT engine.
// Known-answer tests: FIPS-197 Appendix C.1 (AES-128), the first AES round
// of FIPS-197 Appendix B, IEEE 1619 XTS vectors 1 and 2. Keccak-f[400] and
// the sponge modes are checked against a reference model written from the
// Keccak tables (tb_keccak_ref). Also checks the four-entry command queue
// and the ECB throughput in cycles per byte.
module tb_hwcrypt;
  import fulmine_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mem_req_t cfg_req; mem_rsp_t cfg_rsp;
  mem_req_t treq [2]; mem_rsp_t trsp [2];
  logic busy, evt, evt_all, stall = 1'b1;
  int checks = 0, failures = 0, evts = 0;

  hwcrypt dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg_req), .cfg_rsp_o(cfg_rsp),
               .tcdm_req_o(treq), .tcdm_rsp_i(trsp), .busy_o(busy), .evt_o(evt), .evt_all_o(evt_all));
  tb_mem #(.N_PORTS(2), .WORDS(8192)) mem (.clk_i(clk), .stall_i(stall), .req_i(treq), .rsp_o(trsp));

  always @(posedge clk) if (evt) evts++;
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    cfg_req = '{req:1'b1, we:1'b1, be:4'hF, addr:{24'h0, a}, wdata:d};
    do @(posedge clk); while (!cfg_rsp.gnt);
    @(negedge clk); cfg_req = MEM_REQ_IDLE;
  endtask
  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    cfg_req = '{req:1'b1, we:1'b0, be:4'hF, addr:{24'h0, a}, wdata:0};
    do @(posedge clk); while (!cfg_rsp.gnt);
    @(negedge clk); cfg_req = MEM_REQ_IDLE; d = cfg_rsp.rdata;
  endtask
  function automatic logic [31:0] bs(logic [31:0] w); return {w[7:0],w[15:8],w[23:16],w[31:24]}; endfunction
  // AES blocks in FIPS byte order <-> memory
  task automatic put_blk(input int addr, input logic [127:0] b);
    for (int i = 0; i < 4; i++) mem.mem[addr/4 + i] = bs(b[127-32*i -: 32]);
  endtask
  function automatic logic [127:0] get_blk(int addr);
    logic [127:0] b;
    for (int i = 0; i < 4; i++) b[127-32*i -: 32] = bs(mem.mem[addr/4 + i]);
    return b;
  endfunction
  // Little-endian 128-bit values (sponge) <-> memory
  task automatic put_le(input int addr, input logic [127:0] b);
    for (int i = 0; i < 4; i++) mem.mem[addr/4 + i] = b[32*i +: 32];
  endtask
  function automatic logic [127:0] get_le(int addr);
    logic [127:0] b;
    for (int i = 0; i < 4; i++) b[32*i +: 32] = mem.mem[addr/4 + i];
    return b;
  endfunction
  task automatic set_key(input logic [7:0] base, input logic [127:0] k);
    for (int i = 0; i < 4; i++) wr(base + 8'(4*i), k[32*i +: 32]);
  endtask
  task automatic run(input int src, dst, len, input logic [3:0] op, input logic [4:0] nr, input logic [2:0] rate);
    int e0;
    wr(8'h00, src); wr(8'h04, dst); wr(8'h08, len); wr(8'h0C, {20'h0, rate, nr, op});
    e0 = evts;
    wr(8'h40, 1);
    while (evts == e0) @(posedge clk);
    @(posedge clk);
  endtask

  localparam logic [143:0] IV_ENC = {16'h0001, 128'h0};
  localparam logic [143:0] IV_MAC = {16'h0002, 128'h0};

  // sponge reference, rate r bits, nblk 128-bit blocks
  task automatic sponge_ref(input logic [127:0] k, n, input logic [127:0] p [], input int r, nr,
                            input bit dec, output logic [127:0] c [], output logic [127:0] tag);
    logic [399:0] se, sm; logic [127:0] d, o;
    se = tb_keccak_ref::perm({IV_ENC, n, k}, nr);
    sm = tb_keccak_ref::perm({IV_MAC, n, k}, nr);
    c = new[p.size()];
    for (int b = 0; b < p.size(); b++) begin
      d = p[b];
      for (int j = 0; j < 128 / r; j++)
        for (int bit_i = 0; bit_i < r; bit_i++) begin end
      o = '0;
      for (int j = 0; j < 128 / r; j++) begin
        logic [127:0] ch, ks, cc;
        ch = (d >> (j*r)); ks = se[127:0];
        if (r < 128) begin ch &= (128'h1 << r) - 1; ks &= (128'h1 << r) - 1; end
        cc = ch ^ ks;
        o |= cc << (j*r);
        sm[127:0] ^= dec ? ch : cc;
        se = tb_keccak_ref::perm(se, nr);
        sm = tb_keccak_ref::perm(sm, nr);
      end
      c[b] = o;
    end
    tag = sm[127:0];
  endtask

  initial begin
    logic [127:0] k, n, tag, t2;
    logic [127:0] p [], c [], c2 [];
    logic [399:0] st, st_ref;
    logic [31:0] s;
    int t0, cyc, e0, ecb;
    cfg_req = MEM_REQ_IDLE;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);

    // AES-128 ECB, FIPS-197 C.1, three blocks
    set_key(8'h10, 128'h000102030405060708090a0b0c0d0e0f);
    for (int i = 0; i < 3; i++) put_blk(16*i, 128'h00112233445566778899aabbccddeeff);
    run(0, 256, 48, 4'd0, 5'd0, 3'd0);
    for (int i = 0; i < 3; i++) check(get_blk(256 + 16*i) == 128'h69c4e0d86a7b0430d8cdb78070b4c55a, "ECB encrypt");
    run(256, 512, 48, 4'd1, 5'd0, 3'd0);
    for (int i = 0; i < 3; i++) check(get_blk(512 + 16*i) == 128'h00112233445566778899aabbccddeeff, "ECB decrypt");
    // decryption with a key never used for encryption (pre-pass of the key schedule)
    set_key(8'h10, 128'h2b7e151628aed2a6abf7158809cf4f3c);
    put_blk(0, 128'h3ad77bb40d7a3660a89ecaf32466ef97);  // SP 800-38A F.1.1 block 1
    run(0, 256, 16, 4'd1, 5'd0, 3'd0);
    check(get_blk(256) == 128'h6bc1bee22e409f96e93d7e117393172a, "ECB decrypt, fresh key");

    // single encryption round (FIPS-197 Appendix B, round 1)
    set_key(8'h10, 128'hd6aa74fdd2af72fadaa678f1d6ab76fe);
    put_blk(0, 128'h00102030405060708090a0b0c0d0e0f0);
    run(0, 256, 16, 4'd4, 5'd0, 3'd0);
    check(get_blk(256) == 128'h89d810e8855ace682d1843d8cb128fe4, "single AES round");

    // XTS, IEEE 1619 vector 1 (all zero keys, SN 0)
    set_key(8'h10, '0); set_key(8'h20, '0); set_key(8'h30, '0);
    put_blk(0, '0); put_blk(16, '0);
    run(0, 256, 32, 4'd2, 5'd0, 3'd0);
    check(get_blk(256) == 128'h917cf69ebd68b2ec9b9fe9a3eadda692, "XTS vector 1 block 0");
    check(get_blk(272) == 128'hcd43d2f59598ed858c02c2652fbf922e, "XTS vector 1 block 1");
    // XTS, IEEE 1619 vector 2: data key 11.., tweak key 22.., sequence 0x3333333333
    set_key(8'h10, {16{8'h22}}); set_key(8'h20, {16{8'h11}});
    set_key(8'h30, 128'h3333333333_0000000000000000000000);
    put_blk(0, {16{8'h44}}); put_blk(16, {16{8'h44}});
    run(0, 256, 32, 4'd2, 5'd0, 3'd0);
    check(get_blk(256) == 128'hc454185e6a16936e39334038acef838b, "XTS vector 2 block 0");
    check(get_blk(272) == 128'hfb186fff7480adc4289382ecd6d394f0, "XTS vector 2 block 1");
    run(256, 512, 32, 4'd3, 5'd0, 3'd0);
    check(get_blk(512) == {16{8'h44}} && get_blk(528) == {16{8'h44}}, "XTS decrypt");

    // raw Keccak-f[400] permutation, 20 and 12 rounds
    for (int nr = 12; nr <= 20; nr += 8) begin
      for (int i = 0; i < 13; i++) mem.mem[i] = $urandom;
      mem.mem[12][31:16] = 16'h0;
      mem.mem[64 + 12] = 32'hA5A5_0000;
      for (int i = 0; i < 12; i++) st[32*i +: 32] = mem.mem[i];
      st[399:384] = mem.mem[12][15:0];
      st_ref = tb_keccak_ref::perm(st, nr);
      run(0, 256, 52, 4'd11, 5'(nr), 3'd0);
      for (int i = 0; i < 12; i++) check(mem.mem[64 + i] == st_ref[32*i +: 32], $sformatf("keccak word %0d nr %0d", i, nr));
      check(mem.mem[64 + 12] == {16'hA5A5, st_ref[399:384]}, "keccak last half-word");
    end

    // sponge authenticated encryption, rate 128 / 20 rounds and rate 32 / 6 rounds
    for (int cfg = 0; cfg < 2; cfg++) begin
      int r, nr;
      r = cfg == 0 ? 128 : 32; nr = cfg == 0 ? 20 : 6;
      k = {$urandom, $urandom, $urandom, $urandom}; n = {$urandom, $urandom, $urandom, $urandom};
      p = new[3];
      foreach (p[i]) begin p[i] = {$urandom, $urandom, $urandom, $urandom}; put_le(16*i, p[i]); end
      set_key(8'h10, k); set_key(8'h30, n);
      sponge_ref(k, n, p, r, nr, 1'b0, c, tag);
      run(0, 256, 48, 4'd8, 5'(nr), cfg == 0 ? 3'd7 : 3'd5);
      foreach (c[i]) check(get_le(256 + 16*i) == c[i], $sformatf("sponge AE ciphertext %0d r=%0d", i, r));
      check(get_le(256 + 48) == tag, "sponge AE tag");
      run(256, 512, 48, 4'd9, 5'(nr), cfg == 0 ? 3'd7 : 3'd5);
      foreach (p[i]) check(get_le(512 + 16*i) == p[i], "sponge AD recovers plaintext");
      check(get_le(512 + 48) == tag, "sponge AD tag matches");
      mem.mem[(1024 + 48)/4] = 32'hCAFE_F00D;
      run(0, 1024, 48, 4'd10, 5'(nr), cfg == 0 ? 3'd7 : 3'd5);
      check(get_le(1024) == c[0] && mem.mem[(1024+48)/4] == 32'hCAFE_F00D, "sponge encryption without tag");
    end

    // command queue: six operations programmed back to back (one running, four queued); the sixth
    // trigger must stall until an entry frees up
    set_key(8'h10, 128'h000102030405060708090a0b0c0d0e0f);
    put_blk(0, 128'h00112233445566778899aabbccddeeff);
    for (int i = 0; i < 64; i++) put_blk(16*i, 128'h00112233445566778899aabbccddeeff);
    wr(8'h00, 0); wr(8'h08, 1024); wr(8'h0C, 0);
    e0 = evts;
    for (int i = 0; i < 6; i++) begin wr(8'h04, 2048 + 1024*i); wr(8'h40, 1); if (i == 5) check(evts - e0 >= 1, "sixth trigger waited for a free queue entry"); if (i == 3) begin rd(8'h44, s); check(s[6:4] >= 3'd3, "queue holds pending operations"); end end
    while (busy) @(posedge clk);
    @(posedge clk);
    check(evts - e0 == 6, "six operations completed");
    for (int i = 0; i < 6; i++) check(get_blk(2048 + 1024*i + 1008) == 128'h69c4e0d86a7b0430d8cdb78070b4c55a, "queued ECB");

    // throughput: 8 kB AES-128-ECB without memory stalls (paper: ~3100 cycles, 0.38 cpb)
    stall = 1'b0;
    t0 = $time;
    run(0, 8192, 8192, 4'd0, 5'd0, 3'd0);
    cyc = ($time - t0) / 10;
    $display("AES-ECB 8 kB: %0d cycles, %0.3f cycles/byte", cyc, real'(cyc) / 8192.0);
    check(cyc < 8192 * 3 / 4, "ECB throughput below 0.75 cycles/byte");
    ecb = cyc;
    t0 = $time;
    run(0, 8192, 8192, 4'd2, 5'd0, 3'd0);
    cyc = ($time - t0) / 10;
    $display("AES-XTS 8 kB: %0d cycles", cyc);
    check(cyc < ecb + ecb / 20, "XTS throughput within 5% of ECB");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
