// tb_fulmine_top: end-to-end test of the Fulmine cluster and memory system
// at its default sizes (64 kB TCDM in 8 banks, 192 kB L2).
// The testbench plays the four cores on their data ports, a SoC master on
// the L2 and power-manager ports, the I/O event lines and the cluster's
// voltage regulator. It runs a short secure-analytics sequence: the DMA
// brings data from L2 into the TCDM (1D) and sends results back (2D), the
// HWCE convolves at all three weight precisions while HWCRYPT encrypts,
// so the two accelerators hand the shared TCDM ports over, cores
// synchronise by wait-for-event and by the barrier, the timer raises an
// event, and the cluster goes through idle (clock gated) and deep sleep
// (power gated through the regulator handshake) and wakes up on I/O
// events. Results are compared with values computed here (known AES
// vector, reference convolution, copied data). Each mechanism is counted;
// one that never happens is a failure.
module tb_fulmine_top;
  import fulmine_pkg::*;
  logic clk = 0, sclk = 0, rst_n = 0, pgood = 1'b1;
  always #5 clk = ~clk;
  always #7 sclk = ~sclk;
  mem_req_t creq [4]; mem_rsp_t crsp [4];
  logic [3:0] core_clk;
  logic [7:0] io_evt = '0;
  mem_req_t l2req, pmureq; mem_rsp_t l2rsp, pmursp;
  logic reg_en, cl_busy;
  pmode_e pmode;
  int checks = 0, failures = 0;

  fulmine_top dut (
    .clk_cluster_i(clk), .clk_soc_i(sclk), .rst_ni(rst_n), .test_en_i(1'b0),
    .core_req_i(creq), .core_rsp_o(crsp), .core_clk_o(core_clk), .io_evt_i(io_evt),
    .soc_l2_req_i(l2req), .soc_l2_rsp_o(l2rsp), .pmu_req_i(pmureq), .pmu_rsp_o(pmursp),
    .reg_en_o(reg_en), .reg_pgood_i(pgood), .cluster_busy_o(cl_busy), .pmode_o(pmode));

  // regulator: power good follows the enable after 20 SoC cycles
  always @(posedge sclk) begin
    static int d = 0;
    if (reg_en != pgood) begin d++; if (d == 20) begin pgood <= reg_en; d = 0; end end
    else d = 0;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- mechanism counters
  int n_conflict = 0, n_switch = 0, n_qfull = 0, n_wfe = 0, n_coregate = 0, n_barrier = 0;
  int n_dma1d = 0, n_dma2d = 0, n_prec [3] = '{0, 0, 0}, n_idle = 0, n_deep = 0, n_timer = 0, n_aes = 0;
  logic owner_q = 1'b0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 4; c++)
      if (dut.tm_req[c].req && !dut.tm_rsp[c].gnt) n_conflict++;
    if (dut.i_smux.owner_crypt_o != owner_q) n_switch++;
    owner_q <= dut.i_smux.owner_crypt_o;
    if (dut.core_clk_en != 4'hF) n_coregate++;
  end
  // the cluster clock is gated when it stays low through a cycle of the
  // free-running cluster clock
  always @(posedge clk) if (rst_n) begin
    #1 if (!dut.clk_cl) n_idle++;
  end

  // ---------------------------------------------------------------- core ports
  task automatic cwr(input int c, input logic [31:0] a, d);
    @(negedge clk);
    creq[c] = '{req:1'b1, we:1'b1, be:4'hF, addr:a, wdata:d};
    do @(posedge clk); while (!crsp[c].gnt);
    @(negedge clk); creq[c] = MEM_REQ_IDLE;
    while (!crsp[c].rvalid) @(negedge clk);
  endtask
  task automatic crd(input int c, input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    creq[c] = '{req:1'b1, we:1'b0, be:4'hF, addr:a, wdata:0};
    do @(posedge clk); while (!crsp[c].gnt);
    @(negedge clk); creq[c] = MEM_REQ_IDLE;
    while (!crsp[c].rvalid) @(negedge clk);
    d = crsp[c].rdata;
  endtask
  task automatic swr(input logic [31:0] a, d);   // SoC master on the power manager
    @(negedge sclk);
    pmureq = '{req:1'b1, we:1'b1, be:4'hF, addr:a, wdata:d};
    @(posedge sclk); @(negedge sclk); pmureq = MEM_REQ_IDLE;
  endtask

  localparam logic [31:0] T = TCDM_BASE;
  localparam logic [31:0] EU = PERIPH_BASE + (EU_SLOT << PERIPH_SLOT_BITS);
  localparam logic [31:0] TIM = PERIPH_BASE, HWC = PERIPH_BASE + 32'h1000,
                          CRY = PERIPH_BASE + 32'h2000, DMA = PERIPH_BASE + 32'h3000;

  function automatic logic [31:0] tcdm(int byte_off);
    int w; w = byte_off / 4;
    case (w % 8)
      0: return dut.g_bank[0].i_bank.mem[w / 8];
      1: return dut.g_bank[1].i_bank.mem[w / 8];
      2: return dut.g_bank[2].i_bank.mem[w / 8];
      3: return dut.g_bank[3].i_bank.mem[w / 8];
      4: return dut.g_bank[4].i_bank.mem[w / 8];
      5: return dut.g_bank[5].i_bank.mem[w / 8];
      6: return dut.g_bank[6].i_bank.mem[w / 8];
      7: return dut.g_bank[7].i_bank.mem[w / 8];
      default: return '0;
    endcase
  endfunction
  task automatic tcdm_put(int byte_off, logic [31:0] d);
    int w; w = byte_off / 4;
    case (w % 8)
      0: dut.g_bank[0].i_bank.mem[w / 8] = d;
      1: dut.g_bank[1].i_bank.mem[w / 8] = d;
      2: dut.g_bank[2].i_bank.mem[w / 8] = d;
      3: dut.g_bank[3].i_bank.mem[w / 8] = d;
      4: dut.g_bank[4].i_bank.mem[w / 8] = d;
      5: dut.g_bank[5].i_bank.mem[w / 8] = d;
      6: dut.g_bank[6].i_bank.mem[w / 8] = d;
      7: dut.g_bank[7].i_bank.mem[w / 8] = d;
      default: ;
    endcase
  endtask

  // wait for an event on core c (mask set first); returns the event bits
  task automatic wfe(input int c, input logic [31:0] mask, output logic [31:0] got);
    cwr(c, EU + 0, mask);
    crd(c, EU + 8, got);
    n_wfe++;
  endtask

  // ---------------------------------------------------------------- HWCE reference
  function automatic int wslice(logic [15:0] w, int prec, int k);
    if (prec == 0) return int'($signed(w));
    if (prec == 1) return int'($signed(w[8*k +: 8]));
    return int'($signed(w[4*k +: 4]));
  endfunction
  function automatic logic [15:0] sat(longint v);
    if (v > 32767) return 16'h7FFF;
    if (v < -32768) return 16'h8000;
    return 16'(v);
  endfunction

  localparam int XB = 'h0000, WB = 'h2000, YB = 'h3000, YSZ = 'h800;
  int iw = 16, ih = 10;
  logic [15:0] yref [4][];

  task automatic hwce_setup(input int prec, k5, qf);
    int ks, nout; ks = k5 ? 5 : 3; nout = prec == 0 ? 1 : prec == 1 ? 2 : 4;
    for (int i = 0; i < iw*ih; i++) tcdm_put(XB + 4*i, {16'h0, 16'($urandom_range(0, 1023)) - 16'd512});
    for (int i = 0; i < ks*ks; i++) tcdm_put(WB + 4*i, {16'h0, 16'($urandom)});
    for (int k = 0; k < nout; k++) begin
      yref[k] = new[(iw-ks+1)*(ih-ks+1)];
      for (int i = 0; i < (iw-ks+1)*(ih-ks+1); i++) tcdm_put(YB + k*YSZ + 4*i, {16'h0, 16'($urandom_range(0, 255))});
      for (int oy = 0; oy < ih-ks+1; oy++)
        for (int ox = 0; ox < iw-ks+1; ox++) begin
          longint s; s = 0;
          for (int r = 0; r < ks; r++)
            for (int c = 0; c < ks; c++)
              s += longint'($signed(tcdm(XB + 4*((oy+r)*iw + ox + c))[15:0])) *
                   longint'(wslice(tcdm(WB + 4*(r*ks + c))[15:0], prec, k));
          s = (s + (longint'($signed(tcdm(YB + k*YSZ + 4*(oy*(iw-ks+1) + ox))[15:0])) <<< qf)) >>> qf;
          yref[k][oy*(iw-ks+1) + ox] = sat(s);
        end
    end
    cwr(1, HWC + 8'h00, T + XB); cwr(1, HWC + 8'h04, T + WB);
    for (int k = 0; k < 4; k++) cwr(1, HWC + 32'(8 + 4*k), T + YB + k*YSZ);
    cwr(1, HWC + 8'h18, iw); cwr(1, HWC + 8'h1C, ih); cwr(1, HWC + 8'h20, 4*iw); cwr(1, HWC + 8'h24, 4*(iw-ks+1));
    cwr(1, HWC + 8'h28, {25'h0, 2'(prec), 1'(k5), 4'(qf)});
  endtask
  task automatic hwce_check(input int prec, k5);
    int ks, nout, bad; ks = k5 ? 5 : 3; nout = prec == 0 ? 1 : prec == 1 ? 2 : 4; bad = 0;
    for (int k = 0; k < nout; k++)
      foreach (yref[k][i]) if (tcdm(YB + k*YSZ + 4*i)[15:0] != yref[k][i]) bad++;
    check(bad == 0, $sformatf("HWCE precision %0d K=%0d: %0d wrong", prec, ks, bad));
    if (bad == 0) n_prec[prec]++;
  endtask

  // ---------------------------------------------------------------- sequence
  logic [31:0] d, ev;
  initial begin
    for (int c = 0; c < 4; c++) creq[c] = MEM_REQ_IDLE;
    l2req = MEM_REQ_IDLE; pmureq = MEM_REQ_IDLE;
    repeat (4) @(posedge clk); rst_n = 1;
    repeat (4) @(posedge clk);

    // 1. all cores write and read the TCDM at once; cores 0 and 1 hit the
    //    same bank in the same cycle (bank conflict)
    fork
      cwr(0, T + 32'h8000, 32'hA0A0_0000);
      cwr(1, T + 32'h8020, 32'hA1A1_1111);   // same bank as 0x8000
      cwr(2, T + 32'h8004, 32'hA2A2_2222);
      cwr(3, T + 32'h8008, 32'hA3A3_3333);
    join
    check(tcdm(32'h8000) == 32'hA0A0_0000 && tcdm(32'h8020) == 32'hA1A1_1111, "TCDM bank contents");
    crd(2, T + 32'h8000, d); check(d == 32'hA0A0_0000, "TCDM word 0");
    crd(3, T + 32'h8020, d); check(d == 32'hA1A1_1111, "TCDM word 8 (same bank)");
    crd(0, T + 32'h8008, d); check(d == 32'hA3A3_3333, "TCDM word 2");

    // 2. DMA 1D: 512 bytes L2 -> TCDM, core 0 waits for the DMA event
    for (int i = 0; i < 64; i++) dut.i_l2.mem[256 + i] = {32'(i) ^ 32'h5555_0000, 32'(i)};
    cwr(0, DMA + 8'h00, T + 32'h9000); cwr(0, DMA + 8'h04, 32'h1C00_0800);
    cwr(0, DMA + 8'h08, 512); cwr(0, DMA + 8'h10, 1); cwr(0, DMA + 8'h14, 0);
    wfe(0, 32'(1) << EVT_DMA, ev);
    check(ev[EVT_DMA], "DMA event woke core 0");
    begin
      int bad; bad = 0;
      for (int i = 0; i < 64; i++)
        if (tcdm(32'h9000 + 8*i) != 32'(i) || tcdm(32'h9004 + 8*i) != (32'(i) ^ 32'h5555_0000)) bad++;
      check(bad == 0, $sformatf("DMA 1D L2->TCDM data (%0d wrong)", bad));
      if (bad == 0) n_dma1d++;
    end

    // 3. HWCE and HWCRYPT together: HWCE owns the shared ports, HWCRYPT
    //    waits, then gets them; then HWCE at the other precisions
    hwce_setup(0, 1, 8);
    for (int i = 0; i < 4; i++) begin
      logic [127:0] p; p = 128'h00112233445566778899aabbccddeeff;
      tcdm_put(32'h6000 + 4*i, {p[103-32*i -: 8], p[111-32*i -: 8], p[119-32*i -: 8], p[127-32*i -: 8]});
    end
    begin
      logic [127:0] k; k = 128'h000102030405060708090a0b0c0d0e0f;
      for (int i = 0; i < 4; i++) cwr(2, CRY + 32'(8'h10 + 4*i), k[32*i +: 32]);
    end
    cwr(2, CRY + 8'h00, T + 32'h6000); cwr(2, CRY + 8'h04, T + 32'h6100);
    cwr(2, CRY + 8'h08, 16); cwr(2, CRY + 8'h0C, 0);
    fork
      begin cwr(1, HWC + 8'h2C, 1); wfe(1, 32'(1) << EVT_HWCE, ev); end
      begin repeat (3) @(posedge clk); cwr(2, CRY + 8'h40, 1); wfe(2, 32'(1) << EVT_HWCRYPT, ev); end
    join
    hwce_check(0, 1);
    begin
      logic [127:0] c;
      for (int i = 0; i < 4; i++) begin
        logic [31:0] w; w = tcdm(32'h6100 + 4*i);
        c[127-32*i -: 32] = {w[7:0], w[15:8], w[23:16], w[31:24]};
      end
      check(c == 128'h69c4e0d86a7b0430d8cdb78070b4c55a, $sformatf("HWCRYPT AES-128 FIPS-197 C.1 (%h)", c));
      if (c == 128'h69c4e0d86a7b0430d8cdb78070b4c55a) n_aes++;
    end
    hwce_setup(1, 0, 6); cwr(1, HWC + 8'h2C, 1); wfe(1, 32'(1) << EVT_HWCE, ev); hwce_check(1, 0);
    hwce_setup(2, 1, 2); cwr(1, HWC + 8'h2C, 1); wfe(1, 32'(1) << EVT_HWCE, ev); hwce_check(2, 1);

    // 4. HWCRYPT queue full: six 1 kB ECB jobs, the sixth trigger stalls
    cwr(2, CRY + 8'h08, 1024);
    begin
      int st; st = 0;
      for (int j = 0; j < 6; j++) begin
        int t0; t0 = $time;
        cwr(2, CRY + 8'h40, 1);
        if ($time - t0 > 200) st++;
      end
      check(st > 0, "HWCRYPT trigger stalled on a full queue");
      n_qfull += st;
      do crd(2, CRY + 8'h44, d); while (d[0]);
    end

    // 5. DMA 2D: 4 rows of 32 bytes TCDM -> L2 with a 64-byte L2 stride
    cwr(3, EU + 8'h04, 32'hFFFF_FFFF);   // drop events left from earlier steps
    cwr(3, DMA + 8'h00, T + 32'h9000); cwr(3, DMA + 8'h04, 32'h1C00_1000);
    cwr(3, DMA + 8'h08, 32); cwr(3, DMA + 8'h0C, 64); cwr(3, DMA + 8'h10, 4); cwr(3, DMA + 8'h14, 1);
    wfe(3, 32'(1) << EVT_DMA, ev);
    begin
      int bad; bad = 0;
      for (int r = 0; r < 4; r++)
        for (int b = 0; b < 4; b++)
          if (dut.i_l2.mem[512 + 8*r + b] != {tcdm(32'h9004 + 32*r + 8*b), tcdm(32'h9000 + 32*r + 8*b)}) begin
            if (bad < 3) $display("  L2 row %0d beat %0d: %h, expected %h", r, b, dut.i_l2.mem[512 + 8*r + b],
                                  {tcdm(32'h9004 + 32*r + 8*b), tcdm(32'h9000 + 32*r + 8*b)});
            bad++;
          end
      check(bad == 0, $sformatf("DMA 2D TCDM->L2 data (%0d wrong)", bad));
      if (bad == 0) n_dma2d++;
    end

    // 6. timer event
    cwr(0, TIM + 8'h08, 40);
    cwr(0, EU + 8'h00, 32'(1) << EVT_TIMER);
    cwr(0, EU + 8'h04, 32'hFFFF_FFFF);
    begin
      int t0;
      cwr(0, TIM + 8'h00, 32'h3); t0 = $time;
      crd(0, EU + 8'h08, ev); n_wfe++;
      $display("timer event after %0d cycles", ($time - t0) / 10);
      check(($time - t0) / 10 >= 40 && ($time - t0) / 10 <= 46, "timer event at COMPARE");
    end
    if (ev[EVT_TIMER]) n_timer++;
    cwr(0, TIM + 8'h00, 0);

    // 7. barrier over all cores; the last arrival releases everybody
    cwr(0, EU + 8'h14, 32'hF);
    begin
      int t_last, t_rel [4];
      fork
        begin crd(0, EU + 8'h0C, d); t_rel[0] = $time; end
        begin repeat (5)  @(posedge clk); crd(1, EU + 8'h0C, d); t_rel[1] = $time; end
        begin repeat (9)  @(posedge clk); crd(2, EU + 8'h0C, d); t_rel[2] = $time; end
        begin repeat (20) @(posedge clk); @(negedge clk); t_last = $time; crd(3, EU + 8'h0C, d); t_rel[3] = $time; end
      join
      check(t_rel[0] == t_rel[3] && t_rel[1] == t_rel[3] && t_rel[2] == t_rel[3], "barrier releases all cores together");
      $display("barrier: last arrival to release %0d cycles", (t_rel[3] - t_last) / 10);
      check((t_rel[3] - t_last) / 10 <= 3, "barrier latency");
      n_barrier++;
    end

    // 8. idle mode: every core waits for I/O event 0, the cluster clock stops,
    //    the event wakes it
    swr(32'h0, PM_IDLE);
    begin
      int g0; logic [31:0] e [4];
      fork
        wfe(0, 32'(1) << EVT_IO_LSB, e[0]);
        wfe(1, 32'(1) << EVT_IO_LSB, e[1]);
        wfe(2, 32'(1) << EVT_IO_LSB, e[2]);
        wfe(3, 32'(1) << EVT_IO_LSB, e[3]);
        begin
          repeat (60) @(posedge clk);
          g0 = n_idle;
          check(g0 > 10, $sformatf("cluster clock gated in idle mode (%0d cycles)", g0));
          io_evt[0] = 1'b1;
          repeat (10) @(posedge clk); io_evt[0] = 1'b0;
        end
      join
      for (int c = 0; c < 4; c++) check(e[c][EVT_IO_LSB], "I/O event woke the core");
    end
    swr(32'h0, PM_ACTIVE);

    // 9. deep sleep: cores wait, the cluster is power gated through the
    //    regulator handshake, an I/O event powers it up again
    swr(32'h0, PM_DEEP_SLEEP);
    begin
      bit saw_off, saw_rst;
      saw_off = 0; saw_rst = 0;
      fork : ds
        begin logic [31:0] e; wfe(0, 32'(1) << EVT_IO_LSB, e); end
        begin logic [31:0] e; wfe(1, 32'(1) << EVT_IO_LSB, e); end
        begin logic [31:0] e; wfe(2, 32'(1) << EVT_IO_LSB, e); end
        begin logic [31:0] e; wfe(3, 32'(1) << EVT_IO_LSB, e); end
        begin
          repeat (300) @(posedge sclk) begin
            if (!reg_en && !pgood) saw_off = 1;
            if (!dut.cl_rst_n) saw_rst = 1;
          end
        end
      join_any
      disable ds;
      for (int c = 0; c < 4; c++) creq[c] = MEM_REQ_IDLE;
      check(saw_off && saw_rst, "deep sleep: regulator off and cluster in reset");
      io_evt[1] = 1'b1; repeat (5) @(posedge sclk); io_evt[1] = 1'b0;
      repeat (100) @(posedge sclk);
      check(reg_en && pgood && dut.cl_rst_n && pmode == PM_ACTIVE, "deep sleep exit: powered, out of reset, active");
      if (saw_off && saw_rst && dut.cl_rst_n) n_deep++;
    end
    repeat (10) @(posedge clk);
    cwr(0, T + 32'h100, 32'h1234_5678); crd(1, T + 32'h100, d);
    check(d == 32'h1234_5678, "cluster works after deep sleep");

    // mechanism coverage
    $display("conflicts %0d, mux switches %0d, queue-full stalls %0d, wfe %0d, core-gated cycles %0d",
             n_conflict, n_switch, n_qfull, n_wfe, n_coregate);
    $display("barriers %0d, dma1d %0d, dma2d %0d, prec16/8/4 %0d/%0d/%0d, idle cycles %0d, deep %0d, timer %0d, aes %0d",
             n_barrier, n_dma1d, n_dma2d, n_prec[0], n_prec[1], n_prec[2], n_idle, n_deep, n_timer, n_aes);
    check(n_conflict > 0, "bank conflict happened");
    check(n_switch > 0, "static mux handed the ports over");
    check(n_qfull > 0, "command queue full");
    check(n_wfe > 0, "wait-for-event");
    check(n_coregate > 0, "core clock gating");
    check(n_barrier > 0, "barrier");
    check(n_dma1d > 0 && n_dma2d > 0, "DMA 1D and 2D");
    check(n_prec[0] > 0 && n_prec[1] > 0 && n_prec[2] > 0, "HWCE 16/8/4-bit modes");
    check(n_idle > 0, "cluster idle clock gating");
    check(n_deep > 0, "deep sleep");
    check(n_timer > 0, "timer event");
    check(n_aes > 0, "HWCRYPT AES");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
