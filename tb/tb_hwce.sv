// tb_hwce: self-checking test of the HWCE.
// Runs jobs for every weight precision (16/8/4 bit) and filter size (5x5,
// 3x3) on random images and weights, with random TCDM stalls, and compares
// every y_out pixel against a reference convolution computed here
// (y = sat16((sum x*w + (y_in << QF)) >> QF)). Also checks the two-job
// queue (a third queued trigger stalls), the end-of-job event, and the
// throughput in cycles per pixel on a stall-free memory.
module tb_hwce;
  import fulmine_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mem_req_t cfg_req; mem_rsp_t cfg_rsp;
  mem_req_t treq [4]; mem_rsp_t trsp [4];
  logic busy, evt, stall = 1'b1;
  int checks = 0, failures = 0, evts = 0;

  hwce dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg_req), .cfg_rsp_o(cfg_rsp),
            .tcdm_req_o(treq), .tcdm_rsp_i(trsp), .busy_o(busy), .evt_o(evt));
  tb_mem #(.N_PORTS(4), .WORDS(16384)) mem (.clk_i(clk), .stall_i(stall), .req_i(treq), .rsp_o(trsp));

  always @(posedge clk) if (evt) evts++;
  initial begin
    repeat (300000) @(posedge clk);
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

  localparam int XB = 'h0000, WB = 'h4000, YI = 'h5000;   // byte addresses
  localparam int YSZ = 'h1000;                                           // per filter

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

  task automatic setup(input int w, h, prec, k5, qf, pixmax, output int nout);
    int ks; ks = k5 ? 5 : 3;
    nout = prec == 0 ? 1 : prec == 1 ? 2 : 4;
    for (int i = 0; i < w*h; i++) mem.mem[XB/4 + i] = {16'h0, 16'($signed($urandom_range(0, 2*pixmax)) - pixmax)};
    for (int i = 0; i < ks*ks; i++) mem.mem[WB/4 + i] = {16'h0, 16'($urandom)};
    for (int k = 0; k < 4; k++)
      for (int i = 0; i < (w-ks+1)*(h-ks+1); i++) begin
        mem.mem[(YI + k*YSZ)/4 + i] = {16'h0, 16'($urandom_range(0, 511)) - 16'd256};
      end
    wr(8'h00, XB); wr(8'h04, WB);
    for (int k = 0; k < 4; k++) wr(8'(8 + 4*k), YI + k*YSZ);
    wr(8'h18, w); wr(8'h1C, h); wr(8'h20, 4*w); wr(8'h24, 4*(w-ks+1));
    wr(8'h28, {25'h0, 2'(prec), 1'(k5), 4'(qf)});
  endtask

  // The HWCE reads y_in and writes y_out through the same pointer per
  // filter (accumulation in place), so the test keeps a copy of y_in.
  task automatic check_job(input int w, h, prec, k5, qf, input logic [15:0] yin_copy [4][],
                           input string tag);
    int ks, wo, ho, nout, bad;
    ks = k5 ? 5 : 3; wo = w - ks + 1; ho = h - ks + 1;
    nout = prec == 0 ? 1 : prec == 1 ? 2 : 4; bad = 0;
    for (int k = 0; k < nout; k++)
      for (int oy = 0; oy < ho; oy++)
        for (int ox = 0; ox < wo; ox++) begin
          longint s; logic [15:0] exp, got;
          s = 0;
          for (int r = 0; r < ks; r++)
            for (int c = 0; c < ks; c++)
              s += longint'($signed(mem.mem[XB/4 + (oy+r)*w + ox + c][15:0])) *
                   longint'(wslice(mem.mem[WB/4 + r*ks + c][15:0], prec, k));
          s = (s + (longint'($signed(yin_copy[k][oy*wo + ox])) <<< qf)) >>> qf;
          exp = sat(s);
          got = mem.mem[(YI + k*YSZ)/4 + oy*wo + ox][15:0];
          if (got !== exp) begin
            if (bad < 4) $display("  %s k=%0d (%0d,%0d): got %h exp %h", tag, k, ox, oy, got, exp);
            bad++;
          end
        end
    check(bad == 0, $sformatf("%s: %0d wrong pixels", tag, bad));
  endtask

  task automatic run_job(input int w, h, prec, k5, qf, pixmax, input string tag);
    int nout, e0, ks; logic [15:0] yc [4][];
    ks = k5 ? 5 : 3;
    setup(w, h, prec, k5, qf, pixmax, nout);
    for (int k = 0; k < 4; k++) begin
      yc[k] = new[(w-ks+1)*(h-ks+1)];
      foreach (yc[k][i]) yc[k][i] = mem.mem[(YI + k*YSZ)/4 + i][15:0];
    end
    e0 = evts;
    wr(8'h2C, 1);
    while (evts == e0) @(posedge clk);
    @(posedge clk);
    check_job(w, h, prec, k5, qf, yc, tag);
  endtask

  int t0, cyc, w;
  logic [31:0] d;
  string pn [3] = '{"16b", "8b", "4b"};
  initial begin
    cfg_req = MEM_REQ_IDLE;
    repeat (3) @(posedge clk); rst_n = 1;
    // functional: all precisions and sizes, random stalls
    for (int p = 0; p < 3; p++)
      for (int k5 = 0; k5 < 2; k5++)
        run_job(12, 9, p, k5, p == 0 ? 12 : p == 1 ? 6 : 2, 2047, $sformatf("%s %0dx%0d", pn[p], k5 ? 5 : 3, k5 ? 5 : 3));
    // saturation: large pixels, no fractional bits
    run_job(8, 7, 0, 1, 0, 32767, "16b 5x5 saturating");
    // queue: one running, two queued; the fourth trigger stalls
    stall = 1'b0;
    begin
      int nout, s0, e0; bit stalled;
      setup(32, 20, 0, 1, 8, 100, nout);
      e0 = evts;
      wr(8'h2C, 1); wr(8'h2C, 1); wr(8'h2C, 1);
      rd(8'h30, d);
      check(d[5:4] == 2 && d[0], $sformatf("two jobs queued behind the running one (status %h)", d));
      @(negedge clk);
      cfg_req = '{req:1'b1, we:1'b1, be:4'hF, addr:32'h2C, wdata:1};
      s0 = 0;
      do begin @(posedge clk); if (!cfg_rsp.gnt) s0++; end while (!cfg_rsp.gnt);
      @(negedge clk); cfg_req = MEM_REQ_IDLE;
      check(s0 > 10, $sformatf("trigger stalls while the queue is full (%0d cycles)", s0));
      while (evts < e0 + 4) @(posedge clk);
      rd(8'h30, d);
      check(d[31:16] == 16'(evts) && !d[0], "done counter and idle after the queue drains");
    end
    // throughput, stall free, 64 x 32 image
    foreach (pn[p])
      for (int k5 = 1; k5 >= 0; k5--) begin
        int nout, e0; real cpp;
        setup(64, 32, p, k5, 8, 100, nout);
        e0 = evts; t0 = $time / 10;
        wr(8'h2C, 1);
        while (evts == e0) @(posedge clk);
        cyc = $time / 10 - t0;
        cpp = real'(cyc) / real'(64 * 32 * nout);
        $display("HWCE %s %0dx%0d: %0d cycles, %0.3f cycles/px/filter", pn[p], k5 ? 5 : 3, k5 ? 5 : 3, cyc, cpp);
        check(cpp < (p == 0 ? 1.3 : p == 1 ? 0.75 : 0.65), $sformatf("throughput %s", pn[p]));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
