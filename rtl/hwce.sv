// hwce: Hardware Convolution Engine of the Fulmine cluster.
//
// Computes, for a job, y_out[k] = sat16((conv(x, W_k) + (y_in[k] << QF)) >> QF)
// over the valid region of a 2D image x (WIDTH x HEIGHT, 16-bit pixels), with
// one 5x5 or 3x3 filter at 16-bit weight precision, two at 8 bit or four at
// 4 bit (the scaled filters are interleaved inside the 16-bit weight words).
// y_in and y_out are (WIDTH-K+1) x (HEIGHT-K+1) images, one per filter; the
// y_in read / y_out write pair lets software accumulate over input channels
// as the paper describes.
//
// Structure (follows the paper's Fig. 4 description): a wrapper with four
// TCDM master ports feeds streams to the engine: one x stream, up to four
// y_in streams and up to four y_out streams. The x stream goes through the
// line buffer (hwce_line_buffer) into the precision-scalable sum of products
// (hwce_sop); the result stream is joined with the y_in streams, normalised
// by QF and saturated, and written back as y_out. Streams are decoupled by
// small FIFOs with credit-based issue, so the engine runs one pixel per cycle
// when the ports allow it. Each cycle the wrapper hands the four ports to up
// to four of the requesting streams with rotating priority. Weights are
// loaded from memory at the start of each job (25 or 9 words, low 16 bits).
// A controller holds a queue of two jobs besides the running one as the
// paper states ("a queue of two jobs").
//
// Pixels and weights are 16-bit values in the low half of 32-bit words
// (one per word); line strides are given in bytes. This is a simplification
// of the paper's packed 16-bit streams and is this design's choice.
//
// Register map (offsets within the HWCE peripheral slot):
//   0x00 X_PTR   0x04 W_PTR   0x08/0x0C/0x10/0x14 Y_PTR[0..3]
//   0x18 WIDTH   0x1C HEIGHT  0x20 X_STRIDE  0x24 Y_STRIDE
//   0x28 CFG     {prec[6:5] (0:16, 1:8, 2:4 bit), k5[4], qf[3:0]}
//   0x2C TRIGGER (write: queue the job; stalls while the queue is full)
//   0x30 STATUS  {done_count[31:16], queued[5:4], busy[0]}
// Config port: gnt is combinational, the read data follow one cycle later.
// evt_o pulses for one cycle at the end of every job. busy_o is high while
// a job runs or waits in the queue.
// Lint notes (UNUSEDSIGNAL): the register port's byte enables, job fields
// consumed only at job start, FIFO full/count outputs (issue is credit
// based, so they are never needed), the upper bits of a loop index and the
// line buffer's pix_valid (the window-valid flag is used instead) are unused.
module hwce #(
  parameter int unsigned LINE_MAX = 64,
  parameter int unsigned N_PORTS  = 4
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  fulmine_pkg::mem_req_t cfg_req_i,
  output fulmine_pkg::mem_rsp_t cfg_rsp_o,
  output fulmine_pkg::mem_req_t tcdm_req_o [N_PORTS],
  input  fulmine_pkg::mem_rsp_t tcdm_rsp_i [N_PORTS],
  output logic                  busy_o,
  output logic                  evt_o
);
  import fulmine_pkg::*;

  typedef struct packed {
    logic [31:0] x_ptr, w_ptr;
    logic [3:0][31:0] y_ptr;
    logic [15:0] width, height, x_stride, y_stride;
    logic [1:0]  prec;
    logic        k5;
    logic [3:0]  qf;
  } job_t;

  // ---------------------------------------------------------------- control
  job_t prog_q, job_q, q_head;
  logic q_full, q_empty, q_pop;
  logic [1:0] q_cnt;
  logic [15:0] done_cnt_q;
  logic [7:0] roff;
  logic trig, cfg_rvalid_q;
  logic [31:0] cfg_rdata_q;

  assign roff = cfg_req_i.addr[7:0];
  assign trig = cfg_req_i.req && cfg_req_i.we && roff == 8'h2C;
  assign cfg_rsp_o.gnt    = cfg_req_i.req && !(trig && q_full);
  assign cfg_rsp_o.rvalid = cfg_rvalid_q;
  assign cfg_rsp_o.rdata  = cfg_rdata_q;

  cmd_fifo #(.T(job_t), .DEPTH(2)) i_queue (
    .clk_i, .rst_ni, .push_i(trig && !q_full), .data_i(prog_q), .pop_i(q_pop),
    .head_o(q_head), .full_o(q_full), .empty_o(q_empty), .count_o(q_cnt));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      prog_q <= '0; cfg_rvalid_q <= 1'b0; cfg_rdata_q <= '0;
    end else begin
      cfg_rvalid_q <= cfg_rsp_o.gnt;
      if (cfg_rsp_o.gnt && cfg_req_i.we) begin
        unique casez (roff)
          8'h00: prog_q.x_ptr <= cfg_req_i.wdata;
          8'h04: prog_q.w_ptr <= cfg_req_i.wdata;
          8'h08, 8'h0C, 8'h10, 8'h14: prog_q.y_ptr[(roff - 8'h08) >> 2] <= cfg_req_i.wdata;
          8'h18: prog_q.width    <= cfg_req_i.wdata[15:0];
          8'h1C: prog_q.height   <= cfg_req_i.wdata[15:0];
          8'h20: prog_q.x_stride <= cfg_req_i.wdata[15:0];
          8'h24: prog_q.y_stride <= cfg_req_i.wdata[15:0];
          8'h28: {prog_q.prec, prog_q.k5, prog_q.qf} <= cfg_req_i.wdata[6:0];
          default: ;
        endcase
      end
      if (cfg_rsp_o.gnt && !cfg_req_i.we) begin
        unique casez (roff)
          8'h00: cfg_rdata_q <= prog_q.x_ptr;
          8'h04: cfg_rdata_q <= prog_q.w_ptr;
          8'h08, 8'h0C, 8'h10, 8'h14: cfg_rdata_q <= prog_q.y_ptr[(roff - 8'h08) >> 2];
          8'h18: cfg_rdata_q <= {16'h0, prog_q.width};
          8'h1C: cfg_rdata_q <= {16'h0, prog_q.height};
          8'h20: cfg_rdata_q <= {16'h0, prog_q.x_stride};
          8'h24: cfg_rdata_q <= {16'h0, prog_q.y_stride};
          8'h28: cfg_rdata_q <= {25'h0, prog_q.prec, prog_q.k5, prog_q.qf};
          8'h30: cfg_rdata_q <= {done_cnt_q, 10'h0, q_cnt, 3'h0, busy_o};
          default: cfg_rdata_q <= '0;
        endcase
      end
    end
  end

  typedef enum logic [1:0] {S_IDLE, S_WLOAD, S_RUN, S_DONE} state_e;
  state_e st_q;
  wprec_e prec;
  logic [2:0] nout;      // filters per job: 1, 2 or 4
  logic [15:0] wout, hout, km1;
  logic [4:0] nw;
  assign prec = wprec_e'(job_q.prec);
  assign nout = prec == WPREC_4 ? 3'd4 : prec == WPREC_8 ? 3'd2 : 3'd1;
  assign km1  = job_q.k5 ? 16'd4 : 16'd2;
  assign wout = job_q.width - km1;
  assign hout = job_q.height - km1;
  assign nw   = job_q.k5 ? 5'd25 : 5'd9;

  // ---------------------------------------------------------------- streams
  // requester 0: weight read (S_WLOAD) / x read (S_RUN); 1..4: y_in[k] read;
  // 5..8: y_out[k] write.
  localparam int unsigned NR = 9;
  logic [NR-1:0] rq, rg;
  logic [31:0] raddr [NR];
  logic [31:0] rwdata [NR];
  logic [3:0]  rsel [N_PORTS];
  logic        rsel_v [N_PORTS];
  logic [3:0]  rr_q;
  logic [3:0]  own_q [N_PORTS];
  logic        own_v_q [N_PORTS];

  // address generators: one per stream, raster order with a line stride
  logic [15:0] col_q [NR], row_q [NR];
  logic [31:0] line_q [NR], addr_q [NR];
  logic [15:0] gw [NR], gh [NR];
  logic [15:0] gstride [NR];
  logic [NR-1:0] gdone;
  always_comb begin
    for (int r = 0; r < NR; r++) begin
      gw[r] = r == 0 ? (st_q == S_WLOAD ? 16'(nw) : job_q.width) : wout;
      gh[r] = r == 0 ? (st_q == S_WLOAD ? 16'd1 : job_q.height) : hout;
      gstride[r] = r == 0 ? job_q.x_stride : job_q.y_stride;
      gdone[r] = row_q[r] == gh[r];
      raddr[r] = addr_q[r];
    end
  end

  // FIFOs
  localparam int unsigned SD = 4;      // stream FIFO depth
  localparam int unsigned CD = 8;      // sum FIFO depth
  logic        xf_push, xf_pop, xf_full, xf_empty;
  logic [15:0] xf_din, xf_head;
  logic [$clog2(SD+1)-1:0] xf_cnt;
  logic [2:0]  x_infl_q;
  logic [3:0]  yi_push, yi_pop, yi_full, yi_empty;
  logic [15:0] yi_din [4], yi_head [4];
  logic [$clog2(SD+1)-1:0] yi_cnt [4];
  logic [2:0]  yi_infl_q [4];
  logic [3:0]  yo_push, yo_pop, yo_full, yo_empty;
  logic [15:0] yo_din [4], yo_head [4];
  logic [$clog2(SD+1)-1:0] yo_cnt [4];
  logic        cf_push, cf_pop, cf_full, cf_empty;
  logic [3:0][44:0] cf_din, cf_head;
  logic [$clog2(CD+1)-1:0] cf_cnt;

  cmd_fifo #(.T(logic [15:0]), .DEPTH(SD)) i_xf (
    .clk_i, .rst_ni, .push_i(xf_push), .data_i(xf_din), .pop_i(xf_pop),
    .head_o(xf_head), .full_o(xf_full), .empty_o(xf_empty), .count_o(xf_cnt));
  cmd_fifo #(.T(logic [3:0][44:0]), .DEPTH(CD)) i_cf (
    .clk_i, .rst_ni, .push_i(cf_push), .data_i(cf_din), .pop_i(cf_pop),
    .head_o(cf_head), .full_o(cf_full), .empty_o(cf_empty), .count_o(cf_cnt));
  for (genvar k = 0; k < 4; k++) begin : g_yf
    cmd_fifo #(.T(logic [15:0]), .DEPTH(SD)) i_yi (
      .clk_i, .rst_ni, .push_i(yi_push[k]), .data_i(yi_din[k]), .pop_i(yi_pop[k]),
      .head_o(yi_head[k]), .full_o(yi_full[k]), .empty_o(yi_empty[k]), .count_o(yi_cnt[k]));
    cmd_fifo #(.T(logic [15:0]), .DEPTH(SD)) i_yo (
      .clk_i, .rst_ni, .push_i(yo_push[k]), .data_i(yo_din[k]), .pop_i(yo_pop[k]),
      .head_o(yo_head[k]), .full_o(yo_full[k]), .empty_o(yo_empty[k]), .count_o(yo_cnt[k]));
  end

  // request generation (credit based for reads)
  always_comb begin
    rq = '0;
    for (int r = 0; r < NR; r++) rwdata[r] = '0;
    if (st_q == S_WLOAD) rq[0] = !gdone[0];
    if (st_q == S_RUN) begin
      rq[0] = !gdone[0] && (32'(xf_cnt) + 32'(x_infl_q)) < SD;
      for (int k = 0; k < 4; k++) begin
        rq[1+k] = k < nout && !gdone[1+k] && (32'(yi_cnt[k]) + 32'(yi_infl_q[k])) < SD;
        rq[5+k] = k < nout && !gdone[5+k] && !yo_empty[k];
        rwdata[5+k] = {16'h0, yo_head[k]};
      end
    end
  end

  // port allocation: up to N_PORTS requesters per cycle, rotating priority.
  // A port whose request was not granted keeps the same requester (which
  // still requests the same address) so that a stalled request is held
  // stable as the interconnect requires.
  logic          hold_q [N_PORTS];
  logic [3:0]    hsel_q [N_PORTS];
  always_comb begin
    logic [NR-1:0] taken;
    int j;
    taken = '0;
    for (int i = 0; i < N_PORTS; i++) begin
      rsel[i] = hsel_q[i]; rsel_v[i] = hold_q[i];
      if (hold_q[i]) taken[hsel_q[i]] = 1'b1;
    end
    for (int i = 0; i < NR; i++) begin
      j = (int'(rr_q) + i) % NR;
      if (rq[j] && !taken[j])
        for (int p = 0; p < N_PORTS; p++)
          if (!rsel_v[p] && !taken[j]) begin rsel[p] = 4'(j); rsel_v[p] = 1'b1; taken[j] = 1'b1; end
    end
    for (int i = 0; i < N_PORTS; i++) begin
      tcdm_req_o[i] = MEM_REQ_IDLE;
      if (rsel_v[i]) begin
        tcdm_req_o[i].req   = 1'b1;
        tcdm_req_o[i].we    = rsel[i] >= 4'd5;
        tcdm_req_o[i].be    = 4'hF;
        tcdm_req_o[i].addr  = raddr[rsel[i]];
        tcdm_req_o[i].wdata = rwdata[rsel[i]];
      end
    end
  end
  always_comb begin
    rg = '0;
    for (int i = 0; i < N_PORTS; i++)
      if (rsel_v[i] && tcdm_rsp_i[i].gnt) rg[rsel[i]] = 1'b1;
  end

  // response routing
  logic [15:0] w_q [25];
  logic [4:0]  wcnt_q;
  logic        w_rsp;
  logic [15:0] w_rdata;
  always_comb begin
    xf_push = 1'b0; xf_din = '0; w_rsp = 1'b0; w_rdata = '0;
    yi_push = '0;
    for (int k = 0; k < 4; k++) yi_din[k] = '0;
    for (int i = 0; i < N_PORTS; i++) begin
      if (own_v_q[i] && tcdm_rsp_i[i].rvalid) begin
        if (own_q[i] == 4'd0) begin
          if (st_q == S_WLOAD) begin w_rsp = 1'b1; w_rdata = tcdm_rsp_i[i].rdata[15:0]; end
          else begin xf_push = 1'b1; xf_din = tcdm_rsp_i[i].rdata[15:0]; end
        end else begin
          for (int k = 0; k < 4; k++) if (own_q[i] == 4'(1 + k)) begin
            yi_push[k] = 1'b1; yi_din[k] = tcdm_rsp_i[i].rdata[15:0];
          end
        end
      end
    end
  end

  // ---------------------------------------------------------------- engine
  logic lb_valid, lb_clear, win_valid, pix_valid, sop_valid;
  logic signed [15:0] win [25];
  logic signed [44:0] sop_sum [4];
  assign lb_valid = st_q == S_RUN && !xf_empty && 32'(cf_cnt) <= CD - 4;
  assign xf_pop   = lb_valid;
  assign lb_clear = st_q == S_IDLE;

  hwce_line_buffer #(.LINE_MAX(LINE_MAX)) i_lb (
    .clk_i, .rst_ni, .clear_i(lb_clear), .width_i(job_q.width), .k5_i(job_q.k5),
    .valid_i(lb_valid), .x_i(xf_head), .win_o(win), .win_valid_o(win_valid),
    .pix_valid_o(pix_valid));

  hwce_sop i_sop (
    .clk_i, .rst_ni, .valid_i(win_valid), .win_i(win), .w_i(w_q), .k5_i(job_q.k5),
    .prec_i(prec), .valid_o(sop_valid), .sum_o(sop_sum));

  assign cf_push = sop_valid;
  always_comb for (int k = 0; k < 4; k++) cf_din[k] = sop_sum[k];

  // join with y_in, normalise and saturate
  function automatic logic [15:0] normalise(logic signed [44:0] s, logic signed [15:0] yin,
                                            logic [3:0] qf);
    logic signed [47:0] t;
    t = (48'(s) + (48'(yin) <<< qf)) >>> qf;
    if (t > 48'sd32767) return 16'h7FFF;
    if (t < -48'sd32768) return 16'h8000;
    return t[15:0];
  endfunction

  logic join_ok;
  always_comb begin
    join_ok = !cf_empty;
    for (int k = 0; k < 4; k++)
      if (k < nout) join_ok = join_ok && !yi_empty[k] && !yo_full[k];
    cf_pop = join_ok;
    for (int k = 0; k < 4; k++) begin
      yi_pop[k]  = join_ok && k < nout;
      yo_push[k] = join_ok && k < nout;
      yo_din[k]  = normalise(cf_head[k], yi_head[k], job_q.qf);
      yo_pop[k]  = rg[5+k];
    end
  end

  // ---------------------------------------------------------------- sequencing
  logic all_written;
  always_comb begin
    all_written = 1'b1;
    for (int k = 0; k < 4; k++) if (k < nout && !gdone[5+k]) all_written = 1'b0;
  end
  assign q_pop = st_q == S_IDLE && !q_empty;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q <= S_IDLE; job_q <= '0; rr_q <= '0; evt_o <= 1'b0; done_cnt_q <= '0;
      wcnt_q <= '0; x_infl_q <= '0;
      for (int r = 0; r < NR; r++) begin col_q[r] <= '0; row_q[r] <= '0; line_q[r] <= '0; addr_q[r] <= '0; end
      for (int i = 0; i < N_PORTS; i++) begin
        own_q[i] <= '0; own_v_q[i] <= 1'b0; hold_q[i] <= 1'b0; hsel_q[i] <= '0;
      end
      for (int k = 0; k < 4; k++) yi_infl_q[k] <= '0;
      for (int i = 0; i < 25; i++) w_q[i] <= '0;
    end else begin
      evt_o <= 1'b0;
      rr_q  <= rr_q == 4'(NR - 1) ? '0 : rr_q + 4'd1;
      for (int i = 0; i < N_PORTS; i++) begin
        hold_q[i]  <= rsel_v[i] && !tcdm_rsp_i[i].gnt;
        hsel_q[i]  <= rsel[i];
        own_v_q[i] <= rsel_v[i] && tcdm_rsp_i[i].gnt && rsel[i] < 4'd5;
        own_q[i]   <= rsel[i];
      end
      // address generators advance on grant
      for (int r = 0; r < NR; r++) begin
        if (rg[r]) begin
          if (col_q[r] == gw[r] - 16'd1) begin
            col_q[r]  <= '0;
            row_q[r]  <= row_q[r] + 16'd1;
            line_q[r] <= line_q[r] + 32'(gstride[r]);
            addr_q[r] <= line_q[r] + 32'(gstride[r]);
          end else begin
            col_q[r]  <= col_q[r] + 16'd1;
            addr_q[r] <= addr_q[r] + 32'd4;
          end
        end
      end
      x_infl_q <= x_infl_q + 3'(st_q == S_RUN && rg[0]) - 3'(xf_push);
      for (int k = 0; k < 4; k++) yi_infl_q[k] <= yi_infl_q[k] + 3'(rg[1+k]) - 3'(yi_push[k]);
      if (w_rsp) begin w_q[wcnt_q] <= w_rdata; wcnt_q <= wcnt_q + 5'd1; end
      unique case (st_q)
        S_IDLE: if (!q_empty) begin
          job_q <= q_head; st_q <= S_WLOAD; wcnt_q <= '0;
          for (int i = 0; i < 25; i++) w_q[i] <= '0;
          for (int r = 0; r < NR; r++) begin
            col_q[r] <= '0; row_q[r] <= '0;
            line_q[r] <= r == 0 ? q_head.w_ptr : r < 5 ? q_head.y_ptr[r-1] : q_head.y_ptr[r-5];
            addr_q[r] <= r == 0 ? q_head.w_ptr : r < 5 ? q_head.y_ptr[r-1] : q_head.y_ptr[r-5];
          end
        end
        S_WLOAD: if (wcnt_q == nw - 5'd1 && w_rsp) begin
          st_q <= S_RUN;
          col_q[0] <= '0; row_q[0] <= '0; line_q[0] <= job_q.x_ptr; addr_q[0] <= job_q.x_ptr;
        end
        S_RUN: if (all_written) st_q <= S_DONE;
        S_DONE: begin
          st_q <= S_IDLE; evt_o <= 1'b1; done_cnt_q <= done_cnt_q + 16'd1;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  assign busy_o = st_q != S_IDLE || !q_empty;
endmodule
