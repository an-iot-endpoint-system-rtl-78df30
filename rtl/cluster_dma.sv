// cluster_dma: cluster DMA between the TCDM and the L2 memory.
//
// Follows the paper: the DMA has four TCDM master ports and one 64-bit port
// towards L2 (through the dual-clock FIFOs), supports 1D and 2D transfers,
// and accepts up to 16 outstanding transfers, which cores enqueue by
// writing the transfer descriptor and then a command word to a single
// address. Registers (peripheral slot):
//   0x00 TCDM_ADDR   0x04 L2_ADDR   0x08 LEN (bytes per row, multiple of 8)
//   0x0C L2_STRIDE (bytes between rows on the L2 side)
//   0x10 NROWS (0 or 1: 1D transfer)
//   0x14 CMD   write {dir[0]}: 0 = L2 -> TCDM, 1 = TCDM -> L2; stalls while
//              16 transfers are queued
//   0x18 STATUS {done_count[31:16], queued[8:4], busy[0]}
// The TCDM side of a 2D transfer is contiguous (this design's choice), the
// L2 side uses L2_STRIDE. Addresses are 8-byte aligned (this design's
// choice). A transfer is cut into 64-bit beats; even beats use TCDM ports 0
// and 1, odd beats ports 2 and 3, so two beats proceed in parallel.
//   L2 -> TCDM: reads are issued to L2 with up to 8 in flight; each response
//   is written as two words by its lane.
//   TCDM -> L2: each lane reads its beat's two words and sends a 64-bit
//   write; L2 acknowledges every request.
// evt_o pulses when a transfer completes (for L2 writes: when acknowledged).
// L2 port: l2_req_valid_o/l2_req_ready_i handshake; one response
// (l2_rsp_valid_i, read data for reads) per request, in order, always taken.
// Lint notes (UNUSEDSIGNAL): the byte-enable bits of the register request,
// the address fields of the active command (they are loaded straight from
// the queue head into the running address counters), and the unused full/empty/count outputs of the internal FIFOs are
// left unconnected on purpose; flow control uses the credit counters instead.
module cluster_dma #(
  parameter int unsigned N_QUEUE = 16
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  fulmine_pkg::mem_req_t cfg_req_i,
  output fulmine_pkg::mem_rsp_t cfg_rsp_o,
  output fulmine_pkg::mem_req_t tcdm_req_o [4],
  input  fulmine_pkg::mem_rsp_t tcdm_rsp_i [4],
  output logic                  l2_req_valid_o,
  output fulmine_pkg::l2_req_t  l2_req_o,
  input  logic                  l2_req_ready_i,
  input  logic                  l2_rsp_valid_i,
  input  logic [63:0]           l2_rsp_rdata_i,
  output logic                  busy_o,
  output logic                  evt_o
);
  import fulmine_pkg::*;

  typedef struct packed {
    logic [31:0] taddr, laddr;
    logic [15:0] len, stride, nrows;
    logic        dir;
  } cmd_t;

  // ---------------------------------------------------------------- control
  cmd_t prog_q, cmd_q, q_head;
  logic q_full, q_empty, q_pop;
  logic [$clog2(N_QUEUE+1)-1:0] q_cnt;
  logic [15:0] done_cnt_q;
  logic [7:0] roff;
  logic trig, cfg_rvalid_q;
  logic [31:0] cfg_rdata_q;
  assign roff = cfg_req_i.addr[7:0];
  assign trig = cfg_req_i.req && cfg_req_i.we && roff == 8'h14;
  assign cfg_rsp_o.gnt    = cfg_req_i.req && !(trig && q_full);
  assign cfg_rsp_o.rvalid = cfg_rvalid_q;
  assign cfg_rsp_o.rdata  = cfg_rdata_q;

  cmd_t push_cmd;
  always_comb begin
    push_cmd = prog_q;
    push_cmd.dir = cfg_req_i.wdata[0];
  end
  cmd_fifo #(.T(cmd_t), .DEPTH(N_QUEUE)) i_queue (
    .clk_i, .rst_ni, .push_i(trig && !q_full), .data_i(push_cmd), .pop_i(q_pop),
    .head_o(q_head), .full_o(q_full), .empty_o(q_empty), .count_o(q_cnt));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      prog_q <= '0; cfg_rvalid_q <= 1'b0; cfg_rdata_q <= '0;
    end else begin
      cfg_rvalid_q <= cfg_rsp_o.gnt;
      if (cfg_rsp_o.gnt && cfg_req_i.we)
        unique case (roff)
          8'h00: prog_q.taddr  <= cfg_req_i.wdata;
          8'h04: prog_q.laddr  <= cfg_req_i.wdata;
          8'h08: prog_q.len    <= cfg_req_i.wdata[15:0];
          8'h0C: prog_q.stride <= cfg_req_i.wdata[15:0];
          8'h10: prog_q.nrows  <= cfg_req_i.wdata[15:0];
          default: ;
        endcase
      if (cfg_rsp_o.gnt && !cfg_req_i.we)
        unique case (roff)
          8'h00: cfg_rdata_q <= prog_q.taddr;
          8'h04: cfg_rdata_q <= prog_q.laddr;
          8'h08: cfg_rdata_q <= {16'h0, prog_q.len};
          8'h0C: cfg_rdata_q <= {16'h0, prog_q.stride};
          8'h10: cfg_rdata_q <= {16'h0, prog_q.nrows};
          8'h18: cfg_rdata_q <= {done_cnt_q, 7'h0, 5'(q_cnt), 3'h0, busy_o};
          default: cfg_rdata_q <= '0;
        endcase
    end
  end

  // ---------------------------------------------------------------- beats
  logic        active_q;
  logic [15:0] bpr, nrows, col_q, row_q;
  logic [31:0] total, taddr_q, lline_q, laddr;
  logic        seq_left, seq_take;
  assign bpr      = cmd_q.len >> 3;
  assign nrows    = cmd_q.nrows == 16'd0 ? 16'd1 : cmd_q.nrows;
  assign total    = 32'(bpr) * 32'(nrows);
  assign seq_left = active_q && row_q != nrows;
  assign laddr    = lline_q + {13'h0, col_q, 3'h0};

  typedef struct packed { logic [31:0] taddr; logic [63:0] data; } wbeat_t;
  typedef struct packed { logic [31:0] taddr, laddr; } rbeat_t;

  // L2 -> TCDM
  logic        tag_push, tag_pop, tag_full, tag_empty;
  logic [31:0] tag_head;
  logic [3:0]  tag_cnt;
  logic [1:0]  wl_push, wl_pop, wl_full, wl_empty;
  wbeat_t      wl_head [2];
  logic [3:0]  wl_cnt [2];
  logic        rsp_lane_q;
  wbeat_t      wl_din;
  logic [1:0]  wdone_q [2];

  cmd_fifo #(.T(logic [31:0]), .DEPTH(8)) i_tag (
    .clk_i, .rst_ni, .push_i(tag_push), .data_i(taddr_q), .pop_i(tag_pop),
    .head_o(tag_head), .full_o(tag_full), .empty_o(tag_empty), .count_o(tag_cnt));
  assign wl_din = '{taddr: tag_head, data: l2_rsp_rdata_i};

  // TCDM -> L2
  logic [1:0]  rl_push, rl_pop, rl_full, rl_empty;
  rbeat_t      rl_head [2];
  logic [1:0]  rl_cnt [2];
  logic        seq_lane_q;
  logic [1:0]  ris_q [2], rgot_q [2], rvq [2];
  logic [31:0] rdat_q [2][2];
  logic [1:0]  rhave;
  logic        l2_lane;

  for (genvar l = 0; l < 2; l++) begin : g_lane
    cmd_fifo #(.T(wbeat_t), .DEPTH(8)) i_wl (
      .clk_i, .rst_ni, .push_i(wl_push[l]), .data_i(wl_din), .pop_i(wl_pop[l]),
      .head_o(wl_head[l]), .full_o(wl_full[l]), .empty_o(wl_empty[l]), .count_o(wl_cnt[l]));
    cmd_fifo #(.T(rbeat_t), .DEPTH(2)) i_rl (
      .clk_i, .rst_ni, .push_i(rl_push[l]), .data_i('{taddr: taddr_q, laddr: laddr}), .pop_i(rl_pop[l]),
      .head_o(rl_head[l]), .full_o(rl_full[l]), .empty_o(rl_empty[l]), .count_o(rl_cnt[l]));
  end

  logic [31:0] acks_q, wrote_q;
  logic [1:0]  wr_beat_done;
  logic [1:0] d;
  always_comb begin
    d = '0;
    seq_take = 1'b0; tag_push = 1'b0; rl_push = '0;
    l2_req_valid_o = 1'b0; l2_req_o = '0;
    rl_pop = '0; wl_pop = '0; wr_beat_done = '0; rhave = '0; l2_lane = 1'b0;
    for (int p = 0; p < 4; p++) tcdm_req_o[p] = MEM_REQ_IDLE;
    // responses from L2
    tag_pop = l2_rsp_valid_i && !cmd_q.dir;
    wl_push = '0;
    if (tag_pop) wl_push[rsp_lane_q] = 1'b1;
    if (!cmd_q.dir) begin
      // issue L2 reads
      if (seq_left && 32'(tag_cnt) + 32'(wl_cnt[0]) + 32'(wl_cnt[1]) < 8) begin
        l2_req_valid_o = 1'b1;
        l2_req_o = '{we: 1'b0, be: 8'hFF, addr: laddr, wdata: '0};
        if (l2_req_ready_i) begin seq_take = 1'b1; tag_push = 1'b1; end
      end
      // lanes write beats into the TCDM
      for (int l = 0; l < 2; l++)
        if (!wl_empty[l]) begin
          d = wdone_q[l];
          for (int w = 0; w < 2; w++)
            if (!wdone_q[l][w]) begin
              tcdm_req_o[2*l+w] = '{req: 1'b1, we: 1'b1, be: 4'hF,
                                   addr: wl_head[l].taddr + 32'(4*w), wdata: wl_head[l].data[32*w +: 32]};
              if (tcdm_rsp_i[2*l+w].gnt) d[w] = 1'b1;
            end
          if (d == 2'b11) begin wl_pop[l] = 1'b1; wr_beat_done[l] = 1'b1; end
        end
    end else begin
      // hand beats to the lanes
      if (seq_left && !rl_full[seq_lane_q]) begin rl_push[seq_lane_q] = 1'b1; seq_take = 1'b1; end
      for (int l = 0; l < 2; l++) begin
        if (!rl_empty[l])
          for (int w = 0; w < 2; w++)
            if (!ris_q[l][w])
              tcdm_req_o[2*l+w] = '{req: 1'b1, we: 1'b0, be: 4'hF,
                                   addr: rl_head[l].taddr + 32'(4*w), wdata: '0};
        rhave[l] = !rl_empty[l] && rgot_q[l] == 2'b11;
      end
      // one lane at a time sends its beat to L2 (lane 0 first when both)
      l2_lane = !rhave[0];
      if (rhave[l2_lane]) begin
        l2_req_valid_o = 1'b1;
        l2_req_o = '{we: 1'b1, be: 8'hFF, addr: rl_head[l2_lane].laddr,
                     wdata: {rdat_q[l2_lane][1], rdat_q[l2_lane][0]}};
        if (l2_req_ready_i) rl_pop[l2_lane] = 1'b1;
      end
    end
  end

  logic xfer_done;
  assign xfer_done = active_q && (cmd_q.dir ? acks_q == total : wrote_q == total);
  assign q_pop = !active_q && !q_empty;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q <= 1'b0; cmd_q <= '0; col_q <= '0; row_q <= '0; taddr_q <= '0; lline_q <= '0;
      rsp_lane_q <= 1'b0; seq_lane_q <= 1'b0; acks_q <= '0; wrote_q <= '0;
      evt_o <= 1'b0; done_cnt_q <= '0;
      for (int l = 0; l < 2; l++) begin
        wdone_q[l] <= '0; ris_q[l] <= '0; rgot_q[l] <= '0; rvq[l] <= '0;
        rdat_q[l][0] <= '0; rdat_q[l][1] <= '0;
      end
    end else begin
      evt_o <= 1'b0;
      if (q_pop) begin
        active_q <= 1'b1; cmd_q <= q_head; col_q <= '0; row_q <= '0;
        taddr_q <= q_head.taddr; lline_q <= q_head.laddr;
        acks_q <= '0; wrote_q <= '0; rsp_lane_q <= 1'b0; seq_lane_q <= 1'b0;
      end
      if (seq_take) begin
        taddr_q <= taddr_q + 32'd8;
        seq_lane_q <= !seq_lane_q;
        if (col_q == bpr - 16'd1) begin
          col_q <= '0; row_q <= row_q + 16'd1; lline_q <= lline_q + 32'(cmd_q.stride);
        end else col_q <= col_q + 16'd1;
      end
      if (tag_pop) rsp_lane_q <= !rsp_lane_q;
      if (l2_rsp_valid_i && cmd_q.dir) acks_q <= acks_q + 32'd1;
      wrote_q <= wrote_q + 32'(wr_beat_done[0]) + 32'(wr_beat_done[1]);
      for (int l = 0; l < 2; l++) begin
        // L2 -> TCDM lane write progress
        if (!cmd_q.dir && !wl_empty[l]) begin
          if (wr_beat_done[l]) wdone_q[l] <= '0;
          else for (int w = 0; w < 2; w++) if (tcdm_rsp_i[2*l+w].gnt) wdone_q[l][w] <= 1'b1;
        end
        // TCDM -> L2 lane read progress
        for (int w = 0; w < 2; w++) begin
          rvq[l][w] <= cmd_q.dir && tcdm_req_o[2*l+w].req && tcdm_rsp_i[2*l+w].gnt;
          if (cmd_q.dir && tcdm_req_o[2*l+w].req && tcdm_rsp_i[2*l+w].gnt) ris_q[l][w] <= 1'b1;
          if (rvq[l][w] && tcdm_rsp_i[2*l+w].rvalid) begin
            rgot_q[l][w] <= 1'b1; rdat_q[l][w] <= tcdm_rsp_i[2*l+w].rdata;
          end
        end
        if (rl_pop[l]) begin ris_q[l] <= '0; rgot_q[l] <= '0; end
      end
      if (xfer_done) begin
        active_q <= 1'b0; evt_o <= 1'b1; done_cnt_q <= done_cnt_q + 16'd1;
      end
    end
  end

  assign busy_o = active_q || !q_empty;
endmodule
