// event_unit: cluster event unit (events, wait-for-event, barrier, core
// clock enables).
//
// The paper's event unit "supports low-power waiting on software events,
// barriers, and hardware events": a core waits by issuing a load to a
// special address; the load is not answered until an event arrives, and
// meanwhile the core's clock is gated. That is what this block does.
// Each core has an event mask and an event buffer; events (hardware pulses
// evt_i, software events written by cores, the barrier) set bits in the
// buffer of every core. Per-core register view (one port per core, offsets
// within the event-unit slot):
//   0x00 MASK    (rw)  events that wake this core
//   0x04 BUFFER  (r)   pending events; write: clear the bits written as 1
//   0x08 WAIT    (r)   wait-for-event: answered once (BUFFER & MASK) != 0,
//                      returns those bits and clears them
//   0x0C BARRIER (r)   join the barrier; answered when every core in
//                      BARRIER_MASK has joined
//   0x10 SW_EVT  (w)   raise software event wdata[18:16] on the cores in
//                      wdata[N_CORES-1:0]
//   0x14 BARRIER_MASK (rw, shared)
// gnt is given at once; normal reads answer one cycle later. A core's
// clk_en_o is low while its WAIT or BARRIER load is pending and returns high
// in the cycle the answer is sent, so the core is clocked to take it. The
// last core to join a barrier is answered, together with all the others,
// two cycles after its request (its grant cycle plus the release cycle),
// matching the paper's two-cycle barrier. The mapping of events to buffer
// bits (see fulmine_pkg) and the register layout are this design's choices.
module event_unit #(
  parameter int unsigned N_CORES  = 4,
  parameter int unsigned N_EVENTS = 32
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  fulmine_pkg::mem_req_t req_i [N_CORES],
  output fulmine_pkg::mem_rsp_t rsp_o [N_CORES],
  input  logic [N_EVENTS-1:0]   evt_i,
  output logic [N_CORES-1:0]    clk_en_o
);
  import fulmine_pkg::*;
  logic [N_EVENTS-1:0] mask_q [N_CORES], buf_q [N_CORES];
  logic [N_CORES-1:0]  waiting_q, in_bar_q, bar_rel_q;
  logic [N_CORES-1:0]  bmask_q;
  logic [N_CORES-1:0]  rvalid_q;
  logic [31:0]         rdata_q [N_CORES];
  logic [N_CORES-1:0]  sw_tgt;
  logic [N_EVENTS-1:0] sw_evt;
  logic [N_CORES-1:0]  join_now;
  logic                bar_done;

  // software events (any core may raise them) and barrier joins
  always_comb begin
    sw_tgt = '0; sw_evt = '0; join_now = '0;
    for (int c = 0; c < N_CORES; c++) begin
      if (req_i[c].req && req_i[c].we && req_i[c].addr[7:0] == 8'h10) begin
        sw_tgt = sw_tgt | req_i[c].wdata[N_CORES-1:0];
        sw_evt[EVT_SW_LSB + 32'(req_i[c].wdata[18:16])] = 1'b1;
      end
      join_now[c] = req_i[c].req && !req_i[c].we && req_i[c].addr[7:0] == 8'h0C;
    end
    bar_done = bmask_q != '0 && ((in_bar_q | join_now) & bmask_q) == bmask_q;
  end

  always_comb
    for (int c = 0; c < N_CORES; c++) begin
      rsp_o[c].gnt    = req_i[c].req;
      rsp_o[c].rvalid = rvalid_q[c];
      rsp_o[c].rdata  = rdata_q[c];
      clk_en_o[c]     = !(waiting_q[c] || in_bar_q[c]) || rvalid_q[c];
    end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int c = 0; c < N_CORES; c++) begin mask_q[c] <= '0; buf_q[c] <= '0; rdata_q[c] <= '0; end
      waiting_q <= '0; in_bar_q <= '0; bar_rel_q <= '0; bmask_q <= '0; rvalid_q <= '0;
    end else begin
      bar_rel_q <= '0;
      if (bar_done) begin
        bar_rel_q <= (in_bar_q | join_now) & bmask_q;
      end
      for (int c = 0; c < N_CORES; c++) begin
        logic [N_EVENTS-1:0] b, hit;
        logic [7:0] off;
        off = req_i[c].addr[7:0];
        b = buf_q[c] | evt_i | (sw_tgt[c] ? sw_evt : '0) |
            (bar_done ? N_EVENTS'(1) << EVT_BARRIER : '0);
        rvalid_q[c] <= 1'b0;
        // pending wait
        hit = b & mask_q[c];
        if (waiting_q[c] && hit != '0) begin
          rvalid_q[c] <= 1'b1; rdata_q[c] <= 32'(hit); b = b & ~hit; waiting_q[c] <= 1'b0;
        end
        if (bar_rel_q[c]) begin
          rvalid_q[c] <= 1'b1; rdata_q[c] <= '0; in_bar_q[c] <= 1'b0;
        end
        if (req_i[c].req) begin
          if (req_i[c].we) begin
            unique case (off)
              8'h00: mask_q[c] <= N_EVENTS'(req_i[c].wdata);
              8'h04: b = b & ~N_EVENTS'(req_i[c].wdata);
              8'h14: bmask_q <= req_i[c].wdata[N_CORES-1:0];
              default: ;
            endcase
            rvalid_q[c] <= 1'b1; rdata_q[c] <= '0;
          end else begin
            unique case (off)
              8'h00: begin rvalid_q[c] <= 1'b1; rdata_q[c] <= 32'(mask_q[c]); end
              8'h04: begin rvalid_q[c] <= 1'b1; rdata_q[c] <= 32'(buf_q[c]); end
              8'h08: begin
                hit = b & mask_q[c];
                if (hit != '0) begin rvalid_q[c] <= 1'b1; rdata_q[c] <= 32'(hit); b = b & ~hit; end
                else waiting_q[c] <= 1'b1;
              end
              8'h0C: in_bar_q[c] <= 1'b1;
              8'h14: begin rvalid_q[c] <= 1'b1; rdata_q[c] <= 32'(bmask_q); end
              default: begin rvalid_q[c] <= 1'b1; rdata_q[c] <= '0; end
            endcase
          end
        end
        buf_q[c] <= b;
      end
    end
  end
endmodule
