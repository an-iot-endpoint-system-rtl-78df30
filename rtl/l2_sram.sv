// l2_sram: the SoC's L2 memory, 192 kB of 64-bit words.
//
// The paper gives the L2 size (192 kB) and that the cluster reaches it over
// the 64-bit AXI bus through dual-clock FIFOs; the SoC side (uDMA and
// peripherals) reaches it too. The structure here is the simplest that does
// this: one word array with two ports in the SoC clock domain.
//   Port A (cluster, from the DMA through the FIFOs): valid/ready request
//   of l2_req_t; every request is answered one cycle after acceptance by
//   a_rsp_valid_o (read data for reads, an acknowledge for writes).
//   Port B (SoC, 32-bit mem_req_t): gnt and rvalid one cycle later.
// When both request in the same cycle, the two take turns (port B wins if
// it lost the last conflict). The word index is addr[AW+2:3] (modulo
// WORDS); the bits above select the L2 region in the SoC map and are ignored. A response on port A waits for a_rsp_ready_i
// before the next port-A request is accepted.
module l2_sram #(
  parameter int unsigned WORDS = 24576   // 192 kB / 8 bytes
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  a_req_valid_i,
  input  fulmine_pkg::l2_req_t  a_req_i,
  output logic                  a_req_ready_o,
  output logic                  a_rsp_valid_o,
  output logic [63:0]           a_rsp_rdata_o,
  input  logic                  a_rsp_ready_i,
  input  fulmine_pkg::mem_req_t b_req_i,
  output fulmine_pkg::mem_rsp_t b_rsp_o
);
  localparam int unsigned AW = $clog2(WORDS);
  logic [63:0] mem [WORDS];
  logic        a_go, b_go, b_prio_q, b_hi_q, b_rv_q;
  logic [63:0] rd_q;
  logic [AW-1:0] a_idx, b_idx;

  assign a_idx = AW'(a_req_i.addr[AW+2:3] % WORDS);
  assign b_idx = AW'(b_req_i.addr[AW+2:3] % WORDS);
  assign a_go = a_req_valid_i && !(a_rsp_valid_o && !a_rsp_ready_i) && !(b_req_i.req && b_prio_q);
  assign b_go = b_req_i.req && !a_go;
  assign a_req_ready_o = a_go;
  assign b_rsp_o.gnt    = b_go;
  assign b_rsp_o.rvalid = b_rv_q;
  assign b_rsp_o.rdata  = b_hi_q ? rd_q[63:32] : rd_q[31:0];
  assign a_rsp_rdata_o  = rd_q;

  always_ff @(posedge clk_i) begin
    if (a_go) begin
      if (a_req_i.we) begin
        for (int b = 0; b < 8; b++) if (a_req_i.be[b]) mem[a_idx][8*b +: 8] <= a_req_i.wdata[8*b +: 8];
      end else rd_q <= mem[a_idx];
    end else if (b_go) begin
      if (b_req_i.we) begin
        for (int b = 0; b < 4; b++)
          if (b_req_i.be[b]) mem[b_idx][32*b_req_i.addr[2] + 8*b +: 8] <= b_req_i.wdata[8*b +: 8];
      end else rd_q <= mem[b_idx];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      a_rsp_valid_o <= 1'b0; b_rv_q <= 1'b0; b_hi_q <= 1'b0; b_prio_q <= 1'b0;
    end else begin
      if (a_go) a_rsp_valid_o <= 1'b1;
      else if (a_rsp_ready_i) a_rsp_valid_o <= 1'b0;
      b_rv_q <= b_go;
      if (b_go) b_hi_q <= b_req_i.addr[2];
      if (a_req_valid_i && b_req_i.req) b_prio_q <= a_go;
    end
  end
endmodule
