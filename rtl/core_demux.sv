// core_demux: private per-core demultiplexer of data accesses.
//
// Each core's single data port is steered by address to one of three
// targets: the TCDM interconnect (TCDM_BASE, 64 kB), the core's private port
// on the event unit (peripheral slot EU_SLOT) or the shared peripheral
// interconnect (the other 4 kB peripheral slots). The paper shows one DEMUX
// per core with these destinations (Fig. 1) but gives no address map; the
// map is in fulmine_pkg and is this design's choice. An address that hits
// no target is accepted and answered with the word 32'hBADACCE5 so that a
// core never hangs. The response of the previous cycle's grant is routed
// back from the target that gave it; the core may issue a new request while
// that response returns.
module core_demux (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  fulmine_pkg::mem_req_t core_req_i,
  output fulmine_pkg::mem_rsp_t core_rsp_o,
  output fulmine_pkg::mem_req_t tcdm_req_o,
  input  fulmine_pkg::mem_rsp_t tcdm_rsp_i,
  output fulmine_pkg::mem_req_t eu_req_o,
  input  fulmine_pkg::mem_rsp_t eu_rsp_i,
  output fulmine_pkg::mem_req_t per_req_o,
  input  fulmine_pkg::mem_rsp_t per_rsp_i
);
  import fulmine_pkg::*;
  typedef enum logic [1:0] {T_TCDM, T_EU, T_PER, T_NONE} tgt_e;
  tgt_e tgt, last_q;
  logic pend_q;
  logic [31:0] a;
  assign a = core_req_i.addr;

  always_comb begin
    if (a >= TCDM_BASE && a < TCDM_BASE + TCDM_BYTES)                   tgt = T_TCDM;
    else if (a >= PERIPH_BASE + (EU_SLOT << PERIPH_SLOT_BITS) &&
             a <  PERIPH_BASE + ((EU_SLOT + 1) << PERIPH_SLOT_BITS))    tgt = T_EU;
    else if (a >= PERIPH_BASE && a < PERIPH_BASE + (N_PERIPH << PERIPH_SLOT_BITS)) tgt = T_PER;
    else                                                                  tgt = T_NONE;
  end

  always_comb begin
    tcdm_req_o = core_req_i; tcdm_req_o.req = core_req_i.req && tgt == T_TCDM;
    eu_req_o   = core_req_i; eu_req_o.req   = core_req_i.req && tgt == T_EU;
    per_req_o  = core_req_i; per_req_o.req  = core_req_i.req && tgt == T_PER;
    tcdm_req_o.addr = a - TCDM_BASE;
    eu_req_o.addr   = a & 32'hFFF;
    per_req_o.addr  = a - PERIPH_BASE;
    core_rsp_o = '0;
    unique case (tgt)
      T_TCDM: core_rsp_o.gnt = tcdm_rsp_i.gnt;
      T_EU:   core_rsp_o.gnt = eu_rsp_i.gnt;
      T_PER:  core_rsp_o.gnt = per_rsp_i.gnt;
      default: core_rsp_o.gnt = 1'b1;
    endcase
    core_rsp_o.gnt = core_rsp_o.gnt && core_req_i.req;
    // Only the target granted in the previous cycle answers now; the event
    // unit may answer later (a stalled wait-for-event load), so its rvalid
    // is always forwarded.
    if (eu_rsp_i.rvalid) begin
      core_rsp_o.rvalid = 1'b1; core_rsp_o.rdata = eu_rsp_i.rdata;
    end else if (pend_q) begin
      unique case (last_q)
        T_TCDM: begin core_rsp_o.rvalid = tcdm_rsp_i.rvalid; core_rsp_o.rdata = tcdm_rsp_i.rdata; end
        T_PER:  begin core_rsp_o.rvalid = per_rsp_i.rvalid;  core_rsp_o.rdata = per_rsp_i.rdata;  end
        T_NONE: begin core_rsp_o.rvalid = 1'b1;              core_rsp_o.rdata = 32'hBADACCE5;     end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q <= 1'b0; last_q <= T_NONE;
    end else begin
      pend_q <= core_rsp_o.gnt && tgt != T_EU;
      last_q <= tgt;
    end
  end
endmodule
