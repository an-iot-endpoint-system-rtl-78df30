// tcdm_static_mux: lets HWCE and HWCRYPT share one set of four TCDM ports.
//
// The paper keeps the interconnect small by giving the two accelerators the
// same four physical ports and using them "in a time-interleaved fashion,
// allowing one accelerator full access to the TCDM at a time". Here the
// ports belong to an owner register. The owner changes only when the current
// owner is no longer busy and the other accelerator is; while it waits, the
// other accelerator's requests see no grant (they stall). HWCE drives all
// four ports, HWCRYPT ports 0 and 1 (it uses two, Sec. IV-A). Which
// accelerator wins when both start in the same cycle (HWCE) is this
// design's choice. Responses follow the owner of the previous cycle.
module tcdm_static_mux (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  hwce_busy_i,
  input  logic                  hwcrypt_busy_i,
  input  fulmine_pkg::mem_req_t hwce_req_i    [4],
  output fulmine_pkg::mem_rsp_t hwce_rsp_o    [4],
  input  fulmine_pkg::mem_req_t hwcrypt_req_i [2],
  output fulmine_pkg::mem_rsp_t hwcrypt_rsp_o [2],
  output fulmine_pkg::mem_req_t tcdm_req_o    [4],
  input  fulmine_pkg::mem_rsp_t tcdm_rsp_i    [4],
  output logic                  owner_crypt_o
);
  import fulmine_pkg::*;
  logic owner_q, owner_d, owner_prev_q;  // 0 = HWCE, 1 = HWCRYPT

  always_comb begin
    owner_d = owner_q;
    if (owner_q == 1'b0 && !hwce_busy_i && hwcrypt_busy_i) owner_d = 1'b1;
    if (owner_q == 1'b1 && !hwcrypt_busy_i && hwce_busy_i) owner_d = 1'b0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin owner_q <= 1'b0; owner_prev_q <= 1'b0; end
    else begin owner_q <= owner_d; owner_prev_q <= owner_q; end
  end

  always_comb begin
    for (int p = 0; p < 4; p++) begin
      if (owner_q == 1'b0) tcdm_req_o[p] = hwce_req_i[p];
      else                 tcdm_req_o[p] = (p < 2) ? hwcrypt_req_i[p % 2] : MEM_REQ_IDLE;
    end
  end

  always_comb begin
    for (int p = 0; p < 2; p++) hwcrypt_rsp_o[p] = '0;
    for (int p = 0; p < 4; p++) hwce_rsp_o[p] = '0;
    for (int p = 0; p < 4; p++) begin
      if (owner_q == 1'b0) hwce_rsp_o[p].gnt = tcdm_rsp_i[p].gnt;
      else if (p < 2)      hwcrypt_rsp_o[p].gnt = tcdm_rsp_i[p].gnt;
      if (owner_prev_q == 1'b0) begin
        hwce_rsp_o[p].rvalid = tcdm_rsp_i[p].rvalid;
        hwce_rsp_o[p].rdata  = tcdm_rsp_i[p].rdata;
      end else if (p < 2) begin
        hwcrypt_rsp_o[p].rvalid = tcdm_rsp_i[p].rvalid;
        hwcrypt_rsp_o[p].rdata  = tcdm_rsp_i[p].rdata;
      end
    end
  end
  assign owner_crypt_o = owner_q;
endmodule
