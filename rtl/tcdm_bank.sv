// tcdm_bank: one bank of the cluster's L1 tightly-coupled data memory.
//
// The paper's TCDM is 64 kB in eight word-interleaved SRAM banks, so one bank
// holds 2048 32-bit words. The bank is written here as a plain array with
// byte enables (a real chip would use an SRAM macro). It always grants; read
// data and the response strobe appear one cycle after the request, the
// timing the interconnect relies on. The bank sees a word address already
// stripped of the bank-select bits.
module tcdm_bank #(
  parameter int unsigned WORDS = 2048
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  fulmine_pkg::mem_req_t      req_i,   // addr = word index within the bank
  output fulmine_pkg::mem_rsp_t      rsp_o
);
  localparam int unsigned AW = $clog2(WORDS);
  logic [31:0] mem [WORDS];
  logic [31:0] rdata_q;
  logic        rvalid_q;
  logic [AW-1:0] a;
  assign a = req_i.addr[AW-1:0];

  always_ff @(posedge clk_i) begin
    if (req_i.req) begin
      if (req_i.we) begin
        for (int b = 0; b < 4; b++)
          if (req_i.be[b]) mem[a][8*b +: 8] <= req_i.wdata[8*b +: 8];
      end else begin
        rdata_q <= mem[a];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rvalid_q <= 1'b0;
    else         rvalid_q <= req_i.req;
  end

  assign rsp_o.gnt    = req_i.req;
  assign rsp_o.rvalid = rvalid_q;
  assign rsp_o.rdata  = rdata_q;
endmodule
