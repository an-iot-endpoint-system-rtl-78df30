// tb_mem: behavioural multi-port word memory for testbenches.
//
// Answers the cluster request/grant protocol on N_PORTS ports: a request is
// granted (randomly withheld while stall_i is high, to exercise back-pressure)
// and answered one cycle later. Addresses are byte addresses; bits above
// the array size are ignored. Testbenches preload and inspect mem directly.
module tb_mem #(
  parameter int unsigned N_PORTS = 2,
  parameter int unsigned WORDS   = 16384
) (
  input  logic                  clk_i,
  input  logic                  stall_i,
  input  fulmine_pkg::mem_req_t req_i [N_PORTS],
  output fulmine_pkg::mem_rsp_t rsp_o [N_PORTS]
);
  logic [31:0] mem [WORDS];
  logic [N_PORTS-1:0] ok;
  logic [N_PORTS-1:0] pend_q = '0;
  logic [31:0] rdata_q [N_PORTS];

  always @(negedge clk_i) for (int p = 0; p < N_PORTS; p++) ok[p] <= !stall_i || ($urandom % 4 != 0);

  always_comb
    for (int p = 0; p < N_PORTS; p++) begin
      rsp_o[p].gnt    = req_i[p].req && ok[p];
      rsp_o[p].rvalid = pend_q[p];
      rsp_o[p].rdata  = rdata_q[p];
    end

  always @(posedge clk_i)
    for (int p = 0; p < N_PORTS; p++) begin
      pend_q[p] <= rsp_o[p].gnt;
      if (rsp_o[p].gnt) begin
        int a;
        a = int'((req_i[p].addr >> 2) % WORDS);
        if (req_i[p].we) begin
          for (int b = 0; b < 4; b++) if (req_i[p].be[b]) mem[a][8*b +: 8] <= req_i[p].wdata[8*b +: 8];
        end else rdata_q[p] <= mem[a];
      end
    end
endmodule
