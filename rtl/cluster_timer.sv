// cluster_timer: 32-bit cluster timer with compare event.
//
// The paper lists a timer among the cluster peripherals without details;
// the layout below is this design's choice. Registers (peripheral slot):
//   0x00 CFG     {clear_on_match[2], clear[1] (write-only strobe), enable[0]}
//   0x04 COUNT   (rw) counts cluster cycles while enabled
//   0x08 COMPARE (rw) evt_o pulses for one cycle when COUNT == COMPARE
// gnt is combinational, read data follow one cycle later.
// Lint note (UNUSEDSIGNAL): the byte enables of the register request are
// ignored; registers are always written as whole words.
module cluster_timer (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  fulmine_pkg::mem_req_t req_i,
  output fulmine_pkg::mem_rsp_t rsp_o,
  output logic                  evt_o
);
  logic        en_q, com_q, rvalid_q;
  logic [31:0] cnt_q, cmp_q, rdata_q;
  logic        match;
  assign match = en_q && cnt_q == cmp_q;
  assign rsp_o.gnt = req_i.req;
  assign rsp_o.rvalid = rvalid_q;
  assign rsp_o.rdata = rdata_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      en_q <= 1'b0; com_q <= 1'b0; cnt_q <= '0; cmp_q <= '1; rvalid_q <= 1'b0; rdata_q <= '0; evt_o <= 1'b0;
    end else begin
      evt_o <= match;
      if (en_q) cnt_q <= (match && com_q) ? '0 : cnt_q + 32'd1;
      rvalid_q <= req_i.req;
      if (req_i.req && req_i.we) begin
        unique case (req_i.addr[3:0])
          4'h0: begin en_q <= req_i.wdata[0]; com_q <= req_i.wdata[2]; if (req_i.wdata[1]) cnt_q <= '0; end
          4'h4: cnt_q <= req_i.wdata;
          4'h8: cmp_q <= req_i.wdata;
          default: ;
        endcase
      end
      if (req_i.req && !req_i.we) begin
        unique case (req_i.addr[3:0])
          4'h0: rdata_q <= {29'h0, com_q, 1'b0, en_q};
          4'h4: rdata_q <= cnt_q;
          4'h8: rdata_q <= cmp_q;
          default: rdata_q <= '0;
        endcase
      end
    end
  end
endmodule
