// soc_pmu: SoC power management unit (power modes and cluster power gating).
//
// Follows the paper's power manager in function: it holds the power-mode
// policy (active, idle, deep sleep), power-gates the cluster through a
// handshake with its external regulator when deep sleep is entered, and on
// a wake-up event "reactivates the cluster, then it forwards the event
// notification to the event unit". The sequence and handshake below are
// this design's choice; the paper gives neither.
// Register (SoC side, 32-bit port): 0x0 MODE {mode[1:0]} (pmode_e),
// 0x4 STATUS {state[2:0]}. gnt at once, data one cycle later.
// Deep sleep: when the cluster asks (pwr_down_req_i), the unit asserts the
// cluster reset, drops reg_en_o and waits for reg_pgood_i to fall (S_OFF).
// A wake event (wake_evt_i) raises reg_en_o; after reg_pgood_i rises the
// reset is released and the unit returns to active, pulses wake_o to the
// cluster and sets MODE back to active. In idle, wake_o is driven by the
// wake event directly so the cluster clock restarts in the next cycle.
// Lint note (UNUSEDSIGNAL): the byte enables of the register request are
// ignored; registers are always written as whole words.
module soc_pmu (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  fulmine_pkg::mem_req_t req_i,
  output fulmine_pkg::mem_rsp_t rsp_o,
  output fulmine_pkg::pmode_e   mode_o,
  input  logic                  pwr_down_req_i,
  input  logic                  wake_evt_i,
  output logic                  wake_o,
  output logic                  reg_en_o,
  input  logic                  reg_pgood_i,
  output logic                  cluster_rst_no
);
  import fulmine_pkg::*;
  typedef enum logic [2:0] {S_ACTIVE, S_PD, S_OFF, S_PU, S_WAKE} state_e;
  state_e st_q;
  logic [1:0] pd_s_q;   // pwr_down_req_i comes from the cluster clock domain
  pmode_e mode_q;
  logic rvalid_q;
  logic [31:0] rdata_q;
  assign rsp_o.gnt = req_i.req;
  assign rsp_o.rvalid = rvalid_q;
  assign rsp_o.rdata = rdata_q;
  assign mode_o = mode_q;
  assign reg_en_o = !(st_q == S_PD || st_q == S_OFF);
  assign cluster_rst_no = st_q == S_ACTIVE || st_q == S_WAKE;
  assign wake_o = st_q == S_WAKE || (st_q == S_ACTIVE && wake_evt_i);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q <= S_ACTIVE; mode_q <= PM_ACTIVE; rvalid_q <= 1'b0; rdata_q <= '0; pd_s_q <= '0;
    end else begin
      pd_s_q <= {pd_s_q[0], pwr_down_req_i};
      rvalid_q <= req_i.req;
      if (req_i.req && req_i.we && req_i.addr[3:2] == 2'd0) mode_q <= pmode_e'(req_i.wdata[1:0]);
      if (req_i.req && !req_i.we)
        rdata_q <= req_i.addr[3:2] == 2'd0 ? {30'h0, mode_q} : {29'h0, st_q};
      unique case (st_q)
        S_ACTIVE: if (mode_q == PM_DEEP_SLEEP && pd_s_q[1]) st_q <= S_PD;
                  else if (wake_evt_i && mode_q == PM_IDLE) mode_q <= PM_ACTIVE;
        S_PD:     if (!reg_pgood_i) st_q <= S_OFF;
        S_OFF:    if (wake_evt_i) st_q <= S_PU;
        S_PU:     if (reg_pgood_i) st_q <= S_WAKE;
        S_WAKE:   begin st_q <= S_ACTIVE; mode_q <= PM_ACTIVE; end
        default:  st_q <= S_ACTIVE;
      endcase
    end
  end
endmodule
