// cluster_pmu: clock-gating manager of the cluster.
//
// The paper: the clock gating manager "gates the cluster clock if the idle
// mode is selected and no engine is busy, or it activates the handshaking
// mechanism with the external regulator to power gate the cluster if the
// deep-sleep mode is selected"; and the accelerators are "aggressively
// clock gated". This block runs on the ungated cluster clock and
//  - computes cluster_busy (a core awake, or HWCE, HWCRYPT or DMA busy);
//  - in PM_IDLE with nothing busy, drops cluster_clk_en_o until wake_i
//    (an event forwarded by the SoC power manager) or a busy engine;
//  - in PM_DEEP_SLEEP with nothing busy, raises pwr_down_req_o to the SoC
//    power manager, which runs the regulator handshake;
//  - synchronises the I/O event lines (levels from the SoC domain) and the
//    SoC power manager's wake and mode signals into the cluster clock domain
//    with two flops each; a rising I/O line becomes a one-cycle event pulse
//    io_evt_o for the event unit and turns the cluster clock on in that
//    cycle so the event unit can take it;
//  - gives each accelerator a clock enable that is high while it is busy
//    or has configuration-port or event activity (this design's choice of
//    the gating condition).
// All outputs are combinational from inputs and one state flop, so the
// gated clocks follow the request in the same cycle through the clock-gate
// cells' latches.
module cluster_pmu #(
  parameter int unsigned N_CORES = 4
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  fulmine_pkg::pmode_e      mode_i,
  input  logic [N_CORES-1:0]       core_clk_en_i,   // from the event unit
  input  logic                     hwce_busy_i,
  input  logic                     hwce_cfg_i,
  input  logic                     crypt_busy_i,
  input  logic                     crypt_cfg_i,
  input  logic                     dma_busy_i,
  input  logic                     wake_i,
  input  logic [7:0]               io_evt_i,
  output logic [7:0]               io_evt_o,
  output logic                     cluster_busy_o,
  output logic                     cluster_clk_en_o,
  output logic                     pwr_down_req_o,
  output logic                     hwce_clk_en_o,
  output logic                     crypt_clk_en_o
);
  import fulmine_pkg::*;
  logic gated_q;
  logic [7:0] io_s1_q, io_s2_q, io_s3_q;
  logic [1:0] wake_s_q;
  pmode_e mode_s1_q, mode_q;
  logic wake;
  assign io_evt_o         = io_s2_q & ~io_s3_q;
  assign wake             = wake_s_q[1] || |io_evt_o;
  assign cluster_busy_o   = |core_clk_en_i || hwce_busy_i || crypt_busy_i || dma_busy_i;
  assign cluster_clk_en_o = !gated_q || wake;
  assign pwr_down_req_o   = mode_q == PM_DEEP_SLEEP && !cluster_busy_o;
  assign hwce_clk_en_o    = hwce_busy_i || hwce_cfg_i;
  assign crypt_clk_en_o   = crypt_busy_i || crypt_cfg_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      gated_q <= 1'b0; io_s1_q <= '0; io_s2_q <= '0; io_s3_q <= '0; wake_s_q <= '0;
      mode_s1_q <= PM_ACTIVE; mode_q <= PM_ACTIVE;
    end else begin
      io_s1_q <= io_evt_i; io_s2_q <= io_s1_q; io_s3_q <= io_s2_q;
      wake_s_q <= {wake_s_q[0], wake_i};
      mode_s1_q <= mode_i; mode_q <= mode_s1_q;
      if (wake || (gated_q && cluster_busy_o)) gated_q <= 1'b0;
      else if (mode_q == PM_IDLE && !cluster_busy_o) gated_q <= 1'b1;
    end
  end
endmodule
