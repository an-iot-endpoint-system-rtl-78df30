// fulmine_top: the Fulmine SoC's cluster and SoC-side memory system.
//
// Wires the blocks into the architecture of the paper's Fig. 1 and Fig. 2:
//  - four core data ports (the OR10N cores themselves are not part of this
//    RTL; their data ports and gated clocks are top-level ports), each
//    behind its private DEMUX (core_demux);
//  - the TCDM: 64 kB in eight word-interleaved banks of 2048 x 32 bit,
//    reached through the logarithmic interconnect by 12 master ports:
//    4 cores, 4 DMA ports and the 4 ports shared by HWCE and HWCRYPT through
//    the static mux (masters 0-3, 4-7 and 8-11);
//  - the peripheral interconnect (4 kB slots: timer, HWCE, HWCRYPT, DMA);
//    the event unit has a private port per core;
//  - the DMA, whose 64-bit L2 side crosses to the SoC clock domain through
//    two dual-clock FIFOs (requests out, responses back), and the 192 kB L2;
//  - the cluster clock-gating manager (cluster_pmu) with clock-gate cells for
//    the cluster, each core, HWCE and HWCRYPT, and the SoC power manager
//    (soc_pmu) with the regulator handshake of the cluster domain.
// Clocks: clk_cluster_i (the cluster FLL's output) and clk_soc_i (the SoC
// FLL's output); the FLLs, ROM, SoC peripherals and uDMA are outside and
// reach this design through ports: the SoC-side L2 port (soc_l2_req_i),
// the power manager's register port (pmu_req_i), the I/O event lines
// (io_evt_i, levels, one per event), and the regulator handshake.
// The cluster is reset by rst_ni or by the power manager while it is power
// gated. Address map and event numbers are in fulmine_pkg.
// Lint notes: Verilator reports SYNCASYNCNET on cl_rst_n because, besides
// being the asynchronous reset of the cluster flops, it is sampled on the
// clock by the handshake assertion's disable iff in log_interconnect; that
// use is simulation-only and the reset is still asynchronous in hardware.
// owner_crypt (which accelerator holds the shared ports) is brought out of
// the static mux for observation only and is not used here.
// The seven latches left after synthesis are the enable latches of the
// clock gates (cluster, four cores, HWCE, HWCRYPT); see clock_gate.
module fulmine_top #(
  parameter int unsigned N_CORES    = 4,
  parameter int unsigned N_BANKS    = 8,
  parameter int unsigned BANK_WORDS = 2048,
  parameter int unsigned L2_WORDS   = 24576,
  parameter int unsigned LINE_MAX   = 64
) (
  input  logic                  clk_cluster_i,
  input  logic                  clk_soc_i,
  input  logic                  rst_ni,
  input  logic                  test_en_i,
  input  fulmine_pkg::mem_req_t core_req_i [N_CORES],
  output fulmine_pkg::mem_rsp_t core_rsp_o [N_CORES],
  output logic [N_CORES-1:0]    core_clk_o,
  input  logic [7:0]            io_evt_i,
  input  fulmine_pkg::mem_req_t soc_l2_req_i,
  output fulmine_pkg::mem_rsp_t soc_l2_rsp_o,
  input  fulmine_pkg::mem_req_t pmu_req_i,
  output fulmine_pkg::mem_rsp_t pmu_rsp_o,
  output logic                  reg_en_o,
  input  logic                  reg_pgood_i,
  output logic                  cluster_busy_o,
  output fulmine_pkg::pmode_e   pmode_o
);
  import fulmine_pkg::*;
  localparam int unsigned N_TM = N_CORES + 8;

  // ------------------------------------------------------------ clocks, resets
  logic clk_cl, clk_hwce, clk_crypt, cl_rst_n, pmu_cl_rst_n;
  logic cl_clk_en, hwce_clk_en, crypt_clk_en, pwr_down_req, wake;
  logic [N_CORES-1:0] core_clk_en;
  pmode_e mode;
  assign cl_rst_n = rst_ni && pmu_cl_rst_n;

  clock_gate i_cg_cluster (.clk_i(clk_cluster_i), .en_i(cl_clk_en),    .test_en_i, .clk_o(clk_cl));
  clock_gate i_cg_hwce    (.clk_i(clk_cl),        .en_i(hwce_clk_en),  .test_en_i, .clk_o(clk_hwce));
  clock_gate i_cg_crypt   (.clk_i(clk_cl),        .en_i(crypt_clk_en), .test_en_i, .clk_o(clk_crypt));
  for (genvar c = 0; c < N_CORES; c++) begin : g_core_cg
    clock_gate i_cg (.clk_i(clk_cl), .en_i(core_clk_en[c]), .test_en_i, .clk_o(core_clk_o[c]));
  end

  // ------------------------------------------------------------ core side
  mem_req_t tm_req [N_TM];   mem_rsp_t tm_rsp [N_TM];
  mem_req_t eu_req [N_CORES]; mem_rsp_t eu_rsp [N_CORES];
  mem_req_t pm_req [N_CORES]; mem_rsp_t pm_rsp [N_CORES];
  for (genvar c = 0; c < N_CORES; c++) begin : g_demux
    core_demux i_demux (
      .clk_i(clk_cl), .rst_ni(cl_rst_n),
      .core_req_i(core_req_i[c]), .core_rsp_o(core_rsp_o[c]),
      .tcdm_req_o(tm_req[c]), .tcdm_rsp_i(tm_rsp[c]),
      .eu_req_o(eu_req[c]), .eu_rsp_i(eu_rsp[c]),
      .per_req_o(pm_req[c]), .per_rsp_i(pm_rsp[c]));
  end

  // ------------------------------------------------------------ TCDM
  mem_req_t bank_req [N_BANKS]; mem_rsp_t bank_rsp [N_BANKS];
  log_interconnect #(.N_MASTERS(N_TM), .N_SLAVES(N_BANKS), .SEL_LSB(2), .WORD_ADDR(1'b1)) i_tcdm_xbar (
    .clk_i(clk_cl), .rst_ni(cl_rst_n), .m_req_i(tm_req), .m_rsp_o(tm_rsp),
    .s_req_o(bank_req), .s_rsp_i(bank_rsp));
  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    tcdm_bank #(.WORDS(BANK_WORDS)) i_bank (
      .clk_i(clk_cl), .rst_ni(cl_rst_n), .req_i(bank_req[b]), .rsp_o(bank_rsp[b]));
  end

  // ------------------------------------------------------------ peripherals
  mem_req_t ps_req [N_PERIPH]; mem_rsp_t ps_rsp [N_PERIPH];
  log_interconnect #(.N_MASTERS(N_CORES), .N_SLAVES(N_PERIPH), .SEL_LSB(PERIPH_SLOT_BITS),
                     .WORD_ADDR(1'b0)) i_periph_xbar (
    .clk_i(clk_cl), .rst_ni(cl_rst_n), .m_req_i(pm_req), .m_rsp_o(pm_rsp),
    .s_req_o(ps_req), .s_rsp_i(ps_rsp));

  logic [N_EVENTS-1:0] evt;
  logic evt_dma, evt_hwce, evt_crypt, evt_crypt_all, evt_timer;
  logic [7:0] io_evt;
  always_comb begin
    evt = '0;
    evt[EVT_DMA] = evt_dma; evt[EVT_HWCE] = evt_hwce;
    evt[EVT_HWCRYPT] = evt_crypt; evt[EVT_TIMER] = evt_timer;
    evt[EVT_IO_LSB +: 8] = io_evt;
  end

  event_unit #(.N_CORES(N_CORES), .N_EVENTS(N_EVENTS)) i_eu (
    .clk_i(clk_cl), .rst_ni(cl_rst_n), .req_i(eu_req), .rsp_o(eu_rsp),
    .evt_i(evt), .clk_en_o(core_clk_en));

  cluster_timer i_timer (
    .clk_i(clk_cl), .rst_ni(cl_rst_n), .req_i(ps_req[0]), .rsp_o(ps_rsp[0]), .evt_o(evt_timer));

  // ------------------------------------------------------------ accelerators
  mem_req_t hwce_req [4]; mem_rsp_t hwce_rsp [4];
  mem_req_t crypt_req [2]; mem_rsp_t crypt_rsp [2];
  logic hwce_busy, crypt_busy, owner_crypt;

  hwce #(.LINE_MAX(LINE_MAX)) i_hwce (
    .clk_i(clk_hwce), .rst_ni(cl_rst_n), .cfg_req_i(ps_req[1]), .cfg_rsp_o(ps_rsp[1]),
    .tcdm_req_o(hwce_req), .tcdm_rsp_i(hwce_rsp), .busy_o(hwce_busy), .evt_o(evt_hwce));

  hwcrypt i_hwcrypt (
    .clk_i(clk_crypt), .rst_ni(cl_rst_n), .cfg_req_i(ps_req[2]), .cfg_rsp_o(ps_rsp[2]),
    .tcdm_req_o(crypt_req), .tcdm_rsp_i(crypt_rsp), .busy_o(crypt_busy), .evt_o(evt_crypt),
    .evt_all_o(evt_crypt_all));

  tcdm_static_mux i_smux (
    .clk_i(clk_cl), .rst_ni(cl_rst_n), .hwce_busy_i(hwce_busy), .hwcrypt_busy_i(crypt_busy),
    .hwce_req_i(hwce_req), .hwce_rsp_o(hwce_rsp), .hwcrypt_req_i(crypt_req), .hwcrypt_rsp_o(crypt_rsp),
    .tcdm_req_o(tm_req[N_CORES+4 +: 4]), .tcdm_rsp_i(tm_rsp[N_CORES+4 +: 4]), .owner_crypt_o(owner_crypt));

  // ------------------------------------------------------------ DMA and L2
  logic dma_busy, l2q_valid, l2q_ready, l2q_full, l2r_valid;
  l2_req_t l2q;
  logic [63:0] l2r_data;
  logic s_q_valid, s_a_ready, s_rsp_valid, s_r_full;
  l2_req_t s_q;
  logic [63:0] s_rsp_data;

  cluster_dma i_dma (
    .clk_i(clk_cl), .rst_ni(cl_rst_n), .cfg_req_i(ps_req[3]), .cfg_rsp_o(ps_rsp[3]),
    .tcdm_req_o(tm_req[N_CORES +: 4]), .tcdm_rsp_i(tm_rsp[N_CORES +: 4]),
    .l2_req_valid_o(l2q_valid), .l2_req_o(l2q), .l2_req_ready_i(l2q_ready),
    .l2_rsp_valid_i(l2r_valid), .l2_rsp_rdata_i(l2r_data),
    .busy_o(dma_busy), .evt_o(evt_dma));
  assign l2q_ready = !l2q_full;

  dc_fifo #(.T(l2_req_t), .DEPTH(8)) i_fifo_req (
    .wclk_i(clk_cl), .wrst_ni(cl_rst_n), .push_i(l2q_valid), .data_i(l2q), .full_o(l2q_full),
    .rclk_i(clk_soc_i), .rrst_ni(rst_ni), .pop_i(s_a_ready), .data_o(s_q), .valid_o(s_q_valid));
  dc_fifo #(.T(logic [63:0]), .DEPTH(8)) i_fifo_rsp (
    .wclk_i(clk_soc_i), .wrst_ni(rst_ni), .push_i(s_rsp_valid), .data_i(s_rsp_data), .full_o(s_r_full),
    .rclk_i(clk_cl), .rrst_ni(cl_rst_n), .pop_i(l2r_valid), .data_o(l2r_data), .valid_o(l2r_valid));

  l2_sram #(.WORDS(L2_WORDS)) i_l2 (
    .clk_i(clk_soc_i), .rst_ni,
    .a_req_valid_i(s_q_valid), .a_req_i(s_q), .a_req_ready_o(s_a_ready),
    .a_rsp_valid_o(s_rsp_valid), .a_rsp_rdata_o(s_rsp_data), .a_rsp_ready_i(!s_r_full),
    .b_req_i(soc_l2_req_i), .b_rsp_o(soc_l2_rsp_o));

  // ------------------------------------------------------------ power management
  logic hwce_act, crypt_act;
  assign hwce_act  = ps_req[1].req || ps_rsp[1].rvalid || evt_hwce;
  assign crypt_act = ps_req[2].req || ps_rsp[2].rvalid || evt_crypt || evt_crypt_all;

  cluster_pmu #(.N_CORES(N_CORES)) i_cl_pmu (
    .clk_i(clk_cluster_i), .rst_ni(cl_rst_n), .mode_i(mode), .core_clk_en_i(core_clk_en),
    .hwce_busy_i(hwce_busy), .hwce_cfg_i(hwce_act), .crypt_busy_i(crypt_busy), .crypt_cfg_i(crypt_act),
    .dma_busy_i(dma_busy || l2q_valid || l2r_valid), .wake_i(wake), .io_evt_i, .io_evt_o(io_evt),
    .cluster_busy_o, .cluster_clk_en_o(cl_clk_en), .pwr_down_req_o(pwr_down_req),
    .hwce_clk_en_o(hwce_clk_en), .crypt_clk_en_o(crypt_clk_en));

  soc_pmu i_soc_pmu (
    .clk_i(clk_soc_i), .rst_ni, .req_i(pmu_req_i), .rsp_o(pmu_rsp_o), .mode_o(mode),
    .pwr_down_req_i(pwr_down_req), .wake_evt_i(|io_evt_i), .wake_o(wake),
    .reg_en_o, .reg_pgood_i, .cluster_rst_no(pmu_cl_rst_n));
  assign pmode_o = mode;
endmodule
