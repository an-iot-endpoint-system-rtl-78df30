// log_interconnect: single-cycle crossbar between N_MASTERS and N_SLAVES.
//
// This is the logarithmic interconnect the paper uses both for the TCDM and
// for the peripherals. The target of a request is the field
// addr[SEL_LSB +: log2(N_SLAVES)]; with SEL_LSB = 2 consecutive words go to
// consecutive banks (word interleaving, the TCDM case), with SEL_LSB = 12
// each slave owns a 4 kB window (the peripheral case). The slave receives the
// address with the select field removed, shifted down to a word index when
// WORD_ADDR is set.
//
// When several masters address the same slave in a cycle, one of them is
// granted by a per-slave round-robin arbiter and the others see gnt low and
// must hold their request (the paper's "stalled" master). Slaves respond one
// cycle after their grant; the interconnect remembers which master was
// granted and routes rvalid/rdata back to it. Arbitration is combinational,
// so an uncontended access costs no extra cycle.
// The hold assertion samples rst_ni on the clock in its disable iff; lint
// tools may flag the reset as used both synchronously and asynchronously
// (SYNCASYNCNET). That sampling exists only in simulation.
module log_interconnect #(
  parameter int unsigned N_MASTERS = 12,
  parameter int unsigned N_SLAVES  = 8,
  parameter int unsigned SEL_LSB   = 2,
  parameter bit          WORD_ADDR = 1'b1
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  fulmine_pkg::mem_req_t  m_req_i [N_MASTERS],
  output fulmine_pkg::mem_rsp_t  m_rsp_o [N_MASTERS],
  output fulmine_pkg::mem_req_t  s_req_o [N_SLAVES],
  input  fulmine_pkg::mem_rsp_t  s_rsp_i [N_SLAVES]
);
  import fulmine_pkg::*;
  localparam int unsigned SW = $clog2(N_SLAVES > 1 ? N_SLAVES : 2);
  localparam int unsigned MW = $clog2(N_MASTERS > 1 ? N_MASTERS : 2);

  logic [SW-1:0] sel [N_MASTERS];
  logic [N_MASTERS-1:0] req_to [N_SLAVES];
  logic [N_MASTERS-1:0] gnt_from [N_SLAVES];
  logic [MW-1:0] win [N_SLAVES];
  logic          win_valid [N_SLAVES];
  logic [MW-1:0] rsp_owner_q [N_SLAVES];
  logic          rsp_pend_q [N_SLAVES];

  function automatic logic [31:0] strip(input logic [31:0] a);
    logic [31:0] hi, lo, r;
    hi = a >> (SEL_LSB + SW);
    lo = a & ((32'h1 << SEL_LSB) - 1);
    r  = (hi << SEL_LSB) | lo;
    return WORD_ADDR ? (r >> 2) : r;
  endfunction

  always_comb
    for (int m = 0; m < N_MASTERS; m++) sel[m] = m_req_i[m].addr[SEL_LSB +: SW];

  for (genvar s = 0; s < N_SLAVES; s++) begin : g_slave
    always_comb
      for (int m = 0; m < N_MASTERS; m++)
        req_to[s][m] = m_req_i[m].req && (int'(sel[m]) == s);

    rr_arbiter #(.N(N_MASTERS)) u_arb (
      .clk_i, .rst_ni,
      .req_i   (req_to[s]),
      .accept_i(s_rsp_i[s].gnt),
      .gnt_o   (gnt_from[s]),
      .idx_o   (win[s]),
      .valid_o (win_valid[s])
    );

    always_comb begin
      s_req_o[s]      = m_req_i[win[s]];
      s_req_o[s].req  = win_valid[s];
      s_req_o[s].addr = strip(m_req_i[win[s]].addr);
    end

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        rsp_pend_q[s]  <= 1'b0;
        rsp_owner_q[s] <= '0;
      end else begin
        rsp_pend_q[s]  <= win_valid[s] && s_rsp_i[s].gnt;
        rsp_owner_q[s] <= win[s];
      end
    end
  end

  always_comb begin
    for (int m = 0; m < N_MASTERS; m++) begin
      m_rsp_o[m] = '0;
      m_rsp_o[m].gnt = gnt_from[sel[m]][m] && s_rsp_i[sel[m]].gnt;
    end
    for (int s = 0; s < N_SLAVES; s++)
      if (rsp_pend_q[s]) begin
        m_rsp_o[rsp_owner_q[s]].rvalid = s_rsp_i[s].rvalid;
        m_rsp_o[rsp_owner_q[s]].rdata  = s_rsp_i[s].rdata;
      end
  end

  // A master keeps its request stable until it is granted.
  for (genvar m = 0; m < N_MASTERS; m++) begin : g_chk
    property p_hold;
      @(posedge clk_i) disable iff (!rst_ni)
        (m_req_i[m].req && !m_rsp_o[m].gnt) |=> (m_req_i[m].req && $stable(m_req_i[m].addr));
    endproperty
    a_hold: assert property (p_hold) else $error("master %0d dropped or changed a pending request", m);
  end
endmodule
