// hwce_sop: precision-scalable sum of products of the HWCE (Fig. 4).
//
// Structure as printed in the paper's figure: four submodules, each
// multiplying the 25 window pixels (16 bit, signed) by one 4-bit slice of
// every weight (W bits [15:12], [11:8], [7:4], [3:0]) into 20-bit products,
// reduced in a first stage to four 27-bit partial sums held in a PIPE
// register, then to one 30-bit sum hb[s] per slice. The second-stage tree
// forms fb[1] = (hb[3] << 4) + hb[2] and fb[0] = (hb[1] << 4) + hb[0]
// (35 bit) and hw[0] = (fb[1] << 8) + fb[0] (44 bit). A multiplexer per
// output selects, by weight precision,
//   16 bit: yout[0] = hw[0];
//   8 bit:  yout[0] = fb[0], yout[1] = fb[1] (two filters interleaved);
//   4 bit:  yout[k] = hb[k] for k = 0..3 (four filters interleaved).
// The filters of the scaled modes sit interleaved in each 16-bit weight
// location, filter k in bits [8k+7:8k] (8 bit) or [4k+3:4k] (4 bit), as the
// paper describes. A slice is multiplied as signed when it holds the top
// bits of a weight and as unsigned otherwise (this design's reading of how
// one datapath serves all three modes; the figure shows signed
// multipliers). For 3x3 filters the nine weights at locations 0..8 act on
// the bottom-right 3x3 of the window and the rest are zero.
// The partial sums are registered (stage 2) and leave as sum_o with
// valid_o two cycles after valid_i. The addition of the pre-accumulated
// y_in (shifted left by QF), the shift right by QF and the 16-bit
// saturation, also in Fig. 4, are done in the HWCE where the y_in stream
// joins the sum stream.
module hwce_sop (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               valid_i,
  input  logic signed [15:0] win_i [25],
  input  logic [15:0]        w_i [25],
  input  logic               k5_i,
  input  fulmine_pkg::wprec_e prec_i,
  output logic               valid_o,
  output logic signed [44:0] sum_o [4]
);
  import fulmine_pkg::*;
  logic [15:0] weff [25];
  logic signed [26:0] grp_d [4][4], grp_q [4][4];   // [slice][group]
  logic signed [29:0] hb [4];
  logic signed [34:0] fb [2];
  logic signed [43:0] hw;
  logic v1_q;
  wprec_e prec_q;

  always_comb begin
    for (int i = 0; i < 25; i++) weff[i] = '0;
    if (k5_i) for (int i = 0; i < 25; i++) weff[i] = w_i[i];
    else for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) weff[5*(r+2) + c + 2] = w_i[3*r + c];
  end

  always_comb begin
    for (int s = 0; s < 4; s++) begin
      logic sgn;
      sgn = (s == 3) || (s == 1 && prec_i != WPREC_16) || (prec_i == WPREC_4);
      for (int g = 0; g < 4; g++) grp_d[s][g] = '0;
      for (int i = 0; i < 25; i++) begin
        logic signed [4:0]  wsl;
        logic signed [19:0] prod;
        wsl  = sgn ? {weff[i][4*s+3], weff[i][4*s +: 4]} : {1'b0, weff[i][4*s +: 4]};
        prod = 20'(win_i[i] * wsl);
        grp_d[s][i / 7] = grp_d[s][i / 7] + 27'(prod);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      v1_q <= 1'b0; prec_q <= WPREC_16; valid_o <= 1'b0;
      for (int a = 0; a < 4; a++) begin
        sum_o[a] <= '0;
        for (int g = 0; g < 4; g++) grp_q[a][g] <= '0;
      end
    end else begin
      v1_q <= valid_i;
      if (valid_i) begin grp_q <= grp_d; prec_q <= prec_i; end
      valid_o <= v1_q;
      if (v1_q) begin
        unique case (prec_q)
          WPREC_8: begin sum_o[0] <= 45'(fb[0]); sum_o[1] <= 45'(fb[1]); sum_o[2] <= '0; sum_o[3] <= '0; end
          WPREC_4: for (int k = 0; k < 4; k++) sum_o[k] <= 45'(hb[k]);
          default: begin sum_o[0] <= 45'(hw); sum_o[1] <= '0; sum_o[2] <= '0; sum_o[3] <= '0; end
        endcase
      end
    end
  end

  always_comb begin
    for (int s = 0; s < 4; s++) hb[s] = 30'(grp_q[s][0]) + 30'(grp_q[s][1]) + 30'(grp_q[s][2]) + 30'(grp_q[s][3]);
    fb[1] = (35'(hb[3]) <<< 4) + 35'(hb[2]);
    fb[0] = (35'(hb[1]) <<< 4) + 35'(hb[0]);
    hw    = (44'(fb[1]) <<< 8) + 44'(fb[0]);
  end
endmodule
