// dc_fifo: dual-clock FIFO with Gray-coded pointers.
//
// The paper separates the cluster clock domain from the SoC domain with
// dual-clock FIFOs on the AXI bus. This FIFO carries items of type T from
// the write clock (wclk_i) to the read clock (rclk_i). Pointers are one bit
// wider than the address and cross the boundary in Gray code through
// two-flop synchronisers; full and empty are therefore conservative (they
// clear a few cycles after the other side moves). Valid/ready handshake on
// both sides: an item is written when push_i && !full_o and read when
// valid_o && pop_i. DEPTH must be a power of two.
module dc_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 8
) (
  input  logic wclk_i,
  input  logic wrst_ni,
  input  logic push_i,
  input  T     data_i,
  output logic full_o,
  input  logic rclk_i,
  input  logic rrst_ni,
  input  logic pop_i,
  output T     data_o,
  output logic valid_o
);
  localparam int unsigned AW = $clog2(DEPTH);
  T mem [DEPTH];
  logic [AW:0] wbin_q, wgray_q, rbin_q, rgray_q;
  logic [AW:0] wgray_s1, wgray_s2, rgray_s1, rgray_s2;
  logic [AW:0] wbin_n, rbin_n;

  function automatic logic [AW:0] b2g(logic [AW:0] b); return b ^ (b >> 1); endfunction

  assign full_o  = wgray_q == {~rgray_s2[AW:AW-1], rgray_s2[AW-2:0]};
  assign valid_o = rgray_q != wgray_s2;
  assign data_o  = mem[rbin_q[AW-1:0]];
  assign wbin_n  = wbin_q + (AW+1)'(push_i && !full_o);
  assign rbin_n  = rbin_q + (AW+1)'(pop_i && valid_o);

  always_ff @(posedge wclk_i) if (push_i && !full_o) mem[wbin_q[AW-1:0]] <= data_i;

  always_ff @(posedge wclk_i or negedge wrst_ni) begin
    if (!wrst_ni) begin
      wbin_q <= '0; wgray_q <= '0; rgray_s1 <= '0; rgray_s2 <= '0;
    end else begin
      wbin_q <= wbin_n; wgray_q <= b2g(wbin_n);
      rgray_s1 <= rgray_q; rgray_s2 <= rgray_s1;
    end
  end
  always_ff @(posedge rclk_i or negedge rrst_ni) begin
    if (!rrst_ni) begin
      rbin_q <= '0; rgray_q <= '0; wgray_s1 <= '0; wgray_s2 <= '0;
    end else begin
      rbin_q <= rbin_n; rgray_q <= b2g(rbin_n);
      wgray_s1 <= wgray_q; wgray_s2 <= wgray_s1;
    end
  end
endmodule
