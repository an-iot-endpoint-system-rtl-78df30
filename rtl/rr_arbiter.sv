// rr_arbiter: starvation-free round-robin arbiter.
//
// Picks one of N requesters combinationally. The search starts at the
// requester after the last one served, so every requester that holds its
// request is served within N grants. The pointer moves only when the caller
// confirms the grant was taken (accept), so a stalled target does not rotate
// priority. Used by the interconnects, which the paper specifies as
// "starvation-free round-robin"; the pointer-rotation form is this design's.
// Lint note (UNUSEDSIGNAL): only the low bits of the 32-bit loop counter
// take part in the index arithmetic.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [N-1:0]         req_i,
  input  logic                 accept_i,
  output logic [N-1:0]         gnt_o,
  output logic [$clog2(N > 1 ? N : 2)-1:0] idx_o,
  output logic                 valid_o
);
  localparam int unsigned IW = $clog2(N > 1 ? N : 2);
  logic [IW-1:0] ptr_q;

  always_comb begin
    gnt_o   = '0;
    idx_o   = '0;
    valid_o = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned c;
      c = (int'(ptr_q) + k) % N;
      if (!valid_o && req_i[c]) begin
        valid_o  = 1'b1;
        idx_o    = IW'(c);
        gnt_o[c] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) ptr_q <= '0;
    else if (valid_o && accept_i) ptr_q <= (int'(idx_o) == N - 1) ? '0 : idx_o + 1'b1;
  end
endmodule
