// cmd_fifo: small synchronous FIFO for job descriptors.
//
// Holds up to DEPTH entries of type T. push_i is ignored when full_o,
// pop_i when empty_o; head_o is the oldest entry. Used for the HWCRYPT
// command queue (four pending operations, as in the paper) and the HWCE job
// queue (two jobs, as in the paper).
module cmd_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic push_i,
  input  T     data_i,
  input  logic pop_i,
  output T     head_o,
  output logic full_o,
  output logic empty_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned PW = $clog2(DEPTH > 1 ? DEPTH : 2);
  T mem [DEPTH];
  logic [PW-1:0] rd_q, wr_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;
  logic do_push, do_pop;

  assign full_o  = 32'(cnt_q) == DEPTH;
  assign empty_o = cnt_q == 0;
  assign count_o = cnt_q;
  assign head_o  = mem[rd_q];
  assign do_push = push_i && !full_o;
  assign do_pop  = pop_i && !empty_o;

  always_ff @(posedge clk_i) if (do_push) mem[wr_q] <= data_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
    end else begin
      if (do_push) wr_q <= (int'(wr_q) == DEPTH - 1) ? '0 : wr_q + 1'b1;
      if (do_pop)  rd_q <= (int'(rd_q) == DEPTH - 1) ? '0 : rd_q + 1'b1;
      cnt_q <= cnt_q + $bits(cnt_q)'(do_push) - $bits(cnt_q)'(do_pop);
    end
  end
endmodule
