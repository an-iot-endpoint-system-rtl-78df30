// hwce_line_buffer: turns a raster stream of pixels into a 5x5 window.
//
// The paper's line buffer is a set of latch-based FIFO queues, one per
// image line, each with two read pointers: one passes the oldest pixel on to
// the next FIFO, the other feeds the sliding window (Fig. 4). Here the four
// line FIFOs are arrays indexed by the column counter, which plays the role
// of both pointers: reading lb[i][col] gives the pixel one line above, and
// writing the pixel of line i+1 in its place moves it down one FIFO. The
// window FIFO is a 5x5 register array that shifts left by one column per
// pixel and takes the new column {lb[0][col] .. lb[3][col], x} on the right.
// The line width is run-time (width_i, at most LINE_MAX). win_valid_o marks
// a pixel at which a full K x K window is present (row >= K-1 and
// col >= K-1, K = 5 or 3); for K = 3 the window is the bottom-right 3x3 of
// the 5x5 array. Outputs are registered: they describe the pixel accepted in
// the previous cycle. clear_i restarts at row 0, column 0.
module hwce_line_buffer #(
  parameter int unsigned LINE_MAX = 64
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               clear_i,
  input  logic [15:0]        width_i,
  input  logic               k5_i,
  input  logic               valid_i,
  input  logic signed [15:0] x_i,
  output logic signed [15:0] win_o [25],   // index 5*row + col, row 0 oldest
  output logic               win_valid_o,
  output logic               pix_valid_o
);
  localparam int unsigned CW = $clog2(LINE_MAX);
  logic signed [15:0] lb [4][LINE_MAX];
  logic signed [15:0] w_q [25];
  logic [CW-1:0] col_q;
  logic [15:0]   row_q;
  logic [4:0]    km1;
  assign km1 = k5_i ? 5'd4 : 5'd2;

  always_ff @(posedge clk_i) begin
    if (valid_i && !clear_i) begin
      for (int i = 0; i < 3; i++) lb[i][col_q] <= lb[i+1][col_q];
      lb[3][col_q] <= x_i;
      for (int r = 0; r < 5; r++) begin
        for (int c = 0; c < 4; c++) w_q[5*r + c] <= w_q[5*r + c + 1];
        w_q[5*r + 4] <= (r == 4) ? x_i : lb[r][col_q];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      col_q <= '0; row_q <= '0; win_valid_o <= 1'b0; pix_valid_o <= 1'b0;
    end else if (clear_i) begin
      col_q <= '0; row_q <= '0; win_valid_o <= 1'b0; pix_valid_o <= 1'b0;
    end else begin
      pix_valid_o <= valid_i;
      win_valid_o <= valid_i && row_q >= 16'(km1) && 16'(col_q) >= 16'(km1);
      if (valid_i) begin
        if (16'(col_q) == width_i - 16'd1) begin col_q <= '0; row_q <= row_q + 16'd1; end
        else col_q <= col_q + 1'b1;
      end
    end
  end
  assign win_o = w_q;
endmodule
