// pe_array: N x N grid of PEs (N = 64 by default, the size the source gives).
//
// PE (r, c) sits in row r (0 = top) and column c (0 = left). Three kinds of links join
// neighbours, as drawn in the architecture figure:
//  * activations enter each row at the left (a_left[r]) and pass to the right;
//  * weights enter each column at the top (w_top[c]) and pass downwards;
//  * partial sums pass downwards; the top row receives zero and the bottom row's sums
//    are the array output (psum_bottom[c]).
// In WS mode the activation and weight links are registered hops (systolic); in OS
// mode every PE of row r takes its activation straight from a_left[r] and every PE of
// column c its weight from w_top[c], so a value reaches a whole row or column in the
// same cycle (broadcast). A 2:1 multiplexer in front of each PE picks the source. The mode and control strobes go to
// every PE. Mapping for WS: PE (r, c) holds weight W[r][c] (row r of the weight tile is
// reduction index r). Mapping for OS: PE (r, c) accumulates output O[r][c].
module pe_array
  import cdm_qta_pkg::*;
#(
  parameter int unsigned N = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  mode_e             mode,
  input  logic              w_shift,
  input  logic              os_en,
  input  logic              os_clear,
  input  logic              os_drain,
  input  data_t [N-1:0]     a_left,
  input  data_t [N-1:0]     w_top,
  output acc_t  [N-1:0]     psum_bottom
);

  // a_link[r][c] is the registered activation leaving PE (r, c-1) (a_left[r] for c = 0);
  // column N is the unused output of the last PE. w_link[r][c] and p_link[r][c] leave
  // the PE above (r-1, c) (the array inputs for r = 0). The last row's w_link is unused.
  data_t a_link [N][N+1];
  data_t w_link [N+1][N];
  acc_t  p_link [N+1][N];

  for (genvar r = 0; r < N; r++) begin : g_row
    assign a_link[r][0] = a_left[r];
  end
  for (genvar c = 0; c < N; c++) begin : g_col
    assign w_link[0][c]    = w_top[c];
    assign p_link[0][c]    = '0;
    assign psum_bottom[c]  = p_link[N][c];
  end

  for (genvar r = 0; r < N; r++) begin : g_r
    for (genvar c = 0; c < N; c++) begin : g_c
      pe u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .mode     (mode),
        .w_shift  (w_shift),
        .os_en    (os_en),
        .os_clear (os_clear),
        .os_drain (os_drain),
        .a_in     ((mode == MODE_OS) ? a_left[r] : a_link[r][c]),
        .a_out    (a_link[r][c+1]),
        .w_in     ((mode == MODE_OS) ? w_top[c] : w_link[r][c]),
        .w_out    (w_link[r+1][c]),
        .psum_in  (p_link[r][c]),
        .psum_out (p_link[r+1][c])
      );
    end
  end

endmodule
