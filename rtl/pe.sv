// pe: one processing element of the N x N array.
//
// The PE multiplies two signed INT8 operands and adds the product into a 32-bit sum.
// The same PE serves both dataflows of the array:
//  * WS (weight stationary): w_shift loads w_in into the local weight register
//    (weights shift down the column while they are loaded). Every cycle the PE adds
//    a_in * weight to the partial sum from the PE above (psum_in) and registers the
//    result, which is psum_out for the PE below. The activation is forwarded to the
//    right neighbour through a register, so activations travel one PE per cycle.
//  * OS (output stationary): activation and weight are broadcast along rows and
//    columns (the array drives a_in and w_in of every PE of a row or column from the
//    same wire). With os_en the PE adds
//    a_in * w_in into its own sum (os_clear starts a new sum). With os_drain the sums
//    shift down one row per cycle (sum <= psum_in) so that they leave at the bottom.
// Following the source: weight register, systolic activation hops and vertical
// partial-sum flow in WS; temporal accumulation in place in OS; results leaving at the
// bottom row. Design choices: draining reuses the vertical partial-sum links; one
// register holds both the WS partial sum and the OS accumulator; asynchronous
// active-low reset clears all registers.
// Timing: every result appears on psum_out one clock after its operands.
module pe
  import cdm_qta_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  mode_e mode,
  input  logic  w_shift,   // WS: load w_in into the weight register
  input  logic  os_en,     // OS: accumulate a_in * w_in this cycle
  input  logic  os_clear,  // OS: start a new sum with this product
  input  logic  os_drain,  // OS: shift sums down the column
  input  data_t a_in,
  output data_t a_out,
  input  data_t w_in,
  output data_t w_out,
  input  acc_t  psum_in,
  output acc_t  psum_out
);

  data_t a_q;
  data_t w_q;
  acc_t  sum_q;

  data_t                       w_use;
  logic signed [2*DATA_W-1:0]  prod;

  assign w_use = (mode == MODE_OS) ? w_in : w_q;
  assign prod  = a_in * w_use;

  assign a_out    = a_q;
  assign w_out    = w_q;
  assign psum_out = sum_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q   <= '0;
      w_q   <= '0;
      sum_q <= '0;
    end else begin
      a_q <= a_in;
      if (w_shift) w_q <= w_in;
      if (mode == MODE_WS) begin
        sum_q <= psum_in + acc_t'(prod);
      end else if (os_drain) begin
        sum_q <= psum_in;
      end else if (os_en) begin
        sum_q <= (os_clear ? acc_t'(0) : sum_q) + acc_t'(prod);
      end
    end
  end

endmodule
