// systolic_array: the compute module, an N x N PE array that runs either dataflow.
//
// WS (mode = MODE_WS). Weight loading: for N cycles w_shift is high and w_vec carries
// one weight row per cycle; rows shift down, so the row presented first ends in the
// bottom PE row. Computing: each cycle with in_valid high, a_vec carries one input
// vector (element k meets weight row k). The vector is staggered by the input skew
// buffer (element k delayed k cycles), its partial sums flow down the columns, and the
// bottom-row results are realigned by the output skew buffer. The complete output
// vector appears on out_vec with out_valid exactly 2N-1 cycles after the input vector,
// and one vector can enter per cycle.
// OS (mode = MODE_OS). Each cycle with in_valid high, a_vec (one activation per row)
// and w_vec (one weight per column) are broadcast and every PE (r, c) adds
// a_vec[r] * w_vec[c] into its sum; os_clear with the first pair starts new sums. After
// the last pair, os_drain is held for N cycles: during drain cycle d the array presents
// sum row N-1-d on out_vec (out_valid = os_drain), bottom row first.
// The skew buffers are used in WS only; in OS the array inputs and outputs bypass them.
// Which signals are registered, the 2N-1 latency and the drain order follow from this
// design's choices of skew and drain; the source fixes the two dataflows themselves.
module systolic_array
  import cdm_qta_pkg::*;
#(
  parameter int unsigned N = 64
) (
  input  logic          clk,
  input  logic          rst_n,
  input  mode_e         mode,
  input  logic          w_shift,
  input  data_t [N-1:0] w_vec,
  input  logic          in_valid,
  input  data_t [N-1:0] a_vec,
  input  logic          os_clear,
  input  logic          os_drain,
  output logic          out_valid,
  output acc_t  [N-1:0] out_vec
);

  localparam int unsigned WS_LAT = 2 * N - 1;

  data_t [N-1:0] a_skewed;
  data_t [N-1:0] a_left;
  acc_t  [N-1:0] bottom;
  acc_t  [N-1:0] aligned;
  logic  [WS_LAT-1:0] vpipe;

  skew_buffer #(.N(N), .WIDTH(DATA_W), .REVERSE(1'b0)) u_in_skew (
    .clk  (clk),
    .din  (a_vec),
    .dout (a_skewed)
  );

  assign a_left = (mode == MODE_OS) ? a_vec : a_skewed;

  pe_array #(.N(N)) u_array (
    .clk         (clk),
    .rst_n       (rst_n),
    .mode        (mode),
    .w_shift     (w_shift && (mode == MODE_WS)),
    .os_en       (in_valid && (mode == MODE_OS)),
    .os_clear    (os_clear),
    .os_drain    (os_drain && (mode == MODE_OS)),
    .a_left      (a_left),
    .w_top       (w_vec),
    .psum_bottom (bottom)
  );

  skew_buffer #(.N(N), .WIDTH(ACC_W), .REVERSE(1'b1)) u_out_align (
    .clk  (clk),
    .din  (bottom),
    .dout (aligned)
  );

  // Valid bit that travels with a WS input vector to its aligned output.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[WS_LAT-2:0], in_valid && (mode == MODE_WS)};
  end

  assign out_valid = (mode == MODE_OS) ? os_drain : vpipe[WS_LAT-1];
  assign out_vec   = (mode == MODE_OS) ? bottom : aligned;

endmodule
