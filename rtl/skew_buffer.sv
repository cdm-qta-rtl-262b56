// skew_buffer: per-lane delay line for N lanes of WIDTH bits.
//
// Lane i is delayed by i clock cycles (REVERSE = 0) or by N-1-i cycles (REVERSE = 1);
// a lane with delay 0 is a plain wire. The WS dataflow needs both: with REVERSE = 0 it
// staggers an input vector so that element i reaches array row i one cycle after
// element i-1 reached row i-1; with REVERSE = 1 it realigns the bottom-row outputs,
// which leave column c at c cycles after column 0, into one output vector. Aligning the
// outputs follows the source; the input stagger is the usual way to feed a systolic
// array and is this design's choice. The registers shift every cycle and have no reset:
// whatever they hold before valid data arrives is never marked valid downstream.
module skew_buffer #(
  parameter int unsigned N       = 64,
  parameter int unsigned WIDTH   = 8,
  parameter bit          REVERSE = 1'b0
) (
  input  logic                  clk,
  input  logic [N-1:0][WIDTH-1:0] din,
  output logic [N-1:0][WIDTH-1:0] dout
);

  for (genvar i = 0; i < N; i++) begin : g_lane
    localparam int unsigned D = REVERSE ? (N - 1 - i) : i;
    if (D == 0) begin : g_wire
      assign dout[i] = din[i];
    end else begin : g_delay
      logic [WIDTH-1:0] sr [D];
      always_ff @(posedge clk) begin
        sr[0] <= din[i];
        for (int unsigned k = 1; k < D; k++) sr[k] <= sr[k-1];
      end
      assign dout[i] = sr[D-1];
    end
  end

endmodule
