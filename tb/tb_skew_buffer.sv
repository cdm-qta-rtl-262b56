// tb_skew_buffer: checks both directions of the per-lane delay line. Random vectors
// are applied every cycle; lane i of the output must equal lane i of the input applied
// i cycles earlier (REVERSE = 0) or N-1-i cycles earlier (REVERSE = 1). The history of
// applied inputs is kept in the testbench.
module tb_skew_buffer;
  localparam int N = 6;
  localparam int W = 12;

  logic clk = 1'b0;
  logic [N-1:0][W-1:0] din, dout_f, dout_r;
  logic [N-1:0][W-1:0] hist [64];
  int checks = 0, failures = 0;

  skew_buffer #(.N(N), .WIDTH(W), .REVERSE(1'b0)) dut_f (.clk, .din, .dout(dout_f));
  skew_buffer #(.N(N), .WIDTH(W), .REVERSE(1'b1)) dut_r (.clk, .din, .dout(dout_r));

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 60; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) din[i] = W'($urandom);
      hist[t] = din;
      #1;
      if (t >= N) begin
        for (int i = 0; i < N; i++) begin
          checks += 2;
          if (dout_f[i] !== hist[t-i][i]) begin
            failures++; $display("FAIL fwd t=%0d lane %0d", t, i);
          end
          if (dout_r[i] !== hist[t-(N-1-i)][i]) begin
            failures++; $display("FAIL rev t=%0d lane %0d", t, i);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
