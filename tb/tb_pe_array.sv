// tb_pe_array: checks the N x N PE grid (N = 5 here) in both dataflows with the
// testbench doing the input staggering itself.
// WS: weight rows are shifted in (last row first), then M input vectors are fed with
// element k delayed by k cycles; the bottom of column c must show Y[m][c] =
// sum_k X[m][k] * W[k][c] at cycle (start of vector m) + N + c.
// OS: K broadcast pairs (activation column, weight row) are accumulated, then the sums
// are drained for N cycles; drain cycle d must show row N-1-d of X * W.
// References are computed with integer loops over the random operands.
module tb_pe_array;
  import cdm_qta_pkg::*;
  localparam int N = 5;
  localparam int M = 7;
  localparam int K = 9;

  logic clk = 1'b0;
  logic rst_n;
  mode_e mode;
  logic w_shift, os_en, os_clear, os_drain;
  data_t [N-1:0] a_left, w_top;
  acc_t  [N-1:0] psum_bottom;
  int checks = 0, failures = 0;

  int X [M][N];
  int Wt [N][N];
  int XO [N][K];
  int WO [K][N];

  pe_array #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd8();
    return $signed(8'($urandom));
  endfunction

  initial begin
    int cyc, exp;
    rst_n = 0; mode = MODE_WS; w_shift = 0; os_en = 0; os_clear = 0; os_drain = 0;
    a_left = '0; w_top = '0;
    for (int m = 0; m < M; m++) for (int k = 0; k < N; k++) X[m][k] = rnd8();
    for (int k = 0; k < N; k++) for (int c = 0; c < N; c++) Wt[k][c] = rnd8();
    X[0][0] = -128; Wt[0][0] = -128;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---- WS: load weights, row N-1 first ----
    for (int i = 0; i < N; i++) begin
      for (int c = 0; c < N; c++) w_top[c] = data_t'(Wt[N-1-i][c]);
      w_shift = 1;
      @(negedge clk);
    end
    w_shift = 0;
    w_top = '0;
    // stream: global step t; row k gets X[t-k][k]; bottom col c at t' shows m = t'-N-c+1
    for (int t = 0; t < M + 2 * N + 2; t++) begin
      for (int k = 0; k < N; k++)
        a_left[k] = (t - k >= 0 && t - k < M) ? data_t'(X[t-k][k]) : data_t'($urandom);
      #1;
      // bottom of column c holds result of vector m = t - (N - 1) - c - 1 + ... computed at
      // step m + (N-1) + c, visible one cycle later
      for (int c = 0; c < N; c++) begin
        int m;
        m = t - N - c;
        if (m >= 0 && m < M) begin
          exp = 0;
          for (int k = 0; k < N; k++) exp += X[m][k] * Wt[k][c];
          checks++;
          if (psum_bottom[c] !== acc_t'(exp)) begin
            failures++; $display("FAIL ws m=%0d c=%0d got %0d exp %0d", m, c, psum_bottom[c], exp);
          end
        end
      end
      @(negedge clk);
    end
    // ---- OS ----
    mode = MODE_OS;
    for (int r = 0; r < N; r++) for (int k = 0; k < K; k++) XO[r][k] = rnd8();
    for (int k = 0; k < K; k++) for (int c = 0; c < N; c++) WO[k][c] = rnd8();
    for (int k = 0; k < K; k++) begin
      for (int r = 0; r < N; r++) a_left[r] = data_t'(XO[r][k]);
      for (int c = 0; c < N; c++) w_top[c] = data_t'(WO[k][c]);
      os_en = 1; os_clear = (k == 0);
      @(negedge clk);
      // an idle cycle in between must not change the sums
      os_en = 0; os_clear = 0; a_left = '1; w_top = '1;
      @(negedge clk);
    end
    os_drain = 1;
    for (int d = 0; d < N; d++) begin
      #1;
      for (int c = 0; c < N; c++) begin
        exp = 0;
        for (int k = 0; k < K; k++) exp += XO[N-1-d][k] * WO[k][c];
        checks++;
        if (psum_bottom[c] !== acc_t'(exp)) begin
          failures++; $display("FAIL os row=%0d c=%0d got %0d exp %0d", N-1-d, c, psum_bottom[c], exp);
        end
      end
      @(negedge clk);
    end
    os_drain = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
