// tb_systolic_array: checks the compute module (N = 6 here) in both dataflows.
// WS: N weight rows are shifted in, then M input vectors are applied back to back, one
// per cycle. Each must come out as one aligned vector Y[m] = X[m] * W exactly 2N-1
// cycles after it entered, in order, one per cycle (full throughput).
// OS: K (activation column, weight row) pairs are applied with gaps, then the sums are
// drained; drain cycle d must present row N-1-d of X * W with out_valid high.
// Expected values are computed with integer loops in the testbench.
module tb_systolic_array;
  import cdm_qta_pkg::*;
  localparam int N = 6;
  localparam int M = 11;
  localparam int K = 13;

  logic clk = 1'b0;
  logic rst_n;
  mode_e mode;
  logic w_shift, in_valid, os_clear, os_drain, out_valid;
  data_t [N-1:0] w_vec, a_vec;
  acc_t  [N-1:0] out_vec;
  int checks = 0, failures = 0;
  int cycle = 0;

  int X [M][N];
  int Wt [N][N];
  int XO [N][K];
  int WO [K][N];
  int in_cycle [M];
  int n_out = 0;

  systolic_array #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd8();
    return $signed(8'($urandom));
  endfunction

  // WS output monitor
  always @(negedge clk) begin
    if (rst_n && mode == MODE_WS && out_valid) begin
      checks++;
      if (n_out >= M) begin
        failures++; $display("FAIL ws extra output");
      end else begin
        if (cycle - in_cycle[n_out] != 2 * N - 1) begin
          failures++;
          $display("FAIL ws latency of vector %0d: %0d cycles", n_out, cycle - in_cycle[n_out]);
        end
        for (int c = 0; c < N; c++) begin
          int exp;
          exp = 0;
          for (int k = 0; k < N; k++) exp += X[n_out][k] * Wt[k][c];
          checks++;
          if (out_vec[c] !== acc_t'(exp)) begin
            failures++; $display("FAIL ws m=%0d c=%0d got %0d exp %0d", n_out, c, out_vec[c], exp);
          end
        end
      end
      n_out++;
    end
  end

  initial begin
    rst_n = 0; mode = MODE_WS; w_shift = 0; in_valid = 0; os_clear = 0; os_drain = 0;
    a_vec = '0; w_vec = '0;
    for (int m = 0; m < M; m++) for (int k = 0; k < N; k++) X[m][k] = rnd8();
    for (int k = 0; k < N; k++) for (int c = 0; c < N; c++) Wt[k][c] = rnd8();
    X[0][N-1] = -128; Wt[N-1][0] = -128;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      for (int c = 0; c < N; c++) w_vec[c] = data_t'(Wt[N-1-i][c]);
      w_shift = 1;
      @(negedge clk);
    end
    w_shift = 0; w_vec = '1;
    for (int m = 0; m < M; m++) begin
      for (int k = 0; k < N; k++) a_vec[k] = data_t'(X[m][k]);
      in_valid = 1;
      in_cycle[m] = cycle;
      @(negedge clk);
    end
    in_valid = 0; a_vec = '1;
    repeat (3 * N) @(negedge clk);
    checks++;
    if (n_out != M) begin
      failures++; $display("FAIL ws got %0d outputs", n_out);
    end
    // ---- OS ----
    mode = MODE_OS;
    for (int r = 0; r < N; r++) for (int k = 0; k < K; k++) XO[r][k] = rnd8();
    for (int k = 0; k < K; k++) for (int c = 0; c < N; c++) WO[k][c] = rnd8();
    for (int k = 0; k < K; k++) begin
      for (int r = 0; r < N; r++) a_vec[r] = data_t'(XO[r][k]);
      for (int c = 0; c < N; c++) w_vec[c] = data_t'(WO[k][c]);
      in_valid = 1; os_clear = (k == 0);
      @(negedge clk);
      in_valid = 0; os_clear = 0; a_vec = '1; w_vec = '1;
      if (k % 3 == 0) @(negedge clk);
    end
    os_drain = 1;
    for (int d = 0; d < N; d++) begin
      #1;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL os out_valid low"); end
      for (int c = 0; c < N; c++) begin
        int exp;
        exp = 0;
        for (int k = 0; k < K; k++) exp += XO[N-1-d][k] * WO[k][c];
        checks++;
        if (out_vec[c] !== acc_t'(exp)) begin
          failures++; $display("FAIL os row=%0d c=%0d got %0d exp %0d", N-1-d, c, out_vec[c], exp);
        end
      end
      @(negedge clk);
    end
    os_drain = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
