// tb_pe: self-checking test of one processing element.
// WS: loads a weight, then applies random activations and partial sums and checks
// psum_out = psum_in + a*w one cycle later and the registered activation hop.
// OS: accumulates a random sequence of products (with os_clear on the first), checks
// the running sum, then checks that os_drain replaces the sum by psum_in. Reference
// values are computed here from the stimulus with plain integer arithmetic.
module tb_pe;
  import cdm_qta_pkg::*;

  logic  clk = 1'b0;
  logic  rst_n;
  mode_e mode;
  logic  w_shift, os_en, os_clear, os_drain;
  data_t a_in, a_out, w_in, w_out;
  acc_t  psum_in, psum_out;
  int    checks = 0, failures = 0;

  pe dut (.*);

  always #5 clk = ~clk;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w, a, p, expsum;
    rst_n = 1'b0; mode = MODE_WS; w_shift = 0; os_en = 0; os_clear = 0; os_drain = 0;
    a_in = '0; w_in = '0; psum_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // ---- WS ----
    for (int t = 0; t < 4; t++) begin
      w = $signed(8'($urandom));
      if (t == 0) w = -128;
      @(negedge clk); w_in = data_t'(w); w_shift = 1'b1;
      @(negedge clk); w_shift = 1'b0; w_in = data_t'($urandom);  // w_in must not matter now
      check("ws w_out", w_out, w);
      for (int i = 0; i < 20; i++) begin
        a = $signed(8'($urandom)); p = $signed($urandom);
        if (i == 0) begin a = -128; end
        a_in = data_t'(a); psum_in = acc_t'(p);
        @(negedge clk);
        check("ws psum_out", psum_out, acc_t'(p + a * w));
        check("ws a_out", a_out, a);
      end
    end
    // ---- OS ----
    mode = MODE_OS;
    for (int t = 0; t < 3; t++) begin
      expsum = 0;
      for (int k = 0; k < 30; k++) begin
        a = $signed(8'($urandom)); w = $signed(8'($urandom));
        @(negedge clk);
        a_in = data_t'(a); w_in = data_t'(w); os_en = 1'b1; os_clear = (k == 0);
        psum_in = acc_t'($urandom);  // ignored while accumulating
        expsum = (k == 0 ? 0 : expsum) + a * w;
        @(negedge clk);
        os_en = 1'b0; os_clear = 1'b0;
        check("os sum", psum_out, expsum);
        // an idle cycle keeps the sum
        @(negedge clk);
        check("os hold", psum_out, expsum);
      end
      p = $signed($urandom);
      psum_in = acc_t'(p); os_drain = 1'b1;
      @(negedge clk);
      os_drain = 1'b0;
      check("os drain", psum_out, p);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
