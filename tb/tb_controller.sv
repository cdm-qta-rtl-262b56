// tb_controller: checks the instruction sequencing of the control module (N = 4).
// The testbench stands in for the compute module: it returns arr_out_valid 2N-1 cycles
// after each WS in_valid. For every instruction it records the controller's memory
// reads, array strobes and output writes and compares them with the sequence the
// instruction defines: weight-row addresses (last row first) and zeroed rows, input
// addresses, OS step addresses with os_clear on the first step, N drain cycles, output
// write addresses (rows >= m_len skipped in OS), the acc flag, bank swaps, and the
// cycle in which `done` pulses (3N + m_len + 1 for WS, k_len + N + 1 for OS).
module tb_controller;
  import cdm_qta_pkg::*;
  localparam int N = 4;
  localparam int AW = 8;

  logic clk = 1'b0;
  logic rst_n;
  logic instr_valid, instr_ready, busy, done;
  instr_t instr;
  logic sel_iact, sel_wgt, sel_oact;
  logic ia_re, w_re;
  logic [AW-1:0] ia_raddr, w_raddr, oa_waddr;
  mode_e mode;
  logic w_shift, w_zero, in_valid, os_clear, os_drain, arr_out_valid;
  logic oa_we, oa_acc;
  logic [2*N-2:0] vdly;
  int checks = 0, failures = 0;
  int cycle = 0;

  controller #(.N(N), .IA_AW(AW), .W_AW(AW), .O_AW(AW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // stand-in for the array's WS latency
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vdly <= '0;
    else        vdly <= {vdly[2*N-3:0], in_valid && mode == MODE_WS};
  assign arr_out_valid = (mode == MODE_WS) ? vdly[2*N-2] : os_drain;

  // event logs
  int w_rd [$], ia_rd [$], shifts [$], zeros [$], ivals [$], clears [$], drains [$];
  int oa_wr [$], accs [$];
  int done_cycle;

  always @(posedge clk) if (rst_n) begin
    if (w_re) w_rd.push_back(int'(w_raddr));
    if (ia_re) ia_rd.push_back(int'(ia_raddr));
    if (w_shift) begin shifts.push_back(cycle); zeros.push_back(int'(w_zero)); end
    if (in_valid) begin ivals.push_back(cycle); clears.push_back(int'(os_clear)); end
    if (os_drain) drains.push_back(cycle);
    if (oa_we) begin oa_wr.push_back(int'(oa_waddr)); accs.push_back(int'(oa_acc)); end
    if (done) done_cycle = cycle;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic clear_logs();
    w_rd.delete(); ia_rd.delete(); shifts.delete(); zeros.delete(); ivals.delete();
    clears.delete(); drains.delete(); oa_wr.delete(); accs.delete(); done_cycle = -1;
  endtask

  // issue one instruction, return the cycle in which it was accepted
  task automatic issue(input instr_t i, output int acc_cycle);
    @(negedge clk);
    instr = i; instr_valid = 1;
    // hold for a random number of cycles first when the controller is busy
    while (!instr_ready) @(negedge clk);
    acc_cycle = cycle;
    @(negedge clk);
    instr_valid = 0; instr = instr_t'($urandom);
  endtask

  task automatic run_ws(input int ib, wb, ob, kl, ml, input logic acc);
    instr_t i;
    int t0;
    i = '0; i.op = OP_WS; i.i_base = FIELD_W'(ib); i.w_base = FIELD_W'(wb); i.o_base = FIELD_W'(ob);
    i.k_len = FIELD_W'(kl); i.m_len = FIELD_W'(ml); i.acc = acc;
    clear_logs();
    issue(i, t0);
    while (!instr_ready) @(negedge clk);
    @(negedge clk);
    chk("ws weight reads", w_rd.size(), N);
    foreach (w_rd[j]) chk("ws weight addr", w_rd[j], wb + N - 1 - j);
    chk("ws shifts", shifts.size(), N);
    foreach (shifts[j]) chk("ws shift cycle", shifts[j], t0 + 2 + j);
    foreach (zeros[j]) chk("ws zero row", zeros[j], int'((N - 1 - j) >= kl));
    chk("ws input reads", ia_rd.size(), ml);
    foreach (ia_rd[j]) chk("ws input addr", ia_rd[j], ib + j);
    chk("ws in_valid", ivals.size(), ml);
    foreach (ivals[j]) chk("ws in_valid cycle (one per cycle)", ivals[j], t0 + N + 2 + j);
    chk("ws writes", oa_wr.size(), ml);
    foreach (oa_wr[j]) begin chk("ws write addr", oa_wr[j], ob + j); chk("ws acc", accs[j], int'(acc)); end
    chk("ws done cycle", done_cycle - t0, 3 * N + ml + 1);
  endtask

  task automatic run_os(input int ib, wb, ob, kl, ml, input logic acc);
    instr_t i;
    int t0, nw;
    i = '0; i.op = OP_OS; i.i_base = FIELD_W'(ib); i.w_base = FIELD_W'(wb); i.o_base = FIELD_W'(ob);
    i.k_len = FIELD_W'(kl); i.m_len = FIELD_W'(ml); i.acc = acc;
    clear_logs();
    issue(i, t0);
    while (!instr_ready) @(negedge clk);
    repeat (2) @(negedge clk);
    chk("os weight reads", w_rd.size(), kl);
    foreach (w_rd[j]) chk("os weight addr", w_rd[j], wb + j);
    chk("os input reads", ia_rd.size(), kl);
    foreach (ia_rd[j]) chk("os input addr", ia_rd[j], ib + j);
    chk("os shifts", shifts.size(), 0);
    chk("os in_valid", ivals.size(), kl);
    foreach (ivals[j]) begin
      chk("os step cycle", ivals[j], t0 + 2 + j);
      chk("os clear", clears[j], int'(j == 0));
    end
    chk("os drains", drains.size(), N);
    foreach (drains[j]) chk("os drain cycle", drains[j], t0 + kl + 2 + j);
    nw = 0;
    for (int r = N - 1; r >= 0; r--) if (r < ml) begin
      if (nw < oa_wr.size()) begin
        chk("os write addr", oa_wr[nw], ob + r);
        chk("os acc", accs[nw], int'(acc));
      end
      nw++;
    end
    chk("os writes", oa_wr.size(), ml);
    chk("os done cycle", done_cycle - t0, kl + N + 1);
  endtask

  task automatic run_swap(input logic [2:0] mask);
    instr_t i;
    int t0;
    logic [2:0] prev_sel;
    prev_sel = {sel_oact, sel_wgt, sel_iact};
    i = '0; i.op = OP_SWAP; i.swap_mask = mask;
    issue(i, t0);
    chk("swap", int'({sel_oact, sel_wgt, sel_iact}), int'(prev_sel ^ mask));
  endtask

  initial begin
    rst_n = 0; instr_valid = 0; instr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    chk("reset sels", int'({sel_oact, sel_wgt, sel_iact}), 0);
    chk("ready in idle", int'(instr_ready), 1);
    run_ws(10, 20, 30, N, 5, 1'b0);
    run_ws(0, 7, 100, 2, 1, 1'b1);
    run_ws(3, 0, 50, 1, 9, 1'b0);
    run_os(40, 60, 80, 7, N, 1'b0);
    run_os(1, 2, 3, 1, 2, 1'b1);
    run_swap(3'b001);
    run_swap(3'b110);
    run_swap(3'b111);
    run_ws(5, 5, 5, 3, 3, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
