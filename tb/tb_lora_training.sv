// tb_lora_training: one complete LoRA training step for a linear layer on the
// accelerator (N = 8), covering the forward, backward and weight-gradient GEMMs of the
// quantized training graph:
//   forward          X_A  = X * W_A                         (WS)
//   backward         dX_A = dY * W_B^T                      (WS)
//                    dX   = dY * W^T + q(dX_A) * W_A^T      (WS, then WS with k_len = R,
//                                                            accumulating)
//   weight gradient  dW_B = q(X_A)^T * dY                   (OS, reduction over the
//                    dW_A = X^T * q(dX_A)                    sequence, k_len = M)
// X is M x D1, W is D1 x D2, W_A is D1 x R, W_B is R x D2, dY is M x D2, with
// M = 2N (sequence), D1 = D2 = N and rank R = 3. q() is the host-side per-column INT8
// requantization S = max|x| / 127, q = round(x / S). The testbench writes operands
// through the DRAM-side ports, swaps them in, issues the tiles and compares every
// result with integer references computed here. The weight-gradient GEMMs are the
// thin, long-reduction shapes for which the OS dataflow is meant.
module tb_lora_training;
  import cdm_qta_pkg::*;
  localparam int N  = 8;
  localparam int IA_DEPTH = 256;
  localparam int W_DEPTH  = 256;
  localparam int O_DEPTH  = 256;
  localparam int IA_AW = $clog2(IA_DEPTH / 2);
  localparam int W_AW  = $clog2(W_DEPTH / 2);
  localparam int O_AW  = $clog2(O_DEPTH / 2);
  localparam int M  = 2 * N;
  localparam int D1 = N;
  localparam int D2 = N;
  localparam int R  = 3;
  // memory maps (bank-local word addresses)
  localparam int IA_X = 0, IA_DY = 16, IA_XAQ = 32, IA_DXAQ = 48;
  localparam int W_WA = 0, W_WBT = 16, W_WT = 32, W_WAT = 48, W_DY = 64, W_DXAQ = 80;
  localparam int O_XA = 0, O_DXA = 16, O_DX = 32, O_DWB = 48, O_DWA = 56;

  logic clk = 1'b0;
  logic rst_n;
  logic instr_valid, instr_ready, busy, done;
  instr_t instr;
  logic ia_ext_re, ia_ext_we, w_ext_re, w_ext_we, oa_ext_re, oa_ext_we;
  logic [IA_AW-1:0] ia_ext_addr;
  logic [W_AW-1:0]  w_ext_addr;
  logic [O_AW-1:0]  oa_ext_addr;
  data_t [N-1:0] ia_ext_wdata, ia_ext_rdata, w_ext_wdata, w_ext_rdata;
  acc_t  [N-1:0] oa_ext_wdata, oa_ext_rdata;

  cdm_qta_top #(.N(N), .IA_DEPTH(IA_DEPTH), .W_DEPTH(W_DEPTH), .O_DEPTH(O_DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int X [M][D1], W [D1][D2], WA [D1][R], WB [R][D2], dY [M][D2];
  int XA [M][R], XAq [M][R], dXA [M][R], dXAq [M][R];
  int n_ws = 0, n_os = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd8();
    return $signed(8'($urandom));
  endfunction

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic ia_write(input int addr, input data_t [N-1:0] d);
    @(negedge clk); ia_ext_we = 1; ia_ext_addr = IA_AW'(addr); ia_ext_wdata = d;
    @(negedge clk); ia_ext_we = 0;
  endtask
  task automatic w_write(input int addr, input data_t [N-1:0] d);
    @(negedge clk); w_ext_we = 1; w_ext_addr = W_AW'(addr); w_ext_wdata = d;
    @(negedge clk); w_ext_we = 0;
  endtask
  task automatic oa_read(input int addr, output acc_t [N-1:0] d);
    @(negedge clk); oa_ext_re = 1; oa_ext_addr = O_AW'(addr);
    @(negedge clk); oa_ext_re = 0; d = oa_ext_rdata;
  endtask

  task automatic run(input opcode_e op, input int ib, wb, ob, kl, ml, input logic acc,
                     input logic [2:0] mask);
    instr_t i;
    i = '0; i.op = op; i.i_base = FIELD_W'(ib); i.w_base = FIELD_W'(wb); i.o_base = FIELD_W'(ob);
    i.k_len = FIELD_W'(kl); i.m_len = FIELD_W'(ml); i.acc = acc; i.swap_mask = mask;
    @(negedge clk); instr = i; instr_valid = 1;
    while (!instr_ready) @(negedge clk);
    @(negedge clk); instr_valid = 0;
    while (!instr_ready || busy) @(negedge clk);
    if (op == OP_WS) n_ws++;
    if (op == OP_OS) n_os++;
  endtask

  // per-column requantization to INT8, round half away from zero
  function automatic int quant(input int v, input int mx);
    longint num;
    num = longint'(v) * 127;
    return int'((num >= 0) ? (num + mx / 2) / mx : -((-num + mx / 2) / mx));
  endfunction

  // all input-activation words: X, dY, q(X_A), q(dX_A)
  task automatic load_iact(input bit with_q);
    data_t [N-1:0] d;
    for (int m = 0; m < M; m++) begin
      for (int l = 0; l < N; l++) d[l] = data_t'(X[m][l]);
      ia_write(IA_X + m, d);
      for (int l = 0; l < N; l++) d[l] = data_t'(dY[m][l]);
      ia_write(IA_DY + m, d);
      if (with_q) begin
        for (int l = 0; l < N; l++) d[l] = (l < R) ? data_t'(XAq[m][l]) : data_t'(0);
        ia_write(IA_XAQ + m, d);
        for (int l = 0; l < N; l++) d[l] = (l < R) ? data_t'(dXAq[m][l]) : data_t'($urandom);
        ia_write(IA_DXAQ + m, d);
      end
    end
  endtask
  // all weight words: W_A, W_B^T, W^T, W_A^T, dY, q(dX_A)
  task automatic load_wgt(input bit with_q);
    data_t [N-1:0] d;
    for (int k = 0; k < N; k++) begin
      for (int c = 0; c < N; c++) d[c] = (c < R) ? data_t'(WA[k][c]) : data_t'(0);
      w_write(W_WA + k, d);
      for (int c = 0; c < N; c++) d[c] = (c < R) ? data_t'(WB[c][k]) : data_t'(0);
      w_write(W_WBT + k, d);
      for (int c = 0; c < N; c++) d[c] = data_t'(W[c][k]);
      w_write(W_WT + k, d);
      for (int c = 0; c < N; c++) d[c] = (k < R) ? data_t'(WA[c][k]) : data_t'($urandom);
      w_write(W_WAT + k, d);
    end
    for (int m = 0; m < M; m++) begin
      for (int c = 0; c < N; c++) d[c] = data_t'(dY[m][c]);
      w_write(W_DY + m, d);
      if (with_q) begin
        for (int c = 0; c < N; c++) d[c] = (c < R) ? data_t'(dXAq[m][c]) : data_t'(0);
        w_write(W_DXAQ + m, d);
      end
    end
  endtask

  initial begin
    acc_t [N-1:0] o;
    int mx;
    longint e;
    rst_n = 0; instr_valid = 0; instr = '0;
    ia_ext_re = 0; ia_ext_we = 0; w_ext_re = 0; w_ext_we = 0; oa_ext_re = 0; oa_ext_we = 0;
    ia_ext_addr = '0; w_ext_addr = '0; oa_ext_addr = '0;
    ia_ext_wdata = '0; w_ext_wdata = '0; oa_ext_wdata = '0;
    for (int m = 0; m < M; m++) for (int k = 0; k < D1; k++) X[m][k] = rnd8();
    for (int m = 0; m < M; m++) for (int c = 0; c < D2; c++) dY[m][c] = rnd8();
    for (int k = 0; k < D1; k++) for (int c = 0; c < D2; c++) W[k][c] = rnd8();
    for (int k = 0; k < D1; k++) for (int j = 0; j < R; j++) WA[k][j] = rnd8();
    for (int j = 0; j < R; j++) for (int c = 0; c < D2; c++) WB[j][c] = rnd8();
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- forward and first backward GEMMs ----
    load_iact(0);
    load_wgt(0);
    run(OP_SWAP, 0, 0, 0, 0, 0, 0, 3'b011);
    run(OP_WS, IA_X, W_WA, O_XA, D1, M, 0, 0);     // X_A  = X * W_A
    run(OP_WS, IA_DY, W_WBT, O_DXA, D2, M, 0, 0);  // dX_A = dY * W_B^T
    run(OP_WS, IA_DY, W_WT, O_DX, D2, M, 0, 0);    // dX   = dY * W^T
    run(OP_SWAP, 0, 0, 0, 0, 0, 0, 3'b100);
    for (int m = 0; m < M; m++) begin
      oa_read(O_XA + m, o);
      for (int j = 0; j < R; j++) begin
        e = 0; for (int k = 0; k < D1; k++) e += X[m][k] * WA[k][j];
        chk("X_A", o[j], e); XA[m][j] = int'(o[j]);
      end
      oa_read(O_DXA + m, o);
      for (int j = 0; j < R; j++) begin
        e = 0; for (int c = 0; c < D2; c++) e += dY[m][c] * WB[j][c];
        chk("dX_A", o[j], e); dXA[m][j] = int'(o[j]);
      end
    end
    for (int j = 0; j < R; j++) begin
      int mx2;
      mx = 1; mx2 = 1;
      for (int m = 0; m < M; m++) begin
        if ((XA[m][j] < 0 ? -XA[m][j] : XA[m][j]) > mx) mx = (XA[m][j] < 0 ? -XA[m][j] : XA[m][j]);
        if ((dXA[m][j] < 0 ? -dXA[m][j] : dXA[m][j]) > mx2) mx2 = (dXA[m][j] < 0 ? -dXA[m][j] : dXA[m][j]);
      end
      for (int m = 0; m < M; m++) begin
        XAq[m][j] = quant(XA[m][j], mx);
        dXAq[m][j] = quant(dXA[m][j], mx2);
      end
    end
    run(OP_SWAP, 0, 0, 0, 0, 0, 0, 3'b100);

    // ---- requantized operands in, remaining GEMMs ----
    load_iact(1);
    load_wgt(1);
    run(OP_SWAP, 0, 0, 0, 0, 0, 0, 3'b011);
    run(OP_WS, IA_DXAQ, W_WAT, O_DX, R, M, 1, 0);  // dX += q(dX_A) * W_A^T
    run(OP_OS, IA_XAQ, W_DY, O_DWB, M, R, 0, 0);   // dW_B = q(X_A)^T * dY
    run(OP_OS, IA_X, W_DXAQ, O_DWA, M, D1, 0, 0);  // dW_A = X^T * q(dX_A)
    run(OP_SWAP, 0, 0, 0, 0, 0, 0, 3'b100);
    for (int m = 0; m < M; m++) begin
      oa_read(O_DX + m, o);
      for (int k = 0; k < D1; k++) begin
        e = 0;
        for (int c = 0; c < D2; c++) e += dY[m][c] * W[k][c];
        for (int j = 0; j < R; j++) e += dXAq[m][j] * WA[k][j];
        chk("dX", o[k], e);
      end
    end
    for (int j = 0; j < R; j++) begin
      oa_read(O_DWB + j, o);
      for (int c = 0; c < D2; c++) begin
        e = 0; for (int m = 0; m < M; m++) e += XAq[m][j] * dY[m][c];
        chk("dW_B", o[c], e);
      end
    end
    for (int k = 0; k < D1; k++) begin
      oa_read(O_DWA + k, o);
      for (int j = 0; j < R; j++) begin
        e = 0; for (int m = 0; m < M; m++) e += X[m][k] * dXAq[m][j];
        chk("dW_A", o[j], e);
      end
    end
    chk("WS tiles run", n_ws, 4);
    chk("OS tiles run", n_os, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
