// tb_cdm_qta_full: the end-to-end LoRA forward-pass test of tb_cdm_qta_top, run on the
// accelerator at its default size (64 x 64 array, 512 KB + 512 KB + 1 MB of memory).
// The test computes
//   Y = X * W + q(X * A) * B^T,
// with X (M x D1), W (D1 x D2), A (D1 x R), B (D2 x R), INT8 operands, D1 = 2N,
// D2 = N, M = N + 3 and rank R = 3. The testbench plays the host and the DRAM: it
// writes operands through the DRAM-side ports into the banks the array is not using,
// issues instructions, and reads results back.
//  1. load X (WS layout and OS layout), W and A; swap the banks in;
//  2. OS tiles: X*A for rows 0..N-1 and for the remaining M-N rows (partial tile);
//  3. WS tiles: X*W over two reduction chunks, the second accumulating into the first;
//     while they run, B^T is loaded into the idle weight bank (overlapped load);
//  4. swap the output banks, read X*A, requantize it per column on the host
//     (S = max|x| / 127, q = round(x / S)), swap back, load q(X*A), swap in B^T;
//  5. WS tile with k_len = R (weight rows R..N-1 zeroed, they hold random data) that
//     accumulates q(X*A) * B^T into Y; swap and read Y and compare with the reference.
// Every tile's `done` cycle is checked against the controller's cycle formula. Each
// mechanism (WS tile, OS tile, partial OS tile, zeroed weight rows, accumulate writes,
// bank swaps, DRAM-side traffic while the array is busy) is counted, and a mechanism
// that never happened counts as a failure.
module tb_cdm_qta_full;
  import cdm_qta_pkg::*;
  // must equal the defaults of cdm_qta_top, which is instantiated without overrides
  localparam int N  = 64;
  localparam int IA_DEPTH = 8192;
  localparam int W_DEPTH  = 8192;
  localparam int O_DEPTH  = 4096;
  localparam int IA_AW = $clog2(IA_DEPTH / 2);
  localparam int W_AW  = $clog2(W_DEPTH / 2);
  localparam int O_AW  = $clog2(O_DEPTH / 2);
  localparam int WATCHDOG = 200000;

  localparam int D1 = 2 * N;
  localparam int D2 = N;
  localparam int M  = N + 3;
  localparam int R  = 3;
  // memory map (bank-local word addresses)
  localparam int IA_XWS0 = 0;           // X[m][0..N-1]
  localparam int IA_XWS1 = M;           // X[m][N..2N-1]
  localparam int IA_XOS0 = 2 * M;       // X[0..N-1][k]
  localparam int IA_XOS1 = 2 * M + D1;  // X[N..M-1][k]
  localparam int W_W0 = 0;              // W[k][..], k < N
  localparam int W_W1 = N;              // W[k][..], k >= N
  localparam int W_A  = 2 * N;          // A[k][0..R-1]
  localparam int O_Y  = 0;              // Y[m][..]
  localparam int O_XA = M;              // (X*A)[m][..]
  localparam int O_SENT = 2 * M;        // word after X*A, must stay untouched

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

  cdm_qta_top dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  int done_cycle = -1;
  int X [M][D1];
  int W [D1][D2];
  int A [D1][R];
  int B [D2][R];
  int XA [M][R];
  int XAq [M][R];
  longint Yref [M][D2];

  // mechanism counters
  int n_ws = 0, n_os = 0, n_os_partial = 0, n_zero_rows = 0, n_acc_writes = 0;
  int n_swaps = 0, n_overlap = 0;

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (done) done_cycle <= cycle;
    if (rst_n) begin
      if (dut.w_shift && dut.w_zero) n_zero_rows++;
      if (dut.oa_we && dut.oa_acc) n_acc_writes++;
      if (busy && (ia_ext_we || w_ext_we || oa_ext_re)) n_overlap++;
    end
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
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
    @(negedge clk);
    ia_ext_we = 1; ia_ext_addr = IA_AW'(addr); ia_ext_wdata = d;
    @(negedge clk);
    ia_ext_we = 0;
  endtask
  task automatic w_write(input int addr, input data_t [N-1:0] d);
    @(negedge clk);
    w_ext_we = 1; w_ext_addr = W_AW'(addr); w_ext_wdata = d;
    @(negedge clk);
    w_ext_we = 0;
  endtask
  task automatic oa_write(input int addr, input acc_t [N-1:0] d);
    @(negedge clk);
    oa_ext_we = 1; oa_ext_addr = O_AW'(addr); oa_ext_wdata = d;
    @(negedge clk);
    oa_ext_we = 0;
  endtask
  task automatic oa_read(input int addr, output acc_t [N-1:0] d);
    @(negedge clk);
    oa_ext_re = 1; oa_ext_addr = O_AW'(addr);
    @(negedge clk);
    oa_ext_re = 0;
    d = oa_ext_rdata;
  endtask

  // Offer an instruction and return once it is accepted.
  task automatic issue(input instr_t i, output int t0);
    @(negedge clk);
    instr = i; instr_valid = 1;
    while (!instr_ready) @(negedge clk);
    t0 = cycle;
    @(negedge clk);
    instr_valid = 0;
  endtask
  task automatic wait_idle();
    while (!instr_ready || busy) @(negedge clk);
    @(negedge clk);   // done is sampled at the clock edge that ends the first idle cycle
  endtask
  task automatic swap(input logic [2:0] mask);
    instr_t i;
    int t0;
    i = '0; i.op = OP_SWAP; i.swap_mask = mask;
    issue(i, t0);
    n_swaps++;
  endtask
  task automatic ws_tile(input int ib, wb, ob, kl, ml, input logic acc, input bit overlap_load);
    instr_t i;
    int t0;
    i = '0; i.op = OP_WS; i.i_base = FIELD_W'(ib); i.w_base = FIELD_W'(wb);
    i.o_base = FIELD_W'(ob); i.k_len = FIELD_W'(kl); i.m_len = FIELD_W'(ml); i.acc = acc;
    issue(i, t0);
    if (overlap_load) load_bt();
    wait_idle();
    chk("WS tile done cycle", done_cycle - t0, 3 * N + ml + 1);
    n_ws++;
  endtask
  task automatic os_tile(input int ib, wb, ob, kl, ml, input logic acc);
    instr_t i;
    int t0;
    i = '0; i.op = OP_OS; i.i_base = FIELD_W'(ib); i.w_base = FIELD_W'(wb);
    i.o_base = FIELD_W'(ob); i.k_len = FIELD_W'(kl); i.m_len = FIELD_W'(ml); i.acc = acc;
    issue(i, t0);
    wait_idle();
    chk("OS tile done cycle", done_cycle - t0, kl + N + 1);
    n_os++;
    if (ml < N) n_os_partial++;
  endtask

  // B^T into the idle weight bank: word k = B[0..D2-1][k] for k < R, random for k >= R
  task automatic load_bt();
    data_t [N-1:0] d;
    for (int k = 0; k < N; k++) begin
      for (int c = 0; c < N; c++) d[c] = (k < R) ? data_t'(B[c][k]) : data_t'($urandom);
      w_write(k, d);
    end
  endtask

  initial begin
    data_t [N-1:0] d;
    acc_t  [N-1:0] o;
    int mx;
    rst_n = 0; instr_valid = 0; instr = '0;
    ia_ext_re = 0; ia_ext_we = 0; w_ext_re = 0; w_ext_we = 0; oa_ext_re = 0; oa_ext_we = 0;
    ia_ext_addr = '0; w_ext_addr = '0; oa_ext_addr = '0;
    ia_ext_wdata = '0; w_ext_wdata = '0; oa_ext_wdata = '0;
    for (int m = 0; m < M; m++) for (int k = 0; k < D1; k++) X[m][k] = rnd8();
    for (int k = 0; k < D1; k++) for (int c = 0; c < D2; c++) W[k][c] = rnd8();
    for (int k = 0; k < D1; k++) for (int j = 0; j < R; j++) A[k][j] = rnd8();
    for (int c = 0; c < D2; c++) for (int j = 0; j < R; j++) B[c][j] = rnd8();
    X[0][0] = -128; W[0][0] = -128;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- 1. load operands into the DRAM-side banks ----
    for (int m = 0; m < M; m++) begin
      for (int l = 0; l < N; l++) d[l] = data_t'(X[m][l]);
      ia_write(IA_XWS0 + m, d);
      for (int l = 0; l < N; l++) d[l] = data_t'(X[m][N + l]);
      ia_write(IA_XWS1 + m, d);
    end
    for (int k = 0; k < D1; k++) begin
      for (int r = 0; r < N; r++) d[r] = data_t'(X[r][k]);
      ia_write(IA_XOS0 + k, d);
      for (int r = 0; r < N; r++) d[r] = (N + r < M) ? data_t'(X[N + r][k]) : data_t'($urandom);
      ia_write(IA_XOS1 + k, d);
    end
    for (int k = 0; k < D1; k++) begin
      for (int c = 0; c < N; c++) d[c] = data_t'(W[k][c]);
      w_write(k, d);   // W_W0 + k for k < N, W_W1 + k - N otherwise
      for (int c = 0; c < N; c++) d[c] = (c < R) ? data_t'(A[k][c]) : data_t'(0);
      w_write(W_A + k, d);
    end
    for (int l = 0; l < N; l++) o[l] = acc_t'(32'h5EA7_0000 + l);
    oa_write(O_SENT, o);
    swap(3'b111);

    // ---- 2. X*A on the OS dataflow ----
    os_tile(IA_XOS0, W_A, O_XA, D1, N, 1'b0);
    os_tile(IA_XOS1, W_A, O_XA + N, D1, M - N, 1'b0);

    // ---- 3. X*W on the WS dataflow, two reduction chunks; B^T loaded meanwhile ----
    ws_tile(IA_XWS0, W_W0, O_Y, N, M, 1'b0, 1'b1);
    ws_tile(IA_XWS1, W_W1, O_Y, N, M, 1'b1, 1'b0);

    // ---- 4. read X*A, requantize per column, reload ----
    swap(3'b100);
    for (int m = 0; m < M; m++) begin
      oa_read(O_XA + m, o);
      for (int j = 0; j < R; j++) begin
        longint e;
        e = 0;
        for (int k = 0; k < D1; k++) e += X[m][k] * A[k][j];
        XA[m][j] = int'(o[j]);
        chk("X*A", o[j], e);
      end
      for (int j = R; j < N; j++) chk("X*A zero column", o[j], 0);
    end
    oa_read(O_SENT, o);
    for (int l = 0; l < N; l++) chk("row beyond m_len untouched", o[l], 32'h5EA7_0000 + l);
    for (int j = 0; j < R; j++) begin
      mx = 1;
      for (int m = 0; m < M; m++) if ((XA[m][j] < 0 ? -XA[m][j] : XA[m][j]) > mx)
        mx = (XA[m][j] < 0 ? -XA[m][j] : XA[m][j]);
      for (int m = 0; m < M; m++) begin
        longint num;
        num = longint'(XA[m][j]) * 127;
        XAq[m][j] = int'((num >= 0) ? (num + mx / 2) / mx : -((-num + mx / 2) / mx));
      end
    end
    swap(3'b100);
    for (int m = 0; m < M; m++) begin
      for (int l = 0; l < N; l++) d[l] = (l < R) ? data_t'(XAq[m][l]) : data_t'($urandom);
      ia_write(m, d);
    end
    swap(3'b011);

    // ---- 5. Y += q(X*A) * B^T with only R of the N weight rows live ----
    ws_tile(0, 0, O_Y, R, M, 1'b1, 1'b0);
    swap(3'b100);
    for (int m = 0; m < M; m++) for (int c = 0; c < D2; c++) begin
      Yref[m][c] = 0;
      for (int k = 0; k < D1; k++) Yref[m][c] += X[m][k] * W[k][c];
      for (int j = 0; j < R; j++) Yref[m][c] += XAq[m][j] * B[c][j];
    end
    for (int m = 0; m < M; m++) begin
      oa_read(O_Y + m, o);
      for (int c = 0; c < D2; c++) chk("Y", o[c], Yref[m][c]);
    end

    // ---- mechanisms ----
    $display("mechanisms: ws_tiles=%0d os_tiles=%0d os_partial=%0d zero_rows=%0d acc_writes=%0d swaps=%0d overlapped_dram_cycles=%0d",
             n_ws, n_os, n_os_partial, n_zero_rows, n_acc_writes, n_swaps, n_overlap);
    chk("mechanism WS tile", n_ws > 0, 1);
    chk("mechanism OS tile", n_os > 0, 1);
    chk("mechanism partial OS tile", n_os_partial > 0, 1);
    chk("mechanism zeroed weight rows", n_zero_rows > 0, 1);
    chk("mechanism accumulate writes", n_acc_writes > 0, 1);
    chk("mechanism bank swap", n_swaps > 0, 1);
    chk("mechanism DRAM traffic during compute", n_overlap > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
