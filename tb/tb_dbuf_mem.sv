// tb_dbuf_mem: checks the double-buffered memory (4 lanes of 16 bits, 2 x 16 words).
// The testbench keeps its own copy of both banks. It fills the DRAM-side bank, swaps,
// reads it back on the array side while writing the other bank from the DRAM side in
// the same cycles, checks that the DRAM side never disturbs the array-side bank,
// exercises lane-wise accumulate-on-write (with wrap-around), and checks one-cycle
// read latency on both ports.
module tb_dbuf_mem;
  localparam int L = 4;
  localparam int LW = 16;
  localparam int D = 32;
  localparam int AW = 4;
  typedef logic [L-1:0][LW-1:0] word_t;

  logic clk = 1'b0;
  logic sel;
  logic core_re, core_we, core_acc, ext_re, ext_we;
  logic [AW-1:0] core_raddr, core_waddr, ext_addr;
  word_t core_rdata, core_wdata, ext_wdata, ext_rdata;
  word_t model [2][D/2];
  int checks = 0, failures = 0;

  dbuf_mem #(.LANES(L), .LANE_W(LW), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t rndw();
    word_t w;
    for (int l = 0; l < L; l++) w[l] = LW'($urandom);
    return w;
  endfunction

  task automatic chk(input string what, input word_t got, input word_t exp);
    checks++;
    if (got !== exp) begin
      failures++; $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    word_t w, s;
    sel = 0; core_re = 0; core_we = 0; core_acc = 0; ext_re = 0; ext_we = 0;
    core_raddr = '0; core_waddr = '0; ext_addr = '0; core_wdata = '0; ext_wdata = '0;
    // fill both banks through the DRAM side
    for (int b = 0; b < 2; b++) begin
      sel = ~b[0];
      for (int a = 0; a < D / 2; a++) begin
        @(negedge clk);
        ext_we = 1; ext_addr = AW'(a); ext_wdata = rndw(); model[b][a] = ext_wdata;
      end
      @(negedge clk); ext_we = 0;
    end
    // round of mixed traffic with swaps
    for (int round = 0; round < 6; round++) begin
      sel = round[0];
      for (int i = 0; i < 40; i++) begin
        int ra, wa, ea;
        logic do_ext_w;
        @(negedge clk);
        ra = $urandom_range(D/2-1); wa = $urandom_range(D/2-1); ea = $urandom_range(D/2-1);
        do_ext_w = $urandom_range(1);
        core_re = 1; core_raddr = AW'(ra);
        core_we = $urandom_range(1); core_acc = $urandom_range(1); core_waddr = AW'(wa);
        core_wdata = rndw();
        ext_re = ~do_ext_w; ext_we = do_ext_w; ext_addr = AW'(ea); ext_wdata = rndw();
        // expected read data: state before this edge
        w = model[sel][ra];
        s = model[~sel][ea];
        if (core_we) begin
          if (core_acc)
            for (int l = 0; l < L; l++) model[sel][wa][l] = model[sel][wa][l] + core_wdata[l];
          else model[sel][wa] = core_wdata;
        end
        if (ext_we) model[~sel][ea] = ext_wdata;
        @(posedge clk); #1;
        chk("core read", core_rdata, w);
        if (ext_re) chk("ext read", ext_rdata, s);
      end
      @(negedge clk); core_re = 0; core_we = 0; ext_we = 0; ext_re = 0;
    end
    // read data holds when no read is requested
    @(negedge clk); core_re = 1; core_raddr = 3;
    w = model[sel][3];
    @(negedge clk); core_re = 0; core_raddr = 5;
    @(negedge clk);
    chk("core read hold", core_rdata, w);
    // final sweep of both banks from the DRAM side
    for (int b = 0; b < 2; b++) begin
      sel = ~b[0];
      for (int a = 0; a < D / 2; a++) begin
        @(negedge clk); ext_re = 1; ext_addr = AW'(a);
        @(negedge clk); ext_re = 0;
        chk("final sweep", ext_rdata, model[b][a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
