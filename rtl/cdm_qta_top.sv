// cdm_qta_top: accelerator for quantized (INT8) LoRA fine-tuning of diffusion models.
//
// It computes the GEMMs of the forward pass, the backward pass and the weight-gradient
// pass on one N x N systolic array (N = 64) that can run weight stationary (WS, inner
// product, good for long input sequences against a full weight tile) or output
// stationary (OS, outer product, good for thin tensors such as the rank-r LoRA
// factors). Software chooses the dataflow per GEMM through the instruction opcode.
// Blocks, as in the architecture figure of the source: controller, compute module
// (systolic_array), weight memory and input-activation memory (512 KB each, words of N
// INT8 values) and output-activation memory (1 MB, words of N 32-bit sums). All three
// memories are double buffered; their DRAM-side ports are the ext_* ports of this
// module, through which an external DMA engine or host fills the inputs and weights
// and reads back the results while the array works on the other bank.
// Data layout expected in the memories (a software convention of this design):
//  WS tile: weight word w_base+k = W[k][0..N-1]; input word i_base+m = X[m][0..N-1];
//  OS tile: weight word w_base+k = W[k][0..N-1]; input word i_base+k = X[0..N-1][k];
//  both: output word o_base+m = Y[m][0..N-1] as 32-bit sums.
// Rows k >= k_len of a WS weight tile are forced to zero here (w_zero). See the
// controller for the instruction set and cycle counts.
module cdm_qta_top
  import cdm_qta_pkg::*;
#(
  parameter int unsigned N        = 64,
  parameter int unsigned IA_DEPTH = 8192,   // 512 KB of N-byte words
  parameter int unsigned W_DEPTH  = 8192,   // 512 KB of N-byte words
  parameter int unsigned O_DEPTH  = 4096,   // 1 MB of N x 32-bit words
  parameter int unsigned IA_AW    = $clog2(IA_DEPTH / 2),
  parameter int unsigned W_AW     = $clog2(W_DEPTH / 2),
  parameter int unsigned O_AW     = $clog2(O_DEPTH / 2)
) (
  input  logic                clk,
  input  logic                rst_n,
  // instruction port
  input  logic                instr_valid,
  output logic                instr_ready,
  input  instr_t              instr,
  output logic                busy,
  output logic                done,
  // DRAM side of the input-activation memory
  input  logic                ia_ext_re,
  input  logic                ia_ext_we,
  input  logic [IA_AW-1:0]    ia_ext_addr,
  input  data_t [N-1:0]       ia_ext_wdata,
  output data_t [N-1:0]       ia_ext_rdata,
  // DRAM side of the weight memory
  input  logic                w_ext_re,
  input  logic                w_ext_we,
  input  logic [W_AW-1:0]     w_ext_addr,
  input  data_t [N-1:0]       w_ext_wdata,
  output data_t [N-1:0]       w_ext_rdata,
  // DRAM side of the output-activation memory
  input  logic                oa_ext_re,
  input  logic                oa_ext_we,
  input  logic [O_AW-1:0]     oa_ext_addr,
  input  acc_t  [N-1:0]       oa_ext_wdata,
  output acc_t  [N-1:0]       oa_ext_rdata
);

  logic             sel_iact, sel_wgt, sel_oact;
  logic             ia_re, w_re;
  logic [IA_AW-1:0] ia_raddr;
  logic [W_AW-1:0]  w_raddr;
  mode_e            mode;
  logic             w_shift, w_zero, in_valid, os_clear, os_drain;
  logic             arr_out_valid;
  acc_t  [N-1:0]    arr_out_vec;
  logic             oa_we, oa_acc;
  logic [O_AW-1:0]  oa_waddr;
  data_t [N-1:0]    ia_rdata, w_rdata, w_vec;

  controller #(.N(N), .IA_AW(IA_AW), .W_AW(W_AW), .O_AW(O_AW)) u_ctrl (
    .clk, .rst_n,
    .instr_valid, .instr_ready, .instr, .busy, .done,
    .sel_iact, .sel_wgt, .sel_oact,
    .ia_re, .ia_raddr, .w_re, .w_raddr,
    .mode, .w_shift, .w_zero, .in_valid, .os_clear, .os_drain,
    .arr_out_valid,
    .oa_we, .oa_acc, .oa_waddr
  );

  dbuf_mem #(.LANES(N), .LANE_W(DATA_W), .DEPTH(IA_DEPTH), .AW(IA_AW)) u_iact_mem (
    .clk,
    .sel        (sel_iact),
    .core_re    (ia_re),
    .core_raddr (ia_raddr),
    .core_rdata (ia_rdata),
    .core_we    (1'b0),
    .core_acc   (1'b0),
    .core_waddr ('0),
    .core_wdata ('0),
    .ext_re     (ia_ext_re),
    .ext_we     (ia_ext_we),
    .ext_addr   (ia_ext_addr),
    .ext_wdata  (ia_ext_wdata),
    .ext_rdata  (ia_ext_rdata)
  );

  dbuf_mem #(.LANES(N), .LANE_W(DATA_W), .DEPTH(W_DEPTH), .AW(W_AW)) u_wgt_mem (
    .clk,
    .sel        (sel_wgt),
    .core_re    (w_re),
    .core_raddr (w_raddr),
    .core_rdata (w_rdata),
    .core_we    (1'b0),
    .core_acc   (1'b0),
    .core_waddr ('0),
    .core_wdata ('0),
    .ext_re     (w_ext_re),
    .ext_we     (w_ext_we),
    .ext_addr   (w_ext_addr),
    .ext_wdata  (w_ext_wdata),
    .ext_rdata  (w_ext_rdata)
  );

  assign w_vec = w_zero ? '0 : w_rdata;

  systolic_array #(.N(N)) u_compute (
    .clk, .rst_n,
    .mode,
    .w_shift,
    .w_vec,
    .in_valid,
    .a_vec     (ia_rdata),
    .os_clear,
    .os_drain,
    .out_valid (arr_out_valid),
    .out_vec   (arr_out_vec)
  );

  dbuf_mem #(.LANES(N), .LANE_W(ACC_W), .DEPTH(O_DEPTH), .AW(O_AW)) u_oact_mem (
    .clk,
    .sel        (sel_oact),
    .core_re    (1'b0),
    .core_raddr ('0),
    .core_rdata (),
    .core_we    (oa_we),
    .core_acc   (oa_acc),
    .core_waddr (oa_waddr),
    .core_wdata (arr_out_vec),
    .ext_re     (oa_ext_re),
    .ext_we     (oa_ext_we),
    .ext_addr   (oa_ext_addr),
    .ext_wdata  (oa_ext_wdata),
    .ext_rdata  (oa_ext_rdata)
  );

endmodule
