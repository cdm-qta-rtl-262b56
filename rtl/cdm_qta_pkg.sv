// cdm_qta_pkg: types and constants shared by the LoRA fine-tuning accelerator.
//
// The accelerator computes INT8 x INT8 GEMMs on an N x N systolic array that can be
// run weight-stationary (WS) or output-stationary (OS). Operands are signed 8-bit
// integers, as in the fully quantized training scheme (weights, activations and
// gradients all INT8). Partial sums are kept as signed 32-bit integers; that width is a
// choice of this design (the source only fixes the 8-bit operands).
//
// One instruction describes one GEMM tile or one swap of the double buffers. Address
// fields are 16 bits wide and address a word inside one bank of a memory; the modules
// use only as many low bits as their bank depth needs.
package cdm_qta_pkg;

  localparam int unsigned DATA_W = 8;    // INT8 operands
  localparam int unsigned ACC_W  = 32;   // partial-sum width (design choice)
  localparam int unsigned FIELD_W = 16;  // width of address and length fields

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Dataflow of the array.
  typedef enum logic {
    MODE_WS = 1'b0,  // weight stationary: inner product, weights held in PEs
    MODE_OS = 1'b1   // output stationary: outer product, sums held in PEs
  } mode_e;

  typedef enum logic [1:0] {
    OP_NOP  = 2'd0,
    OP_WS   = 2'd1,  // WS GEMM tile
    OP_OS   = 2'd2,  // OS GEMM tile
    OP_SWAP = 2'd3   // swap banks of the memories selected by swap_mask
  } opcode_e;

  // swap_mask bits
  localparam int unsigned SWAP_IACT = 0;
  localparam int unsigned SWAP_WGT  = 1;
  localparam int unsigned SWAP_OACT = 2;

  // One instruction.
  //  OP_WS: weight rows w_base .. w_base+N-1 (row k = reduction index k) are loaded
  //         into the array, rows k >= k_len are replaced by zero. Then m_len input
  //         vectors i_base .. i_base+m_len-1 are streamed; output vector m goes to
  //         o_base+m. Needs 1 <= k_len <= N, m_len >= 1.
  //  OP_OS: k_len steps; step k reads input word i_base+k (one activation per array
  //         row) and weight word w_base+k (one weight per array column). Afterwards
  //         the N x N sums drain; sum row r goes to o_base+r for r < m_len.
  //         Needs k_len >= 1, 1 <= m_len <= N.
  //  acc:   1 = add the results to what the output memory holds, 0 = overwrite.
  typedef struct packed {
    opcode_e            op;
    logic               acc;
    logic [2:0]         swap_mask;
    logic [FIELD_W-1:0] i_base;
    logic [FIELD_W-1:0] w_base;
    logic [FIELD_W-1:0] o_base;
    logic [FIELD_W-1:0] k_len;
    logic [FIELD_W-1:0] m_len;
  } instr_t;

endpackage
