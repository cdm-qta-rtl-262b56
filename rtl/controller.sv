// controller: the control module. It accepts instructions (valid/ready handshake, one
// instruction_t per transfer) and sequences the memories and the compute module.
//
// OP_SWAP   toggles the bank select of each memory named in swap_mask; takes effect at
//           the clock edge that accepts the instruction.
// OP_WS     1. weight load, N cycles: reads weight words w_base+N-1 down to w_base
//              (rows k >= k_len are zeroed via w_zero) and shifts them into the array;
//           2. input streaming, m_len cycles: reads input words i_base .. i_base+m_len-1,
//              one per cycle;
//           3. waits for the m_len aligned output vectors and writes output vector m to
//              o_base+m (added to the stored word when acc is set).
// OP_OS     1. k_len cycles: reads input word i_base+k and weight word w_base+k together
//              and has the array accumulate their outer product;
//           2. N drain cycles: sum row N-1-d leaves in drain cycle d and is written to
//              o_base+N-1-d if that row is below m_len.
// Memory reads have one cycle of latency, so every array strobe (w_shift, w_zero,
// in_valid, os_clear, os_drain) is registered to line up with the data it qualifies.
// Timing, counting the cycle in which the instruction is accepted as cycle 0: `done`
// pulses in the first idle cycle after a tile, which is cycle 3N + m_len + 1 for a WS
// tile (one cycle after its last output write) and cycle k_len + N + 1 for an OS tile
// (the cycle of its last drain write). instr_ready is high only in the idle state. Which operations exist and their order follow the dataflows of the
// source; the instruction format, the handshake and all timing are this design's own.
module controller
  import cdm_qta_pkg::*;
#(
  parameter int unsigned N     = 64,
  parameter int unsigned IA_AW = 12,
  parameter int unsigned W_AW  = 12,
  parameter int unsigned O_AW  = 11
) (
  input  logic             clk,
  input  logic             rst_n,
  // instructions
  input  logic             instr_valid,
  output logic             instr_ready,
  input  instr_t           instr,
  output logic             busy,
  output logic             done,
  // bank selects of the double buffers
  output logic             sel_iact,
  output logic             sel_wgt,
  output logic             sel_oact,
  // memory reads
  output logic             ia_re,
  output logic [IA_AW-1:0] ia_raddr,
  output logic             w_re,
  output logic [W_AW-1:0]  w_raddr,
  // compute module
  output mode_e            mode,
  output logic             w_shift,
  output logic             w_zero,
  output logic             in_valid,
  output logic             os_clear,
  output logic             os_drain,
  input  logic             arr_out_valid,
  // output memory writes
  output logic             oa_we,
  output logic             oa_acc,
  output logic [O_AW-1:0]  oa_waddr
);

  typedef enum logic [2:0] {
    S_IDLE, S_WS_LOAD, S_WS_STREAM, S_WS_WAIT, S_OS_STREAM, S_OS_DRAIN
  } state_e;

  state_e             state;
  instr_t             cur;
  logic [FIELD_W-1:0] cnt;      // issue counter of the current phase
  logic [FIELD_W-1:0] out_cnt;  // WS: output vectors written so far
  logic [FIELD_W-1:0] row_q;    // OS: sum row leaving the array this drain cycle

  localparam logic [FIELD_W-1:0] NM1 = FIELD_W'(N - 1);

  logic accept;
  assign instr_ready = (state == S_IDLE);
  assign accept      = instr_valid && instr_ready;
  assign busy        = (state != S_IDLE) || os_drain;

  // Read requests are combinational from the state so that the data returns in the
  // next cycle together with the registered strobes.
  logic [FIELD_W-1:0] w_row;
  assign w_row = NM1 - cnt;

  always_comb begin
    ia_re    = 1'b0;
    w_re     = 1'b0;
    ia_raddr = IA_AW'(cur.i_base + cnt);
    w_raddr  = W_AW'(cur.w_base + cnt);
    unique case (state)
      S_WS_LOAD: begin
        w_re    = 1'b1;
        w_raddr = W_AW'(cur.w_base + w_row);
      end
      S_WS_STREAM: ia_re = 1'b1;
      S_OS_STREAM: begin
        ia_re = 1'b1;
        w_re  = 1'b1;
      end
      default: ;
    endcase
  end

  // Output writes.
  always_comb begin
    oa_acc   = cur.acc;
    oa_we    = 1'b0;
    oa_waddr = O_AW'(cur.o_base + out_cnt);
    if (mode == MODE_WS) begin
      oa_we = arr_out_valid;
    end else begin
      oa_we    = os_drain && (row_q < cur.m_len);
      oa_waddr = O_AW'(cur.o_base + row_q);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cur      <= '0;
      cnt      <= '0;
      out_cnt  <= '0;
      row_q    <= '0;
      mode     <= MODE_WS;
      sel_iact <= 1'b0;
      sel_wgt  <= 1'b0;
      sel_oact <= 1'b0;
      w_shift  <= 1'b0;
      w_zero   <= 1'b0;
      in_valid <= 1'b0;
      os_clear <= 1'b0;
      os_drain <= 1'b0;
      done     <= 1'b0;
    end else begin
      w_shift  <= 1'b0;
      w_zero   <= 1'b0;
      in_valid <= 1'b0;
      os_clear <= 1'b0;
      os_drain <= 1'b0;
      done     <= 1'b0;
      if (mode == MODE_WS && arr_out_valid) out_cnt <= out_cnt + 1'b1;
      if (os_drain) row_q <= row_q - 1'b1;

      unique case (state)
        S_IDLE: begin
          if (accept) begin
            cur <= instr;
            cnt <= '0;
            unique case (instr.op)
              OP_WS: begin
                mode    <= MODE_WS;
                out_cnt <= '0;
                state   <= S_WS_LOAD;
              end
              OP_OS: begin
                mode  <= MODE_OS;
                state <= S_OS_STREAM;
              end
              OP_SWAP: begin
                if (instr.swap_mask[SWAP_IACT]) sel_iact <= ~sel_iact;
                if (instr.swap_mask[SWAP_WGT])  sel_wgt  <= ~sel_wgt;
                if (instr.swap_mask[SWAP_OACT]) sel_oact <= ~sel_oact;
              end
              default: ;
            endcase
          end
        end
        S_WS_LOAD: begin
          w_shift <= 1'b1;
          w_zero  <= (w_row >= cur.k_len);
          cnt     <= cnt + 1'b1;
          if (cnt == NM1) begin
            cnt   <= '0;
            state <= S_WS_STREAM;
          end
        end
        S_WS_STREAM: begin
          in_valid <= 1'b1;
          cnt      <= cnt + 1'b1;
          if (cnt == cur.m_len - 1'b1) state <= S_WS_WAIT;
        end
        S_WS_WAIT: begin
          if (arr_out_valid && out_cnt == cur.m_len - 1'b1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        S_OS_STREAM: begin
          in_valid <= 1'b1;
          os_clear <= (cnt == '0);
          cnt      <= cnt + 1'b1;
          if (cnt == cur.k_len - 1'b1) begin
            cnt   <= '0;
            row_q <= NM1;
            state <= S_OS_DRAIN;
          end
        end
        S_OS_DRAIN: begin
          os_drain <= 1'b1;
          cnt      <= cnt + 1'b1;
          if (cnt == NM1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Handshake rule: an offered instruction stays offered, unchanged, until accepted.
  a_instr_stable: assert property (@(posedge clk) disable iff (!rst_n)
      instr_valid && !instr_ready |=> instr_valid && $stable(instr))
    else $error("instruction changed or withdrawn before it was accepted");
  // Operand ranges the sequencing relies on.
  a_ws_range: assert property (@(posedge clk) disable iff (!rst_n)
      accept && instr.op == OP_WS |-> instr.k_len >= 1 && instr.k_len <= FIELD_W'(N) && instr.m_len >= 1)
    else $error("WS tile needs 1 <= k_len <= N and m_len >= 1");
  a_os_range: assert property (@(posedge clk) disable iff (!rst_n)
      accept && instr.op == OP_OS |-> instr.k_len >= 1 && instr.m_len >= 1 && instr.m_len <= FIELD_W'(N))
    else $error("OS tile needs k_len >= 1 and 1 <= m_len <= N");

endmodule
