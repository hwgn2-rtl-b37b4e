// controller: process sequencer of the garbled MIPS evaluator.
//
// On run it processes the n_instr buffered garbled instructions in order.
// For each one it raises Fetch/Decode EN for one clock, waits one clock for
// the instruction handler's OP set, then walks the four gate slots. For a
// slot whose OP is not NOP it drives the ALU mode and the "controller
// value" (operand register addresses, garbled table, tweak gid+slot),
// pulses alu_start, waits for alu_done and writes the ALU result into the
// destination label register in that same cycle. NOP slots take one clock.
// After the last instruction it pulses done (end of the OT interaction:
// the garbled output can be read) and returns to idle.
// Timing: done pulses 1 + sum over instructions of (3 + per slot: 1 for a
// NOP, 2 for an XOR, 13 for a table gate) clock edges after, and counting,
// the edge that samples run.
// The paper states what the controller does (generate the ALU mode and the
// read and write operations); the state sequence and timing here are this
// design's own.
module controller
  import hwgn2_pkg::*;
#(
  parameter int unsigned INSTR_CAP = 1,
  localparam int unsigned IAW      = (INSTR_CAP > 1) ? $clog2(INSTR_CAP) : 1,
  localparam int unsigned CW       = $clog2(INSTR_CAP + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    run,
  input  logic [CW-1:0]           n_instr,
  // instruction handler
  output logic                    fd_en,
  output logic [IAW-1:0]          fd_idx,
  input  logic                    dec_valid,
  input  op_set_t                 dec_ops,
  input  garbled_instr_t          dec_instr,
  // ALU
  output gc_op_e                  alu_mode,
  output logic                    alu_start,
  output logic [GT_ROWS-1:0][LABEL_W-1:0] alu_gtab,
  output logic [TWEAK_W-1:0]      alu_tweak,
  input  logic                    alu_done,
  // label memory
  output logic [REG_AW-1:0]       ra_addr,
  output logic [REG_AW-1:0]       rb_addr,
  output logic                    wr_en,
  output logic [REG_AW-1:0]       wr_addr,
  // status
  output logic                    busy,
  output logic                    done
);

  typedef enum logic [2:0] {
    S_IDLE, S_FETCH, S_DECODE, S_ISSUE, S_WAIT, S_NEXT
  } state_e;

  state_e         state_q;
  logic [CW-1:0]  count_q;
  logic [IAW-1:0] idx_q;
  logic [1:0]     slot_q;
  op_set_t        ops_q;
  gate_slot_t     cur;

  assign cur       = dec_instr.slot[slot_q];
  assign fd_en     = (state_q == S_FETCH);
  assign fd_idx    = idx_q;
  assign alu_mode  = ops_q[slot_q];
  assign alu_start = (state_q == S_ISSUE) && (ops_q[slot_q] != OP_NOP);
  assign alu_gtab  = cur.gtab;
  assign alu_tweak = dec_instr.gid + TWEAK_W'(slot_q);
  assign ra_addr   = cur.ra;
  assign rb_addr   = cur.rb;
  assign wr_en     = (state_q == S_WAIT) && alu_done;
  assign wr_addr   = cur.rd;
  assign busy      = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      count_q <= '0;
      idx_q   <= '0;
      slot_q  <= '0;
      ops_q   <= {GATES{OP_NOP}};
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE:
          if (run && n_instr != '0) begin
            count_q <= n_instr;
            idx_q   <= '0;
            state_q <= S_FETCH;
          end
        S_FETCH:  state_q <= S_DECODE;
        S_DECODE:
          if (dec_valid) begin
            ops_q   <= dec_ops;
            slot_q  <= '0;
            state_q <= S_ISSUE;
          end
        S_ISSUE:
          if (ops_q[slot_q] == OP_NOP) begin
            if (slot_q == 2'(GATES - 1)) state_q <= S_NEXT;
            else slot_q <= slot_q + 2'd1;
          end else begin
            state_q <= S_WAIT;
          end
        S_WAIT:
          if (alu_done) begin
            if (slot_q == 2'(GATES - 1)) state_q <= S_NEXT;
            else begin
              slot_q  <= slot_q + 2'd1;
              state_q <= S_ISSUE;
            end
          end
        S_NEXT:
          if (count_q == CW'(1)) begin
            done    <= 1'b1;
            state_q <= S_IDLE;
          end else begin
            count_q <= count_q - CW'(1);
            idx_q   <= idx_q + IAW'(1);
            state_q <= S_FETCH;
          end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
