// instr_handler: garbled instruction buffer and fetch/decode.
//
// Holds the garbled instructions the garbler sends in one OT interaction:
// INSTR_CAP cells, one in the resource-efficient mode the paper evaluates
// most (the paper cut the Lite_MIPS buffer from 128 cells to one), or the
// complete program in the communication-efficient mode. When the
// controller raises Fetch/Decode EN (fd_en) for cell fd_idx, the handler
// sends that cell's garbled code to the mapping memory, and on the next
// edge registers the OP set of the matching entry (dec_ops), the operands
// and tables of the instruction (dec_instr) and dec_valid. A code with no
// matching entry decodes as four NOPs and raises dec_err for that decode.
// With ERASE set (default: when INSTR_CAP is 1), one clock after each
// decode the handler clears the cell and pulses erase_req, which wipes the
// mapping memory: the garbler then sends mapping and instruction afresh for
// the next interaction, as the paper describes for its mode (a).
// Cell writes: instr_we/instr_addr/instr_wdata, one cell per clock.
module instr_handler
  import hwgn2_pkg::*;
#(
  parameter int unsigned INSTR_CAP = 1,
  parameter bit          ERASE     = (INSTR_CAP == 1),
  localparam int unsigned IAW      = (INSTR_CAP > 1) ? $clog2(INSTR_CAP) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // from the garbler
  input  logic           instr_we,
  input  logic [IAW-1:0] instr_addr,
  input  garbled_instr_t instr_wdata,
  // from the controller
  input  logic           fd_en,
  input  logic [IAW-1:0] fd_idx,
  // to / from the mapping memory
  output gcode_t         lookup_code,
  input  logic           map_hit,
  input  op_set_t        map_ops,
  output logic           erase_req,
  // decoded instruction
  output logic           dec_valid,
  output op_set_t        dec_ops,
  output garbled_instr_t dec_instr,
  output logic           dec_err
);

  garbled_instr_t cell_q [INSTR_CAP];
  logic           erase_pend_q;
  logic [IAW-1:0] erase_idx_q;

  assign lookup_code = cell_q[fd_idx].code;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < INSTR_CAP; i++) cell_q[i] <= '0;
      erase_pend_q <= 1'b0;
      erase_idx_q  <= '0;
      erase_req    <= 1'b0;
      dec_valid    <= 1'b0;
      dec_ops      <= {GATES{OP_NOP}};
      dec_instr    <= '0;
      dec_err      <= 1'b0;
    end else begin
      dec_valid <= 1'b0;
      erase_req <= 1'b0;
      if (instr_we) cell_q[instr_addr] <= instr_wdata;
      if (fd_en) begin
        dec_valid <= 1'b1;
        dec_ops   <= map_hit ? map_ops : {GATES{OP_NOP}};
        dec_err   <= !map_hit;
        dec_instr <= cell_q[fd_idx];
        if (ERASE) begin
          erase_pend_q <= 1'b1;
          erase_idx_q  <= fd_idx;
        end
      end
      if (erase_pend_q) begin
        cell_q[erase_idx_q] <= '0;
        erase_req    <= 1'b1;
        erase_pend_q <= 1'b0;
      end
    end
  end

endmodule
