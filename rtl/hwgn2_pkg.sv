// hwgn2_pkg: types and constants shared by the garbled MIPS evaluator.
//
// Wire labels are 128-bit strings; bit 0 of a label is its point-and-permute
// bit. A garbled instruction carries an opaque 32-bit garbled code, which
// only the garbler's decode mapping turns into operations, plus four gate
// slots (four gates per instruction, as in the paper's evaluation). Each slot
// names two source label registers, a destination register and a
// row-reduced garbled table of three 128-bit rows. The OP of a slot tells
// the ALU whether the gate is a free XOR, a table gate or no gate at all;
// the actual Boolean function of a table gate stays hidden in its table.
// Field widths other than the 32-bit code and the four slots are this
// design's choice.
package hwgn2_pkg;

  localparam int unsigned LABEL_W    = 128;  // wire label width (security parameter k)
  localparam int unsigned CODE_W     = 32;   // garbled instruction code width
  localparam int unsigned TWEAK_W    = 32;   // gate index used as hash tweak
  localparam int unsigned GATES      = 4;    // gates per garbled instruction
  localparam int unsigned REG_AW     = 5;    // label register address width
  localparam int unsigned GT_ROWS    = 3;    // rows of a row-reduced table

  typedef logic [LABEL_W-1:0] label_t;
  typedef logic [CODE_W-1:0]  gcode_t;

  // ALU mode / OP of one gate slot.
  typedef enum logic [1:0] {
    OP_NOP = 2'd0,  // empty slot
    OP_XOR = 2'd1,  // free-XOR (also XNOR, folded into labels by the garbler)
    OP_TAB = 2'd2   // non-free gate: row-reduced garbled table
  } gc_op_e;

  typedef gc_op_e [GATES-1:0] op_set_t;

  typedef struct packed {
    logic [REG_AW-1:0]             ra;
    logic [REG_AW-1:0]             rb;
    logic [REG_AW-1:0]             rd;
    logic [GT_ROWS-1:0][LABEL_W-1:0] gtab;
  } gate_slot_t;

  typedef struct packed {
    gcode_t                   code;   // garbled opcode token
    logic [TWEAK_W-1:0]       gid;    // index of the first gate; slot j uses gid+j
    gate_slot_t [GATES-1:0]   slot;   // slot 0 is executed first
  } garbled_instr_t;

  typedef struct packed {
    logic    valid;
    gcode_t  code;
    op_set_t ops;
  } map_entry_t;

endpackage
