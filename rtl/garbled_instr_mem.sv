// garbled_instr_mem: the garbled instruction to OP decode mapping memory.
//
// The garbler loads MAP_DEPTH entries, each pairing one garbled instruction
// code with the OP set it stands for. Because the codes are garbled, the
// evaluator can only look a code up, never read what a code means without
// the matching entry. The lookup compares lookup_code with every valid
// entry in parallel (content-addressed); the lowest matching index wins.
// hit/hit_ops are combinational from the stored entries and lookup_code.
// erase clears every entry to zero in one clock, which implements the
// paper's "erase state" that wipes the memory after each conversion in the
// one-instruction-per-OT mode. A write and an erase in the same cycle: the
// erase wins. Mapping contents, compare-all lookup and depth are this
// design's choices; the paper gives only the role of the memory.
module garbled_instr_mem
  import hwgn2_pkg::*;
#(
  parameter int unsigned MAP_DEPTH = 64
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         map_we,
  input  logic [$clog2(MAP_DEPTH)-1:0] map_addr,
  input  map_entry_t                   map_wdata,
  input  logic                         erase,
  input  gcode_t                       lookup_code,
  output logic                         hit,
  output op_set_t                      hit_ops,
  output logic [MAP_DEPTH-1:0]         valid_mask
);

  map_entry_t mem_q [MAP_DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MAP_DEPTH; i++) mem_q[i] <= '0;
    end else if (erase) begin
      for (int i = 0; i < MAP_DEPTH; i++) mem_q[i] <= '0;
    end else if (map_we) begin
      mem_q[map_addr] <= map_wdata;
    end
  end

  always_comb begin
    hit     = 1'b0;
    hit_ops = {GATES{OP_NOP}};
    for (int i = MAP_DEPTH - 1; i >= 0; i--) begin
      if (mem_q[i].valid && mem_q[i].code == lookup_code) begin
        hit     = 1'b1;
        hit_ops = mem_q[i].ops;
      end
    end
  end

  always_comb
    for (int i = 0; i < MAP_DEPTH; i++) valid_mask[i] = mem_q[i].valid;

endmodule
