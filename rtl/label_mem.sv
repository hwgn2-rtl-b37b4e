// label_mem: register file of garbled wire labels.
//
// Holds NREGS 128-bit labels: the evaluator's garbled input X and the
// garbler's sub-netlist labels L_i are written through the external port,
// the controller reads two operand labels for the ALU and writes back the
// ALU's result label, and the garbled output Y_i is read through a third
// read port. Reads are combinational, writes take effect at the clock edge;
// if the ALU and the external port write the same register in one cycle the
// ALU wins. All registers reset to zero. Its size (32 labels, one per MIPS
// register) is this design's choice; the paper gives only the memory
// footprint order O(I + N_gate,m + i_m).
module label_mem
  import hwgn2_pkg::*;
#(
  parameter int unsigned NREGS = 32,
  localparam int unsigned AW   = $clog2(NREGS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ext_we,
  input  logic [AW-1:0] ext_waddr,
  input  label_t        ext_wdata,
  input  logic          alu_we,
  input  logic [AW-1:0] alu_waddr,
  input  label_t        alu_wdata,
  input  logic [AW-1:0] ra_addr,
  output label_t        ra_data,
  input  logic [AW-1:0] rb_addr,
  output label_t        rb_data,
  input  logic [AW-1:0] rx_addr,
  output label_t        rx_data
);

  label_t regs_q [NREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs_q[i] <= '0;
    end else begin
      if (ext_we) regs_q[ext_waddr] <= ext_wdata;
      if (alu_we) regs_q[alu_waddr] <= alu_wdata;
    end
  end

  assign ra_data = regs_q[ra_addr];
  assign rb_data = regs_q[rb_addr];
  assign rx_data = regs_q[rx_addr];

endmodule
