// garbled_mips_evaluator: the garbled MIPS evaluator core.
//
// Wires the blocks of the evaluator together as the paper's block diagram
// shows them: the garbler writes the decode mapping into the mapping memory
// (garbled_instr_mem) and the garbled instructions into the instruction
// handler; the controller raises Fetch/Decode EN, receives the OP set, and
// drives the garbled ALU's mode and operands ("controller value"). The
// evaluator's garbled input enters the ALU through the label memory, and the
// ALU's garbled output leaves through it (gout_addr / gout_label).
//
// Use: load mapping entries (map_*), instruction cells (instr_*) and input
// labels (gin_*), then pulse run with n_instr. busy stays high until done
// pulses; dec_err_seen is sticky from any decode miss until the next run.
// In the default one-cell mode the mapping and the cell are erased after
// every decode, so they must be reloaded before each run.
module garbled_mips_evaluator
  import hwgn2_pkg::*;
#(
  parameter int unsigned  INSTR_CAP = 1,
  parameter int unsigned  MAP_DEPTH = 64,
  parameter int unsigned  NREGS     = 32,
  parameter logic [127:0] HASH_KEY  = 128'h000102030405060708090a0b0c0d0e0f,
  localparam int unsigned IAW       = (INSTR_CAP > 1) ? $clog2(INSTR_CAP) : 1,
  localparam int unsigned CW        = $clog2(INSTR_CAP + 1),
  localparam int unsigned MAW       = $clog2(MAP_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // garbler: decode mapping
  input  logic              map_we,
  input  logic [MAW-1:0]    map_addr,
  input  map_entry_t        map_wdata,
  // garbler: garbled instructions
  input  logic              instr_we,
  input  logic [IAW-1:0]    instr_addr,
  input  garbled_instr_t    instr_wdata,
  // garbled input labels (X, L_i)
  input  logic              gin_we,
  input  logic [REG_AW-1:0] gin_addr,
  input  label_t            gin_label,
  // garbled output labels (Y_i)
  input  logic [REG_AW-1:0] gout_addr,
  output label_t            gout_label,
  // control / status
  input  logic              run,
  input  logic [CW-1:0]     n_instr,
  output logic              busy,
  output logic              done,
  output logic              dec_err_seen,
  output logic              erase_pulse
);

  gcode_t         lookup_code;
  logic           map_hit, erase_req;
  op_set_t        map_ops, dec_ops;
  logic           fd_en, dec_valid, dec_err;
  logic [IAW-1:0] fd_idx;
  garbled_instr_t dec_instr;
  gc_op_e         alu_mode;
  logic           alu_start, alu_done, alu_busy;
  logic [GT_ROWS-1:0][LABEL_W-1:0] alu_gtab;
  logic [TWEAK_W-1:0] alu_tweak;
  logic [REG_AW-1:0]  ra_addr, rb_addr, wr_addr;
  logic               wr_en;
  label_t             ra_data, rb_data, alu_y;

  garbled_instr_mem #(.MAP_DEPTH(MAP_DEPTH)) u_mem (
    .clk, .rst_n,
    .map_we, .map_addr, .map_wdata,
    .erase       (erase_req),
    .lookup_code (lookup_code),
    .hit         (map_hit),
    .hit_ops     (map_ops),
    .valid_mask  ()
  );

  instr_handler #(.INSTR_CAP(INSTR_CAP)) u_handler (
    .clk, .rst_n,
    .instr_we, .instr_addr, .instr_wdata,
    .fd_en, .fd_idx,
    .lookup_code, .map_hit, .map_ops,
    .erase_req,
    .dec_valid, .dec_ops, .dec_instr, .dec_err
  );

  controller #(.INSTR_CAP(INSTR_CAP)) u_ctrl (
    .clk, .rst_n,
    .run, .n_instr,
    .fd_en, .fd_idx,
    .dec_valid, .dec_ops, .dec_instr,
    .alu_mode, .alu_start, .alu_gtab, .alu_tweak, .alu_done,
    .ra_addr, .rb_addr, .wr_en, .wr_addr,
    .busy, .done
  );

  label_mem #(.NREGS(NREGS)) u_labels (
    .clk, .rst_n,
    .ext_we    (gin_we),
    .ext_waddr (gin_addr[$clog2(NREGS)-1:0]),
    .ext_wdata (gin_label),
    .alu_we    (wr_en),
    .alu_waddr (wr_addr[$clog2(NREGS)-1:0]),
    .alu_wdata (alu_y),
    .ra_addr   (ra_addr[$clog2(NREGS)-1:0]),
    .ra_data,
    .rb_addr   (rb_addr[$clog2(NREGS)-1:0]),
    .rb_data,
    .rx_addr   (gout_addr[$clog2(NREGS)-1:0]),
    .rx_data   (gout_label)
  );

  garbled_alu #(.HASH_KEY(HASH_KEY)) u_alu (
    .clk, .rst_n,
    .mode  (alu_mode),
    .start (alu_start),
    .a     (ra_data),
    .b     (rb_data),
    .gtab  (alu_gtab),
    .tweak (alu_tweak),
    .busy  (alu_busy),
    .done  (alu_done),
    .y     (alu_y)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     dec_err_seen <= 1'b0;
    else if (run && !busy)          dec_err_seen <= 1'b0;
    else if (dec_valid && dec_err)  dec_err_seen <= 1'b1;
  end

  assign erase_pulse = erase_req;

  // The controller only starts the ALU when it is idle.
  a_alu_idle: assert property (@(posedge clk) disable iff (!rst_n) alu_start |-> !alu_busy);

endmodule
