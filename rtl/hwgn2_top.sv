// hwgn2_top: side-channel protected neural-network evaluator (HWGN2).
//
// The neural network runs as a garbled program: the garbler (the network's
// owner, off chip) sends garbled instructions, a garbled decode mapping and
// wire labels; the chip evaluates them on labels only, so neither the
// network's parameters nor its architecture appear in plain form inside it.
// This top holds:
//   * garbled_mips_evaluator - mapping memory, instruction handler,
//     controller, label memory and garbled ALU;
//   * an output sequencer and output_decoder - on dec_start it reads OUT_W
//     consecutive labels from out_base, decrypts them with d
//     (y_j = lsb(Y_j) xor d_j) and stores the word in slot gc_idx of the
//     result buffer (one word per garbled instruction set);
//   * xor_tree and majority_output over the result buffer, for the
//     cut-and-choose check against a malicious garbler: check_sel marks the
//     sets the evaluator opened; cheat rises if they disagree, and
//     client_out is the bitwise majority over all NUM_GC sets.
// For the honest-but-curious use only one set is needed: read y/y_valid.
// Timing: decryption takes OUT_W clocks plus one to store; y_valid and
// res_wr pulse in the store cycle. While dec_busy is high the garbled
// output port shows the label being decrypted.
// The garbler, the OT link and coin tossing are outside the chip; their
// traffic is this module's ports. The result buffer and the sequencer are
// this design's own; the rest follows the paper's block diagrams.
module hwgn2_top
  import hwgn2_pkg::*;
#(
  parameter int unsigned  INSTR_CAP = 1,
  parameter int unsigned  MAP_DEPTH = 64,
  parameter int unsigned  NREGS     = 32,
  parameter int unsigned  NUM_GC    = 41,
  parameter int unsigned  OUT_W     = 10,
  parameter logic [127:0] HASH_KEY  = 128'h000102030405060708090a0b0c0d0e0f,
  localparam int unsigned IAW       = (INSTR_CAP > 1) ? $clog2(INSTR_CAP) : 1,
  localparam int unsigned CW        = $clog2(INSTR_CAP + 1),
  localparam int unsigned MAW       = $clog2(MAP_DEPTH),
  localparam int unsigned GW        = (NUM_GC > 1) ? $clog2(NUM_GC) : 1,
  localparam int unsigned OW        = (OUT_W > 1) ? $clog2(OUT_W) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // garbler / OT link
  input  logic                         map_we,
  input  logic [MAW-1:0]               map_addr,
  input  map_entry_t                   map_wdata,
  input  logic                         instr_we,
  input  logic [IAW-1:0]               instr_addr,
  input  garbled_instr_t               instr_wdata,
  input  logic                         gin_we,
  input  logic [REG_AW-1:0]            gin_addr,
  input  label_t                       gin_label,
  input  logic [REG_AW-1:0]            gout_addr,
  output label_t                       gout_label,
  input  logic                         run,
  input  logic [CW-1:0]                n_instr,
  output logic                         busy,
  output logic                         done,
  output logic                         dec_err_seen,
  output logic                         erase_pulse,
  // output decryption
  input  logic                         dec_start,
  input  logic [REG_AW-1:0]            out_base,
  input  logic [OUT_W-1:0]             d,
  input  logic [GW-1:0]                gc_idx,
  output logic                         dec_busy,
  output logic [OUT_W-1:0]             y,
  output logic                         y_valid,
  output logic                         res_wr,
  // cut-and-choose check
  input  logic [NUM_GC-1:0]            check_sel,
  output logic                         cheat,
  output logic [OUT_W-1:0]             client_out
);

  logic [REG_AW-1:0] rx_addr, base_q;
  logic [OW-1:0]     j_q;
  logic [GW-1:0]     gidx_q;
  logic [OUT_W-1:0]  d_q;
  logic              run_q, store_q, dec_clear;
  logic              ydec_valid;
  logic [NUM_GC-1:0][OUT_W-1:0] res_q;

  assign rx_addr = run_q ? (base_q + REG_AW'(j_q)) : gout_addr;

  garbled_mips_evaluator #(
    .INSTR_CAP(INSTR_CAP), .MAP_DEPTH(MAP_DEPTH), .NREGS(NREGS), .HASH_KEY(HASH_KEY)
  ) u_eval (
    .clk, .rst_n,
    .map_we, .map_addr, .map_wdata,
    .instr_we, .instr_addr, .instr_wdata,
    .gin_we, .gin_addr, .gin_label,
    .gout_addr  (rx_addr),
    .gout_label (gout_label),
    .run, .n_instr, .busy, .done, .dec_err_seen, .erase_pulse
  );

  assign dec_clear = dec_start && !dec_busy;

  output_decoder #(.OUT_W(OUT_W)) u_dec (
    .clk, .rst_n,
    .clear     (dec_clear),
    .lbl_valid (run_q),
    .idx       (j_q),
    .lbl_lsb   (gout_label[0]),
    .d         (d_q),
    .y         (y),
    .y_valid   (ydec_valid)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q   <= 1'b0;
      store_q <= 1'b0;
      j_q     <= '0;
      base_q  <= '0;
      gidx_q  <= '0;
      d_q     <= '0;
      res_q   <= '0;
    end else begin
      store_q <= 1'b0;
      if (dec_clear) begin
        run_q  <= 1'b1;
        j_q    <= '0;
        base_q <= out_base;
        gidx_q <= gc_idx;
        d_q    <= d;
      end else if (run_q) begin
        if (32'(j_q) == OUT_W - 1) begin
          run_q   <= 1'b0;
          store_q <= 1'b1;
        end else begin
          j_q <= j_q + OW'(1);
        end
      end
      if (store_q && 32'(gidx_q) < NUM_GC) res_q[gidx_q] <= y;
    end
  end

  assign dec_busy = run_q || store_q;
  assign y_valid  = store_q && ydec_valid;
  assign res_wr   = store_q;

  xor_tree #(.NUM_GC(NUM_GC), .OUT_W(OUT_W)) u_xor (
    .vals (res_q), .sel (check_sel), .cheat (cheat)
  );

  majority_output #(.NUM_GC(NUM_GC), .OUT_W(OUT_W)) u_maj (
    .vals (res_q), .maj (client_out)
  );

endmodule
