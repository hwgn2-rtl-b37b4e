// tb_hwgn2_top: end-to-end run of the evaluator chip at its default sizes.
//
// Workload: a garbled binarised (XNOR) layer of 10 neurons on a 3-bit
// input. Neuron j computes majority(x0 xnor w0j, x1 xnor w1j, x2 xnor w2j),
// i.e. sign(popcount - 1.5), as 3 free XNORs, 1 free XOR and 3 table gates
// (AND, AND, OR) packed into two garbled instructions (the second with a
// NOP slot). The weights are the garbler's: their labels are sent with each
// neuron (L_i), the evaluator's input labels (X) once per set. Every
// instruction is one interaction: decode mapping with decoys, one cell,
// run, erase.
// Cut-and-choose: the garbler sends NUM_GC = 41 independently garbled sets;
// set CHEAT garbles neuron 0's output gate as NOR instead of OR. Each set's
// output is decrypted on chip into the result buffer and checked against
// the plain model. Then the XOR-tree must flag the cheat when the opened
// sets include CHEAT and stay quiet when they do not, and the majority
// output must equal the honest result. Also checks a decode miss, the
// per-interaction cycle count and the external garbled-output port, and
// counts every mechanism (free gates, table gates with each of the four
// row selections, NOP slots, erase, decode miss, decryption, cheat
// detected, cheat absent, majority vote): one that never happens is a
// failure.
module tb_hwgn2_top;
  import hwgn2_pkg::*;
  import gc_ref_pkg::*;
  import gc_prog_pkg::*;

  localparam logic [127:0] KEY = 128'h000102030405060708090a0b0c0d0e0f;  // default HASH_KEY
  localparam int NGC = 41, OW = 10, CHEAT = 7;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic map_we = 0, instr_we = 0, gin_we = 0, run = 0, dec_start = 0;
  logic [5:0] map_addr = '0;
  map_entry_t map_wdata = '0;
  logic [0:0] instr_addr = '0;
  garbled_instr_t instr_wdata = '0;
  logic [4:0] gin_addr = '0, gout_addr = '0, out_base = '0;
  label_t gin_label = '0, gout_label;
  logic [0:0] n_instr = '0;
  logic busy, done, dec_err_seen, erase_pulse, dec_busy, y_valid, res_wr, cheat;
  logic [OW-1:0] d = '0, y, client_out;
  logic [5:0] gc_idx = '0;
  logic [NGC-1:0] check_sel = '0;

  hwgn2_top dut (.*);

  // mechanism counters
  int n_xor = 0, n_tab = 0, n_nop = 0, n_erase = 0, n_miss = 0, n_dec = 0;
  int n_row [4] = '{0, 0, 0, 0};
  int n_cheat = 0, n_honest = 0, n_major = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_eval.alu_start && dut.u_eval.alu_mode == OP_XOR) n_xor++;
    if (dut.u_eval.alu_start && dut.u_eval.alu_mode == OP_TAB) begin
      n_tab++;
      n_row[{dut.u_eval.ra_data[0], dut.u_eval.rb_data[0]}]++;
    end
    if (dut.u_eval.u_ctrl.state_q == dut.u_eval.u_ctrl.S_ISSUE && dut.u_eval.alu_mode == OP_NOP) n_nop++;
    if (erase_pulse) n_erase++;
    if (y_valid) n_dec++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr_map(input int addr, input map_entry_t e);
    @(negedge clk); map_we = 1; map_addr = 6'(addr); map_wdata = e;
    @(negedge clk); map_we = 0;
  endtask

  task automatic wr_label(input int r, input label_t l);
    @(negedge clk); gin_we = 1; gin_addr = 5'(r); gin_label = l;
    @(negedge clk); gin_we = 0;
  endtask

  function automatic map_entry_t decoy();
    map_entry_t e;
    e.valid = 1; e.code = $urandom() & 32'h7fff_ffff;
    for (int j = 0; j < GATES; j++) e.ops[j] = gc_op_e'($urandom_range(0, 2));
    return e;
  endfunction

  function automatic int instr_cycles(input op_set_t o);
    int s;
    s = 3;
    for (int j = 0; j < GATES; j++) s += (o[j] == OP_NOP) ? 1 : (o[j] == OP_XOR) ? 2 : 13;
    return s;
  endfunction

  // one OT interaction: mapping (with decoys), one garbled instruction, run
  task automatic interact(input garbled_instr_t gi, input op_set_t o, input bit in_map);
    map_entry_t e;
    int cyc;
    wr_map($urandom_range(0, 20), decoy());
    wr_map($urandom_range(21, 40), decoy());
    if (in_map) begin
      e.valid = 1; e.code = gi.code; e.ops = o;
      wr_map($urandom_range(41, 63), e);
    end
    @(negedge clk); instr_we = 1; instr_addr = '0; instr_wdata = gi;
    @(negedge clk); instr_we = 0; run = 1; n_instr = 1'b1;
    @(negedge clk); run = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    check(cyc == 1 + instr_cycles(in_map ? o : {GATES{OP_NOP}}), $sformatf("interaction cycles %0d", cyc));
    check(dec_err_seen == !in_map, "decode miss flag");
    if (!in_map && dec_err_seen) n_miss++;
  endtask

  function automatic void neuron_gates(input int j, input bit cheat_or, output gate_t g [$]);
    gate_t t;
    g.delete();
    t.tt = '0;
    t.kind = G_XNOR; t.a = 0; t.b = 3; t.d = 6; g.push_back(t);
    t.kind = G_XNOR; t.a = 1; t.b = 4; t.d = 7; g.push_back(t);
    t.kind = G_XNOR; t.a = 2; t.b = 5; t.d = 8; g.push_back(t);
    t.kind = G_TAB;  t.tt = 4'b1000; t.a = 6; t.b = 7; t.d = 9; g.push_back(t);   // p0 & p1
    t.kind = G_XOR;  t.a = 6; t.b = 7; t.d = 6; g.push_back(t);                   // p0 ^ p1
    t.kind = G_TAB;  t.tt = 4'b1000; t.a = 8; t.b = 6; t.d = 6; g.push_back(t);   // p2 & (p0^p1)
    t.kind = G_TAB;  t.tt = cheat_or ? 4'b0001 : 4'b1110;                           // OR (NOR if cheating)
    t.a = 9; t.b = 6; t.d = 10 + j; g.push_back(t);
  endfunction

  initial begin
    logic [2:0] x;
    logic [2:0] w [OW];
    logic [OW-1:0] honest, expect_y;
    label_t zl [32];
    logic [127:0] delta;
    logic [31:0] gid;
    gate_t g [$];
    garbled_instr_t ins [$];
    op_set_t ops [$];

    repeat (3) @(negedge clk);
    rst_n = 1;
    x = 3'($urandom());
    for (int j = 0; j < OW; j++) w[j] = 3'($urandom());
    for (int j = 0; j < OW; j++) begin
      logic [2:0] p;
      p = ~(x ^ w[j]);
      honest[j] = (p[0] & p[1]) | (p[2] & (p[0] ^ p[1]));
    end

    for (int s = 0; s < NGC; s++) begin
      delta = rand128(); delta[0] = 1'b1;
      gid = 32'(s) << 16;
      for (int r = 0; r < 32; r++) zl[r] = rand128();
      for (int i = 0; i < 3; i++) wr_label(i, zl[i] ^ (x[i] ? delta : '0));     // X
      if (s == 0) begin
        // an instruction the mapping does not know: decodes as NOPs
        garbled_instr_t junk;
        junk = '0; junk.code = 32'h1234_5678;
        interact(junk, {GATES{OP_NOP}}, 1'b0);
      end
      for (int j = 0; j < OW; j++) begin
        for (int i = 0; i < 3; i++) begin
          zl[3 + i] = rand128();
          wr_label(3 + i, zl[3 + i] ^ (w[j][i] ? delta : '0));                   // L_i (weights)
        end
        neuron_gates(j, (s == CHEAT) && (j == 0), g);
        garble_prog(KEY, delta, g, zl, gid, ins, ops);
        foreach (ins[k]) interact(ins[k], ops[k], 1'b1);
      end
      // external garbled-output port
      @(negedge clk); gout_addr = 5'd10; #1;
      check(gout_label == (zl[10] ^ (((s == CHEAT) ? ~honest[0] : honest[0]) ? delta : '0)), "garbled output label");
      // decrypt on chip
      for (int j = 0; j < OW; j++) d[j] = zl[10 + j][0];
      @(negedge clk); dec_start = 1; out_base = 5'd10; gc_idx = 6'(s);
      @(negedge clk); dec_start = 0;
      while (!y_valid) @(negedge clk);
      expect_y = honest;
      if (s == CHEAT) expect_y[0] = ~expect_y[0];
      check(y == expect_y, $sformatf("set %0d decrypted output %b expected %b", s, y, expect_y));
      @(negedge clk);
      check(!dec_busy, "decrypt finished");
    end

    // cut-and-choose: 40 opened sets including the cheating one
    check_sel = '1; check_sel[0] = 1'b0;
    #1 check(cheat == 1'b1, "cheating set detected");
    if (cheat) n_cheat++;
    // 40 opened sets without it
    check_sel = '1; check_sel[CHEAT] = 1'b0;
    #1 check(cheat == 1'b0, "honest opened sets agree");
    if (!cheat) n_honest++;
    check(client_out == honest, $sformatf("majority output %b expected %b", client_out, honest));
    if (client_out == honest) n_major++;

    check(n_xor > 0, "free gates evaluated");
    check(n_tab > 0, "table gates evaluated");
    for (int r = 0; r < 4; r++) check(n_row[r] > 0, $sformatf("table row selection %0d used", r));
    check(n_nop > 0, "NOP slots");
    check(n_erase > 0, "erase after decode");
    check(n_miss > 0, "decode miss");
    check(n_dec == NGC, "one decryption per set");
    check(n_cheat > 0 && n_honest > 0 && n_major > 0, "cut-and-choose outcomes");
    $display("mechanisms: xor=%0d table=%0d rows=%0d/%0d/%0d/%0d nop=%0d erase=%0d miss=%0d decrypt=%0d cheat=%0d honest=%0d majority=%0d",
             n_xor, n_tab, n_row[0], n_row[1], n_row[2], n_row[3], n_nop, n_erase, n_miss, n_dec, n_cheat, n_honest, n_major);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
