// tb_hwgn2_top_complete_set: the whole chip in the complete-set mode, where
// the garbled program and its decode mapping arrive in one interaction.
//
// The top is built with INSTR_CAP = 16 instruction cells (which turns the
// erase off), OUT_W = 6 output bits and NUM_GC = 3 garbled sets. Workload:
// a binarised (XNOR) layer of 6 neurons on a 3-bit input, each neuron
// majority(x_i xnor w_ij) as in tb_hwgn2_top. All 18 weight labels, the 3
// input labels, 4 shared temporaries and the 6 outputs stay in the label
// registers, so the 42 gates are one program of 11 garbled instructions.
// Per set: all 11 mapping entries plus decoys are written, then all 11
// cells, then a single run; the cycle count must be the sum of the
// per-instruction costs, no erase may happen, and the 6 outputs are
// decrypted on chip. Set 1 garbles neuron 0's OR as NOR: the XOR-tree must
// flag it when sets 0 and 1 are opened and not when sets 0 and 2 are, and
// the majority over the three sets must be the honest output.
module tb_hwgn2_top_complete_set;
  import hwgn2_pkg::*;
  import gc_ref_pkg::*;
  import gc_prog_pkg::*;

  localparam logic [127:0] KEY = 128'h000102030405060708090a0b0c0d0e0f;
  localparam int NGC = 3, OW = 6, CAP = 16, CHEAT = 1;
  localparam int XB = 0, WB = 3, TB = 21, OB = 25;   // register layout

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  int n_erase = 0, n_runs = 0, n_cheat = 0, n_honest = 0, n_major = 0;
  always #5 clk = ~clk;

  logic map_we = 0, instr_we = 0, gin_we = 0, run = 0, dec_start = 0;
  logic [5:0] map_addr = '0;
  map_entry_t map_wdata = '0;
  logic [3:0] instr_addr = '0;
  garbled_instr_t instr_wdata = '0;
  logic [4:0] gin_addr = '0, gout_addr = '0, out_base = '0;
  label_t gin_label = '0, gout_label;
  logic [4:0] n_instr = '0;
  logic busy, done, dec_err_seen, erase_pulse, dec_busy, y_valid, res_wr, cheat;
  logic [OW-1:0] d = '0, y, client_out;
  logic [1:0] gc_idx = '0;
  logic [NGC-1:0] check_sel = '0;

  hwgn2_top #(.INSTR_CAP(CAP), .NUM_GC(NGC), .OUT_W(OW)) dut (.*);

  always @(posedge clk) if (rst_n && erase_pulse) n_erase++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr_label(input int r, input label_t l);
    @(negedge clk); gin_we = 1; gin_addr = 5'(r); gin_label = l;
    @(negedge clk); gin_we = 0;
  endtask

  function automatic int instr_cycles(input op_set_t o);
    int s;
    s = 3;
    for (int j = 0; j < GATES; j++) s += (o[j] == OP_NOP) ? 1 : (o[j] == OP_XOR) ? 2 : 13;
    return s;
  endfunction

  function automatic void layer_gates(input bit cheat_or, output gate_t g [$]);
    gate_t t;
    g.delete();
    for (int j = 0; j < OW; j++) begin
      t.tt = '0;
      t.kind = G_XNOR; t.a = XB;     t.b = WB + 3*j;     t.d = TB;     g.push_back(t);
      t.kind = G_XNOR; t.a = XB + 1; t.b = WB + 3*j + 1; t.d = TB + 1; g.push_back(t);
      t.kind = G_XNOR; t.a = XB + 2; t.b = WB + 3*j + 2; t.d = TB + 2; g.push_back(t);
      t.kind = G_TAB;  t.tt = 4'b1000; t.a = TB; t.b = TB + 1; t.d = TB + 3; g.push_back(t);
      t.kind = G_XOR;  t.a = TB; t.b = TB + 1; t.d = TB; g.push_back(t);
      t.kind = G_TAB;  t.tt = 4'b1000; t.a = TB + 2; t.b = TB; t.d = TB; g.push_back(t);
      t.kind = G_TAB;  t.tt = (cheat_or && j == 0) ? 4'b0001 : 4'b1110;
      t.a = TB + 3; t.b = TB; t.d = OB + j; g.push_back(t);
    end
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
    int cyc, expect_cyc, slot [$];

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
      for (int i = 0; i < 3; i++) wr_label(XB + i, zl[XB + i] ^ (x[i] ? delta : '0));
      for (int j = 0; j < OW; j++)
        for (int i = 0; i < 3; i++) wr_label(WB + 3*j + i, zl[WB + 3*j + i] ^ (w[j][i] ? delta : '0));
      layer_gates(s == CHEAT, g);
      garble_prog(KEY, delta, g, zl, gid, ins, ops);
      check(ins.size() == 11, "program length");
      // complete decode mapping at once, shuffled over the 64 entries with decoys
      slot.delete();
      for (int a = 0; a < 64; a++) slot.push_back(a);
      slot.shuffle();
      for (int a = 0; a < 64; a++) begin
        map_entry_t e;
        if (a < ins.size()) begin
          e.valid = 1; e.code = ins[a].code; e.ops = ops[a];
        end else begin
          e.valid = 1; e.code = $urandom() & 32'h7fff_ffff;
          for (int k = 0; k < GATES; k++) e.ops[k] = gc_op_e'($urandom_range(0, 2));
        end
        @(negedge clk); map_we = 1; map_addr = 6'(slot[a]); map_wdata = e;
      end
      @(negedge clk); map_we = 0;
      // complete instruction set at once
      foreach (ins[k]) begin
        @(negedge clk); instr_we = 1; instr_addr = 4'(k); instr_wdata = ins[k];
      end
      @(negedge clk); instr_we = 0; run = 1; n_instr = 5'(ins.size());
      @(negedge clk); run = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      n_runs++;
      expect_cyc = 1;
      foreach (ops[k]) expect_cyc += instr_cycles(ops[k]);
      check(cyc == expect_cyc, $sformatf("set %0d run %0d cycles, expected %0d", s, cyc, expect_cyc));
      check(!dec_err_seen, "every instruction decoded");
      for (int j = 0; j < OW; j++) begin
        logic v;
        v = honest[j] ^ ((s == CHEAT) && (j == 0));
        gout_addr = 5'(OB + j); #1;
        check(gout_label == (zl[OB + j] ^ (v ? delta : '0)), "output label");
        d[j] = zl[OB + j][0];
      end
      @(negedge clk); dec_start = 1; out_base = 5'(OB); gc_idx = 2'(s);
      @(negedge clk); dec_start = 0;
      while (!y_valid) @(negedge clk);
      expect_y = honest;
      if (s == CHEAT) expect_y[0] = ~expect_y[0];
      check(y == expect_y, $sformatf("set %0d decrypted %b expected %b", s, y, expect_y));
    end
    @(negedge clk);
    check(n_erase == 0, "no erase in complete-set mode");
    check_sel = 3'b011;
    #1 check(cheat == 1'b1, "cheating set detected");
    if (cheat) n_cheat++;
    check_sel = 3'b101;
    #1 check(cheat == 1'b0, "honest opened sets agree");
    if (!cheat) n_honest++;
    check(client_out == honest, $sformatf("majority %b expected %b", client_out, honest));
    if (client_out == honest) n_major++;
    check(n_runs == NGC && n_cheat > 0 && n_honest > 0 && n_major > 0, "mechanisms seen");
    $display("complete-set runs=%0d erase=%0d cheat=%0d honest=%0d majority=%0d",
             n_runs, n_erase, n_cheat, n_honest, n_major);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
