// tb_garbled_mips_evaluator: runs random garbled netlists on two evaluator
// cores, the default one-instruction-per-interaction core (mapping and
// cell reloaded for every instruction) and an eight-cell core loaded with
// the complete program at once. All 32 label registers start with the
// garbled labels of random bits; after the run every register's label must
// equal the label of the bit the plain netlist computes. Also checks the
// run-to-done cycle count, the erase after each interaction (a rerun
// without reloading misses the mapping) and decode-miss reporting.
module tb_garbled_mips_evaluator;
  import hwgn2_pkg::*;
  import gc_ref_pkg::*;
  import gc_prog_pkg::*;

  localparam logic [127:0] KEY = 128'h000102030405060708090a0b0c0d0e0f;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  // shared stimulus bundle, one set of wires per core
  logic       map_we [2];
  logic [5:0] map_addr [2];
  map_entry_t map_wdata [2];
  logic       instr_we [2];
  logic [2:0] instr_addr [2];
  garbled_instr_t instr_wdata [2];
  logic       gin_we [2];
  logic [4:0] gin_addr [2], gout_addr [2];
  label_t     gin_label [2], gout_label [2];
  logic       run [2];
  logic [3:0] n_instr [2];
  logic       busy [2], done [2], dec_err_seen [2], erase_pulse [2];

  garbled_mips_evaluator #(.HASH_KEY(KEY)) dut1 (
    .clk, .rst_n, .map_we(map_we[0]), .map_addr(map_addr[0]), .map_wdata(map_wdata[0]),
    .instr_we(instr_we[0]), .instr_addr(instr_addr[0][0:0]), .instr_wdata(instr_wdata[0]),
    .gin_we(gin_we[0]), .gin_addr(gin_addr[0]), .gin_label(gin_label[0]),
    .gout_addr(gout_addr[0]), .gout_label(gout_label[0]),
    .run(run[0]), .n_instr(n_instr[0][0:0]), .busy(busy[0]), .done(done[0]),
    .dec_err_seen(dec_err_seen[0]), .erase_pulse(erase_pulse[0]));

  garbled_mips_evaluator #(.INSTR_CAP(8), .HASH_KEY(KEY)) dut8 (
    .clk, .rst_n, .map_we(map_we[1]), .map_addr(map_addr[1]), .map_wdata(map_wdata[1]),
    .instr_we(instr_we[1]), .instr_addr(instr_addr[1]), .instr_wdata(instr_wdata[1]),
    .gin_we(gin_we[1]), .gin_addr(gin_addr[1]), .gin_label(gin_label[1]),
    .gout_addr(gout_addr[1]), .gout_label(gout_label[1]),
    .run(run[1]), .n_instr(n_instr[1]), .busy(busy[1]), .done(done[1]),
    .dec_err_seen(dec_err_seen[1]), .erase_pulse(erase_pulse[1]));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr_map(input int c, input int addr, input map_entry_t e);
    @(negedge clk); map_we[c] = 1; map_addr[c] = 6'(addr); map_wdata[c] = e;
    @(negedge clk); map_we[c] = 0;
  endtask

  task automatic wr_instr(input int c, input int addr, input garbled_instr_t g);
    @(negedge clk); instr_we[c] = 1; instr_addr[c] = 3'(addr); instr_wdata[c] = g;
    @(negedge clk); instr_we[c] = 0;
  endtask

  task automatic wr_label(input int c, input int r, input label_t l);
    @(negedge clk); gin_we[c] = 1; gin_addr[c] = 5'(r); gin_label[c] = l;
    @(negedge clk); gin_we[c] = 0;
  endtask

  task automatic do_run(input int c, input int n, output int cyc);
    @(negedge clk); run[c] = 1; n_instr[c] = 4'(n);
    @(negedge clk); run[c] = 0; cyc = 1;
    while (!done[c]) begin @(negedge clk); cyc++; end
  endtask

  function automatic int instr_cycles(input op_set_t o);
    int s;
    s = 3;
    for (int j = 0; j < GATES; j++) s += (o[j] == OP_NOP) ? 1 : (o[j] == OP_XOR) ? 2 : 13;
    return s;
  endfunction

  function automatic map_entry_t decoy();
    map_entry_t e;
    e.valid = 1; e.code = $urandom() & 32'h7fff_ffff;
    for (int j = 0; j < GATES; j++) e.ops[j] = gc_op_e'($urandom_range(0, 2));
    return e;
  endfunction

  initial begin
    gate_t g [$];
    label_t zl [32];
    logic v [32];
    logic [127:0] delta;
    logic [31:0] gid;
    garbled_instr_t ins [$];
    op_set_t ops [$];
    int cyc;
    for (int c = 0; c < 2; c++) begin
      map_we[c] = 0; instr_we[c] = 0; gin_we[c] = 0; run[c] = 0; n_instr[c] = 0;
      map_addr[c] = 0; map_wdata[c] = '0; instr_addr[c] = 0; instr_wdata[c] = '0;
      gin_addr[c] = 0; gin_label[c] = '0; gout_addr[c] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      int c;
      c = t % 2;
      // random netlist of 24 gates over 32 registers
      g.delete();
      for (int i = 0; i < 24; i++) begin
        gate_t x;
        x.kind = gkind_e'($urandom_range(0, 2));
        x.tt = 4'($urandom());
        x.a = $urandom_range(0, 31); x.b = $urandom_range(0, 31); x.d = $urandom_range(0, 31);
        g.push_back(x);
      end
      delta = rand128(); delta[0] = 1'b1;
      gid = $urandom();
      for (int r = 0; r < 32; r++) begin
        zl[r] = rand128();
        v[r]  = 1'($urandom());
        wr_label(c, r, zl[r] ^ (v[r] ? delta : '0));
      end
      garble_prog(KEY, delta, g, zl, gid, ins, ops);
      plain_eval(g, v);
      if (c == 0) begin
        // one instruction per interaction: mapping + cell each time
        foreach (ins[k]) begin
          map_entry_t e;
          for (int q = 0; q < 3; q++) wr_map(0, q, decoy());
          e.valid = 1; e.code = ins[k].code; e.ops = ops[k];
          wr_map(0, 3 + (k % 5), e);
          wr_instr(0, 0, ins[k]);
          do_run(0, 1, cyc);
          check(cyc == 1 + instr_cycles(ops[k]), $sformatf("one-instruction cycles %0d", cyc));
          check(!dec_err_seen[0], "no decode miss");
        end
        // rerun without reloading: the erase left nothing to decode
        do_run(0, 1, cyc);
        check(dec_err_seen[0], "erased mapping misses on rerun");
      end else begin
        int total;
        total = 1;
        foreach (ins[k]) begin
          map_entry_t e;
          e.valid = 1; e.code = ins[k].code; e.ops = ops[k];
          wr_map(1, 2 * k + 1, e);
          wr_map(1, 2 * k, decoy());
          wr_instr(1, k, ins[k]);
          total += instr_cycles(ops[k]);
        end
        do_run(1, ins.size(), cyc);
        check(cyc == total, $sformatf("complete-set cycles %0d expected %0d", cyc, total));
        check(!dec_err_seen[1], "no decode miss (complete set)");
      end
      for (int r = 0; r < 32; r++) begin
        gout_addr[c] = 5'(r); #1;
        check(gout_label[c] == (zl[r] ^ (v[r] ? delta : '0)), $sformatf("core %0d register %0d label", c, r));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
