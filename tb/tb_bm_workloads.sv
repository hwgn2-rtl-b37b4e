// tb_bm_workloads: the paper's small benchmark networks, streamed through
// the chip one garbled instruction per interaction, at default sizes.
//
// BM2 (784-5-5-10) and BM3 (784-6-5-5-10) are built here as binarised
// (XNOR) networks with random binary weights and inputs; the trained
// weights are not available. Neuron with K inputs: p_i = x_i xnor w_i
// (free), popcount by rippling each p_i into a W-bit accumulator that
// starts at 2^(W-1) - T (T = ceil(K/2)), so the accumulator's top bit is
// the sign activation popcount >= T. Per input: 1 XNOR + W XOR + (W-1) AND.
// The netlist lives in wire space; for each group of four gates the
// testbench acts as both parties of the paper's sub-netlist flow: the
// garbler garbles the group, the group's input labels (evaluator input X,
// garbler weights and constants L_i, earlier results Y) are loaded into
// label registers, mapping and instruction are sent, the chip runs, and
// the result labels are read back (Y_i). Every gate output label is
// checked against the label of its plain value, the cycle count of every
// interaction is checked, and the 10 network outputs are decrypted on chip.
module tb_bm_workloads;
  import hwgn2_pkg::*;
  import gc_ref_pkg::*;
  import gc_prog_pkg::*;

  localparam logic [127:0] KEY = 128'h000102030405060708090a0b0c0d0e0f;

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
  logic [9:0] d = '0, y, client_out;
  logic [5:0] gc_idx = '0;
  logic [40:0] check_sel = '0;

  hwgn2_top dut (.*);

  // wire-space netlist
  gate_t   gl [$];
  logic    pv [$];       // plain value per wire
  label_t  zl [$];       // garbler 0-label per wire
  label_t  lab [$];      // label held by the evaluator per wire
  logic [127:0] delta;
  int n_interactions;

  function automatic int new_wire(input logic v);
    pv.push_back(v);
    zl.push_back(rand128());
    lab.push_back(zl[zl.size() - 1] ^ (v ? delta : '0));  // inputs: known label
    return pv.size() - 1;
  endfunction

  function automatic int add_gate(input gkind_e k, input logic [3:0] tt, input int a, input int b);
    gate_t g;
    logic v;
    int w;
    case (k)
      G_XOR:   v = pv[a] ^ pv[b];
      G_XNOR:  v = ~(pv[a] ^ pv[b]);
      default: v = tt[{pv[a], pv[b]}];
    endcase
    w = new_wire(v);
    lab[w] = '0;          // computed by the chip
    g.kind = k; g.tt = tt; g.a = a; g.b = b; g.d = w;
    gl.push_back(g);
    return w;
  endfunction

  function automatic int neuron(input int xin [$]);
    int K, W, T, carry, s, c;
    int acc [$];
    K = xin.size();
    W = $clog2(K + 1) + 1;
    T = (K + 1) / 2;
    for (int k = 0; k < W; k++) acc.push_back(new_wire(1'(((1 << (W - 1)) - T) >> k)));
    for (int i = 0; i < K; i++) begin
      int wt;
      wt = new_wire(1'($urandom()));
      carry = add_gate(G_XNOR, 4'b0, xin[i], wt);
      for (int k = 0; k < W; k++) begin
        s = add_gate(G_XOR, 4'b0, acc[k], carry);
        if (k < W - 1) begin
          c = add_gate(G_TAB, 4'b1000, acc[k], carry);
          carry = c;
        end
        acc[k] = s;
      end
    end
    return acc[W - 1];
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic map_entry_t decoy();
    map_entry_t e;
    e.valid = 1; e.code = $urandom() & 32'h7fff_ffff;
    for (int j = 0; j < GATES; j++) e.ops[j] = gc_op_e'($urandom_range(0, 2));
    return e;
  endfunction

  // garble and run gates [first, first+4) as one interaction
  task automatic interact(input int first, input int gid);
    garbled_instr_t gi;
    op_set_t o;
    int regof [int];
    int nreg, cyc, expect_cyc;
    map_entry_t e;
    gi = '0;
    gi.code = $urandom() | 32'h8000_0000;
    gi.gid = gid;
    nreg = 0;
    expect_cyc = 1 + 3;
    for (int j = 0; j < GATES; j++) begin
      int idx;
      idx = first + j;
      o[j] = OP_NOP;
      expect_cyc += 1;
      if (idx < gl.size()) begin
        gate_t g;
        g = gl[idx];
        if (!regof.exists(g.a)) begin
          regof[g.a] = nreg; nreg++;
          @(negedge clk); gin_we = 1; gin_addr = 5'(regof[g.a]); gin_label = lab[g.a];
        end
        if (!regof.exists(g.b)) begin
          regof[g.b] = nreg; nreg++;
          @(negedge clk); gin_we = 1; gin_addr = 5'(regof[g.b]); gin_label = lab[g.b];
        end
        regof[g.d] = nreg; nreg++;
        gi.slot[j].ra = 5'(regof[g.a]);
        gi.slot[j].rb = 5'(regof[g.b]);
        gi.slot[j].rd = 5'(regof[g.d]);
        case (g.kind)
          G_XOR:  begin o[j] = OP_XOR; zl[g.d] = zl[g.a] ^ zl[g.b]; expect_cyc += 1; end
          G_XNOR: begin o[j] = OP_XOR; zl[g.d] = zl[g.a] ^ zl[g.b] ^ delta; expect_cyc += 1; end
          default: begin
            label_t c0;
            logic [2:0][127:0] rows;
            o[j] = OP_TAB;
            garble_gate(KEY, delta, zl[g.a], zl[g.b], g.tt, gid + j, c0, rows);
            gi.slot[j].gtab = rows;
            zl[g.d] = c0;
            expect_cyc += 12;
          end
        endcase
      end
    end
    @(negedge clk); gin_we = 0;
    map_we = 1; map_addr = 6'($urandom_range(0, 31)); map_wdata = decoy();
    @(negedge clk); map_addr = 6'($urandom_range(32, 63)); e.valid = 1; e.code = gi.code; e.ops = o; map_wdata = e;
    @(negedge clk); map_we = 0; instr_we = 1; instr_wdata = gi;
    @(negedge clk); instr_we = 0; run = 1; n_instr = 1'b1;
    @(negedge clk); run = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    check(cyc == expect_cyc, $sformatf("interaction cycles %0d expected %0d", cyc, expect_cyc));
    for (int j = 0; j < GATES; j++) begin
      int idx;
      idx = first + j;
      if (idx < gl.size()) begin
        gout_addr = 5'(regof[gl[idx].d]); #1;
        lab[gl[idx].d] = gout_label;
        check(gout_label == (zl[gl[idx].d] ^ (pv[gl[idx].d] ? delta : '0)), "gate output label");
      end
    end
    n_interactions++;
  endtask

  task automatic run_net(input string name, input int sizes [$]);
    int layer_in [$], layer_out [$];
    int ngates, t0, t1;
    gl.delete(); pv.delete(); zl.delete(); lab.delete();
    delta = rand128(); delta[0] = 1'b1;
    n_interactions = 0;
    for (int i = 0; i < sizes[0]; i++) layer_in.push_back(new_wire(1'($urandom())));
    for (int l = 1; l < sizes.size(); l++) begin
      layer_out.delete();
      for (int n = 0; n < sizes[l]; n++) layer_out.push_back(neuron(layer_in));
      layer_in = layer_out;
    end
    ngates = gl.size();
    t0 = $time;
    for (int f = 0; f < ngates; f += GATES) interact(f, f);
    t1 = $time;
    // decrypt the 10 outputs on chip
    for (int j = 0; j < 10; j++) begin
      @(negedge clk); gin_we = 1; gin_addr = 5'(10 + j); gin_label = lab[layer_in[j]];
      d[j] = zl[layer_in[j]][0];
    end
    @(negedge clk); gin_we = 0; dec_start = 1; out_base = 5'd10; gc_idx = '0;
    @(negedge clk); dec_start = 0;
    while (!y_valid) @(negedge clk);
    for (int j = 0; j < 10; j++) check(y[j] == pv[layer_in[j]], $sformatf("%s output %0d", name, j));
    check(!dec_err_seen, "no decode miss");
    $display("%s: %0d gates, %0d garbled instructions, %0d interactions, %0d cycles, outputs %b",
             name, ngates, (ngates + 3) / 4, n_interactions, (t1 - t0) / 10, y);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_net("BM2 784-5-5-10", '{784, 5, 5, 10});
    run_net("BM3 784-6-5-5-10", '{784, 6, 5, 5, 10});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
