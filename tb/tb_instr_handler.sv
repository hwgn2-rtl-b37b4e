// tb_instr_handler: two handlers, the default one-cell handler (erase on)
// and a four-cell handler (erase off), in front of a mapping modelled in the
// testbench. Checks the code sent for lookup, the decoded OP set, operands
// and dec_err one edge after Fetch/Decode EN, and, for the one-cell
// handler, the erase request one edge later and the cleared cell.
module tb_instr_handler;
  import hwgn2_pkg::*;
  import gc_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  // mapping model: code -> ops
  op_set_t map_model [gcode_t];

  // one-cell handler
  logic we1 = 0, fd1 = 0;
  logic [0:0] addr1 = '0, idx1 = '0;
  garbled_instr_t wd1 = '0, di1;
  gcode_t lc1;
  logic hit1, er1, dv1, de1;
  op_set_t ops1, do1;
  always_comb begin
    hit1 = map_model.exists(lc1);
    ops1 = hit1 ? map_model[lc1] : {GATES{OP_NOP}};
  end
  instr_handler dut1 (.clk, .rst_n, .instr_we(we1), .instr_addr(addr1), .instr_wdata(wd1),
                      .fd_en(fd1), .fd_idx(idx1), .lookup_code(lc1), .map_hit(hit1), .map_ops(ops1),
                      .erase_req(er1), .dec_valid(dv1), .dec_ops(do1), .dec_instr(di1), .dec_err(de1));

  // four-cell handler
  logic we4 = 0, fd4 = 0;
  logic [1:0] addr4 = '0, idx4 = '0;
  garbled_instr_t wd4 = '0, di4;
  gcode_t lc4;
  logic hit4, er4, dv4, de4;
  op_set_t ops4, do4;
  always_comb begin
    hit4 = map_model.exists(lc4);
    ops4 = hit4 ? map_model[lc4] : {GATES{OP_NOP}};
  end
  instr_handler #(.INSTR_CAP(4)) dut4 (.clk, .rst_n, .instr_we(we4), .instr_addr(addr4), .instr_wdata(wd4),
                      .fd_en(fd4), .fd_idx(idx4), .lookup_code(lc4), .map_hit(hit4), .map_ops(ops4),
                      .erase_req(er4), .dec_valid(dv4), .dec_ops(do4), .dec_instr(di4), .dec_err(de4));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic garbled_instr_t rand_instr(input gcode_t c);
    garbled_instr_t g;
    g.code = c; g.gid = $urandom();
    for (int j = 0; j < GATES; j++) begin
      g.slot[j].ra = 5'($urandom()); g.slot[j].rb = 5'($urandom()); g.slot[j].rd = 5'($urandom());
      for (int r = 0; r < GT_ROWS; r++) g.slot[j].gtab[r] = rand128();
    end
    return g;
  endfunction

  initial begin
    gcode_t codes [8];
    garbled_instr_t g, cells [4];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 8; i++) begin
      op_set_t o;
      codes[i] = $urandom() | 32'h1;
      for (int j = 0; j < GATES; j++) o[j] = gc_op_e'($urandom_range(0, 2));
      map_model[codes[i]] = o;
    end
    // one-cell handler: 12 instructions, every third one with an unknown code
    for (int n = 0; n < 12; n++) begin
      gcode_t c;
      c = (n % 3 == 2) ? 32'hdead_0000 : codes[n % 8];
      g = rand_instr(c);
      @(negedge clk); we1 = 1; wd1 = g;
      @(negedge clk); we1 = 0;
      check(lc1 == c, "code sent for lookup");
      fd1 = 1;
      @(negedge clk); fd1 = 0;
      check(dv1, "dec_valid one edge after fd_en");
      check(de1 == !map_model.exists(c), "dec_err");
      check(do1 == (map_model.exists(c) ? map_model[c] : {GATES{OP_NOP}}), "decoded OP set");
      check(di1 == g, "decoded operands");
      check(!er1, "no erase yet");
      @(negedge clk);
      check(er1, "erase request after decode");
      check(!dv1, "dec_valid is a pulse");
      check(lc1 == '0, "cell cleared by erase");
      check(di1 == g, "decoded instruction held after erase");
    end
    // four-cell handler: load four, decode in a shuffled order, no erase
    for (int i = 0; i < 4; i++) begin
      cells[i] = rand_instr(codes[i]);
      @(negedge clk); we4 = 1; addr4 = 2'(i); wd4 = cells[i];
    end
    @(negedge clk); we4 = 0;
    for (int k = 0; k < 8; k++) begin
      int i;
      i = (k * 3 + 1) % 4;
      idx4 = 2'(i); fd4 = 1;
      @(negedge clk); fd4 = 0;
      check(dv4 && !de4 && do4 == map_model[codes[i]] && di4 == cells[i], $sformatf("cell %0d decode", i));
      @(negedge clk);
      check(!er4, "no erase in multi-cell mode");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
