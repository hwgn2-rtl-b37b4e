// tb_garbled_instr_mem: loads random mapping entries, checks that every
// loaded code is found with its OP set, that unknown codes and invalid
// entries miss, that the lowest matching index wins, that an entry can be
// overwritten, and that erase clears every entry.
module tb_garbled_instr_mem;
  import hwgn2_pkg::*;

  localparam int D = 64;
  logic clk = 0, rst_n = 0;
  logic map_we = 0, erase = 0;
  logic [5:0] map_addr = '0;
  map_entry_t map_wdata = '0;
  gcode_t lookup_code = '0;
  logic hit;
  op_set_t hit_ops;
  logic [D-1:0] valid_mask;
  int checks = 0, failures = 0;
  map_entry_t model [D];

  always #5 clk = ~clk;

  garbled_instr_mem #(.MAP_DEPTH(D)) dut (.clk, .rst_n, .map_we, .map_addr, .map_wdata, .erase,
                                          .lookup_code, .hit, .hit_ops, .valid_mask);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic op_set_t rand_ops();
    op_set_t o;
    for (int j = 0; j < GATES; j++) o[j] = gc_op_e'($urandom_range(0, 2));
    return o;
  endfunction

  task automatic write(input int addr, input map_entry_t e);
    @(negedge clk); map_we = 1; map_addr = 6'(addr); map_wdata = e;
    @(negedge clk); map_we = 0;
    model[addr] = e;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(valid_mask == '0, "empty after reset");
    for (int i = 0; i < D; i++) begin
      map_entry_t e;
      e.valid = (i % 7 != 3);
      e.code  = {$urandom()} | 32'h1;
      e.ops   = rand_ops();
      write(i, e);
    end
    for (int i = 0; i < D; i++) begin
      lookup_code = model[i].code; #1;
      if (model[i].valid) begin
        check(hit, $sformatf("hit entry %0d", i));
        check(hit_ops == model[i].ops, $sformatf("ops entry %0d", i));
      end else begin
        check(!hit, $sformatf("invalid entry %0d must miss", i));
      end
    end
    lookup_code = 32'h0; #1;
    check(!hit, "code 0 misses");
    // duplicate code: lowest index wins
    begin
      map_entry_t e;
      e.valid = 1; e.code = model[10].code; e.ops = {OP_TAB, OP_TAB, OP_XOR, OP_XOR};
      write(50, e);
      e.ops = {OP_XOR, OP_NOP, OP_NOP, OP_TAB};
      write(5, e);
      lookup_code = model[10].code; #1;
      check(hit && hit_ops == model[5].ops, "lowest index wins");
    end
    // erase
    @(negedge clk); erase = 1;
    @(negedge clk); erase = 0;
    check(valid_mask == '0, "erase clears all entries");
    lookup_code = model[0].code; #1;
    check(!hit, "no hit after erase");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
