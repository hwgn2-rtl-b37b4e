// tb_controller: a four-cell controller driven by a behavioural handler and
// a behavioural ALU (done 1 edge after start for XOR, 12 for a table gate).
// Checks, for random instruction programs, the order of ALU operations with
// their mode, operand registers, table and tweak, the destination of every
// write, and the cycle count from run to done:
//   1 + sum over instructions of 3 + (1 per NOP, 2 per XOR, 13 per table
//   gate), counting the edge that samples run.
module tb_controller;
  import hwgn2_pkg::*;
  import gc_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic run = 0;
  logic [2:0] n_instr = '0;
  logic fd_en;
  logic [1:0] fd_idx;
  logic dec_valid = 0;
  op_set_t dec_ops = '0;
  garbled_instr_t dec_instr = '0;
  gc_op_e alu_mode;
  logic alu_start, alu_done = 0;
  logic [2:0][127:0] alu_gtab;
  logic [31:0] alu_tweak;
  logic [4:0] ra_addr, rb_addr, wr_addr;
  logic wr_en, busy, done;

  controller #(.INSTR_CAP(4)) dut (.*);

  garbled_instr_t prog [4];
  op_set_t        progops [4];

  // behavioural handler
  always @(posedge clk) begin
    dec_valid <= fd_en;
    if (fd_en) begin
      dec_ops   <= progops[fd_idx];
      dec_instr <= prog[fd_idx];
    end
  end

  // behavioural ALU
  int alu_cnt = -1;
  always @(posedge clk) begin
    alu_done <= 1'b0;
    if (alu_start) alu_cnt <= (alu_mode == OP_TAB) ? 11 : 0;
    else if (alu_cnt > 0) alu_cnt <= alu_cnt - 1;
    if (alu_start && alu_mode != OP_TAB) alu_done <= 1'b1;
    if (!alu_start && alu_cnt == 1) alu_done <= 1'b1;
    if (!alu_start && alu_cnt == 1) alu_cnt <= -1;
  end

  // observed events
  typedef struct { gc_op_e m; logic [4:0] ra, rb; logic [2:0][127:0] gt; logic [31:0] tw; } ev_t;
  ev_t starts [$];
  logic [4:0] writes [$];
  always @(posedge clk) if (rst_n) begin
    if (alu_start) starts.push_back('{alu_mode, ra_addr, rb_addr, alu_gtab, alu_tweak});
    if (wr_en) writes.push_back(wr_addr);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int cyc, expect_cyc, k;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      int n;
      n = 1 + (t % 4);
      expect_cyc = 1;
      for (int i = 0; i < 4; i++) begin
        prog[i].code = $urandom(); prog[i].gid = $urandom();
        for (int j = 0; j < GATES; j++) begin
          prog[i].slot[j].ra = 5'($urandom()); prog[i].slot[j].rb = 5'($urandom());
          prog[i].slot[j].rd = 5'($urandom());
          for (int r = 0; r < 3; r++) prog[i].slot[j].gtab[r] = rand128();
          progops[i][j] = gc_op_e'($urandom_range(0, 2));
        end
        if (i < n) begin
          expect_cyc += 3;
          for (int j = 0; j < GATES; j++)
            expect_cyc += (progops[i][j] == OP_NOP) ? 1 : (progops[i][j] == OP_XOR) ? 2 : 13;
        end
      end
      starts.delete(); writes.delete();
      @(negedge clk); run = 1; n_instr = 3'(n);
      @(negedge clk); run = 0; cyc = 1;
      check(busy, "busy after run");
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc == expect_cyc, $sformatf("cycles %0d expected %0d", cyc, expect_cyc));
      @(negedge clk);
      check(!busy, "idle after done");
      k = 0;
      for (int i = 0; i < n; i++)
        for (int j = 0; j < GATES; j++)
          if (progops[i][j] != OP_NOP) begin
            if (k < starts.size()) begin
              check(starts[k].m == progops[i][j], "ALU mode");
              check(starts[k].ra == prog[i].slot[j].ra && starts[k].rb == prog[i].slot[j].rb, "operand registers");
              check(starts[k].gt == prog[i].slot[j].gtab, "garbled table");
              check(starts[k].tw == prog[i].gid + 32'(j), "tweak gid+slot");
              check(writes[k] == prog[i].slot[j].rd, "destination register");
            end
            k++;
          end
      check(k == starts.size() && k == writes.size(), "number of ALU operations and writes");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
