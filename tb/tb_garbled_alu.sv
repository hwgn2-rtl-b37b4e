// tb_garbled_alu: garbles random two-input gates with the reference garbler
// (fresh free-XOR offset and labels each time) and checks that the ALU
// returns, for every input combination, exactly the output label that
// encodes the gate's truth value; checks free-XOR gates, the NOP mode and
// the latencies (done after 12 clock edges for a table gate and 1 for XOR,
// counting the edge that samples start).
module tb_garbled_alu;
  import hwgn2_pkg::*;
  import gc_ref_pkg::*;

  localparam logic [127:0] KEY = 128'h000102030405060708090a0b0c0d0e0f;

  logic clk = 0, rst_n = 0;
  gc_op_e mode = OP_NOP;
  logic start = 0;
  label_t a = '0, b = '0, y;
  logic [2:0][127:0] gtab = '0;
  logic [31:0] tweak = '0;
  logic busy, done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  garbled_alu #(.HASH_KEY(KEY)) dut (.clk, .rst_n, .mode, .start, .a, .b, .gtab, .tweak, .busy, .done, .y);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic eval(input gc_op_e m, output label_t res, output int edges);
    @(negedge clk); mode = m; start = 1;
    @(negedge clk); start = 0; edges = 1;
    while (!done) begin @(negedge clk); edges++; end
    res = y;
  endtask

  initial begin
    logic [127:0] delta, a0, b0, c0, yy;
    logic [2:0][127:0] rows;
    logic [3:0] tt;
    int e;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 24; g++) begin
      delta = rand128(); delta[0] = 1'b1;
      a0 = rand128(); b0 = rand128();
      case (g % 6)
        0: tt = 4'b1000;  // AND
        1: tt = 4'b1110;  // OR
        2: tt = 4'b0111;  // NAND
        3: tt = 4'b0001;  // NOR
        4: tt = 4'b0010;  // a AND NOT b
        default: tt = 4'($urandom());
      endcase
      tweak = $urandom();
      garble_gate(KEY, delta, a0, b0, tt, tweak, c0, rows);
      gtab = rows;
      for (int v = 0; v < 4; v++) begin
        a = a0 ^ (v[1] ? delta : '0);
        b = b0 ^ (v[0] ? delta : '0);
        eval(OP_TAB, yy, e);
        check(yy == (c0 ^ (tt[v] ? delta : '0)),
              $sformatf("table gate %0d tt=%b in=%0d", g, tt, v));
        check(e == 12, $sformatf("table gate latency %0d", e));
      end
      // free XOR on the same labels
      for (int v = 0; v < 4; v++) begin
        a = a0 ^ (v[1] ? delta : '0);
        b = b0 ^ (v[0] ? delta : '0);
        eval(OP_XOR, yy, e);
        check(yy == (a0 ^ b0 ^ ((v[1] ^ v[0]) ? delta : '0)), "free XOR label");
        check(e == 1, "XOR latency");
      end
    end
    // NOP completes and leaves y alone
    a = rand128();
    eval(OP_NOP, yy, e);
    check(yy == (a0 ^ b0), "NOP keeps y");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
