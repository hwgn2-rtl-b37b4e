// tb_xor_tree: all-equal selected outputs give cheat=0 even when unselected
// ones differ; one or two deviating selected outputs give cheat=1; fewer
// than two selected give 0.
module tb_xor_tree;
  localparam int N = 41, W = 10;
  logic [N-1:0][W-1:0] vals;
  logic [N-1:0] sel;
  logic cheat;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  xor_tree #(.NUM_GC(N), .OUT_W(W)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [W-1:0] v, w;
    int i1, i2;
    for (int n = 0; n < 50; n++) begin
      v = W'($urandom());
      sel = '0;
      for (int i = 0; i < 40; i++) sel[$urandom_range(0, N-1)] = 1'b1;
      for (int i = 0; i < N; i++) vals[i] = sel[i] ? v : W'($urandom());
      #1 check(cheat == 1'b0, "honest sets");
      // one deviating opened set
      i1 = $urandom_range(0, N-1); sel[i1] = 1'b1;
      w = v ^ (W'(1) << $urandom_range(0, W-1));
      vals[i1] = w;
      #1 check(cheat == 1'b1, "one cheating set");
      // two identical deviations (a plain XOR of all would miss this)
      do i2 = $urandom_range(0, N-1); while (i2 == i1);
      sel[i2] = 1'b1; vals[i2] = w;
      #1 check(cheat == 1'b1, "two cheating sets");
    end
    sel = '0; sel[3] = 1; vals[3] = '1; #1 check(cheat == 1'b0, "single selected");
    sel = '0; #1 check(cheat == 1'b0, "none selected");
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
