// tb_majority_output: random words, bitwise majority checked against a
// count; also the 20-of-41 and 21-of-41 boundary for each bit.
module tb_majority_output;
  localparam int N = 41, W = 10;
  logic [N-1:0][W-1:0] vals;
  logic [W-1:0] maj;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  majority_output #(.NUM_GC(N), .OUT_W(W)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [W-1:0] e;
    int c;
    for (int n = 0; n < 200; n++) begin
      for (int i = 0; i < N; i++) vals[i] = W'($urandom()) & W'($urandom()) | ((n % 2) ? W'($urandom()) : '0);
      for (int b = 0; b < W; b++) begin
        c = 0;
        for (int i = 0; i < N; i++) c += vals[i][b];
        e[b] = (c > N / 2);
      end
      #1 check(maj == e, "random majority");
    end
    for (int b = 0; b < W; b++) begin
      vals = '0;
      for (int i = 0; i < 20; i++) vals[i][b] = 1'b1;
      #1 check(maj == '0, "20 of 41 is not a majority");
      vals[40][b] = 1'b1;
      #1 check(maj == (W'(1) << b), "21 of 41 is a majority");
    end
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
