// tb_output_decoder: feeds random label LSBs in random order with random d
// and checks y = lsb xor d, y_valid only once all bits arrived, and clear.
module tb_output_decoder;
  localparam int W = 10;
  logic clk = 0, rst_n = 0;
  logic clear = 0, lbl_valid = 0, lbl_lsb = 0;
  logic [3:0] idx = '0;
  logic [W-1:0] d = '0, y;
  logic y_valid;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  output_decoder #(.OUT_W(W)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [W-1:0] lsbs, expect_y;
    int order [W];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 30; n++) begin
      lsbs = W'($urandom()); d = W'($urandom());
      expect_y = lsbs ^ d;
      for (int i = 0; i < W; i++) order[i] = i;
      order.shuffle();
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      check(!y_valid, "not valid after clear");
      for (int k = 0; k < W; k++) begin
        lbl_valid = 1; idx = 4'(order[k]); lbl_lsb = lsbs[order[k]];
        @(negedge clk);
        check(y_valid == (k == W - 1), "y_valid only after last bit");
      end
      lbl_valid = 0;
      check(y == expect_y, "decrypted word");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
