// tb_label_mem: writes random labels through both write ports, checks the
// three read ports against a model, the ALU-wins rule on a same-register
// write, and reset to zero.
module tb_label_mem;
  import hwgn2_pkg::*;
  import gc_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic ext_we = 0, alu_we = 0;
  logic [4:0] ext_waddr = '0, alu_waddr = '0, ra_addr = '0, rb_addr = '0, rx_addr = '0;
  label_t ext_wdata = '0, alu_wdata = '0, ra_data, rb_data, rx_data;
  label_t model [32];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  label_mem #(.NREGS(32)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 32; i++) begin
      rx_addr = 5'(i); #1;
      check(rx_data == '0, "zero after reset");
      model[i] = '0;
    end
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      ext_we = 1'($urandom()); ext_waddr = 5'($urandom()); ext_wdata = rand128();
      alu_we = 1'($urandom()); alu_waddr = (n % 5 == 0) ? ext_waddr : 5'($urandom()); alu_wdata = rand128();
      @(posedge clk); #1;
      if (ext_we) model[ext_waddr] = ext_wdata;
      if (alu_we) model[alu_waddr] = alu_wdata;
      ext_we = 0; alu_we = 0;
      ra_addr = 5'($urandom()); rb_addr = 5'($urandom()); rx_addr = 5'($urandom()); #1;
      check(ra_data == model[ra_addr], "port a");
      check(rb_data == model[rb_addr], "port b");
      check(rx_data == model[rx_addr], "port x");
    end
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
