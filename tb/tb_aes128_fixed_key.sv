// tb_aes128_fixed_key: checks the iterative AES-128 against the FIPS-197
// example vector and against the reference model for random blocks and a
// second key, and checks the start-to-done latency of 10 clock edges.
module tb_aes128_fixed_key;
  import gc_ref_pkg::*;

  localparam logic [127:0] K1 = 128'h000102030405060708090a0b0c0d0e0f;
  localparam logic [127:0] K2 = 128'h2b7e151628aed2a6abf7158809cf4f3c;

  logic clk = 0, rst_n = 0;
  logic start1 = 0, start2 = 0;
  logic [127:0] din = '0, dout1, dout2;
  logic busy1, done1, busy2, done2;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  aes128_fixed_key #(.KEY(K1)) dut1 (.clk, .rst_n, .start(start1), .din, .busy(busy1), .done(done1), .dout(dout1));
  aes128_fixed_key #(.KEY(K2)) dut2 (.clk, .rst_n, .start(start2), .din, .busy(busy2), .done(done2), .dout(dout2));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic enc1(input logic [127:0] pt, output logic [127:0] ct, output int lat);
    @(negedge clk); din = pt; start1 = 1;
    @(negedge clk); start1 = 0; lat = 1;
    check(busy1, "busy after start");
    while (!done1) begin @(negedge clk); lat++; end
    ct = dout1;
  endtask

  initial begin
    logic [127:0] ct, pt;
    int lat;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // the reference itself against FIPS-197 appendix C.1
    check(ref_aes(K1, 128'h00112233445566778899aabbccddeeff) == 128'h69c4e0d86a7b0430d8cdb78070b4c55a, "reference model C.1");
    // and against FIPS-197 appendix B (key 2b7e..)
    check(ref_aes(K2, 128'h3243f6a8885a308d313198a2e0370734) == 128'h3925841d02dc09fbdc118597196a0b32, "reference model B");
    enc1(128'h00112233445566778899aabbccddeeff, ct, lat);
    check(ct == 128'h69c4e0d86a7b0430d8cdb78070b4c55a, "FIPS-197 C.1 vector");
    check(lat - 1 == 10, $sformatf("latency %0d edges, expected 10", lat - 1));
    for (int n = 0; n < 20; n++) begin
      pt = rand128();
      enc1(pt, ct, lat);
      check(ct == ref_aes(K1, pt), "random block key 1");
      check(lat - 1 == 10, "latency random block");
    end
    // second key instance
    @(negedge clk); din = 128'h3243f6a8885a308d313198a2e0370734; start2 = 1;
    @(negedge clk); start2 = 0;
    while (!done2) @(negedge clk);
    check(dout2 == 128'h3925841d02dc09fbdc118597196a0b32, "FIPS-197 B vector, second key");
    // start while busy is ignored: result still for the first block
    @(negedge clk); din = 128'h0; start1 = 1;
    @(negedge clk); din = 128'h1;
    @(negedge clk); start1 = 0;
    while (!done1) @(negedge clk);
    check(dout1 == ref_aes(K1, 128'h0), "start while busy ignored");
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
