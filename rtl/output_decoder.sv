// output_decoder: decryption of garbled output labels into raw bits.
//
// Each output wire's garbled label Y_j is turned into its plain bit by
// XOR with the decryption information d: with point-and-permute, d_j is
// the permute bit (LSB) of the wire's 0-label, so y_j = lsb(Y_j) xor d_j.
// Labels arrive one per clock (lbl_valid, idx, lbl_lsb); clear starts a new
// output word. When every one of the OUT_W bits has been received, y_valid
// rises and stays high with y until the next clear. The paper labels this
// step "Decryption (XOR with d)"; the format of d and the bit-serial
// collection are this design's choice.
module output_decoder #(
  parameter int unsigned OUT_W = 10,
  localparam int unsigned IW   = (OUT_W > 1) ? $clog2(OUT_W) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             lbl_valid,
  input  logic [IW-1:0]    idx,
  input  logic             lbl_lsb,
  input  logic [OUT_W-1:0] d,
  output logic [OUT_W-1:0] y,
  output logic             y_valid
);

  logic [OUT_W-1:0] got_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y     <= '0;
      got_q <= '0;
    end else if (clear) begin
      y     <= '0;
      got_q <= '0;
    end else if (lbl_valid && 32'(idx) < OUT_W) begin
      y[idx]     <= lbl_lsb ^ d[idx];
      got_q[idx] <= 1'b1;
    end
  end

  assign y_valid = &got_q;

endmodule
