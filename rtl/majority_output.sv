// majority_output: bitwise majority vote over all evaluated garbled sets.
//
// Input: the decrypted outputs of NUM_GC garbled instruction sets. For each
// output bit, maj is 1 when strictly more than half of the NUM_GC values
// have that bit set; this is the client's output of the cut-and-choose
// protocol. Combinational. Voting per bit (rather than over whole words) is
// this design's reading of the paper's "majority output".
module majority_output #(
  parameter int unsigned NUM_GC = 41,
  parameter int unsigned OUT_W  = 10
) (
  input  logic [NUM_GC-1:0][OUT_W-1:0] vals,
  output logic [OUT_W-1:0]             maj
);

  localparam int unsigned CNT_W = $clog2(NUM_GC + 1);

  always_comb begin
    for (int b = 0; b < OUT_W; b++) begin
      logic [CNT_W-1:0] cnt;
      cnt = '0;
      for (int i = 0; i < NUM_GC; i++) cnt += CNT_W'(vals[i][b]);
      maj[b] = (32'(cnt) * 2 > NUM_GC);
    end
  end

endmodule
