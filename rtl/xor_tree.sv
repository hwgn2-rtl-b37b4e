// xor_tree: cheating detector of the cut-and-choose check.
//
// Input: the decrypted outputs of NUM_GC garbled instruction sets (vals) and
// a mask of the sets the evaluator opened and checked (sel). Each selected
// output is XORed bit by bit with the first selected output, and the
// differences are OR-reduced: cheat = 1 means two opened sets disagree, so
// the garbler cheated; cheat = 0 lets the evaluator go on to the majority
// vote. Fewer than two selected sets give cheat = 0. Combinational.
// The paper describes XORing all decrypted outputs to find any difference;
// comparing against one reference keeps that purpose and also catches an
// even number of equal deviations, which a plain XOR of all outputs misses.
module xor_tree #(
  parameter int unsigned NUM_GC = 41,
  parameter int unsigned OUT_W  = 10
) (
  input  logic [NUM_GC-1:0][OUT_W-1:0] vals,
  input  logic [NUM_GC-1:0]            sel,
  output logic                         cheat
);

  logic [OUT_W-1:0] ref_v;
  logic [OUT_W-1:0] diff;
  logic             found;

  always_comb begin
    ref_v = '0;
    found = 1'b0;
    for (int i = 0; i < NUM_GC; i++) begin
      if (sel[i] && !found) begin
        ref_v = vals[i];
        found = 1'b1;
      end
    end
    diff = '0;
    for (int i = 0; i < NUM_GC; i++)
      if (sel[i]) diff |= vals[i] ^ ref_v;
    cheat = |diff;
  end

endmodule
