// garbled_alu: evaluates one garbled gate on two wire labels.
//
// The ALU of the garbled MIPS evaluator. It never sees plain bits: its
// operands are 128-bit wire labels and its result is the label of the
// gate's output wire. Two kinds of gate exist for the evaluator:
//   OP_XOR  free-XOR gate: Y = A xor B, done after 1 edge.
//   OP_TAB  any other two-input gate, garbled with point-and-permute and
//           row reduction (three rows sent, the (0,0) row implicit):
//             K = 2A xor 4B xor T     (doubling = left shift by one bit)
//             H = AES_k(K) xor K      (fixed-key AES, aes128_fixed_key)
//             Y = H                   if lsb(A)=0 and lsb(B)=0
//             Y = H xor gtab[2*lsb(A)+lsb(B)-1]   otherwise
//           T is the gate index (tweak). done pulses after 12 clock
//           edges, counting the edge that samples start.
// The gate's Boolean function is carried only by the table, so AND, OR,
// NAND, NOR ... all look alike to the evaluator.
// The paper names Free-XOR, row reduction and fixed-key block cipher
// garbling (JustGarble); the exact hash and row order above follow
// JustGarble conventions and are this design's choice.
//
// Interface: hold mode/a/b/gtab/tweak and pulse start while busy is low.
// done pulses for one cycle with y valid (y holds until the next start).
// An OP_NOP start completes the next cycle and leaves y unchanged.
module garbled_alu
  import hwgn2_pkg::*;
#(
  parameter logic [127:0] HASH_KEY = 128'h000102030405060708090a0b0c0d0e0f
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  gc_op_e                        mode,
  input  logic                          start,
  input  label_t                        a,
  input  label_t                        b,
  input  logic [GT_ROWS-1:0][LABEL_W-1:0] gtab,
  input  logic [TWEAK_W-1:0]            tweak,
  output logic                          busy,
  output logic                          done,
  output label_t                        y
);

  label_t       k_q, row_q;
  logic         wait_q;
  logic         aes_busy, aes_done;
  logic [127:0] aes_out;
  label_t       k_n;
  logic [1:0]   sel;

  assign k_n = {a[LABEL_W-2:0], 1'b0} ^ {b[LABEL_W-3:0], 2'b00} ^ LABEL_W'(tweak);
  assign sel = {a[0], b[0]};

  aes128_fixed_key #(.KEY(HASH_KEY)) u_aes (
    .clk   (clk),
    .rst_n (rst_n),
    .start (start && !busy && mode == OP_TAB),
    .din   (k_n),
    .busy  (aes_busy),
    .done  (aes_done),
    .dout  (aes_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_q    <= '0;
      row_q  <= '0;
      wait_q <= 1'b0;
      done   <= 1'b0;
      y      <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        unique case (mode)
          OP_XOR: begin
            y    <= a ^ b;
            done <= 1'b1;
          end
          OP_TAB: begin
            k_q    <= k_n;
            row_q  <= (sel == 2'b00) ? '0 : gtab[sel - 2'd1];
            wait_q <= 1'b1;
          end
          default: done <= 1'b1;
        endcase
      end else if (wait_q && aes_done) begin
        y      <= aes_out ^ k_q ^ row_q;
        wait_q <= 1'b0;
        done   <= 1'b1;
      end
    end
  end

  assign busy = wait_q || aes_busy;

endmodule
