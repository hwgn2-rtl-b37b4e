// gc_prog_pkg: a testbench-side garbler for whole gate lists.
//
// A netlist is a list of two-input gates over the 32 label registers
// (free XOR, free XNOR, or a table gate with a 4-bit truth table). The
// garbler walks it in order, keeps the 0-label of every register, garbles
// each table gate with the reference hash, and packs four gates per garbled
// instruction with a fresh random garbled code for every instruction.
// plain_eval runs the same list on plain bits for the expected results.
package gc_prog_pkg;
  import hwgn2_pkg::*;
  import gc_ref_pkg::*;

  typedef enum int { G_XOR, G_XNOR, G_TAB } gkind_e;

  typedef struct {
    gkind_e     kind;
    logic [3:0] tt;     // truth table of a table gate, tt[{a,b}]
    int         a, b, d;
  } gate_t;

  function automatic void plain_eval(input gate_t g [$], ref logic v [32]);
    foreach (g[i]) begin
      logic r;
      case (g[i].kind)
        G_XOR:   r = v[g[i].a] ^ v[g[i].b];
        G_XNOR:  r = ~(v[g[i].a] ^ v[g[i].b]);
        default: r = g[i].tt[{v[g[i].a], v[g[i].b]}];
      endcase
      v[g[i].d] = r;
    end
  endfunction

  // Garble gates[first .. first+4*n-1] (missing gates become NOP slots)
  // into n instructions. zl holds the register 0-labels and is updated.
  // gid is the running gate index used as tweak; it advances by 4 per
  // instruction.
  function automatic void garble_prog(input logic [127:0] key, input logic [127:0] delta,
                                      input gate_t g [$], ref label_t zl [32],
                                      ref logic [31:0] gid,
                                      output garbled_instr_t ins [$], output op_set_t ops [$]);
    int n;
    ins.delete(); ops.delete();
    n = (g.size() + GATES - 1) / GATES;
    for (int k = 0; k < n; k++) begin
      garbled_instr_t gi;
      op_set_t o;
      gi = '0;
      gi.code = $urandom() | 32'h8000_0000;
      gi.gid  = gid;
      for (int j = 0; j < GATES; j++) begin
        int idx;
        idx = k * GATES + j;
        o[j] = OP_NOP;
        gi.slot[j].ra = 5'($urandom()); gi.slot[j].rb = 5'($urandom()); gi.slot[j].rd = 5'($urandom());
        for (int r = 0; r < GT_ROWS; r++) gi.slot[j].gtab[r] = rand128();
        if (idx < g.size()) begin
          gi.slot[j].ra = 5'(g[idx].a);
          gi.slot[j].rb = 5'(g[idx].b);
          gi.slot[j].rd = 5'(g[idx].d);
          case (g[idx].kind)
            G_XOR: begin
              o[j] = OP_XOR;
              zl[g[idx].d] = zl[g[idx].a] ^ zl[g[idx].b];
            end
            G_XNOR: begin
              o[j] = OP_XOR;
              zl[g[idx].d] = zl[g[idx].a] ^ zl[g[idx].b] ^ delta;
            end
            default: begin
              label_t c0;
              logic [2:0][127:0] rows;
              o[j] = OP_TAB;
              garble_gate(key, delta, zl[g[idx].a], zl[g[idx].b], g[idx].tt, gid + 32'(j), c0, rows);
              gi.slot[j].gtab = rows;
              zl[g[idx].d] = c0;
            end
          endcase
        end
      end
      gid += GATES;
      ins.push_back(gi);
      ops.push_back(o);
    end
  endfunction

endpackage
