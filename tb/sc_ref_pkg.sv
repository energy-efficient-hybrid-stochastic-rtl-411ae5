// sc_ref_pkg: reference models used by the testbenches.
//
// Written independently of the RTL, bit by bit in procedural code:
//  - tff_add_ref: one clock of the TFF adder (state before -> output, state after)
//  - tree_step: one clock of a zero-padded adder tree whose TFF states are
//    kept in a flat array, level by level
//  - vdc: the base-2 van der Corput value of a stream position
package sc_ref_pkg;

  // One clock of a TFF adder: returns z and updates the state q.
  function automatic bit tff_add_ref(input bit x, input bit y, inout bit q);
    bit z;
    if (x == y) z = x;
    else begin
      z = q;
      q = !q;
    end
    return z;
  endfunction

  // One clock of an adder tree with n_in inputs padded to 2^levels leaves.
  // q holds the 2^levels-1 TFF states: level 0 first, then level 1, ...
  function automatic bit tree_step(input bit [63:0] in_bits, input int n_in,
                                   inout bit q[]);
    int  levels = 0;
    int  width, base;
    bit  cur[64];
    while ((1 << levels) < n_in) levels++;
    width = 1 << levels;
    for (int i = 0; i < 64; i++) cur[i] = (i < n_in) ? in_bits[i] : 1'b0;
    base = 0;
    for (int l = 0; l < levels; l++) begin
      for (int j = 0; j < width / 2; j++) begin
        bit s = q[base + j];
        cur[j] = tff_add_ref(cur[2*j], cur[2*j+1], s);
        q[base + j] = s;
      end
      base  += width / 2;
      width /= 2;
    end
    return cur[0];
  endfunction

  // Van der Corput (base 2) value of position t in a stream of 2^prec bits.
  function automatic int unsigned vdc(input int unsigned t, input int unsigned prec);
    int unsigned v = 0;
    for (int b = 0; b < prec; b++) if (t & (1 << b)) v |= 1 << (prec - 1 - b);
    return v;
  endfunction

  // A whole stream through one engine: pixel tap i is a run of run[i] ones
  // at the head of a 2^prec-bit stream (ramp conversion), weight tap i is
  // the van der Corput stream of magnitude mag[i] (already cut to prec
  // bits) on the positive or negative side. Returns both counts.
  task automatic engine_counts(input int run[25], input int mag[25], input bit neg[25],
                               input int prec, output int cp, output int cn);
    bit qp[] = new[31];
    bit qn[] = new[31];
    cp = 0; cn = 0;
    for (int t = 0; t < (1 << prec); t++) begin
      bit [63:0] pp = '0, pn = '0;
      int v = vdc(t, prec);
      for (int i = 0; i < 25; i++) begin
        bit prod = (t < run[i]) && (v < mag[i]);
        pp[i] = prod && !neg[i];
        pn[i] = prod &&  neg[i];
      end
      cp += tree_step(pp, 25, qp);
      cn += tree_step(pn, 25, qn);
    end
  endtask

  function automatic logic [1:0] sign_ref(input int cp, input int cn, input int th);
    return (cp - cn > th) ? 2'b01 : (cn - cp > th) ? 2'b11 : 2'b00;
  endfunction

endpackage
