// Reference model of a LUT4_4 fabric for the testbenches.
//
// fabric_ref holds the truth tables of a W x Y fabric (64 bits per LUT,
// entry e in bits [4e+3:4e]) and provides:
//   eval(in)      the fabric's function, evaluated column by column from
//                 the wiring rules (straight in1/in2, in0 from the row
//                 above's out3, in3 from the row below's out0, straight at
//                 the top and bottom edges); returns out1 of every row;
//   cfg_row(k)    configuration word k (4W*P bits, segment p in bits
//                 [4W*p +: 4W]) as the bitstream generator lays it out:
//                 word k of a segment belongs to its column YS-1-k/16 and
//                 entry k%16, and the word is passed through the inter-column
//                 wire permutation once when that column is an odd number of
//                 columns after the segment's first column (the bit swap);
//   bit_at(i)     bit i of the bitstream image in memory, the rows laid
//                 out one after another;
//   set_random(), set_chain(op)  table generators. A chain bitstream
//                 computes, in column r of row r, out1/out3 from
//                 (in0 = value from the row above, in1 = a_r, in2 = b_r):
//                 op 0 is a ripple-carry adder, op 1 is "funct3[0] ? a&b :
//                 a^b" with funct3[0] handed down the diagonal. The other
//                 columns pass in1/in2 (left of the diagonal) or out1 (right
//                 of it) straight on.
//   set_permute_xor()  a routed bit-manipulation bitstream: the bits of a
//                 and of b are moved to the rows given by two independent
//                 random permutations perm_a[] and perm_b[], each through an
//                 odd-even transposition network with one round per column,
//                 a swap using the two diagonals between a pair of rows.
//                 In every column a uses the pairs of one parity and b those
//                 of the other, so they never need the same diagonal; a
//                 travels on in1/out1 and b on in2/out2 when not swapping.
//                 The last column forms out1 = a' ^ b'. Each permutation is
//                 redrawn until Y-1 rounds suffice. permute_xor(a, b) is the
//                 plain-SystemVerilog expected value.
package fabric_ref_pkg;

  typedef bit [1023:0] vec_t;   // wide enough for 4W with W <= 256

  class fabric_ref;
    int unsigned w, y, p, ys;
    bit [63:0]   tbl [];
    int          perm_a [];  // bit i of operand a goes to row perm_a[i]
    int          perm_b [];  // bit i of operand b goes to row perm_b[i]

    function new(int unsigned w_, int unsigned y_, int unsigned p_);
      w = w_; y = y_; p = p_; ys = y / p;
      tbl = new[w * y];
    endfunction

    function void set_identity();
      for (int i = 0; i < w * y; i++)
        for (int e = 0; e < 16; e++) tbl[i][4*e +: 4] = 4'(e);
    endfunction

    function void set_random();
      for (int i = 0; i < w * y; i++) tbl[i] = {$urandom, $urandom};
    endfunction

    // op 0: adder, op 1: funct3[0]-selected AND/XOR.
    function void set_chain(int op);
      for (int r = 0; r < w; r++)
        for (int c = 0; c < y; c++)
          for (int e = 0; e < 16; e++) begin
            bit i0, i1, i2;
            bit [3:0] o;
            i0 = e[0]; i1 = e[1]; i2 = e[2];
            o = '0;
            if (c < r) begin
              o[1] = i1; o[2] = i2;
            end else if (c == r) begin
              if (op == 0) begin
                bit ci;
                ci = (r == 0) ? 1'b0 : i0;
                o[1] = i1 ^ i2 ^ ci;
                o[3] = (i1 & i2) | (i1 & ci) | (i2 & ci);
              end else begin
                o[1] = i0 ? (i1 & i2) : (i1 ^ i2);
                o[3] = i0;
              end
            end else begin
              o[1] = i1;
            end
            tbl[r*y + c][4*e +: 4] = o;
          end
    endfunction

    // Draws a random permutation into pm[] that an odd-even transposition
    // network sorts within rounds[] (1 = swap the pair starting at that row
    // in that round if it is out of order; the round's parity is given by
    // par0). Returns 0 if none of 1000 draws fits in y-1 rounds.
    function bit route_perm(ref int pm [], input int par0, ref bit sw [][]);
      int tgt [];
      tgt = new[w];
      pm = new[w];
      sw = new[y];
      for (int c = 0; c < y; c++) sw[c] = new[w];
      for (int tries = 0; tries < 1000; tries++) begin
        bit ok;
        for (int i = 0; i < w; i++) pm[i] = i;
        for (int i = w - 1; i > 0; i--) begin
          int j, t;
          j = $urandom % (i + 1);
          t = pm[i]; pm[i] = pm[j]; pm[j] = t;
        end
        for (int r = 0; r < w; r++) tgt[r] = pm[r];
        for (int c = 0; c < y; c++) begin
          for (int r = 0; r < w; r++) sw[c][r] = 0;
          if (c < y - 1)
            for (int r = (c + par0) % 2; r + 1 < w; r += 2)
              if (tgt[r] > tgt[r+1]) begin
                int t;
                sw[c][r] = 1;
                t = tgt[r]; tgt[r] = tgt[r+1]; tgt[r+1] = t;
              end
        end
        ok = 1;
        for (int r = 0; r < w; r++) if (tgt[r] != r) ok = 0;
        if (ok) return 1;
      end
      return 0;
    endfunction

    function bit set_permute_xor();
      int pa [], pb [], na [], nb [];
      bit swa [][], swb [][];
      if (!route_perm(perm_a, 0, swa)) return 0;
      if (!route_perm(perm_b, 1, swb)) return 0;
      pa = new[w]; pb = new[w]; na = new[w]; nb = new[w];
      for (int r = 0; r < w; r++) begin pa[r] = 1; pb[r] = 2; end
      for (int c = 0; c < y; c++) begin
        for (int r = 0; r < w; r++) begin na[r] = 1; nb[r] = 2; end
        for (int r = 0; r < w; r++) begin
          bit da, ua, db, ub;
          da = swa[c][r]; ua = (r > 0) && swa[c][r-1];
          db = swb[c][r]; ub = (r > 0) && swb[c][r-1];
          for (int e = 0; e < 16; e++) begin
            bit [3:0] o, ee;
            ee = 4'(e);
            o = '0;
            if (c == y - 1) o[1] = ee[pa[r]] ^ ee[pb[r]];
            else begin
              if (da)      o[3] = ee[pa[r]];
              else if (ua) o[0] = ee[pa[r]];
              else         o[1] = ee[pa[r]];
              if (db)      o[3] = ee[pb[r]];
              else if (ub) o[0] = ee[pb[r]];
              else         o[2] = ee[pb[r]];
            end
            tbl[r*y + c][4*e +: 4] = o;
          end
          if (da) na[r+1] = 0;
          if (ua) na[r-1] = 3;
          if (db) nb[r+1] = 0;
          if (ub) nb[r-1] = 3;
        end
        for (int r = 0; r < w; r++) begin pa[r] = na[r]; pb[r] = nb[r]; end
      end
      return 1;
    endfunction

    function vec_t permute_xor(vec_t a, vec_t b);
      vec_t v;
      v = '0;
      for (int i = 0; i < w; i++) v[perm_a[i]] ^= a[i];
      for (int i = 0; i < w; i++) v[perm_b[i]] ^= b[i];
      return v;
    endfunction

    // Wires from one column's LUT outputs to the next column's inputs.
    function vec_t wires(vec_t o);
      vec_t n;
      n = '0;
      for (int r = 0; r < w; r++) begin
        n[4*r+1] = o[4*r+1];
        n[4*r+2] = o[4*r+2];
        n[4*r+0] = (r == 0)     ? o[0]         : o[4*(r-1)+3];
        n[4*r+3] = (r == w - 1) ? o[4*r+3]     : o[4*(r+1)+0];
      end
      return n;
    endfunction

    function vec_t eval(vec_t in);
      vec_t v, o, res;
      v = in;
      for (int c = 0; c < y; c++) begin
        o = '0;
        for (int r = 0; r < w; r++) begin
          int unsigned e;
          e = int'(v[4*r +: 4]);
          o[4*r +: 4] = tbl[r*y + c][4*e +: 4];
        end
        v = wires(o);
      end
      res = '0;
      for (int r = 0; r < w; r++) res[r] = v[4*r+1];
      return res;
    endfunction

    function vec_t seg_word(int unsigned seg, int unsigned k);
      int unsigned d, c, e;
      vec_t v;
      d = ys - 1 - k / 16;
      c = seg * ys + d;
      e = k % 16;
      v = '0;
      for (int r = 0; r < w; r++) v[4*r +: 4] = tbl[r*y + c][4*e +: 4];
      if (d % 2 == 1) v = wires(v);
      return v;
    endfunction

    function int unsigned num_words();
      return 16 * ys;
    endfunction

    // Row k of the bitstream: all P segment words side by side.
    function bit [8191:0] cfg_row(int unsigned k);
      bit [8191:0] row;
      vec_t v;
      row = '0;
      for (int unsigned s = 0; s < p; s++) begin
        v = seg_word(s, k);
        for (int unsigned b = 0; b < 4 * w; b++) row[4*w*s + b] = v[b];
      end
      return row;
    endfunction

    function bit bit_at(int unsigned i);
      bit [8191:0] row;
      row = cfg_row(i / (4 * w * p));
      return row[i % (4 * w * p)];
    endfunction

    // Operand wires of column 0 as the disambiguator drives them.
    function vec_t operands(bit [255:0] a, bit [255:0] b, bit [2:0] f3);
      vec_t v;
      v = '0;
      for (int r = 0; r < w; r++) begin
        v[4*r+1] = a[r];
        v[4*r+2] = b[r];
        if (r < 3) v[4*r+0] = f3[r];
      end
      return v;
    endfunction
  endclass

endpackage
