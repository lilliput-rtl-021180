// tb_qec_pkg: testbench-side model of the distance-3 code and of the offline
// table programming, written independently of the RTL.
//
//  - Stabilizer supports of the d=3 rotated code, written out by hand
//    (data qubits row-major from the top-left; stabilizers left to right).
//  - make_table(): fills a two-round decoding table with a minimum-weight
//    rule under a phenomenological noise model. The error mechanisms of a
//    window are: a data error in the oldest round (A0), a measurement error
//    in the oldest round (M0, flips the stabilizer in both layers), a data
//    error in the newer round (A1) and a measurement error in the newer
//    round (M1, flips the newer layer only). All sets of up to two mechanisms
//    are enumerated in order of weight; the first set that explains a window
//    defines its entry: assignment = A0, new internal state = M0. Windows no
//    set of weight <= 2 explains get an all-zero entry. This stands in for
//    the offline matching decoder; it corrects every single error.
//  - clut_compress(): packs a full table into the CLUT word/state arrays
//    (the 140 stored entries, four 9-bit assignments per 16-bit word with a
//    base-delta mode) and reports entries it could not represent exactly.
package tb_qec_pkg;

  localparam int N = 9, S = 4, M = 2, AW = S * M, DW = N + S;

  // index 0: X stabilizers, 1: Z stabilizers
  localparam logic [8:0] MASK [2][4] = '{
    '{9'b000_011_011, 9'b011_000_000, 9'b000_000_110, 9'b110_110_000},
    '{9'b000_001_001, 9'b011_011_000, 9'b000_110_110, 9'b100_100_000}
  };
  // logical operators as bit-flip patterns on the measured outcomes
  localparam logic [8:0] FLIP_Z_BASIS = 9'b010_010_010;  // logical X: column 1
  localparam logic [8:0] FLIP_X_BASIS = 9'b000_111_000;  // logical Z: row 1

  function automatic logic [S-1:0] syndrome(input int t, input logic [8:0] err);
    logic [S-1:0] s;
    for (int k = 0; k < S; k++) s[k] = ^(err & MASK[t][k]);
    return s;
  endfunction

  // effect of mechanism i: {assignment, state, layer1, layer0}
  function automatic void mech(input int t, input int i,
                               output logic [N-1:0] a0, output logic [S-1:0] m0,
                               output logic [S-1:0] l0, output logic [S-1:0] l1);
    a0 = '0; m0 = '0; l0 = '0; l1 = '0;
    if (i < 9) begin a0 = 9'b1 << i; l0 = syndrome(t, a0); end
    else if (i < 13) begin m0 = 4'b1 << (i - 9); l0 = m0; l1 = m0; end
    else if (i < 22) l1 = syndrome(t, 9'b1 << (i - 13));
    else l1 = 4'b1 << (i - 22);
  endfunction

  function automatic void make_table(input int t, output logic [DW-1:0] tbl [2**AW]);
    bit done [2**AW];
    logic [N-1:0] a, b;
    logic [S-1:0] ma, mb, la0, la1, lb0, lb1;
    for (int x = 0; x < 2**AW; x++) begin tbl[x] = '0; done[x] = 0; end
    done[0] = 1;
    for (int i = 0; i < 26; i++) begin
      mech(t, i, a, ma, la0, la1);
      if (!done[{la1, la0}]) begin done[{la1, la0}] = 1; tbl[{la1, la0}] = {ma, a}; end
    end
    for (int i = 0; i < 26; i++)
      for (int j = i + 1; j < 26; j++) begin
        logic [AW-1:0] x;
        mech(t, i, a, ma, la0, la1);
        mech(t, j, b, mb, lb0, lb1);
        x = {la1 ^ lb1, la0 ^ lb0};
        if (!done[x]) begin done[x] = 1; tbl[x] = {ma ^ mb, a ^ b}; end
      end
  endfunction

  // ---- CLUT model ----
  // flat entry index of a request, -1 if the CLUT does not store it
  function automatic int clut_entry(input int a);
    int hi, lo, n;
    hi = a >> 4; lo = a & 15; n = 0;
    for (int h = 0; h < 16; h++)
      if ($countones(4'(h)) <= 1) begin
        if (h == hi) return n + lo;
        n += 16;
      end
    for (int h = 0; h < 16; h++)
      if ($countones(4'(h)) == 2) begin
        if (h == hi) return (lo < 10) ? n + lo : -1;
        n += 10;
      end
    return -1;
  endfunction

  localparam logic [2:0] DEC [4] = '{3'b000, 3'b100, 3'b001, 3'b010};

  function automatic logic [8:0] clut_dec(input logic [15:0] w, input int s);
    int x, y, dl;
    logic [5:0] c;
    dl = (w >> (6 - 2*s)) & 3;
    x = (w >> 11) & 7;
    y = (w >> 8) & 7;
    if (w[15]) x = (x + dl) % 8;
    if (w[14]) y = (y + dl) % 8;
    c = 6'((x << 3) | y);
    return {DEC[c[5:4]], DEC[c[3:2]], DEC[c[1:0]]};
  endfunction

  function automatic logic [5:0] enc6(input logic [8:0] v, output bit ok);
    logic [5:0] c;
    ok = 1;
    for (int g = 0; g < 3; g++) begin
      logic [2:0] t3;
      t3 = v[g*3 +: 3];
      case (t3)
        3'b000: c[g*2 +: 2] = 2'b00;
        3'b100: c[g*2 +: 2] = 2'b01;
        3'b001: c[g*2 +: 2] = 2'b10;
        3'b010: c[g*2 +: 2] = 2'b11;
        default: begin c[g*2 +: 2] = 2'b00; ok = 0; end
      endcase
    end
    return c;
  endfunction

  // Find base and deltas so that v[i] = base + d[i] (mod 8), d[i] in 0..3.
  function automatic bit fit(input int v [4], output int base, output int d [4]);
    for (int b = 0; b < 8; b++) begin
      bit good;
      good = 1;
      for (int i = 0; i < 4; i++) begin
        d[i] = (v[i] - b + 8) % 8;
        if (d[i] > 3) good = 0;
      end
      if (good) begin base = b; return 1; end
    end
    base = v[0];
    for (int i = 0; i < 4; i++) d[i] = 0;
    return 0;
  endfunction

  function automatic void clut_compress(input logic [DW-1:0] tbl [2**AW],
                                        output logic [15:0] words [35],
                                        output logic [3:0] states [140],
                                        output logic [DW-1:0] eff [2**AW],
                                        output int lossy);
    logic [8:0] asg [140];
    lossy = 0;
    for (int x = 0; x < 2**AW; x++) begin
      int e;
      e = clut_entry(x);
      if (e >= 0) begin asg[e] = tbl[x][N-1:0]; states[e] = tbl[x][N +: S]; end
    end
    for (int w = 0; w < 35; w++) begin
      int va [4], vb [4], da [4], db [4], ba, bb;
      bit ok, fa, fb, sa, sb;
      for (int i = 0; i < 4; i++) begin
        logic [5:0] c;
        c = enc6(asg[w*4 + i], ok);
        va[i] = int'(c[5:3]); vb[i] = int'(c[2:0]);
      end
      sa = (va[0] == va[1] && va[1] == va[2] && va[2] == va[3]);
      sb = (vb[0] == vb[1] && vb[1] == vb[2] && vb[2] == vb[3]);
      fa = fit(va, ba, da);
      fb = fit(vb, bb, db);
      if (sa && sb)
        words[w] = {2'b00, 3'(va[0]), 3'(vb[0]), 8'b0};
      else if (sb && fa)
        words[w] = {2'b10, 3'(ba), 3'(vb[0]), 2'(da[0]), 2'(da[1]), 2'(da[2]), 2'(da[3])};
      else if (sa && fb)
        words[w] = {2'b01, 3'(va[0]), 3'(bb), 2'(db[0]), 2'(db[1]), 2'(db[2]), 2'(db[3])};
      else if (fa && fb && da == db)
        words[w] = {2'b11, 3'(ba), 3'(bb), 2'(da[0]), 2'(da[1]), 2'(da[2]), 2'(da[3])};
      else
        words[w] = {2'b10, 3'(ba), 3'(vb[0]), 2'(da[0]), 2'(da[1]), 2'(da[2]), 2'(da[3])};
    end
    for (int x = 0; x < 2**AW; x++) begin
      int e;
      e = clut_entry(x);
      if (e < 0) eff[x] = '0;
      else eff[x] = {states[e], clut_dec(words[e/4], e%4)};
      if (e >= 0 && eff[x] != tbl[x]) lossy++;
    end
  endfunction

endpackage
