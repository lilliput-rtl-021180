// lilliput_pkg: shared constants, types and code-geometry functions of the
// look-up-table surface-code decoder.
//
// The decoder works on a rotated surface code of distance d. The functions
// below derive, for any d up to MAX_D, how many X- and Z-type stabilizers the
// code has and which data qubits each stabilizer covers, so that the syndrome
// widths, LUT address widths and parity trees of every module follow from d.
//
// Geometry (this design's own choice of labels, drawn to match the distance-3
// lattice pictures of the paper): data qubits sit on a d x d grid, numbered
// row-major from the top-left corner (q = row*d + col). A stabilizer sits on
// every grid corner (i,j), 0 <= i,j <= d, and covers the up-to-four data
// qubits around it. Bulk stabilizers alternate in type: Z when i+j is odd, X
// when even. On the left and right edges only Z-type weight-2 stabilizers are
// kept, on the top and bottom edges only X-type ones, corners are empty.
// Stabilizers of one type are numbered left to right (column by column), top
// to bottom inside a column; stabilizer k is bit k of a syndrome vector.
// With d=3 this gives 4 X and 4 Z stabilizers (17 qubits in all); with d=4,
// 7 X and 8 Z; with d=5, 12 and 12.
package lilliput_pkg;

  localparam int unsigned MAX_D = 5;
  localparam int unsigned MAX_Q = MAX_D * MAX_D;

  // Basis of the final transversal (logical) measurement.
  typedef enum logic {
    BASIS_Z = 1'b0,   // data qubits measured in Z: builds a final Z syndrome
    BASIS_X = 1'b1    // data qubits measured in X: builds a final X syndrome
  } basis_e;

  // Which stabilizer type a decoding channel handles.
  typedef enum logic {
    STAB_X = 1'b0,
    STAB_Z = 1'b1
  } stab_e;

  typedef logic [MAX_Q-1:0] qmask_t;

  function automatic int unsigned n_data(input int unsigned d);
    return d * d;
  endfunction

  // Is there a stabilizer of the given type on grid corner (i,j)?
  function automatic bit plaq_present(input int unsigned d, input bit is_z,
                                      input int unsigned i, input int unsigned j);
    bit z_type;
    z_type = ((i + j) % 2) == 1;
    if (z_type != is_z) return 1'b0;
    if ((i == 0 || i == d) && (j == 0 || j == d)) return 1'b0;
    if (i == 0 || i == d) return !is_z;
    if (j == 0 || j == d) return is_z;
    return 1'b1;
  endfunction

  function automatic int unsigned n_stab(input int unsigned d, input bit is_z);
    int unsigned n;
    n = 0;
    for (int unsigned j = 0; j <= d; j++)
      for (int unsigned i = 0; i <= d; i++)
        if (plaq_present(d, is_z, i, j)) n++;
    return n;
  endfunction

  // Data-qubit mask of the k-th stabilizer of the given type.
  function automatic qmask_t stab_mask(input int unsigned d, input bit is_z,
                                       input int unsigned k);
    qmask_t m;
    int unsigned n;
    m = '0;
    n = 0;
    for (int unsigned j = 0; j <= d; j++)
      for (int unsigned i = 0; i <= d; i++)
        if (plaq_present(d, is_z, i, j)) begin
          if (n == k)
            for (int unsigned r = 0; r < d; r++)
              for (int unsigned c = 0; c < d; c++)
                if ((r + 1 == i || r == i) && (c + 1 == j || c == j))
                  m[r*d + c] = 1'b1;
          n++;
        end
    return m;
  endfunction

  // Number of entries of a 2^aw-entry table; helper for memory sizing.
  function automatic int unsigned pow2(input int unsigned aw);
    return 1 << aw;
  endfunction

endpackage
