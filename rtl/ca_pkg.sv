// ca_pkg - shared constants, types and Tanner-graph functions of the
// check-agnosia decoder.
//
// Number formats follow the paper's finite-precision min-sum decoder:
// exchanged messages are 6-bit two's complement values kept in the
// symmetric range -31..+31, a posteriori LLRs are 8-bit (-127..+127), and
// the check reliability delta_c = min1 + min2 fits in 6 bits (0..62).
// A positive LLR means "no error on this qubit".
//
// Parity-check matrix. The paper decodes the B1[[882,24]] code, whose H
// (441 checks x 882 qubits, column weight 3, row weight 6, no 4-cycles) is
// not printed in it. This design therefore uses a quasi-cyclic matrix of the
// same shape: a 7 x 14 base matrix of Z x Z circulant permutations, with
// Z = 63 giving 441 x 882. Base column b has non-zero blocks in base rows
// b mod 7, (b+1) mod 7 and (b+3) mod 7, so every base row has 6 of them, and
// block (r, b) is the identity cyclically shifted by (r * b) mod Z. For
// Z = 63 (and e.g. Z = 9, 11, 13) the resulting Tanner graph has no 4-cycles.
// The decoders are generic in the graph: replacing the functions below by
// another (3,6)-regular description changes the code without touching them.
//
// Edge numbering: edge e = c * DC + j is the j-th edge of check c; the j-th
// qubit of check c lies in the j-th non-zero base column of its base row.
//
// Lint note: QMAX and AMAX are used only by qubit_node_unit, so a lint run
// whose top does not include that unit reports them as unused.
package ca_pkg;

  localparam int unsigned QW  = 6;   // message width
  localparam int unsigned AW  = 8;   // a posteriori LLR width
  localparam int unsigned DW  = 6;   // check reliability width (0..62)
  localparam int unsigned DV  = 3;   // qubit-node degree (column weight)
  localparam int unsigned DC  = 6;   // check-node degree (row weight)
  localparam int unsigned MB  = 7;   // base matrix rows
  localparam int unsigned NB  = 14;  // base matrix columns

  localparam logic signed [QW-1:0] QMAX = 6'sd31;
  localparam logic signed [AW-1:0] AMAX = 8'sd127;

  typedef logic signed [QW-1:0] msg_t;
  typedef logic signed [AW-1:0] llr_t;
  typedef logic        [DW-1:0] rel_t;

  // k-th (k = 0..DV-1) base row holding a non-zero block in base column b.
  function automatic int unsigned col_row(int unsigned b, int unsigned k);
    int unsigned off;
    off = (k == 0) ? 0 : (k == 1) ? 1 : 3;
    return (b + off) % MB;
  endfunction

  // True when base row r has a non-zero block in base column b.
  function automatic bit base_nz(int unsigned r, int unsigned b);
    for (int unsigned k = 0; k < DV; k++)
      if (col_row(b, k) == r) return 1'b1;
    return 1'b0;
  endfunction

  // j-th (j = 0..DC-1) non-zero base column of base row r, in increasing order.
  function automatic int unsigned row_col(int unsigned r, int unsigned j);
    int unsigned n;
    n = 0;
    for (int unsigned b = 0; b < NB; b++) begin
      if (base_nz(r, b)) begin
        if (n == j) return b;
        n++;
      end
    end
    return 0;
  endfunction

  // Position j of base column b within base row r (r must hold b).
  function automatic int unsigned row_pos(int unsigned r, int unsigned b);
    int unsigned n;
    n = 0;
    for (int unsigned bb = 0; bb < b; bb++)
      if (base_nz(r, bb)) n++;
    return n;
  endfunction

  function automatic int unsigned shift(int unsigned r, int unsigned b, int unsigned z);
    return (r * b) % z;
  endfunction

  // Qubit on the j-th edge of check c.
  function automatic int unsigned check_qubit(int unsigned c, int unsigned j, int unsigned z);
    int unsigned r, i, b;
    r = c / z;
    i = c % z;
    b = row_col(r, j);
    return b * z + (i + shift(r, b, z)) % z;
  endfunction

  // Check on the k-th edge of qubit q.
  function automatic int unsigned qubit_check(int unsigned q, int unsigned k, int unsigned z);
    int unsigned b, t, r;
    b = q / z;
    t = q % z;
    r = col_row(b, k);
    return r * z + (t + z - shift(r, b, z)) % z;
  endfunction

  // Edge index (c * DC + j) of the k-th edge of qubit q.
  function automatic int unsigned qubit_edge(int unsigned q, int unsigned k, int unsigned z);
    int unsigned b, r;
    b = q / z;
    r = col_row(b, k);
    return qubit_check(q, k, z) * DC + row_pos(r, b);
  endfunction

endpackage
