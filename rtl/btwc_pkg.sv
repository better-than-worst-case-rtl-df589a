// btwc_pkg -- shared constants, types and surface-code geometry functions.
//
// Geometry of the distance-d rotated surface code used throughout the design:
//   * Data qubits sit on a d x d grid, data (r,c) with 0 <= r,c < d, flat index r*d + c.
//   * Ancillas (stabiliser plaquettes) sit on the (d+1) x (d+1) grid of plaquette
//     corners, plaquette (i,j) touching data (i-1,j-1), (i-1,j), (i,j-1), (i,j)
//     where those exist.
//   * Plaquette (i,j) is X type when (i+j) is even, Z type when odd (checkerboard).
//   * All (d-1)^2 interior plaquettes exist.  On the top/bottom rows (i = 0 or d)
//     only the X-type weight-2 plaquettes exist, on the left/right columns
//     (j = 0 or d) only the Z-type ones; corners never exist.  That gives d*d-1
//     ancillas, half of each type, matching the layouts drawn for d = 3 and d = 7
//     (X half-circles on top and bottom, Z half-circles left and right).
//   * Ancillas are numbered in raster order (i major, j minor) over the plaquettes
//     that exist; that number is the bit position in every syndrome vector.
//   * A clique is a primary ancilla a = (i,j) with its four diagonal same-type
//     neighbours p = (i-1,j-1), q = (i-1,j+1), r = (i+1,j-1), s = (i+1,j+1).  The data
//     qubit shared by a and p is w = data (i-1,j-1); a/q share x = (i-1,j); a/r share
//     y = (i,j-1); a/s share z = (i,j).  Index k = 0..3 means p/w, q/x, r/y, s/z.
//
// The numbering and type convention are this design's choice; the paper draws the
// lattice but does not number it.
package btwc_pkg;

  // Gate opcodes of one qubit in one gate layer sent to the waveform generator.
  // The gate names are those drawn in the stall example circuit; the encoding is
  // this design's own.
  typedef enum logic [3:0] {
    OP_I      = 4'd0,   // identity (idle) -- what a stall layer carries
    OP_X      = 4'd1,
    OP_Y      = 4'd2,
    OP_Z      = 4'd3,
    OP_H      = 4'd4,
    OP_T      = 4'd5,
    OP_CX_C   = 4'd6,   // control side of a CNOT
    OP_CX_T   = 4'd7,   // target side of a CNOT
    OP_MEAS   = 4'd8
  } gate_op_e;

  // Number of ancillas (syndrome bits per round) of a distance-d code.
  function automatic int num_anc(input int d);
    return d * d - 1;
  endfunction

  // Number of data qubits of a distance-d code.
  function automatic int num_data(input int d);
    return d * d;
  endfunction

  // 1 when plaquette (i,j) is an X-type ancilla position (checkerboard).
  function automatic bit anc_is_x(input int i, input int j);
    return ((i + j) % 2) == 0;
  endfunction

  // 1 when plaquette (i,j) exists in the distance-d rotated surface code.
  function automatic bit anc_exists(input int d, input int i, input int j);
    bit on_tb, on_lr;
    if (i < 0 || j < 0 || i > d || j > d) return 1'b0;
    on_tb = (i == 0) || (i == d);
    on_lr = (j == 0) || (j == d);
    if (on_tb && on_lr) return 1'b0;                 // corners
    if (!on_tb && !on_lr) return 1'b1;               // interior
    if (on_tb) return anc_is_x(i, j);                // top/bottom: X only
    return !anc_is_x(i, j);                          // left/right: Z only
  endfunction

  // Raster index of existing plaquette (i,j) (only meaningful if it exists).
  // Closed form: row 0 holds (d-1)/2 ancillas (X at even j), rows 1..d-1 hold d
  // each (d-1 interior plus a Z ancilla at j = 0 for odd rows or at j = d for even
  // rows), row d holds (d-1)/2 (X at odd j).
  function automatic int anc_index(input int d, input int i, input int j);
    if (i == 0) return j / 2 - 1;
    if (i == d) return (d - 1) / 2 + (d - 1) * d + (j - 1) / 2;
    if (i % 2 == 1) return (d - 1) / 2 + (i - 1) * d + j;
    return (d - 1) / 2 + (i - 1) * d + j - 1;
  endfunction

  // Row/column offsets of diagonal neighbour k (p, q, r, s).
  function automatic int nb_di(input int k);
    return (k < 2) ? -1 : 1;
  endfunction

  function automatic int nb_dj(input int k);
    return (k % 2 == 0) ? -1 : 1;
  endfunction

  // Data qubit shared between plaquette (i,j) and its diagonal neighbour k
  // (w, x, y, z): row i-1 for k<2 else i, column j-1 for even k else j.
  function automatic int shared_row(input int i, input int k);
    return (k < 2) ? i - 1 : i;
  endfunction

  function automatic int shared_col(input int j, input int k);
    return (k % 2 == 0) ? j - 1 : j;
  endfunction

  function automatic bit data_exists(input int d, input int r, input int c);
    return (r >= 0) && (c >= 0) && (r < d) && (c < d);
  endfunction

  // Bit mask over k = 0..3 of the diagonal neighbours of plaquette (i,j) that
  // exist and share a data qubit with it.
  function automatic logic [3:0] nb_present_mask(input int d, input int i, input int j);
    logic [3:0] m;
    for (int k = 0; k < 4; k++)
      m[k] = anc_exists(d, i + nb_di(k), j + nb_dj(k)) &&
             data_exists(d, shared_row(i, k), shared_col(j, k));
    return m;
  endfunction

  // Bit mask over k = 0..3 of the data qubits that plaquette (i,j) touches but
  // shares with no other ancilla of its type (the boundary data qubits of a
  // corner or edge clique).
  function automatic logic [3:0] bnd_data_mask(input int d, input int i, input int j);
    logic [3:0] m;
    for (int k = 0; k < 4; k++)
      m[k] = data_exists(d, shared_row(i, k), shared_col(j, k)) &&
             !anc_exists(d, i + nb_di(k), j + nb_dj(k));
    return m;
  endfunction

  // Raster index of diagonal neighbour k of plaquette (i,j) (0 when absent).
  function automatic int nb_index(input int d, input int i, input int j, input int k);
    if (anc_exists(d, i + nb_di(k), j + nb_dj(k)))
      return anc_index(d, i + nb_di(k), j + nb_dj(k));
    return 0;
  endfunction

endpackage
