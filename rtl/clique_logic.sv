// clique_logic -- decision and correction logic of one clique.
//
// What it does: a clique is a primary ancilla a and its (up to) four diagonal
// neighbours of the same type, p, q, r, s, with the data qubits w, x, y, z lying
// between a and p, q, r, s respectively.  When a carries an event (the clique is
// "active") the clique looks at the parity of the events on its neighbours:
//   * odd parity  -> the error is local: correct the data qubit(s) between a and
//                    each set neighbour (correct w if a && p, x if a && q, ...);
//   * even parity -> raise COMPLEX; the whole signature must be decoded off-chip.
// For an interior clique this is the gate network NOT(p^q^r^s) AND a.
//
// Corner and edge cliques have one or more "boundary" data qubits: data qubits a
// touches that no other same-type ancilla touches (BND_DATA).  For them an active
// a with no neighbour set is also trivial: one boundary data qubit is corrected
// (the first one in w, x, y, z order; any of them is equivalent because they
// differ by a stabiliser).  A 1-neighbour-plus-boundary clique is therefore never
// complex, and a 2-neighbour-plus-boundary clique is complex only when both
// neighbours are set.  The general rule used here for a clique with boundary data
// is "complex when the number of set neighbours is even and not zero".
//
// Interface: purely combinational.  NB_PRESENT marks which of p, q, r, s exist;
// inputs of absent neighbours are ignored.  corr[k] requests a flip of data qubit
// k (w, x, y, z); the requests are only to be applied when no clique of the code
// block raised COMPLEX (the caller gates them).
//
// From the paper: the interior rule, the correction ANDs, and the two special
// cases (1+1 always trivial, 1+2 trivial when both neighbours are unset).  This
// design's choices: the general boundary rule above and which boundary data qubit
// is corrected.
module clique_logic #(
  parameter logic [3:0] NB_PRESENT = 4'b1111,  // p,q,r,s exist (bit k)
  parameter logic [3:0] BND_DATA   = 4'b0000   // w,x,y,z are boundary data qubits (bit k)
) (
  input  logic       a,        // primary ancilla event
  input  logic [3:0] nb,       // neighbour events p, q, r, s
  output logic       is_complex,  // clique active with a non-local signature
  output logic [3:0] corr      // correction requests for w, x, y, z
);

  logic [3:0] n;
  logic       par_pq, par_rs, even;
  logic       none_set;
  logic [3:0] bnd_pick;

  assign n = nb & NB_PRESENT;

  // Neighbourhood parity: (p ^ q) ^ (r ^ s), then NOT -> "even number flipped?".
  assign par_pq   = n[0] ^ n[1];
  assign par_rs   = n[2] ^ n[3];
  assign even     = ~(par_pq ^ par_rs);
  assign none_set = (n == 4'b0000);

  // First boundary data qubit in w, x, y, z order (one-hot), fixed at elaboration.
  always_comb begin
    bnd_pick = '0;
    for (int k = 3; k >= 0; k--)
      if (BND_DATA[k]) bnd_pick = 4'(1) << k;
  end

  always_comb begin
    if (BND_DATA == 4'b0000)
      is_complex = a & even;
    else
      is_complex = a & even & ~none_set;
    corr = {4{a}} & n;
    if (BND_DATA != 4'b0000 && none_set)
      corr = corr | ({4{a}} & bnd_pick);
  end

endmodule
