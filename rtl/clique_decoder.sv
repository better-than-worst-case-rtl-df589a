// clique_decoder -- on-chip Clique decoder for one rotated surface-code logical qubit.
//
// What it does: every syndrome round it takes the raw outcomes of all d*d-1
// ancillas, removes transient measurement flips (meas_filter), evaluates one
// clique around every ancilla (clique_logic) for both the X-type and the Z-type
// lattice, and classifies the round:
//   * no event anywhere            -> All-0s, nothing to do;
//   * events, no clique COMPLEX    -> Local-1s, decoded here: corr_x / corr_z give
//                                     the data qubits to flip;
//   * any clique COMPLEX           -> is_complex = 1, no correction is issued and the
//                                     event vector is to be decoded off-chip.
// X-type ancillas detect Z errors, so their corrections appear on corr_z; Z-type
// ancillas detect X errors and drive corr_x.  A data qubit is flipped when any
// clique requests it (the request a&p of clique a equals the request p&a of clique
// p, so the OR simply merges the two).  Both lattices share one COMPLEX flag: the
// logical qubit either goes off-chip as a whole or not at all.
//
// Geometry and numbering follow btwc_pkg (raster order of the ancillas that exist,
// data index r*D + c).
//
// Timing: raw is latched on a clock edge with round_valid = 1.  One cycle later
// dec_valid pulses and evt, nonzero, is_complex, corr_x and corr_z are valid for
// that cycle (they stay valid until the next round is latched).  The decision
// itself is combinational, as in the paper's few-gates-per-clique design.
//
// From the paper: the clique rule, edge/corner special cases, correction ANDs,
// the single OR of COMPLEX over all cliques and the two-round measurement filter.
// This design's choices: the lattice numbering, the shared COMPLEX flag for both
// error types and the handshake-free round strobe.
module clique_decoder
  import btwc_pkg::*;
#(
  parameter int D      = 9,   // code distance (odd, >= 3)
  parameter int ROUNDS = 2    // measurement rounds of the filter
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 round_valid,
  input  logic [D*D-2:0]       syn_raw,    // raw ancilla outcomes of one round
  output logic                 dec_valid,
  output logic [D*D-2:0]       evt,        // filtered syndrome events (off-chip signature)
  output logic                 nonzero,    // at least one event this round
  output logic              is_complex, // needs off-chip decoding
  output logic [D*D-1:0]       corr_x,     // X flips on data qubits (from Z ancillas)
  output logic [D*D-1:0]       corr_z      // Z flips on data qubits (from X ancillas)
);

  localparam int NANC  = D * D - 1;
  localparam int NDATA = D * D;

  logic [NANC-1:0] cmplx;
  logic [3:0]      creq [NANC];

  meas_filter #(.N(NANC), .ROUNDS(ROUNDS)) u_filter (
    .clk, .rst_n, .round_valid, .raw(syn_raw), .evt
  );

  always_ff @(posedge clk) begin
    if (!rst_n) dec_valid <= 1'b0;
    else        dec_valid <= round_valid;
  end

  // One clique per ancilla, generated over the plaquette grid.
  for (genvar i = 0; i <= D; i++) begin : g_pi
    for (genvar j = 0; j <= D; j++) begin : g_pj
      if (anc_exists(D, i, j)) begin : g_clique
        localparam int         N   = anc_index(D, i, j);
        localparam logic [3:0] NBP = nb_present_mask(D, i, j);
        localparam logic [3:0] BND = bnd_data_mask(D, i, j);
        localparam int NB0 = nb_index(D, i, j, 0);
        localparam int NB1 = nb_index(D, i, j, 1);
        localparam int NB2 = nb_index(D, i, j, 2);
        localparam int NB3 = nb_index(D, i, j, 3);
        logic [3:0] nb;
        assign nb[0] = NBP[0] ? evt[NB0] : 1'b0;
        assign nb[1] = NBP[1] ? evt[NB1] : 1'b0;
        assign nb[2] = NBP[2] ? evt[NB2] : 1'b0;
        assign nb[3] = NBP[3] ? evt[NB3] : 1'b0;
        clique_logic #(.NB_PRESENT(NBP), .BND_DATA(BND)) u_clique (
          .a(evt[N]), .nb, .is_complex(cmplx[N]), .corr(creq[N])
        );
      end
    end
  end

  // Data qubit (r,c) lies in direction s of plaquette (r,c), r of (r,c+1),
  // q of (r+1,c) and p of (r+1,c+1).  Collect those requests per ancilla type.
  logic [NDATA-1:0] req_x, req_z;
  for (genvar r = 0; r < D; r++) begin : g_row
    for (genvar c = 0; c < D; c++) begin : g_col
      localparam bit E0 = anc_exists(D, r,     c);
      localparam bit E1 = anc_exists(D, r,     c + 1);
      localparam bit E2 = anc_exists(D, r + 1, c);
      localparam bit E3 = anc_exists(D, r + 1, c + 1);
      localparam int I0 = E0 ? anc_index(D, r,     c)     : 0;
      localparam int I1 = E1 ? anc_index(D, r,     c + 1) : 0;
      localparam int I2 = E2 ? anc_index(D, r + 1, c)     : 0;
      localparam int I3 = E3 ? anc_index(D, r + 1, c + 1) : 0;
      // Plaquettes (r,c) and (r+1,c+1) share a type, as do (r,c+1) and (r+1,c).
      localparam bit DIAG_X = anc_is_x(r, c);
      logic from_diag, from_anti;
      assign from_diag = (E0 ? creq[I0][3] : 1'b0) | (E3 ? creq[I3][0] : 1'b0);
      assign from_anti = (E1 ? creq[I1][2] : 1'b0) | (E2 ? creq[I2][1] : 1'b0);
      assign req_z[r*D + c] = DIAG_X ? from_diag : from_anti;
      assign req_x[r*D + c] = DIAG_X ? from_anti : from_diag;
    end
  end

  assign is_complex = |cmplx;
  assign nonzero = |evt;
  assign corr_x  = is_complex ? '0 : req_x;
  assign corr_z  = is_complex ? '0 : req_z;

  initial begin
    assert (D >= 3 && (D % 2) == 1) else $error("clique_decoder: D must be odd and >= 3");
  end

endmodule
