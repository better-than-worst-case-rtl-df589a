// sc_ref_pkg -- reference model of a rotated surface code for the testbenches.
//
// sc_lattice #(D) builds the stabiliser supports of a distance-D rotated surface
// code directly from the plaquette picture (X plaquettes where row+column is even,
// weight-2 X plaquettes on the top and bottom edges, weight-2 Z plaquettes on the
// left and right edges, ancillas numbered in raster order), computes syndromes of
// X/Z error patterns, filters raw outcomes over three rounds and decodes an event
// vector with the clique rules stated in terms of supports: neighbours are the
// same-type ancillas sharing a data qubit, boundary data qubits lie on a single
// same-type support.  It is an independent model used to check the RTL.
package sc_ref_pkg;

  class sc_lattice #(parameter int D = 5);
    localparam int NANC  = D * D - 1;
    localparam int NDATA = D * D;

    int a_isx  [NANC];
    int a_nsup [NANC];
    int a_sup  [NANC][4];
    int a_part [NANC][4];   // same-type ancilla sharing a_sup[n][k], or -1

    function new();
      int n;
      n = 0;
      for (int i = 0; i <= D; i++)
        for (int j = 0; j <= D; j++)
          if (exists(i, j)) begin
            a_isx[n] = (((i + j) & 1) == 0) ? 1 : 0;
            a_nsup[n] = 0;
            for (int r = i - 1; r <= i; r++)
              for (int c = j - 1; c <= j; c++)
                if (r >= 0 && r < D && c >= 0 && c < D) begin
                  a_sup[n][a_nsup[n]] = r * D + c;
                  a_nsup[n]++;
                end
            n++;
          end
      for (int m = 0; m < NANC; m++)
        for (int k = 0; k < a_nsup[m]; k++) begin
          a_part[m][k] = -1;
          for (int o = 0; o < NANC; o++)
            if (o != m && a_isx[o] == a_isx[m])
              for (int kk = 0; kk < a_nsup[o]; kk++)
                if (a_sup[o][kk] == a_sup[m][k]) a_part[m][k] = o;
        end
    endfunction

    static function bit exists(int i, int j);
      int w;
      bit isx;
      w = 0;
      for (int di = -1; di <= 0; di++)
        for (int dj = -1; dj <= 0; dj++)
          if (i + di >= 0 && i + di < D && j + dj >= 0 && j + dj < D) w++;
      isx = ((i + j) & 1) == 0;
      if (w == 4) return 1;
      if (w == 2 && (i == 0 || i == D)) return isx;
      if (w == 2 && (j == 0 || j == D)) return !isx;
      return 0;
    endfunction

    function logic [NANC-1:0] syndrome(logic [NDATA-1:0] ex, logic [NDATA-1:0] ez);
      logic [NANC-1:0] s;
      for (int n = 0; n < NANC; n++) begin
        s[n] = 1'b0;
        for (int k = 0; k < a_nsup[n]; k++)
          s[n] ^= (a_isx[n] != 0) ? ez[a_sup[n][k]] : ex[a_sup[n][k]];
      end
      return s;
    endfunction

    // Two-round persistence filter: oldest, middle, newest raw outcomes.
    static function logic [NANC-1:0] filter(logic [NANC-1:0] b0, logic [NANC-1:0] b1,
                                            logic [NANC-1:0] b2);
      return (b0 ^ b1) & ~(b1 ^ b2);
    endfunction

    task decode(input logic [NANC-1:0] e, output logic cplx,
                output logic [NDATA-1:0] cx, output logic [NDATA-1:0] cz);
      logic [NDATA-1:0] rx, rz;
      rx = '0; rz = '0; cplx = 1'b0;
      for (int n = 0; n < NANC; n++) begin
        int cnt, nbnd, first_bnd;
        if (!e[n]) continue;
        cnt = 0; nbnd = 0; first_bnd = NDATA;
        for (int k = 0; k < a_nsup[n]; k++) begin
          int q, m;
          q = a_sup[n][k];
          m = a_part[n][k];
          if (m < 0) begin
            nbnd++;
            if (q < first_bnd) first_bnd = q;
          end else if (e[m]) begin
            cnt++;
            if (a_isx[n] != 0) rz[q] = 1'b1; else rx[q] = 1'b1;
          end
        end
        if (cnt % 2 == 0 && (nbnd == 0 || cnt != 0)) cplx = 1'b1;
        if (nbnd != 0 && cnt == 0) begin
          if (a_isx[n] != 0) rz[first_bnd] = 1'b1; else rx[first_bnd] = 1'b1;
        end
      end
      cx = cplx ? '0 : rx;
      cz = cplx ? '0 : rz;
    endtask
  endclass

endpackage
