// tb_clique_logic -- exhaustive self-checking test of one clique's decision logic.
//
// Four clique shapes are instantiated: an interior clique (four neighbours), the
// weight-2 corner clique with one neighbour and one boundary data qubit ("1+1"),
// the edge clique with two neighbours and two boundary data qubits ("1+2") and a
// weight-2 edge clique with two neighbours and no boundary data qubit.  All 32
// combinations of a and the four neighbour inputs are applied to each, and the
// COMPLEX flag and correction requests are compared with the rules worked out
// from the number of set neighbours:
//   interior / no boundary : complex = a and the count is even;
//   with boundary          : complex = a and the count is even and non-zero;
//   corrections            : a && neighbour k -> data k; with boundary and no
//                            neighbour set, the first boundary data qubit.
module tb_clique_logic;
  int checks = 0, failures = 0;

  logic       a;
  logic [3:0] nb;
  logic       cx [4];
  logic [3:0] cr [4];

  localparam logic [3:0] NBP [4] = '{4'b1111, 4'b0100, 4'b0101, 4'b1100};
  localparam logic [3:0] BND [4] = '{4'b0000, 4'b1000, 4'b1010, 4'b0000};

  clique_logic #(.NB_PRESENT(4'b1111), .BND_DATA(4'b0000)) u0 (.a, .nb, .is_complex(cx[0]), .corr(cr[0]));
  clique_logic #(.NB_PRESENT(4'b0100), .BND_DATA(4'b1000)) u1 (.a, .nb, .is_complex(cx[1]), .corr(cr[1]));
  clique_logic #(.NB_PRESENT(4'b0101), .BND_DATA(4'b1010)) u2 (.a, .nb, .is_complex(cx[2]), .corr(cr[2]));
  clique_logic #(.NB_PRESENT(4'b1100), .BND_DATA(4'b0000)) u3 (.a, .nb, .is_complex(cx[3]), .corr(cr[3]));

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_cplx, n_bnd_fix;
    n_cplx = 0;
    n_bnd_fix = 0;
    for (int v = 0; v < 32; v++) begin
      a  = v[4];
      nb = v[3:0];
      #1;
      for (int s = 0; s < 4; s++) begin
        int cnt;
        logic exp_c;
        logic [3:0] exp_r;
        cnt = 0;
        for (int k = 0; k < 4; k++) if (NBP[s][k] && nb[k]) cnt++;
        if (BND[s] == 0) exp_c = a && (cnt % 2 == 0);
        else             exp_c = a && (cnt % 2 == 0) && (cnt != 0);
        exp_r = '0;
        for (int k = 0; k < 4; k++) if (a && NBP[s][k] && nb[k]) exp_r[k] = 1'b1;
        if (a && BND[s] != 0 && cnt == 0) begin
          for (int k = 0; k < 4; k++)
            if (BND[s][k]) begin exp_r[k] = 1'b1; break; end
          n_bnd_fix++;
        end
        checks++;
        if (cx[s] !== exp_c || cr[s] !== exp_r) begin
          failures++;
          $display("FAIL shape %0d a=%b nb=%b: complex %b/%b corr %b/%b",
                   s, a, nb, cx[s], exp_c, cr[s], exp_r);
        end
        if (exp_c) n_cplx++;
      end
    end
    // The shapes the paper singles out: 1+1 is never complex, 1+2 only with both set.
    for (int v = 0; v < 32; v++) begin
      a = v[4]; nb = v[3:0]; #1;
      checks++;
      if (cx[1]) begin failures++; $display("FAIL 1+1 clique complex a=%b nb=%b", a, nb); end
      checks++;
      if (cx[2] !== (a && nb[0] && nb[2])) begin
        failures++; $display("FAIL 1+2 clique a=%b nb=%b", a, nb);
      end
    end
    $display("complex_cases=%0d boundary_fixes=%0d", n_cplx, n_bnd_fix);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
