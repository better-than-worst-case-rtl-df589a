// tb_clique_decoder -- self-checking test of the Clique decoder of one logical qubit.
//
// The testbench holds its own model of a distance-D rotated surface code: the
// support (data qubits) of every stabiliser, an X and a Z error state on every
// data qubit and a measurement-flip vector.  It runs episodes of four syndrome
// rounds; at the start of an episode it injects one scenario:
//   none, a single X/Y/Z data error, two random data errors, two errors on data
//   qubits sharing a stabiliser (a chain), 3..5 random errors, a one-round
//   measurement glitch, or a measurement error lasting two rounds.
// Raw outcomes are the parities of the errors on each stabiliser's support, XOR
// the measurement flips.  After every round the DUT's events, COMPLEX flag and
// corrections are compared with a reference that is written from the stabiliser
// supports (neighbours are the same-type ancillas sharing a data qubit, boundary
// data qubits are those on one same-type support only), not from the decoder's
// diagonal-offset tables.  In addition, every data-error episode decoded on-chip
// must leave the injected errors times the correction with an all-zero syndrome,
// and a single data error must always be decoded on-chip.  The one-cycle latency
// from round_valid to dec_valid is checked too.
module tb_clique_decoder;
  localparam int D     = 7;
  localparam int NANC  = D * D - 1;
  localparam int NDATA = D * D;

  logic              clk = 1'b0;
  logic              rst_n;
  logic              round_valid;
  logic [NANC-1:0]   syn_raw;
  logic              dec_valid;
  logic [NANC-1:0]   evt;
  logic              nonzero, is_complex;
  logic [NDATA-1:0]  corr_x, corr_z;

  clique_decoder #(.D(D), .ROUNDS(2)) dut (
    .clk, .rst_n, .round_valid, .syn_raw, .dec_valid, .evt, .nonzero, .is_complex, .corr_x, .corr_z
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---------------- reference lattice ----------------
  int   a_i [NANC], a_j [NANC];
  bit   a_isx [NANC];
  int   a_nsup [NANC];
  int   a_sup [NANC][4];
  int   d_nx [NDATA], d_nz [NDATA];         // number of X / Z ancillas on each data qubit

  function automatic bit plaq_exists(int i, int j);
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

  task automatic build_lattice();
    int n;
    n = 0;
    for (int q = 0; q < NDATA; q++) begin d_nx[q] = 0; d_nz[q] = 0; end
    for (int i = 0; i <= D; i++)
      for (int j = 0; j <= D; j++)
        if (plaq_exists(i, j)) begin
          a_i[n] = i; a_j[n] = j; a_isx[n] = ((i + j) & 1) == 0; a_nsup[n] = 0;
          for (int r = i - 1; r <= i; r++)
            for (int c = j - 1; c <= j; c++)
              if (r >= 0 && r < D && c >= 0 && c < D) begin
                a_sup[n][a_nsup[n]] = r * D + c;
                a_nsup[n]++;
                if (a_isx[n]) d_nx[r*D+c]++; else d_nz[r*D+c]++;
              end
          n++;
        end
    if (n != NANC) begin failures++; $display("FAIL lattice has %0d ancillas", n); end
  endtask

  // Syndrome of an error pattern: X ancillas see Z errors, Z ancillas see X errors.
  function automatic logic [NANC-1:0] syndrome(logic [NDATA-1:0] ex, logic [NDATA-1:0] ez);
    logic [NANC-1:0] s;
    for (int n = 0; n < NANC; n++) begin
      s[n] = 1'b0;
      for (int k = 0; k < a_nsup[n]; k++)
        s[n] ^= a_isx[n] ? ez[a_sup[n][k]] : ex[a_sup[n][k]];
    end
    return s;
  endfunction

  // Other ancilla of the same type on data qubit q, or -1.
  function automatic int partner(int n, int q);
    for (int m = 0; m < NANC; m++)
      if (m != n && a_isx[m] == a_isx[n])
        for (int k = 0; k < a_nsup[m]; k++)
          if (a_sup[m][k] == q) return m;
    return -1;
  endfunction

  // Reference decode of an event vector.
  task automatic ref_decode(input logic [NANC-1:0] e, output logic cplx,
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
        m = partner(n, q);
        if (m < 0) begin
          nbnd++;
          if (q < first_bnd) first_bnd = q;
        end else if (e[m]) begin
          cnt++;
          if (a_isx[n]) rz[q] = 1'b1; else rx[q] = 1'b1;
        end
      end
      if (nbnd == 0 && cnt % 2 == 0) cplx = 1'b1;
      if (nbnd != 0 && cnt % 2 == 0 && cnt != 0) cplx = 1'b1;
      if (nbnd != 0 && cnt == 0) begin
        if (a_isx[n]) rz[first_bnd] = 1'b1; else rx[first_bnd] = 1'b1;
      end
    end
    cx = cplx ? '0 : rx;
    cz = cplx ? '0 : rz;
  endtask

  // ---------------- stimulus state ----------------
  logic [NDATA-1:0] ex, ez;           // accumulated physical errors
  logic [NDATA-1:0] nx, nz;           // errors injected in this episode
  logic [NANC-1:0]  mflip;
  logic [NANC-1:0]  h [3];            // reference raw history, newest first

  int n_trivial = 0, n_complex = 0, n_all0 = 0, n_glitch_ok = 0, n_single = 0;

  task automatic add_err(int q, int kind);   // kind 0 = X, 1 = Z, 2 = Y
    if (kind != 1) begin ex[q] = ~ex[q]; nx[q] = ~nx[q]; end
    if (kind != 0) begin ez[q] = ~ez[q]; nz[q] = ~nz[q]; end
  endtask

  task automatic do_round(input int scen, input int rnd);
    logic [NANC-1:0] exp_evt;
    logic            exp_c;
    logic [NDATA-1:0] exp_cx, exp_cz;
    syn_raw = syndrome(ex, ez) ^ mflip;
    round_valid = 1'b1;
    @(posedge clk);
    #1 round_valid = 1'b0;
    h[2] = h[1]; h[1] = h[0]; h[0] = syn_raw;
    checks++;
    if (dec_valid !== 1'b1) begin failures++; $display("FAIL dec_valid not one cycle after round"); end
    exp_evt = (h[2] ^ h[1]) & ~(h[1] ^ h[0]);
    ref_decode(exp_evt, exp_c, exp_cx, exp_cz);
    checks++;
    if (evt !== exp_evt || is_complex !== exp_c || corr_x !== exp_cx || corr_z !== exp_cz ||
        nonzero !== (exp_evt != '0)) begin
      failures++;
      $display("FAIL scen %0d round %0d: evt %h/%h complex %b/%b", scen, rnd, evt, exp_evt, is_complex, exp_c);
    end
    if (exp_evt == '0) n_all0++;
    else if (exp_c) n_complex++;
    else n_trivial++;
    // Episode-level checks on the round that reports the injected data errors.
    if (rnd == 1 && (scen == 1 || scen == 2 || scen == 3 || scen == 5)) begin
      if (!is_complex) begin
        checks++;
        if (syndrome(nx ^ corr_x, nz ^ corr_z) != '0) begin
          failures++;
          $display("FAIL scen %0d: on-chip correction leaves a syndrome", scen);
        end
      end
      if (scen == 1) begin
        checks++;
        n_single++;
        if (is_complex) begin failures++; $display("FAIL single data error sent off-chip"); end
      end
    end
    if (scen == 4 && rnd == 1) begin
      checks++;
      if (evt != '0) begin failures++; $display("FAIL measurement glitch produced events"); end
      else n_glitch_ok++;
    end
    @(posedge clk);
    #1;
    checks++;
    if (dec_valid !== 1'b0) begin failures++; $display("FAIL dec_valid longer than one cycle"); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    build_lattice();
    ex = '0; ez = '0; mflip = '0;
    for (int t = 0; t < 3; t++) h[t] = '0;
    rst_n = 1'b0; round_valid = 1'b0; syn_raw = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int ep = 0; ep < 1500; ep++) begin
      int scen;
      scen = $urandom_range(7);
      nx = '0; nz = '0;
      case (scen)
        1: add_err($urandom_range(NDATA - 1), $urandom_range(2));
        2: begin
             add_err($urandom_range(NDATA - 1), $urandom_range(2));
             add_err($urandom_range(NDATA - 1), $urandom_range(2));
           end
        3: begin   // two data qubits of one stabiliser, same error type
             int n, k1, k2, kind;
             n = $urandom_range(NANC - 1);
             k1 = $urandom_range(a_nsup[n] - 1);
             k2 = (k1 + 1) % a_nsup[n];
             kind = a_isx[n] ? 1 : 0;
             add_err(a_sup[n][k1], kind);
             add_err(a_sup[n][k2], kind);
           end
        5: begin
             int k;
             k = 3 + $urandom_range(2);
             for (int t = 0; t < k; t++) add_err($urandom_range(NDATA - 1), $urandom_range(2));
           end
        default: ;
      endcase
      for (int rnd = 0; rnd < 4; rnd++) begin
        mflip = '0;
        if (scen == 4 && rnd == 0) mflip[$urandom_range(NANC - 1)] = 1'b1;
        if (scen == 6 && rnd < 2)  mflip[ep % NANC] = 1'b1;
        do_round(scen, rnd);
      end
    end
    $display("rounds: all0=%0d trivial=%0d complex=%0d singles=%0d glitches_removed=%0d",
             n_all0, n_trivial, n_complex, n_single, n_glitch_ok);
    checks++;
    if (n_trivial == 0 || n_complex == 0 || n_all0 == 0 || n_glitch_ok == 0) begin
      failures++;
      $display("FAIL some decode class never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
