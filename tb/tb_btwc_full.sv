// tb_btwc_full -- the complete system at its default size, through one overflow.
//
// The top is instantiated with its default parameters: 1000 logical qubits of
// distance 9, two measurement rounds, up to 72 off-chip decodes per round, and
// bw_limit set to 72.  Errors are injected in one QEC cycle: a single data error
// on 300 logical qubits (trivial, decoded on-chip) and a two-error chain away
// from the edges on 80 others (complex).  With 80 complex decodes against 72
// provisioned, the cycle that reports them overflows: 72 decodes go off-chip,
// 8 are carried over, the next cycle is a stall cycle (identity layer, program
// held), the carry-overs go off-chip in the stall cycle and execution resumes.
// Every qubit's corrections, every packet, the stall decisions, the gate layers
// and the counters are compared with the reference model (sc_ref_pkg).
module tb_btwc_full;
  import btwc_pkg::*;
  import sc_ref_pkg::*;

  localparam int N_LQ = 1000, D = 9, LANES = 72;
  localparam int NANC = D * D - 1, NDATA = D * D;
  localparam int BW = $clog2(LANES + 1), IDW = $clog2(N_LQ), CW = $clog2(N_LQ + 1);
  localparam int N_SINGLE = 300, N_CHAIN = 80, CYCLES = 5;

  logic clk = 1'b0, rst_n;
  logic round_valid;
  logic [N_LQ-1:0][NANC-1:0]  syn_raw;
  logic corr_valid;
  logic [N_LQ-1:0][NDATA-1:0] corr_x, corr_z;
  logic [BW-1:0] bw_limit;
  logic pkt_valid, pkt_ready;
  logic [IDW-1:0] pkt_id;
  logic [NANC-1:0] pkt_sig;
  logic layer_tick, in_valid, in_ready, out_valid, out_stalled;
  gate_op_e [N_LQ-1:0] in_layer, out_layer;
  logic stall;
  logic [CW-1:0] waiting;
  logic [31:0] rounds_cnt, overflow_cnt, sent_cnt, stall_cycles, bubble_cycles, issued_layers;
  logic [47:0] all0_cnt, local_cnt, complex_cnt;

  btwc_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  sc_lattice #(D) lat;

  logic [NDATA-1:0] ex [N_LQ], ez [N_LQ];
  logic [NANC-1:0]  h0 [N_LQ], h1 [N_LQ], h2 [N_LQ];
  bit               m_q [N_LQ];
  logic [NANC-1:0]  m_sig [N_LQ];
  int               m_bw, m_sent_round;
  int n_all0 = 0, n_local = 0, n_complex = 0, n_overflow = 0, n_stall_layer = 0, n_packets = 0;
  int sent_per_cycle [CYCLES];

  logic prev_pv = 1'b0, prev_pr = 1'b0, prev_round = 1'b0, mon_on = 1'b0;
  int cur_cyc = 0;
  always @(negedge clk) begin
    if (mon_on && !prev_round && pkt_valid && (!prev_pv || prev_pr)) begin
      int id;
      id = int'(pkt_id);
      checks++;
      if (!m_q[id]) fail($sformatf("packet for qubit %0d that is not waiting", id));
      else if (pkt_sig !== m_sig[id]) fail($sformatf("packet signature of qubit %0d", id));
      m_q[id] = 0;
      m_sent_round++;
      sent_per_cycle[cur_cyc]++;
      checks++;
      if (m_sent_round > m_bw) fail("more packets than provisioned in a round");
    end
    if (mon_on && pkt_valid && pkt_ready) n_packets++;
    prev_pv = pkt_valid; prev_pr = pkt_ready; prev_round = corr_valid;
  end

  initial begin
    repeat (CYCLES * (LANES + 20) + 200) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gate_op_e [N_LQ-1:0] prog, idle;
    int pc;
    lat = new();
    for (int q = 0; q < N_LQ; q++) begin
      ex[q] = '0; ez[q] = '0; h0[q] = '0; h1[q] = '0; h2[q] = '0; m_q[q] = 0; m_sig[q] = '0;
    end
    for (int c = 0; c < CYCLES; c++) sent_per_cycle[c] = 0;
    m_bw = 0; m_sent_round = 0; pc = 0;
    rst_n = 1'b0; round_valid = 1'b0; bw_limit = BW'(LANES);
    pkt_ready = 1'b1; layer_tick = 1'b0; in_valid = 1'b0;
    for (int q = 0; q < N_LQ; q++) begin syn_raw[q] = '0; in_layer[q] = OP_I; idle[q] = OP_I; end
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    mon_on = 1'b1;

    for (int cyc = 0; cyc < CYCLES; cyc++) begin
      int waiting_exp;
      cur_cyc = cyc;
      if (cyc == 1) begin
        for (int t = 0; t < N_SINGLE; t++) begin
          int q, dq;
          q = t * 3;                                   // qubits 0, 3, 6, ...
          dq = $urandom_range(NDATA - 1);
          if (t % 2 == 0) ex[q][dq] = ~ex[q][dq]; else ez[q][dq] = ~ez[q][dq];
        end
        for (int t = 0; t < N_CHAIN; t++) begin
          int q, n;
          q = 3 * t + 1;                               // qubits 1, 4, 7, ...
          // An X plaquette whose diagonal neighbours touch no edge data qubit:
          // the two events are then ordinary cliques with no set neighbour, hence
          // complex (a chain that ends at an edge may legitimately decode on-chip).
          do n = $urandom_range(NANC - 1);
          while (lat.a_isx[n] == 0 || lat.a_nsup[n] != 4 || lat.a_sup[n][0] / D < 2 ||
                 lat.a_sup[n][0] / D > D - 4 || lat.a_sup[n][0] % D < 2 || lat.a_sup[n][0] % D > D - 4);
          ez[q][lat.a_sup[n][0]] = ~ez[q][lat.a_sup[n][0]];
          ez[q][lat.a_sup[n][3]] = ~ez[q][lat.a_sup[n][3]];
        end
      end
      for (int q = 0; q < N_LQ; q++) begin
        syn_raw[q] = lat.syndrome(ex[q], ez[q]);
        h2[q] = h1[q]; h1[q] = h0[q]; h0[q] = syn_raw[q];
      end
      round_valid = 1'b1;
      @(negedge clk);
      round_valid = 1'b0;
      checks++;
      if (corr_valid !== 1'b1) fail("corr_valid not one clock after the round");
      waiting_exp = 0;
      for (int q = 0; q < N_LQ; q++) begin
        logic [NANC-1:0] e;
        logic c;
        logic [NDATA-1:0] cx, cz;
        e = lat.filter(h2[q], h1[q], h0[q]);
        if (e == '0) begin
          c = 1'b0; cx = '0; cz = '0;
          n_all0++;
        end else begin
          lat.decode(e, c, cx, cz);
          if (c) n_complex++; else n_local++;
        end
        if (m_q[q]) begin cx = '0; cz = '0; end
        checks++;
        if (corr_x[q] !== cx || corr_z[q] !== cz) fail($sformatf("cycle %0d qubit %0d corrections", cyc, q));
        if (m_q[q] || c) begin
          m_sig[q] = (m_q[q] ? m_sig[q] : '0) ^ e;
          waiting_exp++;
        end
        m_q[q] = m_q[q] || c;
      end
      m_bw = LANES; m_sent_round = 0;
      if (waiting_exp > m_bw) n_overflow++;
      @(negedge clk);
      checks++;
      if (stall !== (waiting_exp > m_bw)) fail($sformatf("cycle %0d stall %b, %0d waiting", cyc, stall, waiting_exp));
      for (int q = 0; q < N_LQ; q++) prog[q] = gate_op_e'(1 + ((pc + q) % 7));
      in_layer = prog; in_valid = 1'b1; layer_tick = 1'b1;
      @(negedge clk);
      layer_tick = 1'b0; in_valid = 1'b0;
      checks++;
      if (waiting_exp > m_bw) begin
        n_stall_layer++;
        if (!out_stalled || out_layer != idle) fail("stall cycle without identity layer");
      end else begin
        if (out_stalled || out_layer !== prog) fail("program layer not issued");
        pc++;
      end
      repeat (LANES + 4) @(negedge clk);
    end
    mon_on = 1'b0;

    $display("qubit-rounds: all0=%0d on-chip=%0d complex=%0d; overflows=%0d stall_layers=%0d packets=%0d",
             n_all0, n_local, n_complex, n_overflow, n_stall_layer, n_packets);
    $display("packets per cycle: %0d %0d %0d %0d %0d", sent_per_cycle[0], sent_per_cycle[1],
             sent_per_cycle[2], sent_per_cycle[3], sent_per_cycle[4]);
    checks++;
    if (n_local != N_SINGLE || n_complex != N_CHAIN) fail("decode classes differ from the injected errors");
    checks++;
    if (sent_per_cycle[2] != LANES || sent_per_cycle[3] != N_CHAIN - LANES) fail("off-chip schedule");
    checks++;
    if (n_overflow != 1 || n_stall_layer != 1 || stall_cycles != 32'd1 || overflow_cnt != 32'd1)
      fail("expected exactly one overflow and one stall cycle");
    checks++;
    if (all0_cnt != 48'(n_all0) || local_cnt != 48'(n_local) || complex_cnt != 48'(n_complex) ||
        sent_cnt != 32'(n_packets) || issued_layers != 32'(pc))
      fail("counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
