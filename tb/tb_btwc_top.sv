// tb_btwc_top -- end-to-end test of the BTWC decoding system.
//
// Runs the whole system (by default 8 logical qubits of distance 5, at most 2
// off-chip decodes per round) through many QEC cycles.  Every cycle each logical
// qubit gets nothing, a single data error, a two-error chain, a measurement glitch
// or random errors; bursts of chains are injected every so often so that the
// provisioned bandwidth overflows.  A reference surface-code model (sc_ref_pkg)
// computes each qubit's raw outcomes, filtered events and expected decision.
// Checked every cycle:
//   * on-chip corrections of every qubit (zero when complex or while the qubit's
//     earlier decode is still waiting to go off-chip);
//   * the stall decision (decodes waiting > provisioned) and that the next gate
//     layer is an identity layer exactly when stalled, with the program held;
//   * every off-chip packet: a waiting qubit, with its merged event signature.
// At the end the statistics counters are compared with the model, and each
// mechanism (All-0s, on-chip decode, complex decode, overflow/stall, carry-over,
// withheld correction, injected measurement glitch, back-pressure) must have
// occurred at least once.
module tb_btwc_top;
  import btwc_pkg::*;
  import sc_ref_pkg::*;

  localparam int N_LQ = 8, D = 5, LANES = 2;
  localparam int NANC = D * D - 1, NDATA = D * D;
  localparam int BW = $clog2(LANES + 1), IDW = $clog2(N_LQ), CW = $clog2(N_LQ + 1);
  localparam int CYCLES = 600;

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

  btwc_top #(.N_LQ(N_LQ), .D(D), .ROUNDS(2), .LANES(LANES)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  sc_lattice #(D) lat;

  // Per-qubit reference state.
  logic [NDATA-1:0] ex [N_LQ], ez [N_LQ];
  logic [NANC-1:0]  h0 [N_LQ], h1 [N_LQ], h2 [N_LQ];   // newest .. oldest raw outcomes
  bit               m_q [N_LQ], m_c [N_LQ];
  logic [NANC-1:0]  m_sig [N_LQ];
  int               m_bw, m_sent_round;

  int n_all0 = 0, n_local = 0, n_complex = 0, n_overflow = 0, n_stall_layer = 0;
  int n_withheld = 0, n_glitch = 0, n_packets = 0, n_backpressure = 0, n_carry = 0;

  // Off-chip link monitor (falling edge, see what the last rising edge did).
  logic prev_pv = 1'b0, prev_pr = 1'b0, prev_round = 1'b0, mon_on = 1'b0;
  always @(negedge clk) begin
    if (mon_on && !prev_round && pkt_valid && (!prev_pv || prev_pr)) begin
      int id;
      id = int'(pkt_id);
      checks++;
      if (!m_q[id]) fail($sformatf("packet for qubit %0d that is not waiting", id));
      else if (pkt_sig !== m_sig[id]) fail($sformatf("packet signature of qubit %0d", id));
      if (m_c[id]) n_carry++;
      m_q[id] = 0; m_c[id] = 0;
      m_sent_round++;
      checks++;
      if (m_sent_round > m_bw) fail("more packets than provisioned in a round");
    end
    if (mon_on && prev_pv && !prev_pr) n_backpressure++;
    if (mon_on && pkt_valid && pkt_ready) n_packets++;
    prev_pv = pkt_valid; prev_pr = pkt_ready; prev_round = corr_valid;
  end

  initial begin
    repeat (CYCLES * 12 + 1000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gate_op_e [N_LQ-1:0] prog;
    int pc;
    lat = new();
    for (int q = 0; q < N_LQ; q++) begin
      ex[q] = '0; ez[q] = '0; h0[q] = '0; h1[q] = '0; h2[q] = '0;
      m_q[q] = 0; m_c[q] = 0; m_sig[q] = '0;
    end
    m_bw = 0; m_sent_round = 0; pc = 0;
    rst_n = 1'b0; round_valid = 1'b0; syn_raw = '0; bw_limit = BW'(LANES);
    pkt_ready = 1'b0; layer_tick = 1'b0; in_valid = 1'b0; in_layer = '{default: OP_I};
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    mon_on = 1'b1;

    for (int cyc = 0; cyc < CYCLES; cyc++) begin
      bit burst;
      logic [NANC-1:0] glitch [N_LQ];
      int waiting_exp;
      burst = (cyc % 40) == 20;
      // ---- inject errors, present the round ----
      for (int q = 0; q < N_LQ; q++) begin
        int scen;
        glitch[q] = '0;
        scen = burst ? 2 : $urandom_range(19);
        if (scen == 1 || scen == 3) begin
          int dq;
          dq = $urandom_range(NDATA - 1);
          if ($urandom_range(1) != 0) ex[q][dq] = ~ex[q][dq]; else ez[q][dq] = ~ez[q][dq];
        end else if (scen == 2) begin          // chain of two X errors on one Z stabiliser
          int n;
          do n = $urandom_range(NANC - 1); while (lat.a_isx[n] != 0 || lat.a_nsup[n] != 4);
          ex[q][lat.a_sup[n][0]] = ~ex[q][lat.a_sup[n][0]];
          ex[q][lat.a_sup[n][3]] = ~ex[q][lat.a_sup[n][3]];
        end else if (scen == 4) begin
          glitch[q][$urandom_range(NANC - 1)] = 1'b1;
          n_glitch++;
        end
        syn_raw[q] = lat.syndrome(ex[q], ez[q]) ^ glitch[q];
        h2[q] = h1[q]; h1[q] = h0[q]; h0[q] = syn_raw[q];
      end
      if ($urandom_range(3) == 0) bw_limit = BW'(1 + $urandom_range(LANES - 1));
      round_valid = 1'b1;
      pkt_ready = ($urandom_range(4) != 0);
      @(negedge clk);
      round_valid = 1'b0;
      // ---- corrections of this round ----
      checks++;
      if (corr_valid !== 1'b1) fail("corr_valid not one clock after the round");
      waiting_exp = 0;
      for (int q = 0; q < N_LQ; q++) begin
        logic [NANC-1:0] e;
        logic c;
        logic [NDATA-1:0] cx, cz;
        e = lat.filter(h2[q], h1[q], h0[q]);
        lat.decode(e, c, cx, cz);
        if (m_q[q]) begin cx = '0; cz = '0; end
        checks++;
        if (corr_x[q] !== cx || corr_z[q] !== cz)
          fail($sformatf("cycle %0d qubit %0d corrections", cyc, q));
        if (e == '0) n_all0++;
        else if (c) n_complex++;
        else begin
          n_local++;
          if (m_q[q]) n_withheld++;
        end
        // Allocation model: fold the round in.
        if (m_q[q] || c) begin
          m_sig[q] = (m_q[q] ? m_sig[q] : '0) ^ e;
          waiting_exp++;
        end
        m_c[q] = m_q[q];
        m_q[q] = m_q[q] || c;
      end
      m_bw = int'(bw_limit); m_sent_round = 0;
      if (waiting_exp > m_bw) n_overflow++;
      pkt_ready = ($urandom_range(4) != 0);
      @(negedge clk);
      // ---- stall decision, next gate layer ----
      checks++;
      if (stall !== (waiting_exp > m_bw)) fail($sformatf("cycle %0d stall %b waiting %0d bw %0d", cyc, stall, waiting_exp, m_bw));
      checks++;
      if (int'(waiting) != waiting_exp) fail("waiting count");
      for (int q = 0; q < N_LQ; q++) prog[q] = gate_op_e'(1 + ((pc + q) % 7));
      in_layer = prog; in_valid = 1'b1; layer_tick = 1'b1;
      @(negedge clk);
      layer_tick = 1'b0; in_valid = 1'b0;
      checks++;
      if (out_valid !== 1'b1) fail("no gate layer after tick");
      else if (waiting_exp > m_bw) begin
        n_stall_layer++;
        if (!out_stalled || out_layer != '{default: OP_I}) fail("stall cycle without identity layer");
      end else begin
        if (out_stalled || out_layer !== prog) fail($sformatf("program layer %0d not issued", pc));
        pc++;
      end
      // ---- rest of the QEC cycle: off-chip link drains ----
      repeat (LANES + 3) begin
        pkt_ready = ($urandom_range(4) != 0);
        @(negedge clk);
      end
    end
    pkt_ready = 1'b1;
    repeat (3) @(negedge clk);
    mon_on = 1'b0;

    checks++;
    if (all0_cnt != 48'(n_all0) || local_cnt != 48'(n_local) || complex_cnt != 48'(n_complex))
      fail($sformatf("class counters %0d/%0d %0d/%0d %0d/%0d", all0_cnt, n_all0, local_cnt, n_local,
                     complex_cnt, n_complex));
    checks++;
    if (overflow_cnt != 32'(n_overflow) || stall_cycles != 32'(n_stall_layer) ||
        rounds_cnt != 32'(CYCLES) || sent_cnt != 32'(n_packets) || issued_layers != 32'(pc))
      fail("system counters");
    $display("qubit-rounds: all0=%0d on-chip=%0d complex=%0d (coverage %0d/%0d)",
             n_all0, n_local, n_complex, n_all0 + n_local, n_all0 + n_local + n_complex);
    $display("overflows=%0d stall_layers=%0d packets=%0d carry_overs_sent=%0d withheld=%0d glitches=%0d backpressure=%0d",
             n_overflow, n_stall_layer, n_packets, n_carry, n_withheld, n_glitch, n_backpressure);
    checks++;
    if (n_all0 == 0 || n_local == 0 || n_complex == 0 || n_overflow == 0 || n_stall_layer == 0 ||
        n_carry == 0 || n_withheld == 0 || n_glitch == 0 || n_backpressure == 0 || n_packets == 0)
      fail("a mechanism never occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
