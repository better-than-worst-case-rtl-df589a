// tb_bw_alloc -- self-checking test of the bandwidth allocator / stall inserter.
//
// A small system (16 logical qubits, 8-bit signatures, up to 4 decodes per round)
// is driven with rounds of random complex flags whose density alternates between
// quiet phases and bursts, random per-round provisioning (1..4), round periods of
// 2..12 clocks and random back-pressure on the off-chip link.  A transaction-level
// model kept by the testbench predicts, at every round, the waiting set, the
// number waiting and the stall decision (waiting > provisioned), and at every
// packet the qubit that must be sent (carry-overs first, lowest index first), its
// signature (events XOR-merged while waiting) and that no round sends more than
// provisioned.  Counters and the stall/overflow/carry-over mechanisms are checked
// to have occurred.
module tb_bw_alloc;
  localparam int N = 16, SIGW = 8, LANES = 4;
  localparam int BW = $clog2(LANES + 1), IDW = $clog2(N), CW = $clog2(N + 1);

  logic                    clk = 1'b0;
  logic                    rst_n;
  logic [BW-1:0]           bw_limit;
  logic                    dec_valid;
  logic [N-1:0]            cplx;
  logic [N-1:0][SIGW-1:0]  evt;
  logic [N-1:0]            queued;
  logic                    stall;
  logic [CW-1:0]           waiting;
  logic                    pkt_valid, pkt_ready;
  logic [IDW-1:0]          pkt_id;
  logic [SIGW-1:0]         pkt_sig;
  logic [31:0]             rounds_cnt, overflow_cnt, sent_cnt;

  bw_alloc #(.N(N), .SIGW(SIGW), .LANES(LANES)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // Model state.
  bit              m_q [N];
  bit              m_c [N];
  logic [SIGW-1:0] m_sig [N];
  int              m_budget, m_bw, m_sent_round;
  int              n_overflow = 0, n_rounds = 0, n_sent = 0, n_carry_first = 0, n_backpressure = 0;

  task automatic fail(string msg);
    failures++;
    $display("FAIL %s", msg);
  endtask

  // Monitor at the falling edge: what the last rising edge did.
  logic prev_dec, prev_pv, prev_pr;
  logic [N-1:0] prev_cplx;
  logic [N-1:0][SIGW-1:0] prev_evt;
  logic [BW-1:0] prev_bw;
  logic mon_on = 1'b0;

  always @(negedge clk) begin
    if (mon_on) begin
      if (prev_dec) begin
        int cnt;
        bit old_q [N];
        cnt = 0;
        for (int q = 0; q < N; q++) old_q[q] = m_q[q];
        for (int q = 0; q < N; q++) begin
          if (old_q[q] || prev_cplx[q]) begin
            m_sig[q] = (old_q[q] ? m_sig[q] : '0) ^ prev_evt[q];
            cnt++;
          end
          m_c[q] = old_q[q];
          m_q[q] = old_q[q] || prev_cplx[q];
        end
        m_bw = int'(prev_bw); m_budget = int'(prev_bw); m_sent_round = 0;
        n_rounds++;
        if (cnt > prev_bw) n_overflow++;
        checks++;
        if (stall !== (cnt > prev_bw)) fail($sformatf("stall %b for %0d waiting, bw %0d", stall, cnt, prev_bw));
        checks++;
        if (waiting !== CW'(cnt)) fail("waiting count");
        for (int q = 0; q < N; q++)
          if (queued[q] !== m_q[q]) begin fail($sformatf("queued[%0d]", q)); break; end
      end else if (pkt_valid && (!prev_pv || prev_pr)) begin
        // A packet was loaded at the last edge: check it against the model.
        int exp_id;
        bit any_c;
        any_c = 0;
        for (int q = 0; q < N; q++) if (m_q[q] && m_c[q]) any_c = 1;
        exp_id = -1;
        for (int q = 0; q < N; q++)
          if (m_q[q] && (m_c[q] || !any_c)) begin exp_id = q; break; end
        checks++;
        if (exp_id < 0) fail("packet with nothing waiting");
        else begin
          if (int'(pkt_id) != exp_id) fail($sformatf("sent qubit %0d expected %0d", pkt_id, exp_id));
          if (pkt_sig !== m_sig[exp_id]) fail($sformatf("signature of qubit %0d", exp_id));
          if (any_c) begin
            for (int q = 0; q < exp_id; q++) if (m_q[q] && !m_c[q]) n_carry_first++;
          end
          m_q[exp_id] = 0; m_c[exp_id] = 0;
        end
        m_sent_round++;
        checks++;
        if (m_sent_round > m_bw) fail("more packets in a round than provisioned");
      end
      if (prev_pv && !prev_pr) n_backpressure++;
      if (pkt_valid && pkt_ready) n_sent++;
    end
    prev_dec = dec_valid; prev_pv = pkt_valid; prev_pr = pkt_ready;
    prev_cplx = cplx; prev_evt = evt; prev_bw = bw_limit;
  end

  initial begin
    repeat (50000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int q = 0; q < N; q++) begin m_q[q] = 0; m_c[q] = 0; m_sig[q] = '0; end
    m_budget = 0; m_bw = 0; m_sent_round = 0;
    rst_n = 1'b0; dec_valid = 1'b0; cplx = '0; evt = '0; pkt_ready = 1'b0; bw_limit = BW'(2);
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    prev_dec = 1'b0; prev_pv = 1'b0; prev_pr = 1'b0;
    mon_on = 1'b1;
    for (int r = 0; r < 400; r++) begin
      int dens, gap;
      dens = ((r / 25) % 2 == 1) ? 45 : 8;     // bursts every other 25 rounds
      for (int q = 0; q < N; q++) begin
        cplx[q] = ($urandom_range(99) < dens);
        evt[q]  = SIGW'($urandom);
      end
      bw_limit  = BW'(1 + $urandom_range(LANES - 1));
      dec_valid = 1'b1;
      pkt_ready = ($urandom_range(9) < 7);
      @(negedge clk);
      dec_valid = 1'b0;
      gap = 2 + $urandom_range(10);
      for (int g = 0; g < gap; g++) begin
        pkt_ready = ($urandom_range(9) < 7);
        @(negedge clk);
      end
    end
    pkt_ready = 1'b1;
    repeat (4) @(negedge clk);
    mon_on = 1'b0;
    checks++;
    if (rounds_cnt != 32'(n_rounds) || overflow_cnt != 32'(n_overflow) || sent_cnt != 32'(n_sent))
      fail($sformatf("counters %0d/%0d %0d/%0d %0d/%0d", rounds_cnt, n_rounds, overflow_cnt,
                     n_overflow, sent_cnt, n_sent));
    $display("rounds=%0d overflows=%0d sent=%0d carry_first=%0d backpressure=%0d",
             n_rounds, n_overflow, n_sent, n_carry_first, n_backpressure);
    checks++;
    if (n_overflow == 0 || n_carry_first == 0 || n_backpressure == 0 || n_overflow == n_rounds)
      fail("a mechanism never occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
