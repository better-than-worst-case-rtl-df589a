// bw_alloc -- off-chip decode bandwidth allocation and decode-overflow stall insertion.
//
// What it does: every syndrome round each logical qubit's Clique decoder says
// whether its signature is complex.  This block keeps the set of logical qubits
// that are waiting for an off-chip decode, sends at most bw_limit of them per
// round over the off-chip link, and carries the rest over to the next round.
// When the waiting set of a round (carry-overs plus new complex decodes) is larger
// than bw_limit the round overflows and stall is raised for the next QEC cycle, so
// the waveform generator issues an identity layer while the backlog drains.  New
// errors keep arriving in a stall cycle: a waiting qubit's new events are merged
// (XOR) into its pending signature and its on-chip corrections are withheld
// (queued output), since the whole signature of that qubit goes off-chip.
//
// bw_limit is the statistically provisioned bandwidth, in decodes per round; it
// is an input so that it can be set from the measured distribution of off-chip
// decodes (for example its 99th percentile) without changing the hardware.  LANES
// is the largest value it may take.
//
// Interface and timing:
//   * dec_valid pulses for one clock per round; cplx[q] and evt[q] are valid then.
//     On that clock the round is folded in: queued |= cplx, pending signatures are
//     updated, the round's send budget is loaded with bw_limit and stall is
//     registered as (number waiting > bw_limit).  stall then holds until the next
//     round.  queued (before the update) tells on that same clock which qubits'
//     on-chip corrections must be withheld.
//   * Between rounds one packet per clock is offered on the off-chip link with a
//     valid/ready handshake: pkt_id is the logical qubit, pkt_sig its accumulated
//     event vector.  Carried-over qubits are sent before new ones, lower index
//     first within each group.  The round period must be at least bw_limit + 2
//     clocks for the whole budget to be usable.
//
// From the paper: per-cycle provisioning, overflow detection as "decodes needed >
// provisioned bandwidth", stalling the next cycle, carry-overs re-sent in the
// stall cycle together with the new decodes.  This design's choices: the
// one-packet-per-clock link, carry-over-first priority, XOR merging of events of a
// waiting qubit, and the counters.
module bw_alloc #(
  parameter int N     = 1000,  // logical qubits
  parameter int SIGW  = 80,    // signature bits per logical qubit (d*d-1)
  parameter int LANES = 72,    // largest provisionable off-chip decodes per round
  localparam int IDW  = (N > 1) ? $clog2(N) : 1,
  localparam int BW   = $clog2(LANES + 1),
  localparam int CW   = $clog2(N + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [BW-1:0]            bw_limit,   // provisioned decodes per round (<= LANES)
  input  logic                     dec_valid,
  input  logic [N-1:0]             cplx,
  input  logic [N-1:0][SIGW-1:0]   evt,
  output logic [N-1:0]             queued,     // waiting for an off-chip decode
  output logic                     stall,      // next QEC cycle is a stall cycle
  output logic [CW-1:0]            waiting,    // decodes waiting at the last round
  // off-chip link
  output logic                     pkt_valid,
  input  logic                     pkt_ready,
  output logic [IDW-1:0]           pkt_id,
  output logic [SIGW-1:0]          pkt_sig,
  // statistics
  output logic [31:0]              rounds_cnt,
  output logic [31:0]              overflow_cnt,
  output logic [31:0]              sent_cnt
);

  logic [N-1:0]    carry;            // queued since an earlier round
  logic [SIGW-1:0] sig [N];
  logic [BW-1:0]   budget;

  logic [N-1:0]    req;
  logic [CW-1:0]   req_cnt;
  logic            overflow;

  assign req      = queued | cplx;
  assign req_cnt  = CW'($countones(req));
  assign overflow = (req_cnt > CW'(bw_limit));

  // Pick the next qubit to send: carry-overs first, lowest index first.
  logic           pick_any;
  logic [IDW-1:0] pick;
  always_comb begin
    logic [N-1:0] cand;
    cand = ((queued & carry) != '0) ? (queued & carry) : queued;
    pick_any = (cand != '0);
    pick     = '0;
    for (int q = N - 1; q >= 0; q--)
      if (cand[q]) pick = IDW'(q);
  end

  logic load;
  assign load = !dec_valid && pick_any && (budget != '0) && (!pkt_valid || pkt_ready);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      queued       <= '0;
      carry        <= '0;
      budget       <= '0;
      stall        <= 1'b0;
      waiting      <= '0;
      pkt_valid    <= 1'b0;
      pkt_id       <= '0;
      pkt_sig      <= '0;
      rounds_cnt   <= '0;
      overflow_cnt <= '0;
      sent_cnt     <= '0;
    end else begin
      if (pkt_valid && pkt_ready) begin
        pkt_valid <= 1'b0;
        sent_cnt  <= sent_cnt + 1;
      end
      if (dec_valid) begin
        queued       <= req;
        carry        <= queued;
        budget       <= bw_limit;
        stall        <= overflow;
        waiting      <= req_cnt;
        rounds_cnt   <= rounds_cnt + 1;
        overflow_cnt <= overflow_cnt + (overflow ? 32'd1 : 32'd0);
      end else if (load) begin
        queued[pick] <= 1'b0;
        carry[pick]  <= 1'b0;
        budget       <= budget - 1'b1;
        pkt_valid    <= 1'b1;
        pkt_id       <= pick;
        pkt_sig      <= sig[pick];
      end
    end
  end

  // Pending signatures: a new complex decode starts from its events; a waiting
  // qubit accumulates the events of later rounds.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int q = 0; q < N; q++) sig[q] <= '0;
    end else if (dec_valid) begin
      for (int q = 0; q < N; q++)
        if (req[q]) sig[q] <= (queued[q] ? sig[q] : '0) ^ evt[q];
    end
  end

  // Off-chip link handshake: a packet is held stable until it is taken.
  property p_pkt_stable;
    @(posedge clk) disable iff (!rst_n)
      (pkt_valid && !pkt_ready) |=> (pkt_valid && $stable(pkt_id) && $stable(pkt_sig));
  endproperty
  a_pkt_stable: assert property (p_pkt_stable);

  // Never more sends in a round than provisioned.
  a_budget: assert property (@(posedge clk) disable iff (!rst_n) load |-> budget != '0);

  initial begin
    assert (LANES >= 1 && LANES <= N) else $error("bw_alloc: LANES must be in 1..N");
  end

endmodule
