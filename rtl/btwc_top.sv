// btwc_top -- better-than-worst-case QEC decoding system for N_LQ logical qubits.
//
// What it does: each logical qubit (a distance-D rotated surface code) has its own
// Clique decoder, which resolves the common trivial syndrome rounds on-chip and
// flags the rare complex ones.  The flagged rounds share a small, statistically
// provisioned off-chip link to a complex (e.g. matching) decoder through the
// bandwidth allocator; when more decodes are waiting than the link is provisioned
// for, the next QEC cycle is stalled by the idle inserter, which issues an
// identity gate layer to every qubit and holds the program.
//
//   syn_raw --> clique_decoder x N_LQ --cplx/evt--> bw_alloc --pkt--> off-chip link
//                     |                                 |
//                  corr_x/z (on-chip corrections)     stall --> idle_inserter --> layers
//
// Interface and timing (one clock domain; a QEC cycle spans many clocks):
//   * round_valid: raw syndromes of all qubits are latched.  One clock later
//     corr_valid pulses with the on-chip corrections (zero for a qubit whose round
//     is complex or whose earlier decode is still waiting to go off-chip) and the
//     round is handed to the allocator; stall is valid from the clock after that.
//   * layer_tick: the gate layer of the next QEC cycle is decided; it must come at
//     least 2 clocks after round_valid so that it sees this round's stall decision.
//   * The off-chip packets (pkt_*) follow a valid/ready handshake, at most
//     bw_limit per round.
//   * The statistics count, per qubit and round, All-0s, Local-1s and complex
//     signatures, which give the on-chip coverage of the decoder.
//
// From the paper: the overall organisation (per-qubit Clique decoder, bandwidth
// allocation, stall insertion towards the waveform generator), D = 9, 1000 logical
// qubits and the 72-decode provisioning.  The quantum device, the complex decoder
// and the pulse generators are outside this RTL and connect through its ports.
module btwc_top
  import btwc_pkg::*;
#(
  parameter int N_LQ   = 1000,  // logical qubits
  parameter int D      = 9,     // code distance
  parameter int ROUNDS = 2,     // measurement rounds of the filter
  parameter int LANES  = 72,    // largest provisionable off-chip decodes per round
  localparam int NANC  = D * D - 1,
  localparam int NDATA = D * D,
  localparam int IDW   = (N_LQ > 1) ? $clog2(N_LQ) : 1,
  localparam int BW    = $clog2(LANES + 1),
  localparam int CW    = $clog2(N_LQ + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // syndrome readout
  input  logic                        round_valid,
  input  logic [N_LQ-1:0][NANC-1:0]   syn_raw,
  // on-chip corrections (to the conditional correction gates)
  output logic                        corr_valid,
  output logic [N_LQ-1:0][NDATA-1:0]  corr_x,
  output logic [N_LQ-1:0][NDATA-1:0]  corr_z,
  // off-chip decoding link
  input  logic [BW-1:0]               bw_limit,
  output logic                        pkt_valid,
  input  logic                        pkt_ready,
  output logic [IDW-1:0]              pkt_id,
  output logic [NANC-1:0]             pkt_sig,
  // gate layers to the waveform generator
  input  logic                        layer_tick,
  input  gate_op_e [N_LQ-1:0]         in_layer,
  input  logic                        in_valid,
  output logic                        in_ready,
  output gate_op_e [N_LQ-1:0]         out_layer,
  output logic                        out_valid,
  output logic                        out_stalled,
  // status and statistics
  output logic                        stall,
  output logic [CW-1:0]               waiting,
  output logic [31:0]                 rounds_cnt,
  output logic [31:0]                 overflow_cnt,
  output logic [31:0]                 sent_cnt,
  output logic [31:0]                 stall_cycles,
  output logic [31:0]                 bubble_cycles,
  output logic [31:0]                 issued_layers,
  output logic [47:0]                 all0_cnt,
  output logic [47:0]                 local_cnt,
  output logic [47:0]                 complex_cnt
);

  logic [N_LQ-1:0]             dvalid, nonzero, cplx;
  logic [N_LQ-1:0][NANC-1:0]   evt;
  logic [N_LQ-1:0][NDATA-1:0]  cx, cz;
  logic [N_LQ-1:0]             queued;

  for (genvar q = 0; q < N_LQ; q++) begin : g_lq
    clique_decoder #(.D(D), .ROUNDS(ROUNDS)) u_dec (
      .clk, .rst_n, .round_valid,
      .syn_raw    (syn_raw[q]),
      .dec_valid  (dvalid[q]),
      .evt        (evt[q]),
      .nonzero    (nonzero[q]),
      .is_complex (cplx[q]),
      .corr_x     (cx[q]),
      .corr_z     (cz[q])
    );
    // A qubit still waiting for its off-chip decode gets no on-chip correction:
    // its new events join the off-chip signature instead.
    assign corr_x[q] = queued[q] ? '0 : cx[q];
    assign corr_z[q] = queued[q] ? '0 : cz[q];
  end

  // All decoders see the same round strobe; their valid flags are identical.
  logic round_done;
  assign round_done = &dvalid;
  assign corr_valid = round_done;

  bw_alloc #(.N(N_LQ), .SIGW(NANC), .LANES(LANES)) u_alloc (
    .clk, .rst_n, .bw_limit,
    .dec_valid (round_done),
    .cplx, .evt, .queued, .stall, .waiting,
    .pkt_valid, .pkt_ready, .pkt_id, .pkt_sig,
    .rounds_cnt, .overflow_cnt, .sent_cnt
  );

  idle_inserter #(.NQ(N_LQ)) u_idle (
    .clk, .rst_n, .layer_tick, .stall,
    .in_layer, .in_valid, .in_ready,
    .out_layer, .out_valid, .out_stalled,
    .stall_cycles, .bubble_cycles, .issued_layers
  );

  // Signature-class statistics (per qubit and round).
  logic [CW-1:0] n_nonzero, n_cplx;
  assign n_nonzero = CW'($countones(nonzero));
  assign n_cplx    = CW'($countones(cplx));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      all0_cnt    <= '0;
      local_cnt   <= '0;
      complex_cnt <= '0;
    end else if (round_done) begin
      all0_cnt    <= all0_cnt    + 48'(N_LQ - int'(n_nonzero));
      local_cnt   <= local_cnt   + 48'(n_nonzero - n_cplx);
      complex_cnt <= complex_cnt + 48'(n_cplx);
    end
  end

endmodule
