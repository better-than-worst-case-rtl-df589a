// meas_filter -- measurement-error filter over consecutive syndrome rounds.
//
// What it does: for each of N ancillas it keeps the raw measurement outcomes of the
// last ROUNDS+1 syndrome rounds, b_i (oldest) ... b_{i+ROUNDS} (newest), and reports
// a syndrome event only when the ancilla flipped between b_i and b_{i+1} and then
// stayed at its new value for every following round up to b_{i+ROUNDS}.  A flip that
// disappears again within the window is taken to be a measurement error and is
// dropped.  With the default ROUNDS = 2 this is exactly the gate network
// evt = (b_i XOR b_{i+1}) AND NOT (b_{i+1} XOR b_{i+2}); larger ROUNDS adds one
// "stayed for one more round" term per round.
//
// Interface: raw[N] is sampled on a clock edge where round_valid is 1; evt[N] is
// combinational from the history registers, so it is valid from the clock edge that
// latched the round until the next round is latched.  Reset clears the history
// (all ancillas read 0, no events).
//
// From the paper: the XOR/NOT/AND structure, the persistence rule and two rounds as
// the primary design.  This design's choices: the round_valid strobe, the
// synchronous active-low reset, and treating raw as the ancilla's measured value
// (not a precomputed detection event).
module meas_filter #(
  parameter int N      = 80,   // ancillas filtered in parallel
  parameter int ROUNDS = 2     // rounds a flip must persist over (window = ROUNDS+1 samples)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         round_valid,
  input  logic [N-1:0] raw,
  output logic [N-1:0] evt
);

  // hist[0] is the newest round (b_{i+ROUNDS}), hist[ROUNDS] the oldest (b_i).
  logic [N-1:0] hist [ROUNDS+1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int t = 0; t <= ROUNDS; t++) hist[t] <= '0;
    end else if (round_valid) begin
      hist[0] <= raw;
      for (int t = 1; t <= ROUNDS; t++) hist[t] <= hist[t-1];
    end
  end

  always_comb begin
    // Flip between the two oldest samples ...
    evt = hist[ROUNDS] ^ hist[ROUNDS-1];
    // ... that persisted over every later round.
    for (int t = ROUNDS - 1; t >= 1; t--)
      evt = evt & ~(hist[t] ^ hist[t-1]);
  end

  initial begin
    assert (ROUNDS >= 1) else $error("meas_filter: ROUNDS must be at least 1");
  end

endmodule
