// tb_meas_filter -- self-checking test of the measurement-error filter.
//
// Drives random raw syndrome streams (with runs, so that persistent flips, single
// round glitches and repeated flips all occur) into a 2-round and a 3-round
// filter, keeps its own copy of the measurement history and checks every event
// bit after every round: an event is reported exactly when the ancilla changed
// value between the oldest two samples of the window and kept the new value in
// every later sample.  Also checks that reset clears the history and that the
// output holds between rounds.
module tb_meas_filter;
  localparam int N = 8;

  logic         clk = 1'b0;
  logic         rst_n;
  logic         round_valid;
  logic [N-1:0] raw;
  logic [N-1:0] evt2, evt3;

  int checks = 0, failures = 0;
  int n_evt = 0, n_glitch = 0;

  meas_filter #(.N(N), .ROUNDS(2)) dut2 (.clk, .rst_n, .round_valid, .raw, .evt(evt2));
  meas_filter #(.N(N), .ROUNDS(3)) dut3 (.clk, .rst_n, .round_valid, .raw, .evt(evt3));

  always #5 clk = ~clk;

  // Reference history, newest first.
  logic [N-1:0] h [4];

  function automatic logic [N-1:0] expect_evt(input int rounds);
    logic [N-1:0] e;
    for (int b = 0; b < N; b++) begin
      e[b] = (h[rounds][b] != h[rounds-1][b]);
      for (int t = rounds - 1; t >= 1; t--)
        if (h[t][b] != h[rounds-1][b]) e[b] = 1'b0;
      if (h[0][b] != h[rounds-1][b]) e[b] = 1'b0;
    end
    return e;
  endfunction

  task automatic check(input string what, input logic [N-1:0] got, input logic [N-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] cur;
    rst_n = 1'b0; round_valid = 1'b0; raw = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 4; t++) h[t] = '0;
    check("after reset 2", evt2, '0);
    check("after reset 3", evt3, '0);
    cur = '0;
    for (int r = 0; r < 600; r++) begin
      // Flip each ancilla with probability 1/5: gives persistent flips and glitches.
      for (int b = 0; b < N; b++)
        if ($urandom_range(4) == 0) cur[b] = ~cur[b];
      raw = cur;
      round_valid = 1'b1;
      @(posedge clk);
      #1 round_valid = 1'b0;
      for (int t = 3; t > 0; t--) h[t] = h[t-1];
      h[0] = cur;
      check("evt rounds=2", evt2, expect_evt(2));
      check("evt rounds=3", evt3, expect_evt(3));
      n_evt += $countones(evt2);
      for (int b = 0; b < N; b++)
        if (h[2][b] != h[1][b] && h[1][b] != h[0][b]) n_glitch++;
      // Idle clocks: the result must hold.
      raw = ~cur;
      @(posedge clk);
      #1;
      check("hold rounds=2", evt2, expect_evt(2));
    end
    if (n_evt == 0 || n_glitch == 0) begin
      failures++;
      $display("FAIL stimulus produced no events (%0d) or no glitches (%0d)", n_evt, n_glitch);
    end
    $display("events=%0d glitches_rejected=%0d", n_evt, n_glitch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
