// tb_idle_inserter -- self-checking test of stall-cycle insertion.
//
// A 4-qubit program of random gate layers (X, Y, Z, H, T, CNOT halves, measure) is
// offered to the inserter while the stall input and the program's valid are
// driven at random.  After every tick the testbench checks the issued layer: on a
// stalled tick an identity layer flagged as stalled, on a tick without a ready
// layer an identity bubble, otherwise exactly the next program layer in order.
// The program must come out complete and in order, the layer must appear one
// clock after the tick, and the stall, bubble and issued counters must match.
module tb_idle_inserter;
  import btwc_pkg::*;
  localparam int NQ = 4;
  localparam int PLEN = 300;

  logic              clk = 1'b0;
  logic              rst_n;
  logic              layer_tick, stall, in_valid, in_ready;
  gate_op_e [NQ-1:0] in_layer, out_layer;
  logic              out_valid, out_stalled;
  logic [31:0]       stall_cycles, bubble_cycles, issued_layers;

  idle_inserter #(.NQ(NQ)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  gate_op_e [NQ-1:0] prog [PLEN];
  gate_op_e [NQ-1:0] idle;

  task automatic fail(string msg);
    failures++;
    $display("FAIL %s", msg);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pc, n_stall, n_bubble, n_issued;
    pc = 0; n_stall = 0; n_bubble = 0; n_issued = 0;
    for (int q = 0; q < NQ; q++) idle[q] = OP_I;
    for (int l = 0; l < PLEN; l++)
      for (int q = 0; q < NQ; q++) prog[l][q] = gate_op_e'(1 + $urandom_range(7));
    rst_n = 1'b0; layer_tick = 1'b0; stall = 1'b0; in_valid = 1'b0; in_layer = idle;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    while (pc < PLEN) begin
      logic st, iv;
      st = ($urandom_range(4) == 0);
      iv = ($urandom_range(9) != 0);
      stall = st; in_valid = iv; in_layer = prog[pc]; layer_tick = 1'b1;
      #1;
      checks++;
      if (in_ready !== (iv && !st)) fail("in_ready");
      @(posedge clk);
      #1 layer_tick = 1'b0; stall = 1'b0;
      checks++;
      if (out_valid !== 1'b1) fail("out_valid not one clock after tick");
      checks++;
      if (st) begin
        n_stall++;
        if (out_layer !== idle || out_stalled !== 1'b1) fail($sformatf("stall layer at pc %0d", pc));
      end else if (!iv) begin
        n_bubble++;
        if (out_layer !== idle || out_stalled !== 1'b0) fail("bubble layer");
      end else begin
        n_issued++;
        if (out_layer !== prog[pc] || out_stalled !== 1'b0) fail($sformatf("layer %0d out of order", pc));
        pc++;
      end
      // A QEC cycle spans several clocks.
      repeat (1 + $urandom_range(2)) begin
        @(posedge clk);
        #1;
        checks++;
        if (out_valid !== 1'b0) fail("out_valid without a tick");
      end
    end
    checks++;
    if (stall_cycles != 32'(n_stall) || bubble_cycles != 32'(n_bubble) || issued_layers != 32'(n_issued))
      fail("counters");
    checks++;
    if (n_stall == 0 || n_bubble == 0) fail("no stall or no bubble occurred");
    $display("issued=%0d stalls=%0d bubbles=%0d", n_issued, n_stall, n_bubble);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
