// idle_inserter -- stall-cycle insertion in front of the waveform generator.
//
// What it does: the quantum program reaches the waveform generator as one gate
// layer per QEC cycle (one opcode per qubit).  On a normal cycle the next layer
// of the program is issued.  On a stall cycle an identity layer (OP_I on every
// qubit) is issued instead and the program's layer is held back, to be issued on
// the first cycle that is not stalled.  So a stall delays the program by one
// cycle without changing it.  When the program has no layer ready, an identity
// layer is issued as well (a bubble, counted apart from stalls).
//
// Interface and timing: layer_tick marks the clock on which the gate layer of a
// new QEC cycle is decided; stall is sampled on that clock.  in_layer/in_valid
// come from the program sequencer, and in_ready pulses on the tick that consumes
// the layer.  out_layer is registered and out_valid pulses one clock after the
// tick, for the pulse generators.
//
// From the paper: a stall signal to the waveform generator, no operation on any
// qubit during a stall cycle (identity gates on all qubits).  This design's
// choices: the layer-per-tick interface, the opcode encoding and the counters.
module idle_inserter
  import btwc_pkg::*;
#(
  parameter int NQ = 1000   // qubits driven per layer
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              layer_tick,
  input  logic              stall,
  input  gate_op_e [NQ-1:0] in_layer,
  input  logic              in_valid,
  output logic              in_ready,
  output gate_op_e [NQ-1:0] out_layer,
  output logic              out_valid,
  output logic              out_stalled,   // the issued layer is a stall layer
  output logic [31:0]       stall_cycles,
  output logic [31:0]       bubble_cycles,
  output logic [31:0]       issued_layers
);

  gate_op_e [NQ-1:0] idle_layer;
  always_comb
    for (int q = 0; q < NQ; q++) idle_layer[q] = OP_I;

  assign in_ready = layer_tick && !stall && in_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_layer     <= idle_layer;
      out_valid     <= 1'b0;
      out_stalled   <= 1'b0;
      stall_cycles  <= '0;
      bubble_cycles <= '0;
      issued_layers <= '0;
    end else begin
      out_valid <= layer_tick;
      if (layer_tick) begin
        out_stalled <= stall;
        if (stall) begin
          out_layer    <= idle_layer;
          stall_cycles <= stall_cycles + 1;
        end else if (in_valid) begin
          out_layer     <= in_layer;
          issued_layers <= issued_layers + 1;
        end else begin
          out_layer     <= idle_layer;
          bubble_cycles <= bubble_cycles + 1;
        end
      end
    end
  end

  // A stall layer is all identity.
  a_stall_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && out_stalled) |-> (out_layer == idle_layer));

endmodule
