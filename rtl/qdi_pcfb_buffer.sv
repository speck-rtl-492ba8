// qdi_pcfb_buffer: behavioural model of the N-bit dual-rail pre-charge full
// buffer, the pipeline stage template of the asynchronous chip.
//
// This is a behavioural (timing) model, not synthesizable logic: the real
// stage is built from state-holding pull-up/pull-down gates and C-elements.
// Each bit i is a dual-rail pair (in_t[i], in_f[i]): 00 is the empty
// (neutral) state, 10 a one, 01 a zero. A word is valid when every pair
// holds one rail high; the validity tree (OR of each pair, joined by
// C-elements) makes in_valid rise when all bits are valid and fall only when
// all are neutral again. The stage follows the four-phase protocol:
//   1. input valid and out_ack low   -> output takes the input value;
//   2. output valid                   -> in_ack rises;
//   3. then, concurrently: input returns to neutral -> in_ack falls, and
//      out_ack rises -> output returns to neutral.
// Because the input and output reset phases run in parallel the stage holds a
// whole token (a full buffer). The ports and signal names (in_t/in_f,
// out_t/out_f, in_ack, out_ack, in_valid, out_valid, enable, active-low
// preset and sreset) follow the stage drawing; the gate delay D and the
// step-by-step behaviour given above are this model's own simplification of
// the transistor-level circuit.
//
// The validity trees hold their value between all-valid and all-empty, as
// a C-element does; a lint tool reports them as latches, which is intended.
// Preset is meant to be applied once, before the first token.
//
// Interface: N dual-rail data bits each way plus acknowledge wires; no clock.
module qdi_pcfb_buffer #(
  parameter int unsigned N = 8,
  parameter int unsigned D = 1      // delay of one gate stage, in time units
) (
  input  logic         preset,      // active low: outputs and in_ack cleared
  input  logic         sreset,      // active low: evaluation blocked
  input  logic [N-1:0] in_t,
  input  logic [N-1:0] in_f,
  output logic         in_ack,
  output logic [N-1:0] out_t,
  output logic [N-1:0] out_f,
  input  logic         out_ack,
  output logic         in_valid,
  output logic         out_valid,
  output logic         enable
);
  // validity trees: C-element behaviour (hold between all-valid and all-empty)
  always @(in_t or in_f or preset) begin
    if (!preset) in_valid = 1'b0;
    else if (&(in_t | in_f)) in_valid = 1'b1;
    else if (!(|(in_t | in_f))) in_valid = 1'b0;
  end
  always @(out_t or out_f or preset) begin
    if (!preset) out_valid = 1'b0;
    else if (&(out_t | out_f)) out_valid = 1'b1;
    else if (!(|(out_t | out_f))) out_valid = 1'b0;
  end

  initial begin
    in_ack = 1'b0; out_t = '0; out_f = '0; enable = 1'b0;
    forever begin
      wait (preset && sreset);
      enable = 1'b1;
      wait (in_valid && !out_ack);
      #D;
      out_t = in_t;
      out_f = in_f;
      wait (out_valid);
      #D in_ack = 1'b1;
      enable = 1'b0;
      fork
        begin wait (!in_valid); #D in_ack = 1'b0; end
        begin wait (out_ack);   #D out_t = '0; out_f = '0; end
      join
    end
  end
endmodule
