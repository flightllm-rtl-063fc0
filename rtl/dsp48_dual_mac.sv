// dsp48_dual_mac: one DSP48 slice used as two INT8 multiply-accumulates sharing a weight.
//
// The two activations are packed into one wide multiplier operand, A at bit 18 and B at
// bit 0, so a single 27x18-style product gives w*A*2^18 + w*B. The result is added to the
// value chosen by the Z-mux (cascade input or zero) and leaves on the cascade output. Only
// 18 bits belong to lane B, which is why long chains need the overflow adjust unit of the
// DSP group. Packing two INT8 MACs into one DSP48 follows the design; modelling the slice
// as purely combinational (the pipeline registers sit in the VPU) is this implementation's
// choice.
module dsp48_dual_mac (
  input  logic signed [7:0]  w,       // shared weight
  input  logic signed [7:0]  act_a,   // activation of row A
  input  logic signed [7:0]  act_b,   // activation of row B
  input  logic signed [47:0] pcin,    // cascade input (already Z-muxed)
  output logic signed [47:0] pcout
);
  logic signed [47:0] packed_act;
  always_comb begin
    packed_act = (48'(act_a) <<< 18) + 48'(act_b);
    pcout      = pcin + 48'(w) * packed_act;
  end
endmodule
