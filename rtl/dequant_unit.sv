// dequant_unit: mixed-precision dequantization of compactly stored weights.
//
// LANES parallel bit-width expansion units. Each cycle the unit takes group `grp` of a
// memory beat in which weights are packed back to back with `qbits` bits each (2, 3, 4 or
// 8), sign-extends every field (its top bit is the sign bit), multiplies it by the
// unsigned scale factor `scale` (fixed point, 4 fraction bits) and saturates it to INT8,
// the format the matrix engine consumes. Lane i of group g reads bits
// [(g*LANES + i)*qbits +: qbits] of the beat, so a beat holds floor(8/qbits) groups
// (for 3-bit weights a quarter of each beat is left unused).
// Timing: combinational in, registered out (one cycle latency, one group per cycle).
// Expanding to INT8 from a control signal, scale factor and sign bit follows the design;
// the packing, the scale format and the group scheme are this implementation's choices.
module dequant_unit
  import flightllm_pkg::*;
#(
  parameter int LANES  = 512,
  parameter int BEAT_W = 4096
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [BEAT_W-1:0]   beat,
  input  logic [1:0]          grp,
  input  logic [3:0]          qbits,
  input  logic [7:0]          scale,
  output logic                out_valid,
  output logic [LANES*8-1:0]  wout
);
  logic [LANES*8-1:0] w_d;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      int base;
      logic [7:0] field;
      logic signed [7:0] q;
      base  = (int'(grp) * LANES + i) * int'(qbits);
      field = (base + 8 <= BEAT_W) ? beat[base +: 8] : 8'(beat >> base);
      case (qbits)
        4'd2:    q = 8'(signed'(field[1:0]));
        4'd3:    q = 8'(signed'(field[2:0]));
        4'd4:    q = 8'(signed'(field[3:0]));
        default: q = signed'(field);
      endcase
      w_d[i*8 +: 8] = sat8((32'(q) * signed'({24'd0, scale})) >>> 4);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      wout      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) wout <= w_d;
    end
  end
endmodule
