// dsp_group: DSP group (DG) of the configurable sparse DSP chain.
//
// A DG is two DSP48 dual-MAC slices cascaded in a fixed manner. At its input the Z-mux
// chooses the cascade value of the previous DG or zero (a new segment starts). At its end:
//  * the reduction node (RN), when this DG closes a segment (brk = 1), decodes the packed
//    result into its two lanes and adds back the most significant parts (MSP) that the
//    overflow adjust units of earlier DGs of the same segment removed;
//  * the overflow adjust unit (OAU), when enabled and the segment goes on, splits the lane-B
//    partial sum into an LSP (its low 16 bits, kept in the cascade) and an MSP (the rest,
//    passed beside the chain to the next RN), so lane B never overflows its 18 bits.
// The design states that the OAU is skipped for chains of at most eight DSP48s; the upper
// lane (A) has 30 bits and needs no adjusting. The 16-bit LSP width is this
// implementation's choice. Purely combinational; the VPU registers around the chain.
module dsp_group #(
  parameter int LSP_BITS = 16
) (
  input  logic signed [7:0]  w   [2],
  input  logic signed [7:0]  a   [2],
  input  logic signed [7:0]  b   [2],
  input  logic               zero_in,   // Z-mux: 1 = start a new segment
  input  logic               brk,       // RN closes the segment at this DG
  input  logic               oau_en,    // OAU active (chain longer than 8 DSPs)
  input  logic signed [47:0] cas_in,
  input  logic signed [31:0] msp_in,    // MSP collected so far in this segment
  output logic signed [47:0] cas_out,
  output logic signed [31:0] msp_out,
  output logic               res_valid, // RN produced an output this cycle
  output logic signed [31:0] res_a,
  output logic signed [31:0] res_b
);
  logic signed [47:0] z, p0, p1;
  logic signed [31:0] msp_cur, low, lsp;

  dsp48_dual_mac u_dsp0 (.w(w[0]), .act_a(a[0]), .act_b(b[0]), .pcin(z),  .pcout(p0));
  dsp48_dual_mac u_dsp1 (.w(w[1]), .act_a(a[1]), .act_b(b[1]), .pcin(p0), .pcout(p1));

  always_comb begin
    z       = zero_in ? 48'sd0 : cas_in;
    msp_cur = zero_in ? 32'sd0 : msp_in;
    low     = 32'(signed'(p1[17:0]));             // lane B, sign-extended
    lsp     = 32'(p1[LSP_BITS-1:0]);              // non-negative low part
    // reduction node
    res_valid = brk;
    res_b     = low + msp_cur;
    res_a     = 32'((p1 - 48'(low)) >>> 18);
    // overflow adjust unit
    if (oau_en && !brk) begin
      cas_out = p1 - 48'(low - lsp);
      msp_out = msp_cur + (low - lsp);
    end else begin
      cas_out = p1;
      msp_out = msp_cur;
    end
  end
endmodule
