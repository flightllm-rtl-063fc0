// vpu: vector processing unit built on the configurable sparse DSP chain (CSD-Chain).
//
// A VPU is a chain of NUM_DG DSP groups of two DSP48s each (16 DSPs by default). Every DSP
// has a sparse MUX in front that picks, by a 4-bit sparse index, one of the M_SEL
// activations of the current K chunk for row A and the same position for row B, so only
// the activations that meet a non-zero weight reach the DSPs. The chain is cut into
// segments of nm_n DSPs (N of the N:16 pattern): the reduction node of every (nm_n/2)-th DG
// closes a segment and the next DG restarts from zero through its Z-mux. Dense operation is
// nm_n = 16 (one dot product of length 16 per row), and N:16 sparse operation yields 16/N
// dot products per row. The overflow adjust units are enabled only when a segment is
// longer than eight DSPs.
//
// Timing: inputs are registered (cycle 1), the chain is evaluated and its results are
// registered (cycle 2): out_valid follows in_valid by two cycles, one chunk per cycle.
// Result slot g holds the output of the segment that ends in DG g; other slots are invalid.
// The chain structure, the sparse MUX, the RN/OAU roles and M = 16 follow the design; the
// pipeline placement and the slot numbering are this implementation's choices.
module vpu #(
  parameter int NUM_DG = 8,
  parameter int M_SEL  = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [4:0]               nm_n,           // 2, 4, 8 or 16 (must divide 2*NUM_DG)
  input  logic signed [7:0]        act_a [M_SEL],
  input  logic signed [7:0]        act_b [M_SEL],
  input  logic signed [7:0]        w     [2*NUM_DG],
  input  logic [$clog2(M_SEL)-1:0] idx   [2*NUM_DG],
  output logic                     out_valid,
  output logic                     res_valid [NUM_DG],
  output logic signed [31:0]       res_a     [NUM_DG],
  output logic signed [31:0]       res_b     [NUM_DG]
);
  localparam int NDSP = 2 * NUM_DG;

  logic                     v_q;
  logic [4:0]               n_q;
  logic signed [7:0]        a_q [M_SEL];
  logic signed [7:0]        b_q [M_SEL];
  logic signed [7:0]        w_q [NDSP];
  logic [$clog2(M_SEL)-1:0] i_q [NDSP];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0;
      n_q <= 5'd16;
      for (int j = 0; j < M_SEL; j++) begin a_q[j] <= '0; b_q[j] <= '0; end
      for (int j = 0; j < NDSP; j++)  begin w_q[j] <= '0; i_q[j] <= '0; end
    end else begin
      v_q <= in_valid;
      if (in_valid) begin
        n_q <= nm_n;
        a_q <= act_a;
        b_q <= act_b;
        w_q <= w;
        i_q <= idx;
      end
    end
  end

  // sparse MUX per DSP
  logic signed [7:0] sa [NDSP];
  logic signed [7:0] sb [NDSP];
  always_comb begin
    for (int j = 0; j < NDSP; j++) begin
      sa[j] = a_q[i_q[j]];
      sb[j] = b_q[i_q[j]];
    end
  end

  // segment configuration: a segment spans n_q/2 DGs
  int         dg_per_seg;
  logic       oau_en;
  logic       brk  [NUM_DG];
  logic       zin  [NUM_DG];
  always_comb begin
    dg_per_seg = (n_q < 5'd2) ? 1 : (32'(n_q) >> 1);
    oau_en     = n_q > 5'd8;
    for (int g = 0; g < NUM_DG; g++) begin
      brk[g] = ((g + 1) % dg_per_seg) == 0;
      zin[g] = (g % dg_per_seg) == 0;
    end
  end

  logic signed [47:0] cas [NUM_DG+1];
  logic signed [31:0] msp [NUM_DG+1];
  logic               rv  [NUM_DG];
  logic signed [31:0] ra  [NUM_DG];
  logic signed [31:0] rb  [NUM_DG];
  assign cas[0] = '0;
  assign msp[0] = '0;

  for (genvar g = 0; g < NUM_DG; g++) begin : g_dg
    dsp_group u_dg (
      .w        ('{w_q[2*g], w_q[2*g+1]}),
      .a        ('{sa[2*g], sa[2*g+1]}),
      .b        ('{sb[2*g], sb[2*g+1]}),
      .zero_in  (zin[g]),
      .brk      (brk[g]),
      .oau_en   (oau_en),
      .cas_in   (cas[g]),
      .msp_in   (msp[g]),
      .cas_out  (cas[g+1]),
      .msp_out  (msp[g+1]),
      .res_valid(rv[g]),
      .res_a    (ra[g]),
      .res_b    (rb[g])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int g = 0; g < NUM_DG; g++) begin
        res_valid[g] <= 1'b0; res_a[g] <= '0; res_b[g] <= '0;
      end
    end else begin
      out_valid <= v_q;
      for (int g = 0; g < NUM_DG; g++) begin
        res_valid[g] <= v_q & rv[g];
        res_a[g]     <= ra[g];
        res_b[g]     <= rb[g];
      end
    end
  end
endmodule
