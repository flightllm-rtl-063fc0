// mpu: matrix processing unit, a row of VPUs with their output accumulators.
//
// In MM mode every VPU of the MPU receives the same two activation rows (A and B) of the
// current K chunk and its own weight columns, so the MPU produces 2 x VPUS x (16/N) partial
// results per cycle. In MV mode there is a single activation row: only VPU 0 works and
// lane B is fed zeros, the rest of the MPU stays idle (the matrix-vector case is bounded
// by memory bandwidth, not by the DSPs). Partial results of successive K chunks are summed
// in 32-bit accumulators, one per VPU result slot and row; `first` restarts and `last`
// completes an output tile.
//
// Timing: a chunk presented with in_valid reaches the accumulators three cycles later;
// out_valid pulses one cycle after the accumulation of the chunk flagged `last`.
// The MM/MV configurations follow the design; the accumulator placement (outside the
// DSP chain) and widths are this implementation's choices.
module mpu #(
  parameter int VPUS   = 2,
  parameter int NUM_DG = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               mv_mode,
  input  logic               first,
  input  logic               last,
  input  logic [4:0]         nm_n,
  input  logic signed [7:0]  act_a [16],
  input  logic signed [7:0]  act_b [16],
  input  logic signed [7:0]  w     [VPUS][2*NUM_DG],
  input  logic [3:0]         idx   [VPUS][2*NUM_DG],
  output logic               out_valid,
  output logic signed [31:0] acc   [VPUS][NUM_DG][2]
);
  logic               vv   [VPUS];
  logic               rv   [VPUS][NUM_DG];
  logic signed [31:0] ra   [VPUS][NUM_DG];
  logic signed [31:0] rb   [VPUS][NUM_DG];
  logic signed [7:0]  b_in [16];

  always_comb
    for (int j = 0; j < 16; j++) b_in[j] = mv_mode ? 8'sd0 : act_b[j];

  for (genvar v = 0; v < VPUS; v++) begin : g_vpu
    vpu #(.NUM_DG(NUM_DG), .M_SEL(16)) u_vpu (
      .clk, .rst_n,
      .in_valid (in_valid && (v == 0 || !mv_mode)),
      .nm_n,
      .act_a,
      .act_b    (b_in),
      .w        (w[v]),
      .idx      (idx[v]),
      .out_valid(vv[v]),
      .res_valid(rv[v]),
      .res_a    (ra[v]),
      .res_b    (rb[v])
    );
  end

  // first/last travel beside the two-stage VPU pipeline
  logic [1:0] first_sr, last_sr, valid_sr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first_sr <= '0; last_sr <= '0; valid_sr <= '0; out_valid <= 1'b0;
      for (int v = 0; v < VPUS; v++)
        for (int g = 0; g < NUM_DG; g++) acc[v][g] <= '{default: '0};
    end else begin
      first_sr  <= {first_sr[0], first};
      last_sr   <= {last_sr[0], last};
      valid_sr  <= {valid_sr[0], in_valid};
      out_valid <= valid_sr[1] && last_sr[1];
      if (valid_sr[1]) begin
        for (int v = 0; v < VPUS; v++)
          for (int g = 0; g < NUM_DG; g++) begin
            if (first_sr[1]) begin
              acc[v][g][0] <= (vv[v] && rv[v][g]) ? ra[v][g] : 32'sd0;
              acc[v][g][1] <= (vv[v] && rv[v][g]) ? rb[v][g] : 32'sd0;
            end else if (vv[v] && rv[v][g]) begin
              acc[v][g][0] <= acc[v][g][0] + ra[v][g];
              acc[v][g][1] <= acc[v][g][1] + rb[v][g];
            end
          end
      end
    end
  end
endmodule
