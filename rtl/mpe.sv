// mpe: unified matrix processing engine with its tile controller.
//
// The engine holds N_MPU MPUs and executes one MM or MV instruction at a time:
//   C = X * W^T, walking the N tiles (outer loop, `n_tiles`) and the K chunks of 16
//   (inner loop, `k_tiles`). For chunk k of tile n it reads activation word a_addr + k and
//   weight/index word w_addr + n*k_tiles + k, feeds the MPUs, and after the last chunk
//   writes the requantised (>>> shift, saturated to 16 bits) accumulators of all MPUs as
//   one global-buffer word at o_addr + n.
// Buffer word layouts (all little-endian fields):
//   activation word: slice m (256 bits) = row 2m (16 x INT8) then row 2m+1 (16 x INT8)
//   weight word    : slice m = VPUS x 16 INT8 weights;  index word: slice m = VPUS x 16 x 4 bits
//   global word    : 16-bit element f = ((m*VPUS + v)*NUM_DG + g)*2 + lane
// MM mode: MPU m takes activation slice m (two rows) and weight slice 0, which is streamed
// to all MPUs, so the weights are reused by 2*N_MPU rows. MV mode: every MPU takes row 0 of
// slice 0 (the vector) and its own weight slice m, only VPU 0 of each MPU works.
// Timing: one chunk per cycle; a tile's word is written four cycles after its last read; `busy` stays high until the
// last global-buffer write. The MM/MV organisation follows the design; the loop order,
// the layouts and the broadcast (instead of MPU-to-MPU forwarding) of the MM weight stream
// are this implementation's choices.
module mpe
  import flightllm_pkg::*;
#(
  parameter int N_MPU  = 64,
  parameter int VPUS   = 2,
  parameter int NUM_DG = 8,
  parameter int ACT_AW = 12,
  parameter int WGT_AW = 8,
  parameter int GLB_AW = 7,
  localparam int ACT_W = N_MPU * 256,
  localparam int WGT_W = N_MPU * VPUS * 128,
  localparam int IDX_W = N_MPU * VPUS * 64,
  localparam int GLB_W = N_MPU * VPUS * NUM_DG * 2 * 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  inst_t             inst,
  output logic              busy,
  // buffer read ports (synchronous, one cycle latency)
  output logic              act_re,
  output logic [ACT_AW-1:0] act_raddr,
  input  logic [ACT_W-1:0]  act_rdata,
  output logic              wgt_re,
  output logic [WGT_AW-1:0] wgt_raddr,
  input  logic [WGT_W-1:0]  wgt_rdata,
  input  logic [IDX_W-1:0]  idx_rdata,
  // global buffer write port
  output logic              glb_we,
  output logic [GLB_AW-1:0] glb_waddr,
  output logic [GLB_W-1:0]  glb_wdata
);
  typedef enum logic [1:0] {IDLE, RUN, DRAIN} state_e;
  state_e state;

  inst_t       ins;
  logic [15:0] k, n, wbase;
  logic [15:0] n_out;           // tiles written so far
  logic        rd_v, rd_first, rd_last;

  wire last_k = (k == ins.len - 16'd1);
  wire last_n = (n == ins.cnt - 16'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; ins <= '0; k <= '0; n <= '0; wbase <= '0;
      rd_v <= 1'b0; rd_first <= 1'b0; rd_last <= 1'b0;
    end else begin
      rd_v <= 1'b0;
      case (state)
        IDLE: if (start) begin
          ins <= inst; k <= '0; n <= '0; wbase <= inst.w_addr; state <= RUN;
        end
        RUN: begin
          rd_v     <= 1'b1;
          rd_first <= (k == 16'd0);
          rd_last  <= last_k;
          if (last_k) begin
            k     <= '0;
            wbase <= wbase + ins.len;
            if (last_n) state <= DRAIN;
            else        n     <= n + 16'd1;
          end else begin
            k <= k + 16'd1;
          end
        end
        DRAIN: if (glb_we && n_out == ins.cnt - 16'd1) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

  assign busy      = (state != IDLE);
  assign act_re    = (state == RUN);
  assign wgt_re    = (state == RUN);
  assign act_raddr = ACT_AW'(ins.a_addr + k);
  assign wgt_raddr = WGT_AW'(wbase + k);

  // unpack buffer words for the MPUs
  logic signed [7:0] act_a [N_MPU][16];
  logic signed [7:0] act_b [N_MPU][16];
  logic signed [7:0] w     [N_MPU][VPUS][2*NUM_DG];
  logic [3:0]        ix    [N_MPU][VPUS][2*NUM_DG];
  wire mv = (ins.op == OP_MV);

  always_comb begin
    for (int m = 0; m < N_MPU; m++) begin
      int sa, sw;
      sa = mv ? 0 : m;          // activation slice
      sw = mv ? m : 0;          // weight slice
      for (int e = 0; e < 16; e++) begin
        act_a[m][e] = act_rdata[sa*256 + e*8 +: 8];
        act_b[m][e] = act_rdata[sa*256 + 128 + e*8 +: 8];
      end
      for (int v = 0; v < VPUS; v++)
        for (int j = 0; j < 2*NUM_DG; j++) begin
          w[m][v][j]  = wgt_rdata[(sw*VPUS + v)*128 + j*8 +: 8];
          ix[m][v][j] = idx_rdata[(sw*VPUS + v)*64 + j*4 +: 4];
        end
    end
  end

  logic               ov  [N_MPU];
  logic signed [31:0] acc [N_MPU][VPUS][NUM_DG][2];

  for (genvar m = 0; m < N_MPU; m++) begin : g_mpu
    mpu #(.VPUS(VPUS), .NUM_DG(NUM_DG)) u_mpu (
      .clk, .rst_n,
      .in_valid (rd_v),
      .mv_mode  (mv),
      .first    (rd_first),
      .last     (rd_last),
      .nm_n     (ins.nm_n),
      .act_a    (act_a[m]),
      .act_b    (act_b[m]),
      .w        (w[m]),
      .idx      (ix[m]),
      .out_valid(ov[m]),
      .acc      (acc[m])
    );
  end

  // write-back of a finished output tile (all MPUs finish together)
  always_comb begin
    glb_we    = ov[0];
    glb_waddr = GLB_AW'(ins.o_addr + n_out);
    for (int m = 0; m < N_MPU; m++)
      for (int v = 0; v < VPUS; v++)
        for (int g = 0; g < NUM_DG; g++)
          for (int l = 0; l < 2; l++)
            glb_wdata[(((m*VPUS + v)*NUM_DG + g)*2 + l)*16 +: 16] =
              sat16(48'(acc[m][v][g][l] >>> ins.shift));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 n_out <= '0;
    else if (state == IDLE)     n_out <= '0;
    else if (glb_we)            n_out <= n_out + 16'd1;
  end

  // the engine must not be started while busy
  assert property (@(posedge clk) disable iff (!rst_n) start |-> state == IDLE);
endmodule
