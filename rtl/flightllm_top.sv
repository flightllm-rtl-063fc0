// flightllm_top: the complete accelerator, a task scheduler, a memory controller and
// N_CORES computing cores (one per die), with the cores' SFUs joined in a ring.
//
// The host CPU programs the task scheduler through a small register port and gets an
// interrupt when an inference step is done. HBM and DDR are off-chip: their channel
// ports are ports of this module (N_CORES*HBM_CH HBM pseudo-channels, one DDR port), as is
// the host port. Defaults: 3 cores x 64 MPUs x 2 VPUs x 16 DSP48s = 6144 DSP48s, each
// performing two INT8 MACs per cycle; 8 HBM channels of 512 bits per core.
// `overlap` and `sfu_stall` report per-core activity for performance counters.
// Lint notes that stand: rst_n is an asynchronous reset everywhere and is seen as
// synchronous only because it also disables the bus-rule assertions; each unit decodes
// only its own fields of the instruction word, so the others are unused there; at full
// size the buffer words are wider than 8192 bits, so their replications exceed the
// linter's default limit.
module flightllm_top
  import flightllm_pkg::*;
#(
  parameter int N_CORES   = 3,
  parameter int N_MPU     = 64,
  parameter int VPUS      = 2,
  parameter int NUM_DG    = 8,
  parameter int HBM_CH    = 8,
  parameter int ACT_DEPTH = 4096,
  parameter int WGT_DEPTH = 256,
  parameter int GLB_DEPTH = 128,
  parameter int T_ENTRIES = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // host CPU
  input  logic        reg_we,
  input  logic [7:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        irq,
  // HBM pseudo-channels
  output mem_req_t    hbm_req   [N_CORES*HBM_CH],
  input  logic        hbm_ready [N_CORES*HBM_CH],
  input  mem_rsp_t    hbm_rsp   [N_CORES*HBM_CH],
  // DDR
  output mem_req_t    ddr_req,
  input  logic        ddr_ready,
  input  mem_rsp_t    ddr_rsp,
  // per-core activity, for performance counters: an instruction issued while another
  // unit of the core was busy, and a cycle in which the SFU waited for the ring or buffer
  output logic        overlap   [N_CORES],
  output logic        sfu_stall [N_CORES]
);
  logic        core_start [N_CORES];
  logic        core_done  [N_CORES];
  logic        sys_req    [N_CORES];
  logic [31:0] core_base  [N_CORES];
  logic        sys_go;
  logic [31:0] inst_base;
  logic [15:0] inst_count;

  task_scheduler #(.N_CORES(N_CORES), .T_ENTRIES(T_ENTRIES)) u_task (
    .clk, .rst_n, .reg_we, .reg_addr, .reg_wdata, .reg_rdata, .irq,
    .core_start, .inst_base, .inst_count, .core_base, .core_done, .sys_req, .sys_go);

  mem_req_t  c_hbm_req   [N_CORES*HBM_CH];
  logic      c_hbm_ready [N_CORES*HBM_CH];
  mem_rsp_t  c_hbm_rsp   [N_CORES*HBM_CH];
  mem_req_t  c_ddr_req   [2*N_CORES];
  logic      c_ddr_ready [2*N_CORES];
  mem_rsp_t  c_ddr_rsp   [2*N_CORES];
  ring_pkt_t ring        [N_CORES];

  memory_controller #(.N_CORES(N_CORES), .HBM_CH(HBM_CH)) u_memc (
    .clk, .rst_n,
    .core_hbm_req(c_hbm_req), .core_hbm_ready(c_hbm_ready), .core_hbm_rsp(c_hbm_rsp),
    .core_ddr_req(c_ddr_req), .core_ddr_ready(c_ddr_ready), .core_ddr_rsp(c_ddr_rsp),
    .hbm_req, .hbm_ready, .hbm_rsp, .ddr_req, .ddr_ready, .ddr_rsp);

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    mem_req_t hreq [HBM_CH];
    logic     hrdy [HBM_CH];
    mem_rsp_t hrsp [HBM_CH];
    mem_req_t dreq [2];
    logic     drdy [2];
    mem_rsp_t drsp [2];
    for (genvar k = 0; k < HBM_CH; k++) begin : g_ch
      assign c_hbm_req[c*HBM_CH + k] = hreq[k];
      assign hrdy[k] = c_hbm_ready[c*HBM_CH + k];
      assign hrsp[k] = c_hbm_rsp[c*HBM_CH + k];
    end
    for (genvar d = 0; d < 2; d++) begin : g_dd
      assign c_ddr_req[2*c + d] = dreq[d];
      assign drdy[d] = c_ddr_ready[2*c + d];
      assign drsp[d] = c_ddr_rsp[2*c + d];
    end

    computing_core #(.N_MPU(N_MPU), .VPUS(VPUS), .NUM_DG(NUM_DG), .HBM_CH(HBM_CH),
                     .ACT_DEPTH(ACT_DEPTH), .WGT_DEPTH(WGT_DEPTH), .GLB_DEPTH(GLB_DEPTH),
                     .N_CORES(N_CORES), .CORE_ID(c)) u_core (
      .clk, .rst_n,
      .start(core_start[c]), .inst_base, .inst_count, .core_base(core_base[c]),
      .done(core_done[c]), .sys_req(sys_req[c]), .sys_go,
      .hbm_req(hreq), .hbm_ready(hrdy), .hbm_rsp(hrsp),
      .ddr_req(dreq), .ddr_ready(drdy), .ddr_rsp(drsp),
      .ring_in(ring[(c + N_CORES - 1) % N_CORES]), .ring_out(ring[c]),
      .overlap(overlap[c]), .sfu_stall(sfu_stall[c]));
  end
endmodule
