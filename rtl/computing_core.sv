// computing_core: one computing core (one per die of the FPGA).
//
// Wires the instruction scheduler to the three execution units: the MMU (buffers,
// dequantization, LD/ST DMA over HBM_CH HBM channels), the MPE (MM/MV) and the SFU (MISC),
// plus this core's stop on the remote SFU ring. The core has two DDR masters, the
// instruction fetch (port 0) and the SFU param loader (port 1), arbitrated by the memory
// controller. Parameters are those of the MPE and MMU; defaults give 64 MPUs x 2 VPUs x 16
// DSPs = 2048 DSP48s per core.
module computing_core
  import flightllm_pkg::*;
#(
  parameter int N_MPU     = 64,
  parameter int VPUS      = 2,
  parameter int NUM_DG    = 8,
  parameter int HBM_CH    = 8,
  parameter int ACT_DEPTH = 4096,
  parameter int WGT_DEPTH = 256,
  parameter int GLB_DEPTH = 128,
  parameter int N_CORES   = 3,
  parameter int CORE_ID   = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] inst_base,
  input  logic [15:0] inst_count,
  input  logic [31:0] core_base,
  output logic        done,
  output logic        sys_req,
  input  logic        sys_go,
  output mem_req_t    hbm_req   [HBM_CH],
  input  logic        hbm_ready [HBM_CH],
  input  mem_rsp_t    hbm_rsp   [HBM_CH],
  output mem_req_t    ddr_req   [2],
  input  logic        ddr_ready [2],
  input  mem_rsp_t    ddr_rsp   [2],
  input  ring_pkt_t   ring_in,
  output ring_pkt_t   ring_out,
  output logic        overlap,      // an instruction was issued while another unit ran
  output logic        sfu_stall     // the SFU waited for the activation buffer or the ring
);
  localparam int ACT_W  = N_MPU * 256;
  localparam int WGT_W  = N_MPU * VPUS * 128;
  localparam int IDX_W  = N_MPU * VPUS * 64;
  localparam int GLB_W  = N_MPU * VPUS * NUM_DG * 2 * 16;
  localparam int ACT_AW = $clog2(ACT_DEPTH);
  localparam int WGT_AW = $clog2(WGT_DEPTH);
  localparam int GLB_AW = $clog2(GLB_DEPTH);

  inst_t issue_inst;
  logic mmu_start, mpe_start, sfu_start, mmu_busy, mpe_busy, sfu_busy;

  instruction_scheduler u_isched (
    .clk, .rst_n, .start, .inst_base, .inst_count, .core_base, .done,
    .ddr_req(ddr_req[0]), .ddr_ready(ddr_ready[0]), .ddr_rsp(ddr_rsp[0]),
    .mmu_start, .mpe_start, .sfu_start, .issue_inst, .mmu_busy, .mpe_busy, .sfu_busy,
    .sys_req, .sys_go, .overlap);

  logic              act_re, wgt_re, glb_we;
  logic [ACT_AW-1:0] act_raddr;
  logic [WGT_AW-1:0] wgt_raddr;
  logic [GLB_AW-1:0] glb_waddr;
  logic [ACT_W-1:0]  act_rdata;
  logic [WGT_W-1:0]  wgt_rdata;
  logic [IDX_W-1:0]  idx_rdata;
  logic [GLB_W-1:0]  glb_wdata;

  mpe #(.N_MPU(N_MPU), .VPUS(VPUS), .NUM_DG(NUM_DG),
        .ACT_AW(ACT_AW), .WGT_AW(WGT_AW), .GLB_AW(GLB_AW)) u_mpe (
    .clk, .rst_n, .start(mpe_start), .inst(issue_inst), .busy(mpe_busy),
    .act_re, .act_raddr, .act_rdata, .wgt_re, .wgt_raddr, .wgt_rdata, .idx_rdata,
    .glb_we, .glb_waddr, .glb_wdata);

  logic        sfu_glb_re, sfu_act_we, sfu_act_ready;
  logic [15:0] sfu_glb_eaddr, sfu_glb_rdata, sfu_act_eaddr;
  logic [7:0]  sfu_act_wdata;
  logic        tx_valid, tx_ready, rx_we;
  logic [15:0] tx_addr, rx_addr;
  logic [7:0]  tx_data, rx_data;

  sfu u_sfu (
    .clk, .rst_n, .core_id(2'(CORE_ID)), .start(sfu_start), .inst(issue_inst), .busy(sfu_busy),
    .glb_re(sfu_glb_re), .glb_eaddr(sfu_glb_eaddr), .glb_rdata(sfu_glb_rdata),
    .act_we(sfu_act_we), .act_eaddr(sfu_act_eaddr), .act_wdata(sfu_act_wdata),
    .act_ready(sfu_act_ready),
    .ring_tx_valid(tx_valid), .ring_tx_addr(tx_addr), .ring_tx_data(tx_data),
    .ring_tx_ready(tx_ready),
    .ddr_req(ddr_req[1]), .ddr_ready(ddr_ready[1]), .ddr_rsp(ddr_rsp[1]));

  remote_sfu_link #(.N_CORES(N_CORES), .CORE_ID(CORE_ID)) u_link (
    .clk, .rst_n, .ring_in, .ring_out, .tx_valid, .tx_addr, .tx_data, .tx_ready,
    .rx_we, .rx_addr, .rx_data);

  mmu #(.N_MPU(N_MPU), .VPUS(VPUS), .NUM_DG(NUM_DG), .HBM_CH(HBM_CH),
        .ACT_DEPTH(ACT_DEPTH), .WGT_DEPTH(WGT_DEPTH), .GLB_DEPTH(GLB_DEPTH)) u_mmu (
    .clk, .rst_n, .start(mmu_start), .inst(issue_inst), .busy(mmu_busy),
    .hbm_req, .hbm_ready, .hbm_rsp,
    .mpe_act_re(act_re), .mpe_act_raddr(act_raddr), .act_rdata,
    .mpe_wgt_re(wgt_re), .mpe_wgt_raddr(wgt_raddr), .wgt_rdata, .idx_rdata,
    .mpe_glb_we(glb_we), .mpe_glb_waddr(glb_waddr), .mpe_glb_wdata(glb_wdata),
    .sfu_glb_re, .sfu_glb_eaddr, .sfu_glb_rdata,
    .sfu_act_we, .sfu_act_eaddr, .sfu_act_wdata, .sfu_act_ready,
    .ring_we(rx_we), .ring_eaddr(rx_addr), .ring_wdata(rx_data));

  assign sfu_stall = sfu_busy && ((tx_valid && !tx_ready) || (!sfu_act_ready && (sfu_act_we || tx_valid)));
endmodule
