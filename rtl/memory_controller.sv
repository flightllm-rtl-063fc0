// memory_controller: connects the computing cores to the off-chip memories.
//
// HBM: every core owns HBM_CH pseudo-channels; core c channel k is wired to HBM port
// c*HBM_CH + k through one register slice each way. Data the compiler placed for a core
// therefore never crosses channels, which is how the mapping flow avoids cross-channel
// traffic. DDR (instructions and small lookup tables, where its lower latency pays off)
// has a single port shared by the 2*N_CORES DDR masters of the cores through a round-robin
// arbiter; only one DDR read is outstanding at a time and its response is routed back to
// the master that issued it. Timing: one cycle added each way on HBM; DDR grant one cycle
// after the request. The channel partition and the HBM/DDR split follow the design; the
// register slices and the arbitration policy are this implementation's choices.
module memory_controller
  import flightllm_pkg::*;
#(
  parameter int N_CORES = 3,
  parameter int HBM_CH  = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  // core side
  input  mem_req_t core_hbm_req   [N_CORES*HBM_CH],
  output logic     core_hbm_ready [N_CORES*HBM_CH],
  output mem_rsp_t core_hbm_rsp   [N_CORES*HBM_CH],
  input  mem_req_t core_ddr_req   [2*N_CORES],
  output logic     core_ddr_ready [2*N_CORES],
  output mem_rsp_t core_ddr_rsp   [2*N_CORES],
  // memory side
  output mem_req_t hbm_req   [N_CORES*HBM_CH],
  input  logic     hbm_ready [N_CORES*HBM_CH],
  input  mem_rsp_t hbm_rsp   [N_CORES*HBM_CH],
  output mem_req_t ddr_req,
  input  logic     ddr_ready,
  input  mem_rsp_t ddr_rsp
);
  localparam int NP = N_CORES * HBM_CH;
  localparam int ND = 2 * N_CORES;

  // ---------------- HBM: request slice with skid-free ready (ready passes through)
  for (genvar p = 0; p < NP; p++) begin : g_hbm
    mem_req_t req_q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) req_q <= '0;
      else if (!req_q.valid || hbm_ready[p]) req_q <= core_hbm_req[p];
    end
    // a request is taken when the slice is empty or drains this cycle
    assign core_hbm_ready[p] = !req_q.valid || hbm_ready[p];
    assign hbm_req[p]        = req_q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) core_hbm_rsp[p] <= '0;
      else        core_hbm_rsp[p] <= hbm_rsp[p];
    end
  end

  // ---------------- DDR: round-robin arbiter, one outstanding read
  logic [$clog2(ND)-1:0] last, owner, pick;
  logic                  found, pending;

  always_comb begin
    found = 1'b0;
    pick  = last;
    for (int k = 1; k <= ND; k++) begin
      logic [$clog2(ND)-1:0] c;
      c = $clog2(ND)'((int'(last) + k) % ND);
      if (!found && core_ddr_req[c].valid) begin
        found = 1'b1;
        pick  = c;
      end
    end
  end

  wire grant = found && !pending && ddr_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last <= '0; owner <= '0; pending <= 1'b0;
    end else begin
      if (grant) begin
        last  <= pick;
        owner <= pick;
        pending <= !core_ddr_req[pick].we;
      end else if (pending && ddr_rsp.rvalid) begin
        pending <= 1'b0;
      end
    end
  end

  always_comb begin
    ddr_req = '0;
    if (found && !pending) ddr_req = core_ddr_req[pick];
    for (int c = 0; c < ND; c++) begin
      core_ddr_ready[c] = grant && (pick == $clog2(ND)'(c));
      core_ddr_rsp[c].rvalid = pending && ddr_rsp.rvalid && (owner == $clog2(ND)'(c));
      core_ddr_rsp[c].rdata  = ddr_rsp.rdata;
    end
  end

  // DDR answers only a read that is outstanding
  assert property (@(posedge clk) disable iff (!rst_n) ddr_rsp.rvalid |-> pending);
endmodule
