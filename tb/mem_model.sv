// mem_model: behavioural model of one off-chip memory port (an HBM pseudo-channel or the
// DDR interface) for simulation only. Sparse storage of 512-bit beats, always ready,
// reads answered in order after LATENCY cycles, writes posted. Testbenches preload and
// inspect the storage through `mem`.
module mem_model
  import flightllm_pkg::*;
#(
  parameter int LATENCY = 6
) (
  input  logic     clk,
  input  mem_req_t req,
  output logic     ready,
  output mem_rsp_t rsp
);
  logic [MEM_DW-1:0] mem [logic [31:0]];
  logic [MEM_DW-1:0] pipe_d [LATENCY];
  logic              pipe_v [LATENCY];

  assign ready = 1'b1;
  initial for (int i = 0; i < LATENCY; i++) begin pipe_v[i] = 1'b0; pipe_d[i] = '0; end

  always @(posedge clk) begin
    for (int i = LATENCY - 1; i > 0; i--) begin
      pipe_v[i] <= pipe_v[i-1];
      pipe_d[i] <= pipe_d[i-1];
    end
    pipe_v[0] <= req.valid && !req.we;
    pipe_d[0] <= mem.exists(req.addr) ? mem[req.addr] : '0;
    if (req.valid && req.we) mem[req.addr] = req.wdata;
  end
  assign rsp.rvalid = pipe_v[LATENCY-1];
  assign rsp.rdata  = pipe_d[LATENCY-1];
endmodule
