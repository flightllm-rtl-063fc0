// onchip_buffer: simple dual-port on-chip RAM used for the activation, weight, index and
// global buffers of a core.
//
// One write port with byte enables and one read port with a registered output (read data
// appears the cycle after re). Written as an array so that synthesis maps it to URAM
// (activation buffer) or BRAM36 (the others), which is how the design implements its
// buffers. Contents are cleared only by writes; reading an unwritten word is undefined.
module onchip_buffer #(
  parameter int W     = 512,    // word width in bits, a multiple of 8
  parameter int DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic [W/8-1:0]           wbe,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)
      for (int i = 0; i < W/8; i++)
        if (wbe[i]) mem[waddr][i*8 +: 8] <= wdata[i*8 +: 8];
    if (re) rdata <= mem[raddr];
  end
endmodule
