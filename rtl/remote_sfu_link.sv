// remote_sfu_link: one stop of the ring that lets the SFUs of different cores share
// results, so a vector produced in pieces by several cores reaches every core's activation
// buffer without a round trip through HBM.
//
// Each stop has a one-register ring output. A packet arriving from the previous core is
// written into this core's activation buffer (rx_we) and forwarded to the next core unless
// the next core is the one that produced it (after N_CORES-1 hops every other core has it).
// The local SFU injects a packet only in a cycle in which no packet is forwarded
// (tx_ready = 0 otherwise): traffic already on the ring has priority and the SFU stalls.
// Timing: one cycle per hop. The ring topology, the priority and the packet format are
// this implementation's choices; the design only states that SFUs can access remote SFUs.
module remote_sfu_link
  import flightllm_pkg::*;
#(
  parameter int N_CORES = 3,
  parameter int CORE_ID = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  ring_pkt_t   ring_in,
  output ring_pkt_t   ring_out,
  input  logic        tx_valid,
  input  logic [15:0] tx_addr,
  input  logic [7:0]  tx_data,
  output logic        tx_ready,
  output logic        rx_we,
  output logic [15:0] rx_addr,
  output logic [7:0]  rx_data
);
  localparam logic [1:0] NEXT = 2'((CORE_ID + 1) % N_CORES);
  localparam logic [1:0] ME   = 2'(CORE_ID);

  logic fwd;
  assign fwd      = ring_in.valid && (ring_in.src != NEXT) && (N_CORES > 1);
  assign tx_ready = !fwd;
  assign rx_we    = ring_in.valid && (ring_in.src != ME);
  assign rx_addr  = ring_in.addr;
  assign rx_data  = ring_in.data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ring_out <= '0;
    else if (fwd) ring_out <= ring_in;
    else begin
      ring_out.valid <= tx_valid && (N_CORES > 1);
      ring_out.src   <= ME;
      ring_out.addr  <= tx_addr;
      ring_out.data  <= tx_data;
    end
  end
endmodule
