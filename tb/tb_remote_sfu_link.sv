// tb_remote_sfu_link: self-checking test of the SFU ring built from three ring stops.
// Each stop's SFU side offers randomly timed packets (address = {core, sequence}, random
// data) and holds a packet while tx_ready is low. Checks: every packet reaches each other
// core exactly once with its data and never comes back to its sender; a packet takes one
// cycle per hop; and a local send did wait behind forwarded traffic at least once (the
// ring's back-pressure). Dense traffic on all stops makes that happen.
module tb_remote_sfu_link;
  import flightllm_pkg::*;
  localparam int NC = 3, NPK = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ring_pkt_t ring [NC];
  logic        tx_valid [NC], tx_ready [NC], rx_we [NC];
  logic [15:0] tx_addr [NC], rx_addr [NC];
  logic [7:0]  tx_data [NC], rx_data [NC];

  for (genvar c = 0; c < NC; c++) begin : g_stop
    remote_sfu_link #(.N_CORES(NC), .CORE_ID(c)) u_link (
      .clk, .rst_n, .ring_in(ring[(c + NC - 1) % NC]), .ring_out(ring[c]),
      .tx_valid(tx_valid[c]), .tx_addr(tx_addr[c]), .tx_data(tx_data[c]), .tx_ready(tx_ready[c]),
      .rx_we(rx_we[c]), .rx_addr(rx_addr[c]), .rx_data(rx_data[c]));
  end

  logic [7:0] sent_data [NC][NPK];
  int         sent_time [NC][NPK];
  int         got       [NC][NC][NPK];   // receiver, sender, sequence
  int         seq       [NC];
  int         stalls = 0;
  logic       taken     [NC];        // handshake seen at the last rising edge

  // SFU side of each stop: offer the next packet with probability 3/4, hold it while stalled
  always @(negedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      if (taken[c]) begin
        taken[c] = 1'b0;
        seq[c]++;
        tx_valid[c] = 1'b0;
      end
      if (!tx_valid[c] && seq[c] < NPK && $urandom_range(0, 3) != 0) begin
        tx_valid[c] = 1'b1;
        tx_addr[c]  = 16'(c * 256 + seq[c]);
        tx_data[c]  = sent_data[c][seq[c]];
      end
    end
  end

  always @(posedge clk) if (rst_n)
    for (int c = 0; c < NC; c++) begin
      if (tx_valid[c] && !tx_ready[c]) stalls++;
      if (tx_valid[c] && tx_ready[c]) begin sent_time[c][seq[c]] = $time / 10; taken[c] = 1'b1; end
      if (rx_we[c]) begin
        int s, q, hops;
        s = int'(rx_addr[c]) / 256; q = int'(rx_addr[c]) % 256;
        hops = (c - s + NC) % NC;
        checks++;
        if (s == c || s >= NC || q >= NPK) begin
          failures++; $display("core %0d received bad packet %h", c, rx_addr[c]);
        end else begin
          got[c][s][q]++;
          if (rx_data[c] != sent_data[s][q]) begin
            failures++; $display("core %0d: packet %0d/%0d data %h exp %h", c, s, q, rx_data[c], sent_data[s][q]);
          end
          // taken at the clock edge sent_time, seen by the stop 'hops' edges later
          checks++;
          if ($time / 10 != sent_time[s][q] + hops) begin
            failures++; $display("core %0d: packet %0d/%0d arrived at %0d, sent %0d", c, s, q, $time / 10, sent_time[s][q]);
          end
        end
      end
    end

  initial begin
    for (int c = 0; c < NC; c++) begin
      seq[c] = 0; taken[c] = 1'b0; tx_valid[c] = 1'b0; tx_addr[c] = '0; tx_data[c] = '0;
      for (int q = 0; q < NPK; q++) begin
        sent_data[c][q] = 8'($urandom);
        for (int r = 0; r < NC; r++) got[r][c][q] = 0;
      end
    end
    repeat (3) @(posedge clk); rst_n = 1;
    wait (seq[0] == NPK && seq[1] == NPK && seq[2] == NPK);
    repeat (10) @(posedge clk);
    for (int r = 0; r < NC; r++) for (int s = 0; s < NC; s++) for (int q = 0; q < NPK; q++) begin
      checks++;
      if (got[r][s][q] != (r == s ? 0 : 1)) begin
        failures++; $display("core %0d got packet %0d/%0d %0d times", r, s, q, got[r][s][q]);
      end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("no local send ever waited"); end
    else $display("local sends waiting behind ring traffic: %0d cycles", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
