// tb_vpu: self-checking test of the CSD-Chain VPU.
// Drives random K chunks with random sparse indices for every N of the N:16 pattern
// (2, 4, 8, 16), including all-extreme operands that overflow an 18-bit lane when the
// overflow adjust units are not working. Expected dot products are computed here from the
// operands; the two-cycle latency and one-chunk-per-cycle rate are checked too.
module tb_vpu;
  localparam int NDG = 8, M = 16, NDSP = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid;
  logic [4:0] nm_n;
  logic signed [7:0] act_a [M], act_b [M], w [NDSP];
  logic [3:0] idx [NDSP];
  logic out_valid;
  logic res_valid [NDG];
  logic signed [31:0] res_a [NDG], res_b [NDG];

  vpu dut (.*);

  // expected results queue: one entry per chunk
  typedef struct { int n; int ea [NDG]; int eb [NDG]; } exp_t;
  exp_t q [$];
  int cyc = 0, sent_cyc [$];

  always @(posedge clk) cyc <= cyc + 1;

  task automatic drive(input int n, input bit extreme);
    exp_t e;
    int seg;
    e.n = n;
    for (int j = 0; j < M; j++) begin
      act_a[j] = extreme ? -8'sd127 : 8'($urandom);
      act_b[j] = extreme ? -8'sd127 : 8'($urandom);
    end
    for (int j = 0; j < NDSP; j++) begin
      w[j]   = extreme ? -8'sd127 : 8'($urandom);
      idx[j] = (n == 16) ? 4'(j) : 4'($urandom);
    end
    for (int g = 0; g < NDG; g++) begin e.ea[g] = 0; e.eb[g] = 0; end
    seg = n / 2;
    for (int j = 0; j < NDSP; j++) begin
      int g, last;
      g = j / 2;
      last = (g / seg) * seg + seg - 1;
      e.ea[last] += int'(w[j]) * int'(act_a[idx[j]]);
      e.eb[last] += int'(w[j]) * int'(act_b[idx[j]]);
    end
    nm_n = 5'(n);
    in_valid = 1;
    q.push_back(e);
    sent_cyc.push_back(cyc);
  endtask

  always @(negedge clk) begin
    if (out_valid) begin
      exp_t e;
      int sc;
      e = q.pop_front();
      sc = sent_cyc.pop_front();
      checks++;
      if (cyc - sc != 2) begin
        failures++; $display("latency %0d expected 2", cyc - sc);
      end
      for (int g = 0; g < NDG; g++) begin
        bit should;
        should = ((g + 1) % (e.n / 2)) == 0;
        checks++;
        if (res_valid[g] != should) begin failures++; $display("slot %0d valid mismatch n=%0d", g, e.n); end
        else if (should && (res_a[g] != e.ea[g] || res_b[g] != e.eb[g])) begin
          failures++;
          $display("n=%0d slot %0d got %0d/%0d exp %0d/%0d", e.n, g, res_a[g], res_b[g], e.ea[g], e.eb[g]);
        end
      end
    end
  end

  initial begin
    in_valid = 0; nm_n = 16;
    for (int j = 0; j < M; j++) begin act_a[j] = 0; act_b[j] = 0; end
    for (int j = 0; j < NDSP; j++) begin w[j] = 0; idx[j] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 400; t++) begin
      int ns [4] = '{2, 4, 8, 16};
      drive(ns[t % 4], (t % 7) == 3 || t < 4);
      @(negedge clk);
    end
    in_valid = 0;
    repeat (5) @(negedge clk);
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
