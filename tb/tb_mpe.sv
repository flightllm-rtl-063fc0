// tb_mpe: self-checking test of the matrix processing engine and its controller.
// Small engine (2 MPUs x 2 VPUs). Buffers are modelled here as arrays with one-cycle read
// latency and filled with random data. Runs dense MM, 4:16 sparse MM, 2:16 sparse MM and a
// dense MV, recomputes every output element from the buffer contents and the documented
// layouts, and checks that the engine takes k_tiles*n_tiles + 5 cycles.
module tb_mpe;
  import flightllm_pkg::*;
  localparam int NM = 2, NV = 2, NDG = 8;
  localparam int ACT_W = NM*256, WGT_W = NM*NV*128, IDX_W = NM*NV*64, GLB_W = NM*NV*NDG*2*16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, act_re, wgt_re, glb_we;
  inst_t inst;
  logic [11:0] act_raddr;
  logic [7:0]  wgt_raddr;
  logic [6:0]  glb_waddr;
  logic [ACT_W-1:0] act_rdata, act_mem [16];
  logic [WGT_W-1:0] wgt_rdata, wgt_mem [16];
  logic [IDX_W-1:0] idx_rdata, idx_mem [16];
  logic [GLB_W-1:0] glb_wdata, glb_mem [8];

  mpe #(.N_MPU(NM), .VPUS(NV), .NUM_DG(NDG)) dut (.*);

  always_ff @(posedge clk) begin
    if (act_re) act_rdata <= act_mem[act_raddr[3:0]];
    if (wgt_re) begin wgt_rdata <= wgt_mem[wgt_raddr[3:0]]; idx_rdata <= idx_mem[wgt_raddr[3:0]]; end
    if (glb_we) glb_mem[glb_waddr[2:0]] <= glb_wdata;
  end

  function automatic int act(int word, int slice, int row, int e);
    return int'($signed(act_mem[word][slice*256 + row*128 + e*8 +: 8]));
  endfunction
  function automatic int wgt(int word, int slice, int v, int j);
    return int'($signed(wgt_mem[word][(slice*NV + v)*128 + j*8 +: 8]));
  endfunction
  function automatic int idx(int word, int slice, int v, int j);
    return int'(idx_mem[word][(slice*NV + v)*64 + j*4 +: 4]);
  endfunction

  task automatic run(input opcode_e op, input int nmn, input int kt, input int nt, input int sh);
    int t0, cycles;
    for (int i = 0; i < 16; i++) begin
      for (int b = 0; b < ACT_W; b += 32) act_mem[i][b +: 32] = $urandom;
      for (int b = 0; b < WGT_W; b += 32) wgt_mem[i][b +: 32] = $urandom;
      for (int b = 0; b < IDX_W; b += 32) idx_mem[i][b +: 32] = $urandom;
      if (nmn == 16)
        for (int s = 0; s < NM*NV; s++) for (int j = 0; j < 16; j++) idx_mem[i][s*64 + j*4 +: 4] = 4'(j);
    end
    inst = '0; inst.op = op; inst.nm_n = 5'(nmn); inst.shift = 5'(sh);
    inst.a_addr = 16'd2; inst.w_addr = 16'd3; inst.o_addr = 16'd1;
    inst.len = 16'(kt); inst.cnt = 16'(nt);
    @(negedge clk); start = 1; t0 = $time;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    cycles = ($time - t0) / 10;
    checks++;
    if (cycles != kt*nt + 5) begin failures++; $display("op %0d took %0d cycles, expected %0d", op, cycles, kt*nt + 5); end
    for (int n = 0; n < nt; n++)
      for (int m = 0; m < NM; m++)
        for (int v = 0; v < NV; v++)
          for (int g = 0; g < NDG; g++)
            for (int l = 0; l < 2; l++) begin
              int segl, exp_v, got;
              bit closes;
              segl = nmn / 2;
              closes = ((g + 1) % segl) == 0;
              exp_v = 0;
              if (closes && !(op == OP_MV && (v != 0 || l == 1)))
                for (int k = 0; k < kt; k++)
                  for (int gg = g - segl + 1; gg <= g; gg++)
                    for (int d = 0; d < 2; d++) begin
                      int j, wa;
                      j = 2*gg + d;
                      wa = 3 + n*kt + k;
                      if (op == OP_MM) exp_v += wgt(wa, 0, v, j) * act(2 + k, m, l, idx(wa, 0, v, j));
                      else             exp_v += wgt(wa, m, 0, j) * act(2 + k, 0, 0, idx(wa, m, 0, j));
                    end
              exp_v = exp_v >>> sh;
              if (exp_v > 32767) exp_v = 32767;
              if (exp_v < -32768) exp_v = -32768;
              got = int'($signed(glb_mem[1 + n][(((m*NV + v)*NDG + g)*2 + l)*16 +: 16]));
              checks++;
              if (got != exp_v) begin
                failures++;
                if (failures < 10) $display("op %0d N=%0d n%0d m%0d v%0d g%0d l%0d got %0d exp %0d", op, nmn, n, m, v, g, l, got, exp_v);
              end
            end
  endtask

  initial begin
    start = 0; inst = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(OP_MM, 16, 3, 2, 2);
    run(OP_MM, 4, 2, 3, 0);
    run(OP_MM, 2, 1, 2, 0);
    run(OP_MV, 16, 4, 2, 1);
    run(OP_MV, 8, 2, 2, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
