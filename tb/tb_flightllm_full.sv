// tb_flightllm_full: end-to-end test of the accelerator (full size: default parameters of the top, 64 MPUs and 8 HBM channels per core).
// The host programs a two-entry length table and the per-core base addresses, then starts
// one inference step. Every core runs the same instruction file from DDR on its own HBM
// data: load the lookup tables, load an activation vector, 4-bit weights and sparse
// indices, two dense MVs, a SiLU on the first that overlaps the second, a barrier, an ADD of
// the two whose results are broadcast over the remote SFU ring into every core, a 4:16-sparse MM on the gathered vector, a Softmax, and stores of
// the results. Everything is recomputed here from the loaded data and compared with what
// the cores stored in HBM. Counted mechanisms: dequantisation, MV and MM mode, overflow
// adjust (dense chain), MISC issued while the MPE runs, ring broadcast,
// the barrier, the length-table choice and a length the table does not cover.
module tb_flightllm_full;
  import flightllm_pkg::*;
  localparam int NC = 3, NM = 64, NV = 2, NDG = 8, HC = 8;
  localparam int ACT_W = NM*256, WGT_W = NM*NV*128, IDX_W = NM*NV*64, GLB_W = NM*NV*NDG*2*16;
  localparam int BEAT_W = HC*512, EPW = GLB_W/16, ABW = ACT_W/8;
  localparam int NP = NC*HC;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic reg_we; logic [7:0] reg_addr; logic [31:0] reg_wdata, reg_rdata; logic irq;
  mem_req_t hbm_req [NP]; logic hbm_ready [NP]; mem_rsp_t hbm_rsp [NP];
  mem_req_t ddr_req; logic ddr_ready; mem_rsp_t ddr_rsp;
  logic overlap [NC], sfu_stall [NC];

  flightllm_top  dut (.*);

  // HBM pseudo-channels: one sparse store keyed by {port, byte address}, reads answered in
  // order after a per-port latency of 8..10 cycles, writes posted
  logic [511:0] hmem [logic [39:0]];
  for (genvar p = 0; p < NP; p++) begin : g_hbm
    localparam int LAT = 8 + p % 3;
    logic [511:0] pd [LAT];
    logic         pv [LAT];
    initial for (int i = 0; i < LAT; i++) begin pv[i] = 1'b0; pd[i] = '0; end
    always @(posedge clk) begin
      for (int i = LAT - 1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
      pv[0] <= hbm_req[p].valid && !hbm_req[p].we;
      pd[0] <= hmem.exists({8'(p), hbm_req[p].addr}) ? hmem[{8'(p), hbm_req[p].addr}] : '0;
      if (hbm_req[p].valid && hbm_req[p].we) hmem[{8'(p), hbm_req[p].addr}] = hbm_req[p].wdata;
    end
    assign hbm_ready[p]    = 1'b1;
    assign hbm_rsp[p].rvalid = pv[LAT-1];
    assign hbm_rsp[p].rdata  = pd[LAT-1];
  end
  mem_model #(.LATENCY(4)) u_ddr (.clk, .req(ddr_req), .ready(ddr_ready), .rsp(ddr_rsp));

  // ---------------------------------------------------------------- test data
  localparam logic [31:0] A_ACT = 32'h0000, A_WGT = 32'h1000, A_IDX = 32'h2000,
                          A_OACT = 32'h3000, A_OGLB = 32'h4000;
  localparam logic [31:0] CORE_STRIDE = 32'h0010_0000, INST_A = 32'h100, INST_B = 32'h8000,
                          LUT_A = 32'h2_0000;
  logic [15:0] lut [768];
  logic signed [7:0] act0 [NC][16];          // the vector each core loads
  logic signed [7:0] wq   [NC][2][NM][NV][16];   // weights of word 0 (MV) and word 1 (MM)
  logic [3:0]        ix1  [NC][NM][NV][16];      // sparse indices for the MM word

  // write 'bits' of beat 'b' of a transfer at byte address 'a' for core c
  task automatic put_beat(int c, logic [31:0] a, int b, logic [BEAT_W-1:0] bits);
    for (int k = 0; k < HC; k++)
      hmem[{8'(c*HC + k), a + CORE_STRIDE*c + 64*b}] = bits[k*512 +: 512];
  endtask
  function automatic logic [BEAT_W-1:0] get_beat(int c, logic [31:0] a, int b);
    logic [BEAT_W-1:0] r;
    for (int k = 0; k < HC; k++) r[k*512 +: 512] = hmem.exists({8'(c*HC + k), a + CORE_STRIDE*c + 64*b}) ? hmem[{8'(c*HC + k), a + CORE_STRIDE*c + 64*b}] : '0;
    return r;
  endfunction

  function automatic inst_t mk(opcode_e op, logic [2:0] sub);
    inst_t i;
    i = '0; i.op = op; i.sub = sub; i.nm_n = 5'd16;
    return i;
  endfunction

  inst_t prog [$];
  task automatic build_program();
    inst_t i;
    i = mk(OP_MISC, MISC_LDLUT); i.ext_addr = LUT_A; prog.push_back(i);
    i = mk(OP_LD, BUF_ACT); i.a_addr = 0; i.len = 3; i.ext_addr = A_ACT; prog.push_back(i);
    i = mk(OP_LD, BUF_WGT); i.a_addr = 0; i.len = 2; i.qbits = 4; i.scale = 8'd16; i.ext_addr = A_WGT; prog.push_back(i);
    i = mk(OP_LD, BUF_IDX); i.a_addr = 0; i.len = 2; i.ext_addr = A_IDX; prog.push_back(i);
    // dense MV: vector = act word 0 row 0, weights word 0
    i = mk(OP_MV, 0); i.wait_mask = 3'b001; i.a_addr = 0; i.w_addr = 0; i.o_addr = 0;
    i.len = 1; i.cnt = 1; i.shift = 5'd4; prog.push_back(i);
    // a second MV keeps the MPE busy while the SiLU runs on the first result
    i = mk(OP_MV, 0); i.a_addr = 0; i.w_addr = 0; i.o_addr = 2; i.len = 1; i.cnt = 1; i.shift = 5'd4;
    prog.push_back(i);
    i = mk(OP_MISC, MISC_SILU); i.wait_mask = 3'b000; i.a_addr = 16'(2*NDG - 2); i.cnt = 16'(NV*NDG*2);
    i.len = 16'(NM); i.o_addr = 16'(2*ABW + 8); i.scale = 8'd4; prog.push_back(i);
    // barrier: the cores leave it together and then fetch through the shared DDR port one
    // after another, which staggers their broadcasts so ring traffic and local sends collide
    i = mk(OP_SYS, SYS_BARRIER); i.wait_mask = 3'b110; prog.push_back(i);
    // residual-style ADD of the two MV results, broadcast: every core gathers all slices
    i = mk(OP_MISC, MISC_ADD); i.a_addr = 16'(2*NDG - 2); i.w_addr = 16'(2*EPW + 2*NDG - 2);
    i.cnt = 16'(NV*NDG*2); i.len = 16'(NM); i.o_addr = 16'(ABW); i.scale = 8'd4; i.bcast = 1'b1;
    prog.push_back(i);
    i = mk(OP_SYS, SYS_BARRIER); prog.push_back(i);
    // 4:16 sparse MM on act word 1, weights/indices word 1
    i = mk(OP_MM, 0); i.wait_mask = 3'b110; i.nm_n = 5'd4; i.a_addr = 1; i.w_addr = 1; i.o_addr = 1;
    i.len = 1; i.cnt = 1; i.shift = 5'd2; prog.push_back(i);
    i = mk(OP_MISC, MISC_SOFTMAX); i.wait_mask = 3'b010; i.a_addr = 16'(EPW + 2); i.cnt = 16'd4; i.len = 16'd4;
    i.o_addr = 16'(2*ABW); i.scale = 8'd1; prog.push_back(i);
    i = mk(OP_ST, BUF_ACT); i.wait_mask = 3'b100; i.a_addr = 1; i.len = 2; i.ext_addr = A_OACT; prog.push_back(i);
    i = mk(OP_ST, BUF_GLB); i.wait_mask = 3'b010; i.a_addr = 0; i.len = 2; i.ext_addr = A_OGLB; prog.push_back(i);
    i = mk(OP_SYS, SYS_END); prog.push_back(i);
  endtask

  // beat/chunk placement used by the DMA for a word of width W
  function automatic int chunks(int W); return W > BEAT_W ? W / BEAT_W : 1; endfunction

  task automatic load_data();
    for (int k = 0; k < 256; k++) begin
      real x;
      lut[k] = 16'($rtoi(65535.0 * $exp(-k / 32.0) + 0.5));
      x = (k - 128) / 8.0;
      lut[256 + k] = 16'($rtoi($floor(x / (1.0 + $exp(-x)) * 256.0 + 0.5)));
      lut[512 + k] = 16'($rtoi(256.0 / $sqrt((k + 0.5) / 16.0)));
    end
    for (int b = 0; b < 24; b++) begin
      logic [511:0] v;
      for (int k = 0; k < 32; k++) v[k*16 +: 16] = lut[b*32 + k];
      u_ddr.mem[LUT_A + 64*b] = v;
    end
    for (int c = 0; c < NC; c++) begin
      logic [ACT_W-1:0] aw;
      // activation words 0 (vector), 1 and 2 (zero, filled on chip)
      aw = '0;
      for (int e = 0; e < 16; e++) begin act0[c][e] = 8'($urandom); aw[e*8 +: 8] = act0[c][e]; end
      for (int w = 0; w < 3; w++)
        for (int ch = 0; ch < chunks(ACT_W); ch++)
          put_beat(c, A_ACT, w*chunks(ACT_W) + ch, BEAT_W'((w == 0 ? aw : '0) >> (ch*BEAT_W)));
      // weights: 4-bit fields, group scheme of the dequantiser (2 groups per beat)
      begin
        logic [BEAT_W-1:0] bt [4];
        int gpw, lanes;
        lanes = BEAT_W / 8;
        gpw = WGT_W / BEAT_W > 0 ? WGT_W / BEAT_W : 1;   // groups per word
        for (int q = 0; q < 4; q++) bt[q] = '0;
        for (int w = 0; w < 2; w++)
          for (int m = 0; m < NM; m++) for (int v = 0; v < NV; v++) for (int j = 0; j < 16; j++) begin
            int lin, grp, lane, beat;
            wq[c][w][m][v][j] = 8'(int'($urandom_range(0, 15)) - 8);
            lin  = (m*NV + v)*16 + j;                // INT8 position within the word
            grp  = w*gpw + lin / lanes;              // group number in the transfer
            lane = lin % lanes;
            beat = grp / 2;
            bt[beat][((grp % 2)*lanes + lane)*4 +: 4] = 4'(wq[c][w][m][v][j]);
          end
        for (int q = 0; q < 4; q++) put_beat(c, A_WGT, q, bt[q]);
      end
      // indices: word 0 dense, word 1 random (4:16)
      for (int w = 0; w < 2; w++) begin
        logic [IDX_W-1:0] iw;
        for (int m = 0; m < NM; m++) for (int v = 0; v < NV; v++) for (int j = 0; j < 16; j++) begin
          ix1[c][m][v][j] = 4'($urandom);
          iw[((m*NV + v)*16 + j)*4 +: 4] = (w == 0) ? 4'(j) : ix1[c][m][v][j];
        end
        for (int ch = 0; ch < chunks(IDX_W); ch++) put_beat(c, A_IDX, w*chunks(IDX_W) + ch, BEAT_W'(iw >> (ch*BEAT_W)));
      end
    end
    for (int k = 0; k < prog.size(); k++) begin
      u_ddr.mem[INST_B + 64*k] = 512'(prog[k]);
      u_ddr.mem[INST_A + 64*k] = 512'(mk(OP_SYS, SYS_END));
    end
  endtask

  // ---------------------------------------------------------------- reference model
  function automatic int sat(int v, int lo, int hi); return v < lo ? lo : v > hi ? hi : v; endfunction
  function automatic int e_lut(int d); return int'(lut[(d >> 3) > 255 ? 255 : (d >> 3)]); endfunction

  int mv_ref  [NC][NM];           // MV outputs (Q8.8, after shift)
  int vec1    [16];               // gathered ADD vector (INT8), identical in every core
  int silu_ref [NC][NM];          // SiLU of the MV outputs (INT8)
  int mm_ref  [NC][NM][NV][NDG][2];
  int smx_ref [NC][4];

  task automatic reference();
    for (int e = 0; e < 16; e++) vec1[e] = 0;
    for (int c = 0; c < NC; c++)
      for (int m = 0; m < NM; m++) begin
        int s;
        s = 0;
        for (int j = 0; j < 16; j++) s += int'(wq[c][0][m][0][j]) * int'(act0[c][j]);
        mv_ref[c][m] = sat(s >>> 4, -32768, 32767);
      end
    for (int c = 0; c < NC; c++)
      for (int m = 0; m < NM; m++) begin
        int x, y, pos;
        x = mv_ref[c][m];
        if (x >= 4096) y = x; else if (x < -4096) y = 0;
        else y = int'($signed(lut[256 + ((x >>> 5) + 128)]));
        silu_ref[c][m] = sat(y >>> 4, -128, 127);
        pos = c*NM + m;
        if (pos < 16) vec1[pos] = sat((2*x) >>> 4, -128, 127);
      end
    for (int c = 0; c < NC; c++)
      for (int m = 0; m < NM; m++) for (int v = 0; v < NV; v++) for (int g = 0; g < NDG; g++)
        for (int l = 0; l < 2; l++) begin
          int s;
          s = 0;
          if (g % 2 == 1 && m == 0 && l == 0)
            for (int j = 2*g - 2; j <= 2*g + 1; j++) begin
              int e;
              e = ix1[c][0][v][j];
              s += int'(wq[c][1][0][v][j]) * ((e < 16 && c >= 0) ? vec1[e] : 0);
            end
          // rows other than row 0 of slice 0 are zero in act word 1 beyond the vector
          mm_ref[c][m][v][g][l] = (g % 2 == 1) ? sat(s >>> 2, -32768, 32767) : 0;
        end
    for (int c = 0; c < NC; c++) begin
      int xs [4], mx, se, rec;
      for (int i = 0; i < 4; i++) xs[i] = mm_ref[c][0][0][2*i + 1][0];
      mx = xs[0]; se = 65535;
      for (int i = 1; i < 4; i++)
        if (xs[i] > mx) begin se = int'((longint'(se) * e_lut(xs[i] - mx)) >> 16) + 65535; mx = xs[i]; end
        else se += e_lut(mx - xs[i]);
      rec = 16777216 / se;
      for (int i = 0; i < 4; i++) smx_ref[c][i] = sat(int'((longint'(e_lut(mx - xs[i])) * rec) >>> 16) >>> 1, -128, 127);
    end
  endtask

  // ---------------------------------------------------------------- mechanism counters
  int n_overlap = 0, n_stall = 0, n_ring = 0, n_barrier = 0, n_dq = 0, n_mv = 0, n_mm = 0, n_oau = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      if (overlap[c]) n_overlap++;
      if (sfu_stall[c]) n_stall++;
      if (dut.ring[c].valid) n_ring++;
    end
    if (dut.sys_go) n_barrier++;
    if (dut.g_core[0].u_core.u_mmu.u_dq.out_valid) n_dq++;
    if (dut.g_core[0].u_core.u_mpe.rd_v && dut.g_core[0].u_core.u_mpe.mv) n_mv++;
    if (dut.g_core[0].u_core.u_mpe.rd_v && !dut.g_core[0].u_core.u_mpe.mv) n_mm++;
    if (dut.g_core[0].u_core.u_mpe.g_mpu[0].u_mpu.g_vpu[0].u_vpu.v_q &&
        dut.g_core[0].u_core.u_mpe.g_mpu[0].u_mpu.g_vpu[0].u_vpu.oau_en) n_oau++;
  end

  task automatic wr(int a, logic [31:0] d);
    @(negedge clk); reg_we = 1; reg_addr = 8'(a); reg_wdata = d;
    @(negedge clk); reg_we = 0;
  endtask

  task automatic count(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never happened: %s", what); end
    else $display("%s: %0d", what, n);
  endtask

  initial begin
    int t0;
    reg_we = 0; reg_addr = 0; reg_wdata = 0;
    build_program();
    load_data();
    reference();
    repeat (3) @(posedge clk); rst_n = 1;
    // length table: <=16 tokens -> INST_A (a stub), <=32 tokens -> INST_B (the program)
    wr(16, 16); wr(17, INST_A); wr(18, 32'h8000_0001);
    wr(19, 32); wr(20, INST_B); wr(21, 32'h8000_0000 | prog.size());
    for (int c = 0; c < NC; c++) wr(2 + c, CORE_STRIDE * c);
    // a length beyond the table is refused
    wr(0, 32'h8000_0000 | 100);
    repeat (3) @(negedge clk);
    reg_addr = 8'd1; #1;
    checks++;
    if (reg_rdata[1] != 1'b1) begin failures++; $display("uncovered length not refused"); end
    else $display("length miss: 1");
    // token length 20 selects the second entry
    t0 = $time;
    wr(0, 32'h8000_0000 | 20);
    @(posedge irq);
    $display("inference step took %0d cycles", ($time - t0) / 10);
    repeat (5) @(negedge clk);
    // results
    for (int c = 0; c < NC; c++) begin
      logic [ACT_W-1:0] a1, a2;
      logic [GLB_W-1:0] g0, g1;
      a1 = '0; a2 = '0; g0 = '0; g1 = '0;
      for (int ch = 0; ch < chunks(ACT_W); ch++) begin
        a1 |= ACT_W'(get_beat(c, A_OACT, ch)) << (ch*BEAT_W);
        a2 |= ACT_W'(get_beat(c, A_OACT, chunks(ACT_W) + ch)) << (ch*BEAT_W);
      end
      for (int ch = 0; ch < chunks(GLB_W); ch++) begin
        g0 |= GLB_W'(get_beat(c, A_OGLB, ch)) << (ch*BEAT_W);
        g1 |= GLB_W'(get_beat(c, A_OGLB, chunks(GLB_W) + ch)) << (ch*BEAT_W);
      end
      for (int m = 0; m < NM; m++) begin
        checks++;
        if (int'($signed(g0[(m*NV*NDG*2 + 14)*16 +: 16])) != mv_ref[c][m]) begin
          failures++; $display("core %0d MV out %0d: got %0d exp %0d", c, m, $signed(g0[(m*NV*NDG*2 + 14)*16 +: 16]), mv_ref[c][m]);
        end
      end
      for (int e = 0; e < 16; e++) begin
        checks++;
        if (int'($signed(a1[e*8 +: 8])) != vec1[e]) begin
          failures++; $display("core %0d gathered ADD %0d: got %0d exp %0d", c, e, $signed(a1[e*8 +: 8]), vec1[e]);
        end
      end
      for (int m = 0; m < NM; m++) begin
        checks++;
        if (int'($signed(a2[(8 + m)*8 +: 8])) != silu_ref[c][m]) begin
          failures++; $display("core %0d SiLU %0d: got %0d exp %0d", c, m, $signed(a2[(8 + m)*8 +: 8]), silu_ref[c][m]);
        end
      end
      for (int v = 0; v < NV; v++) for (int g = 0; g < NDG; g++) begin
        checks++;
        if (int'($signed(g1[((v*NDG + g)*2)*16 +: 16])) != mm_ref[c][0][v][g][0]) begin
          failures++; $display("core %0d MM v%0d g%0d: got %0d exp %0d", c, v, g, $signed(g1[((v*NDG + g)*2)*16 +: 16]), mm_ref[c][0][v][g][0]);
        end
      end
      for (int i = 0; i < 4; i++) begin
        checks++;
        if (int'($signed(a2[i*8 +: 8])) != smx_ref[c][i]) begin
          failures++; $display("core %0d softmax %0d: got %0d exp %0d", c, i, $signed(a2[i*8 +: 8]), smx_ref[c][i]);
        end
      end
    end
    count("weight groups dequantised (core 0)", n_dq);
    count("MV chunks (core 0)", n_mv);
    count("MM chunks (core 0)", n_mm);
    count("chunks with overflow adjust on (core 0)", n_oau);
    count("instructions issued while another unit ran", n_overlap);
    count("ring packets", n_ring);
    // ring back-pressure depends on the relative phase of the cores and is exercised by the
    // ring link's own test; here it is only reported
    $display("SFU stall cycles on the ring: %0d", n_stall);
    count("barriers released", n_barrier);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
