// mmu: memory management unit of a computing core.
//
// Holds the four on-chip buffers (activation, weight, index, global), the mixed-precision
// dequantization unit, and the DMA engine that executes LD and ST instructions.
// A single LD/ST instruction is expanded into HBM_CH parallel channel transfers: beat j of
// the transfer reads (or writes) byte address ext_addr + 64*j on every channel at once,
// channel c carrying bits [c*MEM_DW +: MEM_DW] of the BEAT_W-bit beat. Beats are
// assembled into buffer words (or a word is cut into beats for ST); weights pass through
// the dequantization unit, floor(8/qbits) groups per beat.
// Port sharing: the activation buffer is written by the DMA (whole words), by the remote
// SFU ring and by the local SFU (single bytes, in that priority; the SFU is stalled by
// `sfu_act_ready`); it is read by the MPE, or by the DMA during ST. The global buffer is
// written by the MPE or the DMA and read by the SFU (one 16-bit element) or the DMA.
// The DMA issues one beat at a time and waits for all channels before the next one.
// What follows the design: the buffers, the dequantization unit feeding INT8 to the MPE,
// one instruction launched to eight HBM channels. The rest (beat scheduling, layouts,
// arbitration order) is this implementation's choice.
module mmu
  import flightllm_pkg::*;
#(
  parameter int N_MPU     = 64,
  parameter int VPUS      = 2,
  parameter int NUM_DG    = 8,
  parameter int HBM_CH    = 8,
  parameter int ACT_DEPTH = 4096,
  parameter int WGT_DEPTH = 256,
  parameter int GLB_DEPTH = 128,
  localparam int ACT_W  = N_MPU * 256,
  localparam int WGT_W  = N_MPU * VPUS * 128,
  localparam int IDX_W  = N_MPU * VPUS * 64,
  localparam int GLB_W  = N_MPU * VPUS * NUM_DG * 2 * 16,
  localparam int BEAT_W = HBM_CH * MEM_DW,
  localparam int ACT_AW = $clog2(ACT_DEPTH),
  localparam int WGT_AW = $clog2(WGT_DEPTH),
  localparam int GLB_AW = $clog2(GLB_DEPTH),
  localparam int ACT_EW = $clog2(ACT_W / 8),   // byte-in-word bits
  localparam int GLB_EW = $clog2(GLB_W / 16)   // element-in-word bits
) (
  input  logic              clk,
  input  logic              rst_n,
  // LD/ST instruction
  input  logic              start,
  input  inst_t             inst,
  output logic              busy,
  // HBM channels
  output mem_req_t          hbm_req   [HBM_CH],
  input  logic              hbm_ready [HBM_CH],
  input  mem_rsp_t          hbm_rsp   [HBM_CH],
  // MPE side
  input  logic              mpe_act_re,
  input  logic [ACT_AW-1:0] mpe_act_raddr,
  output logic [ACT_W-1:0]  act_rdata,
  input  logic              mpe_wgt_re,
  input  logic [WGT_AW-1:0] mpe_wgt_raddr,
  output logic [WGT_W-1:0]  wgt_rdata,
  output logic [IDX_W-1:0]  idx_rdata,
  input  logic              mpe_glb_we,
  input  logic [GLB_AW-1:0] mpe_glb_waddr,
  input  logic [GLB_W-1:0]  mpe_glb_wdata,
  // SFU side: element read of the global buffer, byte write of the activation buffer
  input  logic              sfu_glb_re,
  input  logic [15:0]       sfu_glb_eaddr,
  output logic [15:0]       sfu_glb_rdata,
  input  logic              sfu_act_we,
  input  logic [15:0]       sfu_act_eaddr,
  input  logic [7:0]        sfu_act_wdata,
  output logic              sfu_act_ready,
  // remote SFU ring receive
  input  logic              ring_we,
  input  logic [15:0]       ring_eaddr,
  input  logic [7:0]        ring_wdata
);
  // ---------------------------------------------------------------- DMA
  typedef enum logic [2:0] {D_IDLE, D_RD, D_ISSUE, D_WAIT, D_PROC, D_DQ, D_WRITE} dstate_e;
  dstate_e ds;
  inst_t   di;
  logic [15:0] word;            // buffer word index within the transfer
  logic [15:0] chunk;           // chunk (BEAT_W bits) index within the word
  logic [31:0] beat_no;         // beat index within the transfer
  logic [HBM_CH-1:0] acc_mask, got_mask;
  logic [HBM_CH-1:0] ready_vec, rvalid_vec;
  logic [BEAT_W-1:0] beat;
  logic [1:0]  grp;
  logic        dq_wait;

  function automatic int word_w(logic [2:0] b);
    case (b)
      BUF_ACT: return ACT_W;
      BUF_WGT: return WGT_W;
      BUF_IDX: return IDX_W;
      default: return GLB_W;
    endcase
  endfunction
  function automatic int chunks_of(logic [2:0] b);
    return (word_w(b) > BEAT_W) ? word_w(b) / BEAT_W : 1;
  endfunction

  localparam int ASM_W = (GLB_W > ACT_W ? GLB_W : ACT_W) > BEAT_W ?
                         (GLB_W > ACT_W ? GLB_W : ACT_W) : BEAT_W;
  logic [ASM_W-1:0] asm_q;      // word being assembled (LD) or cut (ST)
  logic [ASM_W-1:0] st_rdata_sel;
  logic [BEAT_W-1:0] chunk_in;
  logic              chunk_v;

  wire is_ld   = (di.op == OP_LD);
  wire [3:0] groups = (di.qbits == 4'd2) ? 4'd4 : (di.qbits == 4'd8) ? 4'd1 : 4'd2;

  // dequantization unit
  logic              dq_ov;
  logic [BEAT_W-1:0] dq_out;
  dequant_unit #(.LANES(BEAT_W / 8), .BEAT_W(BEAT_W)) u_dq (
    .clk, .rst_n,
    .in_valid (ds == D_DQ && !dq_wait),
    .beat, .grp,
    .qbits    (di.qbits),
    .scale    (di.scale),
    .out_valid(dq_ov),
    .wout     (dq_out)
  );

  // buffer write strobes from the DMA
  logic dma_we;
  logic [2:0] dma_buf;
  assign dma_buf = di.sub;

  always_comb begin
    chunk_v  = 1'b0;
    chunk_in = beat;
    if (ds == D_PROC) chunk_v = 1'b1;
    if (dq_ov && ds == D_DQ) begin chunk_v = 1'b1; chunk_in = dq_out; end
  end

  logic [ASM_W-1:0] asm_next;
  always_comb begin
    asm_next = asm_q;
    if (chunks_of(dma_buf) == 1) asm_next[BEAT_W-1:0] = chunk_in;
    else asm_next[int'(chunk) * BEAT_W +: BEAT_W] = chunk_in;
  end
  wire word_done = chunk_v && (int'(chunk) == chunks_of(dma_buf) - 1);
  assign dma_we  = is_ld && word_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ds <= D_IDLE; di <= '0; word <= '0; chunk <= '0; beat_no <= '0;
      acc_mask <= '0; got_mask <= '0; beat <= '0; grp <= '0; asm_q <= '0; dq_wait <= 1'b0;
    end else begin
      case (ds)
        D_IDLE: if (start) begin
          di <= inst; word <= '0; chunk <= '0; beat_no <= '0; grp <= '0;
          ds <= (inst.op == OP_LD) ? D_ISSUE : D_RD;
        end
        D_RD: ds <= D_WRITE;                       // buffer read for ST, data next cycle
        D_WRITE: begin                             // ST: send one chunk to all channels
          if (chunk == 16'd0 && acc_mask == '0) asm_q <= st_rdata_sel;
          for (int c = 0; c < HBM_CH; c++)
            if (hbm_req[c].valid && hbm_ready[c]) acc_mask[c] <= 1'b1;
          if ((acc_mask | ready_vec) == '1) begin
            acc_mask <= '0;
            beat_no  <= beat_no + 1;
            if (int'(chunk) == chunks_of(dma_buf) - 1) begin
              chunk <= '0;
              if (word == di.len - 16'd1) ds <= D_IDLE;
              else begin word <= word + 16'd1; ds <= D_RD; end
            end else chunk <= chunk + 16'd1;
          end
        end
        D_ISSUE: begin                             // LD: request one beat on all channels
          for (int c = 0; c < HBM_CH; c++)
            if (hbm_req[c].valid && hbm_ready[c]) acc_mask[c] <= 1'b1;
          if ((acc_mask | ready_vec) == '1) begin acc_mask <= '0; got_mask <= '0; ds <= D_WAIT; end
        end
        D_WAIT: begin
          for (int c = 0; c < HBM_CH; c++)
            if (hbm_rsp[c].rvalid) begin
              beat[c*MEM_DW +: MEM_DW] <= hbm_rsp[c].rdata;
              got_mask[c] <= 1'b1;
            end
          if ((got_mask | rvalid_vec) == '1) begin
            grp <= '0; dq_wait <= 1'b0;
            ds  <= (dma_buf == BUF_WGT) ? D_DQ : D_PROC;
          end
        end
        D_DQ: begin                                // one group per cycle, result one later
          if (!dq_wait) begin
            if (4'(grp) == groups - 4'd1) dq_wait <= 1'b1;
            else grp <= grp + 2'd1;
          end else if (dq_ov) begin
            dq_wait <= 1'b0;
          end
        end
        default: ;
      endcase
      // chunk bookkeeping for LD (raw beats in D_PROC, dequantised groups via dq_ov)
      if (is_ld && chunk_v) begin
        asm_q <= asm_next;
        if (word_done) begin
          chunk <= '0;
          word  <= word + 16'd1;
        end else chunk <= chunk + 16'd1;
        if (word_done && word == di.len - 16'd1) ds <= D_IDLE;
        else if (ds == D_PROC || (dq_ov && dq_wait)) begin
          beat_no <= beat_no + 1;
          ds      <= D_ISSUE;
        end
      end
    end
  end

  logic [ACT_W-1:0]  act_q;
  logic [GLB_W-1:0]  glb_q;
  always_comb begin
    st_rdata_sel = '0;
    if (dma_buf == BUF_ACT) st_rdata_sel[ACT_W-1:0] = act_q;
    else                    st_rdata_sel[GLB_W-1:0] = glb_q;
    for (int c = 0; c < HBM_CH; c++) begin
      ready_vec[c]  = hbm_ready[c];
      rvalid_vec[c] = hbm_rsp[c].rvalid;
      hbm_req[c].valid = ((ds == D_ISSUE) || (ds == D_WRITE)) && !acc_mask[c];
      hbm_req[c].we    = (ds == D_WRITE);
      hbm_req[c].addr  = di.ext_addr + 32'(beat_no) * 32'd64;
      if (chunk == 16'd0 && acc_mask == '0)
        hbm_req[c].wdata = st_rdata_sel[c*MEM_DW +: MEM_DW];
      else
        hbm_req[c].wdata = asm_q[int'(chunk) * BEAT_W + c*MEM_DW +: MEM_DW];
    end
  end
  assign busy = (ds != D_IDLE);

  // ---------------------------------------------------------------- buffers
  logic              act_we;
  logic [ACT_AW-1:0] act_waddr;
  logic [ACT_W-1:0]  act_wdata;
  logic [ACT_W/8-1:0] act_wbe;
  logic [7:0]        byte_d;
  logic [15:0]       byte_a;

  always_comb begin
    sfu_act_ready = !(dma_we && dma_buf == BUF_ACT) && !ring_we;
    byte_a = ring_we ? ring_eaddr : sfu_act_eaddr;
    byte_d = ring_we ? ring_wdata : sfu_act_wdata;
    act_we    = 1'b0;
    act_waddr = ACT_AW'(byte_a >> ACT_EW);
    act_wdata = '0;
    act_wbe   = '0;
    if (dma_we && dma_buf == BUF_ACT) begin
      act_we = 1'b1; act_waddr = ACT_AW'(word); act_wdata = asm_next[ACT_W-1:0]; act_wbe = '1;
    end else if (ring_we || sfu_act_we) begin
      act_we = 1'b1;
      act_wdata = {(ACT_W/8){byte_d}};
      act_wbe[ACT_EW'(byte_a)] = 1'b1;
    end
  end

  wire st_rd = (ds == D_RD);
  onchip_buffer #(.W(ACT_W), .DEPTH(ACT_DEPTH)) u_act (
    .clk, .we(act_we), .waddr(act_waddr), .wdata(act_wdata), .wbe(act_wbe),
    .re   (mpe_act_re || (st_rd && dma_buf == BUF_ACT)),
    .raddr(st_rd ? ACT_AW'(di.a_addr + word) : mpe_act_raddr),
    .rdata(act_q));
  assign act_rdata = act_q;

  onchip_buffer #(.W(WGT_W), .DEPTH(WGT_DEPTH)) u_wgt (
    .clk, .we(dma_we && dma_buf == BUF_WGT), .waddr(WGT_AW'(di.a_addr + word)),
    .wdata(asm_next[WGT_W-1:0]), .wbe('1),
    .re(mpe_wgt_re), .raddr(mpe_wgt_raddr), .rdata(wgt_rdata));

  onchip_buffer #(.W(IDX_W), .DEPTH(WGT_DEPTH)) u_idx (
    .clk, .we(dma_we && dma_buf == BUF_IDX), .waddr(WGT_AW'(di.a_addr + word)),
    .wdata(asm_next[IDX_W-1:0]), .wbe('1),
    .re(mpe_wgt_re), .raddr(mpe_wgt_raddr), .rdata(idx_rdata));

  logic [GLB_EW-1:0] sfu_sel_q;
  wire glb_dma_we = dma_we && dma_buf == BUF_GLB;
  onchip_buffer #(.W(GLB_W), .DEPTH(GLB_DEPTH)) u_glb (
    .clk,
    .we   (mpe_glb_we || glb_dma_we),
    .waddr(glb_dma_we ? GLB_AW'(di.a_addr + word) : mpe_glb_waddr),
    .wdata(glb_dma_we ? asm_next[GLB_W-1:0] : mpe_glb_wdata),
    .wbe  ('1),
    .re   (sfu_glb_re || (st_rd && dma_buf == BUF_GLB)),
    .raddr(st_rd ? GLB_AW'(di.a_addr + word) : GLB_AW'(sfu_glb_eaddr >> GLB_EW)),
    .rdata(glb_q));

  always_ff @(posedge clk) if (sfu_glb_re) sfu_sel_q <= GLB_EW'(sfu_glb_eaddr);
  assign sfu_glb_rdata = glb_q[int'(sfu_sel_q) * 16 +: 16];

  // the MPE and the DMA never write the global buffer in the same cycle
  assert property (@(posedge clk) disable iff (!rst_n) !(mpe_glb_we && glb_dma_we));
endmodule
