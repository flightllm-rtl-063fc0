// sfu: special function unit, executes MISC instructions (Eltwise add/multiply, SiLU,
// Softmax, LayerNorm) one element per step.
//
// Organisation (after the unit's block diagram): an instruction control part with a
// param loader that fills the lookup tables from DDR (MISC LDLUT), a micro-op controller
// that splits a MISC instruction into per-element micro-ops, and a MISC ALU made of an
// element-wise stage and a reduction unit whose parameter registers hold the statistics of
// a two-phase operation. Two-phase operations (Softmax, LayerNorm) read the whole source
// vector once to form their parameters and a second time to produce outputs.
//   source : 16-bit Q8.8 elements of the global buffer at src1 + i*stride (src2 + i*stride
//            for the second Eltwise operand), i = 0 .. len-1
//   result : y >>> inst.scale[4:0], saturated to INT8, written to activation-buffer
//            element o_addr + i, i.e. straight back into the next layer's input
//            (always-on-chip decode); with inst.bcast the same byte is also handed to the
//            remote SFU ring for the other cores, and core c writes at o_addr + c*len + i,
//            so the slices that the cores produce line up as one vector in every core.
//   ADD y = a + b   MUL y = (a*b) >>> 8   SILU y = LUT_S[clamp((x>>>5)+128)] (x for x>=16,
//   0 for x<-16)   SOFTMAX y = (E(M-x) * (2^24 / S)) >>> 16 with E(d) = LUT_E[min(255,d>>3)],
//   M the running maximum and S the online sum of E   LNORM y = ((x-mean) * LUT_R[min(255,
//   var>>12)]) >>> 8 with var in Q16.16.
// Lookup tables: 768 x 16 bits, E (exp(-d/32) in Q0.16), S (SiLU in Q8.8) and R (1/sqrt in
// Q8.8) in that order, 32 entries per 512-bit DDR beat, 24 beats from inst.ext_addr.
// Timing: Eltwise 3 cycles per element, one-operand ops 2 per element per phase.
// The design computes Softmax and LayerNorm in fp16 and keeps its lookup tables in DDR;
// this implementation uses Q8.8 fixed point with the same DDR-loaded tables, and leaves out
// the LayerNorm scale and bias. Sub-vector streaming to overlap with MV is left to the
// instruction scheduler (MISC may run while the MPE works).
module sfu
  import flightllm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [1:0]  core_id,
  input  logic        start,
  input  inst_t       inst,
  output logic        busy,
  // global buffer element read (one-cycle latency)
  output logic        glb_re,
  output logic [15:0] glb_eaddr,
  input  logic [15:0] glb_rdata,
  // activation buffer byte write
  output logic        act_we,
  output logic [15:0] act_eaddr,
  output logic [7:0]  act_wdata,
  input  logic        act_ready,
  // remote SFU access (inject)
  output logic        ring_tx_valid,
  output logic [15:0] ring_tx_addr,
  output logic [7:0]  ring_tx_data,
  input  logic        ring_tx_ready,
  // DDR for the param loader
  output mem_req_t    ddr_req,
  input  logic        ddr_ready,
  input  mem_rsp_t    ddr_rsp
);
  typedef enum logic [3:0] {S_IDLE, S_LREQ, S_LWAIT, S_RA, S_RB, S_RED, S_PARAM, S_EX, S_WR} state_e;
  state_e st;
  inst_t  ins;
  logic   phase;                 // 0 = reduction pass, 1 = output pass
  logic [15:0] i;
  logic [4:0]  beat;
  logic signed [15:0] a_q, b_q;

  logic [15:0] lut [768];

  // reduction unit parameter registers
  logic signed [15:0] r_max;
  logic        [31:0] r_sum_e;
  logic signed [31:0] r_sum;
  logic signed [47:0] r_sumsq;
  logic        [31:0] r_recip;
  logic signed [15:0] r_mean;
  logic signed [15:0] r_rstd;

  wire two_src   = (ins.sub == MISC_ADD) || (ins.sub == MISC_MUL);
  wire last_i    = (i == ins.len - 16'd1);

  function automatic logic [15:0] exp_lut(input logic [16:0] d);
    logic [16:0] k;
    k = d >> 3;
    return lut[(k > 17'd255) ? 255 : int'(k)];
  endfunction

  // element-wise stage (combinational on the captured operands)
  logic signed [31:0] y_full;
  always_comb begin
    logic signed [31:0] xs, prod;
    logic [16:0] d;
    y_full = '0;
    xs = 32'(a_q);
    d  = 17'(32'(r_max) - xs);
    prod = '0;
    case (ins.sub)
      MISC_ADD: y_full = xs + 32'(b_q);
      MISC_MUL: y_full = (xs * 32'(b_q)) >>> 8;
      MISC_SILU: begin
        if (a_q >= 16'sd4096)       y_full = xs;
        else if (a_q < -16'sd4096)  y_full = 0;
        else                        y_full = 32'(signed'(lut[256 + ((xs >>> 5) + 128)]));
      end
      MISC_SOFTMAX: begin
        prod   = signed'({16'd0, exp_lut(d)}) * signed'(r_recip);
        y_full = prod >>> 16;
      end
      MISC_LNORM: y_full = ((xs - 32'(r_mean)) * 32'(r_rstd)) >>> 8;
      default: y_full = xs;
    endcase
  end

  // reduction-pass statistics and parameters
  logic signed [31:0] mean_w;
  logic signed [47:0] var_w;
  logic        [47:0] var_idx;
  always_comb begin
    mean_w  = r_sum / signed'({16'd0, ins.len});
    var_w   = r_sumsq / signed'({32'd0, ins.len}) - 48'(mean_w) * 48'(mean_w);
    if (var_w < 0) var_w = '0;
    var_idx = 48'(var_w) >> 12;
  end

  wire out_ok = act_ready && (!ins.bcast || ring_tx_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ins <= '0; phase <= 1'b0; i <= '0; beat <= '0;
      a_q <= '0; b_q <= '0;
      r_max <= '0; r_sum_e <= '0; r_sum <= '0; r_sumsq <= '0;
      r_recip <= '0; r_mean <= '0; r_rstd <= '0;
      for (int k = 0; k < 768; k++) lut[k] <= '0;
    end else begin
      case (st)
        S_IDLE: if (start) begin
          ins <= inst; i <= '0; beat <= '0;
          phase <= !(inst.sub == MISC_SOFTMAX || inst.sub == MISC_LNORM);
          r_sum_e <= '0; r_sum <= '0; r_sumsq <= '0;
          st <= (inst.sub == MISC_LDLUT) ? S_LREQ : S_RA;
        end
        // ---------------- param loader
        S_LREQ: if (ddr_ready) st <= S_LWAIT;
        S_LWAIT: if (ddr_rsp.rvalid) begin
          for (int k = 0; k < 32; k++) lut[int'(beat) * 32 + k] <= ddr_rsp.rdata[k*16 +: 16];
          if (beat == 5'd23) st <= S_IDLE;
          else begin beat <= beat + 5'd1; st <= S_LREQ; end
        end
        // ---------------- micro-ops
        S_RA: st <= (two_src && phase) ? S_RB : (phase ? S_EX : S_RED);
        S_RB: begin a_q <= glb_rdata; st <= S_EX; end
        S_RED: begin                               // reduction unit
          logic signed [15:0] x;
          x = glb_rdata;
          r_sum   <= r_sum + 32'(x);
          r_sumsq <= r_sumsq + 48'(32'(x) * 32'(x));
          if (i == 16'd0) begin
            r_max <= x; r_sum_e <= 32'd65535;
          end else if (x > r_max) begin
            r_sum_e <= 32'((64'(r_sum_e) * 64'(exp_lut(17'(32'(x) - 32'(r_max))))) >> 16) + 32'd65535;
            r_max   <= x;
          end else begin
            r_sum_e <= r_sum_e + 32'(exp_lut(17'(32'(r_max) - 32'(x))));
          end
          if (last_i) begin i <= '0; st <= S_PARAM; end
          else begin i <= i + 16'd1; st <= S_RA; end
        end
        S_PARAM: begin
          r_recip <= (r_sum_e == 0) ? 32'd0 : 32'(64'd16777216 / 64'(r_sum_e));
          r_mean  <= 16'(mean_w);
          r_rstd  <= signed'(lut[512 + ((var_idx > 48'd255) ? 255 : int'(var_idx))]);
          phase   <= 1'b1;
          st      <= S_RA;
        end
        S_EX: begin
          if (two_src) b_q <= glb_rdata; else a_q <= glb_rdata;
          st <= S_WR;
        end
        S_WR: if (out_ok) begin
          if (last_i) st <= S_IDLE;
          else begin i <= i + 16'd1; st <= S_RA; end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // read addresses: operand a in S_RA, operand b in S_RB
  always_comb begin
    glb_re    = (st == S_RA) || (st == S_RB);
    glb_eaddr = ((st == S_RB) ? ins.w_addr : ins.a_addr) + i * ins.cnt;
  end

  logic [7:0] out_byte;
  always_comb out_byte = sat8(y_full >>> ins.scale[4:0]);
  assign act_we        = (st == S_WR) && out_ok;
  assign act_eaddr     = ins.o_addr + (ins.bcast ? 16'(core_id) * ins.len : 16'd0) + i;
  assign act_wdata     = out_byte;
  assign ring_tx_valid = (st == S_WR) && ins.bcast && act_ready;
  assign ring_tx_addr  = act_eaddr;
  assign ring_tx_data  = out_byte;
  assign busy          = (st != S_IDLE);

  always_comb begin
    ddr_req       = '0;
    ddr_req.valid = (st == S_LREQ);
    ddr_req.addr  = ins.ext_addr + 32'(beat) * 32'd64;
  end
endmodule
