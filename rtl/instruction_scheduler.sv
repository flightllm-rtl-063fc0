// instruction_scheduler: fetches a core's instruction stream from DDR, decodes it and
// issues every instruction to the unit that executes it.
//
// LD/ST go to the MMU, MM/MV to the MPE, MISC to the SFU; SYS raises sys_req and waits for
// the task scheduler's sys_go (barrier between cores), or ends the task. Instructions are
// issued in order, one per fetch, but execution overlaps: an instruction only waits for
// its own unit to be free and for the units named in its wait_mask to be idle, so a MISC
// can run on the SFU while the MPE still works on an MV (the MISC/MM-MV fusion of the
// on-chip decode dataflow). The per-core base register is added to the HBM address of
// LD/ST, which lets the cores on different dies share one instruction file.
// One instruction occupies one 512-bit DDR beat (low INST_W bits) at inst_base + 64*pc.
// Timing: fetch latency is that of DDR; issue takes one cycle once its conditions hold.
// `overlap` pulses when an instruction is issued while another unit is still busy.
// The ISA and the role of the base register follow the design; the encoding, the fetch
// scheme and the wait_mask rule are this implementation's choices.
module instruction_scheduler
  import flightllm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] inst_base,
  input  logic [15:0] inst_count,
  input  logic [31:0] core_base,
  output logic        done,
  // instruction fetch
  output mem_req_t    ddr_req,
  input  logic        ddr_ready,
  input  mem_rsp_t    ddr_rsp,
  // units
  output logic        mmu_start,
  output logic        mpe_start,
  output logic        sfu_start,
  output inst_t       issue_inst,
  input  logic        mmu_busy,
  input  logic        mpe_busy,
  input  logic        sfu_busy,
  // barrier
  output logic        sys_req,
  input  logic        sys_go,
  output logic        overlap
);
  typedef enum logic [2:0] {I_IDLE, I_FETCH, I_WAIT, I_ISSUE, I_SYS, I_DRAIN} state_e;
  state_e st;
  logic [15:0] pc, count;
  logic [31:0] base, cbase;
  inst_t       cur;

  logic unit_busy, wait_ok, any_busy;
  always_comb begin
    case (cur.op)
      OP_LD, OP_ST: unit_busy = mmu_busy;
      OP_MM, OP_MV: unit_busy = mpe_busy;
      OP_MISC:      unit_busy = sfu_busy;
      default:      unit_busy = 1'b0;
    endcase
    wait_ok  = !(cur.wait_mask[W_MMU] && mmu_busy) &&
               !(cur.wait_mask[W_MPE] && mpe_busy) &&
               !(cur.wait_mask[W_SFU] && sfu_busy);
    any_busy = mmu_busy || mpe_busy || sfu_busy;
  end

  wire can_issue = (st == I_ISSUE) && cur.op != OP_SYS && !unit_busy && wait_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= I_IDLE; pc <= '0; count <= '0; base <= '0; cbase <= '0; cur <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        I_IDLE: if (start) begin
          pc <= '0; count <= inst_count; base <= inst_base; cbase <= core_base;
          st <= (inst_count == 16'd0) ? I_DRAIN : I_FETCH;
        end
        I_FETCH: if (ddr_ready) st <= I_WAIT;
        I_WAIT: if (ddr_rsp.rvalid) begin
          cur <= ddr_rsp.rdata[INST_W-1:0];
          st  <= I_ISSUE;
        end
        I_ISSUE: begin
          if (cur.op == OP_SYS) begin
            if (cur.sub == SYS_END) st <= I_DRAIN;
            else if (!any_busy)     st <= I_SYS;
          end else if (can_issue) begin
            pc <= pc + 16'd1;
            st <= (pc + 16'd1 == count) ? I_DRAIN : I_FETCH;
          end
        end
        I_SYS: if (sys_go) begin
          pc <= pc + 16'd1;
          st <= (pc + 16'd1 == count) ? I_DRAIN : I_FETCH;
        end
        I_DRAIN: if (!any_busy) begin done <= 1'b1; st <= I_IDLE; end
        default: st <= I_IDLE;
      endcase
    end
  end

  always_comb begin
    ddr_req       = '0;
    ddr_req.valid = (st == I_FETCH);
    ddr_req.addr  = base + 32'(pc) * 32'd64;
    issue_inst    = cur;
    if ((cur.op == OP_LD || cur.op == OP_ST) && !cur.mem)
      issue_inst.ext_addr = cur.ext_addr + cbase;
    mmu_start = can_issue && (cur.op == OP_LD || cur.op == OP_ST);
    mpe_start = can_issue && (cur.op == OP_MM || cur.op == OP_MV);
    sfu_start = can_issue && (cur.op == OP_MISC);
    sys_req   = (st == I_SYS);
    overlap   = can_issue && any_busy;
  end
endmodule
