// task_scheduler: the host-facing controller that starts the cores and keeps them in step.
//
// The host writes a register file: a length table of T_ENTRIES entries {max_len,
// inst_base, inst_count} and one base address per core, then writes the token length of
// the next inference together with the start bit. The scheduler picks the first valid
// entry whose max_len is at least the token length, so every length in a range runs the
// same instruction file (length adaptive compilation: e.g. prompts of 1..16 tokens use the
// file compiled for 16), and starts all cores on it with their own base addresses. A SYS
// barrier is released (sys_go to every core) once all cores have reached it. When every
// core has finished, `irq` tells the host; `miss` is raised instead of starting when no
// entry covers the length.
// Register map (word address): 0 = control {start, token_len[15:0]}; 1 = status
// {miss, busy} (read); 2+c = core_base[c]; 16+3e/17+3e/18+3e = max_len / inst_base /
// {valid, inst_count} of entry e.
// Timing: lookup and start one cycle after the start write; barrier release one cycle
// after the last core arrives. Grouping lengths by thresholds, per-core base registers and
// SLR synchronisation follow the design; the register map and the table search are this
// implementation's choices.
module task_scheduler #(
  parameter int N_CORES   = 3,
  parameter int T_ENTRIES = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // host register port
  input  logic        reg_we,
  input  logic [7:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        irq,
  // cores
  output logic        core_start [N_CORES],
  output logic [31:0] inst_base,
  output logic [15:0] inst_count,
  output logic [31:0] core_base  [N_CORES],
  input  logic        core_done  [N_CORES],
  input  logic        sys_req    [N_CORES],
  output logic        sys_go
);
  logic [15:0] max_len [T_ENTRIES];
  logic [31:0] ibase   [T_ENTRIES];
  logic [15:0] icount  [T_ENTRIES];
  logic        evalid  [T_ENTRIES];
  logic [15:0] tlen;
  logic        go_req, busy, miss;
  logic [N_CORES-1:0] finished;

  // table search: first valid entry covering the length
  logic        hit;
  logic [31:0] hit_base;
  logic [15:0] hit_count;
  always_comb begin
    hit = 1'b0; hit_base = '0; hit_count = '0;
    for (int e = 0; e < T_ENTRIES; e++)
      if (!hit && evalid[e] && max_len[e] >= tlen) begin
        hit = 1'b1; hit_base = ibase[e]; hit_count = icount[e];
      end
  end

  logic all_sys;
  always_comb begin
    all_sys = 1'b1;
    for (int c = 0; c < N_CORES; c++) all_sys &= sys_req[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < T_ENTRIES; e++) begin
        max_len[e] <= '0; ibase[e] <= '0; icount[e] <= '0; evalid[e] <= 1'b0;
      end
      for (int c = 0; c < N_CORES; c++) begin core_base[c] <= '0; core_start[c] <= 1'b0; end
      tlen <= '0; go_req <= 1'b0; busy <= 1'b0; miss <= 1'b0; finished <= '0;
      inst_base <= '0; inst_count <= '0; irq <= 1'b0; sys_go <= 1'b0;
    end else begin
      irq    <= 1'b0;
      sys_go <= 1'b0;
      for (int c = 0; c < N_CORES; c++) core_start[c] <= 1'b0;
      if (reg_we) begin
        if (reg_addr == 8'd0) begin
          tlen <= reg_wdata[15:0];
          go_req <= reg_wdata[31] && !busy;
        end
        for (int c = 0; c < N_CORES; c++)
          if (reg_addr == 8'(2 + c)) core_base[c] <= reg_wdata;
        for (int e = 0; e < T_ENTRIES; e++) begin
          if (reg_addr == 8'(16 + 3*e)) max_len[e] <= reg_wdata[15:0];
          if (reg_addr == 8'(17 + 3*e)) ibase[e]   <= reg_wdata;
          if (reg_addr == 8'(18 + 3*e)) begin
            icount[e] <= reg_wdata[15:0];
            evalid[e] <= reg_wdata[31];
          end
        end
      end
      if (go_req) begin
        go_req <= 1'b0;
        if (hit) begin
          miss <= 1'b0; busy <= 1'b1; finished <= '0;
          inst_base <= hit_base; inst_count <= hit_count;
          for (int c = 0; c < N_CORES; c++) core_start[c] <= 1'b1;
        end else begin
          miss <= 1'b1; irq <= 1'b1;
        end
      end
      if (busy) begin
        if (all_sys && !sys_go) sys_go <= 1'b1;
        for (int c = 0; c < N_CORES; c++) if (core_done[c]) finished[c] <= 1'b1;
        if (finished == '1) begin busy <= 1'b0; irq <= 1'b1; end
      end
    end
  end

  assign reg_rdata = (reg_addr == 8'd1) ? {30'd0, miss, busy} : {16'd0, tlen};
endmodule
