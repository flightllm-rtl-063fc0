// flightllm_pkg: types and constants shared by the accelerator.
//
// The instruction set follows the six instructions of the design (LD, ST, MM, MV, MISC,
// SYS). The field layout of inst_t, the memory request/response structs and the
// fixed-point formats are this implementation's own choices: the encodings are not
// published. Activations and weights entering the matrix engine are INT8; matrix results
// and special-function data are 16-bit signed fixed point with 8 fraction bits (Q8.8).
package flightllm_pkg;

  typedef enum logic [2:0] {
    OP_LD   = 3'd0,   // off-chip -> on-chip buffer
    OP_ST   = 3'd1,   // on-chip buffer -> off-chip
    OP_MM   = 3'd2,   // matrix-matrix multiplication
    OP_MV   = 3'd3,   // matrix-vector multiplication
    OP_MISC = 3'd4,   // LayerNorm, SiLU, Softmax, Eltwise
    OP_SYS  = 3'd5    // synchronisation (barrier / end of task)
  } opcode_e;

  // LD/ST buffer selector (inst_t.sub)
  typedef enum logic [2:0] {
    BUF_ACT = 3'd0,
    BUF_WGT = 3'd1,   // LD only: goes through the dequantization unit
    BUF_IDX = 3'd2,
    BUF_GLB = 3'd3
  } buf_e;

  // MISC operation selector (inst_t.sub)
  typedef enum logic [2:0] {
    MISC_ADD     = 3'd0,
    MISC_MUL     = 3'd1,
    MISC_SILU    = 3'd2,
    MISC_SOFTMAX = 3'd3,
    MISC_LNORM   = 3'd4,
    MISC_LDLUT   = 3'd5   // param loader: fill the SFU lookup tables from DDR
  } misc_e;

  // SYS selector (inst_t.sub)
  localparam logic [2:0] SYS_BARRIER = 3'd0;
  localparam logic [2:0] SYS_END     = 3'd1;

  // wait_mask bits: issue only when the named unit is idle
  localparam int W_MMU = 0;
  localparam int W_MPE = 1;
  localparam int W_SFU = 2;

  typedef struct packed {
    opcode_e     op;
    logic [2:0]  sub;       // buf_e for LD/ST, misc_e for MISC, SYS_* for SYS
    logic        mem;       // LD/ST/LDLUT: 0 = HBM, 1 = DDR
    logic [2:0]  wait_mask;
    logic [4:0]  nm_n;      // MM/MV: N of the N:16 pattern (16 = dense)
    logic [3:0]  qbits;     // LD weight: stored bit width (2, 3, 4 or 8)
    logic [7:0]  scale;     // LD weight: dequant scale; MISC: output shift
    logic [4:0]  shift;     // MM/MV: requantisation shift of accumulators
    logic        bcast;     // MISC: also send results to the other cores' SFUs
    logic [31:0] ext_addr;  // off-chip byte address (before the core base is added)
    logic [15:0] a_addr;    // LD/ST: buffer word; MM/MV: activation word; MISC: src1 element
    logic [15:0] w_addr;    // MM/MV: weight/index word; MISC: src2 element
    logic [15:0] o_addr;    // MM/MV: global-buffer word; MISC: destination act element
    logic [15:0] len;       // LD/ST: buffer words; MM/MV: K tiles; MISC: elements
    logic [15:0] cnt;       // MM/MV: N tiles; MISC: source stride in elements
  } inst_t;

  localparam int INST_W = $bits(inst_t);

  // Generic off-chip memory port (one HBM pseudo-channel or the DDR port).
  localparam int MEM_DW = 512;     // 64 bytes per beat, 14.4 GB/s at 225 MHz
  localparam int MEM_AW = 32;

  typedef struct packed {
    logic              valid;
    logic              we;
    logic [MEM_AW-1:0] addr;   // byte address, beat aligned
    logic [MEM_DW-1:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic              rvalid;
    logic [MEM_DW-1:0] rdata;
  } mem_rsp_t;

  // One element travelling on the remote SFU ring.
  typedef struct packed {
    logic        valid;
    logic [1:0]  src;      // core that produced it
    logic [15:0] addr;     // activation-buffer element address
    logic [7:0]  data;     // INT8 activation
  } ring_pkt_t;

  function automatic logic signed [15:0] sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return v[15:0];
  endfunction

  function automatic logic signed [7:0] sat8(input logic signed [31:0] v);
    if (v > 32'sd127)       return 8'sh7f;
    else if (v < -32'sd128) return 8'sh80;
    else                    return v[7:0];
  endfunction

endpackage
