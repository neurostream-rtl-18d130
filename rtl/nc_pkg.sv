// nc_pkg -- shared types and constants of the NeuroCluster.
//
// Holds the cluster memory map, the request/response bundle used by every
// 32-bit master and slave inside a cluster (PEs, NeuroStream ports, DMA ports,
// SPM banks, configuration registers), the simplified AXI-4 channel structs of
// the DMA / global interconnect path, and the NeuroStream command encoding.
//
// From the paper: the NeuroStream register addresses 0x1020_4800 (CMD),
// 0x1020_4804 (CFG), 0x1020_4808 (ACC) and 0x1020_480C (Status), the command
// names, the 256-bit data path of the SMC interconnect and the 32 outstanding
// DMA transactions. Everything else here (opcode values, the configuration
// register indices, the SPM and DMA base addresses, the AXI subset and the
// layout of the command word) is this design's own choice.
package nc_pkg;

  // ---------------- cluster memory map ----------------
  localparam logic [31:0] SPM_BASE       = 32'h1000_0000;  // word-interleaved SPM
  localparam logic [31:0] PERIPH_BASE    = 32'h1020_0000;  // cluster peripherals
  localparam logic [31:0] DMA_REG_BASE   = 32'h1020_0400;  // DMA registers (4 words)
  localparam logic [31:0] NST_REG_BASE   = 32'h1020_4800;  // NST0 registers
  localparam int unsigned NST_REG_STRIDE = 16;             // bytes between NSTs

  // NST register offsets (byte)
  localparam logic [3:0] NST_R_CMD = 4'h0;
  localparam logic [3:0] NST_R_CFG = 4'h4;
  localparam logic [3:0] NST_R_ACC = 4'h8;
  localparam logic [3:0] NST_R_STS = 4'hC;

  // DMA register offsets (byte)
  localparam logic [3:0] DMA_R_EXT = 4'h0;  // external (DRAM) byte address
  localparam logic [3:0] DMA_R_SPM = 4'h4;  // SPM byte address
  localparam logic [3:0] DMA_R_LEN = 4'h8;  // length in bytes
  localparam logic [3:0] DMA_R_CMD = 4'hC;  // write: start (bit0 = direction), read: status

  // ---------------- 32-bit memory bundle ----------------
  // A request is granted in the cycle where req and gnt are both high.
  // Read data returns with rvalid exactly one cycle after the grant.
  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;   // byte address
    logic [31:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } mem_rsp_t;

  // ---------------- simplified AXI-4 ----------------
  localparam int unsigned AXI_DW   = 256;            // 32 GB/s at 1 GHz
  localparam int unsigned AXI_SW   = AXI_DW / 8;
  localparam int unsigned AXI_IDW  = 9;              // 5 bits DMA tag + 4 bits cluster
  localparam int unsigned DMA_IDW  = 5;              // 32 outstanding transactions

  typedef struct packed {
    logic [AXI_IDW-1:0] id;
    logic [31:0]        addr;   // byte address, aligned to AXI_SW
    logic [7:0]         len;    // beats - 1
  } axi_ax_t;

  typedef struct packed {
    logic [AXI_DW-1:0] data;
    logic [AXI_SW-1:0] strb;
    logic              last;
  } axi_w_t;

  typedef struct packed {
    logic [AXI_IDW-1:0] id;
    logic [AXI_DW-1:0]  data;
    logic               last;
  } axi_r_t;

  typedef struct packed {
    logic               aw_valid;
    axi_ax_t            aw;
    logic               w_valid;
    axi_w_t             w;
    logic               b_ready;
    logic               ar_valid;
    axi_ax_t            ar;
    logic               r_ready;
  } axi_req_t;

  typedef struct packed {
    logic               aw_ready;
    logic               w_ready;
    logic               b_valid;
    logic [AXI_IDW-1:0] b_id;
    logic               ar_ready;
    logic               r_valid;
    axi_r_t             r;
  } axi_rsp_t;

  // ---------------- NeuroStream commands ----------------
  // A command is written as two register stores: CFG <= arg1, then
  // CMD <= {opcode, arg0}. The store to CMD pushes {opcode, arg0, CFG}
  // into the command FIFO.
  typedef enum logic [7:0] {
    MEM_LDC      = 8'h01,  // config register arg0 <= arg1
    MEM_LDA      = 8'h02,  // ACC <= SPM[arg1]
    MEM_STA      = 8'h03,  // SPM[arg1] <= ACC
    STREAM_MAC   = 8'h10,  // ACC += SPM[AGU0] * SPM[AGU1]
    STREAM_SUM   = 8'h11,  // ACC += SPM[AGU0]
    STREAM_MAX   = 8'h12,  // SPM[AGU1] <= max(SPM[AGU0], arg1)  (ReLU with arg1 = 0)
    STREAM_MIN   = 8'h13,  // SPM[AGU1] <= min(SPM[AGU0], arg1)
    STREAM_SCALE = 8'h14,  // SPM[AGU1] <= SPM[AGU0] * arg1
    STREAM_SHIFT = 8'h15,  // SPM[AGU1] <= SPM[AGU0] + arg1
    STREAM_MAXPL = 8'h16,  // ACC = max over SPM[AGU0]  (max pooling)
    SINGLE_ADD   = 8'h20,  // ACC <= ACC + arg1
    SINGLE_MUL   = 8'h21   // ACC <= ACC * arg1
  } nst_op_e;

  // arg0 flags of the reduction streams (MAC, SUM, MAXPL)
  localparam int unsigned ARG0_WB   = 0;  // write ACC to SPM word arg1 at the end
  localparam int unsigned ARG0_KEEP = 1;  // keep ACC instead of re-initialising it

  // configuration register indices (arg0 of MEM_LDC)
  typedef enum logic [3:0] {
    AGU0_A  = 4'd0, AGU0_S0 = 4'd1, AGU0_S1 = 4'd2, AGU0_S2 = 4'd3,
    AGU1_A  = 4'd4, AGU1_S0 = 4'd5, AGU1_S1 = 4'd6, AGU1_S2 = 4'd7,
    HWL_E0  = 4'd8, HWL_E1  = 4'd9, HWL_E2  = 4'd10
  } nst_cfg_e;

  typedef struct packed {
    logic [7:0]  op;
    logic [23:0] arg0;
    logic [31:0] arg1;
  } nst_cmd_t;

  // tokens understood by the streaming FPU
  typedef enum logic [3:0] {
    F_SETACC = 4'd0,  // ACC <= imm
    F_MAC    = 4'd1,  // ACC <= ACC + op1*op2
    F_ACCADD = 4'd2,  // ACC <= ACC + op1
    F_ACCMAX = 4'd3,  // ACC <= max(ACC, op1)
    F_MAX    = 4'd4,  // out <= max(op1, imm)
    F_MIN    = 4'd5,  // out <= min(op1, imm)
    F_MUL    = 4'd6,  // out <= op1 * imm
    F_ADD    = 4'd7,  // out <= op1 + imm
    F_SADD   = 4'd8,  // ACC <= ACC + imm
    F_SMUL   = 4'd9,  // ACC <= ACC * imm
    F_LDACC  = 4'd10, // ACC <= op1
    F_OUTACC = 4'd11  // out <= ACC
  } fpu_op_e;

  typedef struct packed {
    fpu_op_e     op;
    logic [31:0] imm;
  } fpu_tok_t;

  localparam logic [31:0] FP32_NEG_INF = 32'hFF80_0000;
  localparam logic [31:0] FP32_QNAN    = 32'h7FC0_0000;

endpackage
