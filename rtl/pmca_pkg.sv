// pmca_pkg: types and constants shared by the blocks of the PMCA (programmable
// multi-core accelerator) cluster.
//
// Memory ports use a request/grant/response protocol (TCDM style): a master holds
// `valid` with `addr`, `we`, `be`, `wdata` until it sees `gnt` in the same cycle;
// a granted read returns `rdata` with `rvalid` exactly one cycle later; a granted
// write returns nothing. All addresses are byte addresses, data words are 32 bit,
// the width the cluster uses when it is configured for FP32 data.
//
// The FP offload bundle carries one 32-bit RISC-V instruction plus the integer
// operand the issuing core read for it (used by fmv.w.x and by frep).
package pmca_pkg;

  localparam int unsigned DataWidth = 32;
  localparam int unsigned AddrWidth = 32;

  typedef logic [AddrWidth-1:0]   addr_t;
  typedef logic [DataWidth-1:0]   data_t;
  typedef logic [DataWidth/8-1:0] strb_t;

  typedef struct packed {
    logic  valid;
    logic  we;
    strb_t be;
    addr_t addr;
    data_t wdata;
  } tcdm_req_t;

  typedef struct packed {
    logic  gnt;
    logic  rvalid;
    data_t rdata;
  } tcdm_rsp_t;

  // One offloaded FP instruction.
  typedef struct packed {
    logic [31:0] instr;
    logic [31:0] opa;
  } fp_inst_t;

  // FPU operations.
  typedef enum logic [3:0] {
    FPU_ADD   = 4'd0,
    FPU_SUB   = 4'd1,
    FPU_MUL   = 4'd2,
    FPU_MADD  = 4'd3,  //  a*b + c
    FPU_MSUB  = 4'd4,  //  a*b - c
    FPU_NMSUB = 4'd5,  // -a*b + c
    FPU_NMADD = 4'd6,  // -a*b - c
    FPU_MIN   = 4'd7,
    FPU_MAX   = 4'd8,
    FPU_SGNJ  = 4'd9,
    FPU_SGNJN = 4'd10,
    FPU_SGNJX = 4'd11
  } fpu_op_e;

  // RISC-V opcodes decoded by the FP subsystem.
  localparam logic [6:0] OpcOpFp   = 7'b1010011;
  localparam logic [6:0] OpcMadd   = 7'b1000011;
  localparam logic [6:0] OpcMsub   = 7'b1000111;
  localparam logic [6:0] OpcNmsub  = 7'b1001011;
  localparam logic [6:0] OpcNmadd  = 7'b1001111;
  // FREP is carried on the custom-0 opcode (this design's encoding):
  // instr[31:20] = number of instructions in the loop body minus one,
  // instr[7] = 1 for inner (each instruction repeated) else outer (body repeated),
  // opa = number of repetitions minus one.
  localparam logic [6:0] OpcFrep   = 7'b0001011;

  // SSR configuration register map (word index on the configuration port).
  localparam logic [4:0] SsrRegBound0  = 5'd0;   // 0..3: iterations-1 per dimension
  localparam logic [4:0] SsrRegStride0 = 5'd4;   // 4..7: byte stride per dimension
  localparam logic [4:0] SsrRegIdxCfg  = 5'd8;   // [1:0] log2 index bytes, [6:4] data shift, [8] indirect
  localparam logic [4:0] SsrRegIdxBase = 5'd9;   // byte address of the index array
  localparam logic [4:0] SsrRegRptr0   = 5'd16;  // 16..19: start read stream of 1..4 dims
  localparam logic [4:0] SsrRegWptr0   = 5'd24;  // 24..27: start write stream of 1..4 dims

  // FP register that each SSR lane is mapped to when streaming is enabled.
  localparam int unsigned NumSsr = 3;

endpackage
