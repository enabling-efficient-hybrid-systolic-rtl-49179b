// Shared types and constants of the hybrid systolic / shared-L1 cluster.
//
// The cluster has 256 cores and 1024 word-interleaved L1 scratchpad banks
// (1 MiB, i.e. 256 rows of 32-bit words per bank), as in the MemPool
// configuration the design is built on. Every memory transaction travels as
// a mem_req_t and is answered by exactly one mem_rsp_t that carries back the
// same meta field (issuing core, source inside the core, tag), so responses
// may return out of order (a q.pop to an empty queue is answered late).
//
// Address map (byte addresses, a design choice; the paper does not give one):
//   [1:0]   byte in word
//   [11:2]  global bank index (tile = upper 6 bits, bank in tile = lower 4)
//   [19:12] row in bank
//   0x4000_0000 + 16*q + {0,4,8,12}: private QLR CSRs of the issuing core
//   (queue address, forward queue address, mode, reuse).
package mempool_pkg;

  localparam int unsigned DataWidth   = 32;
  localparam int unsigned AddrWidth   = 32;
  localparam int unsigned CoreIdWidth = 8;   // 256 cores
  localparam int unsigned TagWidth    = 8;
  localparam int unsigned SrcWidth    = 3;   // 0: core LSU, 1..4: QLR 0..3
  localparam int unsigned NumQlr      = 4;   // QLRs per core (paper: four)
  localparam int unsigned QueueDepth  = 4;   // entries per queue (paper: four 32-bit entries)

  typedef logic [DataWidth-1:0]   data_t;
  typedef logic [AddrWidth-1:0]   addr_t;
  typedef logic [CoreIdWidth-1:0] core_id_t;
  typedef logic [TagWidth-1:0]    tag_t;
  typedef logic [4:0]             reg_idx_t;

  // Memory operations understood by the bank controllers.
  typedef enum logic [3:0] {
    OP_LOAD     = 4'd0,
    OP_STORE    = 4'd1,
    OP_AMO_SWAP = 4'd2,
    OP_AMO_ADD  = 4'd3,
    OP_AMO_XOR  = 4'd4,
    OP_AMO_AND  = 4'd5,
    OP_AMO_OR   = 4'd6,
    OP_AMO_MIN  = 4'd7,
    OP_AMO_MAX  = 4'd8,
    OP_AMO_MINU = 4'd9,
    OP_AMO_MAXU = 4'd10,
    OP_QPUSH    = 4'd11,
    OP_QPOP     = 4'd12
  } mem_op_e;

  typedef struct packed {
    core_id_t             core;
    logic [SrcWidth-1:0]  src;
    tag_t                 tag;
  } mem_meta_t;

  typedef struct packed {
    addr_t     addr;
    data_t     wdata;
    logic [3:0] be;
    mem_op_e   op;
    mem_meta_t meta;
  } mem_req_t;

  typedef struct packed {
    data_t     rdata;
    mem_meta_t meta;
  } mem_rsp_t;

  // QLR operating modes (Sec. "Queue-linked Registers").
  typedef enum logic [1:0] {
    QLR_OFF   = 2'd0,
    QLR_IN    = 2'd1,
    QLR_OUT   = 2'd2,
    QLR_INOUT = 2'd3
  } qlr_mode_e;

  localparam addr_t QlrCsrBase = 32'h4000_0000;

  // Registers tied to the four QLRs: t0, t1, t2, t3 = x5, x6, x7, x28.
  localparam reg_idx_t QlrReg [NumQlr] = '{5'd5, 5'd6, 5'd7, 5'd28};

  // Signals the core drives towards its QLR unit.
  typedef struct packed {
    // LSU request
    logic      req_valid;
    mem_op_e   req_op;
    addr_t     req_addr;
    data_t     req_wdata;
    logic [3:0] req_be;
    tag_t      req_tag;
    // Instruction at the issue stage (operand fields are decoder outputs)
    logic      instr_valid;
    reg_idx_t  rs1;
    logic      rs1_used;
    reg_idx_t  rs2;
    logic      rs2_used;
    reg_idx_t  rd;
    logic      rd_used;
    logic      issue;      // the instruction issues this cycle
    // Write-back from the ALU / LSU towards the register file
    logic      wb_valid;
    reg_idx_t  wb_rd;
    data_t     wb_data;
  } core_out_t;

  // Signals the QLR unit drives towards its core.
  typedef struct packed {
    logic      req_ready;
    logic      rsp_valid;  // the core always accepts a response
    data_t     rsp_rdata;
    tag_t      rsp_tag;
    logic      qlr_stall;  // scoreboard override: hold the issuing instruction
    logic      rf_we;      // register-file write port after the write-back mux
    reg_idx_t  rf_waddr;
    data_t     rf_wdata;
  } core_in_t;

  function automatic logic is_amo(mem_op_e op);
    return op inside {OP_AMO_SWAP, OP_AMO_ADD, OP_AMO_XOR, OP_AMO_AND, OP_AMO_OR,
                      OP_AMO_MIN, OP_AMO_MAX, OP_AMO_MINU, OP_AMO_MAXU};
  endfunction

endpackage
