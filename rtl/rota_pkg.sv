// rota_pkg -- types and constants shared by the real-time I/O co-processor.
//
// Instruction word (32 bits), field positions as in the published format:
//   [1:0]   opcode        [6:2]  SID (ETS id, 5 bits)
//   [11:7]  TID (5 bits)  [31:12] service field (20 bits)
// The opcode values, the layout of the service field and the c-type sub-ops
// are this design's choices; the paper fixes only the field boundaries.
//   opcode 00 c-type : service[19:18] = 00 c.set  budget      (service[17:0])
//                                       01 c.enr  start time  (service[17:0])
//                                       10 c.pri  ETS priority (service[PRIO_W-1:0])
//                                       11 c.hyp  hyper-period length in ticks
//   opcode 01 p.ld   : service[19:15] = P-Len, followed by P-Len payload words
//   opcode 10 i.ld   : P-Len as p.ld, service[14:7] = Prio-T, then the payload
//   opcode 11 i.run  : service[14:7] = Prio-T of the pre-loaded task TID
// I/O pool address = {TID (7 bits), release order (5 bits)}; the 5-bit
// instruction TID is zero-extended into the 7-bit pool field.
package rota_pkg;

  localparam int unsigned WORD_W    = 32;
  localparam int unsigned SID_W     = 5;
  localparam int unsigned TID_W     = 5;   // TID carried by an instruction
  localparam int unsigned POOL_TID_W = 7;  // TID field of a pool address
  localparam int unsigned OFF_W     = 5;   // release order within a task
  localparam int unsigned ADDR_W    = POOL_TID_W + OFF_W;  // 12
  localparam int unsigned PLEN_W    = 5;
  localparam int unsigned PRIO_W    = 8;
  localparam int unsigned TIME_W    = 18;

  typedef enum logic [1:0] {
    OP_CTYPE = 2'b00,
    OP_PLD   = 2'b01,
    OP_ILD   = 2'b10,
    OP_IRUN  = 2'b11
  } opcode_e;

  typedef enum logic [1:0] {
    C_SET = 2'b00,   // B-Timer reset value (budget)
    C_ENR = 2'b01,   // S-Timer reset value (start time)
    C_PRI = 2'b10,   // Prio-S in the parameter register
    C_HYP = 2'b11    // hyper-period length of the time base
  } csub_e;

  typedef struct packed {
    logic [19:0]      service;
    logic [TID_W-1:0] tid;
    logic [SID_W-1:0] sid;
    opcode_e          opcode;
  } instr_t;

  // c-type configuration, one cycle wide
  typedef struct packed {
    logic              valid;
    csub_e             sub;
    logic [SID_W-1:0]  sid;
    logic [TIME_W-1:0] value;
  } cfg_t;

  typedef enum logic [1:0] {
    TP_PLD  = 2'b01,   // create entry, not ready
    TP_ILD  = 2'b10,   // create entry, ready with prio
    TP_IRUN = 2'b11    // set prio of an existing entry
  } tpkind_e;

  // task parameters (T-Para) broadcast to the L-SEs, one cycle wide
  typedef struct packed {
    logic              valid;
    tpkind_e           kind;
    logic [SID_W-1:0]  sid;
    logic [TID_W-1:0]  tid;
    logic [PLEN_W-1:0] plen;
    logic [PRIO_W-1:0] prio;
  } tpara_t;

  // payload word on its way to the SRAM
  typedef struct packed {
    logic              valid;
    logic [TID_W-1:0]  tid;
    logic [OFF_W-1:0]  off;
    logic [WORD_W-1:0] data;
  } store_t;

  // a scheduled job handed from the scheduling engine to the I/O pool
  typedef struct packed {
    logic              valid;
    logic [SID_W-1:0]  sid;
    logic [TID_W-1:0]  tid;
    logic [PLEN_W-1:0] plen;
  } job_t;

  // filtered request of one server container
  typedef struct packed {
    logic              valid;
    logic [SID_W-1:0]  sid;
    logic [PRIO_W-1:0] prio;
  } sreq_t;

  function automatic logic [ADDR_W-1:0] pool_addr(logic [TID_W-1:0] tid, logic [OFF_W-1:0] off);
    return {{(POOL_TID_W-TID_W){1'b0}}, tid, off};
  endfunction

endpackage
