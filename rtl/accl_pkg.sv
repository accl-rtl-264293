// accl_pkg: types and constants shared by every block of the collective
// offload engine (CCLO). The 64-byte data beat follows the paper's streaming
// interface (64 B per cycle); every other width and encoding here is a choice
// of this design and is named as such where it is declared.
package accl_pkg;

  // ---- sizes -------------------------------------------------------------
  localparam int DATA_W  = 512;          // 64 B per beat, as the paper's stream API
  localparam int BEAT_B  = DATA_W / 8;   // bytes per beat
  localparam int ADDR_W  = 64;           // virtual byte address (own choice)
  localparam int LEN_W   = 32;           // message length in bytes (own choice)
  localparam int RANK_W  = 8;            // rank id (own choice)
  localparam int TAG_W   = 16;           // message tag (own choice)
  localparam int SEQ_W   = 16;           // per-peer sequence number (own choice)
  localparam int SESS_W  = 16;           // session / queue-pair id (own choice)
  localparam int DEST_W  = 8;            // NoC dest field: [7:4] port, [3:0] sub-function

  // ---- on-chip data stream (AXI-Stream-like, valid/ready carried beside) --
  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic [DEST_W-1:0] dest;
    logic              last;
  } axis_t;

  // ---- NoC ports (dest[7:4]) -----------------------------------------------
  // outputs of the switch
  localparam logic [3:0] NOC_MEMW_RES   = 4'd0;  // result write to memory (channel 1)
  localparam logic [3:0] NOC_MEMW_RXBUF = 4'd1;  // eager rx-buffer write (channel 0)
  localparam logic [3:0] NOC_KRN_OUT    = 4'd2;  // stream to the application kernel
  localparam logic [3:0] NOC_TX         = 4'd3;  // payload to the Tx system
  localparam logic [3:0] NOC_RED_IN0    = 4'd4;  // reduction plugin operand 0
  localparam logic [3:0] NOC_RED_IN1    = 4'd5;  // reduction plugin operand 1
  localparam logic [3:0] NOC_CMP_IN     = 4'd6;  // unary (compression) plugin input
  localparam int NOC_NOUT = 7;
  // inputs of the switch
  localparam int NOC_I_MEMR0  = 0;
  localparam int NOC_I_MEMR1  = 1;
  localparam int NOC_I_KRN    = 2;
  localparam int NOC_I_RX     = 3;
  localparam int NOC_I_RED    = 4;
  localparam int NOC_I_CMP    = 5;
  localparam int NOC_NIN = 6;

  // ---- reduction functions (dest[3:0] of a plugin input) -------------------
  typedef enum logic [3:0] {
    RED_SUM_I32 = 4'd0,
    RED_MAX_I32 = 4'd1,
    RED_SUM_I64 = 4'd2,
    RED_MAX_I64 = 4'd3
  } red_func_e;

  // ---- message signature carried in the first beat of every message ------
  typedef enum logic [2:0] {
    MSG_EAGER     = 3'd1,   // EAGER_MSG
    MSG_RNDZ_INIT = 3'd2,   // RNDZ_INIT: receiver announces its result buffer
    MSG_RNDZ_MSG  = 3'd3,   // RNDZ_MSG: payload written by RDMA WRITE
    MSG_RNDZ_DONE = 3'd4    // RNDZ_DONE: sender reports the WRITE complete
  } msg_type_e;

  typedef struct packed {
    msg_type_e             mtype;
    logic [RANK_W-1:0]     src;
    logic [RANK_W-1:0]     dst;
    logic [LEN_W-1:0]      len;     // payload bytes (header not counted)
    logic [TAG_W-1:0]      tag;
    logic [SEQ_W-1:0]      seq;
    logic [ADDR_W-1:0]     vaddr;   // RNDZ_INIT: result buffer of the receiver
  } sig_t;
  localparam int SIG_W = $bits(sig_t);

  // ---- POE-independent network meta interfaces ----------------------------
  typedef enum logic [1:0] { NET_SEND = 2'd0, NET_WRITE = 2'd1 } net_op_e;

  typedef struct packed {
    net_op_e             op;
    logic [SESS_W-1:0]   session;
    logic [LEN_W-1:0]    len;      // bytes on the wire for this command
    logic [ADDR_W-1:0]   vaddr;    // WRITE only
  } net_tx_meta_t;

  typedef struct packed {
    logic [SESS_W-1:0]   session;
    logic [LEN_W-1:0]    len;      // bytes of this packet
  } net_rx_meta_t;

  // ---- memory commands (one per data-mover channel) ------------------------
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [LEN_W-1:0]  len;
  } mem_cmd_t;

  // ---- collective command (CPU or kernel -> controller) -------------------
  typedef enum logic [3:0] {
    CCL_NOP    = 4'd0,
    CCL_SEND   = 4'd1,
    CCL_RECV   = 4'd2,
    CCL_BCAST  = 4'd3,
    CCL_REDUCE = 4'd4
  } ccl_op_e;

  typedef struct packed {
    ccl_op_e            op;
    logic               rndz;        // 1: rendezvous protocol, 0: eager
    logic               src_stream;  // operand from the kernel stream, not memory
    logic               dst_stream;  // result to the kernel stream, not memory
    red_func_e          func;
    logic [RANK_W-1:0]  root;        // root of a collective / peer of send, recv
    logic [TAG_W-1:0]   tag;
    logic [LEN_W-1:0]   len;         // bytes, a multiple of 64
    logic [ADDR_W-1:0]  op0_addr;
    logic [ADDR_W-1:0]  res_addr;
  } ccl_cmd_t;

  typedef struct packed {
    logic        origin;   // 0: host (CPU Ctrl), 1: FPGA kernel
    logic [7:0]  retcode;  // 0: ok
  } ccl_sts_t;

  // ---- DMP microcode: two operand slots and one result slot ---------------
  typedef enum logic [1:0] { OPS_NONE = 2'd0, OPS_MEM = 2'd1, OPS_STREAM = 2'd2, OPS_RXBUF = 2'd3 } op_src_e;
  typedef enum logic [1:0] { RES_NONE = 2'd0, RES_MEM = 2'd1, RES_STREAM = 2'd2, RES_NET = 2'd3 } res_dst_e;

  typedef struct packed {
    op_src_e            src;
    logic [ADDR_W-1:0]  addr;      // OPS_MEM
    logic [RANK_W-1:0]  rank;      // OPS_RXBUF: expected source
    logic [TAG_W-1:0]   tag;       // OPS_RXBUF
    logic [SEQ_W-1:0]   seq;       // OPS_RXBUF
  } op_slot_t;

  typedef struct packed {
    res_dst_e           dst;
    logic [ADDR_W-1:0]  addr;      // RES_MEM; RES_NET+rndz: remote vaddr
    logic               rndz;      // RES_NET: RNDZ_MSG instead of EAGER_MSG
    logic [RANK_W-1:0]  rank;      // RES_NET: destination rank
    logic [SESS_W-1:0]  session;
    logic [TAG_W-1:0]   tag;
    logic [SEQ_W-1:0]   seq;
  } res_slot_t;

  typedef struct packed {
    op_slot_t           op0;
    op_slot_t           op1;
    res_slot_t          res;
    red_func_e          func;      // used when both operands are present
    logic [LEN_W-1:0]   len;
  } dmp_instr_t;

  // ---- Tx control (DMP or controller -> Tx system) ------------------------
  typedef struct packed {
    msg_type_e          mtype;
    logic [RANK_W-1:0]  dst;
    logic [SESS_W-1:0]  session;
    logic [LEN_W-1:0]   len;
    logic [TAG_W-1:0]   tag;
    logic [SEQ_W-1:0]   seq;
    logic [ADDR_W-1:0]  vaddr;
  } tx_ctrl_t;

  // ---- Rx notifications ---------------------------------------------------
  // Rx system -> RxBuf manager, one per eager packet (path 5)
  typedef struct packed {
    logic [SESS_W-1:0]  session;
    logic               first;     // first packet of a message: sig is valid
    sig_t               sig;
    logic [LEN_W-1:0]   bytes;     // payload bytes in this packet
  } rbm_notif_t;

  // Rx system -> controller, rendezvous handshake messages (path 3)
  typedef struct packed {
    msg_type_e          mtype;
    logic [RANK_W-1:0]  src;
    logic [TAG_W-1:0]   tag;
    logic [SEQ_W-1:0]   seq;
    logic [LEN_W-1:0]   len;
    logic [ADDR_W-1:0]  vaddr;
  } uc_notif_t;

  // DMP <-> RxBuf manager (path 6)
  typedef struct packed {
    logic [RANK_W-1:0]  src;
    logic [TAG_W-1:0]   tag;
    logic [SEQ_W-1:0]   seq;
  } rbm_seek_t;

  typedef struct packed {
    logic               hit;
    logic [7:0]         idx;
    logic [ADDR_W-1:0]  addr;
    logic [LEN_W-1:0]   len;
  } rbm_seek_rsp_t;

endpackage
