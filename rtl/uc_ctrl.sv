// uc_ctrl: the embedded controller of the control plane. In the paper this is
// a soft microprocessor whose firmware turns each collective command into a
// sequence of coarse commands for the data movement processor (path 4) and
// the Tx system (path 2) and waits for rendezvous notifications from the Rx
// system (path 3). Here the firmware's sequences are a hardwired state
// machine, so the collective set is fixed at synthesis (this design's choice;
// the paper's point of updating firmware without re-synthesis is given up).
// A collective is cut into point-to-point steps:
//   SEND   eager : one DMP instruction, operand from memory or kernel stream,
//                  result to the network as EAGER_MSG.
//          rndz  : wait for the peer's RNDZ_INIT, then one DMP instruction whose
//                  result is an RNDZ_MSG written to the announced address.
//   RECV   eager : one DMP instruction reading the matching rx buffer.
//          rndz  : send RNDZ_INIT with the result address, wait for RNDZ_DONE.
//   BCAST  one-to-all: the root sends to every other rank in rank order, the
//                  others receive from the root (either protocol).
//   REDUCE ring (eager): rank root+1 sends its operand to the next rank; each
//                  following rank combines what it receives with its own
//                  operand in the reduction plugin and passes the result on;
//                  the root combines into its result buffer.
// Sequence numbers are counted per peer, separately for sent and received
// messages. Notifications that arrive before they are awaited are kept in a
// small stash. One collective runs at a time; its status is returned when its
// last step has completed.
module uc_ctrl
  import accl_pkg::*;
#(
  parameter int MAX_RANKS = 16,
  parameter int NSTASH    = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [RANK_W-1:0] local_rank,
  input  logic [RANK_W-1:0] comm_size,
  input  logic [SESS_W-1:0] session [MAX_RANKS],
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  ccl_cmd_t          cmd,
  output logic              sts_valid,
  input  logic              sts_ready,
  output ccl_sts_t          sts,
  output logic              dmp_valid,
  input  logic              dmp_ready,
  output dmp_instr_t        dmp_instr,
  input  logic              dmp_done_valid,
  output logic              dmp_done_ready,
  output logic              tx_valid,
  input  logic              tx_ready,
  output tx_ctrl_t          tx_ctrl,
  input  logic              notif_valid,
  output logic              notif_ready,
  input  uc_notif_t         notif
);
  localparam int RW = (MAX_RANKS > 1) ? $clog2(MAX_RANKS) : 1;
  typedef enum logic [1:0] { P_SEND, P_RECV, P_RED_FWD, P_RED_ROOT } prim_e;
  typedef enum logic [3:0] { S_IDLE, S_DECODE, S_STEP, S_NOTIF, S_PUSH, S_TXC, S_WDMP, S_NEXT, S_STS } state_e;

  state_e            st;
  ccl_cmd_t          c;
  prim_e             prim;
  logic [RANK_W-1:0] peer, nxt, r;
  logic              bcast_root;
  logic [SEQ_W-1:0]  tx_seq [MAX_RANKS];
  logic [SEQ_W-1:0]  rx_seq [MAX_RANKS];
  msg_type_e         want_type;
  logic [ADDR_W-1:0] got_vaddr;
  uc_notif_t         stash  [NSTASH];
  logic              stv    [NSTASH];
  dmp_instr_t        ins;

  wire [RANK_W-1:0] prev_r = (local_rank == 0) ? comm_size - 1'b1 : local_rank - 1'b1;
  wire [RANK_W-1:0] next_r = (local_rank == comm_size - 1'b1) ? '0 : local_rank + 1'b1;
  wire [RANK_W-1:0] first_r = (c.root == comm_size - 1'b1) ? '0 : c.root + 1'b1;

  // stash search
  logic          st_hit;
  logic [$clog2(NSTASH)-1:0] st_idx, st_free;
  logic          st_has_free;
  wire  in_match = (notif.mtype == want_type) && (notif.src == peer) && (notif.tag == c.tag);
  always_comb begin
    st_hit = 1'b0; st_idx = '0; st_has_free = 1'b0; st_free = '0;
    for (int i = NSTASH - 1; i >= 0; i--) begin
      if (stv[i] && stash[i].mtype == want_type && stash[i].src == peer && stash[i].tag == c.tag) begin
        st_hit = 1'b1; st_idx = $clog2(NSTASH)'(i);
      end
      if (!stv[i]) begin st_has_free = 1'b1; st_free = $clog2(NSTASH)'(i); end
    end
  end

  assign cmd_ready      = (st == S_IDLE);
  assign sts_valid      = (st == S_STS);
  assign sts            = '{origin: 1'b0, retcode: 8'd0};
  assign dmp_valid      = (st == S_PUSH);
  assign dmp_instr      = ins;
  assign dmp_done_ready = (st == S_WDMP);
  assign tx_valid       = (st == S_TXC);
  assign notif_ready    = (st == S_NOTIF) && !st_hit && (in_match || st_has_free);

  always_comb begin
    tx_ctrl         = '0;
    tx_ctrl.mtype   = MSG_RNDZ_INIT;
    tx_ctrl.dst     = peer;
    tx_ctrl.session = session[peer[RW-1:0]];
    tx_ctrl.len     = c.len;
    tx_ctrl.tag     = c.tag;
    tx_ctrl.seq     = rx_seq[peer[RW-1:0]];
    tx_ctrl.vaddr   = c.res_addr;
  end

  // build the DMP instruction of the current step
  always_comb begin
    ins      = '0;
    ins.len  = c.len;
    ins.func = c.func;
    // operand 0: own data
    if (prim != P_RECV) begin
      ins.op0.src  = c.src_stream ? OPS_STREAM : OPS_MEM;
      ins.op0.addr = c.op0_addr;
    end
    // operand 1: received data
    if (prim != P_SEND) begin
      ins.op1.src  = OPS_RXBUF;
      ins.op1.rank = (prim == P_RECV) ? peer : prev_r;
      ins.op1.tag  = c.tag;
      ins.op1.seq  = rx_seq[ins.op1.rank[RW-1:0]];
    end
    // result
    if (prim == P_SEND || prim == P_RED_FWD) begin
      ins.res.dst     = RES_NET;
      ins.res.rank    = (prim == P_SEND) ? peer : nxt;
      ins.res.session = session[ins.res.rank[RW-1:0]];
      ins.res.tag     = c.tag;
      ins.res.seq     = tx_seq[ins.res.rank[RW-1:0]];
      ins.res.rndz    = c.rndz && (prim == P_SEND) && (c.op != CCL_REDUCE);
      ins.res.addr    = got_vaddr;
    end else begin
      ins.res.dst  = c.dst_stream ? RES_STREAM : RES_MEM;
      ins.res.addr = c.res_addr;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      c          <= '0;
      prim       <= P_SEND;
      peer       <= '0;
      nxt        <= '0;
      r          <= '0;
      bcast_root <= 1'b0;
      want_type  <= MSG_RNDZ_INIT;
      got_vaddr  <= '0;
      for (int i = 0; i < MAX_RANKS; i++) begin tx_seq[i] <= '0; rx_seq[i] <= '0; end
      for (int i = 0; i < NSTASH; i++) stv[i] <= 1'b0;
    end else begin
      case (st)
        S_IDLE: if (cmd_valid) begin c <= cmd; st <= S_DECODE; end
        S_DECODE: begin
          bcast_root <= 1'b0;
          case (c.op)
            CCL_SEND:  begin prim <= P_SEND; peer <= c.root; st <= S_STEP; end
            CCL_RECV:  begin prim <= P_RECV; peer <= c.root; st <= S_STEP; end
            CCL_BCAST: if (local_rank == c.root) begin
                         bcast_root <= 1'b1; r <= '0; st <= S_NEXT;
                       end else begin
                         prim <= P_RECV; peer <= c.root; st <= S_STEP;
                       end
            CCL_REDUCE: begin
              nxt <= next_r;
              if (comm_size == 1) st <= S_STS;
              else if (local_rank == c.root)  begin prim <= P_RED_ROOT; peer <= prev_r; st <= S_PUSH; end
              else if (local_rank == first_r) begin prim <= P_SEND;     peer <= next_r; st <= S_PUSH; end
              else                            begin prim <= P_RED_FWD;  peer <= prev_r; st <= S_PUSH; end
            end
            default: st <= S_STS;   // NOP and unknown commands complete at once
          endcase
        end
        // choose the protocol-specific way of running a send or receive step
        S_STEP: begin
          if (!c.rndz) st <= S_PUSH;
          else if (prim == P_SEND) begin want_type <= MSG_RNDZ_INIT; st <= S_NOTIF; end
          else begin want_type <= MSG_RNDZ_DONE; st <= S_TXC; end
        end
        S_TXC: if (tx_ready) begin
          rx_seq[peer[RW-1:0]] <= rx_seq[peer[RW-1:0]] + 1'b1;
          st <= S_NOTIF;
        end
        S_NOTIF: begin
          if (st_hit) begin
            stv[st_idx] <= 1'b0;
            got_vaddr   <= stash[st_idx].vaddr;
            st          <= (want_type == MSG_RNDZ_INIT) ? S_PUSH : S_NEXT;
          end else if (notif_valid && in_match) begin
            got_vaddr <= notif.vaddr;
            st        <= (want_type == MSG_RNDZ_INIT) ? S_PUSH : S_NEXT;
          end else if (notif_valid && st_has_free) begin
            stash[st_free] <= notif;
            stv[st_free]   <= 1'b1;
          end
        end
        S_PUSH: if (dmp_ready) begin
          if (ins.op1.src == OPS_RXBUF) rx_seq[ins.op1.rank[RW-1:0]] <= rx_seq[ins.op1.rank[RW-1:0]] + 1'b1;
          if (ins.res.dst == RES_NET)   tx_seq[ins.res.rank[RW-1:0]] <= tx_seq[ins.res.rank[RW-1:0]] + 1'b1;
          st <= S_WDMP;
        end
        S_WDMP: if (dmp_done_valid) st <= S_NEXT;
        S_NEXT: begin
          // broadcast root: move on to the next rank that is not the root
          if (bcast_root) begin
            if (r >= comm_size) st <= S_STS;
            else begin
              r <= r + 1'b1;
              if (r != c.root) begin prim <= P_SEND; peer <= r; st <= S_STEP; end
            end
          end else st <= S_STS;
        end
        S_STS: if (sts_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
