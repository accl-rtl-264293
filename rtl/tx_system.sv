// tx_system: the transmit side of the engine's message protocol. It takes Tx
// control commands from two queues, the data movement processor's (path 4's
// data messages) and the embedded controller's (path 2, rendezvous
// handshakes), and drives the protocol offload engine's command (meta) and
// data streams:
//   EAGER_MSG : one SEND of header+payload; the header is a one-beat signature
//               and the payload comes from the NoC.
//   RNDZ_INIT : one SEND of the signature alone, carrying the receiver's
//               result buffer address.
//   RNDZ_MSG  : an RDMA WRITE of the payload to the remote address, then,
//               once the WRITE has been pushed out, a SEND of a RNDZ_DONE
//               signature to the same rank.
// A DMP command is acknowledged with a one-cycle done pulse after its last
// beat (for RNDZ_MSG, after the RNDZ_DONE beat). This sequence follows the
// paper's walk-through; the controller's queue is served first (own choice).
// Payload beats pass at one per cycle; each header costs one cycle.
module tx_system
  import accl_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [RANK_W-1:0] local_rank,
  input  logic              dmp_valid,
  output logic              dmp_ready,
  input  tx_ctrl_t          dmp_ctrl,
  output logic              dmp_done,
  input  logic              uc_valid,
  output logic              uc_ready,
  input  tx_ctrl_t          uc_ctrl,
  input  logic              noc_valid,
  output logic              noc_ready,
  input  axis_t             noc,
  output logic              meta_valid,
  input  logic              meta_ready,
  output net_tx_meta_t      meta,
  output logic              data_valid,
  input  logic              data_ready,
  output axis_t             data
);
  typedef enum logic [2:0] { S_IDLE, S_META, S_HDR, S_PAY, S_DONE } state_e;
  state_e   st;
  tx_ctrl_t c;
  logic     from_dmp;
  logic     phase2;      // RNDZ_MSG: the RNDZ_DONE part
  sig_t     sig;

  assign uc_ready  = (st == S_IDLE);
  assign dmp_ready = (st == S_IDLE) && !uc_valid;

  always_comb begin
    sig       = '0;
    sig.mtype = phase2 ? MSG_RNDZ_DONE : c.mtype;
    sig.src   = local_rank;
    sig.dst   = c.dst;
    sig.len   = c.len;
    sig.tag   = c.tag;
    sig.seq   = c.seq;
    sig.vaddr = c.vaddr;
  end

  always_comb begin
    meta         = '0;
    meta.session = c.session;
    meta.vaddr   = c.vaddr;
    if (c.mtype == MSG_RNDZ_MSG && !phase2) begin
      meta.op  = NET_WRITE;
      meta.len = c.len;
    end else begin
      meta.op  = NET_SEND;
      meta.len = (c.mtype == MSG_EAGER) ? c.len + LEN_W'(BEAT_B) : LEN_W'(BEAT_B);
    end
  end
  assign meta_valid = (st == S_META);

  always_comb begin
    data_valid = 1'b0;
    noc_ready  = 1'b0;
    data       = '0;
    if (st == S_HDR) begin
      data_valid = 1'b1;
      data.data  = DATA_W'(sig);
      data.last  = (c.mtype != MSG_EAGER);
    end else if (st == S_PAY) begin
      data_valid = noc_valid;
      noc_ready  = data_ready;
      data.data  = noc.data;
      data.last  = noc.last;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      phase2   <= 1'b0;
      from_dmp <= 1'b0;
      dmp_done <= 1'b0;
    end else begin
      dmp_done <= 1'b0;
      case (st)
        S_IDLE: begin
          phase2 <= 1'b0;
          if (uc_valid) begin
            c <= uc_ctrl; from_dmp <= 1'b0; st <= S_META;
          end else if (dmp_valid) begin
            c <= dmp_ctrl; from_dmp <= 1'b1; st <= S_META;
          end
        end
        S_META: if (meta_ready) st <= (c.mtype == MSG_RNDZ_MSG && !phase2) ? S_PAY : S_HDR;
        S_HDR:  if (data_ready) st <= (c.mtype == MSG_EAGER) ? S_PAY : S_DONE;
        S_PAY:  if (noc_valid && data_ready && noc.last) begin
          if (c.mtype == MSG_RNDZ_MSG) begin
            phase2 <= 1'b1;
            st     <= S_META;
          end else st <= S_DONE;
        end
        S_DONE: begin
          dmp_done <= from_dmp;
          st       <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
