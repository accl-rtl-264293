// rx_system: the receive side of the engine's message protocol. The protocol
// offload engine delivers packets, each announced by a meta word (session,
// bytes). Every message starts with a one-beat signature (accl_pkg::sig_t); a
// message may span several packets, and packets of different sessions may
// interleave. The Rx system keeps, per session, how many payload bytes of the
// current message are still due, which tells whether a packet opens a new
// message (its first beat is a signature) or continues one.
//   EAGER_MSG  : a notification per packet goes to the RxBuf manager (path 5)
//                and the payload beats go into the NoC towards the rx-buffer
//                write channel, in arrival order.
//   RNDZ_INIT, RNDZ_DONE : the signature becomes a notification queued for the
//                embedded controller (path 3); these messages carry no payload.
// The per-session bookkeeping follows the paper's description of interleaved
// packets; the signature layout, the one-beat header and the state machine
// are this design's. Payload beats pass at one per cycle; a header costs one
// cycle and its notification one more.
module rx_system
  import accl_pkg::*;
#(
  parameter int MAX_SESS = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         meta_valid,
  output logic         meta_ready,
  input  net_rx_meta_t meta,
  input  logic         data_valid,
  output logic         data_ready,
  input  axis_t        data,
  output logic         rbm_valid,
  input  logic         rbm_ready,
  output rbm_notif_t   rbm_notif,
  output logic         uc_valid,
  input  logic         uc_ready,
  output uc_notif_t    uc_notif,
  output logic         noc_valid,
  input  logic         noc_ready,
  output axis_t        noc
);
  localparam int SW = (MAX_SESS > 1) ? $clog2(MAX_SESS) : 1;
  typedef enum logic [2:0] { S_META, S_HDR, S_RBM, S_PAY, S_UC } state_e;
  state_e       st;
  net_rx_meta_t m;
  logic         hdr_last;
  logic [LEN_W-1:0] remaining [MAX_SESS];
  wire  [SW-1:0] sidx = m.session[SW-1:0];
  sig_t         sig;
  assign sig = sig_t'(data.data[SIG_W-1:0]);

  assign meta_ready = (st == S_META);
  assign data_ready = (st == S_HDR) || (st == S_PAY && noc_ready);
  assign rbm_valid  = (st == S_RBM);
  assign uc_valid   = (st == S_UC);
  assign noc_valid  = (st == S_PAY) && data_valid;
  always_comb begin
    noc      = data;
    noc.dest = {NOC_MEMW_RXBUF, 4'd0};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_META;
      hdr_last <= 1'b0;
      for (int s = 0; s < MAX_SESS; s++) remaining[s] <= '0;
    end else begin
      case (st)
        S_META: if (meta_valid) begin
          m <= meta;
          if (remaining[meta.session[SW-1:0]] == '0) st <= S_HDR;
          else begin
            rbm_notif.session <= meta.session;
            rbm_notif.first   <= 1'b0;
            rbm_notif.bytes   <= meta.len;
            remaining[meta.session[SW-1:0]] <= remaining[meta.session[SW-1:0]] - meta.len;
            hdr_last <= 1'b0;
            st <= S_RBM;
          end
        end
        S_HDR: if (data_valid) begin
          hdr_last <= data.last;
          if (sig.mtype == MSG_EAGER) begin
            rbm_notif.session <= m.session;
            rbm_notif.first   <= 1'b1;
            rbm_notif.sig     <= sig;
            rbm_notif.bytes   <= m.len - LEN_W'(BEAT_B);
            remaining[sidx]   <= sig.len - (m.len - LEN_W'(BEAT_B));
            st <= S_RBM;
          end else begin
            uc_notif.mtype <= sig.mtype;
            uc_notif.src   <= sig.src;
            uc_notif.tag   <= sig.tag;
            uc_notif.seq   <= sig.seq;
            uc_notif.len   <= sig.len;
            uc_notif.vaddr <= sig.vaddr;
            st <= S_UC;
          end
        end
        S_RBM: if (rbm_ready) st <= hdr_last ? S_META : S_PAY;
        S_PAY: if (data_valid && noc_ready && data.last) st <= S_META;
        S_UC:  if (uc_ready) st <= S_META;
        default: st <= S_META;
      endcase
    end
  end
endmodule
