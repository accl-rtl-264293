// rbm: the RxBuf manager. It owns the eager receive buffers whose addresses
// the host placed in the configuration memory. For every eager packet the Rx
// system announces (path 5) it issues one memory write command: the first
// packet of a message takes a free buffer and records the message's source
// rank, tag, sequence number and length; later packets of the same session
// continue at the running offset in that buffer, so packets of different
// sessions may interleave. A buffer becomes ready when the memory has
// acknowledged the write of the message's last packet. The data movement
// processor asks (path 6) for a ready buffer matching source, tag and
// sequence number; the answer, hit or miss, comes one cycle after the request
// is accepted. A hit buffer is freed when the DMP releases it. If no buffer is
// free, the first packet of a message waits (back-pressure to the Rx system).
// The function follows the paper; the tables, the first-free allocation and
// the write-acknowledge tracking are this design's.
module rbm
  import accl_pkg::*;
#(
  parameter int NRXBUF   = 16,
  parameter int MAX_SESS = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [ADDR_W-1:0] rxbuf_addr [NRXBUF],
  // notifications from the Rx system
  input  logic          notif_valid,
  output logic          notif_ready,
  input  rbm_notif_t    notif,
  // memory write channel (rx buffers)
  output logic          wr_cmd_valid,
  input  logic          wr_cmd_ready,
  output mem_cmd_t      wr_cmd,
  input  logic          wr_sts_valid,
  // DMP seek / release
  input  logic          seek_valid,
  output logic          seek_ready,
  input  rbm_seek_t     seek,
  output logic          rsp_valid,
  input  logic          rsp_ready,
  output rbm_seek_rsp_t rsp,
  input  logic          release_valid,
  input  logic [7:0]    release_idx,
  // number of buffers holding a complete message (for status / tests)
  output logic [7:0]    ready_count
);
  localparam int BW = (NRXBUF > 1) ? $clog2(NRXBUF) : 1;
  localparam int SW = (MAX_SESS > 1) ? $clog2(MAX_SESS) : 1;
  typedef enum logic [1:0] { B_IDLE, B_ENQ, B_READY } buf_state_e;
  typedef struct packed { logic [BW-1:0] idx; logic final_pkt; } ack_t;

  buf_state_e        bst  [NRXBUF];
  logic [RANK_W-1:0] bsrc [NRXBUF];
  logic [TAG_W-1:0]  btag [NRXBUF];
  logic [SEQ_W-1:0]  bseq [NRXBUF];
  logic [LEN_W-1:0]  blen [NRXBUF];
  logic [BW-1:0]     cur  [MAX_SESS];
  logic [LEN_W-1:0]  off  [MAX_SESS];

  // first free buffer
  logic          free_found;
  logic [BW-1:0] free_idx;
  always_comb begin
    free_found = 1'b0;
    free_idx   = '0;
    for (int i = NRXBUF - 1; i >= 0; i--)
      if (bst[i] == B_IDLE) begin free_found = 1'b1; free_idx = BW'(i); end
  end

  // notification -> write command
  wire  [SW-1:0] sidx = notif.session[SW-1:0];
  logic cmdq_ready, ackq_in_ready, ackq_valid;
  ack_t ack_in, ack_out;
  mem_cmd_t cmd_in;
  logic take;
  assign take        = notif_valid && cmdq_ready && ackq_in_ready && (!notif.first || free_found);
  assign notif_ready = take;

  always_comb begin
    if (notif.first) begin
      ack_in.idx       = free_idx;
      cmd_in.addr      = rxbuf_addr[free_idx];
      ack_in.final_pkt = (notif.bytes >= notif.sig.len);
    end else begin
      ack_in.idx       = cur[sidx];
      cmd_in.addr      = rxbuf_addr[cur[sidx]] + ADDR_W'(off[sidx]);
      ack_in.final_pkt = (off[sidx] + notif.bytes >= blen[cur[sidx]]);
    end
    cmd_in.len = notif.bytes;
  end

  sync_fifo #(.T(mem_cmd_t), .DEPTH(4)) u_cmdq (
    .clk, .rst_n, .in_valid(take), .in_ready(cmdq_ready), .in_data(cmd_in),
    .out_valid(wr_cmd_valid), .out_ready(wr_cmd_ready), .out_data(wr_cmd));
  sync_fifo #(.T(ack_t), .DEPTH(8)) u_ackq (
    .clk, .rst_n, .in_valid(take), .in_ready(ackq_in_ready), .in_data(ack_in),
    .out_valid(ackq_valid), .out_ready(wr_sts_valid), .out_data(ack_out));

  // seek
  logic          m_found;
  logic [BW-1:0] m_idx;
  always_comb begin
    m_found = 1'b0;
    m_idx   = '0;
    for (int i = NRXBUF - 1; i >= 0; i--)
      if (bst[i] == B_READY && bsrc[i] == seek.src && btag[i] == seek.tag && bseq[i] == seek.seq) begin
        m_found = 1'b1; m_idx = BW'(i);
      end
  end
  assign seek_ready = !rsp_valid;

  always_comb begin
    ready_count = '0;
    for (int i = 0; i < NRXBUF; i++) ready_count += 8'(bst[i] == B_READY);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0;
      rsp       <= '0;
      for (int i = 0; i < NRXBUF; i++) bst[i] <= B_IDLE;
      for (int s = 0; s < MAX_SESS; s++) begin cur[s] <= '0; off[s] <= '0; end
    end else begin
      if (take) begin
        if (notif.first) begin
          bst[free_idx]  <= B_ENQ;
          bsrc[free_idx] <= notif.sig.src;
          btag[free_idx] <= notif.sig.tag;
          bseq[free_idx] <= notif.sig.seq;
          blen[free_idx] <= notif.sig.len;
          cur[sidx]      <= free_idx;
          off[sidx]      <= notif.bytes;
        end else begin
          off[sidx]      <= off[sidx] + notif.bytes;
        end
      end
      if (wr_sts_valid && ackq_valid && ack_out.final_pkt) bst[ack_out.idx] <= B_READY;
      if (release_valid) bst[release_idx[BW-1:0]] <= B_IDLE;
      if (seek_valid && seek_ready) begin
        rsp_valid <= 1'b1;
        rsp.hit   <= m_found;
        rsp.idx   <= 8'(m_idx);
        rsp.addr  <= rxbuf_addr[m_idx];
        rsp.len   <= blen[m_idx];
      end else if (rsp_ready) rsp_valid <= 1'b0;
    end
  end

  // a write acknowledge never arrives without an outstanding write
  a_ack: assert property (@(posedge clk) disable iff (!rst_n) wr_sts_valid |-> ackq_valid);
endmodule
