// cclo_engine: the collective offload engine. It joins the control plane
// (command arbiter, embedded controller, data movement processor, RxBuf
// manager, configuration memory) and the data plane (Rx and Tx systems, the
// on-chip stream network, the reduction plugin), with a queue on every command
// path between the control blocks:
//   path 1  arbiter -> controller            collective commands
//   path 2  controller -> Tx system          RNDZ_INIT
//   path 3  Rx system -> controller          RNDZ_INIT / RNDZ_DONE arrivals
//   path 4  controller -> DMP                microcode, completions back
//   path 5  Rx system -> RxBuf manager       eager packet arrivals
//   path 6  DMP <-> RxBuf manager            rx buffer checks and release
// The engine talks to memory through two data-mover channels, each with a
// read and a write half: channel 0 reads operand 0 and writes eager rx
// buffers, channel 1 reads operand 1 (or an rx buffer) and writes results. A
// unary plugin (compression) is not part of this design; its NoC port is
// brought out (cmp_*) and may be left unconnected with cmp_in_valid tied low.
// The block structure follows the paper's engine figure; the channel split,
// the queue depths and all encodings are this design's.
module cclo_engine
  import accl_pkg::*;
#(
  parameter int MAX_RANKS = 16,
  parameter int NRXBUF    = 16,
  parameter int MAX_SESS  = 16,
  parameter int RETRY     = 16,
  parameter int QDEPTH    = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  // host control: MMIO and command/status
  input  logic          mmio_we,
  input  logic          mmio_re,
  input  logic [11:0]   mmio_addr,
  input  logic [31:0]   mmio_wdata,
  output logic [31:0]   mmio_rdata,
  input  logic          host_cmd_valid,
  output logic          host_cmd_ready,
  input  ccl_cmd_t      host_cmd,
  output logic          host_sts_valid,
  input  logic          host_sts_ready,
  output ccl_sts_t      host_sts,
  // kernel control and data
  input  logic          krn_cmd_valid,
  output logic          krn_cmd_ready,
  input  ccl_cmd_t      krn_cmd,
  output logic          krn_sts_valid,
  input  logic          krn_sts_ready,
  output ccl_sts_t      krn_sts,
  input  logic          krn_in_valid,
  output logic          krn_in_ready,
  input  axis_t         krn_in,
  output logic          krn_out_valid,
  input  logic          krn_out_ready,
  output axis_t         krn_out,
  // memory channel 0
  output logic          m0_rd_cmd_valid,
  input  logic          m0_rd_cmd_ready,
  output mem_cmd_t      m0_rd_cmd,
  input  logic          m0_rd_valid,
  output logic          m0_rd_ready,
  input  axis_t         m0_rd,
  output logic          m0_wr_cmd_valid,
  input  logic          m0_wr_cmd_ready,
  output mem_cmd_t      m0_wr_cmd,
  output logic          m0_wr_valid,
  input  logic          m0_wr_ready,
  output axis_t         m0_wr,
  input  logic          m0_wr_sts,
  // memory channel 1
  output logic          m1_rd_cmd_valid,
  input  logic          m1_rd_cmd_ready,
  output mem_cmd_t      m1_rd_cmd,
  input  logic          m1_rd_valid,
  output logic          m1_rd_ready,
  input  axis_t         m1_rd,
  output logic          m1_wr_cmd_valid,
  input  logic          m1_wr_cmd_ready,
  output mem_cmd_t      m1_wr_cmd,
  output logic          m1_wr_valid,
  input  logic          m1_wr_ready,
  output axis_t         m1_wr,
  input  logic          m1_wr_sts,
  // network (protocol-independent)
  output logic          net_tx_meta_valid,
  input  logic          net_tx_meta_ready,
  output net_tx_meta_t  net_tx_meta,
  output logic          net_tx_valid,
  input  logic          net_tx_ready,
  output axis_t         net_tx,
  input  logic          net_rx_meta_valid,
  output logic          net_rx_meta_ready,
  input  net_rx_meta_t  net_rx_meta,
  input  logic          net_rx_valid,
  output logic          net_rx_ready,
  input  axis_t         net_rx,
  // unary plugin port of the NoC
  output logic          cmp_out_valid,
  input  logic          cmp_out_ready,
  output axis_t         cmp_out,
  input  logic          cmp_in_valid,
  output logic          cmp_in_ready,
  input  axis_t         cmp_in,
  // status counters
  output logic [31:0]   rx_miss_count,
  output logic [7:0]    rxbuf_ready_count
);
  // ---------------- configuration memory ----------------
  logic [RANK_W-1:0] local_rank, comm_size;
  logic [SESS_W-1:0] session    [MAX_RANKS];
  logic [ADDR_W-1:0] rxbuf_addr [NRXBUF];
  logic [LEN_W-1:0]  rxbuf_size [NRXBUF];

  cfg_mem #(.MAX_RANKS(MAX_RANKS), .NRXBUF(NRXBUF)) u_cfg (
    .clk, .rst_n, .mmio_we, .mmio_re, .mmio_addr, .mmio_wdata, .mmio_rdata,
    .local_rank, .comm_size, .session, .rxbuf_addr, .rxbuf_size);

  // ---------------- path 1: arbiter -> controller ----------------
  logic a_cmd_valid, a_cmd_ready, u_cmd_valid, u_cmd_ready;
  ccl_cmd_t a_cmd, u_cmd;
  logic u_sts_valid, u_sts_ready;
  ccl_sts_t u_sts;

  cmd_arbiter #(.INFLIGHT(QDEPTH)) u_arb (
    .clk, .rst_n,
    .host_cmd_valid, .host_cmd_ready, .host_cmd, .host_sts_valid, .host_sts_ready, .host_sts,
    .krn_cmd_valid, .krn_cmd_ready, .krn_cmd, .krn_sts_valid, .krn_sts_ready, .krn_sts,
    .uc_cmd_valid(a_cmd_valid), .uc_cmd_ready(a_cmd_ready), .uc_cmd(a_cmd),
    .uc_sts_valid(u_sts_valid), .uc_sts_ready(u_sts_ready), .uc_sts(u_sts));

  sync_fifo #(.T(ccl_cmd_t), .DEPTH(QDEPTH)) q_cmd (
    .clk, .rst_n, .in_valid(a_cmd_valid), .in_ready(a_cmd_ready), .in_data(a_cmd),
    .out_valid(u_cmd_valid), .out_ready(u_cmd_ready), .out_data(u_cmd));

  // ---------------- controller ----------------
  logic uc_dmp_valid, uc_dmp_ready, d_ins_valid, d_ins_ready;
  dmp_instr_t uc_dmp, d_ins;
  logic d_done_valid, d_done_ready, u_done_valid, u_done_ready;
  logic uc_tx_valid, uc_tx_ready, t_uc_valid, t_uc_ready;
  tx_ctrl_t uc_tx, t_uc;
  logic rx_uc_valid, rx_uc_ready, u_ntf_valid, u_ntf_ready;
  uc_notif_t rx_uc, u_ntf;

  uc_ctrl #(.MAX_RANKS(MAX_RANKS)) u_uc (
    .clk, .rst_n, .local_rank, .comm_size, .session,
    .cmd_valid(u_cmd_valid), .cmd_ready(u_cmd_ready), .cmd(u_cmd),
    .sts_valid(u_sts_valid), .sts_ready(u_sts_ready), .sts(u_sts),
    .dmp_valid(uc_dmp_valid), .dmp_ready(uc_dmp_ready), .dmp_instr(uc_dmp),
    .dmp_done_valid(u_done_valid), .dmp_done_ready(u_done_ready),
    .tx_valid(uc_tx_valid), .tx_ready(uc_tx_ready), .tx_ctrl(uc_tx),
    .notif_valid(u_ntf_valid), .notif_ready(u_ntf_ready), .notif(u_ntf));

  // path 4 (both directions), path 2, path 3
  sync_fifo #(.T(dmp_instr_t), .DEPTH(QDEPTH)) q_ins (
    .clk, .rst_n, .in_valid(uc_dmp_valid), .in_ready(uc_dmp_ready), .in_data(uc_dmp),
    .out_valid(d_ins_valid), .out_ready(d_ins_ready), .out_data(d_ins));
  logic done_tok;
  sync_fifo #(.T(logic), .DEPTH(QDEPTH)) q_done (
    .clk, .rst_n, .in_valid(d_done_valid), .in_ready(d_done_ready), .in_data(1'b1),
    .out_valid(u_done_valid), .out_ready(u_done_ready), .out_data(done_tok));
  sync_fifo #(.T(tx_ctrl_t), .DEPTH(QDEPTH)) q_uctx (
    .clk, .rst_n, .in_valid(uc_tx_valid), .in_ready(uc_tx_ready), .in_data(uc_tx),
    .out_valid(t_uc_valid), .out_ready(t_uc_ready), .out_data(t_uc));
  sync_fifo #(.T(uc_notif_t), .DEPTH(2*QDEPTH)) q_ntf (
    .clk, .rst_n, .in_valid(rx_uc_valid), .in_ready(rx_uc_ready), .in_data(rx_uc),
    .out_valid(u_ntf_valid), .out_ready(u_ntf_ready), .out_data(u_ntf));

  // ---------------- DMP ----------------
  logic seek_valid, seek_ready, rsp_valid, rsp_ready, rel_valid;
  rbm_seek_t seek;
  rbm_seek_rsp_t rsp;
  logic [7:0] rel_idx;
  logic dmp_tx_valid, dmp_tx_ready, t_dmp_valid, t_dmp_ready, tx_done;
  tx_ctrl_t dmp_tx, t_dmp;
  logic [DEST_W-1:0] memr0_dest, memr1_dest, krn_dest, red_dest;
  logic krn_en, krn_out_last;

  dmp #(.RETRY(RETRY)) u_dmp (
    .clk, .rst_n,
    .instr_valid(d_ins_valid), .instr_ready(d_ins_ready), .instr(d_ins),
    .done_valid(d_done_valid), .done_ready(d_done_ready),
    .seek_valid, .seek_ready, .seek, .rsp_valid, .rsp_ready, .rsp,
    .release_valid(rel_valid), .release_idx(rel_idx),
    .rd0_valid(m0_rd_cmd_valid), .rd0_ready(m0_rd_cmd_ready), .rd0_cmd(m0_rd_cmd),
    .rd1_valid(m1_rd_cmd_valid), .rd1_ready(m1_rd_cmd_ready), .rd1_cmd(m1_rd_cmd),
    .wr1_valid(m1_wr_cmd_valid), .wr1_ready(m1_wr_cmd_ready), .wr1_cmd(m1_wr_cmd), .wr1_sts(m1_wr_sts),
    .tx_valid(dmp_tx_valid), .tx_ready(dmp_tx_ready), .tx_ctrl(dmp_tx), .tx_done,
    .krn_out_last, .memr0_dest, .memr1_dest, .krn_dest, .red_dest, .krn_en,
    .miss_count(rx_miss_count));

  sync_fifo #(.T(tx_ctrl_t), .DEPTH(QDEPTH)) q_dmptx (
    .clk, .rst_n, .in_valid(dmp_tx_valid), .in_ready(dmp_tx_ready), .in_data(dmp_tx),
    .out_valid(t_dmp_valid), .out_ready(t_dmp_ready), .out_data(t_dmp));

  // ---------------- RxBuf manager (path 5 and 6) ----------------
  logic rx_rbm_valid, rx_rbm_ready, r_ntf_valid, r_ntf_ready;
  rbm_notif_t rx_rbm, r_ntf;
  sync_fifo #(.T(rbm_notif_t), .DEPTH(QDEPTH)) q_rbm (
    .clk, .rst_n, .in_valid(rx_rbm_valid), .in_ready(rx_rbm_ready), .in_data(rx_rbm),
    .out_valid(r_ntf_valid), .out_ready(r_ntf_ready), .out_data(r_ntf));

  rbm #(.NRXBUF(NRXBUF), .MAX_SESS(MAX_SESS)) u_rbm (
    .clk, .rst_n, .rxbuf_addr,
    .notif_valid(r_ntf_valid), .notif_ready(r_ntf_ready), .notif(r_ntf),
    .wr_cmd_valid(m0_wr_cmd_valid), .wr_cmd_ready(m0_wr_cmd_ready), .wr_cmd(m0_wr_cmd),
    .wr_sts_valid(m0_wr_sts),
    .seek_valid, .seek_ready, .seek, .rsp_valid, .rsp_ready, .rsp,
    .release_valid(rel_valid), .release_idx(rel_idx), .ready_count(rxbuf_ready_count));

  // ---------------- data plane ----------------
  logic  ni_valid [NOC_NIN];
  logic  ni_ready [NOC_NIN];
  axis_t ni_data  [NOC_NIN];
  logic  no_valid [NOC_NOUT];
  logic  no_ready [NOC_NOUT];
  axis_t no_data  [NOC_NOUT];

  rx_system #(.MAX_SESS(MAX_SESS)) u_rx (
    .clk, .rst_n,
    .meta_valid(net_rx_meta_valid), .meta_ready(net_rx_meta_ready), .meta(net_rx_meta),
    .data_valid(net_rx_valid), .data_ready(net_rx_ready), .data(net_rx),
    .rbm_valid(rx_rbm_valid), .rbm_ready(rx_rbm_ready), .rbm_notif(rx_rbm),
    .uc_valid(rx_uc_valid), .uc_ready(rx_uc_ready), .uc_notif(rx_uc),
    .noc_valid(ni_valid[NOC_I_RX]), .noc_ready(ni_ready[NOC_I_RX]), .noc(ni_data[NOC_I_RX]));

  tx_system u_tx (
    .clk, .rst_n, .local_rank,
    .dmp_valid(t_dmp_valid), .dmp_ready(t_dmp_ready), .dmp_ctrl(t_dmp), .dmp_done(tx_done),
    .uc_valid(t_uc_valid), .uc_ready(t_uc_ready), .uc_ctrl(t_uc),
    .noc_valid(no_valid[NOC_TX]), .noc_ready(no_ready[NOC_TX]), .noc(no_data[NOC_TX]),
    .meta_valid(net_tx_meta_valid), .meta_ready(net_tx_meta_ready), .meta(net_tx_meta),
    .data_valid(net_tx_valid), .data_ready(net_tx_ready), .data(net_tx));

  reduce_plugin u_red (
    .clk, .rst_n,
    .in0_valid(no_valid[NOC_RED_IN0]), .in0_ready(no_ready[NOC_RED_IN0]), .in0(no_data[NOC_RED_IN0]),
    .in1_valid(no_valid[NOC_RED_IN1]), .in1_ready(no_ready[NOC_RED_IN1]), .in1(no_data[NOC_RED_IN1]),
    .res_dest(red_dest),
    .out_valid(ni_valid[NOC_I_RED]), .out_ready(ni_ready[NOC_I_RED]), .out(ni_data[NOC_I_RED]));

  // sources entering the NoC take the route of the instruction in flight
  always_comb begin
    ni_valid[NOC_I_MEMR0] = m0_rd_valid;
    ni_data[NOC_I_MEMR0]  = '{data: m0_rd.data, dest: memr0_dest, last: m0_rd.last};
    ni_valid[NOC_I_MEMR1] = m1_rd_valid;
    ni_data[NOC_I_MEMR1]  = '{data: m1_rd.data, dest: memr1_dest, last: m1_rd.last};
    ni_valid[NOC_I_KRN]   = krn_in_valid && krn_en;
    ni_data[NOC_I_KRN]    = '{data: krn_in.data, dest: krn_dest, last: krn_in.last};
    ni_valid[NOC_I_CMP]   = cmp_in_valid;
    ni_data[NOC_I_CMP]    = cmp_in;
  end
  assign m0_rd_ready  = ni_ready[NOC_I_MEMR0];
  assign m1_rd_ready  = ni_ready[NOC_I_MEMR1];
  assign krn_in_ready = ni_ready[NOC_I_KRN] && krn_en;
  assign cmp_in_ready = ni_ready[NOC_I_CMP];

  noc u_noc (
    .clk, .rst_n,
    .in_valid(ni_valid), .in_ready(ni_ready), .in_data(ni_data),
    .out_valid(no_valid), .out_ready(no_ready), .out_data(no_data));

  // sinks leaving the NoC
  assign m1_wr_valid   = no_valid[NOC_MEMW_RES];
  assign m1_wr         = no_data[NOC_MEMW_RES];
  assign no_ready[NOC_MEMW_RES] = m1_wr_ready;
  assign m0_wr_valid   = no_valid[NOC_MEMW_RXBUF];
  assign m0_wr         = no_data[NOC_MEMW_RXBUF];
  assign no_ready[NOC_MEMW_RXBUF] = m0_wr_ready;
  assign krn_out_valid = no_valid[NOC_KRN_OUT];
  assign krn_out       = no_data[NOC_KRN_OUT];
  assign no_ready[NOC_KRN_OUT] = krn_out_ready;
  assign krn_out_last  = krn_out_valid && krn_out_ready && krn_out.last;
  assign cmp_out_valid = no_valid[NOC_CMP_IN];
  assign cmp_out       = no_data[NOC_CMP_IN];
  assign no_ready[NOC_CMP_IN] = cmp_out_ready;
endmodule
