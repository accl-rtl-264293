// cclo_top: one network-attached node's collective engine as the paper
// deploys it on an RDMA platform: the collective offload engine wrapped with
// the adapter that joins its protocol-independent network interfaces to an
// RDMA protocol offload engine. Incoming RDMA WRITE payloads (rendezvous
// messages) bypass the engine and go straight to memory over a third memory
// write channel. Outside this module stay the parts the paper takes from the
// platform: the RDMA offload engine itself (rdma_* ports), the memory system
// behind the three data-mover channels (m0_*, m1_*, m2_*), the host's MMIO
// and command path (mmio_*, host_*), the application kernel (krn_*) and the
// compression plugin's NoC port (cmp_*). Every port is a valid/ready stream
// except the MMIO port (one-cycle read latency) and the memory write status
// pulses (one per completed write command). See cclo_engine for the inside.
module cclo_top
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
  // RDMA protocol offload engine
  output logic          rdma_req_valid,
  input  logic          rdma_req_ready,
  output net_tx_meta_t  rdma_req,
  output logic          rdma_tx_valid,
  input  logic          rdma_tx_ready,
  output axis_t         rdma_tx,
  input  logic          rdma_rx_meta_valid,
  output logic          rdma_rx_meta_ready,
  input  net_tx_meta_t  rdma_rx_meta,
  input  logic          rdma_rx_valid,
  output logic          rdma_rx_ready,
  input  axis_t         rdma_rx,
  // memory channel 2: RDMA WRITE bypass
  output logic          m2_wr_cmd_valid,
  input  logic          m2_wr_cmd_ready,
  output mem_cmd_t      m2_wr_cmd,
  output logic          m2_wr_valid,
  input  logic          m2_wr_ready,
  output axis_t         m2_wr,
  // unary plugin port of the NoC
  output logic          cmp_out_valid,
  input  logic          cmp_out_ready,
  output axis_t         cmp_out,
  input  logic          cmp_in_valid,
  output logic          cmp_in_ready,
  input  axis_t         cmp_in,
  // status counters
  output logic [31:0]   rx_miss_count,
  output logic [7:0]    rxbuf_ready_count,
  output logic [31:0]   rdma_bypass_count
);
  logic         e_net_tx_meta_valid, e_net_tx_meta_ready, e_net_tx_valid, e_net_tx_ready;
  net_tx_meta_t e_net_tx_meta;
  axis_t        e_net_tx, e_net_rx;
  logic         e_net_rx_meta_valid, e_net_rx_meta_ready, e_net_rx_valid, e_net_rx_ready;
  net_rx_meta_t e_net_rx_meta;

  cclo_engine #(.MAX_RANKS(MAX_RANKS), .NRXBUF(NRXBUF), .MAX_SESS(MAX_SESS),
                .RETRY(RETRY), .QDEPTH(QDEPTH)) u_cclo (
    .clk,
    .rst_n,
    .mmio_we,
    .mmio_re,
    .mmio_addr,
    .mmio_wdata,
    .mmio_rdata,
    .host_cmd_valid,
    .host_cmd_ready,
    .host_cmd,
    .host_sts_valid,
    .host_sts_ready,
    .host_sts,
    .krn_cmd_valid,
    .krn_cmd_ready,
    .krn_cmd,
    .krn_sts_valid,
    .krn_sts_ready,
    .krn_sts,
    .krn_in_valid,
    .krn_in_ready,
    .krn_in,
    .krn_out_valid,
    .krn_out_ready,
    .krn_out,
    .m0_rd_cmd_valid,
    .m0_rd_cmd_ready,
    .m0_rd_cmd,
    .m0_rd_valid,
    .m0_rd_ready,
    .m0_rd,
    .m0_wr_cmd_valid,
    .m0_wr_cmd_ready,
    .m0_wr_cmd,
    .m0_wr_valid,
    .m0_wr_ready,
    .m0_wr,
    .m0_wr_sts,
    .m1_rd_cmd_valid,
    .m1_rd_cmd_ready,
    .m1_rd_cmd,
    .m1_rd_valid,
    .m1_rd_ready,
    .m1_rd,
    .m1_wr_cmd_valid,
    .m1_wr_cmd_ready,
    .m1_wr_cmd,
    .m1_wr_valid,
    .m1_wr_ready,
    .m1_wr,
    .m1_wr_sts,
    .net_tx_meta_valid(e_net_tx_meta_valid),
    .net_tx_meta_ready(e_net_tx_meta_ready),
    .net_tx_meta(e_net_tx_meta),
    .net_tx_valid(e_net_tx_valid),
    .net_tx_ready(e_net_tx_ready),
    .net_tx(e_net_tx),
    .net_rx_meta_valid(e_net_rx_meta_valid),
    .net_rx_meta_ready(e_net_rx_meta_ready),
    .net_rx_meta(e_net_rx_meta),
    .net_rx_valid(e_net_rx_valid),
    .net_rx_ready(e_net_rx_ready),
    .net_rx(e_net_rx),
    .cmp_out_valid,
    .cmp_out_ready,
    .cmp_out,
    .cmp_in_valid,
    .cmp_in_ready,
    .cmp_in,
    .rx_miss_count,
    .rxbuf_ready_count);

  rdma_adapter u_rdma (
    .clk, .rst_n,
    .cclo_tx_meta_valid(e_net_tx_meta_valid), .cclo_tx_meta_ready(e_net_tx_meta_ready), .cclo_tx_meta(e_net_tx_meta),
    .cclo_tx_data_valid(e_net_tx_valid), .cclo_tx_data_ready(e_net_tx_ready), .cclo_tx_data(e_net_tx),
    .cclo_rx_meta_valid(e_net_rx_meta_valid), .cclo_rx_meta_ready(e_net_rx_meta_ready), .cclo_rx_meta(e_net_rx_meta),
    .cclo_rx_data_valid(e_net_rx_valid), .cclo_rx_data_ready(e_net_rx_ready), .cclo_rx_data(e_net_rx),
    .rdma_req_valid, .rdma_req_ready, .rdma_req, .rdma_tx_valid, .rdma_tx_ready, .rdma_tx,
    .rdma_rx_meta_valid, .rdma_rx_meta_ready, .rdma_rx_meta, .rdma_rx_valid, .rdma_rx_ready, .rdma_rx,
    .bypass_cmd_valid(m2_wr_cmd_valid), .bypass_cmd_ready(m2_wr_cmd_ready), .bypass_cmd(m2_wr_cmd),
    .bypass_data_valid(m2_wr_valid), .bypass_data_ready(m2_wr_ready), .bypass_data(m2_wr),
    .bypass_count(rdma_bypass_count));
endmodule
