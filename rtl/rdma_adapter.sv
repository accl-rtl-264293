// rdma_adapter: adapts the engine's protocol-independent network interfaces
// to an RDMA protocol offload engine (the paper's Coyote RDMA configuration).
// Transmit: each engine meta command becomes an RDMA request, SEND for
// messages and WRITE for rendezvous payloads, on the queue pair that the
// engine's session id names; the data stream passes alongside unchanged.
// Receive: the offload engine announces each incoming packet with its verb,
// queue pair, target address and length. SEND packets go to the engine's Rx
// system (meta and data); WRITE packets bypass the engine and are written
// straight to memory through a third memory write channel, as the paper's
// "RDMA WRITE bypass" does. A packet's data follows the path its announcement
// chose until its last beat. The request/announcement layout is this design's
// own; the real offload engine's format is not part of the design. Meta words
// pass in the cycle they are accepted; the receive path holds each
// announcement in a register while its packet passes.
module rdma_adapter
  import accl_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  // engine side, transmit
  input  logic          cclo_tx_meta_valid,
  output logic          cclo_tx_meta_ready,
  input  net_tx_meta_t  cclo_tx_meta,
  input  logic          cclo_tx_data_valid,
  output logic          cclo_tx_data_ready,
  input  axis_t         cclo_tx_data,
  // engine side, receive (SEND packets)
  output logic          cclo_rx_meta_valid,
  input  logic          cclo_rx_meta_ready,
  output net_rx_meta_t  cclo_rx_meta,
  output logic          cclo_rx_data_valid,
  input  logic          cclo_rx_data_ready,
  output axis_t         cclo_rx_data,
  // offload engine side
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
  // WRITE bypass to memory (channel 2)
  output logic          bypass_cmd_valid,
  input  logic          bypass_cmd_ready,
  output mem_cmd_t      bypass_cmd,
  output logic          bypass_data_valid,
  input  logic          bypass_data_ready,
  output axis_t         bypass_data,
  // number of WRITE packets that took the bypass (for status / tests)
  output logic [31:0]   bypass_count
);
  // transmit: a request per engine command
  assign rdma_req_valid     = cclo_tx_meta_valid;
  assign cclo_tx_meta_ready = rdma_req_ready;
  assign rdma_req           = cclo_tx_meta;
  assign rdma_tx_valid      = cclo_tx_data_valid;
  assign cclo_tx_data_ready = rdma_tx_ready;
  assign rdma_tx            = cclo_tx_data;

  // receive: steer each packet
  typedef enum logic [1:0] { R_IDLE, R_ANN, R_DATA } rstate_e;
  rstate_e      rs;
  net_tx_meta_t pm;
  wire is_write = (pm.op == NET_WRITE);

  assign rdma_rx_meta_ready = (rs == R_IDLE);
  assign cclo_rx_meta_valid = (rs == R_ANN) && !is_write;
  assign cclo_rx_meta       = '{session: pm.session, len: pm.len};
  assign bypass_cmd_valid   = (rs == R_ANN) && is_write;
  assign bypass_cmd         = '{addr: pm.vaddr, len: pm.len};

  assign cclo_rx_data_valid = (rs == R_DATA) && !is_write && rdma_rx_valid;
  assign bypass_data_valid  = (rs == R_DATA) &&  is_write && rdma_rx_valid;
  assign cclo_rx_data       = rdma_rx;
  assign bypass_data        = rdma_rx;
  assign rdma_rx_ready      = (rs == R_DATA) && (is_write ? bypass_data_ready : cclo_rx_data_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs           <= R_IDLE;
      pm           <= '0;
      bypass_count <= '0;
    end else begin
      case (rs)
        R_IDLE: if (rdma_rx_meta_valid) begin pm <= rdma_rx_meta; rs <= R_ANN; end
        R_ANN: if (is_write ? bypass_cmd_ready : cclo_rx_meta_ready) begin
          if (is_write) bypass_count <= bypass_count + 1;
          rs <= R_DATA;
        end
        R_DATA: if (rdma_rx_valid && rdma_rx_ready && rdma_rx.last) rs <= R_IDLE;
        default: rs <= R_IDLE;
      endcase
    end
  end
endmodule
