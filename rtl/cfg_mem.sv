// cfg_mem: the configuration memory of the control plane. It holds the
// communicator (own rank, number of ranks, the session or queue-pair id that
// reaches each rank) and the pool of receive buffers allocated by the host
// (base address and size of each). The host reads and writes it through a
// 32-bit word-addressed MMIO port; the embedded controller, the DMP and the
// RxBuf manager read it through parallel outputs. The paper keeps this state
// in a small BRAM; here it is a register array so that several blocks can read
// it in the same cycle (this design's choice). Word map (own choice):
//   0x000 own rank            0x001 communicator size
//   0x100+r  session id of rank r
//   0x200+4i rx buffer i address [31:0], +1 address [63:32], +2 size in bytes
// Writes take effect at the clock edge; MMIO reads return one cycle later.
module cfg_mem
  import accl_pkg::*;
#(
  parameter int MAX_RANKS = 16,
  parameter int NRXBUF    = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // MMIO
  input  logic              mmio_we,
  input  logic              mmio_re,
  input  logic [11:0]       mmio_addr,
  input  logic [31:0]       mmio_wdata,
  output logic [31:0]       mmio_rdata,
  // parallel read-out
  output logic [RANK_W-1:0] local_rank,
  output logic [RANK_W-1:0] comm_size,
  output logic [SESS_W-1:0] session   [MAX_RANKS],
  output logic [ADDR_W-1:0] rxbuf_addr[NRXBUF],
  output logic [LEN_W-1:0]  rxbuf_size[NRXBUF]
);
  wire [3:0] page = mmio_addr[11:8];
  wire [7:0] off  = mmio_addr[7:0];
  wire [5:0] bi   = off[7:2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      local_rank <= '0;
      comm_size  <= RANK_W'(1);
      for (int r = 0; r < MAX_RANKS; r++) session[r] <= '0;
      for (int i = 0; i < NRXBUF; i++) begin
        rxbuf_addr[i] <= '0;
        rxbuf_size[i] <= '0;
      end
    end else if (mmio_we) begin
      case (page)
        4'h0: if (off == 8'd0) local_rank <= mmio_wdata[RANK_W-1:0];
              else if (off == 8'd1) comm_size <= mmio_wdata[RANK_W-1:0];
        4'h1: if (int'(off) < MAX_RANKS) session[off] <= mmio_wdata[SESS_W-1:0];
        4'h2: if (int'(bi) < NRXBUF) begin
                case (off[1:0])
                  2'd0: rxbuf_addr[bi][31:0]  <= mmio_wdata;
                  2'd1: rxbuf_addr[bi][63:32] <= mmio_wdata;
                  2'd2: rxbuf_size[bi]        <= mmio_wdata;
                  default: ;
                endcase
              end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mmio_rdata <= '0;
    else if (mmio_re) begin
      mmio_rdata <= '0;
      case (page)
        4'h0: if (off == 8'd0) mmio_rdata <= 32'(local_rank);
              else if (off == 8'd1) mmio_rdata <= 32'(comm_size);
        4'h1: if (int'(off) < MAX_RANKS) mmio_rdata <= 32'(session[off]);
        4'h2: if (int'(bi) < NRXBUF) begin
                case (off[1:0])
                  2'd0: mmio_rdata <= rxbuf_addr[bi][31:0];
                  2'd1: mmio_rdata <= rxbuf_addr[bi][63:32];
                  2'd2: mmio_rdata <= rxbuf_size[bi];
                  default: ;
                endcase
              end
        default: ;
      endcase
    end
  end
endmodule
