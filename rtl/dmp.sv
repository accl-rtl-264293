// dmp: the data movement processor. It executes microcode from the embedded
// controller (path 4). Each instruction has two operand slots, describing data
// that enters the engine (from memory, from the kernel stream, or from an
// eager rx buffer), and one result slot, describing where data leaves it (to
// memory, to the kernel stream, or to the network through the Tx system).
// For an rx-buffer operand the DMP first asks the RxBuf manager whether the
// expected message (source, tag, sequence number) has arrived (path 6),
// repeating the question every RETRY cycles until it has. It then sets the
// NoC routes for the instruction (one operand: straight to the result; two
// operands: through the reduction plugin, whose function travels in the dest
// field), issues the memory read commands, the memory write or Tx command of
// the result, waits for the result's acknowledgement (memory write status, Tx
// done, or the last beat handed to the kernel), frees the rx buffer and
// reports completion to the controller. The slot structure and the periodic
// check follow the paper; the encoding, the rule that only operand 1 may come
// from an rx buffer, and the execution of one instruction at a time (queued
// instructions wait, so routes never change under data in flight) are this
// design's choices.
module dmp
  import accl_pkg::*;
#(
  parameter int RETRY = 16      // cycles between two rx-buffer checks
) (
  input  logic              clk,
  input  logic              rst_n,
  // microcode in, completion out
  input  logic              instr_valid,
  output logic              instr_ready,
  input  dmp_instr_t        instr,
  output logic              done_valid,
  input  logic              done_ready,
  // RxBuf manager
  output logic              seek_valid,
  input  logic              seek_ready,
  output rbm_seek_t         seek,
  input  logic              rsp_valid,
  output logic              rsp_ready,
  input  rbm_seek_rsp_t     rsp,
  output logic              release_valid,
  output logic [7:0]        release_idx,
  // memory channels
  output logic              rd0_valid,
  input  logic              rd0_ready,
  output mem_cmd_t          rd0_cmd,
  output logic              rd1_valid,
  input  logic              rd1_ready,
  output mem_cmd_t          rd1_cmd,
  output logic              wr1_valid,
  input  logic              wr1_ready,
  output mem_cmd_t          wr1_cmd,
  input  logic              wr1_sts,
  // Tx system
  output logic              tx_valid,
  input  logic              tx_ready,
  output tx_ctrl_t          tx_ctrl,
  input  logic              tx_done,
  // kernel stream acknowledgement
  input  logic              krn_out_last,
  // routes for the instruction in flight
  output logic [DEST_W-1:0] memr0_dest,
  output logic [DEST_W-1:0] memr1_dest,
  output logic [DEST_W-1:0] krn_dest,
  output logic [DEST_W-1:0] red_dest,
  output logic              krn_en,
  // number of rx-buffer checks that missed (for status / tests)
  output logic [31:0]       miss_count
);
  typedef enum logic [2:0] { S_IDLE, S_SEEK, S_RSP, S_WAITR, S_ISSUE, S_WAIT, S_DONE } state_e;
  state_e     st;
  dmp_instr_t I;
  logic [ADDR_W-1:0] rx_addr;
  logic [7:0]        rx_idx;
  logic [$clog2(RETRY+1)-1:0] wcnt;
  logic need_rd0, need_rd1, need_wr, need_tx;
  logic acked;

  wire two_ops = (I.op0.src != OPS_NONE) && (I.op1.src != OPS_NONE);
  logic [3:0] res_port;
  always_comb begin
    case (I.res.dst)
      RES_MEM:    res_port = NOC_MEMW_RES;
      RES_STREAM: res_port = NOC_KRN_OUT;
      default:    res_port = NOC_TX;
    endcase
  end
  wire [DEST_W-1:0] op0_route = two_ops ? {NOC_RED_IN0, 4'(I.func)} : {res_port, 4'd0};
  wire [DEST_W-1:0] op1_route = two_ops ? {NOC_RED_IN1, 4'(I.func)} : {res_port, 4'd0};
  assign memr0_dest = op0_route;
  assign memr1_dest = op1_route;
  assign krn_dest   = (I.op0.src == OPS_STREAM) ? op0_route : op1_route;
  assign red_dest   = {res_port, 4'd0};
  assign krn_en     = (st == S_ISSUE || st == S_WAIT) &&
                      (I.op0.src == OPS_STREAM || I.op1.src == OPS_STREAM);

  assign instr_ready = (st == S_IDLE);
  assign seek_valid  = (st == S_SEEK);
  assign seek        = '{src: I.op1.rank, tag: I.op1.tag, seq: I.op1.seq};
  assign rsp_ready   = (st == S_RSP);
  assign done_valid  = (st == S_DONE);

  assign rd0_valid = (st == S_ISSUE) && need_rd0;
  assign rd0_cmd   = '{addr: I.op0.addr, len: I.len};
  assign rd1_valid = (st == S_ISSUE) && need_rd1;
  assign rd1_cmd   = '{addr: (I.op1.src == OPS_RXBUF) ? rx_addr : I.op1.addr, len: I.len};
  assign wr1_valid = (st == S_ISSUE) && need_wr;
  assign wr1_cmd   = '{addr: I.res.addr, len: I.len};
  assign tx_valid  = (st == S_ISSUE) && need_tx;
  always_comb begin
    tx_ctrl         = '0;
    tx_ctrl.mtype   = I.res.rndz ? MSG_RNDZ_MSG : MSG_EAGER;
    tx_ctrl.dst     = I.res.rank;
    tx_ctrl.session = I.res.session;
    tx_ctrl.len     = I.len;
    tx_ctrl.tag     = I.res.tag;
    tx_ctrl.seq     = I.res.seq;
    tx_ctrl.vaddr   = I.res.addr;
  end

  wire res_ack = (I.res.dst == RES_MEM    && wr1_sts) ||
                 (I.res.dst == RES_NET    && tx_done) ||
                 (I.res.dst == RES_STREAM && krn_out_last);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st            <= S_IDLE;
      I             <= '0;
      need_rd0      <= 1'b0;
      need_rd1      <= 1'b0;
      need_wr       <= 1'b0;
      need_tx       <= 1'b0;
      acked         <= 1'b0;
      wcnt          <= '0;
      release_valid <= 1'b0;
      release_idx   <= '0;
      rx_addr       <= '0;
      rx_idx        <= '0;
      miss_count    <= '0;
    end else begin
      release_valid <= 1'b0;
      case (st)
        S_IDLE: if (instr_valid) begin
          I        <= instr;
          need_rd0 <= (instr.op0.src == OPS_MEM);
          need_rd1 <= (instr.op1.src == OPS_MEM) || (instr.op1.src == OPS_RXBUF);
          need_wr  <= (instr.res.dst == RES_MEM);
          need_tx  <= (instr.res.dst == RES_NET);
          acked    <= 1'b0;
          st       <= (instr.op1.src == OPS_RXBUF) ? S_SEEK : S_ISSUE;
        end
        S_SEEK: if (seek_ready) st <= S_RSP;
        S_RSP: if (rsp_valid) begin
          if (rsp.hit) begin
            rx_addr <= rsp.addr;
            rx_idx  <= rsp.idx;
            st      <= S_ISSUE;
          end else begin
            miss_count <= miss_count + 1;
            wcnt       <= '0;
            st         <= S_WAITR;
          end
        end
        S_WAITR: begin
          wcnt <= wcnt + 1'b1;
          if (int'(wcnt) >= RETRY - 1) st <= S_SEEK;
        end
        S_ISSUE: begin
          if (rd0_valid && rd0_ready) need_rd0 <= 1'b0;
          if (rd1_valid && rd1_ready) need_rd1 <= 1'b0;
          if (wr1_valid && wr1_ready) need_wr  <= 1'b0;
          if (tx_valid  && tx_ready)  need_tx  <= 1'b0;
          if (res_ack) acked <= 1'b1;
          if ((!need_rd0 || rd0_ready) && (!need_rd1 || rd1_ready) &&
              (!need_wr || wr1_ready) && (!need_tx || tx_ready))
            st <= S_WAIT;
        end
        S_WAIT: if (res_ack || acked || I.res.dst == RES_NONE) begin
          if (I.op1.src == OPS_RXBUF) begin
            release_valid <= 1'b1;
            release_idx   <= rx_idx;
          end
          st <= S_DONE;
        end
        S_DONE: if (done_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
