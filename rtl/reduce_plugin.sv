// reduce_plugin: the streaming reduction plugin of the data plane. It takes
// two operand streams of 64-byte beats, combines them lane by lane and emits
// one result beat per operand pair. The function is chosen, as the paper
// describes, by the dest field of the input stream (dest[3:0] of operand 0):
// sum or max over 32-bit or 64-bit signed integers (this set of functions is
// this design's choice; the paper names sum and max). The result's dest field
// is given by res_dest, which the data movement processor sets for the
// instruction in flight. A result appears the cycle after
// both operands are accepted, and the plugin sustains one beat per cycle.
// The result's last flag is operand 0's.
module reduce_plugin
  import accl_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in0_valid,
  output logic              in0_ready,
  input  axis_t             in0,
  input  logic              in1_valid,
  output logic              in1_ready,
  input  axis_t             in1,
  input  logic [DEST_W-1:0] res_dest,
  output logic              out_valid,
  input  logic              out_ready,
  output axis_t             out
);
  logic [DATA_W-1:0] r;
  logic take;

  always_comb begin
    r = '0;
    case (red_func_e'(in0.dest[3:0]))
      RED_SUM_I32: for (int i = 0; i < DATA_W/32; i++)
                     r[i*32 +: 32] = in0.data[i*32 +: 32] + in1.data[i*32 +: 32];
      RED_MAX_I32: for (int i = 0; i < DATA_W/32; i++)
                     r[i*32 +: 32] = ($signed(in0.data[i*32 +: 32]) > $signed(in1.data[i*32 +: 32]))
                                     ? in0.data[i*32 +: 32] : in1.data[i*32 +: 32];
      RED_SUM_I64: for (int i = 0; i < DATA_W/64; i++)
                     r[i*64 +: 64] = in0.data[i*64 +: 64] + in1.data[i*64 +: 64];
      RED_MAX_I64: for (int i = 0; i < DATA_W/64; i++)
                     r[i*64 +: 64] = ($signed(in0.data[i*64 +: 64]) > $signed(in1.data[i*64 +: 64]))
                                     ? in0.data[i*64 +: 64] : in1.data[i*64 +: 64];
      default: r = in0.data;
    endcase
  end

  // The result goes through a two-entry queue whose ready depends only on
  // its own fill level, so the operand handshake never waits on the consumer
  // combinationally.
  axis_t res;
  logic  q_ready;
  always_comb begin
    res.data = r;
    res.last = in0.last;
    res.dest = res_dest;
  end
  assign take      = in0_valid && in1_valid && q_ready;
  assign in0_ready = in1_valid && q_ready;
  assign in1_ready = in0_valid && q_ready;

  sync_fifo #(.T(axis_t), .DEPTH(2)) u_outq (
    .clk, .rst_n, .in_valid(take), .in_ready(q_ready), .in_data(res),
    .out_valid, .out_ready, .out_data(out));
endmodule
