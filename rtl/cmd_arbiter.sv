// cmd_arbiter: the command arbiter at the top of the control plane. Two
// requesters issue collective commands: the host (CPU Ctrl, through MMIO) and
// an FPGA application kernel (FPGA Kernel Ctrl, a command stream). The arbiter
// forwards one command at a time to the embedded controller, alternating
// between the two when both wait (round robin, this design's choice), and
// remembers the origin of each forwarded command in a queue so that the
// completion status the controller returns is routed back to the requester
// that issued it. Both sides use valid/ready handshakes; a command moves from
// input to output in the same cycle (no register on the path), a status
// likewise.
module cmd_arbiter
  import accl_pkg::*;
#(
  parameter int INFLIGHT = 4          // commands that may await a status
) (
  input  logic     clk,
  input  logic     rst_n,
  // host command / status
  input  logic     host_cmd_valid,
  output logic     host_cmd_ready,
  input  ccl_cmd_t host_cmd,
  output logic     host_sts_valid,
  input  logic     host_sts_ready,
  output ccl_sts_t host_sts,
  // kernel command / status
  input  logic     krn_cmd_valid,
  output logic     krn_cmd_ready,
  input  ccl_cmd_t krn_cmd,
  output logic     krn_sts_valid,
  input  logic     krn_sts_ready,
  output ccl_sts_t krn_sts,
  // to / from the embedded controller
  output logic     uc_cmd_valid,
  input  logic     uc_cmd_ready,
  output ccl_cmd_t uc_cmd,
  input  logic     uc_sts_valid,
  output logic     uc_sts_ready,
  input  ccl_sts_t uc_sts
);
  logic last_krn;            // the kernel was granted last
  logic pick_krn;
  logic org_in_ready, org_out_valid, org_out;

  always_comb begin
    if (host_cmd_valid && krn_cmd_valid) pick_krn = !last_krn;
    else                                 pick_krn = krn_cmd_valid;
  end

  assign uc_cmd_valid   = (host_cmd_valid || krn_cmd_valid) && org_in_ready;
  assign uc_cmd         = pick_krn ? krn_cmd : host_cmd;
  assign host_cmd_ready = uc_cmd_ready && org_in_ready && !pick_krn;
  assign krn_cmd_ready  = uc_cmd_ready && org_in_ready &&  pick_krn;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_krn <= 1'b0;
    else if (uc_cmd_valid && uc_cmd_ready) last_krn <= pick_krn;
  end

  sync_fifo #(.T(logic), .DEPTH(INFLIGHT)) u_origin (
    .clk, .rst_n,
    .in_valid (uc_cmd_valid && uc_cmd_ready), .in_ready(org_in_ready), .in_data(pick_krn),
    .out_valid(org_out_valid), .out_ready(uc_sts_valid && uc_sts_ready), .out_data(org_out)
  );

  always_comb begin
    host_sts        = uc_sts;
    krn_sts         = uc_sts;
    host_sts.origin = 1'b0;
    krn_sts.origin  = 1'b1;
    host_sts_valid  = uc_sts_valid && org_out_valid && !org_out;
    krn_sts_valid   = uc_sts_valid && org_out_valid &&  org_out;
    uc_sts_ready    = org_out_valid && (org_out ? krn_sts_ready : host_sts_ready);
  end
endmodule
