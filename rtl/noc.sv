// noc: the on-chip stream network of the data plane. Every stream inside the
// engine enters the switch with a dest field, and the switch delivers it to
// the output named by dest[7:4]; dest[3:0] travels with the data (a plugin
// reads its function from it). Each output arbitrates among the inputs that
// address it, round robin, and holds its grant until the granted packet's last
// beat has passed, so packets never interleave on an output. The routing by
// dest follows the paper; packet-level locking and the round-robin order are
// this design's choices. The path is combinational: a beat crosses the switch
// in the cycle it is accepted. An input whose dest names no output is held.
module noc
  import accl_pkg::*;
#(
  parameter int NIN  = NOC_NIN,
  parameter int NOUT = NOC_NOUT
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid [NIN],
  output logic  in_ready [NIN],
  input  axis_t in_data  [NIN],
  output logic  out_valid[NOUT],
  input  logic  out_ready[NOUT],
  output axis_t out_data [NOUT]
);
  localparam int IW = (NIN > 1) ? $clog2(NIN) : 1;
  logic          locked [NOUT];
  logic [IW-1:0] owner  [NOUT];   // granted input while locked
  logic [IW-1:0] rrptr  [NOUT];   // next input to prefer
  logic [IW-1:0] sel    [NOUT];
  logic          selv   [NOUT];

  // choose an input per output
  always_comb begin
    int i;
    i = 0;
    for (int o = 0; o < NOUT; o++) begin
      sel[o]  = owner[o];
      selv[o] = locked[o] && in_valid[owner[o]] && (int'(in_data[owner[o]].dest[7:4]) == o);
      if (!locked[o]) begin
        for (int k = NIN - 1; k >= 0; k--) begin
          i = (int'(rrptr[o]) + k) % NIN;
          if (in_valid[i] && int'(in_data[i].dest[7:4]) == o) begin
            sel[o]  = IW'(i);
            selv[o] = 1'b1;
          end
        end
      end
    end
  end

  always_comb begin
    for (int o = 0; o < NOUT; o++) begin
      out_valid[o] = selv[o];
      out_data[o]  = in_data[sel[o]];
    end
    for (int n = 0; n < NIN; n++) begin
      in_ready[n] = 1'b0;
      for (int o = 0; o < NOUT; o++)
        if (selv[o] && int'(sel[o]) == n && out_ready[o]) in_ready[n] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NOUT; o++) begin
        locked[o] <= 1'b0;
        owner[o]  <= '0;
        rrptr[o]  <= '0;
      end
    end else begin
      for (int o = 0; o < NOUT; o++) begin
        if (selv[o] && out_ready[o]) begin
          if (out_data[o].last) begin
            locked[o] <= 1'b0;
            rrptr[o]  <= IW'((int'(sel[o]) + 1) % NIN);
          end else begin
            locked[o] <= 1'b1;
            owner[o]  <= sel[o];
          end
        end
      end
    end
  end
endmodule
