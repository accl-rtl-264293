// sync_fifo: single-clock first-in first-out queue with valid/ready on both
// sides. The command paths of the engine are built from it: every command
// path between control blocks holds a queue so that several instructions can
// be in flight. Storage is a register array of DEPTH entries (a power of two);
// a push and a pop may happen in the same cycle. Data written at a clock edge
// is visible at the output from the next cycle on.
module sync_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T mem [DEPTH];
  logic [AW:0] wp, rp;
  wire  [AW:0] used = wp - rp;

  assign in_ready  = (used != (AW+1)'(DEPTH));
  assign out_valid = (used != '0);
  assign out_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (in_valid && in_ready) wp <= wp + 1'b1;
      if (out_valid && out_ready) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp[AW-1:0]] <= in_data;
  end
endmodule
