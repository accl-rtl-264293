// mem_model: behavioural model of the memory system behind the engine's
// data-mover channels (not synthesizable, for testbenches only). One sparse
// byte-addressed store of 64-byte beats serves two read channels and three
// write channels. A read command streams len/64 beats, one per cycle when the
// consumer is ready, the last beat flagged. A write command takes len/64 beats
// and then pulses its status output once. Addresses are multiples of 64.
// Commands and data use valid/ready; the model accepts a command only when the
// previous one on that channel has finished. Testbenches preload and inspect
// the store with poke() and peek().
module mem_model
  import accl_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     rd_cmd_valid [2],
  output logic     rd_cmd_ready [2],
  input  mem_cmd_t rd_cmd       [2],
  output logic     rd_valid     [2],
  input  logic     rd_ready     [2],
  output axis_t    rd           [2],
  input  logic     wr_cmd_valid [3],
  output logic     wr_cmd_ready [3],
  input  mem_cmd_t wr_cmd       [3],
  input  logic     wr_valid     [3],
  output logic     wr_ready     [3],
  input  axis_t    wr           [3],
  output logic     wr_sts       [3]
);
  logic [DATA_W-1:0] store [longint];
  longint rd_addr [2], wr_addr [3];
  int     rd_left [2], wr_left [3];
  int     writes_done = 0;

  function automatic void poke(longint addr, logic [DATA_W-1:0] v);
    store[addr >> 6] = v;
  endfunction
  function automatic logic [DATA_W-1:0] peek(longint addr);
    if (store.exists(addr >> 6)) return store[addr >> 6];
    return '0;
  endfunction

  for (genvar c = 0; c < 2; c++) begin : g_rd
    assign rd_cmd_ready[c] = (rd_left[c] == 0);
    assign rd_valid[c]     = (rd_left[c] != 0);
    always_comb begin
      rd[c].data = peek(rd_addr[c]);
      rd[c].last = (rd_left[c] == 1);
      rd[c].dest = '0;
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin rd_left[c] <= 0; rd_addr[c] <= 0; end
      else if (rd_left[c] == 0) begin
        if (rd_cmd_valid[c]) begin
          rd_addr[c] <= longint'(rd_cmd[c].addr);
          rd_left[c] <= int'(rd_cmd[c].len >> 6);
        end
      end else if (rd_ready[c]) begin
        rd_addr[c] <= rd_addr[c] + 64;
        rd_left[c] <= rd_left[c] - 1;
      end
    end
  end

  for (genvar c = 0; c < 3; c++) begin : g_wr
    assign wr_cmd_ready[c] = (wr_left[c] == 0);
    assign wr_ready[c]     = (wr_left[c] != 0);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin wr_left[c] <= 0; wr_addr[c] <= 0; wr_sts[c] <= 0; end
      else begin
        wr_sts[c] <= 0;
        if (wr_left[c] == 0) begin
          if (wr_cmd_valid[c]) begin
            wr_addr[c] <= longint'(wr_cmd[c].addr);
            wr_left[c] <= int'(wr_cmd[c].len >> 6);
          end
        end else if (wr_valid[c]) begin
          store[wr_addr[c] >> 6] = wr[c].data;
          wr_addr[c] <= wr_addr[c] + 64;
          wr_left[c] <= wr_left[c] - 1;
          if (wr_left[c] == 1) begin wr_sts[c] <= 1; writes_done++; end
        end
      end
    end
  end
endmodule
