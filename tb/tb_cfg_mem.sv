// tb_cfg_mem: writes the communicator and the rx buffer pool through MMIO,
// then checks every MMIO read-back (one cycle latency) and every parallel
// output against what was written, and that reset values hold elsewhere.
module tb_cfg_mem;
  import accl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic mmio_we, mmio_re;
  logic [11:0] mmio_addr;
  logic [31:0] mmio_wdata, mmio_rdata;
  logic [RANK_W-1:0] local_rank, comm_size;
  logic [SESS_W-1:0] session [16];
  logic [ADDR_W-1:0] rxbuf_addr [16];
  logic [LEN_W-1:0]  rxbuf_size [16];
  cfg_mem dut (.*);

  task automatic wr(logic [11:0] a, logic [31:0] d);
    @(negedge clk); mmio_we = 1; mmio_addr = a; mmio_wdata = d;
    @(negedge clk); mmio_we = 0;
  endtask
  task automatic rd_chk(logic [11:0] a, logic [31:0] e);
    @(negedge clk); mmio_re = 1; mmio_addr = a;
    @(negedge clk); mmio_re = 0;
    checks++; if (mmio_rdata !== e) begin failures++; $display("FAIL read %h: %h != %h", a, mmio_rdata, e); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mmio_we = 0; mmio_re = 0; mmio_addr = 0; mmio_wdata = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    checks++; if (comm_size !== 1 || local_rank !== 0) failures++;
    wr(12'h000, 5); wr(12'h001, 9);
    for (int r = 0; r < 16; r++) wr(12'h100 + 12'(r), 32'h300 + 32'(r) * 3);
    for (int i = 0; i < 16; i++) begin
      wr(12'h200 + 12'(4*i), 32'h1000_0000 + 32'(i) * 32'h40);
      wr(12'h201 + 12'(4*i), 32'(i));
      wr(12'h202 + 12'(4*i), 32'h800 + 32'(i));
    end
    rd_chk(12'h000, 5); rd_chk(12'h001, 9);
    for (int r = 0; r < 16; r++) rd_chk(12'h100 + 12'(r), 32'h300 + 32'(r) * 3);
    for (int i = 0; i < 16; i++) begin
      rd_chk(12'h200 + 12'(4*i), 32'h1000_0000 + 32'(i) * 32'h40);
      rd_chk(12'h201 + 12'(4*i), 32'(i));
      rd_chk(12'h202 + 12'(4*i), 32'h800 + 32'(i));
    end
    rd_chk(12'h050, 0);
    checks++; if (local_rank !== 5 || comm_size !== 9) failures++;
    for (int r = 0; r < 16; r++) begin checks++; if (session[r] !== 16'(16'h300 + r * 3)) failures++; end
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (rxbuf_addr[i] !== {32'(i), 32'h1000_0000 + 32'(i) * 32'h40} || rxbuf_size[i] !== 32'h800 + 32'(i)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
