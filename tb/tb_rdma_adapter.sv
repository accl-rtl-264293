// tb_rdma_adapter: sends a mix of random SEND and WRITE packets into the
// adapter's receive side with random stalls, and checks that SEND packets
// reach the engine (meta and data) and WRITE packets reach the memory bypass
// (address, length, data) in order, and that the bypass counter counts them.
// The transmit side is checked to pass commands and beats unchanged.
module tb_rdma_adapter;
  import accl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cclo_tx_meta_valid, cclo_tx_meta_ready, cclo_tx_data_valid, cclo_tx_data_ready;
  net_tx_meta_t cclo_tx_meta; axis_t cclo_tx_data;
  logic cclo_rx_meta_valid, cclo_rx_meta_ready, cclo_rx_data_valid, cclo_rx_data_ready;
  net_rx_meta_t cclo_rx_meta; axis_t cclo_rx_data;
  logic rdma_req_valid, rdma_req_ready, rdma_tx_valid, rdma_tx_ready;
  net_tx_meta_t rdma_req; axis_t rdma_tx;
  logic rdma_rx_meta_valid, rdma_rx_meta_ready, rdma_rx_valid, rdma_rx_ready;
  net_tx_meta_t rdma_rx_meta; axis_t rdma_rx;
  logic bypass_cmd_valid, bypass_cmd_ready, bypass_data_valid, bypass_data_ready;
  mem_cmd_t bypass_cmd; axis_t bypass_data;
  logic [31:0] bypass_count;
  rdma_adapter dut (.*);

  net_tx_meta_t exp_m [$]; logic [31:0] exp_d [$];    // expected, in order, per side
  net_tx_meta_t got_sm [$], got_wm [$]; logic [31:0] got_sd [$], got_wd [$];
  int nwrites = 0;

  always @(negedge clk) begin
    cclo_rx_meta_ready = ($urandom % 3 != 0); cclo_rx_data_ready = ($urandom % 3 != 0);
    bypass_cmd_ready = ($urandom % 3 != 0); bypass_data_ready = ($urandom % 3 != 0);
    #2;
    if (cclo_rx_meta_valid && cclo_rx_meta_ready) got_sm.push_back('{op: NET_SEND, session: cclo_rx_meta.session, len: cclo_rx_meta.len, vaddr: '0});
    if (bypass_cmd_valid && bypass_cmd_ready) got_wm.push_back('{op: NET_WRITE, session: '0, len: bypass_cmd.len, vaddr: bypass_cmd.addr});
    if (cclo_rx_data_valid && cclo_rx_data_ready) got_sd.push_back(cclo_rx_data.data[31:0]);
    if (bypass_data_valid && bypass_data_ready) got_wd.push_back(bypass_data.data[31:0]);
  end

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int si = 0, wi = 0, sdi = 0, wdi = 0;
    net_tx_meta_t m;
    cclo_tx_meta_valid = 0; cclo_tx_data_valid = 0; rdma_rx_meta_valid = 0; rdma_rx_valid = 0;
    rdma_req_ready = 1; rdma_tx_ready = 1; cclo_tx_meta = '0; cclo_tx_data = '0; rdma_rx_meta = '0; rdma_rx = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // transmit pass-through
    @(negedge clk); cclo_tx_meta_valid = 1; cclo_tx_meta = '{op: NET_WRITE, session: 16'd3, len: 32'd64, vaddr: 64'h55};
    cclo_tx_data_valid = 1; cclo_tx_data = '{data: 512'd77, dest: 8'd0, last: 1'b1}; #1;
    chk(rdma_req_valid && rdma_req == cclo_tx_meta && cclo_tx_meta_ready, "tx meta pass");
    chk(rdma_tx_valid && rdma_tx == cclo_tx_data && cclo_tx_data_ready, "tx data pass");
    @(negedge clk); cclo_tx_meta_valid = 0; cclo_tx_data_valid = 0;
    // receive demux
    for (int p = 0; p < 40; p++) begin
      int n;
      n = 1 + $urandom % 4;
      m.op = ($urandom % 2) ? NET_WRITE : NET_SEND; m.session = SESS_W'($urandom % 16);
      m.len = LEN_W'(64 * n); m.vaddr = 64'($urandom) << 6;
      if (m.op == NET_WRITE) m.session = '0; else m.vaddr = '0;
      if (m.op == NET_WRITE) nwrites++;
      exp_m.push_back(m);
      @(negedge clk); rdma_rx_meta_valid = 1; rdma_rx_meta = m; #1;
      while (!rdma_rx_meta_ready) begin @(negedge clk); #1; end
      @(negedge clk); rdma_rx_meta_valid = 0;
      for (int b = 0; b < n; b++) begin
        rdma_rx_valid = 1; rdma_rx.data = DATA_W'(p * 16 + b); rdma_rx.last = (b == n - 1); #1;
        while (!rdma_rx_ready) begin @(negedge clk); #1; end
        @(negedge clk);
      end
      rdma_rx_valid = 0;
    end
    repeat (20) @(negedge clk);
    foreach (exp_m[p]) begin
      int n;
      n = int'(exp_m[p].len) / 64;
      if (exp_m[p].op == NET_SEND) begin
        chk(si < got_sm.size() && got_sm[si] == exp_m[p], "send meta"); si++;
        for (int b = 0; b < n; b++) begin chk(sdi < got_sd.size() && got_sd[sdi] == 32'(p * 16 + b), "send data"); sdi++; end
      end else begin
        chk(wi < got_wm.size() && got_wm[wi] == exp_m[p], "write cmd"); wi++;
        for (int b = 0; b < n; b++) begin chk(wdi < got_wd.size() && got_wd[wdi] == 32'(p * 16 + b), "write data"); wdi++; end
      end
    end
    chk(si == got_sm.size() && wi == got_wm.size() && sdi == got_sd.size() && wdi == got_wd.size(), "no extra traffic");
    chk(bypass_count == 32'(nwrites), "bypass counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
