// tb_tx_system: drives the Tx system's two command queues and its NoC payload
// input, with random stalls on the network side, and checks the network
// commands and beats for an eager message (SEND of signature + payload), a
// controller RNDZ_INIT (SEND of the signature alone) and a rendezvous
// RNDZ_MSG (RDMA WRITE of the payload to the remote address, then a SEND of
// RNDZ_DONE), plus the done pulses back to the DMP and the payload rate.
module tb_tx_system;
  import accl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [RANK_W-1:0] local_rank = 3;
  logic dmp_valid, dmp_ready, dmp_done, uc_valid, uc_ready, noc_valid, noc_ready;
  tx_ctrl_t dmp_ctrl, uc_ctrl; axis_t noc;
  logic meta_valid, meta_ready, data_valid, data_ready;
  net_tx_meta_t meta; axis_t data;
  logic stall = 1;
  tx_system dut (.*);

  net_tx_meta_t mq [$]; axis_t dq [$]; int dones = 0;
  always @(negedge clk) begin
    meta_ready = !stall || ($urandom % 3 != 0);
    data_ready = !stall || ($urandom % 3 != 0);
    #2;
    if (meta_valid && meta_ready) mq.push_back(meta);
    if (data_valid && data_ready) dq.push_back(data);
    if (dmp_done) dones++;
  end

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic payload(int n, int base);
    for (int b = 0; b < n; b++) begin
      @(negedge clk); noc_valid = 1; noc.data = DATA_W'(base + b); noc.last = (b == n - 1); noc.dest = {NOC_TX, 4'd0}; #1;
      while (!noc_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk); noc_valid = 0;
  endtask

  task automatic cmd_dmp(msg_type_e t, int len, logic [63:0] va);
    @(negedge clk); dmp_valid = 1;
    dmp_ctrl = '{mtype: t, dst: 8'd1, session: 16'd21, len: LEN_W'(len), tag: 16'd5, seq: 16'd9, vaddr: va}; #1;
    while (!dmp_ready) begin @(negedge clk); #1; end
    @(negedge clk); dmp_valid = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sig_t s;
    int t0;
    dmp_valid = 0; uc_valid = 0; noc_valid = 0; dmp_ctrl = '0; uc_ctrl = '0; noc = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // eager message of two beats
    fork cmd_dmp(MSG_EAGER, 128, 0); payload(2, 50); join
    repeat (30) @(negedge clk);
    chk(mq.size() == 1 && mq[0].op == NET_SEND && mq[0].session == 21 && mq[0].len == 192, "eager meta");
    chk(dq.size() == 3, "eager beats");
    if (dq.size() == 3) begin
      s = sig_t'(dq[0].data[SIG_W-1:0]);
      chk(s.mtype == MSG_EAGER && s.src == 3 && s.dst == 1 && s.len == 128 && s.tag == 5 && s.seq == 9, "eager signature");
      chk(dq[1].data == 50 && dq[2].data == 51 && dq[2].last, "eager payload");
    end
    chk(dones == 1, "eager done");
    mq.delete(); dq.delete();
    // controller handshake
    @(negedge clk); uc_valid = 1;
    uc_ctrl = '{mtype: MSG_RNDZ_INIT, dst: 8'd2, session: 16'd22, len: 32'd4096, tag: 16'd6, seq: 16'd1, vaddr: 64'hABC0}; #1;
    while (!uc_ready) begin @(negedge clk); #1; end
    @(negedge clk); uc_valid = 0;
    repeat (20) @(negedge clk);
    chk(mq.size() == 1 && mq[0].op == NET_SEND && mq[0].session == 22 && mq[0].len == 64, "init meta");
    chk(dq.size() == 1 && dq[0].last, "init one beat");
    if (dq.size() == 1) begin
      s = sig_t'(dq[0].data[SIG_W-1:0]);
      chk(s.mtype == MSG_RNDZ_INIT && s.vaddr == 64'hABC0 && s.len == 4096, "init signature");
    end
    chk(dones == 1, "no done for controller command");
    mq.delete(); dq.delete();
    // rendezvous payload
    fork cmd_dmp(MSG_RNDZ_MSG, 192, 64'h7000); payload(3, 60); join
    repeat (30) @(negedge clk);
    chk(mq.size() == 2, "rndz metas");
    if (mq.size() == 2) begin
      chk(mq[0].op == NET_WRITE && mq[0].vaddr == 64'h7000 && mq[0].len == 192, "write meta");
      chk(mq[1].op == NET_SEND && mq[1].len == 64, "done meta");
    end
    chk(dq.size() == 4, "rndz beats");
    if (dq.size() == 4) begin
      s = sig_t'(dq[3].data[SIG_W-1:0]);
      chk(dq[0].data == 60 && dq[2].data == 62 && dq[2].last, "write payload");
      chk(s.mtype == MSG_RNDZ_DONE && s.dst == 1, "done signature");
    end
    chk(dones == 2, "rndz done");
    // rate: 64-beat eager message, no stalls
    stall = 0; mq.delete(); dq.delete();
    fork
      cmd_dmp(MSG_EAGER, 4096, 0);
      payload(64, 0);
      begin
        wait (dq.size() == 1); t0 = $time;
        wait (dq.size() == 65);
        $display("rate: 65 beats in %0d cycles", ($time - t0) / 10 + 1);
        chk(($time - t0) / 10 + 1 <= 67, "one beat per cycle");
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
