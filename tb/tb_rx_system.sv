// tb_rx_system: feeds the Rx system packets the way a protocol offload engine
// delivers them: a three-beat eager message on session 1 split over two
// packets, interleaved with a one-beat eager message on session 2, then a
// RNDZ_INIT and a RNDZ_DONE on session 3, all with random stalls on the three
// outputs. Checks the RxBuf manager notifications (session, first flag,
// signature, payload bytes), the controller notifications, the payload beats
// into the NoC (order, dest, last) and a one-beat-per-cycle payload rate.
module tb_rx_system;
  import accl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic meta_valid, meta_ready, data_valid, data_ready;
  net_rx_meta_t meta; axis_t data;
  logic rbm_valid, rbm_ready, uc_valid, uc_ready, noc_valid, noc_ready;
  rbm_notif_t rbm_notif; uc_notif_t uc_notif; axis_t noc;
  logic stall = 1;
  rx_system dut (.*);

  rbm_notif_t rn [$]; uc_notif_t un [$]; axis_t nb [$];
  always @(negedge clk) begin
    rbm_ready = !stall || ($urandom % 3 != 0);
    uc_ready  = !stall || ($urandom % 3 != 0);
    noc_ready = !stall || ($urandom % 3 != 0);
    #2;
    if (rbm_valid && rbm_ready) rn.push_back(rbm_notif);
    if (uc_valid && uc_ready)   un.push_back(uc_notif);
    if (noc_valid && noc_ready) nb.push_back(noc);
  end

  function automatic sig_t mksig(msg_type_e t, int src, int len, int tag);
    sig_t s = '0;
    s.mtype = t; s.src = RANK_W'(src); s.dst = 0; s.len = LEN_W'(len); s.tag = TAG_W'(tag);
    s.seq = 7; s.vaddr = 64'h1234_0000 + 64'(tag);
    return s;
  endfunction

  task automatic pkt(int sess, int nbeats, logic hdr, sig_t s, int base);
    @(negedge clk); meta_valid = 1; meta.session = SESS_W'(sess); meta.len = LEN_W'(64 * nbeats); #1;
    while (!meta_ready) begin @(negedge clk); #1; end
    @(negedge clk); meta_valid = 0;
    for (int b = 0; b < nbeats; b++) begin
      data_valid = 1;
      data.data = (hdr && b == 0) ? DATA_W'(s) : DATA_W'(base + b);
      data.last = (b == nbeats - 1); data.dest = 0; #1;
      while (!data_ready) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    data_valid = 0;
  endtask

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, n0;
    meta_valid = 0; data_valid = 0; meta = '0; data = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    pkt(1, 2, 1, mksig(MSG_EAGER, 4, 192, 11), 100);   // header + first payload beat
    pkt(2, 2, 1, mksig(MSG_EAGER, 5, 64, 12), 200);
    pkt(1, 2, 0, '0, 102);                            // rest of session 1
    pkt(3, 1, 1, mksig(MSG_RNDZ_INIT, 6, 4096, 13), 0);
    pkt(3, 1, 1, mksig(MSG_RNDZ_DONE, 6, 4096, 13), 0);
    repeat (20) @(negedge clk);
    chk(rn.size() == 3, "rbm notif count");
    if (rn.size() == 3) begin
      chk(rn[0].session == 1 && rn[0].first && rn[0].sig.tag == 11 && rn[0].sig.src == 4 && rn[0].bytes == 64, "notif 0");
      chk(rn[1].session == 2 && rn[1].first && rn[1].sig.tag == 12 && rn[1].bytes == 64, "notif 1");
      chk(rn[2].session == 1 && !rn[2].first && rn[2].bytes == 128, "notif 2");
    end
    chk(un.size() == 2, "uc notif count");
    if (un.size() == 2) begin
      chk(un[0].mtype == MSG_RNDZ_INIT && un[0].src == 6 && un[0].tag == 13 && un[0].len == 4096 && un[0].vaddr == 64'h1234_000d, "uc notif 0");
      chk(un[1].mtype == MSG_RNDZ_DONE && un[1].src == 6, "uc notif 1");
    end
    chk(nb.size() == 4, "payload beats");
    if (nb.size() == 4) begin
      chk(nb[0].data == 101 && nb[1].data == 201 && nb[2].data == 102 && nb[3].data == 103, "payload order");
      chk(nb[0].last && nb[1].last && !nb[2].last && nb[3].last, "payload last per packet");
      foreach (nb[i]) chk(nb[i].dest[7:4] == NOC_MEMW_RXBUF, "payload dest");
    end
    // rate: a 64-beat eager packet, outputs never stalled
    stall = 0; n0 = nb.size();
    fork
      pkt(4, 65, 1, mksig(MSG_EAGER, 1, 4096, 14), 0);
      begin
        wait (nb.size() == n0 + 1); t0 = $time;
        wait (nb.size() == n0 + 64);
        $display("rate: 64 payload beats in %0d cycles", ($time - t0) / 10 + 1);
        chk(($time - t0) / 10 + 1 <= 66, "one payload beat per cycle");
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
