// tb_uc_ctrl: plays rank 1 of a three-rank communicator. Commands go into the
// controller and the test checks the DMP instructions and Tx commands it
// produces: NOP, eager SEND (and its per-peer sequence number), eager RECV,
// rendezvous RECV (RNDZ_INIT out, status only after RNDZ_DONE), rendezvous
// SEND (waits for RNDZ_INIT, offered together with the command, then writes
// to the announced address), eager BCAST as root, and ring REDUCE as root
// (combine own operand with the rx buffer from the previous rank).
module tb_uc_ctrl;
  import accl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [RANK_W-1:0] local_rank = 1, comm_size = 3;
  logic [SESS_W-1:0] session [16];
  logic cmd_valid, cmd_ready, sts_valid, sts_ready, dmp_valid, dmp_ready, dmp_done_valid, dmp_done_ready;
  logic tx_valid, tx_ready, notif_valid, notif_ready;
  ccl_cmd_t cmd; ccl_sts_t sts; dmp_instr_t dmp_instr; tx_ctrl_t tx_ctrl; uc_notif_t notif;
  uc_ctrl dut (.*);

  dmp_instr_t iq [$]; tx_ctrl_t tq [$]; int nsts = 0, pending = 0;
  always @(negedge clk) begin
    #2;
    if (dmp_valid && dmp_ready) begin iq.push_back(dmp_instr); pending++; end
    if (tx_valid && tx_ready) tq.push_back(tx_ctrl);
    if (sts_valid && sts_ready) begin nsts++; if (sts.retcode != 0) begin failures++; $display("FAIL retcode"); end end
  end
  // DMP model: completes each instruction a few cycles after accepting it
  always @(posedge clk) begin
    if (dmp_done_valid && dmp_done_ready) begin dmp_done_valid <= 0; pending--; end
    else if (pending > 0 && !dmp_done_valid) dmp_done_valid <= 1;
  end

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic issue(ccl_op_e op, bit rndz, int root, int tag, int len);
    @(negedge clk); cmd_valid = 1; cmd = '0;
    cmd.op = op; cmd.rndz = rndz; cmd.root = RANK_W'(root); cmd.tag = TAG_W'(tag); cmd.len = LEN_W'(len);
    cmd.op0_addr = 64'hA000; cmd.res_addr = 64'hB000; cmd.func = RED_SUM_I32; #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic wait_sts(int n);
    int t = 0;
    while (nsts < n && t < 300) begin @(negedge clk); t++; end
    chk(nsts == n, "status returned");
  endtask

  task automatic note(msg_type_e t, int src, int tag, logic [63:0] va);
    @(negedge clk); notif_valid = 1; notif = '0;
    notif.mtype = t; notif.src = RANK_W'(src); notif.tag = TAG_W'(tag); notif.len = 256; notif.vaddr = va; #1;
    while (!notif_ready) begin @(negedge clk); #1; end
    @(negedge clk); notif_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 16; r++) session[r] = SESS_W'(40 + r);
    cmd_valid = 0; cmd = '0; sts_ready = 1; dmp_ready = 1; dmp_done_valid = 0; tx_ready = 1; notif_valid = 0; notif = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // NOP
    issue(CCL_NOP, 0, 0, 0, 0); wait_sts(1);
    chk(iq.size() == 0 && tq.size() == 0, "nop moves nothing");
    // eager SEND to rank 2, twice
    issue(CCL_SEND, 0, 2, 9, 256); wait_sts(2);
    issue(CCL_SEND, 0, 2, 9, 256); wait_sts(3);
    chk(iq.size() == 2, "two send instructions");
    if (iq.size() == 2) begin
      chk(iq[0].op0.src == OPS_MEM && iq[0].op0.addr == 64'hA000 && iq[0].op1.src == OPS_NONE && iq[0].len == 256, "send operand");
      chk(iq[0].res.dst == RES_NET && !iq[0].res.rndz && iq[0].res.rank == 2 && iq[0].res.session == 42 && iq[0].res.tag == 9, "send result");
      chk(iq[0].res.seq == 0 && iq[1].res.seq == 1, "tx sequence per peer");
    end
    iq.delete();
    // eager RECV from rank 0
    issue(CCL_RECV, 0, 0, 4, 128); wait_sts(4);
    chk(iq.size() == 1 && iq[0].op1.src == OPS_RXBUF && iq[0].op1.rank == 0 && iq[0].op1.tag == 4 &&
        iq[0].op1.seq == 0 && iq[0].op0.src == OPS_NONE && iq[0].res.dst == RES_MEM && iq[0].res.addr == 64'hB000, "recv instruction");
    iq.delete();
    // rendezvous RECV from rank 2
    issue(CCL_RECV, 1, 2, 6, 4096);
    repeat (10) @(negedge clk);
    chk(tq.size() == 1 && tq[0].mtype == MSG_RNDZ_INIT && tq[0].dst == 2 && tq[0].session == 42 && tq[0].vaddr == 64'hB000 && tq[0].tag == 6, "RNDZ_INIT sent");
    chk(nsts == 4, "recv waits for RNDZ_DONE");
    note(MSG_RNDZ_DONE, 2, 6, 0); wait_sts(5);
    chk(iq.size() == 0, "rendezvous recv uses no DMP instruction");
    // rendezvous SEND to rank 0; its RNDZ_INIT arrives before the command
    fork note(MSG_RNDZ_INIT, 0, 8, 64'hC000); issue(CCL_SEND, 1, 0, 8, 4096); join
    wait_sts(6);
    chk(iq.size() == 1 && iq[0].res.dst == RES_NET && iq[0].res.rndz && iq[0].res.addr == 64'hC000 && iq[0].res.rank == 0, "rendezvous write");
    iq.delete(); tq.delete();
    // eager BCAST from root 1
    issue(CCL_BCAST, 0, 1, 2, 64); wait_sts(7);
    chk(iq.size() == 2, "bcast sends to two ranks");
    if (iq.size() == 2) chk(iq[0].res.dst == RES_NET && iq[1].res.dst == RES_NET && iq[0].res.rank != iq[1].res.rank &&
                            iq[0].res.rank != 1 && iq[1].res.rank != 1, "bcast destinations");
    iq.delete();
    // ring REDUCE to root 1
    issue(CCL_REDUCE, 0, 1, 3, 64); wait_sts(8);
    chk(iq.size() == 1, "root reduce one step");
    if (iq.size() == 1) chk(iq[0].op0.src == OPS_MEM && iq[0].op1.src == OPS_RXBUF && iq[0].op1.rank == 0 &&
                            iq[0].res.dst == RES_MEM && iq[0].res.addr == 64'hB000 && iq[0].func == RED_SUM_I32, "root combines");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
