// tb_dmp: runs three instructions through the data movement processor with
// simple models of its neighbours: (1) memory to network, eager; (2) memory
// plus rx buffer reduced into memory, where the rx buffer is reported missing
// three times before it hits; (3) kernel stream to kernel stream. Checks the
// issued memory and Tx commands, the NoC routes (including the reduction
// function in the dest field), that the buffer check is repeated every RETRY
// cycles, the miss counter, the buffer release, and that completion is
// reported only after the result is acknowledged.
module tb_dmp;
  import accl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int RETRY = 16;
  logic instr_valid, instr_ready, done_valid, done_ready;
  dmp_instr_t instr;
  logic seek_valid, seek_ready, rsp_valid, rsp_ready, release_valid;
  rbm_seek_t seek; rbm_seek_rsp_t rsp; logic [7:0] release_idx;
  logic rd0_valid, rd0_ready, rd1_valid, rd1_ready, wr1_valid, wr1_ready, wr1_sts;
  mem_cmd_t rd0_cmd, rd1_cmd, wr1_cmd;
  logic tx_valid, tx_ready, tx_done, krn_out_last;
  tx_ctrl_t tx_ctrl;
  logic [DEST_W-1:0] memr0_dest, memr1_dest, krn_dest, red_dest;
  logic krn_en; logic [31:0] miss_count;
  dmp dut (.*);

  // neighbour models
  int misses_left = 0, seek_times [$], releases = 0, last_rel = -1;
  int wr_due = -1, tx_due = -1, cyc = 0, done_cyc = 0, ack_cyc = 0;
  mem_cmd_t r0 [$], r1 [$], w1 [$]; tx_ctrl_t tq [$];
  always @(negedge clk) begin
    cyc++;
    wr1_sts = (cyc == wr_due); tx_done = (cyc == tx_due);
    if (wr1_sts || tx_done) ack_cyc = cyc;
    #2;
    if (seek_valid && seek_ready) seek_times.push_back(cyc);
    if (rd0_valid && rd0_ready) r0.push_back(rd0_cmd);
    if (rd1_valid && rd1_ready) r1.push_back(rd1_cmd);
    if (wr1_valid && wr1_ready) begin w1.push_back(wr1_cmd); wr_due = cyc + 7; end
    if (tx_valid && tx_ready) begin tq.push_back(tx_ctrl); tx_due = cyc + 9; end
    if (release_valid) begin releases++; last_rel = int'(release_idx); end
    if (done_valid && done_ready) done_cyc = cyc;
  end

  // RxBuf manager model: answers one cycle after a lookup is accepted
  always @(posedge clk) begin
    if (rsp_valid && rsp_ready) rsp_valid <= 0;
    if (seek_valid && seek_ready) begin
      rsp_valid <= 1; rsp.hit <= (misses_left == 0); rsp.idx <= 8'd9; rsp.addr <= 64'h9000; rsp.len <= 32'd128;
      if (misses_left > 0) misses_left--;
    end
  end

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic run(dmp_instr_t i);
    @(negedge clk); instr_valid = 1; instr = i; #1;
    while (!instr_ready) begin @(negedge clk); #1; end
    @(negedge clk); instr_valid = 0; #1;
    while (!done_valid) begin @(negedge clk); #1; end
    @(negedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dmp_instr_t i;
    instr_valid = 0; instr = '0; done_ready = 1; seek_ready = 1; rsp_valid = 0; rsp = '0;
    rd0_ready = 1; rd1_ready = 1; wr1_ready = 1; tx_ready = 1; krn_out_last = 0; wr1_sts = 0; tx_done = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // (1) memory -> network
    i = '0; i.len = 256;
    i.op0.src = OPS_MEM; i.op0.addr = 64'h1000;
    i.res.dst = RES_NET; i.res.rank = 2; i.res.session = 7; i.res.tag = 3; i.res.seq = 4;
    run(i);
    chk(r0.size() == 1 && r0[0].addr == 64'h1000 && r0[0].len == 256 && r1.size() == 0, "op0 read");
    chk(tq.size() == 1 && tq[0].mtype == MSG_EAGER && tq[0].dst == 2 && tq[0].session == 7 &&
        tq[0].tag == 3 && tq[0].seq == 4 && tq[0].len == 256, "tx command");
    chk(done_cyc > ack_cyc && ack_cyc == tx_due, "done after tx done");
    // (2) memory (+) rx buffer -> memory, reduction MAX_I64
    misses_left = 3;
    i = '0; i.len = 128; i.func = RED_MAX_I64;
    i.op0.src = OPS_MEM; i.op0.addr = 64'h2000;
    i.op1.src = OPS_RXBUF; i.op1.rank = 1; i.op1.tag = 5; i.op1.seq = 6;
    i.res.dst = RES_MEM; i.res.addr = 64'h3000;
    @(negedge clk); instr_valid = 1; instr = i; @(negedge clk); instr_valid = 0; #1;
    while (!rd1_valid) begin @(negedge clk); #1; end
    chk(memr0_dest == {NOC_RED_IN0, 4'(RED_MAX_I64)} && memr1_dest == {NOC_RED_IN1, 4'(RED_MAX_I64)}, "operand routes to reduction");
    chk(red_dest == {NOC_MEMW_RES, 4'd0}, "reduction result route");
    chk(seek.src == 1 && seek.tag == 5 && seek.seq == 6, "lookup key");
    while (!done_valid) begin @(negedge clk); #1; end
    @(negedge clk);
    chk(seek_times.size() == 4, "four lookups");
    for (int k = 1; k < seek_times.size(); k++) chk(seek_times[k] - seek_times[k-1] >= RETRY, "retry interval");
    chk(miss_count == 3, "miss counter");
    chk(r0.size() == 2 && r0[1].addr == 64'h2000 && r1.size() == 1 && r1[0].addr == 64'h9000 && r1[0].len == 128, "reads");
    chk(w1.size() == 1 && w1[0].addr == 64'h3000 && w1[0].len == 128, "result write");
    chk(releases == 1 && last_rel == 9, "rx buffer released");
    chk(done_cyc > wr_due, "done after write status");
    // (3) stream -> stream
    i = '0; i.len = 64; i.op0.src = OPS_STREAM; i.res.dst = RES_STREAM;
    @(negedge clk); instr_valid = 1; instr = i; @(negedge clk); instr_valid = 0;
    repeat (3) @(negedge clk);
    chk(krn_en && krn_dest == {NOC_KRN_OUT, 4'd0}, "stream route");
    chk(!done_valid, "waits for the last result beat");
    krn_out_last = 1; @(negedge clk); krn_out_last = 0; #1;
    while (!done_valid) begin @(negedge clk); #1; end
    chk(1, "stream done");
    @(negedge clk);
    chk(r0.size() == 2 && releases == 1, "no memory traffic for streams");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
