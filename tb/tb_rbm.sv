// tb_rbm: announces two interleaved eager messages (one in two packets) and
// checks the memory write commands (buffer allocation and running offset),
// that a buffer is not offered before the write of its last packet is
// acknowledged, that lookups by (source, tag, sequence) hit the right buffer
// with the message length, that release frees a buffer, that a full pool
// back-pressures a new message until a buffer is released, and that a lookup
// is answered one cycle after it is accepted.
module tb_rbm;
  import accl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NB = 16;
  logic [ADDR_W-1:0] rxbuf_addr [NB];
  logic notif_valid, notif_ready, wr_cmd_valid, wr_cmd_ready, wr_sts_valid;
  rbm_notif_t notif; mem_cmd_t wr_cmd;
  logic seek_valid, seek_ready, rsp_valid, rsp_ready, release_valid;
  rbm_seek_t seek; rbm_seek_rsp_t rsp;
  logic [7:0] release_idx, ready_count;
  rbm dut (.*);

  mem_cmd_t cmds [$];
  always @(negedge clk) begin
    #2;
    if (wr_cmd_valid && wr_cmd_ready) cmds.push_back(wr_cmd);
  end

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic note(int sess, bit first, int src, int tag, int seq, int len, int bytes);
    @(negedge clk); notif_valid = 1; notif = '0;
    notif.session = SESS_W'(sess); notif.first = first; notif.bytes = LEN_W'(bytes);
    notif.sig.mtype = MSG_EAGER; notif.sig.src = RANK_W'(src); notif.sig.tag = TAG_W'(tag);
    notif.sig.seq = SEQ_W'(seq); notif.sig.len = LEN_W'(len); #1;
    while (!notif_ready) begin @(negedge clk); #1; end
    @(negedge clk); notif_valid = 0;
  endtask

  task automatic ack();
    @(negedge clk); wr_sts_valid = 1; @(negedge clk); wr_sts_valid = 0;
  endtask

  task automatic look(int src, int tag, int seq, output rbm_seek_rsp_t r);
    @(negedge clk); seek_valid = 1; seek = '{src: RANK_W'(src), tag: TAG_W'(tag), seq: SEQ_W'(seq)}; #1;
    while (!seek_ready) begin @(negedge clk); #1; end
    @(negedge clk); seek_valid = 0; #1;
    chk(rsp_valid, "answer one cycle after request");
    while (!rsp_valid) begin @(negedge clk); #1; end
    r = rsp;
    @(negedge clk);
  endtask

  task automatic free(int idx);
    @(negedge clk); release_valid = 1; release_idx = 8'(idx); @(negedge clk); release_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rbm_seek_rsp_t r;
    bit blocked;
    for (int i = 0; i < NB; i++) rxbuf_addr[i] = 64'h1_0000 * (i + 1);
    notif_valid = 0; notif = '0; wr_cmd_ready = 1; wr_sts_valid = 0; seek_valid = 0; seek = '0;
    rsp_ready = 1; release_valid = 0; release_idx = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    note(1, 1, 2, 7, 0, 192, 128);
    note(2, 1, 3, 8, 0, 64, 64);
    note(1, 0, 0, 0, 0, 0, 64);
    repeat (3) @(negedge clk);
    chk(cmds.size() == 3, "three write commands");
    if (cmds.size() == 3) begin
      chk(cmds[0].addr == 64'h1_0000 && cmds[0].len == 128, "first buffer");
      chk(cmds[1].addr == 64'h2_0000 && cmds[1].len == 64, "second buffer");
      chk(cmds[2].addr == 64'h1_0080 && cmds[2].len == 64, "running offset");
    end
    ack(); ack();
    look(2, 7, 0, r); chk(!r.hit, "not ready before last ack");
    look(3, 8, 0, r); chk(r.hit && r.addr == 64'h2_0000 && r.len == 64, "hit second");
    ack();
    look(2, 7, 0, r); chk(r.hit && r.idx == 0 && r.addr == 64'h1_0000 && r.len == 192, "hit first");
    look(2, 7, 1, r); chk(!r.hit, "sequence must match");
    chk(ready_count == 2, "ready count 2");
    free(0); free(1);
    @(negedge clk); chk(ready_count == 0, "ready count 0");
    look(2, 7, 0, r); chk(!r.hit, "released");
    // fill the pool, the 17th message must wait
    cmds.delete();
    for (int i = 0; i < NB; i++) begin note(5, 1, 4, 100 + i, i, 64, 64); ack(); end
    @(negedge clk); notif_valid = 1; notif.first = 1; notif.sig.tag = 200; notif.sig.len = 64; notif.bytes = 64;
    blocked = 1;
    repeat (10) begin #1; if (notif_ready) blocked = 0; @(negedge clk); end
    chk(blocked, "full pool back-pressures");
    chk(ready_count == 8'(NB), "all buffers ready");
    release_valid = 1; release_idx = 8'd5; @(negedge clk); release_valid = 0; #1;
    while (!notif_ready) begin @(negedge clk); #1; end
    @(negedge clk); notif_valid = 0;
    repeat (3) @(negedge clk);
    chk(cmds.size() == NB + 1 && cmds[NB].addr == rxbuf_addr[5], "freed buffer reused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
