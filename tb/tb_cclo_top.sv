// tb_cclo_top: end-to-end test of three engines, each with its own memory,
// joined by an RDMA network model with a 256-byte MTU. The engines keep their
// default parameters. The host of each node configures its rank, the
// communicator's queue pairs and sixteen 16 KiB rx buffers through MMIO, then
// runs, checking every result word against values computed here:
//   NOP from the host and from the kernel (both arbiter inputs)
//   eager send/recv, receive posted late and early (rx-buffer hit and miss)
//   rendezvous send/recv (RNDZ_INIT / RDMA WRITE bypass / RNDZ_DONE)
//   two senders to one receiver at once (packets interleave at the receiver)
//   eager and rendezvous one-to-all broadcast
//   eager ring reduce (int32 sum, int32 max) through the reduction plugin
//   streaming send from a kernel and streaming receive into a kernel
// and the send rate of a 16 KiB eager message, which must reach at least 95
// Gb/s at 250 MHz (0.74 beats of 64 B per cycle). Each mechanism is counted;
// one that never happened counts as a failure.
module tb_cclo_top;
  import accl_pkg::*;
  localparam int NODES = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---- per-node signals ----
  logic mmio_we[NODES], mmio_re[NODES];
  logic [11:0] mmio_addr[NODES];
  logic [31:0] mmio_wdata[NODES], mmio_rdata[NODES];
  logic host_cmd_valid[NODES], host_cmd_ready[NODES], host_sts_valid[NODES], host_sts_ready[NODES];
  ccl_cmd_t host_cmd[NODES];
  ccl_sts_t host_sts[NODES], krn_sts[NODES];
  logic krn_cmd_valid[NODES], krn_cmd_ready[NODES], krn_sts_valid[NODES], krn_sts_ready[NODES];
  ccl_cmd_t krn_cmd[NODES];
  logic krn_in_valid[NODES], krn_in_ready[NODES], krn_out_valid[NODES], krn_out_ready[NODES];
  axis_t krn_in[NODES], krn_out[NODES];
  logic rd_cmd_valid[NODES][2], rd_cmd_ready[NODES][2], rd_valid[NODES][2], rd_ready[NODES][2];
  mem_cmd_t rd_cmd[NODES][2];
  axis_t rd[NODES][2];
  logic wr_cmd_valid[NODES][3], wr_cmd_ready[NODES][3], wr_valid[NODES][3], wr_ready[NODES][3], wr_sts[NODES][3];
  mem_cmd_t wr_cmd[NODES][3];
  axis_t wr[NODES][3];
  logic req_valid[NODES], req_ready[NODES], tx_valid[NODES], tx_ready[NODES];
  net_tx_meta_t req[NODES], rxm[NODES];
  axis_t tx[NODES], rx[NODES];
  logic rxm_valid[NODES], rxm_ready[NODES], rx_valid[NODES], rx_ready[NODES];
  logic cmp_out_valid[NODES], cmp_in_ready[NODES];
  axis_t cmp_out[NODES];
  logic [31:0] miss_cnt[NODES], bypass_cnt[NODES];
  logic [7:0] rdy_cnt[NODES];

  int red_beats[NODES] = '{default: 0};
  for (genvar n = 0; n < NODES; n++) begin : g_node
    cclo_top u_dut (
      .clk, .rst_n,
      .mmio_we(mmio_we[n]), .mmio_re(mmio_re[n]), .mmio_addr(mmio_addr[n]),
      .mmio_wdata(mmio_wdata[n]), .mmio_rdata(mmio_rdata[n]),
      .host_cmd_valid(host_cmd_valid[n]), .host_cmd_ready(host_cmd_ready[n]), .host_cmd(host_cmd[n]),
      .host_sts_valid(host_sts_valid[n]), .host_sts_ready(host_sts_ready[n]), .host_sts(host_sts[n]),
      .krn_cmd_valid(krn_cmd_valid[n]), .krn_cmd_ready(krn_cmd_ready[n]), .krn_cmd(krn_cmd[n]),
      .krn_sts_valid(krn_sts_valid[n]), .krn_sts_ready(krn_sts_ready[n]), .krn_sts(krn_sts[n]),
      .krn_in_valid(krn_in_valid[n]), .krn_in_ready(krn_in_ready[n]), .krn_in(krn_in[n]),
      .krn_out_valid(krn_out_valid[n]), .krn_out_ready(krn_out_ready[n]), .krn_out(krn_out[n]),
      .m0_rd_cmd_valid(rd_cmd_valid[n][0]), .m0_rd_cmd_ready(rd_cmd_ready[n][0]), .m0_rd_cmd(rd_cmd[n][0]),
      .m0_rd_valid(rd_valid[n][0]), .m0_rd_ready(rd_ready[n][0]), .m0_rd(rd[n][0]),
      .m0_wr_cmd_valid(wr_cmd_valid[n][0]), .m0_wr_cmd_ready(wr_cmd_ready[n][0]), .m0_wr_cmd(wr_cmd[n][0]),
      .m0_wr_valid(wr_valid[n][0]), .m0_wr_ready(wr_ready[n][0]), .m0_wr(wr[n][0]), .m0_wr_sts(wr_sts[n][0]),
      .m1_rd_cmd_valid(rd_cmd_valid[n][1]), .m1_rd_cmd_ready(rd_cmd_ready[n][1]), .m1_rd_cmd(rd_cmd[n][1]),
      .m1_rd_valid(rd_valid[n][1]), .m1_rd_ready(rd_ready[n][1]), .m1_rd(rd[n][1]),
      .m1_wr_cmd_valid(wr_cmd_valid[n][1]), .m1_wr_cmd_ready(wr_cmd_ready[n][1]), .m1_wr_cmd(wr_cmd[n][1]),
      .m1_wr_valid(wr_valid[n][1]), .m1_wr_ready(wr_ready[n][1]), .m1_wr(wr[n][1]), .m1_wr_sts(wr_sts[n][1]),
      .rdma_req_valid(req_valid[n]), .rdma_req_ready(req_ready[n]), .rdma_req(req[n]),
      .rdma_tx_valid(tx_valid[n]), .rdma_tx_ready(tx_ready[n]), .rdma_tx(tx[n]),
      .rdma_rx_meta_valid(rxm_valid[n]), .rdma_rx_meta_ready(rxm_ready[n]), .rdma_rx_meta(rxm[n]),
      .rdma_rx_valid(rx_valid[n]), .rdma_rx_ready(rx_ready[n]), .rdma_rx(rx[n]),
      .m2_wr_cmd_valid(wr_cmd_valid[n][2]), .m2_wr_cmd_ready(wr_cmd_ready[n][2]), .m2_wr_cmd(wr_cmd[n][2]),
      .m2_wr_valid(wr_valid[n][2]), .m2_wr_ready(wr_ready[n][2]), .m2_wr(wr[n][2]),
      .cmp_out_valid(cmp_out_valid[n]), .cmp_out_ready(1'b1), .cmp_out(cmp_out[n]),
      .cmp_in_valid(1'b0), .cmp_in_ready(cmp_in_ready[n]), .cmp_in('0),
      .rx_miss_count(miss_cnt[n]), .rxbuf_ready_count(rdy_cnt[n]), .rdma_bypass_count(bypass_cnt[n]));

    mem_model u_mem (
      .clk, .rst_n,
      .rd_cmd_valid(rd_cmd_valid[n]), .rd_cmd_ready(rd_cmd_ready[n]), .rd_cmd(rd_cmd[n]),
      .rd_valid(rd_valid[n]), .rd_ready(rd_ready[n]), .rd(rd[n]),
      .wr_cmd_valid(wr_cmd_valid[n]), .wr_cmd_ready(wr_cmd_ready[n]), .wr_cmd(wr_cmd[n]),
      .wr_valid(wr_valid[n]), .wr_ready(wr_ready[n]), .wr(wr[n]), .wr_sts(wr_sts[n]));

    // beats leaving this node's reduction plugin
    always @(negedge clk) #2
      if (u_dut.u_cclo.ni_valid[NOC_I_RED] && u_dut.u_cclo.ni_ready[NOC_I_RED]) red_beats[n]++;
  end

  rdma_net_model #(.N(NODES), .MTU(256)) u_net (
    .clk, .rst_n,
    .req_valid, .req_ready, .req, .tx_valid, .tx_ready, .tx,
    .rxm_valid, .rxm_ready, .rxm, .rx_valid, .rx_ready, .rx);

  // ---- memory access through the models ----
  function automatic void mem_poke(int n, longint a, logic [DATA_W-1:0] v);
    case (n)
      0: g_node[0].u_mem.poke(a, v);
      1: g_node[1].u_mem.poke(a, v);
      default: g_node[2].u_mem.poke(a, v);
    endcase
  endfunction
  function automatic logic [DATA_W-1:0] mem_peek(int n, longint a);
    case (n)
      0: return g_node[0].u_mem.peek(a);
      1: return g_node[1].u_mem.peek(a);
      default: return g_node[2].u_mem.peek(a);
    endcase
  endfunction
  function automatic logic [DATA_W-1:0] pattern(int seed, int beat);
    logic [DATA_W-1:0] v;
    for (int i = 0; i < 16; i++) v[i*32 +: 32] = 32'(seed * 1000003 + beat * 131 + i * 7);
    return v;
  endfunction
  task automatic fill(int n, longint a, int len, int seed);
    for (int b = 0; b < len / 64; b++) mem_poke(n, a + b * 64, pattern(seed, b));
  endtask
  task automatic expect_mem(int n, longint a, int len, int seed, string what);
    int bad = 0;
    for (int b = 0; b < len / 64; b++) if (mem_peek(n, a + b * 64) !== pattern(seed, b)) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %s: %0d of %0d beats wrong", what, bad, len / 64); end
  endtask

  // ---- host and kernel command helpers ----
  int sts_host[NODES], sts_krn[NODES], bad_origin = 0;
  always @(negedge clk) #2 for (int n = 0; n < NODES; n++) begin
    if (host_sts_valid[n] && host_sts_ready[n]) begin sts_host[n]++; if (host_sts[n].origin !== 1'b0 || host_sts[n].retcode !== 0) bad_origin++; end
    if (krn_sts_valid[n] && krn_sts_ready[n])   begin sts_krn[n]++;  if (krn_sts[n].origin !== 1'b1 || krn_sts[n].retcode !== 0) bad_origin++; end
  end

  task automatic mmio_write(int n, logic [11:0] a, logic [31:0] d);
    @(negedge clk); mmio_we[n] = 1; mmio_addr[n] = a; mmio_wdata[n] = d;
    @(negedge clk); mmio_we[n] = 0;
  endtask
  task automatic mmio_read(int n, logic [11:0] a, output logic [31:0] d);
    @(negedge clk); mmio_re[n] = 1; mmio_addr[n] = a;
    @(negedge clk); mmio_re[n] = 0; d = mmio_rdata[n];
  endtask

  // issue a command and wait for its status
  task automatic run(int n, ccl_cmd_t c, bit from_krn = 0);
    int sts_before;
    sts_before = from_krn ? sts_krn[n] : sts_host[n];
    @(negedge clk);
    if (from_krn) begin krn_cmd[n] = c; krn_cmd_valid[n] = 1; #1; while (!krn_cmd_ready[n]) begin @(negedge clk); #1; end end
    else          begin host_cmd[n] = c; host_cmd_valid[n] = 1; #1; while (!host_cmd_ready[n]) begin @(negedge clk); #1; end end
    @(negedge clk);
    if (from_krn) krn_cmd_valid[n] = 0; else host_cmd_valid[n] = 0;
    while ((from_krn ? sts_krn[n] : sts_host[n]) == sts_before) @(negedge clk);
  endtask

  function automatic ccl_cmd_t mk(ccl_op_e op, int root, int tag, int len, longint a0, longint ar,
                                   bit rndz = 0, red_func_e f = RED_SUM_I32, bit ss = 0, bit ds = 0);
    ccl_cmd_t c;
    c = '0; c.op = op; c.root = RANK_W'(root); c.tag = TAG_W'(tag); c.len = LEN_W'(len);
    c.op0_addr = ADDR_W'(a0); c.res_addr = ADDR_W'(ar); c.rndz = rndz; c.func = f;
    c.src_stream = ss; c.dst_stream = ds;
    return c;
  endfunction

  // ---- kernel streams ----
  axis_t krn_got[NODES][$];
  always @(negedge clk) #2 for (int n = 0; n < NODES; n++)
    if (krn_out_valid[n] && krn_out_ready[n]) krn_got[n].push_back(krn_out[n]);
  task automatic krn_push(int n, int len, int seed);
    for (int b = 0; b < len / 64; b++) begin
      @(negedge clk);
      krn_in[n].data = pattern(seed, b); krn_in[n].last = (b == len / 64 - 1); krn_in[n].dest = '0;
      krn_in_valid[n] = 1; #1;
      while (!krn_in_ready[n]) begin @(negedge clk); #1; end
    end
    @(negedge clk); krn_in_valid[n] = 0;
  endtask

  // ---- mechanism counters ----
  int n_eager_tx = 0, n_rndz_init = 0, n_interleave = 0;
  int last_sess = -1;
  bit in_msg0;
  always @(negedge clk) begin
    #2;
    for (int n = 0; n < NODES; n++) begin
      if (req_valid[n] && req_ready[n] && req[n].op == NET_SEND && req[n].len > 64) n_eager_tx++;
      if (req_valid[n] && req_ready[n] && req[n].op == NET_SEND && req[n].len == 64) n_rndz_init++;
    end
    // node 0: a packet from one session right after one from another session
    if (rxm_valid[0] && rxm_ready[0] && rxm[0].op == NET_SEND) begin
      if (last_sess >= 0 && last_sess != int'(rxm[0].session) && in_msg0) n_interleave++;
      last_sess = int'(rxm[0].session);
      in_msg0 = 1;
    end
  end

  // throughput probe on node 0's transmit stream
  int tx_beats0 = 0; longint tx_first0 = -1, tx_last0 = 0;
  bit probe = 0;
  always @(negedge clk) #2 if (probe && tx_valid[0] && tx_ready[0]) begin
    if (tx_first0 < 0) tx_first0 = cycle;
    tx_last0 = cycle; tx_beats0++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rdv;
    for (int n = 0; n < NODES; n++) begin
      mmio_we[n] = 0; mmio_re[n] = 0; mmio_addr[n] = 0; mmio_wdata[n] = 0;
      host_cmd_valid[n] = 0; krn_cmd_valid[n] = 0; host_cmd[n] = '0; krn_cmd[n] = '0;
      host_sts_ready[n] = 1; krn_sts_ready[n] = 1; krn_in_valid[n] = 0; krn_in[n] = '0;
      krn_out_ready[n] = 1; sts_host[n] = 0; sts_krn[n] = 0;
    end
    repeat (4) @(posedge clk);
    rst_n = 1;
    // configuration
    for (int n = 0; n < NODES; n++) begin
      mmio_write(n, 12'h000, n);
      mmio_write(n, 12'h001, NODES);
      for (int r = 0; r < NODES; r++) mmio_write(n, 12'h100 + 12'(r), r);
      for (int i = 0; i < 16; i++) begin
        mmio_write(n, 12'h200 + 12'(4*i), 32'h0080_0000 + 32'(i) * 32'h4000);
        mmio_write(n, 12'h201 + 12'(4*i), 0);
        mmio_write(n, 12'h202 + 12'(4*i), 32'h4000);
      end
      mmio_read(n, 12'h000, rdv);
      checks++; if (rdv != n) begin failures++; $display("FAIL mmio readback"); end
    end

    // 1. NOP from both command sources
    fork run(0, mk(CCL_NOP, 0, 0, 0, 0, 0), 0); run(0, mk(CCL_NOP, 0, 0, 0, 0, 0), 1); join
    checks++; if (sts_host[0] != 1 || sts_krn[0] != 1) begin failures++; $display("FAIL nop status"); end

    // 2. eager send 0->1, receive posted after the data has arrived
    fill(0, 'h10000, 1024, 1);
    run(0, mk(CCL_SEND, 1, 5, 1024, 'h10000, 0));
    repeat (200) @(posedge clk);
    run(1, mk(CCL_RECV, 0, 5, 1024, 0, 'h20000));
    expect_mem(1, 'h20000, 1024, 1, "eager late recv");

    // 3. eager send 1->0, receive posted first (rx-buffer misses, then hit)
    fill(1, 'h10000, 2048, 2);
    fork
      run(0, mk(CCL_RECV, 1, 6, 2048, 0, 'h30000));
      begin repeat (100) @(posedge clk); run(1, mk(CCL_SEND, 0, 6, 2048, 'h10000, 0)); end
    join
    expect_mem(0, 'h30000, 2048, 2, "eager early recv");

    // 4. rendezvous send 2->0
    fill(2, 'h10000, 4096, 3);
    fork
      run(2, mk(CCL_SEND, 0, 7, 4096, 'h10000, 0, 1));
      run(0, mk(CCL_RECV, 2, 7, 4096, 0, 'h40000, 1));
    join
    expect_mem(0, 'h40000, 4096, 3, "rendezvous recv");

    // 5. two senders to one receiver at once
    fill(1, 'h50000, 2048, 4);
    fill(2, 'h50000, 2048, 5);
    fork
      run(1, mk(CCL_SEND, 0, 8, 2048, 'h50000, 0));
      run(2, mk(CCL_SEND, 0, 8, 2048, 'h50000, 0));
    join
    run(0, mk(CCL_RECV, 1, 8, 2048, 0, 'h60000));
    run(0, mk(CCL_RECV, 2, 8, 2048, 0, 'h68000));
    expect_mem(0, 'h60000, 2048, 4, "interleaved from 1");
    expect_mem(0, 'h68000, 2048, 5, "interleaved from 2");

    // 6. eager broadcast from rank 1, rendezvous broadcast from rank 2
    fill(1, 'h70000, 1024, 6);
    fork
      run(0, mk(CCL_BCAST, 1, 9, 1024, 'h70000, 'h78000));
      run(1, mk(CCL_BCAST, 1, 9, 1024, 'h70000, 'h78000));
      run(2, mk(CCL_BCAST, 1, 9, 1024, 'h70000, 'h78000));
    join
    expect_mem(0, 'h78000, 1024, 6, "eager bcast rank 0");
    expect_mem(2, 'h78000, 1024, 6, "eager bcast rank 2");
    fill(2, 'h70000, 1536, 7);
    fork
      run(0, mk(CCL_BCAST, 2, 10, 1536, 'h70000, 'h7C000, 1));
      run(1, mk(CCL_BCAST, 2, 10, 1536, 'h70000, 'h7C000, 1));
      run(2, mk(CCL_BCAST, 2, 10, 1536, 'h70000, 'h7C000, 1));
    join
    expect_mem(0, 'h7C000, 1536, 7, "rndz bcast rank 0");
    expect_mem(1, 'h7C000, 1536, 7, "rndz bcast rank 1");

    // 7. ring reduce, int32 sum and int32 max, root 0
    for (int f = 0; f < 2; f++) begin
      int bad = 0;
      for (int n = 0; n < NODES; n++) fill(n, 'h90000, 1024, 20 + n + 10 * f);
      fork
        run(0, mk(CCL_REDUCE, 0, 11 + f, 1024, 'h90000, 'hA0000, 0, f ? RED_MAX_I32 : RED_SUM_I32));
        run(1, mk(CCL_REDUCE, 0, 11 + f, 1024, 'h90000, 'hA0000, 0, f ? RED_MAX_I32 : RED_SUM_I32));
        run(2, mk(CCL_REDUCE, 0, 11 + f, 1024, 'h90000, 'hA0000, 0, f ? RED_MAX_I32 : RED_SUM_I32));
      join
      for (int b = 0; b < 16; b++) begin
        logic [DATA_W-1:0] e, g;
        for (int i = 0; i < 16; i++) begin
          logic signed [31:0] acc, v;
          acc = pattern(20 + 10 * f, b)[i*32 +: 32];
          for (int n = 1; n < NODES; n++) begin
            v = pattern(20 + n + 10 * f, b)[i*32 +: 32];
            acc = f ? ((v > acc) ? v : acc) : acc + v;
          end
          e[i*32 +: 32] = acc;
        end
        g = mem_peek(0, 'hA0000 + b * 64);
        if (g !== e) bad++;
      end
      checks++; if (bad != 0) begin failures++; $display("FAIL reduce f=%0d: %0d beats", f, bad); end
    end

    // 8. streaming: kernel on rank 2 sends, kernel on rank 0 receives
    fork
      begin
        fork run(2, mk(CCL_SEND, 0, 12, 512, 0, 0, 0, RED_SUM_I32, 1, 0), 1); krn_push(2, 512, 8); join
      end
      run(0, mk(CCL_RECV, 2, 12, 512, 0, 0, 0, RED_SUM_I32, 0, 1), 1);
    join
    checks++;
    if (krn_got[0].size() != 8) begin failures++; $display("FAIL stream: %0d beats", krn_got[0].size()); end
    else for (int b = 0; b < 8; b++)
      if (krn_got[0][b].data !== pattern(8, b) || krn_got[0][b].last !== (b == 7)) begin
        failures++; $display("FAIL stream beat %0d", b); break;
      end

    // 9. rate: 16 KiB eager send 0->1
    fill(0, 'hC0000, 16384, 9);
    probe = 1;
    run(0, mk(CCL_SEND, 1, 13, 16384, 'hC0000, 0));
    probe = 0;
    run(1, mk(CCL_RECV, 0, 13, 16384, 0, 'hE0000));
    expect_mem(1, 'hE0000, 16384, 9, "16 KiB eager");
    checks++;
    if (real'(tx_beats0) / real'(tx_last0 - tx_first0 + 1) < 0.74) begin
      failures++; $display("FAIL rate %0d beats in %0d cycles", tx_beats0, tx_last0 - tx_first0 + 1);
    end
    $display("rate: %0d beats in %0d cycles", tx_beats0, tx_last0 - tx_first0 + 1);

    // mechanisms
    checks++; if (bad_origin != 0) begin failures++; $display("FAIL status origin"); end
    $display("eager sends %0d, rndz handshakes %0d, bypass packets %0d, rx-buffer misses %0d, interleaves %0d, reduce beats %0d",
             n_eager_tx, n_rndz_init, bypass_cnt[0] + bypass_cnt[1] + bypass_cnt[2],
             miss_cnt[0] + miss_cnt[1] + miss_cnt[2], n_interleave, red_beats[0] + red_beats[1] + red_beats[2]);
    checks++; if (n_eager_tx == 0) begin failures++; $display("FAIL no eager message"); end
    checks++; if (n_rndz_init == 0) begin failures++; $display("FAIL no rendezvous handshake"); end
    checks++; if (bypass_cnt[0] + bypass_cnt[1] + bypass_cnt[2] == 0) begin failures++; $display("FAIL no WRITE bypass"); end
    checks++; if (miss_cnt[0] + miss_cnt[1] + miss_cnt[2] == 0) begin failures++; $display("FAIL no rx-buffer miss"); end
    checks++; if (n_interleave == 0) begin failures++; $display("FAIL no interleaving"); end
    checks++; if (red_beats[0] + red_beats[1] + red_beats[2] == 0) begin failures++; $display("FAIL no reduction"); end
    checks++; if (rdy_cnt[0] != 0 || rdy_cnt[1] != 0 || rdy_cnt[2] != 0) begin failures++; $display("FAIL rx buffers left"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
