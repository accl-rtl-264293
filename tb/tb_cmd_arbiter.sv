// tb_cmd_arbiter: host and kernel both offer commands at once; the arbiter
// must alternate between them, forward each command unchanged, and route each
// status back to the requester whose command it answers, with the origin bit
// set. A status answered while a requester is not ready must wait.
module tb_cmd_arbiter;
  import accl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic host_cmd_valid, host_cmd_ready, host_sts_valid, host_sts_ready;
  logic krn_cmd_valid, krn_cmd_ready, krn_sts_valid, krn_sts_ready;
  logic uc_cmd_valid, uc_cmd_ready, uc_sts_valid, uc_sts_ready;
  ccl_cmd_t host_cmd, krn_cmd, uc_cmd;
  ccl_sts_t host_sts, krn_sts, uc_sts;
  cmd_arbiter dut (.*);

  int order [$];        // origin of each forwarded command (0 host, 1 kernel)
  int got_host = 0, got_krn = 0, nh = 0, nk = 0;

  always @(negedge clk) begin
    #2;
    if (uc_cmd_valid && uc_cmd_ready) begin
      order.push_back(int'(uc_cmd.tag[15]));
      checks++;
      if (uc_cmd.tag[14:0] != 15'(uc_cmd.tag[15] ? 100 + nk : nh)) begin failures++; $display("FAIL cmd content"); end
      if (uc_cmd.tag[15]) nk++; else nh++;
    end
    if (host_sts_valid && host_sts_ready) begin got_host++; checks++; if (host_sts.origin !== 0 || host_sts.retcode !== 8'(got_host)) failures++; end
    if (krn_sts_valid && krn_sts_ready)   begin got_krn++;  checks++; if (krn_sts.origin !== 1 || krn_sts.retcode !== 8'(got_krn)) failures++; end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hs = 0, ks = 0;
    host_cmd_valid = 0; krn_cmd_valid = 0; uc_cmd_ready = 0; uc_sts_valid = 0;
    host_sts_ready = 1; krn_sts_ready = 1; host_cmd = '0; krn_cmd = '0; uc_sts = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // two commands from each side, offered together; controller takes them one by one
    for (int i = 0; i < 2; i++) begin
      @(negedge clk);
      host_cmd_valid = 1; host_cmd.tag = TAG_W'(i); krn_cmd_valid = 1; krn_cmd.tag = TAG_W'(16'h8000 + 100 + i);
      uc_cmd_ready = 1;
      #1;
      // first grant, second grant
      for (int g = 0; g < 2; g++) begin
        if (host_cmd_ready) begin @(negedge clk); host_cmd_valid = 0; end
        else if (krn_cmd_ready) begin @(negedge clk); krn_cmd_valid = 0; end
        #1;
      end
      uc_cmd_ready = 0;
    end
    @(negedge clk);
    checks++;
    if (order.size() != 4 || order[0] == order[1] || order[2] == order[3]) begin failures++; $display("FAIL no alternation"); end
    // statuses in command order; hold the kernel's ready low for a while
    krn_sts_ready = 0;
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      uc_sts_valid = 1;
      if (order[i] != 0) begin ks++; uc_sts.retcode = 8'(ks); end else begin hs++; uc_sts.retcode = 8'(hs); end
      #1;
      if (order[i] == 1) begin
        repeat (3) begin
          checks++; if (uc_sts_ready || krn_sts_valid !== 1) begin failures++; $display("FAIL status did not wait"); end
          @(negedge clk); #1;
        end
        krn_sts_ready = 1; #1;
      end
      while (!uc_sts_ready) begin @(negedge clk); #1; end
      @(negedge clk); uc_sts_valid = 0; krn_sts_ready = 0;
    end
    repeat (2) @(negedge clk);
    checks++; if (got_host != 2 || got_krn != 2) begin failures++; $display("FAIL status count %0d %0d", got_host, got_krn); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
