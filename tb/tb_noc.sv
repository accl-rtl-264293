// tb_noc: every input sends random-length packets to random outputs at once,
// with random stalls at the outputs. Each beat carries its input, packet and
// beat number, so the checker can see that every output receives whole
// packets without interleaving, each input's packets to one output in order,
// the dest field unchanged, and that every beat sent arrives.
module tb_noc;
  import accl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NI = NOC_NIN, NO = NOC_NOUT, PK = 12;
  logic  in_valid [NI], in_ready [NI], out_valid [NO], out_ready [NO];
  axis_t in_data [NI], out_data [NO];
  noc dut (.*);

  int sent = 0, recv = 0;
  int cur_src [NO];       // input whose packet is open on this output, -1 if none
  int next_pkt [NI][NO];  // next expected packet number from input to output
  int next_beat [NO];

  for (genvar i = 0; i < NI; i++) begin : g_src
    initial begin
      in_valid[i] = 0; in_data[i] = '0;
      @(posedge rst_n);
      for (int p = 0; p < PK; p++) begin
        int o, len;
        o = $urandom % NO; len = 1 + $urandom % 5;
        for (int b = 0; b < len; b++) begin
          @(negedge clk);
          in_valid[i] = 1;
          in_data[i].data = DATA_W'({32'(i), 32'(g_cnt[i][o]), 32'(b)});
          in_data[i].dest = {4'(o), 4'(i)};
          in_data[i].last = (b == len - 1);
          #1;
          while (!in_ready[i]) begin @(negedge clk); #1; end
          sent++;
        end
        g_cnt[i][o]++;
        @(negedge clk); in_valid[i] = 0;
      end
    end
  end
  int g_cnt [NI][NO];

  always @(negedge clk) begin
    for (int o = 0; o < NO; o++) out_ready[o] = ($urandom % 4 != 0);
    #2;
    for (int o = 0; o < NO; o++) if (out_valid[o] && out_ready[o]) begin
      int s, p, b;
      s = int'(out_data[o].data[95:64]); p = int'(out_data[o].data[63:32]); b = int'(out_data[o].data[31:0]);
      recv++; checks++;
      if (int'(out_data[o].dest[7:4]) != o || int'(out_data[o].dest[3:0]) != s) begin failures++; $display("FAIL dest"); end
      if (cur_src[o] >= 0 && cur_src[o] != s) begin failures++; $display("FAIL interleave on %0d", o); end
      if (p != next_pkt[s][o] || b != next_beat[o]) begin failures++; $display("FAIL order out %0d src %0d pkt %0d beat %0d", o, s, p, b); end
      if (out_data[o].last) begin cur_src[o] = -1; next_pkt[s][o]++; next_beat[o] = 0; end
      else begin cur_src[o] = s; next_beat[o]++; end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o < NO; o++) begin cur_src[o] = -1; next_beat[o] = 0; out_ready[o] = 0; end
    for (int i = 0; i < NI; i++) for (int o = 0; o < NO; o++) begin next_pkt[i][o] = 0; g_cnt[i][o] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (2000) @(negedge clk);
    checks++; if (sent != recv || sent == 0) begin failures++; $display("FAIL sent %0d recv %0d", sent, recv); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
