// tb_reduce_plugin: drives two operand streams with random 64-byte beats for
// each of the four reduction functions, with random stalls on both inputs and
// the output, and compares every result beat with a lane-wise sum or max
// computed here. It also checks the sustained rate: with no stalls, N beats
// must leave within N+2 cycles.
module tb_reduce_plugin;
  import accl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in0_valid, in0_ready, in1_valid, in1_ready, out_valid, out_ready;
  axis_t in0, in1, out;
  logic [DEST_W-1:0] res_dest;

  reduce_plugin dut (.*);

  localparam int N = 40;
  logic [DATA_W-1:0] a [N], b [N], exp_q [$];
  logic [3:0] fn;
  logic stall;

  function automatic logic [DATA_W-1:0] ref_op(logic [3:0] f, logic [DATA_W-1:0] x, logic [DATA_W-1:0] y);
    logic [DATA_W-1:0] r;
    for (int i = 0; i < 16; i++) begin
      logic signed [31:0] p, q;
      p = x[i*32 +: 32]; q = y[i*32 +: 32];
      if (f == 0) r[i*32 +: 32] = p + q;
      if (f == 1) r[i*32 +: 32] = (p > q) ? p : q;
    end
    for (int i = 0; i < 8; i++) begin
      logic signed [63:0] p, q;
      p = x[i*64 +: 64]; q = y[i*64 +: 64];
      if (f == 2) r[i*64 +: 64] = p + q;
      if (f == 3) r[i*64 +: 64] = (p > q) ? p : q;
    end
    return r;
  endfunction

  function automatic logic [DATA_W-1:0] rnd512();
    logic [DATA_W-1:0] v;
    for (int i = 0; i < 16; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  // Stimulus changes at the falling edge; a handshake is decided by the
  // values seen just after it and completes at the next rising edge.
  task automatic drive0();
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      if (stall && ($urandom % 3 == 0)) begin in0_valid = 0; @(negedge clk); end
      in0_valid = 1; in0.data = a[i]; in0.last = (i == N-1); in0.dest = {NOC_RED_IN0, fn};
      #1;
      while (!in0_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk); in0_valid = 0;
  endtask
  task automatic drive1();
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      if (stall && ($urandom % 3 == 0)) begin in1_valid = 0; @(negedge clk); end
      in1_valid = 1; in1.data = b[i]; in1.last = 0; in1.dest = {NOC_RED_IN1, fn};
      #1;
      while (!in1_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk); in1_valid = 0;
  endtask
  task automatic sink(output int first_cyc, output int last_cyc);
    int got = 0, cyc = 0;
    first_cyc = -1; last_cyc = 0;
    while (got < N) begin
      @(negedge clk); cyc++;
      out_ready = stall ? ($urandom % 4 != 0) : 1'b1;
      #2;
      if (out_valid && out_ready) begin
        checks++;
        if (out.data !== exp_q[got] || out.dest !== 8'h3A || out.last !== (got == N-1)) begin
          failures++;
          $display("mismatch fn=%0d beat %0d", fn, got);
        end
        if (first_cyc < 0) first_cyc = cyc;
        last_cyc = cyc;
        got++;
      end
    end
    @(negedge clk); out_ready = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int f0, l0;
    in0_valid = 0; in1_valid = 0; out_ready = 0; in0 = '0; in1 = '0;
    res_dest = 8'h3A;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 8; pass++) begin
      fn = 4'(pass % 4);
      stall = (pass >= 4);
      exp_q.delete();
      for (int i = 0; i < N; i++) begin
        a[i] = rnd512(); b[i] = rnd512();
        exp_q.push_back(ref_op(fn, a[i], b[i]));
      end
      @(posedge clk);
      fork drive0(); drive1(); sink(f0, l0); join
      if (!stall) begin
        checks++;
        if (l0 - f0 > N - 1 + 1) begin
          failures++;
          $display("rate: %0d beats took %0d cycles", N, l0 - f0 + 1);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
