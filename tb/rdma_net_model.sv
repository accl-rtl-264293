// rdma_net_model: behavioural model of N RDMA offload engines joined by a
// lossless switch (not synthesizable, for testbenches only). Node i addresses
// node j with queue pair j; node j sees the traffic from node i on queue pair
// i. A request (SEND or WRITE) and its len bytes of data are cut into packets
// of at most MTU bytes; each packet is queued for its destination whole, so
// packets of different sources interleave at the receiver while each source's
// packets stay in order. WRITE packets carry their target address. Delivery
// presents the packet's announcement, then its beats, one per cycle.
module rdma_net_model
  import accl_pkg::*;
#(
  parameter int N   = 2,
  parameter int MTU = 256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req_valid  [N],
  output logic         req_ready  [N],
  input  net_tx_meta_t req        [N],
  input  logic         tx_valid   [N],
  output logic         tx_ready   [N],
  input  axis_t        tx         [N],
  output logic         rxm_valid  [N],
  input  logic         rxm_ready  [N],
  output net_tx_meta_t rxm        [N],
  output logic         rx_valid   [N],
  input  logic         rx_ready   [N],
  output axis_t        rx         [N]
);
  net_tx_meta_t pm_q [N][$];
  axis_t        pb_q [N][$];
  int           packets = 0;

  for (genvar s = 0; s < N; s++) begin : g_src
    initial begin
      net_tx_meta_t r, pm;
      axis_t beats [$];
      int left, off;
      req_ready[s] = 0; tx_ready[s] = 0;
      forever begin
        @(negedge clk);
        req_ready[s] = 1; #1;
        while (!req_valid[s]) begin @(negedge clk); #1; end
        r = req[s];
        @(negedge clk); req_ready[s] = 0;
        left = int'(r.len); off = 0;
        while (left > 0) begin
          int pl;
          pl = (left > MTU) ? MTU : left;
          beats.delete();
          for (int k = 0; k < pl / 64; k++) begin
            tx_ready[s] = 1; #1;
            while (!tx_valid[s]) begin @(negedge clk); #1; end
            beats.push_back(tx[s]);
            @(negedge clk);
          end
          tx_ready[s] = 0;
          pm = r;
          pm.session = SESS_W'(s);
          pm.len     = LEN_W'(pl);
          pm.vaddr   = r.vaddr + ADDR_W'(off);
          beats[beats.size()-1].last = 1'b1;
          pm_q[int'(r.session)].push_back(pm);
          foreach (beats[k]) pb_q[int'(r.session)].push_back(beats[k]);
          packets++;
          left -= pl; off += pl;
        end
      end
    end
  end

  for (genvar d = 0; d < N; d++) begin : g_dst
    initial begin
      net_tx_meta_t pm;
      rxm_valid[d] = 0; rx_valid[d] = 0; rxm[d] = '0; rx[d] = '0;
      forever begin
        @(negedge clk);
        if (pm_q[d].size() != 0) begin
          pm = pm_q[d].pop_front();
          rxm[d] = pm; rxm_valid[d] = 1; #1;
          while (!rxm_ready[d]) begin @(negedge clk); #1; end
          @(negedge clk); rxm_valid[d] = 0;
          for (int k = 0; k < int'(pm.len) / 64; k++) begin
            rx[d] = pb_q[d].pop_front(); rx_valid[d] = 1; #1;
            while (!rx_ready[d]) begin @(negedge clk); #1; end
            @(negedge clk);
          end
          rx_valid[d] = 0;
        end
      end
    end
  end
endmodule
