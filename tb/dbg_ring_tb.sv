// Self-checking testbench for dbg_ring (5 nodes).
//
// Every node injects random packets of 1..6 flits to random other nodes,
// with random readiness at the receiving modules. Checks that every packet
// arrives at its destination only, complete and not interleaved with another
// packet, and that packets between one pair of nodes stay in order.
module dbg_ring_tb;
  import dbg_pkg::*;
  localparam int N = 5;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  dflit_t loc_in [N], loc_out [N];
  logic loc_in_valid [N], loc_in_ready [N], loc_out_valid [N], loc_out_ready [N];

  dbg_ring #(.NODES(N)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  dflit_t q [N][$];
  int sent = 0, recv = 0;
  int next_seq [N][N];
  int cur_src [N], cur_seq [N], cur_idx [N];
  bit in_pkt [N];
  bit run = 0;

  // each flit after the header: {seq[7:0], idx[7:0]}
  bit fire [N];
  always @(posedge clk) for (int n = 0; n < N; n++) fire[n] <= loc_in_valid[n] && loc_in_ready[n];
  always @(negedge clk) begin
    for (int n = 0; n < N; n++) begin
      if (fire[n]) void'(q[n].pop_front());
      loc_in_valid[n]  = run && q[n].size() > 0;
      loc_in[n]        = (q[n].size() > 0) ? q[n][0] : '0;
      loc_out_ready[n] = ($urandom_range(0, 9) < 7);
    end
  end
  always @(posedge clk) if (!rst) begin
    for (int n = 0; n < N; n++) if (loc_out_valid[n] && loc_out_ready[n]) begin
      if (!in_pkt[n]) begin
        check(loc_out[n].data[15:8] == 8'(n), $sformatf("packet for %0d at node %0d", loc_out[n].data[15:8], n));
        cur_src[n] = int'(loc_out[n].data[7:0]); cur_idx[n] = 0; cur_seq[n] = -1;
        in_pkt[n] = 1;
      end else begin
        if (cur_idx[n] == 0) begin
          cur_seq[n] = int'(loc_out[n].data[15:8]);
          check(cur_seq[n] == next_seq[cur_src[n]][n] % 256, $sformatf("order %0d->%0d", cur_src[n], n));
          next_seq[cur_src[n]][n]++;
        end
        check(int'(loc_out[n].data[7:0]) == cur_idx[n] + 1 && int'(loc_out[n].data[15:8]) == cur_seq[n],
              $sformatf("interleaved flit at node %0d", n));
        cur_idx[n]++;
      end
      if (loc_out[n].last) begin in_pkt[n] = 0; recv++; end
    end
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seqs [N][N];
    int s, d, len;
    dflit_t f;
    for (int a = 0; a < N; a++) begin
      in_pkt[a] = 0; loc_in_valid[a] = 0; loc_in[a] = '0; loc_out_ready[a] = 1;
      for (int b = 0; b < N; b++) begin next_seq[a][b] = 0; seqs[a][b] = 0; end
    end
    for (int k = 0; k < 150; k++) begin
      s = $urandom_range(0, N - 1);
      d = (s + $urandom_range(1, N - 1)) % N;
      len = $urandom_range(1, 6);
      for (int i = 0; i < len; i++) begin
        f.data = (i == 0) ? {8'(d), 8'(s)} : {8'(seqs[s][d]), 8'(i)};
        f.last = (i == len - 1);
        q[s].push_back(f);
      end
      if (len > 1) seqs[s][d]++;
      else seqs[s][d] = seqs[s][d];
      sent++;
    end
    // single-flit packets carry no sequence number: count them apart
    repeat (3) @(posedge clk);
    rst = 0;
    run = 1;
    repeat (8000) @(posedge clk);
    check(recv == sent, $sformatf("received %0d of %0d packets", recv, sent));
    $display("ring: packets=%0d", recv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
