// Self-checking testbench for lisnoc_mesh (2x2).
//
// Every tile injects random packets of 1..6 flits on both virtual channels
// to random other tiles while the tile outputs apply random back-pressure.
// The receiving side checks that each packet arrives at the tile named in
// its header, complete, not interleaved with another packet on the same VC,
// and that packets from one source on one VC stay in order. It also checks
// the hop latency of a lone flit from tile 0 to tile 3 (three routers: one
// cycle each) and that link activity was reported.
module lisnoc_mesh_tb;
  import lisnoc_pkg::*;

  localparam int VCH = 2, N = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  flit_t          in_flit [N], out_flit [N];
  logic [VCH-1:0] in_valid [N], in_ready [N], out_valid [N], out_ready [N];
  logic [PORTS-1:0] link_act [N];

  lisnoc_mesh #(.X(2), .Y(2), .VCHANNELS(VCH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  flit_t q [N][VCH][$];
  int sent = 0, recv = 0, acts = 0;
  int next_seq [N][N][VCH];   // expected sequence per (src, dst, vc)

  function automatic flit_t mk(input flit_type_e t, input int dest, input int src, input int seq, input int idx);
    flit_t f;
    f.ftype = t;
    f.data  = {5'(dest), 3'd0, 5'(src), 11'(seq), 8'(idx)};
    return f;
  endfunction

  task automatic add_pkt(input int s, input int v, input int d, input int len, input int seq);
    flit_type_e t;
    for (int i = 0; i < len; i++) begin
      if (len == 1) t = FLIT_SINGLE;
      else if (i == 0) t = FLIT_HEADER;
      else if (i == len - 1) t = FLIT_LAST;
      else t = FLIT_PAYLOAD;
      q[s][v].push_back(mk(t, d, s, seq, i));
    end
    sent++;
  endtask

  bit manual = 1;
  always @(negedge clk) if (!manual) begin
    int start, v;
    for (int p = 0; p < N; p++) begin
      in_valid[p] = '0;
      in_flit[p]  = '0;
      start = $urandom_range(0, VCH - 1);
      for (int k = 0; k < VCH; k++) begin
        v = (start + k) % VCH;
        if (in_valid[p] == '0 && q[p][v].size() > 0 && in_ready[p][v] && $urandom_range(0, 9) < 8) begin
          in_valid[p][v] = 1'b1;
          in_flit[p] = q[p][v].pop_front();
        end
      end
      for (int w = 0; w < VCH; w++) out_ready[p][w] = ($urandom_range(0, 99) < 70);
    end
  end

  int cur_src [N][VCH], cur_seq [N][VCH], cur_idx [N][VCH];
  bit in_pkt [N][VCH];
  always @(posedge clk) if (!rst) begin
    for (int d = 0; d < N; d++) begin
      acts += $countones(link_act[d]);
      for (int v = 0; v < VCH; v++) begin
        if (out_valid[d][v]) begin
          automatic flit_t f = out_flit[d];
          automatic int src = int'(f.data[23:19]);
          automatic int seq = int'(f.data[18:8]);
          automatic int idx = int'(f.data[7:0]);
          if (is_head(f.ftype)) begin
            check(!in_pkt[d][v], "header inside a packet");
            check(int'(f.data[31:27]) == d, $sformatf("packet for %0d delivered to %0d", f.data[31:27], d));
            check(seq == next_seq[src][d][v], $sformatf("order %0d->%0d vc%0d: got %0d want %0d", src, d, v, seq, next_seq[src][d][v]));
            next_seq[src][d][v] = seq + 1;
            check(idx == 0, "header index");
            cur_src[d][v] = src; cur_seq[d][v] = seq; cur_idx[d][v] = 0; in_pkt[d][v] = 1;
          end else begin
            check(in_pkt[d][v] && src == cur_src[d][v] && seq == cur_seq[d][v] && idx == cur_idx[d][v] + 1,
                  $sformatf("interleaved/out of order flit at %0d vc%0d", d, v));
            cur_idx[d][v] = idx;
          end
          if (is_tail(f.ftype)) begin in_pkt[d][v] = 0; recv++; end
        end
      end
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seqs [N][N][VCH];
    int s, d, v;
    for (int a = 0; a < N; a++) begin
      in_valid[a] = '0; in_flit[a] = '0; out_ready[a] = '1;
      for (int b = 0; b < VCH; b++) begin in_pkt[a][b] = 0; cur_src[a][b] = 0; cur_seq[a][b] = 0; cur_idx[a][b] = 0; end
      for (int b = 0; b < N; b++) for (int c = 0; c < VCH; c++) begin next_seq[a][b][c] = 0; seqs[a][b][c] = 0; end
    end
    repeat (3) @(posedge clk);
    rst = 0;
    // latency: tile 0 -> tile 3 crosses routers (0,0), (1,0), (1,1)
    @(negedge clk);
    in_flit[0] = mk(FLIT_SINGLE, 3, 0, 0, 0);
    in_valid[0] = 2'b01;
    @(posedge clk); #1;
    in_valid[0] = '0;
    next_seq[0][3][0] = 0;
    @(posedge clk); #1;
    check(out_valid[3] == 2'b00, "flit arrived too early");
    @(posedge clk); #1;
    check(out_valid[3] == 2'b01, "flit not at tile 3 three cycles after entry");
    seqs[0][3][0] = 1;
    @(posedge clk);
    for (int n = 0; n < 200; n++) begin
      s = $urandom_range(0, N - 1);
      d = (s + $urandom_range(1, N - 1)) % N;
      v = $urandom_range(0, 1);
      add_pkt(s, v, d, $urandom_range(1, 6), seqs[s][d][v]);
      seqs[s][d][v]++;
    end
    manual = 0;
    repeat (6000) @(posedge clk);
    check(recv == sent + 1, $sformatf("received %0d of %0d packets", recv, sent + 1));
    check(acts > 0, "no link activity reported");
    $display("mesh: packets=%0d link_flits=%0d", recv, acts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
