// Self-checking testbench for lisnoc_router (router at (0,0) of a 2x2 mesh).
//
// Random packets on both virtual channels enter on the local, east and south
// ports; destinations are chosen so each output is reachable by XY routing.
// Outputs see random back-pressure. A scoreboard checks, per output and VC,
// that each packet arrives on the port XY routing predicts, complete, in
// order and not interleaved with another packet on the same VC (wormhole).
// It also checks the one-cycle hop latency of a lone flit and counts how
// often two VCs interleaved on one link and how often back-pressure stalled.
module lisnoc_router_tb;
  import lisnoc_pkg::*;

  localparam int VCH = 2;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  flit_t          in_flit [PORTS], out_flit [PORTS];
  logic [VCH-1:0] in_valid [PORTS], in_ready [PORTS], out_valid [PORTS], out_ready [PORTS];

  lisnoc_router #(.X(2), .Y(2), .XPOS(0), .YPOS(0), .VCHANNELS(VCH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // expected output port at (0,0): dest 0 local, 1 east, 2 south, 3 east
  function automatic int exp_port(input int dest);
    case (dest) 0: return P_LOCAL; 1: return P_EAST; 2: return P_SOUTH; default: return P_EAST; endcase
  endfunction

  // packet queues per input port and VC: flits packed as {type, data}
  flit_t q [PORTS][VCH][$];
  int sent_pkts = 0, recv_pkts = 0, vc_switches = 0, stalls = 0;

  function automatic flit_t mk(input flit_type_e t, input int dest, input int id, input int idx);
    flit_t f;
    f.ftype = t;
    f.data  = {5'(dest), 3'd0, 5'd0, 11'(id), 8'(idx)};
    return f;
  endfunction

  task automatic add_pkt(input int p, input int v, input int dest, input int len, input int id);
    for (int i = 0; i < len; i++) begin
      flit_type_e t;
      if (len == 1) t = FLIT_SINGLE;
      else if (i == 0) t = FLIT_HEADER;
      else if (i == len - 1) t = FLIT_LAST;
      else t = FLIT_PAYLOAD;
      q[p][v].push_back(mk(t, dest, id, i));
    end
    sent_pkts++;
  endtask

  // drivers (change inputs on the falling edge)
  bit drive_en = 0, manual = 1;
  int rdy_pct = 70;
  always @(negedge clk) if (!manual) begin
    for (int p = 0; p < PORTS; p++) begin
      in_valid[p] = '0;
      in_flit[p]  = '0;
      if (drive_en) begin
        int start, v;
        start = $urandom_range(0, VCH - 1);
        for (int k = 0; k < VCH; k++) begin
          v = (start + k) % VCH;
          if (in_valid[p] == '0 && q[p][v].size() > 0 && in_ready[p][v] && ($urandom_range(0, 9) < 8)) begin
            in_valid[p][v] = 1'b1;
            in_flit[p] = q[p][v].pop_front();
          end
        end
      end
      for (int v = 0; v < VCH; v++) out_ready[p][v] = ($urandom_range(0, 99) < rdy_pct);
    end
  end

  // monitor
  int cur_id [PORTS][VCH];
  int cur_idx [PORTS][VCH];
  bit in_pkt [PORTS][VCH];
  int last_vc [PORTS];
  always @(posedge clk) if (!rst) begin
    for (int o = 0; o < PORTS; o++) begin
      for (int v = 0; v < VCH; v++) begin
        if (!out_ready[o][v] && (dut.cand[o][v] == 0) && dut.head_vld[dut.cand_in[o][v]][v] && dut.lock_q[o][v]) stalls++;
        if (out_valid[o][v]) begin
          automatic flit_t f = out_flit[o];
          automatic int id = int'(f.data[18:8]);
          automatic int idx = int'(f.data[7:0]);
          check(out_ready[o][v], "valid without ready");
          if (last_vc[o] >= 0 && last_vc[o] != v) vc_switches++;
          last_vc[o] = v;
          if (is_head(f.ftype)) begin
            check(!in_pkt[o][v], $sformatf("header inside packet on out %0d vc %0d", o, v));
            check(exp_port(int'(f.data[31:27])) == o, $sformatf("packet %0d on wrong port %0d", id, o));
            check(idx == 0, "header index");
            cur_id[o][v] = id; cur_idx[o][v] = 0; in_pkt[o][v] = 1;
          end else begin
            check(in_pkt[o][v] && id == cur_id[o][v] && idx == cur_idx[o][v] + 1,
                  $sformatf("flit out of order on out %0d vc %0d: id %0d idx %0d", o, v, id, idx));
            cur_idx[o][v] = idx;
          end
          if (is_tail(f.ftype)) begin in_pkt[o][v] = 0; recv_pkts++; end
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
    int id = 1;
    for (int p = 0; p < PORTS; p++) begin
      last_vc[p] = -1;
      for (int v = 0; v < VCH; v++) begin in_pkt[p][v] = 0; cur_id[p][v] = 0; cur_idx[p][v] = 0; end
      in_valid[p] = '0; in_flit[p] = '0; out_ready[p] = '1;
    end
    repeat (3) @(posedge clk);
    rst = 0;
    // latency of a lone flit: accepted at edge t, visible on the output after it
    @(negedge clk);
    rdy_pct = 100;
    in_flit[P_LOCAL] = mk(FLIT_SINGLE, 1, 0, 0);
    in_valid[P_LOCAL] = 2'b01;
    @(posedge clk); #1;
    in_valid[P_LOCAL] = '0;
    check(out_valid[P_EAST] == 2'b01, "lone flit not on east output one cycle after entry");
    @(posedge clk); #1;
    check(out_valid[P_EAST] == 2'b00, "lone flit seen twice");
    // random traffic: local -> 1,2,3 ; east (from (1,0)) -> 0,2 ; south (from (0,1)) -> 0,1
    for (int n = 0; n < 60; n++) begin
      automatic int v = $urandom_range(0, 1);
      automatic int len = $urandom_range(1, 6);
      automatic int src = $urandom_range(0, 2);
      automatic int p = (src == 0) ? P_LOCAL : (src == 1) ? P_EAST : P_SOUTH;
      automatic int dest;
      if (p == P_LOCAL) dest = $urandom_range(1, 3);
      else if (p == P_EAST) dest = ($urandom_range(0, 1) == 0) ? 0 : 2;
      else dest = ($urandom_range(0, 1) == 0) ? 0 : 1;
      add_pkt(p, v, dest, len, id++);
    end
    rdy_pct = 60;
    manual = 0;
    drive_en = 1;
    repeat (3000) @(posedge clk);
    for (int p = 0; p < PORTS; p++) for (int v = 0; v < VCH; v++) if (q[p][v].size()) $display("left p%0d v%0d: %0d", p, v, q[p][v].size());
    check(recv_pkts == sent_pkts + 1, $sformatf("received %0d of %0d packets", recv_pkts, sent_pkts + 1));
    check(vc_switches > 0, "virtual channels never interleaved on a link");
    check(stalls > 0, "back-pressure never stalled a packet");
    $display("router: packets=%0d vc_interleaves=%0d stalls=%0d", recv_pkts, vc_switches, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
