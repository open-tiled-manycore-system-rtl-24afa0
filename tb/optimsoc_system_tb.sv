// End-to-end testbench of optimsoc_system at its default parameters (2x2
// mesh: compute tiles 0, 2, 3 with one core each, memory tile 1).
//
// The cores are testbench processes that fetch instructions through the
// I$ ports (reporting each fetched PC as retired on the trace port) and do
// loads and stores through the D$ ports; the host is a testbench process on
// the USB word FIFO. The run:
//   host     configures over the debug NoC: the trace module of core 0 with
//            a start and a stop PC, the cross-trigger unit to pass core 0's
//            start/stop events to the trace modules of cores 2 and 3, and all
//            link statistics modules with a 256-cycle window;
//   tile 0   runs a loop (start PC ... stop PC), writes a block and moves it
//            by DMA to the memory tile, and sends a message to tile 3;
//   tile 2   writes a block and moves it by DMA into tile 0's memory, where
//            tile 0 holds a stale cached copy;
//   tile 3   jumps on every instruction (more trace than the debug NoC can
//            carry) and receives tile 0's message;
//   tile 1   (memory tile) is read back over its local port.
// Checks: DMA data at both destinations, the cached copy being invalidated
// (snooping), the message, the exact compressed trace of core 0 against an
// independent model of the compression, trace from cores 2 and 3 only while
// the cross trigger had them on, statistics packets, and that every named
// mechanism happened at least once.
module optimsoc_system_tb;
  import lisnoc_pkg::*;
  import tile_pkg::*;
  import dbg_pkg::*;

  localparam int NC = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  bus_req_t    core_ibus_req [NC], core_dbus_req [NC];
  bus_rsp_t    core_ibus_rsp [NC], core_dbus_rsp [NC];
  logic        trace_valid [NC];
  logic [31:0] trace_pc [NC];
  logic        irq [4];
  bus_req_t    ext_req;
  bus_rsp_t    ext_rsp;
  logic [15:0] usb_out_data, usb_in_data;
  logic        usb_out_valid, usb_out_ready, usb_in_valid, usb_in_ready;

  optimsoc_system dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ------------------------------------------------------------------ cores
  task automatic dacc(input int c, input logic we, input logic [31:0] a, input logic [31:0] d, output logic [31:0] r);
    int lat;
    @(negedge clk);
    core_dbus_req[c].req = 1; core_dbus_req[c].we = we; core_dbus_req[c].addr = a; core_dbus_req[c].wdata = d;
    lat = 0;
    do begin @(posedge clk); #1; lat++; end while (!core_dbus_rsp[c].ack && lat < 5000);
    if (lat >= 5000) begin failures++; $display("FAIL: core %0d access %h hangs", c, a); end
    r = core_dbus_rsp[c].rdata;
    @(negedge clk);
    core_dbus_req[c] = '0;
  endtask

  // fetch one instruction and retire it
  task automatic exec(input int c, input logic [31:0] pc);
    int lat;
    @(negedge clk);
    core_ibus_req[c].req = 1; core_ibus_req[c].we = 0; core_ibus_req[c].addr = pc; core_ibus_req[c].wdata = 0;
    lat = 0;
    do begin @(posedge clk); #1; lat++; end while (!core_ibus_rsp[c].ack && lat < 5000);
    check(core_ibus_rsp[c].rdata == (32'h1500_0000 | pc), $sformatf("core %0d fetched %h at %h", c, core_ibus_rsp[c].rdata, pc));
    @(negedge clk);
    core_ibus_req[c] = '0;
    trace_valid[c] = 1; trace_pc[c] = pc;
    @(negedge clk);
    trace_valid[c] = 0;
  endtask

  task automatic load_code(input int c, input logic [31:0] from, input logic [31:0] to);
    logic [31:0] r;
    for (logic [31:0] a = from; a <= to; a += 4) dacc(c, 1, a, 32'h1500_0000 | a, r);
  endtask

  // independent model of core 0's trace (start 0x100, stop 0x180)
  typedef struct { int cnt; logic [31:0] pc; } tmsg_t;
  tmsg_t exp_trace [$];
  bit m_tr = 0, m_have = 0;
  int m_cnt = 0;
  logic [31:0] m_last;
  always @(posedge clk) if (trace_valid[0]) begin
    if (trace_pc[0] == 32'h100) m_tr = 1;
    if (trace_pc[0] == 32'h180) m_tr = 0;
    if (m_tr) begin
      if (m_have && trace_pc[0] == m_last + 4) m_cnt++;
      else begin exp_trace.push_back('{m_cnt, trace_pc[0]}); m_cnt = 0; end
      m_last = trace_pc[0]; m_have = 1;
    end else m_have = 0;
  end

  // ------------------------------------------------------------------- host
  logic [15:0] host_q [$];
  bit in_fire;
  always @(posedge clk) in_fire <= usb_in_valid && usb_in_ready;
  always @(negedge clk) begin
    if (in_fire) void'(host_q.pop_front());
    usb_in_valid  = host_q.size() > 0;
    usb_in_data   = (host_q.size() > 0) ? host_q[0] : 16'd0;
    usb_out_ready = ($urandom_range(0, 9) < 8);
  end

  task automatic host_cfg(input int node, input int r, input logic [15:0] v);
    host_q.push_back(16'd3);
    host_q.push_back(dbg_hdr(8'(node), 8'd0));
    host_q.push_back(dbg_type(DT_CONFIG, 12'(r)));
    host_q.push_back(v);
  endtask

  // packets from the chip
  tmsg_t got_trace [$];
  int trace_pkts [16];
  int stats_pkts = 0, stats_sum = 0, trace_dropped = 0, framed = 0, other = 0;
  logic [15:0] pkt [$];
  int want = -1;
  always @(posedge clk) if (!rst && usb_out_valid && usb_out_ready) begin
    if (want < 0) begin
      want = int'(usb_out_data);
      pkt.delete();
    end else begin
      pkt.push_back(usb_out_data);
      if (pkt.size() == want) begin
        framed++;
        want = -1;
        check(pkt[0][15:8] == 8'd0, "packet to host not addressed to node 0");
        case (pkt[1][15:12])
          DT_TRACE: begin
            check(pkt.size() == 7, "trace packet length");
            trace_pkts[pkt[0][3:0]]++;
            trace_dropped += int'(pkt[1][11:0]);
            if (pkt[0][7:0] == 8'd1) got_trace.push_back('{int'(pkt[4]), {pkt[5], pkt[6]}});
          end
          DT_STATS: begin
            stats_pkts++;
            for (int i = 4; i < pkt.size(); i++) begin
              stats_sum += int'(pkt[i]);
              check(pkt[i] <= 16'd256, "link count above window");
            end
          end
          default: other++;
        endcase
      end
    end
  end

  // ------------------------------------------------------------ mechanisms
  int m_vc_interleave = 0, m_noc_stall = 0, m_hit = 0, m_inval = 0, m_dropped = 0;
  int m_xtrig = 0, m_stats = 0;
  always @(posedge clk) if (!rst) begin
    for (int o = 0; o < PORTS; o++) begin
      if (dut.u_mesh.g_y[0].g_x[0].u_router.sel_any[o] &&
          dut.u_mesh.g_y[0].g_x[0].u_router.lock_q[o][0] && dut.u_mesh.g_y[0].g_x[0].u_router.lock_q[o][1]) m_vc_interleave++;
      if (dut.u_mesh.g_y[0].g_x[1].u_router.sel_any[o] &&
          dut.u_mesh.g_y[0].g_x[1].u_router.lock_q[o][0] && dut.u_mesh.g_y[0].g_x[1].u_router.lock_q[o][1]) m_vc_interleave++;
    end
    for (int p = 0; p < PORTS; p++) for (int v = 0; v < 2; v++) begin
      if (dut.u_mesh.g_y[0].g_x[0].u_router.head_vld[p][v] && !dut.u_mesh.g_y[0].g_x[0].u_router.pop[p][v]) m_noc_stall++;
      if (dut.u_mesh.g_y[0].g_x[1].u_router.head_vld[p][v] && !dut.u_mesh.g_y[0].g_x[1].u_router.pop[p][v]) m_noc_stall++;
      if (dut.u_mesh.g_y[1].g_x[0].u_router.head_vld[p][v] && !dut.u_mesh.g_y[1].g_x[0].u_router.pop[p][v]) m_noc_stall++;
      if (dut.u_mesh.g_y[1].g_x[1].u_router.head_vld[p][v] && !dut.u_mesh.g_y[1].g_x[1].u_router.pop[p][v]) m_noc_stall++;
    end
    m_hit   += $countones(dut.g_tile[0].g_cmp.hit) + $countones(dut.g_tile[2].g_cmp.hit) + $countones(dut.g_tile[3].g_cmp.hit);
    m_inval += $countones(dut.g_tile[0].g_cmp.inval) + $countones(dut.g_tile[2].g_cmp.inval) + $countones(dut.g_tile[3].g_cmp.inval);
    m_dropped += int'(dut.g_dbg[3].g_itm.g_c[0].dropped);
    m_xtrig += int'(dut.xtrig_fire);
    m_stats += int'(dut.g_dbg[0].g_stats.report);
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit dma2_done = 0, msg_sent = 0;

  initial begin
    logic [31:0] r;
    int n;
    for (int c = 0; c < NC; c++) begin
      core_ibus_req[c] = '0; core_dbus_req[c] = '0; trace_valid[c] = 0; trace_pc[c] = '0;
    end
    for (int i = 0; i < 16; i++) trace_pkts[i] = 0;
    ext_req = '0;
    repeat (4) @(posedge clk);
    rst = 0;
    // ---- debug configuration (node numbers: 1..3 ITM, 4..7 stats, 8 cross trigger)
    host_cfg(1, 1, 16'h0100); host_cfg(1, 2, 16'h0000);
    host_cfg(1, 3, 16'h0180); host_cfg(1, 4, 16'h0000);
    host_cfg(1, 0, 16'h0002);
    host_cfg(8, 0, 16'h0000); host_cfg(8, 1, 16'h0002); host_cfg(8, 2, 16'h000C);
    for (int s = 4; s < 8; s++) begin host_cfg(s, 0, 16'd256); host_cfg(s, 1, 16'd1); end
    wait (host_q.size() == 0);
    repeat (100) @(posedge clk);
    fork
      // ------------------------------------------------------------ tile 0
      begin
        load_code(0, 32'h100, 32'h190);
        for (int i = 0; i < 16; i++) dacc(0, 1, 32'h2000 + 4*i, 32'hA000 + i, r);
        // stale copy of the block tile 2 will overwrite
        for (int i = 0; i < 8; i++) dacc(0, 0, 32'h3000 + 4*i, 0, r);
        // program: loop 0x100..0x120 three times, jump to 0x160..0x170, 0x180 stops
        for (int l = 0; l < 3; l++) for (logic [31:0] pc = 32'h100; pc <= 32'h120; pc += 4) exec(0, pc);
        for (logic [31:0] pc = 32'h160; pc <= 32'h170; pc += 4) exec(0, pc);
        // DMA block 0x2000 -> memory tile 0x1000
        dacc(0, 1, 32'hE000_0020, 32'h2000, r);
        dacc(0, 1, 32'hE000_0024, 32'd1, r);
        dacc(0, 1, 32'hE000_0028, 32'h1000, r);
        dacc(0, 1, 32'hE000_002C, 32'd16, r);
        dacc(0, 1, 32'hE000_0030, 32'd1, r);
        exec(0, 32'h140); exec(0, 32'h144);
        // message to tile 3
        dacc(0, 1, 32'hE000_0000, make_hdr(5'd3, CLASS_MP, 5'd0), r);
        // longer than tile 3's receive buffer: the tail waits in the routers
        for (int i = 1; i < 24; i++) dacc(0, 1, 32'hE000_0000, 32'h600D_0000 + i, r);
        dacc(0, 1, 32'hE000_0004, 32'h600D_0018, r);
        msg_sent = 1;
        wait (dma2_done);
        exec(0, 32'h180); exec(0, 32'h184); exec(0, 32'h188);
        n = 0;
        do begin dacc(0, 0, 32'hE000_0030, 0, r); n++; end while (r[0] && n < 1000);
        for (int i = 0; i < 8; i++) begin
          dacc(0, 0, 32'h3000 + 4*i, 0, r);
          check(r == 32'hB000 + i, $sformatf("tile 0 sees %h at %h after DMA from tile 2", r, 32'h3000 + 4*i));
        end
      end
      // ------------------------------------------------------------ tile 2
      begin
        load_code(2, 32'h100, 32'h13C);
        for (int i = 0; i < 8; i++) dacc(2, 1, 32'h800 + 4*i, 32'hB000 + i, r);
        wait (exp_trace.size() > 0);
        repeat (200) @(posedge clk);
        for (int l = 0; l < 4; l++) for (logic [31:0] pc = 32'h100; pc <= 32'h13C; pc += 4) exec(2, pc);
        dacc(2, 1, 32'hE000_0020, 32'h800, r);
        dacc(2, 1, 32'hE000_0024, 32'd0, r);
        dacc(2, 1, 32'hE000_0028, 32'h3000, r);
        dacc(2, 1, 32'hE000_002C, 32'd8, r);
        dacc(2, 1, 32'hE000_0030, 32'd1, r);
        do dacc(2, 0, 32'hE000_0030, 0, r); while (r[0]);
        repeat (60) @(posedge clk);
        dma2_done = 1;
      end
      // ------------------------------------------------------------ tile 3
      begin
        load_code(3, 32'h200, 32'h2FC);
        wait (exp_trace.size() > 0);
        repeat (200) @(posedge clk);
        for (int i = 0; i < 64; i++) exec(3, 32'h200 + 4 * $urandom_range(0, 63));
        wait (msg_sent);
        n = 0;
        do begin dacc(3, 0, 32'hE000_0008, 0, r); n++; end while (r < 16 && n < 2000);
        check(irq[3], "tile 3 irq");
        dacc(3, 0, 32'hE000_000C, 0, r); check(r == make_hdr(5'd3, CLASS_MP, 5'd0), "message header");
        for (int i = 1; i <= 24; i++) begin
          dacc(3, 0, 32'hE000_000C, 0, r);
          check(r == 32'h600D_0000 + i, $sformatf("message word %0d = %h", i, r));
        end
        dacc(3, 0, 32'hE000_0010, 0, r); check(r[1], "message end flag");
      end
    join
    // memory tile read-back over its local port
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      ext_req.req = 1; ext_req.we = 0; ext_req.addr = 32'h1000 + 4*i; ext_req.wdata = 0;
      do begin @(negedge clk); #1; end while (!ext_rsp.ack);
      check(ext_rsp.rdata == 32'hA000 + i, $sformatf("memory tile word %0d = %h", i, ext_rsp.rdata));
      @(negedge clk);
      ext_req = '0;
    end
    repeat (3000) @(posedge clk);
    // ---- trace of core 0 against the model
    check(got_trace.size() == exp_trace.size(), $sformatf("core 0 trace: %0d messages, expected %0d", got_trace.size(), exp_trace.size()));
    for (int i = 0; i < got_trace.size() && i < exp_trace.size(); i++)
      check(got_trace[i].cnt == exp_trace[i].cnt && got_trace[i].pc == exp_trace[i].pc,
            $sformatf("trace msg %0d: (%0d,%h) expected (%0d,%h)", i, got_trace[i].cnt, got_trace[i].pc, exp_trace[i].cnt, exp_trace[i].pc));
    check(trace_pkts[2] > 0 && trace_pkts[3] > 0, "cross trigger did not start cores 2/3 tracing");
    check(!dut.g_dbg[2].g_itm.g_c[0].tracing && !dut.g_dbg[3].g_itm.g_c[0].tracing, "cross trigger did not stop tracing");
    check(stats_pkts > 0 && stats_sum > 0, "no link statistics");
    check(other == 0, "unexpected packet types");
    // ---- mechanisms
    check(m_vc_interleave > 0, "VC interleaving never happened");
    check(m_noc_stall > 0, "NoC back-pressure never happened");
    check(m_hit > 0, "cache hit never happened");
    check(m_inval > 0, "snoop invalidation never happened");
    check(m_dropped > 0 && trace_dropped > 0, "trace overflow never happened");
    check(m_xtrig >= 2, "cross trigger fired fewer than twice");
    check(m_stats > 0, "statistics window never ended");
    $display("mechanisms: vc_interleave=%0d noc_stall=%0d cache_hit=%0d snoop_inval=%0d trace_drop=%0d xtrig=%0d stats=%0d",
             m_vc_interleave, m_noc_stall, m_hit, m_inval, m_dropped, m_xtrig, m_stats);
    $display("host: packets=%0d trace(1,2,3)=%0d,%0d,%0d stats=%0d core0 msgs=%0d", framed,
             trace_pkts[1], trace_pkts[2], trace_pkts[3], stats_pkts, got_trace.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
