// Testbench of dbg_itm (instruction trace module). A core model retires a
// random program flow (sequential runs broken by jumps). A reference model
// of the compression predicts every trace message (count of sequential
// instructions, pc, timestamp of the retiring instruction), which is
// compared with the TRACE packets. Phases: tracing switched on directly by
// the host; PC start/stop triggers (including the EVENT packets sent to the
// cross-trigger node); TRIGGER packets from the cross-trigger node; and an
// overflow phase with the debug output blocked, where the drop counts in
// the packets must add up to the messages that are missing.
module dbg_itm_tb;
  import dbg_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic        trace_valid, tracing, dropped_o;
  logic [31:0] trace_pc, timestamp;
  dflit_t      dbg_out, dbg_in;
  logic        dbg_out_valid, dbg_out_ready, dbg_in_valid, dbg_in_ready;

  dbg_itm #(.ID(1), .XTRIG_ID(8), .HOST_ID(0)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [15:0] w[$]);
    for (int i = 0; i < w.size(); i++) begin
      @(negedge clk);
      dbg_in.data = w[i]; dbg_in.last = (i == w.size() - 1); dbg_in_valid = 1;
      do @(posedge clk); while (!dbg_in_ready);
    end
    @(negedge clk);
    dbg_in_valid = 0;
  endtask
  task automatic cfg(input int r, input logic [15:0] v);
    send('{dbg_hdr(8'd1, 8'd0), dbg_type(DT_CONFIG, 12'(r)), v});
  endtask

  always @(posedge clk) timestamp <= rst ? 32'd0 : timestamp + 32'd1;
  bit block = 0;
  always @(negedge clk) dbg_out_ready = !block && $urandom_range(0, 4) != 0;

  // reference model: messages {cnt, pc, ts}
  int exp_cnt [$], exp_pc [$], exp_ts [$];
  int m_cnt = 0;
  bit m_have = 0;
  logic [31:0] m_last;
  // PC triggers as configured by the test: the start instruction is traced,
  // the stop instruction is not
  bit armed = 0;
  always @(posedge clk) if (!rst && trace_valid) begin
    if ((tracing || (armed && trace_pc == 32'h800)) && !(armed && trace_pc == 32'h900)) begin
      if (m_have && trace_pc == m_last + 4) m_cnt++;
      else begin
        exp_cnt.push_back(m_cnt); exp_pc.push_back(int'(trace_pc)); exp_ts.push_back(int'(timestamp));
        m_cnt = 0;
      end
      m_last = trace_pc; m_have = 1;
    end else m_have = 0;
  end

  // packet monitor
  logic [15:0] cur [$];
  int traces = 0, events_start = 0, events_stop = 0, drops = 0, mism = 0;
  bit check_exact = 1;
  always @(posedge clk) if (!rst && dbg_out_valid && dbg_out_ready) begin
    cur.push_back(dbg_out.data);
    if (dbg_out.last) begin
      if (cur[1][15:12] == DT_EVENT) begin
        check(cur.size() == 2 && cur[0] == dbg_hdr(8'd8, 8'd1), "event packet format");
        events_start += int'(cur[1][0]);
        events_stop  += int'(cur[1][1]);
      end else begin
        int c, p, t;
        check(cur.size() == 7 && cur[0] == dbg_hdr(8'd0, 8'd1) && cur[1][15:12] == DT_TRACE, "trace packet format");
        drops += int'(cur[1][11:0]);
        traces++;
        if (check_exact) begin
          c = exp_cnt.pop_front(); p = exp_pc.pop_front(); t = exp_ts.pop_front();
          check(int'(cur[4]) == c && {cur[5], cur[6]} == 32'(p) && {cur[2], cur[3]} == 32'(t),
                $sformatf("trace (%0d,%h,ts %0d), expected (%0d,%h,ts %0d)", cur[4], {cur[5], cur[6]}, {cur[2], cur[3]}, c, p, t));
        end
      end
      cur.delete();
    end
  end

  // random program flow
  logic [31:0] pc = 32'h400;
  task automatic run(input int n, input int gap);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      trace_valid = 1; trace_pc = pc;
      pc = ($urandom_range(0, 5) == 0) ? 32'h400 + 4 * $urandom_range(0, 255) : pc + 4;
      @(negedge clk);
      trace_valid = 0;
      repeat (gap) @(negedge clk);
    end
  endtask
  task automatic exec(input logic [31:0] a);
    @(negedge clk); trace_valid = 1; trace_pc = a;
    @(negedge clk); trace_valid = 0;
    repeat (4) @(negedge clk);
  endtask

  initial begin
    int t0;
    trace_valid = 0; trace_pc = 0; dbg_in = '0; dbg_in_valid = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    // 1: host switches tracing on and off
    run(20, 2);
    check(traces == 0 && !tracing, "trace while off");
    cfg(0, 16'h0001);
    run(300, 3);
    cfg(0, 16'h0000);
    repeat (100) @(posedge clk);
    check(exp_cnt.size() == 0, $sformatf("%0d trace messages missing", exp_cnt.size()));
    // 2: PC triggers
    cfg(1, 16'h0800); cfg(2, 16'h0000); cfg(3, 16'h0900); cfg(4, 16'h0000);
    cfg(0, 16'h0002);
    armed = 1;
    run(30, 2);            // pcs below 0x800: nothing
    t0 = traces;
    exec(32'h800); check(tracing, "start PC did not start tracing");
    exec(32'h804); exec(32'h808); exec(32'h500); exec(32'h504);
    exec(32'h900); check(!tracing, "stop PC did not stop tracing");
    exec(32'h904);
    repeat (100) @(posedge clk);
    check(traces - t0 == 2, $sformatf("%0d messages between PC triggers, expected 2", traces - t0));
    check(events_start == 1 && events_stop == 1, "events to cross trigger");
    check(exp_cnt.size() == 0, "PC trigger trace mismatch");
    // 3: TRIGGER packets
    cfg(0, 16'h0000);
    armed = 0;
    send('{dbg_hdr(8'd1, 8'd8), dbg_type(DT_TRIGGER, 12'd1)});
    repeat (3) @(posedge clk);
    check(tracing, "trigger start");
    run(50, 3);
    send('{dbg_hdr(8'd1, 8'd8), dbg_type(DT_TRIGGER, 12'd2)});
    repeat (3) @(posedge clk);
    check(!tracing, "trigger stop");
    repeat (100) @(posedge clk);
    check(exp_cnt.size() == 0, "trigger trace mismatch");
    // 4: overflow
    check_exact = 0;
    t0 = traces;
    begin
      int e0;
      e0 = drops;
      cfg(0, 16'h0001);
      block = 1;
      for (int i = 0; i < 40; i++) exec(32'h1000 + 16 * i);   // 40 jumps
      cfg(0, 16'h0000);
      block = 0;
      repeat (300) @(posedge clk);
      check(drops - e0 > 0, "no overflow");
      check((traces - t0) + (drops - e0) == 40, $sformatf("messages %0d + dropped %0d != 40", traces - t0, drops - e0));
    end
    $display("itm: traces=%0d drops=%0d", traces, drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
