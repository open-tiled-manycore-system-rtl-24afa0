// Testbench of dbg_link_stats. Random link activity (a different rate per
// port) is applied while the host configures a window of 50 cycles and
// enables counting. A reference count per port is kept per window and
// compared with the counts in each STATS packet; the windows must be exactly
// 50 cycles apart. Then the debug output is blocked for several windows: the
// windows in between are dropped and the next packet carries the number of
// dropped windows. Finally a TRIGGER stop packet halts counting.
module dbg_link_stats_tb;
  import dbg_pkg::*;
  localparam int NP = 5, WIN = 50;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [NP-1:0] link_act;
  logic [31:0]   timestamp;
  dflit_t        dbg_out, dbg_in;
  logic          dbg_out_valid, dbg_out_ready, dbg_in_valid, dbg_in_ready, report_o;

  dbg_link_stats #(.ID(4), .HOST_ID(0), .NPORTS(NP)) dut (.*);

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

  always @(posedge clk) timestamp <= rst ? 32'd0 : timestamp + 32'd1;
  bit block = 0;
  always @(negedge clk) begin
    for (int p = 0; p < NP; p++) link_act[p] = ($urandom_range(0, 4) < p);
    dbg_out_ready = !block && $urandom_range(0, 2) != 0;
  end

  // reference: counts of the window ending at each window end
  int acc [NP];
  int exp_q [$];        // NP entries per expected packet (-1 = not checked)
  int last_end = -1, ends = 0, cyc = 0;
  bit primed = 0;
  always @(posedge clk) if (!rst) begin
    cyc++;
    if (dut.window_end) begin
      if (last_end >= 0) check(cyc - last_end == WIN, $sformatf("window of %0d cycles", cyc - last_end));
      last_end = cyc;
      ends++;
      if (report_o) for (int p = 0; p < NP; p++) exp_q.push_back(primed ? acc[p] : -1);
      primed = 1;
      for (int p = 0; p < NP; p++) acc[p] = int'(link_act[p]);
    end else
      for (int p = 0; p < NP; p++) acc[p] += int'(link_act[p]);
  end

  logic [15:0] cur [$];
  int pkts = 0, drops = 0;
  always @(posedge clk) if (!rst && dbg_out_valid && dbg_out_ready) begin
    cur.push_back(dbg_out.data);
    if (dbg_out.last) begin
      int e;
      check(cur.size() == 4 + NP && cur[0] == dbg_hdr(8'd0, 8'd4) && cur[1][15:12] == DT_STATS, "stats packet format");
      drops += int'(cur[1][11:0]);
      for (int p = 0; p < NP; p++) begin
        e = exp_q.pop_front();
        if (e >= 0) check(int'(cur[4+p]) == e, $sformatf("packet %0d port %0d: %0d, expected %0d", pkts, p, cur[4+p], e));
      end
      pkts++;
      cur.delete();
    end
  end

  initial begin
    int p0, e0;
    dbg_in = '0; dbg_in_valid = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    send('{dbg_hdr(8'd4, 8'd0), dbg_type(DT_CONFIG, 12'd0), 16'(WIN)});
    send('{dbg_hdr(8'd4, 8'd0), dbg_type(DT_CONFIG, 12'd1), 16'd1});
    repeat (10 * WIN) @(posedge clk);
    check(pkts >= 8, $sformatf("%0d packets in 10 windows", pkts));
    check(drops == 0, "drops without back-pressure");
    // block the output for several windows
    block = 1;
    repeat (4 * WIN) @(posedge clk);
    block = 0;
    repeat (3 * WIN) @(posedge clk);
    check(drops >= 2, $sformatf("dropped windows reported: %0d", drops));
    // stop by trigger
    send('{dbg_hdr(8'd4, 8'd8), dbg_type(DT_TRIGGER, 12'd2)});
    repeat (WIN) @(posedge clk);
    p0 = pkts; e0 = ends;
    repeat (3 * WIN) @(posedge clk);
    check(pkts == p0 && ends == e0, "counting continued after stop trigger");
    check(exp_q.size() == 0, "packets missing");
    $display("stats: packets=%0d windows=%0d dropped=%0d", pkts, ends, drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
