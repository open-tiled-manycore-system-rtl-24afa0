// Testbench of dbg_usb_if. The host side and the debug NoC side are both
// driven with random packets (1 to 9 words) and random stalls on every
// ready. Checks, in both directions, that every packet arrives whole and in
// order: host to chip, the length word is removed and the last word is
// marked; chip to host, the packet is preceded by its length word. Also
// checks that a zero length word from the host is skipped.
module dbg_usb_if_tb;
  import dbg_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [15:0] usb_out_data, usb_in_data;
  logic        usb_out_valid, usb_out_ready, usb_in_valid, usb_in_ready;
  dflit_t      dbg_out, dbg_in;
  logic        dbg_out_valid, dbg_out_ready, dbg_in_valid, dbg_in_ready;

  dbg_usb_if dut (.*);

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

  localparam int NPKT = 60;
  // host -> chip
  logic [15:0] h2c_stream [$];      // words the host writes (with length words)
  logic [15:0] h2c_exp [$][$];      // packets expected on dbg_out
  // chip -> host
  logic [15:0] c2h_pkts [$][$];     // packets driven on dbg_in
  logic [15:0] c2h_exp [$];         // word stream expected on usb_out

  initial begin
    for (int p = 0; p < NPKT; p++) begin
      logic [15:0] w [$];
      int n;
      n = $urandom_range(1, 9);
      w.delete();
      for (int i = 0; i < n; i++) w.push_back(16'($urandom));
      if (p == 10) h2c_stream.push_back(16'd0);
      h2c_stream.push_back(16'(n));
      foreach (w[i]) h2c_stream.push_back(w[i]);
      h2c_exp.push_back(w);
      n = $urandom_range(1, 9);
      w.delete();
      for (int i = 0; i < n; i++) w.push_back(16'($urandom));
      c2h_pkts.push_back(w);
      c2h_exp.push_back(16'(n));
      foreach (w[i]) c2h_exp.push_back(w[i]);
    end
  end

  // drivers (change at negedge, handshake at posedge)
  bit h2c_fire, c2h_fire;
  int c2h_p = 0, c2h_w = 0;
  always @(posedge clk) begin
    h2c_fire <= usb_in_valid && usb_in_ready;
    c2h_fire <= dbg_in_valid && dbg_in_ready;
  end
  always @(negedge clk) if (!rst) begin
    if (h2c_fire) void'(h2c_stream.pop_front());
    usb_in_valid = h2c_stream.size() > 0 && $urandom_range(0, 3) != 0;
    usb_in_data  = h2c_stream.size() > 0 ? h2c_stream[0] : 16'd0;
    if (c2h_fire) begin
      c2h_w++;
      if (c2h_w == c2h_pkts[c2h_p].size()) begin c2h_w = 0; c2h_p++; end
    end
    dbg_in_valid = c2h_p < NPKT && $urandom_range(0, 3) != 0;
    dbg_in.data  = c2h_p < NPKT ? c2h_pkts[c2h_p][c2h_w] : 16'd0;
    dbg_in.last  = c2h_p < NPKT && c2h_w == c2h_pkts[c2h_p].size() - 1;
    usb_out_ready = $urandom_range(0, 3) != 0;
    dbg_out_ready = $urandom_range(0, 3) != 0;
  end

  // monitors
  int h2c_got = 0, c2h_got = 0, h2c_w = 0;
  always @(posedge clk) if (!rst) begin
    if (dbg_out_valid && dbg_out_ready) begin
      check(h2c_got < NPKT && dbg_out.data == h2c_exp[h2c_got][h2c_w], $sformatf("host->chip packet %0d word %0d", h2c_got, h2c_w));
      check(dbg_out.last == (h2c_w == h2c_exp[h2c_got].size() - 1), $sformatf("host->chip packet %0d last flag", h2c_got));
      h2c_w++;
      if (dbg_out.last) begin h2c_got++; h2c_w = 0; end
    end
    if (usb_out_valid && usb_out_ready) begin
      check(c2h_exp.size() > 0 && usb_out_data == c2h_exp[0], $sformatf("chip->host word %0d", c2h_got));
      if (c2h_exp.size() > 0) void'(c2h_exp.pop_front());
      c2h_got++;
    end
  end

  initial begin
    usb_in_valid = 0; usb_in_data = 0; dbg_in = '0; dbg_in_valid = 0;
    usb_out_ready = 0; dbg_out_ready = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    wait (h2c_got == NPKT && c2h_exp.size() == 0);
    repeat (20) @(posedge clk);
    check(h2c_got == NPKT, "all host->chip packets");
    check(c2h_exp.size() == 0, "all chip->host words");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
