// Testbench of dbg_cross_trigger. Sends CONFIG and EVENT packets to the unit
// on its debug input and collects the TRIGGER packets it sends. Checks the
// OR mode (one selected source is enough, unselected sources are ignored),
// the AND mode (nothing until all selected sources have fired, then one
// trigger), that a TRIGGER packet goes to every destination in the mask with
// the right kind (start/stop), and that the unit answers within a few cycles
// of the event arriving. The output is randomly stalled.
module dbg_cross_trigger_tb;
  import dbg_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  dflit_t dbg_out, dbg_in;
  logic   dbg_out_valid, dbg_out_ready, dbg_in_valid, dbg_in_ready, fire_o;

  dbg_cross_trigger #(.ID(8)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #2000000;
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
    send('{dbg_hdr(8'd8, 8'd0), dbg_type(DT_CONFIG, 12'(r)), v});
  endtask

  task automatic event_from(input int src, input logic [1:0] kind);
    send('{dbg_hdr(8'd8, 8'(src)), dbg_type(DT_EVENT, {10'd0, kind})});
  endtask

  // collected TRIGGER packets: {dest, kind}
  typedef struct { int dest; int kind; } trig_t;
  trig_t got [$];
  logic [15:0] cur [$];
  int fire_cnt = 0;
  always @(negedge clk) dbg_out_ready = ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (!rst) begin
    if (fire_o) fire_cnt++;
    if (dbg_out_valid && dbg_out_ready) begin
      cur.push_back(dbg_out.data);
      if (dbg_out.last) begin
        check(cur.size() == 2 && cur[1][15:12] == DT_TRIGGER && cur[0][7:0] == 8'd8, "trigger packet format");
        got.push_back('{int'(cur[0][15:8]), int'(cur[1][1:0])});
        cur.delete();
      end
    end
  end

  task automatic expect_trigs(input int dests[$], input int kind);
    repeat (60) @(posedge clk);
    check(got.size() == dests.size(), $sformatf("%0d trigger packets, expected %0d", got.size(), dests.size()));
    for (int i = 0; i < dests.size() && i < got.size(); i++)
      check(got[i].dest == dests[i] && got[i].kind == kind,
            $sformatf("trigger %0d: dest %0d kind %0d, expected %0d/%0d", i, got[i].dest, got[i].kind, dests[i], kind));
    got.delete();
  endtask

  initial begin
    int t0, lat;
    dbg_in = '0; dbg_in_valid = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    // OR over sources 1 and 3, destinations 2, 5, 6
    cfg(0, 0); cfg(1, 16'h000A); cfg(2, 16'h0064);
    event_from(4, 2'b01);                 // not selected
    expect_trigs('{}, 0);
    t0 = fire_cnt;
    event_from(3, 2'b01);
    lat = 0;
    while (fire_cnt == t0 && lat < 20) begin @(posedge clk); lat++; end
    check(lat <= 3, $sformatf("trigger %0d cycles after event", lat));
    expect_trigs('{2, 5, 6}, 1);
    event_from(1, 2'b10);
    expect_trigs('{2, 5, 6}, 2);
    // AND over sources 1, 2, 3, destination 4
    cfg(0, 1); cfg(1, 16'h000E); cfg(2, 16'h0010);
    event_from(1, 2'b01); event_from(3, 2'b01);
    expect_trigs('{}, 0);
    event_from(2, 2'b10);                 // wrong kind
    expect_trigs('{}, 0);
    event_from(2, 2'b01);
    expect_trigs('{4}, 1);
    // events are consumed: one more event is not enough again
    event_from(2, 2'b01);
    expect_trigs('{}, 0);
    check(fire_cnt == 3, $sformatf("fired %0d times, expected 3", fire_cnt));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
