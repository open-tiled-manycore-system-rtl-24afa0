// Self-checking testbench for compute_tile with two cores, NoC output looped
// back to its input.
//
// The cores are replaced by testbench tasks that issue data and instruction
// accesses. Checks: data written by core 0 is read by core 1 (miss, then a
// one-cycle hit); after core 0 overwrites it, core 1's cached copy has been
// invalidated by snooping and core 1 reads the new value (write-through
// snooping coherence); instruction fetches through the I$ return memory
// contents; a message sent by core 0 through the adapter is read by core 1
// with irq raised; a DMA transfer from one memory range to another (through
// the NoC) lands in memory, invalidates core 1's stale copy, and is visible
// to core 1.
module compute_tile_tb;
  import lisnoc_pkg::*;
  import tile_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  localparam int C = 2;

  bus_req_t core_ibus_req [C], core_dbus_req [C];
  bus_rsp_t core_ibus_rsp [C], core_dbus_rsp [C];
  logic irq;
  flit_t noc_out_flit, noc_in_flit;
  logic [1:0] noc_out_valid, noc_out_ready, noc_in_valid, noc_in_ready;
  logic [2*C-1:0] cache_hit, cache_inval;

  compute_tile #(.TILE_ID(2), .CORES(C), .MEM_WORDS(1024), .CACHE_LINES(16)) dut (.*);
  assign noc_in_flit   = noc_out_flit;
  assign noc_in_valid  = noc_out_valid;
  assign noc_out_ready = noc_in_ready;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int invals = 0;
  always @(posedge clk) invals += $countones(cache_inval);

  task automatic dacc(input int c, input logic we, input logic [31:0] a, input logic [31:0] d, output logic [31:0] r, output int lat);
    @(negedge clk);
    core_dbus_req[c].req = 1; core_dbus_req[c].we = we; core_dbus_req[c].addr = a; core_dbus_req[c].wdata = d;
    lat = 0;
    do begin @(posedge clk); #1; lat++; end while (!core_dbus_rsp[c].ack && lat < 500);
    r = core_dbus_rsp[c].rdata;
    @(negedge clk);
    core_dbus_req[c] = '0;
  endtask
  task automatic iacc(input int c, input logic [31:0] a, output logic [31:0] r);
    int lat;
    @(negedge clk);
    core_ibus_req[c].req = 1; core_ibus_req[c].we = 0; core_ibus_req[c].addr = a; core_ibus_req[c].wdata = 0;
    lat = 0;
    do begin @(posedge clk); #1; lat++; end while (!core_ibus_rsp[c].ack && lat < 500);
    r = core_ibus_rsp[c].rdata;
    @(negedge clk);
    core_ibus_req[c] = '0;
  endtask

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r, hdr;
    int lat;
    for (int c = 0; c < C; c++) begin core_ibus_req[c] = '0; core_dbus_req[c] = '0; end
    repeat (3) @(posedge clk);
    rst = 0;
    // sharing and coherence
    dacc(0, 1, 32'h40, 32'h1111, r, lat);
    dacc(1, 0, 32'h40, 0, r, lat);  check(r == 32'h1111, "core1 read of core0 data");
    dacc(1, 0, 32'h40, 0, r, lat);  check(r == 32'h1111 && lat == 1, $sformatf("core1 hit (lat %0d)", lat));
    dacc(0, 1, 32'h40, 32'h2222, r, lat);
    dacc(1, 0, 32'h40, 0, r, lat);  check(r == 32'h2222, $sformatf("stale value %h after remote write", r));
    check(invals >= 1, "no snoop invalidation");
    // instruction fetch
    for (int i = 0; i < 8; i++) dacc(0, 1, 32'h200 + 4*i, 32'h1500_0000 + i, r, lat);
    for (int i = 0; i < 8; i++) begin iacc(1, 32'h200 + 4*i, r); check(r == 32'h1500_0000 + i, "fetch"); end
    // message passing core0 -> (loopback) -> core1
    hdr = make_hdr(5'd2, CLASS_MP, 5'd2);
    dacc(0, 1, 32'hE000_0000, hdr, r, lat);
    dacc(0, 1, 32'hE000_0004, 32'hBEEF, r, lat);
    repeat (10) @(posedge clk);
    check(irq, "irq");
    dacc(1, 0, 32'hE000_000C, 0, r, lat); check(r == hdr, "msg header");
    dacc(1, 0, 32'hE000_000C, 0, r, lat); check(r == 32'hBEEF, "msg payload");
    // DMA 0x200..0x21C -> 0x300.., core1 holds a stale copy of 0x300 first
    dacc(0, 1, 32'h300, 32'h0, r, lat);
    dacc(1, 0, 32'h300, 0, r, lat); check(r == 0, "pre-DMA read");
    dacc(0, 1, 32'hE000_0020, 32'h200, r, lat);
    dacc(0, 1, 32'hE000_0024, 32'd2, r, lat);
    dacc(0, 1, 32'hE000_0028, 32'h300, r, lat);
    dacc(0, 1, 32'hE000_002C, 32'd8, r, lat);
    dacc(0, 1, 32'hE000_0030, 32'd1, r, lat);
    do dacc(0, 0, 32'hE000_0034, 0, r, lat); while (r != 8 && checks < 10000);
    for (int i = 0; i < 8; i++) begin
      dacc(1, 0, 32'h300 + 4*i, 0, r, lat);
      check(r == 32'h1500_0000 + i, $sformatf("DMA word %0d = %h", i, r));
    end
    $display("tile: snoop invalidations=%0d", invals);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
