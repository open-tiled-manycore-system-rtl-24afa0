// Self-checking testbench for wt_cache.
//
// The bus side is a memory model in the testbench that acks after 1..3
// cycles. Random reads and writes to a small address set (so lines conflict
// and hit) are compared with a reference memory. The testbench also changes
// memory words behind the cache and announces them on the snoop port as
// writes of another master: later reads must return the new value (snoop
// invalidation). It checks the one-cycle latency of read hits, that every
// write reaches the bus (write-through), that snooped writes of the cache's
// own master id are ignored, and that the register region is never cached.
module wt_cache_tb;
  import tile_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  bus_req_t core_req, bus_req;
  bus_rsp_t core_rsp, bus_rsp;
  logic snoop_valid;
  logic [31:0] snoop_addr;
  logic [1:0] snoop_master;
  logic hit_o, inval_o;

  wt_cache #(.LINES(8), .MASTER_ID(1), .MW(2)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [31:0] mem [int];
  logic hit_at_ack;
  int bus_writes = 0, bus_reads = 0, hits = 0, invals = 0;

  function automatic logic [31:0] rd(input logic [31:0] a);
    return mem.exists(a) ? mem[a] : a ^ 32'h5a5a_0000;
  endfunction

  // bus memory model
  initial begin
    bus_rsp = '0;
    forever begin
      @(negedge clk);
      if (bus_req.req && !rst) begin
        repeat ($urandom_range(0, 2)) @(negedge clk);
        bus_rsp.ack = 1;
        if (bus_req.we) begin mem[bus_req.addr] = bus_req.wdata; bus_writes++; end
        else begin bus_rsp.rdata = rd(bus_req.addr); bus_reads++; end
        @(negedge clk);
        bus_rsp = '0;
      end
    end
  end

  always @(posedge clk) begin
    if (hit_o) hits++;
    if (inval_o) invals++;
  end

  task automatic access(input logic we, input logic [31:0] a, input logic [31:0] d, output logic [31:0] r, output int lat);
    @(negedge clk);
    core_req.req = 1; core_req.we = we; core_req.addr = a; core_req.wdata = d;
    lat = 0;
    do begin @(posedge clk); #1; lat++; end while (!core_rsp.ack && lat < 20);
    r = core_rsp.rdata;
    hit_at_ack = hit_o;
    @(negedge clk);
    core_req = '0;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] a, r, d;
    int lat, w0, r0, h0;
    core_req = '0; snoop_valid = 0; snoop_addr = '0; snoop_master = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    // miss then hit
    access(0, 32'h40, 0, r, lat);
    check(r == rd(32'h40), "first read");
    access(0, 32'h40, 0, r, lat);
    check(r == rd(32'h40) && lat == 1, $sformatf("read hit latency %0d", lat));
    // own snoop ignored
    @(negedge clk); snoop_valid = 1; snoop_addr = 32'h40; snoop_master = 2'd1;
    @(negedge clk); snoop_valid = 0;
    access(0, 32'h40, 0, r, lat);
    check(lat == 1, "own snooped write invalidated the line");
    // register region bypasses the cache
    r0 = bus_reads;
    access(0, 32'hE000_0008, 0, r, lat);
    access(0, 32'hE000_0008, 0, r, lat);
    check(bus_reads == r0 + 2, "register region was cached");
    // random traffic with snooped writes by other masters
    for (int n = 0; n < 400; n++) begin
      a = {26'd0, 4'($urandom_range(0, 15)), 2'b00};
      case ($urandom_range(0, 3))
        0: begin
             d = $urandom; w0 = bus_writes;
             access(1, a, d, r, lat);
             check(bus_writes == w0 + 1 && mem[a] == d, "write did not reach the bus");
           end
        1: begin   // another master writes memory
             @(negedge clk);
             mem[a] = $urandom;
             snoop_valid = 1; snoop_addr = a; snoop_master = 2'd2;
             @(negedge clk); snoop_valid = 0;
           end
        default: begin
             h0 = hits;
             access(0, a, 0, r, lat);
             check(r == rd(a), $sformatf("read %h got %h want %h", a, r, rd(a)));
             check((lat == 1) == hit_at_ack, "hit latency");
           end
      endcase
    end
    check(hits > 20, $sformatf("only %0d hits", hits));
    check(invals > 5, $sformatf("only %0d snoop invalidations", invals));
    $display("cache: hits=%0d invalidations=%0d bus_reads=%0d bus_writes=%0d", hits, invals, bus_reads, bus_writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
