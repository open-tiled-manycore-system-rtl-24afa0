// Self-checking testbench for tile_memory: random word writes and reads
// against a reference array, checking the one-cycle ack latency and that
// each request is acked exactly once.
module tile_memory_tb;
  import tile_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  bus_req_t req;
  bus_rsp_t rsp;
  tile_memory #(.MEM_WORDS(256)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [31:0] ref_mem [256];
  logic [255:0] written = '0;

  task automatic access(input logic we, input logic [31:0] addr, input logic [31:0] wdata, output logic [31:0] rdata);
    int lat;
    @(negedge clk);
    req.req = 1; req.we = we; req.addr = addr; req.wdata = wdata;
    lat = 0;
    do begin @(posedge clk); #1; lat++; end while (!rsp.ack && lat < 10);
    check(lat == 1, $sformatf("ack latency %0d", lat));
    rdata = rsp.rdata;
    @(negedge clk);
    req = '0;
    @(posedge clk); #1;
    check(!rsp.ack, "second ack");
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r, a, d;
    req = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 300; n++) begin
      a = {22'd0, 8'($urandom_range(0, 255)), 2'b00};
      if ($urandom_range(0, 1) == 0 || !written[a[9:2]]) begin
        d = $urandom;
        access(1, a, d, r);
        ref_mem[a[9:2]] = d;
        written[a[9:2]] = 1;
      end else begin
        access(0, a, 0, r);
        check(r == ref_mem[a[9:2]], $sformatf("read %h got %h want %h", a, r, ref_mem[a[9:2]]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
