// Self-checking testbench for memory_tile, NoC output looped back to input.
//
// The local bus port writes a block of data into the tile memory, programs
// the adapter to transfer it (DMA) to another address of the same tile over
// the NoC, waits for the received-word counter, and reads the copy back.
module memory_tile_tb;
  import lisnoc_pkg::*;
  import tile_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  bus_req_t ext_req;
  bus_rsp_t ext_rsp;
  logic irq;
  flit_t noc_out_flit, noc_in_flit;
  logic [1:0] noc_out_valid, noc_out_ready, noc_in_valid, noc_in_ready;

  memory_tile #(.TILE_ID(1), .MEM_WORDS(1024)) dut (.*);
  assign noc_in_flit   = noc_out_flit;
  assign noc_in_valid  = noc_out_valid;
  assign noc_out_ready = noc_in_ready;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic acc(input logic we, input logic [31:0] a, input logic [31:0] d, output logic [31:0] r);
    int lat;
    @(negedge clk);
    ext_req.req = 1; ext_req.we = we; ext_req.addr = a; ext_req.wdata = d;
    lat = 0;
    do begin @(negedge clk); #1; lat++; end while (!ext_rsp.ack && lat < 500);
    r = ext_rsp.rdata;
    @(negedge clk);
    ext_req = '0;
  endtask

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    int n;
    ext_req = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 16; i++) acc(1, 32'h80 + 4*i, 32'h7700 + i*3, r);
    for (int i = 0; i < 16; i++) begin acc(0, 32'h80 + 4*i, 0, r); check(r == 32'h7700 + i*3, "memory write/read"); end
    acc(1, 32'hE000_0020, 32'h80, r);
    acc(1, 32'hE000_0024, 32'd1, r);
    acc(1, 32'hE000_0028, 32'h400, r);
    acc(1, 32'hE000_002C, 32'd16, r);
    acc(1, 32'hE000_0030, 32'd1, r);
    n = 0;
    do begin acc(0, 32'hE000_0034, 0, r); n++; end while (r != 16 && n < 200);
    check(r == 16, "DMA words received");
    for (int i = 0; i < 16; i++) begin acc(0, 32'h400 + 4*i, 0, r); check(r == 32'h7700 + i*3, $sformatf("copied word %0d = %h", i, r)); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
