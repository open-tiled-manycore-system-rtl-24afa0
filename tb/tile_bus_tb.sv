// Self-checking testbench for tile_bus with three masters.
//
// Each master issues random reads and writes to the memory region, the
// network adapter region and an unmapped region. Both slaves are modelled
// in the testbench (memory: ack after 1..3 cycles; registers: ack after 1
// cycle, read data tagged with the register region). The testbench checks
// that read data comes back from the addressed slave, that at most one slave
// request is active at a time, that each completed write appears once on the
// snoop port with the writing master's index, that unmapped accesses are
// acked with zero, and that all three masters were served (round robin).
module tile_bus_tb;
  import tile_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  localparam int NM = 3;

  bus_req_t m_req [NM];
  bus_rsp_t m_rsp [NM];
  bus_req_t mem_req, na_req;
  bus_rsp_t mem_rsp, na_rsp;
  logic snoop_valid;
  logic [31:0] snoop_addr;
  logic [1:0] snoop_master;

  tile_bus #(.NM(NM)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [31:0] mem [int];
  int snoops [NM];
  int writes [NM];
  int served [NM];

  initial begin
    mem_rsp = '0;
    forever begin
      @(negedge clk);
      if (mem_req.req && !rst) begin
        repeat ($urandom_range(0, 2)) @(negedge clk);
        mem_rsp.ack = 1;
        if (mem_req.we) mem[mem_req.addr] = mem_req.wdata;
        else mem_rsp.rdata = mem.exists(mem_req.addr) ? mem[mem_req.addr] : 32'h0;
        @(negedge clk);
        mem_rsp = '0;
      end
    end
  end
  initial begin
    na_rsp = '0;
    forever begin
      @(negedge clk);
      if (na_req.req && !rst) begin
        na_rsp.ack = 1;
        na_rsp.rdata = 32'hE0E0_0000 | na_req.addr[15:0];
        @(negedge clk);
        na_rsp = '0;
      end
    end
  end

  always @(posedge clk) if (!rst) begin
    check(!(mem_req.req && na_req.req), "two slaves selected");
    if (snoop_valid) snoops[snoop_master]++;
  end

  task automatic master(input int m);
    logic [31:0] a, d, exp;
    int kind, lat;
    for (int n = 0; n < 60; n++) begin
      kind = $urandom_range(0, 9);
      if (kind < 6)      a = {20'd0, 4'(m), 6'($urandom_range(0, 63)), 2'b00};
      else if (kind < 9) a = {4'hE, 20'd0, 6'($urandom_range(0, 63)), 2'b00};
      else               a = {4'h5, 28'h100};
      d = $urandom;
      @(negedge clk);
      m_req[m].req = 1; m_req[m].we = $urandom_range(0, 1); m_req[m].addr = a; m_req[m].wdata = d;
      if (kind < 6 && !m_req[m].we) exp = mem.exists(a) ? mem[a] : 0;
      else if (kind < 9) exp = 32'hE0E0_0000 | a[15:0];
      else exp = 0;
      lat = 0;
      do begin @(negedge clk); #1; lat++; end while (!m_rsp[m].ack && lat < 200);
      check(lat < 200, $sformatf("no ack m%0d a=%h busy=%0d g=%0d memreq=%0d nareq=%0d", m, a, dut.busy_q, dut.grant_q, mem_req.req, na_req.req));
      if (!m_req[m].we) check(m_rsp[m].rdata == exp, $sformatf("m%0d read %h got %h want %h", m, a, m_rsp[m].rdata, exp));
      if (m_req[m].we && kind < 9) writes[m]++;
      if (m_req[m].we && kind >= 9) writes[m]++;
      if (m_req[m].we && kind < 6) check(mem[a] == d, "write not in memory");
      served[m]++;
      @(negedge clk);
      m_req[m] = '0;
      repeat ($urandom_range(0, 2)) @(posedge clk);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < NM; m++) begin m_req[m] = '0; snoops[m] = 0; writes[m] = 0; served[m] = 0; end
    repeat (3) @(posedge clk);
    rst = 0;
    fork
      master(0);
      master(1);
      master(2);
    join
    repeat (3) @(posedge clk);
    for (int m = 0; m < NM; m++) begin
      check(snoops[m] == writes[m], $sformatf("m%0d: %0d snooped writes, %0d writes", m, snoops[m], writes[m]));
      check(served[m] == 60, "master not fully served");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
