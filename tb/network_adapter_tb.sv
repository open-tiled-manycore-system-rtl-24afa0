// Self-checking testbench for network_adapter, with its NoC output looped
// back to its NoC input (the tile sends to itself).
//
// The register port is driven like a core would; the two DMA master ports
// are served by a memory model in the testbench. Checks: a message written
// word by word comes back in the receive buffer with header and payload and
// the end-of-packet flag; single-word packets; the receive counter and irq;
// a DMA transfer of LEN words from one address range arrives, via the NoC,
// written to the remote address range, with DMA_RXCNT counting the words and
// the busy flag clearing; filling the receive buffer back-pressures the
// sender so that a further TX write stalls until software drains the buffer.
module network_adapter_tb;
  import lisnoc_pkg::*;
  import tile_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  bus_req_t s_req, dma_rd_req, dma_wr_req;
  bus_rsp_t s_rsp, dma_rd_rsp, dma_wr_rsp;
  flit_t noc_out_flit, noc_in_flit;
  logic [1:0] noc_out_valid, noc_out_ready, noc_in_valid, noc_in_ready;
  logic irq;

  network_adapter #(.TILE_ID(3), .RX_DEPTH(8)) dut (.*);

  // loopback
  assign noc_in_flit   = noc_out_flit;
  assign noc_in_valid  = noc_out_valid;
  assign noc_out_ready = noc_in_ready;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [31:0] mem [int];
  initial begin
    dma_rd_rsp = '0;
    forever begin
      @(negedge clk);
      if (dma_rd_req.req && !rst) begin
        repeat ($urandom_range(0, 2)) @(negedge clk);
        dma_rd_rsp.ack = 1;
        dma_rd_rsp.rdata = mem.exists(dma_rd_req.addr) ? mem[dma_rd_req.addr] : 32'hDEAD;
        @(negedge clk);
        dma_rd_rsp = '0;
      end
    end
  end
  initial begin
    dma_wr_rsp = '0;
    forever begin
      @(negedge clk);
      if (dma_wr_req.req && !rst) begin
        repeat ($urandom_range(0, 2)) @(negedge clk);
        dma_wr_rsp.ack = 1;
        mem[dma_wr_req.addr] = dma_wr_req.wdata;
        @(negedge clk);
        dma_wr_rsp = '0;
      end
    end
  end

  task automatic reg_access(input logic we, input logic [7:0] off, input logic [31:0] d, output logic [31:0] r, output int lat);
    @(negedge clk);
    s_req.req = 1; s_req.we = we; s_req.addr = {24'hE00000, off}; s_req.wdata = d;
    lat = 0;
    do begin @(posedge clk); #1; lat++; end while (!s_rsp.ack && lat < 100);
    r = s_rsp.rdata;
    @(negedge clk);
    s_req = '0;
  endtask
  task automatic wr(input logic [7:0] off, input logic [31:0] d);
    logic [31:0] r; int lat;
    reg_access(1, off, d, r, lat);
  endtask
  logic [31:0] rv;
  int lat;

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] hdr;
    s_req = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    // ---- message of 4 words ----
    hdr = make_hdr(5'd3, CLASS_MP, 5'd3) | 32'h123;
    wr(NA_MP_TX, hdr);
    wr(NA_MP_TX, 32'hA1);
    wr(NA_MP_TX, 32'hA2);
    wr(NA_MP_TX_LAST, 32'hA3);
    repeat (10) @(posedge clk);
    check(irq, "irq not raised");
    reg_access(0, NA_MP_RX_CNT, 0, rv, lat);
    check(rv == 4, $sformatf("rx count %0d", rv));
    reg_access(0, NA_MP_RX_DATA, 0, rv, lat); check(rv == hdr, "header word");
    reg_access(0, NA_MP_RX_DATA, 0, rv, lat); check(rv == 32'hA1, "payload 1");
    reg_access(0, NA_MP_RX_DATA, 0, rv, lat); check(rv == 32'hA2, "payload 2");
    reg_access(0, NA_MP_STATUS, 0, rv, lat);  check(rv[1] == 0, "end flag too early");
    reg_access(0, NA_MP_RX_DATA, 0, rv, lat); check(rv == 32'hA3, "payload 3");
    reg_access(0, NA_MP_STATUS, 0, rv, lat);  check(rv == 32'b10, $sformatf("status %b", rv));
    check(!irq, "irq still set");
    // ---- single-word packet ----
    wr(NA_MP_TX_LAST, hdr);
    repeat (8) @(posedge clk);
    reg_access(0, NA_MP_RX_DATA, 0, rv, lat); check(rv == hdr, "single word");
    reg_access(0, NA_MP_STATUS, 0, rv, lat);  check(rv[1] == 1, "single word end flag");
    // ---- DMA of 12 words 0x100.. -> 0x800.. ----
    for (int i = 0; i < 12; i++) mem[32'h100 + 4*i] = 32'hC000 + i;
    wr(NA_DMA_LADDR, 32'h100);
    wr(NA_DMA_RTILE, 32'd3);
    wr(NA_DMA_RADDR, 32'h800);
    wr(NA_DMA_LEN, 32'd12);
    wr(NA_DMA_CTRL, 32'd1);
    reg_access(0, NA_DMA_CTRL, 0, rv, lat); check(rv[0] == 1, "DMA not busy after start");
    repeat (150) @(posedge clk);
    reg_access(0, NA_DMA_CTRL, 0, rv, lat); check(rv[0] == 0, "DMA still busy");
    reg_access(0, NA_DMA_RXCNT, 0, rv, lat); check(rv == 12, $sformatf("DMA rx count %0d", rv));
    for (int i = 0; i < 12; i++)
      check(mem.exists(32'h800 + 4*i) && mem[32'h800 + 4*i] == 32'hC000 + i, $sformatf("DMA word %0d", i));
    check(!mem.exists(32'h800 + 48), "DMA wrote past its end");
    // ---- back-pressure: RX (8) + TX (16) fill, the next TX write stalls ----
    wr(NA_MP_TX, hdr);
    for (int i = 0; i < 23; i++) wr(NA_MP_TX, 32'(i));
    reg_access(1, NA_MP_TX, 32'd99, rv, lat);
    check(lat >= 100, $sformatf("TX write to full buffers acked after %0d cycles", lat));
    s_req = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
