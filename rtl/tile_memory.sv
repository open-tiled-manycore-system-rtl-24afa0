// Locally shared tile memory: a single-port word-addressed SRAM array with a
// tile bus slave interface.
//
// A request is acked one cycle after it is seen (ack pulse, then the request
// is gone); reads return the word in that ack cycle. Word accesses only;
// address bits [1:0] are ignored and the address wraps at MEM_WORDS. The
// paper names the memory but gives no size; 8192 words (32 KiB) is this
// design's default.
module tile_memory
  import tile_pkg::*;
#(
  parameter int unsigned MEM_WORDS = 8192
) (
  input  logic     clk,
  input  logic     rst,
  input  bus_req_t req,
  output bus_rsp_t rsp
);

  localparam int unsigned AW = $clog2(MEM_WORDS);

  logic [31:0] mem [MEM_WORDS];
  logic        ack_q;
  logic [31:0] rdata_q;
  wire  [AW-1:0] idx = req.addr[AW+1:2];

  always_ff @(posedge clk) begin
    if (rst) ack_q <= 1'b0;
    else     ack_q <= req.req && !ack_q;
  end

  always_ff @(posedge clk) begin
    if (req.req && !ack_q) begin
      if (req.we) mem[idx] <= req.wdata;
      rdata_q <= mem[idx];
    end
  end

  assign rsp.ack   = ack_q;
  assign rsp.rdata = rdata_q;

endmodule
