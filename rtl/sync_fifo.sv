// Synchronous FIFO with valid/ready on both sides.
//
// Used as the flit buffer of the NoC routers and as queue elsewhere. A word is
// written when in_valid && in_ready and read when out_valid && out_ready.
// in_ready depends only on the fill level (not on out_ready), so chaining
// FIFOs through combinational arbiters creates no combinational loop. The
// head word is visible on out_data in the cycle after it was written.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [WIDTH-1:0]           in_data,
  input  logic                       in_valid,
  output logic                       in_ready,
  output logic [WIDTH-1:0]           out_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_q, wr_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (cnt_q != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (cnt_q != '0);
  assign out_data  = mem[rd_q];
  assign count     = cnt_q;

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= incr(wr_q);
      if (pop)  rd_q <= incr(rd_q);
      if (push && !pop) cnt_q <= cnt_q + 1'b1;
      else if (pop && !push) cnt_q <= cnt_q - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_q] <= in_data;
  end

endmodule
