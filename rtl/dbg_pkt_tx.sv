// Debug packet sender: serialises a packet of up to MAXW 16-bit words onto a
// debug ring router's local input. start (while not busy) latches len and the
// words; word 0 must be the header. One word per accepted cycle, the last
// one marked. busy stays high until the last word is taken.
module dbg_pkt_tx
  import dbg_pkg::*;
#(
  parameter int unsigned MAXW = 8
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  logic [$clog2(MAXW+1)-1:0] len,
  input  logic [15:0] words [MAXW],
  output logic        busy,
  output dflit_t      out,
  output logic        out_valid,
  input  logic        out_ready
);

  localparam int unsigned LW = $clog2(MAXW + 1);
  logic [15:0]   buf_q [MAXW];
  logic [LW-1:0] len_q, pos_q;

  assign busy      = (len_q != '0);
  assign out_valid = busy;
  assign out.data  = buf_q[pos_q[$clog2(MAXW)-1:0]];
  assign out.last  = (pos_q == len_q - 1'b1);

  always_ff @(posedge clk) begin
    if (rst) begin
      len_q <= '0;
      pos_q <= '0;
    end else if (!busy) begin
      if (start) begin
        len_q <= len;
        pos_q <= '0;
        buf_q <= words;
      end
    end else if (out_ready) begin
      if (out.last) len_q <= '0;
      else          pos_q <= pos_q + 1'b1;
    end
  end

endmodule
